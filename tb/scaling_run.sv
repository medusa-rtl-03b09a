// scaling_run: one interconnect of N ports (USED of them connected) with
// DRAM, arbiter and accelerator models, for tb_medusa_scaling. Runs 3000
// cycles of random traffic, drains, and reports its check and failure
// counts; raises `done` at the end.
module scaling_run #(
  parameter int N    = 8,
  parameter int USED = 8,
  parameter int LGN  = 3
) (
  input  logic clk,
  output int   checks_o,
  output int   failures_o,
  output logic done
);
  localparam int W = 16, MB = 32, PW = 6;
  int checks = 0, failures = 0;
  assign checks_o = checks;
  assign failures_o = failures;

  logic rst_n;
  logic dram_rvalid, dram_rready, wreq_valid, wreq_ready, dram_wvalid;
  logic [LGN-1:0] dram_rport, wreq_port, dram_wport;
  logic [N-1:0][W-1:0] dram_rdata, acc_rdata, acc_wdata, dram_wdata;
  logic [N-1:0][PW-1:0] rd_lines_free, wr_lines_avail;
  logic [N-1:0] acc_rvalid, acc_rready, acc_wvalid, acc_wready, rd_busy, wr_busy;

  medusa_top #(.N_PORTS(N)) dut (.*);

  logic [W-1:0] rq [N][$];
  int pushed [N], got_lines [N];
  bit hold = 0;

  function automatic logic [W-1:0] wpat(int p, int idx);
    return {6'(p), 10'(idx)};
  endfunction
  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL N=%0d %s at %0t", N, msg, $time); end
  endtask

  task automatic cycle();
    bit push [N];
    @(negedge clk);
    hold = dram_rvalid && !dram_rready;
    if (dram_rvalid && dram_rready)
      for (int w = 0; w < N; w++) rq[dram_rport].push_back(dram_rdata[w]);
    for (int p = 0; p < N; p++) begin
      if (acc_rvalid[p] && acc_rready[p]) begin
        chk(rq[p].size() > 0, "read word expected");
        if (rq[p].size() > 0) chk(acc_rdata[p] == rq[p].pop_front(), "read word");
      end
      if (p >= USED) chk(!acc_rvalid[p] && wr_lines_avail[p] == '0, "unused port idle");
      push[p] = acc_wvalid[p] && acc_wready[p];
    end
    if (dram_wvalid) begin
      for (int w = 0; w < N; w++)
        chk(dram_wdata[w] == wpat(int'(dram_wport), got_lines[dram_wport] * N + w), "write line");
      got_lines[dram_wport]++;
    end
    @(posedge clk); #1;
    for (int p = 0; p < N; p++) if (push[p]) pushed[p]++;
    for (int p = 0; p < N; p++) acc_wdata[p] = wpat(p, pushed[p]);
  endtask

  task automatic arbitrate(input int from);
    wreq_valid = 0;
    for (int i = 0; i < N; i++) begin
      int p;
      p = (from + i) % N;
      if (wr_lines_avail[p] != '0) begin wreq_valid = 1; wreq_port = LGN'(p); break; end
    end
  endtask

  initial begin
    done = 0;
    rst_n = 0; dram_rvalid = 0; dram_rport = '0; dram_rdata = '0;
    acc_rready = '0; acc_wvalid = '0; wreq_valid = 0; wreq_port = '0;
    for (int p = 0; p < N; p++) begin pushed[p] = 0; got_lines[p] = 0; acc_wdata[p] = wpat(p, 0); end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      if (!hold) begin
        if ($urandom % 5 != 0) begin
          dram_rvalid = 1; dram_rport = LGN'($urandom % USED);
          for (int w = 0; w < N; w++) dram_rdata[w] = W'($urandom);
        end else dram_rvalid = 0;
      end
      for (int p = 0; p < USED; p++) begin
        acc_rready[p] = 1'($urandom);
        acc_wvalid[p] = 1'($urandom);
      end
      if ($urandom % 3 != 0) arbitrate(int'($urandom % N)); else wreq_valid = 0;
      cycle();
    end
    acc_rready[USED-1:0] = '1; acc_wvalid = '0; wreq_valid = 0;
    while (hold) cycle();
    dram_rvalid = 0;
    for (int t = 0; t < 80 * N; t++) begin arbitrate(t); cycle(); end
    wreq_valid = 0;
    for (int p = 0; p < USED; p++) begin
      chk(rq[p].size() == 0, "all read words delivered");
      chk(got_lines[p] * N == pushed[p] - pushed[p] % N && got_lines[p] > 10, "all write lines delivered");
    end
    $display("N=%0d used=%0d: checks=%0d failures=%0d", N, USED, checks, failures);
    done = 1;
  end
endmodule
