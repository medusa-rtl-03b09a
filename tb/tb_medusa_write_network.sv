// tb_medusa_write_network: end-to-end test of the memory-write network
// (8 ports x 16 bits = 128-bit lines, 4-line regions, pipelined rotation).
// Accelerator ports write numbered words; an arbiter model requests lines
// for ports that have complete lines (lines_avail) and the DRAM side checks
// that each port's lines arrive whole and in order. Phases:
//  1. latency: the last word of a line written into an idle network makes
//     the line available exactly N + R + 1 cycles later (R = 3),
//  2. bandwidth: all ports write every cycle and the arbiter drains every
//     cycle: no port is ever stalled and one line per cycle leaves,
//  3. random traffic with a slow arbiter, to fill the regions (transposition
//     held back) and the input double buffers (acc_wready low), with ports
//     joining the rotation at any phase.
module tb_medusa_write_network;
  localparam int N = 8, W = 16, MB = 4, LGN = 3, PW = 3;
  localparam bit PIPE = 1'b1;
  localparam int R = PIPE ? LGN : 0;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, wreq_valid, wreq_ready, dram_wvalid;
  logic [LGN-1:0] wreq_port, dram_wport;
  logic [N-1:0] acc_wvalid, acc_wready, busy;
  logic [N-1:0][W-1:0] acc_wdata, dram_wdata;
  logic [N-1:0][PW-1:0] lines_avail;

  medusa_write_network #(.N_PORTS(N), .W_ACC(W), .MAX_BURST(MB), .ROT_PIPE(PIPE)) dut (.*);

  int pushed [N], got_lines [N];
  int stalls = 0, region_full = 0, joins = 0, lines_out = 0, phase = 0;
  logic [N-1:0] prev_busy = '0;

  function automatic logic [W-1:0] pat(int p, int idx);
    return {3'(p), 13'(idx)};
  endfunction
  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", msg, $time); end
  endtask

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cycle();
    bit push [N];
    @(negedge clk);
    for (int p = 0; p < N; p++) begin
      push[p] = acc_wvalid[p] && acc_wready[p];
      if (acc_wvalid[p] && !acc_wready[p]) stalls++;
      if (dut.line_ready[p] && !busy[p]) region_full++;
      if (busy[p] && !prev_busy[p] && phase != 0 && (busy & ~(N'(1) << p)) != '0) joins++;
    end
    prev_busy = busy;
    if (dram_wvalid) begin
      for (int w = 0; w < N; w++)
        chk(dram_wdata[w] == pat(int'(dram_wport), got_lines[dram_wport] * N + w), "line content");
      got_lines[dram_wport]++;
      lines_out++;
    end
    @(posedge clk); #1;
    phase = (phase + 1) % N;
    for (int p = 0; p < N; p++) if (push[p]) pushed[p]++;
    for (int p = 0; p < N; p++) acc_wdata[p] = pat(p, pushed[p]);
  endtask

  // arbiter: request a port with a complete line, round robin from `from`
  task automatic arbitrate(input int from);
    wreq_valid = 0;
    for (int i = 0; i < N; i++) begin
      int p;
      p = (from + i) % N;
      if (lines_avail[p] != '0) begin wreq_valid = 1; wreq_port = LGN'(p); break; end
    end
  endtask

  initial begin
    int lat, out0;
    rst_n = 0; wreq_valid = 0; wreq_port = '0; acc_wvalid = '0;
    for (int p = 0; p < N; p++) begin pushed[p] = 0; got_lines[p] = 0; acc_wdata[p] = pat(p, 0); end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (3) cycle();
    // ---- 1. latency
    acc_wvalid[5] = 1;
    repeat (N) cycle();
    acc_wvalid[5] = 0;
    lat = -1;
    for (int c = 1; c < 100 && lat < 0; c++) begin
      if (lines_avail[5] != '0) lat = c;
      cycle();
    end
    chk(lat == N + R + 1, "write latency");
    $display("latency = %0d cycles (expected %0d)", lat, N + R + 1);
    arbitrate(5);
    cycle();
    wreq_valid = 0;
    repeat (2) cycle();
    // ---- 2. bandwidth
    acc_wvalid = '1;
    repeat (4 * N) begin arbitrate(phase); cycle(); end
    out0 = lines_out;
    stalls = 0;
    for (int c = 0; c < 40 * N; c++) begin arbitrate(c); cycle(); end
    chk(stalls == 0, "no stall at full rate");
    chk(lines_out - out0 >= 40 * N - 1, "one line per cycle");
    $display("bandwidth: %0d lines in %0d cycles, stalls %0d", lines_out - out0, 40 * N, stalls);
    // ---- 3. random traffic, slow arbiter
    for (int c = 0; c < 3000; c++) begin
      for (int p = 0; p < N; p++) acc_wvalid[p] = 1'($urandom);
      if ($urandom % 5 == 0) arbitrate(int'($urandom % N)); else wreq_valid = 0;
      cycle();
    end
    acc_wvalid = '0;
    for (int c = 0; c < 40 * N * MB; c++) begin arbitrate(c); cycle(); end
    for (int p = 0; p < N; p++) chk(got_lines[p] * N == pushed[p] - pushed[p] % N, "all complete lines delivered");
    chk(stalls > 0, "accelerator back pressure seen");
    chk(region_full > 0, "full output region held a port");
    chk(joins > 0, "port joined mid-rotation");
    $display("lines=%0d stalls=%0d region_full=%0d joins=%0d", lines_out, stalls, region_full, joins);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
