// tb_write_ob_read_ctrl: self-checking test of the write network's output
// buffer reading controller (4 ports, 4-line regions). A model of the deep
// output buffer (registered read) is filled with numbered lines and the tail
// pointers are advanced here; an arbiter model requests lines only for
// ports that have a complete line, as the arbiter must. Checks: lines_avail, wreq_ready, bank read address, and
// that each port's lines come out in order, whole, one cycle after the
// request, at up to one line per cycle.
module tb_write_ob_read_ctrl;
  localparam int N = 4, MB = 4, PW = 3, AW = 4, W = 16, LGN = 2;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, wreq_valid, wreq_ready, dram_wvalid;
  logic [LGN-1:0] wreq_port, dram_wport;
  logic [N-1:0][PW-1:0] tail, head, lines_avail;
  logic [N-1:0] ob_re;
  logic [N-1:0][AW-1:0] ob_raddr;
  logic [N-1:0][W-1:0] ob_rdata, dram_wdata;

  write_ob_read_ctrl #(.N_PORTS(N), .W_ACC(W), .MAX_BURST(MB)) dut (.*);

  logic [W-1:0] obmem [N][N*MB];
  int m_tail [N], m_head [N], got [N], refused = 0 /* cycles with no complete line */, back_to_back = 0;
  bit exp_valid = 0;
  int exp_port = 0;

  function automatic logic [W-1:0] pat(int p, int seq, int w);
    return {4'(p), 6'(seq), 6'(w)};
  endfunction
  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", msg, $time); end
  endtask

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit acc, re_p [N];
    int ra_p [N], add;
    rst_n = 0; wreq_valid = 0; wreq_port = '0; tail = '0; ob_rdata = '0;
    for (int p = 0; p < N; p++) begin m_tail[p] = 0; m_head[p] = 0; got[p] = 0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int cyc = 0; cyc < 1500; cyc++) begin
      add = -1;
      if ($urandom % 2 == 0) begin
        add = int'($urandom % N);
        if (m_tail[add] - m_head[add] >= MB) add = -1;
      end
      for (int p = 0; p < N; p++) tail[p] = PW'(m_tail[p]);
      // arbiter: a random port among those with a complete line
      wreq_valid = 0;
      if ($urandom % 4 != 0) begin
        int p0;
        p0 = int'($urandom % N);
        for (int i = 0; i < N; i++)
          if (!wreq_valid && m_tail[(p0 + i) % N] != m_head[(p0 + i) % N]) begin
            wreq_valid = 1; wreq_port = LGN'((p0 + i) % N);
          end
        if (!wreq_valid) begin wreq_port = LGN'(p0); refused++; end
      end
      @(negedge clk);
      // registered line from the previous request
      chk(dram_wvalid == exp_valid, "wvalid");
      if (exp_valid) begin
        chk(dram_wport == LGN'(exp_port), "wport");
        for (int w = 0; w < N; w++) chk(dram_wdata[w] == pat(exp_port, got[exp_port], w), "wdata");
        got[exp_port]++;
      end
      for (int p = 0; p < N; p++) chk(lines_avail[p] == PW'(m_tail[p] - m_head[p]), "lines_avail");
      chk(wreq_ready == (m_tail[wreq_port] != m_head[wreq_port]), "wreq_ready");
      acc = wreq_valid && wreq_ready;
      if (acc && exp_valid) back_to_back++;
      for (int b = 0; b < N; b++) begin
        re_p[b] = ob_re[b]; ra_p[b] = int'(ob_raddr[b]);
        if (acc) chk(ra_p[b] == int'(wreq_port) * MB + m_head[wreq_port] % MB, "raddr");
      end
      @(posedge clk); #1;
      for (int b = 0; b < N; b++) if (re_p[b]) ob_rdata[b] = obmem[b][ra_p[b]];
      exp_valid = acc; exp_port = int'(wreq_port);
      if (acc) m_head[wreq_port]++;
      if (add >= 0) begin
        for (int w = 0; w < N; w++) obmem[w][add * MB + m_tail[add] % MB] = pat(add, m_tail[add], w);
        m_tail[add]++;
      end
    end
    chk(refused > 0 && back_to_back > 0, "empty ports and back-to-back lines seen");
    $display("lines=%0d refused=%0d b2b=%0d", got[0], refused, back_to_back);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
