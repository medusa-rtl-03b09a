// tb_read_ib_write_ctrl: self-checking test of the read network's input
// buffer writing controller (4 ports, 4-line regions). Lines tagged with
// random ports are offered; the test checks the bank write command (every
// bank, address port*4 + slot, word j to bank j), the tail pointers, the
// free-slot count, and that a port whose region is full is refused until
// its head pointer (driven here) moves.
module tb_read_ib_write_ctrl;
  localparam int N = 4, W = 16, MB = 4, PW = 3, AW = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, dram_rvalid, dram_rready;
  logic [1:0] dram_rport;
  logic [N-1:0][W-1:0] dram_rdata, ib_wdata;
  logic [N-1:0][PW-1:0] head, tail, lines_free;
  logic [N-1:0] ib_we;
  logic [N-1:0][AW-1:0] ib_waddr;
  int m_tail [N], m_head [N];
  int refused = 0;
  bit hold = 0;

  read_ib_write_ctrl #(.N_PORTS(N), .W_ACC(W), .MAX_BURST(MB)) dut (.*);

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
    rst_n = 0; dram_rvalid = 0; dram_rport = 0; dram_rdata = '0; head = '0;
    for (int p = 0; p < N; p++) begin m_tail[p] = 0; m_head[p] = 0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int it = 0; it < 600; it++) begin
      // random head movement (the consumer), never past the tail
      for (int p = 0; p < N; p++)
        if (m_head[p] != m_tail[p] && $urandom % 8 == 0) m_head[p]++;
      for (int p = 0; p < N; p++) head[p] = PW'(m_head[p]);
      if (!hold) begin
        dram_rvalid = 1'($urandom);
        dram_rport  = 2'($urandom % 3);   // port 3 never used: its tail must stay
        for (int b = 0; b < N; b++) dram_rdata[b] = W'($urandom);
      end
      #1;
      for (int p = 0; p < N; p++) begin
        chk(tail[p] == PW'(m_tail[p]), "tail");
        chk(lines_free[p] == PW'(MB - (m_tail[p] - m_head[p])), "lines_free");
      end
      chk(dram_rready == ((m_tail[dram_rport] - m_head[dram_rport]) < MB), "ready");
      if (dram_rvalid && dram_rready) begin
        for (int b = 0; b < N; b++) begin
          chk(ib_we[b], "we");
          chk(ib_waddr[b] == AW'(int'(dram_rport) * MB + (m_tail[dram_rport] % MB)), "waddr");
          chk(ib_wdata[b] == dram_rdata[b], "wdata");
        end
      end else begin
        chk(ib_we == '0, "no we");
        if (dram_rvalid) refused++;
      end
      hold = dram_rvalid && !dram_rready;
      @(posedge clk);
      if (dram_rvalid && dram_rready) m_tail[dram_rport]++;
      #1;
    end
    chk(refused > 0, "a full region was seen");
    $display("refused=%0d", refused);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
