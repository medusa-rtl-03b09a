// tb_write_ob_write_ctrl: self-checking test of the write network's output
// buffer writing controller (4 ports, 4-line regions), with the pipelined
// rotation unit (2 cycles). Reference models stand in for the double
// input buffer (asynchronous read), the rotation unit and the deep output
// buffer. Ports offer complete lines at random times; the consumer head
// pointers (driven here) advance slowly, so regions fill up. Checks: each
// line lands in the right slot with word j in bank j, tail advances only
// after the line is fully written, no region ever holds more than 4 lines,
// input halves are released after exactly N reads, and a full region was
// seen to hold a port back.
module tb_write_ob_write_ctrl;
  localparam int N = 4, MB = 4, PW = 3, AW = 4, W = 16, LGN = 2, R = 2;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n;
  logic [N-1:0] line_ready, release_line, ob_we, busy;
  logic [N-1:0][LGN-1:0] ib_raddr;
  logic [LGN-1:0] rot_amt;
  logic [N-1:0][AW-1:0] ob_waddr;
  logic [N-1:0][PW-1:0] head, tail;

  write_ob_write_ctrl #(.N_PORTS(N), .MAX_BURST(MB), .ROT_PIPE(1'b1)) dut (.*);

  logic [W-1:0] obmem [N][N*MB];
  logic [W-1:0] rotpipe [R+1][N];
  int offered [N], released [N], m_head [N], m_tail [N], reads [N], held = 0;

  function automatic logic [W-1:0] pat(int p, int seq, int w);
    return {4'(p), 6'(seq), 6'(w)};
  endfunction
  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", msg, $time); end
  endtask

  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit rel_p [N];
    bit we_p [N];
    int wa_p [N];
    logic [W-1:0] rin [N];
    rst_n = 0; line_ready = '0; head = '0;
    for (int p = 0; p < N; p++) begin offered[p] = 0; released[p] = 0; m_head[p] = 0; m_tail[p] = 0; reads[p] = 0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      for (int p = 0; p < N; p++) begin
        // a new line appears some cycles after the previous was released
        if (!line_ready[p] && cyc < 1700 && $urandom % 4 == 0) begin line_ready[p] = 1; offered[p]++; end
        head[p] = PW'(m_head[p]);
      end
      @(negedge clk);
      for (int p = 0; p < N; p++) begin
        // the line currently offered by port p is number released[p]
        rin[p] = pat(p, released[p], int'(ib_raddr[p]));
        if (busy[p]) begin
          chk(line_ready[p], "reads only a ready line");
          reads[p]++;
        end
        rel_p[p] = release_line[p];
        if (line_ready[p] && !busy[p]) begin
          chk(released[p] - m_head[p] == MB, "waits only on a full region");
          held++;
        end
        we_p[p] = ob_we[p]; wa_p[p] = int'(ob_waddr[p]);
      end
      // rotation model: left by rot_amt, R cycles of latency
      for (int k = 0; k < N; k++) rotpipe[0][k] = rin[(k + int'(rot_amt)) % N];
      @(posedge clk); #1;
      for (int j = 0; j < N; j++) if (we_p[j]) obmem[j][wa_p[j]] = rotpipe[R][j];
      for (int s = R; s > 0; s--) rotpipe[s] = rotpipe[s-1];
      for (int p = 0; p < N; p++) begin
        if (rel_p[p]) begin
          chk(reads[p] == N, "N reads per line");
          reads[p] = 0; released[p]++; line_ready[p] = 0;
        end
        // tail just advanced: the line must be complete in its slot
        while (((int'(tail[p]) - m_tail[p]) & 7) != 0) begin
          for (int w = 0; w < N; w++)
            chk(obmem[w][p * MB + (m_tail[p] % MB)] == pat(p, m_tail[p], w), "line in output buffer");
          m_tail[p]++;
        end
        chk(((m_tail[p] - m_head[p]) & 7) <= MB, "region bound");
        if (m_head[p] != m_tail[p] && $urandom % ((cyc < 1000) ? 40 : 3) == 0) m_head[p]++;
      end
    end
    for (int p = 0; p < N; p++) chk(m_tail[p] == released[p] && released[p] > 20, "all lines through");
    chk(held > 0, "full region held a port");
    $display("lines=%0d held=%0d", m_tail[0], held);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
