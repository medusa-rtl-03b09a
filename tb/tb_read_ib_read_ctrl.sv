// tb_read_ib_read_ctrl: self-checking test of the read network's input
// buffer reading controller (4 ports, 4-line regions, single-cycle rotation).
// The test surrounds the controller with reference models of the deep input
// buffer (registered read), the rotation unit and the per-port output
// double buffer, all written here from the paper's description. Lines with
// known contents arrive at random ports; the accelerator drains output
// halves at random times. Every committed output half must hold exactly the
// next line of its port in word order, each line must take N busy cycles,
// and ports must be seen starting at a non-zero phase while others run.
// Inputs are driven just after the rising edge and outputs sampled at the
// falling edge.
module tb_read_ib_read_ctrl;
  localparam int N = 4, MB = 4, PW = 3, AW = 4, W = 16, LGN = 2;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n;
  logic [N-1:0][PW-1:0] tail, head;
  logic [N-1:0] ib_re, ob_we, ob_commit, busy;
  logic [N-1:0][AW-1:0] ib_raddr;
  logic [LGN-1:0] rot_amt;
  logic [N-1:0][1:0] ob_half_free;
  logic [N-1:0][LGN:0] ob_waddr;

  read_ib_read_ctrl #(.N_PORTS(N), .MAX_BURST(MB), .ROT_PIPE(1'b0)) dut (.*);

  // models
  logic [W-1:0] ibmem [N][N*MB];
  logic [W-1:0] rdq [N];
  logic [W-1:0] obmem [N][2*N];
  bit   full [N][2];
  int   fsel [N], rsel [N], drain_wait [N];
  int   m_tail [N], sent [N], committed [N], busy_cycles [N];
  int   joins = 0, phase = 0;
  logic [N-1:0] prev_busy = '0;

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
    logic [W-1:0] rot [N];
    logic [W-1:0] rd_next [N];
    bit   we_p [N], cm_p [N], rd_p [N];
    int   wa_p [N];
    logic [W-1:0] wd_p [N];
    int   new_line;

    rst_n = 0; tail = '0; ob_half_free = '1;
    for (int p = 0; p < N; p++) begin
      m_tail[p] = 0; sent[p] = 0; committed[p] = 0; busy_cycles[p] = 0;
      fsel[p] = 0; rsel[p] = 0; full[p][0] = 0; full[p][1] = 0; drain_wait[p] = 0; rdq[p] = '0;
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int cyc = 0; cyc < 1500; cyc++) begin
      // ---- drive inputs for this cycle (state after the last edge)
      new_line = -1;
      if (cyc < 1200 && $urandom % 3 != 0) begin
        int p;
        p = (cyc < 40) ? 1 : int'($urandom % N);   // port 1 alone first
        if (((m_tail[p] - int'(head[p])) & 7) < MB) new_line = p;
      end
      for (int p = 0; p < N; p++) begin
        tail[p] = PW'(m_tail[p]);
        ob_half_free[p] = {~full[p][1], ~full[p][0]};
      end
      @(negedge clk);
      // ---- sample outputs
      for (int x = 0; x < N; x++) if (busy[x]) begin
        busy_cycles[x]++;
        if (!prev_busy[x] && phase != 0 && busy != (N'(1) << x)) joins++;
      end
      prev_busy = busy;
      for (int k = 0; k < N; k++) rot[k] = rdq[(k + int'(rot_amt)) % N];
      for (int b = 0; b < N; b++) begin
        rd_p[b] = ib_re[b];
        rd_next[b] = ib_re[b] ? ibmem[b][ib_raddr[b]] : rdq[b];
        // only the port that owns bank b this cycle may read it
        if (ib_re[b]) chk(int'(ib_raddr[b]) / MB == (b - phase + N) % N, "bank owner");
      end
      for (int k = 0; k < N; k++) begin
        we_p[k] = ob_we[k]; wa_p[k] = int'(ob_waddr[k]); wd_p[k] = rot[k]; cm_p[k] = ob_commit[k];
      end
      @(posedge clk); #1;
      phase = (phase + 1) % N;
      // ---- model register updates at that edge
      for (int b = 0; b < N; b++) rdq[b] = rd_next[b];
      for (int k = 0; k < N; k++) begin
        if (we_p[k]) obmem[k][wa_p[k]] = wd_p[k];
        if (cm_p[k]) begin
          chk(!full[k][fsel[k]], "commit into free half");
          for (int w = 0; w < N; w++)
            chk(obmem[k][fsel[k] * N + w] == pat(k, committed[k], w), "committed line contents");
          full[k][fsel[k]] = 1; fsel[k] ^= 1; committed[k]++;
          drain_wait[k] = (cyc < 400) ? 60 : int'($urandom % 12);
        end
        if (full[k][rsel[k]]) begin
          if (drain_wait[k] > 0) drain_wait[k]--;
          else begin full[k][rsel[k]] = 0; rsel[k] ^= 1; drain_wait[k] = int'($urandom % 12); end
        end
      end
      if (new_line >= 0) begin
        for (int b = 0; b < N; b++) ibmem[b][new_line * MB + (m_tail[new_line] % MB)] = pat(new_line, sent[new_line], b);
        m_tail[new_line]++; sent[new_line]++;
      end
    end
    for (int p = 0; p < N; p++) begin
      chk(committed[p] == sent[p], "all lines transposed");
      chk(busy_cycles[p] == N * committed[p], "N cycles per line");
      $display("port %0d: lines %0d busy %0d", p, committed[p], busy_cycles[p]);
    end
    chk(joins > 0, "a port joined mid-rotation");
    $display("joins=%0d", joins);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
