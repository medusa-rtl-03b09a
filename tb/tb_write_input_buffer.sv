// tb_write_input_buffer: self-checking test of the write network's per-port
// double-buffered input buffer (4 ports). Accelerator ports push numbered
// words with random valid; a reader model waits for line_ready, reads the
// line in the diagonal order of the transposition ((k + c) mod N, one word
// per cycle, asynchronous read) and releases it in the cycle of the last
// read. Checks: contents and order of every line, acc_wready low only while
// both halves are full (seen at least once), and a port pushing every cycle
// is never stalled when the reader keeps up.
module tb_write_input_buffer;
  localparam int N = 4, W = 16, LGN = 2;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n;
  logic [N-1:0] acc_wvalid, acc_wready, line_ready, release_line;
  logic [N-1:0][W-1:0] acc_wdata, rdata;
  logic [N-1:0][LGN-1:0] raddr;

  write_input_buffer #(.N_PORTS(N), .W_ACC(W)) dut (.*);

  int pushed [N], lines_done [N], rcnt [N], m_full [N], stalls = 0, late_stalls = 0;
  bit reading [N];
  bit push [N];

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
    int phase = 0;
    rst_n = 0; acc_wvalid = '0; acc_wdata = '0; raddr = '0; release_line = '0;
    for (int k = 0; k < N; k++) begin pushed[k] = 0; lines_done[k] = 0; rcnt[k] = 0; m_full[k] = 0; reading[k] = 0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int cyc = 0; cyc < 1500; cyc++) begin
      for (int k = 0; k < N; k++) begin
        acc_wvalid[k] = (cyc >= 800 && k == 0) ? 1'b1 : 1'($urandom);
        acc_wdata[k]  = pat(k, pushed[k] / N, pushed[k] % N);
        raddr[k]      = LGN'(k + phase);
        release_line[k] = 0;
      end
      @(negedge clk);
      for (int k = 0; k < N; k++) begin
        // the reader is slow in the first half, at full speed afterwards
        if (!reading[k] && line_ready[k] && (cyc >= 800 || $urandom % 16 == 0)) begin reading[k] = 1; rcnt[k] = 0; end
        push[k] = acc_wvalid[k] && acc_wready[k];
        chk(acc_wready[k] == (m_full[k] < 2), "wready");
        if (!acc_wready[k]) begin stalls++; if (cyc > 850 && k == 0) late_stalls++; end
        chk(line_ready[k] == (m_full[k] > 0), "line_ready");
        if (reading[k]) begin
          chk(rdata[k] == pat(k, lines_done[k], (k + phase) % N), "rdata");
          release_line[k] = (rcnt[k] == N - 1);
        end
      end
      @(posedge clk); #1;
      phase = (phase + 1) % N;
      for (int k = 0; k < N; k++) begin
        if (push[k]) begin
          pushed[k]++;
          if (pushed[k] % N == 0) m_full[k]++;
        end
        if (reading[k]) begin
          rcnt[k]++;
          if (rcnt[k] == N) begin reading[k] = 0; lines_done[k]++; m_full[k]--; end
        end
      end
    end
    chk(stalls > 0, "back pressure seen");
    chk(late_stalls == 0, "no stall at full rate");
    for (int k = 0; k < N; k++) chk(lines_done[k] > 40, "lines read");
    $display("stalls=%0d lines0=%0d", stalls, lines_done[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
