// tb_read_output_buffer: self-checking test of the read network's per-port
// double-buffered output buffer (4 ports). Lines are written word by word in
// the scrambled order the transposition produces ((k + c) mod N), committed,
// and drained by accelerator ports with random ready. The test checks word
// order and contents, that acc_rvalid is low on an empty port, that
// half_free reports both halves full after two commits (the buffer then
// holds two lines and the controller must wait), and that a line can be
// drained at one word per cycle.
module tb_read_output_buffer;
  localparam int N = 4, W = 16, LGN = 2;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n;
  logic [N-1:0] we, commit, acc_rvalid, acc_rready;
  logic [N-1:0][LGN:0] waddr;
  logic [N-1:0][W-1:0] wdata, acc_rdata;
  logic [N-1:0][1:0] half_free;

  read_output_buffer #(.N_PORTS(N), .W_ACC(W)) dut (.*);

  int wr_line [N], wr_word [N], wsel [N], rd_line [N], rd_word [N];
  bit pop [N];
  int both_full = 0, streak [N], max_streak = 0;

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
    int phase0 [N];
    rst_n = 0; we = '0; commit = '0; acc_rready = '0; waddr = '0; wdata = '0;
    for (int k = 0; k < N; k++) begin
      wr_line[k] = 0; wr_word[k] = 0; wsel[k] = 0; rd_line[k] = 0; rd_word[k] = 0; streak[k] = 0;
      phase0[k] = int'($urandom % N);
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int cyc = 0; cyc < 1500; cyc++) begin
      // writer: a line of port k is N consecutive writes starting at a random phase
      for (int k = 0; k < N; k++) begin
        we[k] = 0; commit[k] = 0;
        if (wr_word[k] > 0 || half_free[k][wsel[k]]) begin
          we[k] = 1;
          waddr[k] = {1'(wsel[k]), LGN'(phase0[k] + wr_word[k])};
          wdata[k] = pat(k, wr_line[k], (phase0[k] + wr_word[k]) % N);
          commit[k] = (wr_word[k] == N - 1);
        end
        // ports 0 and 1 are drained slowly early on, then at full rate
        acc_rready[k] = (cyc < 300) ? ($urandom % 8 == 0) : (k == 0 ? 1'b1 : 1'($urandom));
      end
      @(negedge clk);
      for (int k = 0; k < N; k++) begin
        if (half_free[k] == 2'b00) both_full++;
        chk(acc_rvalid[k] == (rd_line[k] < wr_line[k]), "rvalid");
        pop[k] = acc_rvalid[k] && acc_rready[k];
        if (pop[k]) begin
          chk(acc_rdata[k] == pat(k, rd_line[k], rd_word[k]), "rdata");
          streak[k]++; if (streak[k] > max_streak) max_streak = streak[k];
        end else streak[k] = 0;
      end
      @(posedge clk); #1;
      for (int k = 0; k < N; k++) begin
        if (pop[k]) begin
          rd_word[k]++;
          if (rd_word[k] == N) begin rd_word[k] = 0; rd_line[k]++; end
        end
        if (we[k]) begin
          wr_word[k]++;
          if (wr_word[k] == N) begin
            wr_word[k] = 0; wr_line[k]++; wsel[k] ^= 1; phase0[k] = int'($urandom % N);
          end
        end
      end
    end
    chk(both_full > 0, "both halves full seen");
    chk(max_streak >= 2 * N, "one word per cycle across lines");
    for (int k = 0; k < N; k++) chk(rd_line[k] > 50, "lines drained");
    $display("both_full=%0d max_streak=%0d lines=%0d", both_full, max_streak, rd_line[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
