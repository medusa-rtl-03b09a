// tb_rotation_unit: self-checking test of the barrel-shift rotation unit.
// A 32-port single-cycle unit (the default size) and an 8-port pipelined one
// are driven with random words and every rotation amount; each output lane
// must equal input lane (k + amt) mod N, the pipelined unit log2(8) = 3
// cycles later.
module tb_rotation_unit;
  localparam int N1 = 32, N2 = 8, W = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [4:0]           amt1;
  logic [N1-1:0][W-1:0] din1, dout1;
  logic [2:0]           amt2;
  logic [N2-1:0][W-1:0] din2, dout2;

  rotation_unit dut1 (.clk, .amt(amt1), .din(din1), .dout(dout1));
  rotation_unit #(.N_PORTS(N2), .W_ACC(W), .ROT_PIPE(1'b1)) dut2 (.clk, .amt(amt2), .din(din2), .dout(dout2));

  // history of the pipelined unit's inputs
  logic [N2-1:0][W-1:0] hist_d [4];
  logic [2:0]           hist_a [4];

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 400; it++) begin
      amt1 = 5'(it);
      amt2 = 3'($urandom);
      for (int k = 0; k < N1; k++) din1[k] = W'($urandom);
      for (int k = 0; k < N2; k++) din2[k] = W'($urandom);
      #1;
      for (int k = 0; k < N1; k++) begin
        checks++;
        if (dout1[k] !== din1[(k + int'(amt1)) % N1]) begin
          failures++;
          if (failures < 10) $display("comb: amt=%0d lane %0d got %h exp %h", amt1, k, dout1[k], din1[(k + int'(amt1)) % N1]);
        end
      end
      @(posedge clk);
      for (int i = 3; i > 0; i--) begin hist_d[i] = hist_d[i-1]; hist_a[i] = hist_a[i-1]; end
      hist_d[0] = din2; hist_a[0] = amt2;
      #1;
      if (it >= 3) begin
        // after the 3rd edge following an input, the output shows it
        for (int k = 0; k < N2; k++) begin
          checks++;
          if (dout2[k] !== hist_d[2][(k + int'(hist_a[2])) % N2]) begin
            failures++;
            if (failures < 10) $display("pipe: it=%0d lane %0d got %h", it, k, dout2[k]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
