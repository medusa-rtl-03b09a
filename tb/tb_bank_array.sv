// tb_bank_array: self-checking test of the banked simple dual-port memory.
// Four banks of 16 x 8 bits are written and read at independent random
// addresses every cycle; the registered read data is compared one cycle
// later with a reference model, including read-while-write of the same
// address (old data expected) and holding rdata when re is low.
module tb_bank_array;
  localparam int NB = 4, W = 8, D = 16, AW = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NB-1:0]         we, re;
  logic [NB-1:0][AW-1:0] waddr, raddr;
  logic [NB-1:0][W-1:0]  wdata, rdata;
  logic [W-1:0]          model [NB][D];
  logic [NB-1:0][W-1:0]  expect_q;

  bank_array #(.N_BANKS(NB), .W(W), .DEPTH(D)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill every location first
    for (int a = 0; a < D; a++) begin
      for (int b = 0; b < NB; b++) begin
        we[b] = 1; waddr[b] = AW'(a); wdata[b] = W'($urandom); model[b][a] = wdata[b]; re[b] = 0; raddr[b] = '0;
      end
      @(posedge clk); #1;
    end
    for (int b = 0; b < NB; b++) begin re[b] = 1; raddr[b] = '0; end
    we = '0;
    @(posedge clk); #1;
    for (int b = 0; b < NB; b++) expect_q[b] = model[b][0];
    for (int it = 0; it < 2000; it++) begin
      for (int b = 0; b < NB; b++) begin
        we[b] = 1'($urandom); re[b] = 1'($urandom);
        waddr[b] = AW'($urandom); raddr[b] = ($urandom % 4 == 0) ? waddr[b] : AW'($urandom);
        wdata[b] = W'($urandom);
      end
      @(posedge clk);
      for (int b = 0; b < NB; b++) begin
        if (re[b]) expect_q[b] = model[b][raddr[b]];
        if (we[b]) model[b][waddr[b]] = wdata[b];
      end
      #1;
      for (int b = 0; b < NB; b++) begin
        checks++;
        if (rdata[b] !== expect_q[b]) begin
          failures++;
          if (failures < 10) $display("bank %0d got %h exp %h", b, rdata[b], expect_q[b]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
