// tb_medusa_scaling: the interconnect in the sizes of the frequency-scaling
// study, where port counts are usually not powers of two. The design is
// built for the next power of two and the extra ports are tied off (read
// ready low, write valid low), with their outputs left open. Four sizes run
// side by side, each with random traffic on the used ports only:
//   128-bit interface, 8 ports     (N_PORTS = 8,  all used)
//   256-bit interface, 12 ports    (N_PORTS = 16, 4 tied off)
//   512-bit interface, 20 ports    (N_PORTS = 32, 12 tied off)
//   1024-bit interface, 44 ports   (N_PORTS = 64, 20 tied off)
// Every word on every used port is checked in both directions; the unused
// ports must never show data.
module tb_medusa_scaling;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int done_cnt = 0;

  initial begin
    #6000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  scaling_run #(.N(8),  .USED(8),  .LGN(3)) u_128  (.clk, .checks_o(), .failures_o(), .done());
  scaling_run #(.N(16), .USED(12), .LGN(4)) u_256  (.clk, .checks_o(), .failures_o(), .done());
  scaling_run #(.N(32), .USED(20), .LGN(5)) u_512  (.clk, .checks_o(), .failures_o(), .done());
  scaling_run #(.N(64), .USED(44), .LGN(6)) u_1024 (.clk, .checks_o(), .failures_o(), .done());

  initial begin
    #100;  // let every run clear its done flag first
    wait (u_128.done && u_256.done && u_512.done && u_1024.done);
    checks   = u_128.checks_o + u_256.checks_o + u_512.checks_o + u_1024.checks_o;
    failures = u_128.failures_o + u_256.failures_o + u_512.failures_o + u_1024.failures_o;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
