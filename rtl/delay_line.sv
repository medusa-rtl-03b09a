// delay_line: a W-bit signal delayed by D clock cycles (D may be 0, then it
// is a wire). Used to keep controller commands aligned with data moving
// through the memory read register and the rotation unit pipeline.
// With RESET = 1 every stage is cleared by the synchronous active-low
// rst_n (used for enables and commit pulses); with RESET = 0 the stages
// are plain data registers and rst_n is unused. With D = 0 both clk and
// rst_n are unused.
module delay_line #(
  parameter int unsigned W     = 1,
  parameter int unsigned D     = 1,
  parameter bit          RESET = 1'b0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] din,
  output logic [W-1:0] dout
);
  if (D == 0) begin : g_wire
    assign dout = din;
  end else begin : g_pipe
    logic [W-1:0] stage [D];
    always_ff @(posedge clk) begin
      if (RESET && !rst_n) begin
        for (int i = 0; i < int'(D); i++) stage[i] <= '0;
      end else begin
        stage[0] <= din;
        for (int i = 1; i < int'(D); i++) stage[i] <= stage[i-1];
      end
    end
    assign dout = stage[D-1];
  end
endmodule
