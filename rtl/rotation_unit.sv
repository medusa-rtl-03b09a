// rotation_unit: left-rotates N_PORTS words of W_ACC bits by `amt` words.
//
// This is the barrel shifter that replaces the crossbar and width converters
// of a conventional interconnect. It has log2(N_PORTS) levels of 2:1 muxes;
// level l rotates by 2^l words when bit l of `amt` is 1, so the cost is
// W_LINE * log2(N_PORTS) one-bit muxes. "Left" means output word k takes
// input word (k + amt) mod N_PORTS: the word in lane `amt` moves to lane 0.
//
// Timing: with ROT_PIPE = 0 the unit is combinational; with ROT_PIPE = 1
// every level is followed by a register, giving log2(N_PORTS) cycles of
// latency (the shift amount travels with the data). In the single-cycle
// form clk is unused. The level structure and
// bit-per-level control follow the paper; the pipelining option is offered
// by the paper without detail, the register-per-level choice is ours.
module rotation_unit #(
  parameter int unsigned N_PORTS  = medusa_pkg::N_PORTS_DEF,
  parameter int unsigned W_ACC    = medusa_pkg::W_ACC_DEF,
  parameter bit          ROT_PIPE = medusa_pkg::ROT_PIPE_DEF,
  localparam int unsigned LG      = $clog2(N_PORTS)
) (
  input  logic                          clk,
  input  logic [LG-1:0]                 amt,
  input  logic [N_PORTS-1:0][W_ACC-1:0] din,
  output logic [N_PORTS-1:0][W_ACC-1:0] dout
);
  typedef logic [N_PORTS-1:0][W_ACC-1:0] line_t;

  // One mux level: rotate left by `sh` words when `en` is set.
  function automatic line_t level(input line_t d, input bit en, input int unsigned sh);
    line_t r;
    for (int k = 0; k < int'(N_PORTS); k++) r[k] = en ? d[(k + sh) % N_PORTS] : d[k];
    return r;
  endfunction

  if (!ROT_PIPE) begin : g_comb
    always_comb begin
      line_t d;
      d = din;
      for (int l = 0; l < int'(LG); l++) d = level(d, amt[l], 1 << l);
      dout = d;
    end
  end else begin : g_pipe
    // stage_d[l] / stage_a[l]: data and amount after level l.
    line_t         stage_d [LG];
    logic [LG-1:0] stage_a [LG];
    always_ff @(posedge clk) begin
      stage_d[0] <= level(din, amt[0], 1);
      stage_a[0] <= amt;
      for (int l = 1; l < int'(LG); l++) begin
        stage_d[l] <= level(stage_d[l-1], stage_a[l-1][l], 1 << l);
        stage_a[l] <= stage_a[l-1];
      end
    end
    assign dout = stage_d[LG-1];
  end
endmodule
