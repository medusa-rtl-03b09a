// medusa_pkg: default sizes shared by the Medusa interconnect modules.
//
// The defaults describe the main configuration: a 512-bit DRAM controller
// line split across 32 read and 32 write ports of 16 bits each, with room
// for a 32-line burst per port. W_LINE is always N_PORTS * W_ACC.
// ROT_PIPE_DEF selects a single-cycle rotation unit (0) or one register per
// mux level (1); the single-cycle form is the default here.
package medusa_pkg;
  localparam int unsigned N_PORTS_DEF   = 32;
  localparam int unsigned W_ACC_DEF     = 16;
  localparam int unsigned MAX_BURST_DEF = 32;
  localparam bit          ROT_PIPE_DEF  = 1'b0;

  // Latency of the rotation unit in cycles for a given port count.
  function automatic int unsigned rot_latency(input int unsigned n_ports, input bit pipe);
    return pipe ? $clog2(n_ports) : 0;
  endfunction
endpackage
