// read_ib_write_ctrl: input buffer writing controller of the read network.
//
// Lines returned by the DRAM controller (W_LINE = N_PORTS * W_ACC bits, each
// tagged with the accelerator read port it belongs to) are written whole into
// the deep input buffer: word j of the line goes to bank j, at address
// port * MAX_BURST + slot. Every port owns a circular region of MAX_BURST line
// slots, tracked by a tail pointer kept here and a head pointer kept by the
// reading controller. Pointers are log2(MAX_BURST)+1 bits wide; the extra top
// bit tells a full region from an empty one.
//
// Interface and timing: dram_rvalid/dram_rready is a valid/ready handshake,
// a line is accepted in a cycle where both are high and its bank write
// command is issued in that same cycle (the banks register it at the clock
// edge). dram_rready is low only while the tagged port's region is full; a
// request arbiter that watches lines_free never sees that happen. The
// per-port head/tail bookkeeping follows the paper; the port tag, the ready
// signal and the lines_free output are this design's choices.
// ib_wdata is dram_rdata itself: the line is written unchanged, word j to
// bank j, so this module only steers addresses and enables.
module read_ib_write_ctrl #(
  parameter int unsigned N_PORTS   = medusa_pkg::N_PORTS_DEF,
  parameter int unsigned W_ACC     = medusa_pkg::W_ACC_DEF,
  parameter int unsigned MAX_BURST = medusa_pkg::MAX_BURST_DEF,
  localparam int unsigned LGN = $clog2(N_PORTS),
  localparam int unsigned SW  = $clog2(MAX_BURST),
  localparam int unsigned PW  = SW + 1,
  localparam int unsigned AW  = LGN + SW
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // DRAM controller read data
  input  logic                          dram_rvalid,
  output logic                          dram_rready,
  input  logic [LGN-1:0]                dram_rport,
  input  logic [N_PORTS-1:0][W_ACC-1:0] dram_rdata,
  // pointers
  input  logic [N_PORTS-1:0][PW-1:0]    head,
  output logic [N_PORTS-1:0][PW-1:0]    tail,
  output logic [N_PORTS-1:0][PW-1:0]    lines_free,
  // input buffer write command
  output logic [N_PORTS-1:0]            ib_we,
  output logic [N_PORTS-1:0][AW-1:0]    ib_waddr,
  output logic [N_PORTS-1:0][W_ACC-1:0] ib_wdata
);
  logic accept;

  always_comb begin
    for (int p = 0; p < int'(N_PORTS); p++)
      lines_free[p] = PW'(MAX_BURST) - PW'(tail[p] - head[p]);
  end

  assign dram_rready = (lines_free[dram_rport] != '0);
  assign accept      = dram_rvalid && dram_rready;

  always_comb begin
    for (int b = 0; b < int'(N_PORTS); b++) begin
      ib_we[b]    = accept;
      ib_waddr[b] = {dram_rport, tail[dram_rport][SW-1:0]};
      ib_wdata[b] = dram_rdata[b];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) tail <= '0;
    else if (accept) tail[dram_rport] <= tail[dram_rport] + 1'b1;
  end

  // A line offered and not taken must stay on offer unchanged.
  a_hold : assert property (@(posedge clk) disable iff (!rst_n)
    dram_rvalid && !dram_rready |=> dram_rvalid && $stable(dram_rport) && $stable(dram_rdata));

  initial begin
    assert (N_PORTS >= 4 && (1 << LGN) == N_PORTS) else $fatal(1, "N_PORTS must be a power of two >= 4");
    assert (MAX_BURST >= 2 && (1 << SW) == MAX_BURST) else $fatal(1, "MAX_BURST must be a power of two >= 2");
  end
endmodule
