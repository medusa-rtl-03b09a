// bank_array: N_BANKS independent simple dual-port memories of W bits x DEPTH.
//
// This is the deep, narrow buffer of both Medusa networks: the read network's
// input buffer and the write network's output buffer. Each bank has its own
// write port (we/waddr/wdata) and read port (re/raddr), so a controller can
// address every bank differently in the same cycle, which the diagonal access
// of the transposition needs. Reads are registered: rdata[b] holds the word
// addressed one cycle earlier while re[b] was high, the timing of an FPGA
// block RAM. Writing and reading the same address in one cycle returns the
// old word. With the default sizes (32 banks x 1024 x 16 bits) each bank is
// one 18 Kbit block RAM. Contents are not reset.
module bank_array #(
  parameter int unsigned N_BANKS = medusa_pkg::N_PORTS_DEF,
  parameter int unsigned W       = medusa_pkg::W_ACC_DEF,
  parameter int unsigned DEPTH   = medusa_pkg::N_PORTS_DEF * medusa_pkg::MAX_BURST_DEF,
  localparam int unsigned AW     = $clog2(DEPTH)
) (
  input  logic                      clk,
  input  logic [N_BANKS-1:0]        we,
  input  logic [N_BANKS-1:0][AW-1:0] waddr,
  input  logic [N_BANKS-1:0][W-1:0]  wdata,
  input  logic [N_BANKS-1:0]        re,
  input  logic [N_BANKS-1:0][AW-1:0] raddr,
  output logic [N_BANKS-1:0][W-1:0]  rdata
);
  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    logic [W-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we[b]) mem[waddr[b]] <= wdata[b];
      if (re[b]) rdata[b] <= mem[raddr[b]];
    end
  end
endmodule
