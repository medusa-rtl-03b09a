// medusa_top: the Medusa memory interconnect data-transfer logic.
//
// One wide DRAM controller interface (W_LINE = N_PORTS*W_ACC bits, 512 by
// default) shared by N_PORTS narrow accelerator read ports and N_PORTS narrow
// write ports (32 x 16 bits each by default). DRAM bandwidth is divided
// statically and evenly among the ports by transposing lines through a
// barrel-shift rotation unit and banked buffers, instead of routing whole
// lines through a wide crossbar and per-port FIFOs and width converters.
// The read network and the write network are independent and share only the
// clock and reset (synchronous, active low).
//
// Outside this module, and connected through its ports: the DRAM controller
// (read lines in with their destination port, write lines out with their
// source port), the request arbiter (lines_free / lines_avail per port and
// write line requests) and the accelerator (one valid/ready stream per
// port and direction). Lines must be requested in the order the arbiter
// issued them; the interconnect never reorders lines of one port.
module medusa_top #(
  parameter int unsigned N_PORTS   = medusa_pkg::N_PORTS_DEF,
  parameter int unsigned W_ACC     = medusa_pkg::W_ACC_DEF,
  parameter int unsigned MAX_BURST = medusa_pkg::MAX_BURST_DEF,
  parameter bit          ROT_PIPE  = medusa_pkg::ROT_PIPE_DEF,
  localparam int unsigned LGN = $clog2(N_PORTS),
  localparam int unsigned PW  = $clog2(MAX_BURST) + 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // ---- read direction: DRAM controller -> accelerator
  input  logic                          dram_rvalid,
  output logic                          dram_rready,
  input  logic [LGN-1:0]                dram_rport,
  input  logic [N_PORTS-1:0][W_ACC-1:0] dram_rdata,
  output logic [N_PORTS-1:0][PW-1:0]    rd_lines_free,
  output logic [N_PORTS-1:0]            acc_rvalid,
  input  logic [N_PORTS-1:0]            acc_rready,
  output logic [N_PORTS-1:0][W_ACC-1:0] acc_rdata,
  // ---- write direction: accelerator -> DRAM controller
  input  logic [N_PORTS-1:0]            acc_wvalid,
  output logic [N_PORTS-1:0]            acc_wready,
  input  logic [N_PORTS-1:0][W_ACC-1:0] acc_wdata,
  output logic [N_PORTS-1:0][PW-1:0]    wr_lines_avail,
  input  logic                          wreq_valid,
  output logic                          wreq_ready,
  input  logic [LGN-1:0]                wreq_port,
  output logic                          dram_wvalid,
  output logic [LGN-1:0]                dram_wport,
  output logic [N_PORTS-1:0][W_ACC-1:0] dram_wdata,
  // ---- observation: ports transposing in this cycle
  output logic [N_PORTS-1:0]            rd_busy,
  output logic [N_PORTS-1:0]            wr_busy
);
  medusa_read_network #(.N_PORTS(N_PORTS), .W_ACC(W_ACC), .MAX_BURST(MAX_BURST), .ROT_PIPE(ROT_PIPE)) u_read (
    .clk, .rst_n, .dram_rvalid, .dram_rready, .dram_rport, .dram_rdata,
    .lines_free(rd_lines_free), .acc_rvalid, .acc_rready, .acc_rdata, .busy(rd_busy));

  medusa_write_network #(.N_PORTS(N_PORTS), .W_ACC(W_ACC), .MAX_BURST(MAX_BURST), .ROT_PIPE(ROT_PIPE)) u_write (
    .clk, .rst_n, .acc_wvalid, .acc_wready, .acc_wdata,
    .lines_avail(wr_lines_avail), .wreq_valid, .wreq_ready, .wreq_port,
    .dram_wvalid, .dram_wport, .dram_wdata, .busy(wr_busy));
endmodule
