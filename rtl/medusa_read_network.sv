// medusa_read_network: memory-read data transfer network of Medusa.
//
// Splits a wide DRAM read interface (one W_LINE = N_PORTS*W_ACC bit line per
// cycle) evenly into N_PORTS narrow accelerator read ports, without a wide
// demultiplexer or per-port width converters. Each line, tagged with its
// destination port, is written across the banks of a deep input buffer
// (word j in bank j). The reading controller then transposes lines, one
// diagonal per cycle, through a rotation unit into a per-port double-buffered
// output buffer, so that port k's whole line ends up in bank k and can be
// streamed out one word per cycle. Any number of ports transpose at the same
// time, each starting whenever its data is there, at one line per N_PORTS
// cycles per port: the full line bandwidth is delivered.
//
// Timing: with all buffers idle, a line accepted at clock edge t gives its
// first word to the accelerator (acc_rvalid high) in cycle
// t + N_PORTS + LAT + 1, LAT = 1 + rotation latency, at any phase. That
// constant is the added latency against a conventional crossbar.
// The structure is the paper's (its Fig. 3); the handshakes are ours.
module medusa_read_network #(
  parameter int unsigned N_PORTS   = medusa_pkg::N_PORTS_DEF,
  parameter int unsigned W_ACC     = medusa_pkg::W_ACC_DEF,
  parameter int unsigned MAX_BURST = medusa_pkg::MAX_BURST_DEF,
  parameter bit          ROT_PIPE  = medusa_pkg::ROT_PIPE_DEF,
  localparam int unsigned LGN = $clog2(N_PORTS),
  localparam int unsigned SW  = $clog2(MAX_BURST),
  localparam int unsigned PW  = SW + 1,
  localparam int unsigned AW  = LGN + SW
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // DRAM controller side
  input  logic                          dram_rvalid,
  output logic                          dram_rready,
  input  logic [LGN-1:0]                dram_rport,
  input  logic [N_PORTS-1:0][W_ACC-1:0] dram_rdata,
  // to the request arbiter: free line slots per port
  output logic [N_PORTS-1:0][PW-1:0]    lines_free,
  // accelerator read ports
  output logic [N_PORTS-1:0]            acc_rvalid,
  input  logic [N_PORTS-1:0]            acc_rready,
  output logic [N_PORTS-1:0][W_ACC-1:0] acc_rdata,
  // ports transposing in this cycle (observation)
  output logic [N_PORTS-1:0]            busy
);
  logic [N_PORTS-1:0][PW-1:0]    head, tail;
  logic [N_PORTS-1:0]            ib_we, ib_re;
  logic [N_PORTS-1:0][AW-1:0]    ib_waddr, ib_raddr;
  logic [N_PORTS-1:0][W_ACC-1:0] ib_wdata, ib_rdata, rot_out;
  logic [LGN-1:0]                rot_amt;
  logic [N_PORTS-1:0][1:0]       ob_half_free;
  logic [N_PORTS-1:0]            ob_we, ob_commit;
  logic [N_PORTS-1:0][LGN:0]     ob_waddr;

  read_ib_write_ctrl #(.N_PORTS(N_PORTS), .W_ACC(W_ACC), .MAX_BURST(MAX_BURST)) u_wctrl (
    .clk, .rst_n, .dram_rvalid, .dram_rready, .dram_rport, .dram_rdata,
    .head, .tail, .lines_free, .ib_we, .ib_waddr, .ib_wdata);

  bank_array #(.N_BANKS(N_PORTS), .W(W_ACC), .DEPTH(N_PORTS * MAX_BURST)) u_ibuf (
    .clk, .we(ib_we), .waddr(ib_waddr), .wdata(ib_wdata),
    .re(ib_re), .raddr(ib_raddr), .rdata(ib_rdata));

  read_ib_read_ctrl #(.N_PORTS(N_PORTS), .MAX_BURST(MAX_BURST), .ROT_PIPE(ROT_PIPE)) u_rctrl (
    .clk, .rst_n, .tail, .head, .ib_re, .ib_raddr, .rot_amt,
    .ob_half_free, .ob_we, .ob_waddr, .ob_commit, .busy);

  rotation_unit #(.N_PORTS(N_PORTS), .W_ACC(W_ACC), .ROT_PIPE(ROT_PIPE)) u_rot (
    .clk, .amt(rot_amt), .din(ib_rdata), .dout(rot_out));

  read_output_buffer #(.N_PORTS(N_PORTS), .W_ACC(W_ACC)) u_obuf (
    .clk, .rst_n, .we(ob_we), .waddr(ob_waddr), .wdata(rot_out), .commit(ob_commit),
    .half_free(ob_half_free), .acc_rvalid, .acc_rready, .acc_rdata);
endmodule
