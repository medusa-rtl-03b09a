// medusa_write_network: memory-write data transfer network of Medusa.
//
// Gathers N_PORTS narrow accelerator write streams into wide DRAM lines of
// W_LINE = N_PORTS*W_ACC bits. Each port fills its own bank of a
// double-buffered input buffer; every complete line is transposed, one
// diagonal per cycle, through the rotation unit into a deep banked output
// buffer, where it lies across all banks as one line of that port. The
// output buffer reading controller reports complete lines per port and, on
// request, sends a port's oldest line to the DRAM controller. Ports are
// independent, and each can sustain one word per cycle.
//
// Timing: with all buffers idle, the last word of a line written at edge t
// makes the line available (lines_avail) at edge t + 1 + N_PORTS + R,
// R = rotation latency; a request in a cycle gives the line one cycle later.
// The structure is the paper's (its Fig. 4); the handshakes are ours.
module medusa_write_network #(
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
  // accelerator write ports
  input  logic [N_PORTS-1:0]            acc_wvalid,
  output logic [N_PORTS-1:0]            acc_wready,
  input  logic [N_PORTS-1:0][W_ACC-1:0] acc_wdata,
  // to the request arbiter
  output logic [N_PORTS-1:0][PW-1:0]    lines_avail,
  input  logic                          wreq_valid,
  output logic                          wreq_ready,
  input  logic [LGN-1:0]                wreq_port,
  // DRAM controller side
  output logic                          dram_wvalid,
  output logic [LGN-1:0]                dram_wport,
  output logic [N_PORTS-1:0][W_ACC-1:0] dram_wdata,
  // ports transposing in this cycle (observation)
  output logic [N_PORTS-1:0]            busy
);
  logic [N_PORTS-1:0]            line_ready, release_line, ob_we, ob_re;
  logic [N_PORTS-1:0][LGN-1:0]   ib_raddr;
  logic [N_PORTS-1:0][W_ACC-1:0] ib_rdata, rot_out, ob_rdata;
  logic [LGN-1:0]                rot_amt;
  logic [N_PORTS-1:0][AW-1:0]    ob_waddr, ob_raddr;
  logic [N_PORTS-1:0][PW-1:0]    head, tail;

  write_input_buffer #(.N_PORTS(N_PORTS), .W_ACC(W_ACC)) u_ibuf (
    .clk, .rst_n, .acc_wvalid, .acc_wready, .acc_wdata,
    .line_ready, .raddr(ib_raddr), .rdata(ib_rdata), .release_line);

  write_ob_write_ctrl #(.N_PORTS(N_PORTS), .MAX_BURST(MAX_BURST), .ROT_PIPE(ROT_PIPE)) u_wctrl (
    .clk, .rst_n, .line_ready, .ib_raddr, .release_line, .rot_amt,
    .ob_we, .ob_waddr, .head, .tail, .busy);

  rotation_unit #(.N_PORTS(N_PORTS), .W_ACC(W_ACC), .ROT_PIPE(ROT_PIPE)) u_rot (
    .clk, .amt(rot_amt), .din(ib_rdata), .dout(rot_out));

  bank_array #(.N_BANKS(N_PORTS), .W(W_ACC), .DEPTH(N_PORTS * MAX_BURST)) u_obuf (
    .clk, .we(ob_we), .waddr(ob_waddr), .wdata(rot_out),
    .re(ob_re), .raddr(ob_raddr), .rdata(ob_rdata));

  write_ob_read_ctrl #(.N_PORTS(N_PORTS), .W_ACC(W_ACC), .MAX_BURST(MAX_BURST)) u_rctrl (
    .clk, .rst_n, .tail, .head, .lines_avail, .wreq_valid, .wreq_ready, .wreq_port,
    .ob_re, .ob_raddr, .ob_rdata, .dram_wvalid, .dram_wport, .dram_wdata);
endmodule
