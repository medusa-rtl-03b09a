// write_ob_read_ctrl: output buffer reading controller of the write network.
//
// Keeps the head pointer of every port's region in the deep output buffer
// and reports, in lines_avail, how many complete lines each port has there.
// The request arbiter uses that count to issue write requests only for data
// that is present, and then asks for the lines one at a time with
// wreq_valid/wreq_port (accepted when wreq_ready is high, i.e. the port has a
// line; asking for a port without one breaks the arbiter's rule and is
// flagged by an assertion). An accepted request reads the head line from all banks at once
// (address port * MAX_BURST + slot) and advances the head pointer; the
// W_LINE-bit line leaves on dram_wdata one cycle later (block RAM read),
// with dram_wvalid and dram_wport. One line per cycle can be sent.
// The head/tail bookkeeping and the arbiter's duty follow the paper; the
// request handshake is this design's choice. dram_wdata is the banks' read
// register itself, passed straight out: the controller only steers addresses.
module write_ob_read_ctrl #(
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
  input  logic [N_PORTS-1:0][PW-1:0]    tail,
  output logic [N_PORTS-1:0][PW-1:0]    head,
  output logic [N_PORTS-1:0][PW-1:0]    lines_avail,
  // line requests from the request arbiter
  input  logic                          wreq_valid,
  output logic                          wreq_ready,
  input  logic [LGN-1:0]                wreq_port,
  // output buffer read command and data
  output logic [N_PORTS-1:0]            ob_re,
  output logic [N_PORTS-1:0][AW-1:0]    ob_raddr,
  input  logic [N_PORTS-1:0][W_ACC-1:0] ob_rdata,
  // to the DRAM controller
  output logic                          dram_wvalid,
  output logic [LGN-1:0]                dram_wport,
  output logic [N_PORTS-1:0][W_ACC-1:0] dram_wdata
);
  logic accept;

  always_comb begin
    for (int p = 0; p < int'(N_PORTS); p++) lines_avail[p] = PW'(tail[p] - head[p]);
  end
  assign wreq_ready = (lines_avail[wreq_port] != '0);
  assign accept     = wreq_valid && wreq_ready;

  always_comb begin
    for (int b = 0; b < int'(N_PORTS); b++) begin
      ob_re[b]    = accept;
      ob_raddr[b] = {wreq_port, head[wreq_port][SW-1:0]};
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      head        <= '0;
      dram_wvalid <= 1'b0;
      dram_wport  <= '0;
    end else begin
      dram_wvalid <= accept;
      if (accept) begin
        head[wreq_port] <= head[wreq_port] + 1'b1;
        dram_wport      <= wreq_port;
      end
    end
  end
  assign dram_wdata = ob_rdata;

  // The arbiter may only ask for a port that has a complete line.
  a_req_has_line : assert property (@(posedge clk) disable iff (!rst_n)
    wreq_valid |-> wreq_ready);
endmodule
