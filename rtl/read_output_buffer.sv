// read_output_buffer: double-buffered output buffer of the read network.
//
// Bank k belongs to accelerator read port k and holds two lines of N_PORTS
// words (2*N_PORTS entries, word address = {half, word index}). The reading
// controller writes transposed words into it, any order within a line, and
// raises commit[k] with the line's last write; halves fill in turn 0, 1, 0...
// The accelerator side is a valid/ready stream: acc_rvalid[k] is high while
// the current read half is full, acc_rdata[k] is its next word in increasing
// index order, one word per cycle when acc_rready[k] is high. The half is
// freed when its last word is taken. half_free tells the controller which
// halves it may write. Reads are asynchronous (LUT RAM).
// Double buffering next to the accelerator is the paper's; the stream
// handshake and the fill order of the halves are this design's choices.
module read_output_buffer #(
  parameter int unsigned N_PORTS = medusa_pkg::N_PORTS_DEF,
  parameter int unsigned W_ACC   = medusa_pkg::W_ACC_DEF,
  localparam int unsigned LGN    = $clog2(N_PORTS)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [N_PORTS-1:0]            we,
  input  logic [N_PORTS-1:0][LGN:0]     waddr,
  input  logic [N_PORTS-1:0][W_ACC-1:0] wdata,
  input  logic [N_PORTS-1:0]            commit,
  output logic [N_PORTS-1:0][1:0]       half_free,
  output logic [N_PORTS-1:0]            acc_rvalid,
  input  logic [N_PORTS-1:0]            acc_rready,
  output logic [N_PORTS-1:0][W_ACC-1:0] acc_rdata
);
  for (genvar k = 0; k < N_PORTS; k++) begin : g_bank
    logic [W_ACC-1:0] mem [2*N_PORTS];
    logic [1:0]       full;
    logic             fsel, rsel;
    logic [LGN-1:0]   rcnt;
    logic             pop;

    assign acc_rvalid[k] = full[rsel];
    assign acc_rdata[k]  = mem[{rsel, rcnt}];
    assign half_free[k]  = ~full;
    assign pop           = acc_rvalid[k] && acc_rready[k];

    always_ff @(posedge clk) begin
      if (we[k]) mem[waddr[k]] <= wdata[k];
    end

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        full <= '0;
        fsel <= 1'b0;
        rsel <= 1'b0;
        rcnt <= '0;
      end else begin
        if (commit[k]) begin
          full[fsel] <= 1'b1;
          fsel       <= ~fsel;
        end
        if (pop) begin
          rcnt <= rcnt + 1'b1;
          if (rcnt == LGN'(N_PORTS - 1)) begin
            full[rsel] <= 1'b0;
            rsel       <= ~rsel;
          end
        end
      end
    end

    a_commit_free : assert property (@(posedge clk) disable iff (!rst_n)
      commit[k] |-> !full[fsel]);
  end
endmodule
