// write_input_buffer: double-buffered input buffer of the write network.
//
// Bank k belongs to accelerator write port k and holds two lines of N_PORTS
// words (word address = {half, word index}). The accelerator writes through
// a valid/ready stream, one word per cycle, in increasing word index;
// acc_wready[k] is low only while both halves hold complete lines. A half
// that is complete raises line_ready[k] (from the cycle after its last word)
// for the output buffer writing controller, which reads it with one word
// address per bank (raddr[k], asynchronous read, rdata[k] in the same cycle)
// and hands it back with release[k], in the cycle of its last read.
// Double buffering and one bank per port follow the paper; the handshakes are
// this design's choices.
module write_input_buffer #(
  parameter int unsigned N_PORTS = medusa_pkg::N_PORTS_DEF,
  parameter int unsigned W_ACC   = medusa_pkg::W_ACC_DEF,
  localparam int unsigned LGN    = $clog2(N_PORTS)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [N_PORTS-1:0]            acc_wvalid,
  output logic [N_PORTS-1:0]            acc_wready,
  input  logic [N_PORTS-1:0][W_ACC-1:0] acc_wdata,
  output logic [N_PORTS-1:0]            line_ready,
  input  logic [N_PORTS-1:0][LGN-1:0]   raddr,
  output logic [N_PORTS-1:0][W_ACC-1:0] rdata,
  input  logic [N_PORTS-1:0]            release_line
);
  for (genvar k = 0; k < N_PORTS; k++) begin : g_bank
    logic [W_ACC-1:0] mem [2*N_PORTS];
    logic [1:0]       full;
    logic             wsel, rsel;
    logic [LGN-1:0]   wcnt;
    logic             push;

    assign acc_wready[k] = !full[wsel];
    assign push          = acc_wvalid[k] && acc_wready[k];
    assign line_ready[k] = full[rsel];
    assign rdata[k]      = mem[{rsel, raddr[k]}];

    always_ff @(posedge clk) begin
      if (push) mem[{wsel, wcnt}] <= acc_wdata[k];
    end

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        full <= '0;
        wsel <= 1'b0;
        rsel <= 1'b0;
        wcnt <= '0;
      end else begin
        if (push) begin
          wcnt <= wcnt + 1'b1;
          if (wcnt == LGN'(N_PORTS - 1)) begin
            full[wsel] <= 1'b1;
            wsel       <= ~wsel;
          end
        end
        if (release_line[k]) begin
          full[rsel] <= 1'b0;
          rsel       <= ~rsel;
        end
      end
    end

    a_release_full : assert property (@(posedge clk) disable iff (!rst_n)
      release_line[k] |-> full[rsel]);
  end
endmodule
