// read_ib_read_ctrl: input buffer reading controller of the read network.
//
// This is the scheduler of the transposition. A free-running phase counter c
// advances every cycle (mod N_PORTS). A port x whose head line is present in
// the input buffer and which has an empty output half-buffer starts at once,
// whatever c is, and for the next N_PORTS cycles reads word (x + c) mod N from
// bank (x + c) mod N, i.e. bank b serves port (b - c) mod N. After N cycles it
// has visited every word of the line, its head pointer advances and it may
// start its next line in the following cycle. Ports start and stop
// independently; they never compete for a bank because in any cycle each
// bank is owned by exactly one port.
//
// The words read from the banks in cycle c pass through the rotation unit,
// rotated left by c, so lane k carries port k's word (k, (k+c) mod N); output
// buffer bank k stores it at word address (k + c) mod N of the half-buffer
// the controller picked for that line. The commands are delayed to meet the
// data: rot_amt by one cycle (the bank read register), the output writes and
// the commit pulse by 1 + the rotation latency (LAT). ob_commit[k] is raised
// in the cycle of the line's last write and marks that half full.
//
// Timing: a line written to the input buffer at edge t can start reading in
// cycle t+1; its last word is written to the output buffer LAT + N - 1
// cycles later. The read pattern and output addressing follow the paper;
// the half-buffer handover and the reset are this design's choices.
module read_ib_read_ctrl #(
  parameter int unsigned N_PORTS   = medusa_pkg::N_PORTS_DEF,
  parameter int unsigned MAX_BURST = medusa_pkg::MAX_BURST_DEF,
  parameter bit          ROT_PIPE  = medusa_pkg::ROT_PIPE_DEF,
  localparam int unsigned LGN = $clog2(N_PORTS),
  localparam int unsigned SW  = $clog2(MAX_BURST),
  localparam int unsigned PW  = SW + 1,
  localparam int unsigned AW  = LGN + SW,
  localparam int unsigned LAT = 1 + medusa_pkg::rot_latency(N_PORTS, ROT_PIPE)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [N_PORTS-1:0][PW-1:0]    tail,
  output logic [N_PORTS-1:0][PW-1:0]    head,
  // input buffer read command
  output logic [N_PORTS-1:0]            ib_re,
  output logic [N_PORTS-1:0][AW-1:0]    ib_raddr,
  // rotation amount, aligned with the input buffer read data
  output logic [LGN-1:0]                rot_amt,
  // output buffer write command, aligned with the rotation unit output
  input  logic [N_PORTS-1:0][1:0]       ob_half_free,
  output logic [N_PORTS-1:0]            ob_we,
  output logic [N_PORTS-1:0][LGN:0]     ob_waddr,
  output logic [N_PORTS-1:0]            ob_commit,
  // activity, for observation: ports transposing this cycle
  output logic [N_PORTS-1:0]            busy
);
  logic [LGN-1:0]               phase;
  logic [N_PORTS-1:0]           active, wsel, start, rd, done;
  logic [N_PORTS-1:0][LGN-1:0]  cnt;
  logic [N_PORTS-1:0][LGN:0]    waddr_now;

  always_comb begin
    for (int x = 0; x < int'(N_PORTS); x++) begin
      start[x]     = !active[x] && (head[x] != tail[x]) && ob_half_free[x][wsel[x]];
      rd[x]        = active[x] || start[x];
      done[x]      = rd[x] && ((active[x] ? cnt[x] : '0) == LGN'(N_PORTS - 1));
      // output lane x receives word index (x + phase) mod N of port x
      waddr_now[x] = {wsel[x], LGN'(x + int'(phase))};
    end
    for (int b = 0; b < int'(N_PORTS); b++) begin
      automatic logic [LGN-1:0] x = LGN'(b - int'(phase));
      ib_re[b]    = rd[x];
      ib_raddr[b] = {x, head[x][SW-1:0]};
    end
  end
  assign busy = rd;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phase  <= '0;
      active <= '0;
      wsel   <= '0;
      cnt    <= '0;
      head   <= '0;
    end else begin
      phase <= phase + 1'b1;
      for (int x = 0; x < int'(N_PORTS); x++) begin
        if (rd[x]) cnt[x] <= (active[x] ? cnt[x] : '0) + 1'b1;
        if (done[x]) begin
          active[x] <= 1'b0;
          wsel[x]   <= ~wsel[x];
          head[x]   <= head[x] + 1'b1;
        end else if (start[x]) begin
          active[x] <= 1'b1;
        end
      end
    end
  end

  delay_line #(.W(LGN), .D(1)) u_amt_dly (.clk, .rst_n, .din(phase), .dout(rot_amt));

  logic [N_PORTS-1:0] we_d, commit_d;
  delay_line #(.W(N_PORTS), .D(LAT), .RESET(1'b1)) u_we_dly (.clk, .rst_n, .din(rd), .dout(we_d));
  delay_line #(.W(N_PORTS), .D(LAT), .RESET(1'b1)) u_cm_dly (.clk, .rst_n, .din(done), .dout(commit_d));
  delay_line #(.W(N_PORTS * (LGN + 1)), .D(LAT)) u_wa_dly (.clk, .rst_n, .din(waddr_now), .dout(ob_waddr));
  assign ob_we     = we_d;
  assign ob_commit = commit_d;

  // Each input bank is owned by one port per cycle, so a port never reads
  // outside its own region and never reads an empty region.
  for (genvar x = 0; x < N_PORTS; x++) begin : g_chk
    a_not_empty : assert property (@(posedge clk) disable iff (!rst_n)
      rd[x] |-> head[x] != tail[x]);
  end
endmodule
