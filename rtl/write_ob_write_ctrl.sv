// write_ob_write_ctrl: output buffer writing controller of the write network.
//
// The mirror image of the read-side scheduler. A phase counter c runs freely
// mod N_PORTS. Port k starts transposing as soon as its input half-buffer
// holds a complete line and its region of the deep output buffer has a free
// line slot; for N_PORTS cycles it reads word (k + c) mod N of its bank.
// The rotation unit turns by (N - c) mod N words to the left, i.e. by c to
// the right, so lane k's word lands in lane (k + c) mod N = its word index,
// and output bank j writes the slot at port (j - c) mod N's write pointer.
// After N cycles the input half is released, the write pointer advances and
// the port may start again in the next cycle.
//
// Timing: the input buffer is read asynchronously, so the rotation amount is
// issued in the read cycle; output writes are delayed by the rotation
// latency R, and `tail` (complete lines, seen by the reading controller)
// advances R cycles after the last read, when the last write has landed.
// The paper describes the write direction only as the read network run the
// other way; this schedule is the inverse of its read schedule.
module write_ob_write_ctrl #(
  parameter int unsigned N_PORTS   = medusa_pkg::N_PORTS_DEF,
  parameter int unsigned MAX_BURST = medusa_pkg::MAX_BURST_DEF,
  parameter bit          ROT_PIPE  = medusa_pkg::ROT_PIPE_DEF,
  localparam int unsigned LGN = $clog2(N_PORTS),
  localparam int unsigned SW  = $clog2(MAX_BURST),
  localparam int unsigned PW  = SW + 1,
  localparam int unsigned AW  = LGN + SW,
  localparam int unsigned R   = medusa_pkg::rot_latency(N_PORTS, ROT_PIPE)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // input buffer
  input  logic [N_PORTS-1:0]            line_ready,
  output logic [N_PORTS-1:0][LGN-1:0]   ib_raddr,
  output logic [N_PORTS-1:0]            release_line,
  // rotation amount, same cycle as the input buffer read
  output logic [LGN-1:0]                rot_amt,
  // output buffer write command, aligned with the rotation unit output
  output logic [N_PORTS-1:0]            ob_we,
  output logic [N_PORTS-1:0][AW-1:0]    ob_waddr,
  // pointers
  input  logic [N_PORTS-1:0][PW-1:0]    head,
  output logic [N_PORTS-1:0][PW-1:0]    tail,
  output logic [N_PORTS-1:0]            busy
);
  logic [LGN-1:0]              phase;
  logic [N_PORTS-1:0]          active, start, rd, done, done_d;
  logic [N_PORTS-1:0][LGN-1:0] cnt;
  logic [N_PORTS-1:0][PW-1:0]  wptr;
  logic [N_PORTS-1:0]          we_now;
  logic [N_PORTS-1:0][AW-1:0]  waddr_now;

  always_comb begin
    for (int k = 0; k < int'(N_PORTS); k++) begin
      start[k]        = !active[k] && line_ready[k] && (PW'(wptr[k] - head[k]) != PW'(MAX_BURST));
      rd[k]           = active[k] || start[k];
      done[k]         = rd[k] && ((active[k] ? cnt[k] : '0) == LGN'(N_PORTS - 1));
      ib_raddr[k]     = LGN'(k + int'(phase));
      release_line[k] = done[k];
    end
    for (int j = 0; j < int'(N_PORTS); j++) begin
      automatic logic [LGN-1:0] x = LGN'(j - int'(phase));
      we_now[j]    = rd[x];
      waddr_now[j] = {x, wptr[x][SW-1:0]};
    end
  end
  assign rot_amt = LGN'(-int'(phase));
  assign busy    = rd;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phase  <= '0;
      active <= '0;
      cnt    <= '0;
      wptr   <= '0;
      tail   <= '0;
    end else begin
      phase <= phase + 1'b1;
      for (int k = 0; k < int'(N_PORTS); k++) begin
        if (rd[k]) cnt[k] <= (active[k] ? cnt[k] : '0) + 1'b1;
        if (done[k]) begin
          active[k] <= 1'b0;
          wptr[k]   <= wptr[k] + 1'b1;
        end else if (start[k]) begin
          active[k] <= 1'b1;
        end
        if (done_d[k]) tail[k] <= tail[k] + 1'b1;
      end
    end
  end

  logic [N_PORTS-1:0] we_d;
  delay_line #(.W(N_PORTS), .D(R), .RESET(1'b1)) u_we_dly (.clk, .rst_n, .din(we_now), .dout(we_d));
  delay_line #(.W(N_PORTS), .D(R), .RESET(1'b1)) u_dn_dly (.clk, .rst_n, .din(done), .dout(done_d));
  delay_line #(.W(N_PORTS * AW), .D(R)) u_wa_dly (.clk, .rst_n, .din(waddr_now), .dout(ob_waddr));
  assign ob_we = we_d;
endmodule
