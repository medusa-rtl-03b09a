// tb_medusa_top: end-to-end test of the whole interconnect at its default
// size: a 512-bit DRAM interface shared by 32 read and 32 write ports of 16
// bits, 32-line bursts per port, single-cycle rotation. Models of the DRAM
// controller, the request arbiter and the accelerator surround it and every
// 16-bit word is checked on both paths. Phases:
//  1. latency of an idle network, read (N + 2 = 34 cycles from line
//     accepted to first word valid) and write (N + 1 = 33 cycles from last
//     word written to line available), at two different rotation phases,
//  2. full bandwidth: a line per cycle in each direction, no port stalled,
//  3. random traffic where one read port and one write port are slow, so
//     that every mechanism of the design happens; each is counted and a
//     mechanism that never happened counts as a failure:
//     read region full (DRAM held back), read output double buffer full,
//     write input double buffer full (accelerator held back), write output
//     region full (transposition held back), and ports joining a rotation
//     already in progress, on both sides.
module tb_medusa_top;
  localparam int N = 32, W = 16, MB = 32, LGN = 5, PW = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n;
  logic dram_rvalid, dram_rready, wreq_valid, wreq_ready, dram_wvalid;
  logic [LGN-1:0] dram_rport, wreq_port, dram_wport;
  logic [N-1:0][W-1:0] dram_rdata, acc_rdata, acc_wdata, dram_wdata;
  logic [N-1:0][PW-1:0] rd_lines_free, wr_lines_avail;
  logic [N-1:0] acc_rvalid, acc_rready, acc_wvalid, acc_wready, rd_busy, wr_busy;

  medusa_top dut (.*);

  logic [W-1:0] rq [N][$];
  int pushed [N], got_lines [N];
  int rd_accepted = 0, rd_words = 0, wr_lines = 0;
  // mechanism counters
  int m_rd_region_full = 0, m_rd_ob_full = 0, m_rd_join = 0;
  int m_wr_ib_full = 0, m_wr_region_full = 0, m_wr_join = 0;
  logic [N-1:0] prev_rb = '0, prev_wb = '0;
  bit hold = 0;

  function automatic logic [W-1:0] wpat(int p, int idx);
    return {5'(p), 11'(idx)};
  endfunction
  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", msg, $time); end
  endtask

  initial begin
    #3000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cycle();
    bit push [N];
    bit acc;
    @(negedge clk);
    // read direction
    acc  = dram_rvalid && dram_rready;
    hold = dram_rvalid && !dram_rready;
    if (hold) m_rd_region_full++;
    if (acc) begin
      for (int w = 0; w < N; w++) rq[dram_rport].push_back(dram_rdata[w]);
      rd_accepted++;
    end
    for (int p = 0; p < N; p++) begin
      if (acc_rvalid[p] && acc_rready[p]) begin
        chk(rq[p].size() > 0, "read word expected");
        if (rq[p].size() > 0) chk(acc_rdata[p] == rq[p].pop_front(), "read word order/content");
        rd_words++;
      end
      if (dut.u_read.ob_half_free[p] == 2'b00 && rd_lines_free[p] != PW'(MB)) m_rd_ob_full++;
      if (rd_busy[p] && !prev_rb[p] && dut.u_read.u_rctrl.phase != 0 && (rd_busy & ~(N'(1) << p)) != '0) m_rd_join++;
      // write direction
      push[p] = acc_wvalid[p] && acc_wready[p];
      if (acc_wvalid[p] && !acc_wready[p]) m_wr_ib_full++;
      if (dut.u_write.line_ready[p] && !wr_busy[p]) m_wr_region_full++;
      if (wr_busy[p] && !prev_wb[p] && dut.u_write.u_wctrl.phase != 0 && (wr_busy & ~(N'(1) << p)) != '0) m_wr_join++;
    end
    prev_rb = rd_busy; prev_wb = wr_busy;
    if (dram_wvalid) begin
      for (int w = 0; w < N; w++)
        chk(dram_wdata[w] == wpat(int'(dram_wport), got_lines[dram_wport] * N + w), "write line content");
      got_lines[dram_wport]++;
      wr_lines++;
    end
    @(posedge clk); #1;
    for (int p = 0; p < N; p++) if (push[p]) pushed[p]++;
    for (int p = 0; p < N; p++) acc_wdata[p] = wpat(p, pushed[p]);
  endtask

  task automatic new_line(input int p);
    dram_rvalid = 1; dram_rport = LGN'(p);
    for (int w = 0; w < N; w++) dram_rdata[w] = W'($urandom);
  endtask

  task automatic arbitrate(input int from, input int skip);
    wreq_valid = 0;
    for (int i = 0; i < N; i++) begin
      int p;
      p = (from + i) % N;
      if (p != skip && wr_lines_avail[p] != '0) begin wreq_valid = 1; wreq_port = LGN'(p); break; end
    end
  endtask

  initial begin
    int lat, t, r0, w0;
    rst_n = 0; dram_rvalid = 0; dram_rport = '0; dram_rdata = '0; acc_rready = '0;
    acc_wvalid = '0; wreq_valid = 0; wreq_port = '0;
    for (int p = 0; p < N; p++) begin pushed[p] = 0; got_lines[p] = 0; acc_wdata[p] = wpat(p, 0); end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (3) cycle();

    // ---- 1. latency
    for (int rep = 0; rep < 2; rep++) begin
      new_line(7 + rep);
      cycle();
      dram_rvalid = 0;
      lat = -1;
      for (int c = 1; c < 200 && lat < 0; c++) begin
        if (acc_rvalid[7 + rep]) lat = c;
        cycle();
      end
      chk(lat == N + 2, "read latency");
      $display("read latency = %0d cycles (expected %0d)", lat, N + 2);
      acc_rready = '1;
      repeat (N + 1) cycle();
      acc_rready = '0;

      acc_wvalid[20 + rep] = 1;
      repeat (N) cycle();
      acc_wvalid[20 + rep] = 0;
      lat = -1;
      for (int c = 1; c < 200 && lat < 0; c++) begin
        if (wr_lines_avail[20 + rep] != '0) lat = c;
        cycle();
      end
      chk(lat == N + 1, "write latency");
      $display("write latency = %0d cycles (expected %0d)", lat, N + 1);
      arbitrate(20 + rep, -1);
      cycle();
      wreq_valid = 0;
      repeat (rep + 3) cycle();
    end

    // ---- 2. bandwidth, both directions at once
    acc_rready = '1; acc_wvalid = '1;
    for (t = 0; t < 4 * N; t++) begin
      if (!hold) new_line(t % N);
      arbitrate(t, -1); cycle();
    end
    r0 = rd_accepted; w0 = wr_lines;
    m_rd_region_full = 0; m_wr_ib_full = 0;
    for (t = 0; t < 16 * N; t++) begin
      if (!hold) new_line(t % N);
      arbitrate(t, -1); cycle();
    end
    chk(rd_accepted - r0 == 16 * N, "read: one line per cycle");
    chk(wr_lines - w0 >= 16 * N - 1, "write: one line per cycle");
    chk(m_rd_region_full == 0 && m_wr_ib_full == 0, "no stall at full rate");
    $display("bandwidth: read %0d, write %0d lines in %0d cycles", rd_accepted - r0, wr_lines - w0, 16 * N);
    wreq_valid = 0;
    while (hold) cycle();
    dram_rvalid = 0;

    // ---- 3. random traffic; read port 3 and write port 9 are slow
    for (t = 0; t < 6000; t++) begin
      if (!hold) begin
        if ($urandom % 4 != 0) new_line(($urandom % 3 == 0) ? 3 : int'($urandom % N));
        else dram_rvalid = 0;
      end
      for (int p = 0; p < N; p++) begin
        acc_rready[p] = (p == 3) ? ($urandom % 16 == 0) : 1'($urandom);
        acc_wvalid[p] = (p == 9) ? 1'b1 : ($urandom % 3 == 0);
      end
      // the arbiter serves write port 9 rarely
      if ($urandom % 2 == 0) arbitrate(int'($urandom % N), ($urandom % 64 == 0) ? -1 : 9);
      else wreq_valid = 0;
      cycle();
    end
    // drain everything
    acc_rready = '1; acc_wvalid = '0; wreq_valid = 0;
    while (hold) cycle();
    dram_rvalid = 0;
    for (t = 0; t < 40 * N * 4; t++) begin arbitrate(t, -1); cycle(); end
    wreq_valid = 0;
    for (int p = 0; p < N; p++) begin
      chk(rq[p].size() == 0, "all read words delivered");
      chk(got_lines[p] * N == pushed[p] - pushed[p] % N, "all complete write lines delivered");
    end
    $display("read: %0d lines, %0d words; write: %0d lines", rd_accepted, rd_words, wr_lines);
    $display("mechanisms: rd_region_full=%0d rd_ob_full=%0d rd_join=%0d wr_ib_full=%0d wr_region_full=%0d wr_join=%0d",
             m_rd_region_full, m_rd_ob_full, m_rd_join, m_wr_ib_full, m_wr_region_full, m_wr_join);
    chk(m_rd_region_full > 0, "read region full happened");
    chk(m_rd_ob_full > 0, "read output double buffer full happened");
    chk(m_rd_join > 0, "read port joined a running rotation");
    chk(m_wr_ib_full > 0, "write input double buffer full happened");
    chk(m_wr_region_full > 0, "write output region full happened");
    chk(m_wr_join > 0, "write port joined a running rotation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
