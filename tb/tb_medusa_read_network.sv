// tb_medusa_read_network: end-to-end test of the memory-read network
// (8 ports x 16 bits = 128-bit lines, 4-line regions, single-cycle rotation).
// A DRAM model returns random lines tagged with random ports (holding a line
// while it is refused); accelerator ports drain with random ready. Every
// word must reach its port in order. Four phases:
//  1. latency: one line into an idle network must appear at its port
//     exactly N + LAT + 1 cycles after it is accepted (LAT = 1),
//  2. bandwidth: with every port ready and lines sent round robin, one line
//     is accepted every cycle,
//  3. random traffic with slow ports, to make regions fill up (DRAM refused),
//     output double buffers fill, and ports join the rotation at any phase,
//  4. one port alone, always ready and always offered lines: the double
//     buffer limits it to 2N words per 2N + LAT cycles.
module tb_medusa_read_network;
  localparam int N = 8, W = 16, MB = 4, LGN = 3, PW = 3;
  localparam bit PIPE = 1'b0;
  localparam int LAT = 1 + (PIPE ? LGN : 0);
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, dram_rvalid, dram_rready;
  logic [LGN-1:0] dram_rport;
  logic [N-1:0][W-1:0] dram_rdata, acc_rdata;
  logic [N-1:0][PW-1:0] lines_free;
  logic [N-1:0] acc_rvalid, acc_rready, busy;

  medusa_read_network #(.N_PORTS(N), .W_ACC(W), .MAX_BURST(MB), .ROT_PIPE(PIPE)) dut (.*);

  logic [W-1:0] q [N][$];
  int refused = 0, ob_full = 0, joins = 0, accepted = 0, received = 0;
  int rx [N];
  logic [N-1:0] prev_busy = '0;
  bit hold = 0;   // the line on offer was refused and must stay

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", msg, $time); end
  endtask

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one cycle: drive (already done by caller), sample at negedge, advance
  task automatic cycle();
    bit acc;
    @(negedge clk);
    acc = dram_rvalid && dram_rready;
    hold = dram_rvalid && !dram_rready;
    if (hold) refused++;
    if (acc) begin
      for (int w = 0; w < N; w++) q[dram_rport].push_back(dram_rdata[w]);
      accepted++;
    end
    for (int p = 0; p < N; p++) begin
      if (acc_rvalid[p] && acc_rready[p]) begin
        chk(q[p].size() > 0, "word expected");
        if (q[p].size() > 0) chk(acc_rdata[p] == q[p].pop_front(), "word order/content");
        received++;
        rx[p]++;
      end
      if (dut.ob_half_free[p] == 2'b00) ob_full++;
      if (busy[p] && !prev_busy[p] && dut.u_rctrl.phase != 0 && (busy & ~(N'(1) << p)) != '0) joins++;
    end
    prev_busy = busy;
    @(posedge clk); #1;
  endtask

  task automatic new_line(input int p);
    dram_rvalid = 1; dram_rport = LGN'(p);
    for (int w = 0; w < N; w++) dram_rdata[w] = W'($urandom);
  endtask

  initial begin
    int t0, lat, start_acc, win, r0;
    for (int p = 0; p < N; p++) rx[p] = 0;
    rst_n = 0; dram_rvalid = 0; dram_rport = '0; dram_rdata = '0; acc_rready = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (5) cycle();
    // ---- 1. latency, at two different phases
    for (int rep = 0; rep < 2; rep++) begin
      new_line(3 + rep);
      t0 = 0; lat = -1;
      cycle();
      dram_rvalid = 0;
      for (int c = 1; c < 100 && lat < 0; c++) begin
        #0;
        if (acc_rvalid[3 + rep]) lat = c;
        cycle();
      end
      chk(lat == N + LAT + 1, "latency");
      $display("latency = %0d cycles (expected %0d)", lat, N + LAT + 1);
      acc_rready = '1;
      repeat (N + 2) cycle();
      acc_rready = '0;
      repeat (rep + 2) cycle();
    end
    // ---- 2. bandwidth: round robin, all ports ready
    acc_rready = '1;
    start_acc = accepted;
    win = 40 * N;
    for (int c = 0; c < win; c++) begin
      if (!hold) new_line(c % N);
      cycle();
    end
    while (hold) cycle();
    dram_rvalid = 0;
    chk(accepted - start_acc == win, "one line per cycle");
    $display("bandwidth: %0d lines in %0d cycles", accepted - start_acc, win);
    // ---- 3. random traffic, ports 0 and 1 slow
    for (int c = 0; c < 3000; c++) begin
      if (!hold) begin
        if ($urandom % 4 != 0) new_line(int'($urandom % N)); else dram_rvalid = 0;
      end
      for (int p = 0; p < N; p++) acc_rready[p] = (p < 2) ? ($urandom % 10 == 0) : 1'($urandom);
      cycle();
    end
    acc_rready = '1;
    while (hold) cycle();
    dram_rvalid = 0;
    repeat (20 * N * MB) cycle();
    for (int p = 0; p < N; p++) chk(q[p].size() == 0, "all words delivered");
    // ---- 4. one port streaming alone
    acc_rready = '1;
    for (int c = 0; c < 4 * (2 * N + LAT); c++) begin
      if (!hold) new_line(2);
      cycle();
    end
    r0 = rx[2];
    win = 20 * (2 * N + LAT);
    for (int c = 0; c < win; c++) begin
      if (!hold) new_line(2);
      cycle();
    end
    $display("single port: %0d words in %0d cycles (limit %0d)", rx[2] - r0, win, 20 * 2 * N);
    chk(rx[2] - r0 >= 20 * 2 * N - 1 && rx[2] - r0 <= 20 * 2 * N + 1, "single-port rate 2N/(2N+LAT)");
    while (hold) cycle();
    dram_rvalid = 0;
    repeat (20 * N * MB) cycle();
    chk(q[2].size() == 0, "single-port words delivered");
    chk(refused > 0, "DRAM back pressure seen");
    chk(ob_full > 0, "output double buffer full seen");
    chk(joins > 0, "port joined mid-rotation");
    $display("accepted=%0d received=%0d refused=%0d ob_full=%0d joins=%0d", accepted, received, refused, ob_full, joins);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
