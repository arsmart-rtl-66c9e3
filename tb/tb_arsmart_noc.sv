// tb_arsmart_noc -- end-to-end test of the ArSMART NoC at its default size
// (8x8 mesh, one 8x8 cluster, 1024 controller threads, HPC_MAX = 8).
//
// A processor model per PE runs tasks: at the start of a task it hands its
// messages to the network interface, after the task length it signals the end
// of the task.  Flit payloads carry source, destination, flit index and a
// check word, so every received flit can be checked on its own; the test also
// checks that every message arrives complete and in order.  The phases make
// each mechanism of the design happen and count it:
//   1. corner to corner (14 hops): single-cycle multi-hop travel with a stop in
//      a delay register; the first flit must arrive 3 cycles after
//      transmission-begin and the rest one per cycle;
//   2. a task shorter than route computation: the message goes on its XY route;
//   3. a long message loads a row, a later message routes around it (R1 detour);
//   4. three messages to a corner PE with two input links: one is blocked at
//      its source until a path is released;
//   5. one PE sends in several directions at once;
//   6. random traffic.
module tb_arsmart_noc;
  import arsmart_pkg::*;

  localparam int N = 8, R = 64, SW = 16;

  logic clk = 0, rst_n = 0;
  logic              msg_valid [R];
  logic [5:0]        msg_dst   [R];
  logic [SW-1:0]     msg_size  [R];
  logic              msg_ready [R];
  logic              task_done [R];
  logic              rd_valid  [R][4];
  logic [5:0]        rd_dst    [R][4];
  logic [SW-1:0]     rd_idx    [R][4];
  logic [FLIT_W-1:0] rd_data   [R][4];
  flit_t             rx_flit   [R][4];
  ctl_events_t       events;

  arsmart_noc dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // ---------------- payload ----------------
  function automatic logic [FLIT_W-1:0] payload(int s, int d, int i);
    logic [31:0] h;
    h = 32'(s) * 32'h9E3779B1 ^ 32'(d) * 32'h85EBCA77 ^ 32'(i) * 32'hC2B2AE3D;
    return {8'(s), 8'(d), 16'(i), 32'hA55A_F00D, h, ~h};
  endfunction

  // memory of every PE, read combinationally by the network interfaces
  always_comb
    for (int p = 0; p < R; p++)
      for (int d = 0; d < 4; d++)
        rd_data[p][d] = payload(p, int'(rd_dst[p][d]), int'(rd_idx[p][d]));

  // ---------------- expected messages ----------------
  int exp_size [R][R][$];   // sizes of messages still to arrive, per pair
  int next_idx [R][R];
  int sent = 0, delivered = 0;
  int tasks_left = 0;
  int flits_rx = 0;

  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < R; p++)
      for (int d = 0; d < 4; d++)
        if (rx_flit[p][d].valid) begin
          logic [FLIT_W-1:0] f;
          int s, t, i;
          f = rx_flit[p][d].data;
          s = int'(f[127:120]); t = int'(f[119:112]); i = int'(f[111:96]);
          flits_rx++;
          checks++;
          if (s >= R || t != p || f != payload(s, t, i) || exp_size[s][t].size() == 0 || i != next_idx[s][t]) begin
            failures++;
            $display("FAIL PE %0d side %0d: bad flit src %0d dst %0d idx %0d (expected idx %0d) at %0d", p, d, s, t, i,
                     (s < R) ? next_idx[s][t] : -1, cycle);
          end else begin
            next_idx[s][t]++;
            if (next_idx[s][t] == exp_size[s][t][0]) begin
              void'(exp_size[s][t].pop_front());
              next_idx[s][t] = 0;
              delivered++;
            end
          end
        end
  end

  // ---------------- processor model ----------------
  task automatic run_task(int pe, int len, int dsts[$], int sizes[$]);
    longint t0;
    t0 = cycle;
    foreach (dsts[k]) begin
      msg_valid[pe] <= 1'b1;
      msg_dst[pe]   <= 6'(dsts[k]);
      msg_size[pe]  <= SW'(sizes[k]);
      exp_size[pe][dsts[k]].push_back(sizes[k]);
      sent++;
      do @(posedge clk); while (!msg_ready[pe]);
      msg_valid[pe] <= 1'b0;
    end
    while (cycle < t0 + len) @(posedge clk);
    task_done[pe] <= 1'b1;
    @(posedge clk);
    task_done[pe] <= 1'b0;
  endtask

  task automatic wait_all(int limit);
    longint t0;
    t0 = cycle;
    while (delivered != sent && cycle < t0 + limit) @(posedge clk);
    checks++;
    if (delivered != sent) begin
      failures++;
      $display("FAIL only %0d of %0d messages delivered at %0d", delivered, sent, cycle);
    end
    repeat (20) @(posedge clk);
  endtask

  // ---------------- mechanism counters ----------------
  int n_grant = 0, n_grant_xy = 0, n_blocked = 0, n_r1 = 0, n_detour = 0, n_release = 0;
  int n_delay = 0, n_multi_dir = 0;
  always @(posedge clk) if (rst_n) begin
    n_grant    += int'(events.grant);
    n_grant_xy += int'(events.grant_xy);
    n_blocked  += int'(events.blocked);
    n_r1       += int'(events.r1_commit);
    n_detour   += int'(events.r1_detour);
    n_release  += int'(events.release_);
    for (int p = 0; p < R; p++) begin
      automatic int act = 0;
      for (int d = 0; d < 4; d++) act += int'(rd_valid[p][d]);
      if (act > 1) n_multi_dir++;
    end
  end

  // flits held in a delay register of any router
  for (genvar r = 0; r < R; r++) begin : g_mon
    always @(posedge clk) if (rst_n)
      for (int o = 0; o < 4; o++)
        if (dut.g_node[r].u_router.u_xbar.nl_dly[o] && dut.g_node[r].u_router.u_xbar.dly_q[o].valid) n_delay++;
  end

  // latency of the corner-to-corner message
  longint t_begin0 = -1, t_first63 = -1, t_last63 = -1;
  always @(posedge clk) if (rst_n) begin
    if (dut.begin_valid[0] && dut.begin_dst[0] == 6'd63 && t_begin0 < 0) t_begin0 = cycle;
    for (int d = 0; d < 4; d++)
      if (rx_flit[63][d].valid && rx_flit[63][d].data[127:120] == 8'd0) begin
        if (t_first63 < 0) t_first63 = cycle;
        t_last63 = cycle;
      end
  end

  task automatic count(string what, int n);
    checks++;
    $display("  %-34s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired: tasks left %0d, %0d of %0d messages delivered", tasks_left, delivered, sent);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < R; p++) begin
      msg_valid[p] = 0; msg_dst[p] = 0; msg_size[p] = 0; task_done[p] = 0;
      for (int q = 0; q < R; q++) next_idx[p][q] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);

    // 1. corner to corner, task long enough for the R1 route
    run_task(0, 400, '{63}, '{6});
    wait_all(2000);
    checks++;
    if (t_first63 - t_begin0 != 3 || t_last63 - t_first63 != 5) begin
      failures++;
      $display("FAIL 0->63 timing: begin %0d first %0d last %0d", t_begin0, t_first63, t_last63);
    end

    // 2. short task: only the XY route is ready
    run_task(9, 2, '{14}, '{4});
    wait_all(2000);

    // 3. long message along row 2, then a message that must avoid its links
    fork
      run_task(16, 300, '{23}, '{200});
      begin repeat (5) @(posedge clk); run_task(17, 600, '{22}, '{8}); end
    join
    wait_all(3000);

    // 4. three messages into corner PE 56 (inputs N and E only)
    fork
      run_task(48, 300, '{56}, '{40});
      run_task(57, 300, '{56}, '{40});
      run_task(49, 300, '{56}, '{40});
    join
    wait_all(3000);

    // 5. one PE, three directions
    run_task(27, 300, '{24, 31, 3}, '{12, 12, 12});
    wait_all(2000);

    // 6. random traffic: every PE one task with one or two messages
    tasks_left = R;
    begin
      for (int p = 0; p < R; p++) begin
        automatic int pp = p;
        fork
          begin
            automatic int ds[$], ss[$];
            automatic int n = 1 + $urandom_range(1);
            for (int k = 0; k < n; k++) begin
              automatic int d;
              do d = $urandom_range(R - 1); while (d == pp);
              ds.push_back(d); ss.push_back(1 + $urandom_range(15));
            end
            repeat ($urandom_range(50)) @(posedge clk);
            run_task(pp, 20 + $urandom_range(400), ds, ss);
            tasks_left--;
          end
        join_none
      end
    end
    wait (tasks_left == 0);
    wait_all(20000);

    $display("messages sent %0d delivered %0d flits %0d", sent, delivered, flits_rx);
    count("grants", n_grant);
    count("grants on the XY route", n_grant_xy);
    count("cycles with a message blocked", n_blocked);
    count("R1 routes", n_r1);
    count("R1 detours", n_detour);
    count("releases", n_release);
    count("delay-register stops", n_delay);
    count("multi-direction injection cycles", n_multi_dir);
    checks++;
    if (n_grant != sent || n_release != sent) begin
      failures++;
      $display("FAIL grants %0d releases %0d for %0d messages", n_grant, n_release, sent);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
