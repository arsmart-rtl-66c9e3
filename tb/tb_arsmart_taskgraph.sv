// tb_arsmart_taskgraph -- synthetic task-graph workload on the ArSMART NoC at
// its default size (8x8 mesh, one cluster, 1024 threads, HPC_MAX = 8).
//
// The workload follows the default synthetic traffic of the ArSMART
// evaluation: a random task graph of 100 tasks and 300 messages on an 8x8
// mesh, average message size 8192.  The unit of that size is not stated; it
// is taken here as bits, i.e. 64 flits of 128 bits, and sizes are drawn
// uniformly from 32..96 flits.  Task run times (32..96 cycles) and the
// mapping (each task on a random PE) are this testbench's choices; the
// original uses a separate mapping algorithm.
//
// The graph is a random DAG: every message goes from a lower-numbered to a
// higher-numbered task, with no duplicate pairs.  A processor model per PE
// runs its tasks in index order.  A task starts when all of its incoming
// messages have arrived.  At its start the task hands its outgoing messages
// to the network interface, at most NI_MSGS at a time; after the run time it
// pulses task_done.  Messages that do not fit, or that go to a PE that still
// has an earlier message from this PE in flight, are handed over in later
// batches, each batch ended by another task_done.  A message between two
// tasks on the same PE is delivered locally.
//
// Checks: every flit carries its source, destination and index and must
// arrive in order with the right data; every message and every task must
// complete before the watchdog; the controller must grant and release each
// network message exactly once.  The schedule length and how often each
// mechanism occurred are printed.
module tb_arsmart_taskgraph;
  import arsmart_pkg::*;

  localparam int R = 64, SW = 16, NI_MSGS = 4;
  localparam int TASKS = 100, EDGES = 300;

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

  function automatic logic [FLIT_W-1:0] payload(int s, int d, int i);
    logic [31:0] h;
    h = 32'(s) * 32'h9E3779B1 ^ 32'(d) * 32'h85EBCA77 ^ 32'(i) * 32'hC2B2AE3D;
    return {8'(s), 8'(d), 16'(i), 32'h7A5C_0FF1, h, ~h};
  endfunction

  always_comb
    for (int p = 0; p < R; p++)
      for (int d = 0; d < 4; d++)
        rd_data[p][d] = payload(p, int'(rd_dst[p][d]), int'(rd_idx[p][d]));

  // ---------------- task graph ----------------
  int pe_of   [TASKS];
  int run_len [TASKS];
  int in_left [TASKS];     // incoming messages still to arrive
  int e_src [EDGES], e_dst [EDGES], e_size [EDGES];

  // ---------------- delivery ----------------
  bit pend     [R][R];     // a message from PE s to PE d is in flight
  int cur_edge [R][R];
  int next_idx [R][R];
  int net_msgs = 0, delivered = 0, local_msgs = 0, tasks_done = 0, flits_rx = 0;

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
          if (s >= R || t != p || f != payload(s, t, i) || !pend[s][p] || i != next_idx[s][p]) begin
            failures++;
            $display("FAIL PE %0d side %0d: bad flit src %0d dst %0d idx %0d at %0d", p, d, s, t, i, cycle);
          end else begin
            next_idx[s][p]++;
            if (next_idx[s][p] == e_size[cur_edge[s][p]]) begin
              in_left[e_dst[cur_edge[s][p]]]--;
              next_idx[s][p] = 0;
              pend[s][p] = 0;
              delivered++;
            end
          end
        end
  end

  // ---------------- processor model ----------------
  task automatic run_task(int t);
    automatic int p = pe_of[t];
    automatic int remote[$], locl[$];
    automatic longint t0;
    automatic bit first = 1;
    automatic int k = 0;
    while (in_left[t] != 0) @(posedge clk);
    t0 = cycle;
    for (int e = 0; e < EDGES; e++)
      if (e_src[e] == t) begin
        if (pe_of[e_dst[e]] == p) locl.push_back(e);
        else remote.push_back(e);
      end
    while (k < remote.size() || first) begin
      automatic int handed = 0;
      while (k < remote.size() && handed < NI_MSGS) begin
        automatic int e = remote[k];
        automatic int q = pe_of[e_dst[e]];
        if (pend[p][q]) break;
        pend[p][q] = 1;
        cur_edge[p][q] = e;
        net_msgs++;
        msg_valid[p] <= 1'b1;
        msg_dst[p]   <= 6'(q);
        msg_size[p]  <= SW'(e_size[e]);
        do @(posedge clk); while (!msg_ready[p]);
        msg_valid[p] <= 1'b0;
        k++;
        handed++;
      end
      if (first) begin
        while (cycle < t0 + longint'(run_len[t])) @(posedge clk);
        first = 0;
        foreach (locl[j]) begin
          in_left[e_dst[locl[j]]]--;
          local_msgs++;
        end
      end
      if (handed > 0) begin
        task_done[p] <= 1'b1;
        @(posedge clk);
        task_done[p] <= 1'b0;
      end else if (k < remote.size()) begin
        @(posedge clk);
      end
    end
    tasks_done++;
  endtask

  // ---------------- mechanism counters ----------------
  int n_grant = 0, n_grant_xy = 0, n_blocked = 0, n_r1 = 0, n_detour = 0, n_release = 0, n_delay = 0;
  always @(posedge clk) if (rst_n) begin
    n_grant    += int'(events.grant);
    n_grant_xy += int'(events.grant_xy);
    n_blocked  += int'(events.blocked);
    n_r1       += int'(events.r1_commit);
    n_detour   += int'(events.r1_detour);
    n_release  += int'(events.release_);
  end
  for (genvar r = 0; r < R; r++) begin : g_mon
    always @(posedge clk) if (rst_n)
      for (int o = 0; o < 4; o++)
        if (dut.g_node[r].u_router.u_xbar.nl_dly[o] && dut.g_node[r].u_router.u_xbar.dly_q[o].valid) n_delay++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired: %0d of %0d tasks done, %0d network messages delivered of %0d handed over",
             tasks_done, TASKS, delivered, net_msgs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit used [TASKS][TASKS];
    longint t_start;
    for (int p = 0; p < R; p++) begin
      msg_valid[p] = 0; msg_dst[p] = 0; msg_size[p] = 0; task_done[p] = 0;
      for (int q = 0; q < R; q++) begin pend[p][q] = 0; next_idx[p][q] = 0; cur_edge[p][q] = 0; end
    end
    for (int t = 0; t < TASKS; t++) begin
      pe_of[t]   = $urandom_range(R - 1);
      run_len[t] = 32 + $urandom_range(64);
      in_left[t] = 0;
      for (int u = 0; u < TASKS; u++) used[t][u] = 0;
    end
    for (int e = 0; e < EDGES; e++) begin
      int a, b;
      do begin
        a = $urandom_range(TASKS - 1);
        b = $urandom_range(TASKS - 1);
      end while (a == b || used[a < b ? a : b][a < b ? b : a]);
      if (a > b) begin int x; x = a; a = b; b = x; end
      used[a][b] = 1;
      e_src[e] = a; e_dst[e] = b; e_size[e] = 32 + $urandom_range(64);
      in_left[b]++;
    end

    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    t_start = cycle;

    // one process per PE, running that PE's tasks in index order
    for (int p = 0; p < R; p++) begin
      automatic int pp = p;
      fork
        for (int t = 0; t < TASKS; t++)
          if (pe_of[t] == pp) run_task(t);
      join_none
    end

    while (tasks_done != TASKS || delivered != net_msgs) @(posedge clk);
    repeat (20) @(posedge clk);

    $display("task graph: %0d tasks, %0d messages (%0d over the network, %0d local), %0d flits",
             TASKS, EDGES, net_msgs, local_msgs, flits_rx);
    $display("schedule length %0d cycles", cycle - t_start);
    $display("  grants %0d (XY %0d), R1 routes %0d, R1 detours %0d, blocked cycles %0d, releases %0d, delay stops %0d",
             n_grant, n_grant_xy, n_r1, n_detour, n_blocked, n_release, n_delay);
    checks++;
    if (net_msgs + local_msgs != EDGES || tasks_done != TASKS) begin
      failures++;
      $display("FAIL %0d tasks done, %0d messages", tasks_done, net_msgs + local_msgs);
    end
    checks++;
    if (n_grant != net_msgs || n_release != net_msgs) begin
      failures++;
      $display("FAIL grants %0d releases %0d for %0d network messages", n_grant, n_release, net_msgs);
    end
    checks++;
    if (n_r1 == 0 || n_delay == 0) begin
      failures++;
      $display("FAIL no R1 route or no delay-register stop in the workload");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
