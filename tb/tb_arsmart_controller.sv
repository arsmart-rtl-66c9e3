// tb_arsmart_controller -- self-checking test of the cluster controller on a
// 4x4 cluster with HPC_MAX = 2 and 8 threads.  Routers are modelled by a
// register that answers every configure word with configuration-finish one
// cycle later.  The test checks:
//   * the configure words of an XY route, sent to all routers in one cycle,
//     including the delay bit at hop 2;
//   * transmission-begin (destination, first direction) after configuration;
//   * release words after transmission-finish, hops/HPC_MAX + 1 cycles later;
//   * a message whose link is busy waits at its source until the release;
//   * two waiting messages are granted in the order their tasks finished;
//   * a message whose task runs long gets the adaptive route and no XY grant.
module tb_arsmart_controller;
  import arsmart_pkg::*;

  localparam int N = 4, R = 16, T = 8, SW = 16;

  logic clk = 0, rst_n = 0;
  logic          req_valid [R];
  logic [3:0]    req_dst [R];
  logic [SW-1:0] req_size [R];
  logic          req_ready [R];
  logic          pfin_valid [R];
  logic          tfin_valid [R];
  logic [3:0]    tfin_dst [R];
  logic          tfin_ready [R];
  logic          begin_valid [R];
  logic [3:0]    begin_dst [R];
  logic [1:0]    begin_dir [R];
  logic          cfg_valid [R];
  logic [5:0]    cfg_word [R];
  logic          cfg_done [R];
  ctl_events_t   events;

  arsmart_controller #(.N(N), .HPC_MAX(2), .THREADS(T)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // router model
  always @(posedge clk) for (int r = 0; r < R; r++) cfg_done[r] <= rst_n && cfg_valid[r];

  // log of begins and configure cycles
  int t_begin [R];
  int begin_order [$];
  logic [5:0] last_word [R];
  int last_cfg_cycle [R];
  int n_xy_grant = 0, n_r1 = 0;
  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < R; p++) if (begin_valid[p]) begin
      t_begin[p] = cycle;
      begin_order.push_back(p);
    end
    for (int r = 0; r < R; r++) if (cfg_valid[r]) begin
      last_word[r] = cfg_word[r];
      last_cfg_cycle[r] = cycle;
    end
    n_xy_grant += int'(events.grant_xy);
    n_r1 += int'(events.r1_commit);
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cycle); end
  endtask

  task automatic request(int s, int d, int size);
    @(negedge clk);
    req_valid[s] = 1; req_dst[s] = 4'(d); req_size[s] = SW'(size);
    do @(posedge clk); while (!req_ready[s]);
    @(negedge clk);
    req_valid[s] = 0;
  endtask

  task automatic pfin(int s);
    @(negedge clk);
    pfin_valid[s] = 1;
    @(negedge clk);
    pfin_valid[s] = 0;
  endtask

  task automatic tfin(int s, int d);
    @(negedge clk);
    tfin_valid[s] = 1; tfin_dst[s] = 4'(d);
    do @(posedge clk); while (!tfin_ready[s]);
    @(negedge clk);
    tfin_valid[s] = 0;
  endtask

  task automatic wait_begin(int s, int limit);
    int t0 = cycle;
    t_begin[s] = -1;
    while (t_begin[s] < 0 && cycle < t0 + limit) @(posedge clk);
    chk(t_begin[s] >= 0, $sformatf("transmission-begin for PE %0d", s));
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int tc, tr;
    for (int p = 0; p < R; p++) begin
      req_valid[p] = 0; req_dst[p] = 0; req_size[p] = 0; pfin_valid[p] = 0;
      tfin_valid[p] = 0; tfin_dst[p] = 0; t_begin[p] = -1; last_cfg_cycle[p] = -1; last_word[p] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- 1. XY route 0 -> 3, task ends at once ----
    request(0, 3, 4);
    pfin(0);
    wait_begin(0, 100);
    tc = last_cfg_cycle[0];
    chk(last_cfg_cycle[1] == tc && last_cfg_cycle[2] == tc && last_cfg_cycle[3] == tc, "all routers configured in one cycle");
    chk(last_word[0] == 6'b011110, "router 0: E <- local");
    chk(last_word[1] == 6'b011100, "router 1: E <- W");
    chk(last_word[2] == 6'b011101, "router 2: E <- W, delay at hop 2");
    chk(last_word[3] == 6'b110100, "router 3: W -> local");
    chk(last_cfg_cycle[4] < 0, "router 4 untouched");
    chk(t_begin[0] - tc == 2, $sformatf("begin %0d cycles after configure", t_begin[0] - tc));
    chk(begin_dst[0] == 4'd3 && begin_dir[0] == 2'(DIR_E), "begin carries destination and direction");
    chk(n_xy_grant == 1, "granted on the XY route");

    // ---- 2. release ----
    tfin(0, 3);
    tr = cycle;
    repeat (8) @(posedge clk);
    chk(last_word[0] == 6'b111010 && last_word[2] == 6'b111010, "release words for outputs E");
    chk(last_word[3] == 6'b110000, "release word for ejection W");
    chk(last_cfg_cycle[0] - tr >= 2 && last_cfg_cycle[0] - tr <= 4, $sformatf("release %0d cycles after finish", last_cfg_cycle[0] - tr));

    // ---- 3. blocking at the source, then FCFS ----
    // PE 0 has two input links, 1W and 4N; A1 and A2 hold them
    request(1, 0, 20);              // A1: 1W
    request(4, 0, 100);             // A2: 4N
    repeat (150) @(posedge clk);    // both get their R1 routes
    chk(n_r1 == 2, "adaptive routes committed for long tasks");
    pfin(1);
    wait_begin(1, 50);
    pfin(4);
    wait_begin(4, 50);
    chk(n_xy_grant == 1, "no XY grant for long tasks");
    request(2, 0, 8);               // C: 2W 1W
    repeat (100) @(posedge clk);
    request(3, 0, 8);               // D: 3W 2W 1W
    repeat (100) @(posedge clk);
    pfin(2);
    repeat (3) @(posedge clk);
    pfin(3);
    t_begin[2] = -1; t_begin[3] = -1;
    repeat (40) @(posedge clk);
    chk(t_begin[2] < 0 && t_begin[3] < 0, "waiting messages blocked while the links are held");
    chk(events.blocked, "blocked event");
    begin_order.delete();
    tfin(1, 0);
    wait_begin(2, 50);
    chk(t_begin[3] < 0, "D still blocked by C");
    tfin(2, 0);
    wait_begin(3, 50);
    chk(begin_order.size() == 2 && begin_order[0] == 2 && begin_order[1] == 3, "first come, first served");
    tfin(3, 0);
    tfin(4, 0);
    repeat (10) @(posedge clk);

    // ---- 4. all threads in use ----
    for (int k = 0; k < T; k++) request(8 + k, (k + 1) % 8, 2);
    @(negedge clk);
    req_valid[1] = 1; req_dst[1] = 4'd2; req_size[1] = 1;
    repeat (3) @(posedge clk);
    chk(!req_ready[1], "no request taken when all threads are busy");
    req_valid[1] = 0;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
