// tb_arsmart_route_engine -- self-checking test of the route engine on the
// 8x8 mesh.  Every delivered route is walked from the source using the
// testbench's own decoding of the configure words; the walk must reach the
// destination, use only the links in the mask, set the delay bit exactly at
// hop counts that are non-zero multiples of HPC_MAX, and agree with the hop
// count and first direction.  The XY route must go X first, then Y.  The R1
// route must have the least cost, which the testbench finds by its own
// Bellman-Ford relaxation over the same link weights (load*64 + 1).  Cycle
// counts from start to each result are bounded.
module tb_arsmart_route_engine;
  import arsmart_pkg::*;

  localparam int N = 8, R = 64, HPC = 8, LW = 24;

  logic clk = 0, rst_n = 0;
  logic start;
  logic [5:0] src, dst;
  logic [LW-1:0] link_load [R*4];
  logic busy, xy_valid, r1_valid;
  logic rt_used [R];
  logic [5:0] rt_word [R];
  logic [R*4-1:0] rt_mask;
  logic [1:0] rt_first;
  logic [5:0] rt_hops;

  int checks = 0, failures = 0;

  arsmart_route_engine #(.N(N), .HPC_MAX(HPC), .LOAD_W(LW)) dut (.*);

  always #5 clk = ~clk;

  int cand [4][4] = '{'{1, 2, 3, 4}, '{0, 2, 3, 4}, '{0, 1, 3, 4}, '{0, 1, 2, 4}};
  int opp [4] = '{1, 0, 3, 2};
  int dr [4] = '{-1, 1, 0, 0};
  int dc [4] = '{0, 0, -1, 1};

  task automatic fail(input string s);
    failures++;
    $display("FAIL %s (src %0d dst %0d)", s, src, dst);
  endtask

  // walk the delivered route; returns its cost, -1 if broken
  function automatic longint walk(input bit is_xy);
    int cur, inport, hops, nused, nmask;
    longint cost;
    bit turned;
    cur = src; inport = 4; hops = 0; cost = 0; turned = 0;
    nused = 0; nmask = 0;
    for (int r = 0; r < R; r++) if (rt_used[r]) nused++;
    for (int l = 0; l < R * 4; l++) if (rt_mask[l]) nmask++;
    for (int step = 0; step < 80; step++) begin
      logic [5:0] w;
      int o, p;
      if (!rt_used[cur]) return -1;
      w = rt_word[cur];
      if (w[5]) begin
        if (cur != dst || int'(w[4:3]) != inport || !w[2]) return -1;
        if (hops != int'(rt_hops) || nused != hops + 1 || nmask != hops) return -1;
        return cost;
      end
      o = int'(w[4:3]);
      p = cand[o][w[2:1]];
      if (p != inport) return -1;
      if (w[0] != ((hops > 0) && (hops % HPC == 0))) return -1;
      if (!rt_mask[cur * 4 + o]) return -1;
      if (hops == 0 && o != int'(rt_first)) return -1;
      if (is_xy) begin
        if (o < 2) turned = 1;
        else if (turned) return -1;
      end
      if (cur / N + dr[o] < 0 || cur / N + dr[o] >= N || cur % N + dc[o] < 0 || cur % N + dc[o] >= N) return -1;
      cost += longint'(link_load[cur * 4 + o]) * 64 + 1;
      cur = cur + dr[o] * N + dc[o];
      inport = opp[o];
      hops++;
    end
    return -1;
  endfunction

  function automatic longint best_cost();
    longint d [R];
    bit changed;
    for (int r = 0; r < R; r++) d[r] = 64'h7fffffffffffffff;
    d[src] = 0;
    do begin
      changed = 0;
      for (int u = 0; u < R; u++) begin
        if (d[u] == 64'h7fffffffffffffff) continue;
        for (int o = 0; o < 4; o++) begin
          int rr, cc, v;
          longint nc;
          rr = u / N + dr[o]; cc = u % N + dc[o];
          if (rr < 0 || rr >= N || cc < 0 || cc >= N) continue;
          v = rr * N + cc;
          nc = d[u] + longint'(link_load[u * 4 + o]) * 64 + 1;
          if (nc < d[v]) begin d[v] = nc; changed = 1; end
        end
      end
    end while (changed);
    return d[dst];
  endfunction

  task automatic run(input int s, input int d);
    int cyc;
    longint c, b;
    bit got_xy;
    @(negedge clk);
    src = 6'(s); dst = 6'(d); start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1; got_xy = 0;
    while (!r1_valid) begin
      if (xy_valid) begin
        got_xy = 1;
        checks++;
        c = walk(1);
        if (c < 0) fail("XY route broken");
        checks++;
        if (cyc > 2 + (s / N > d / N ? s / N - d / N : d / N - s / N) + (s % N > d % N ? s % N - d % N : d % N - s % N))
          fail($sformatf("XY route late: %0d cycles", cyc));
      end
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (!got_xy) fail("no XY route before R1");
    checks++;
    c = walk(0);
    b = best_cost();
    if (c < 0) fail("R1 route broken");
    else if (c != b) fail($sformatf("R1 cost %0d, best %0d", c, b));
    checks++;
    if (cyc > 3 * R) fail($sformatf("R1 route late: %0d cycles", cyc));
    @(negedge clk);
    checks++;
    if (busy) fail("engine still busy");
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; src = 0; dst = 0;
    for (int l = 0; l < R * 4; l++) link_load[l] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // corner to corner: 14 hops, one delay register at hop 8
    run(0, 63);
    checks++;
    if (rt_hops != 14) fail("0->63 hop count");

    // a loaded link on the XY path forces a detour
    link_load[0 * 4 + 3] = 100;   // router 0, output E
    run(0, 7);
    checks++;
    if (rt_mask[0 * 4 + 3]) fail("R1 uses the loaded link");
    checks++;
    if (rt_hops != 9) fail($sformatf("detour length %0d, expected 9", rt_hops));

    // random loads and end points
    for (int n = 0; n < 60; n++) begin
      int s, d;
      for (int l = 0; l < R * 4; l++) link_load[l] = ($urandom_range(3) == 0) ? LW'($urandom_range(40)) : '0;
      s = $urandom_range(R - 1);
      do d = $urandom_range(R - 1); while (d == s);
      run(s, d);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
