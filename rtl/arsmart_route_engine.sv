// arsmart_route_engine -- route computation of the ArSMART cluster controller.
//
// For one message (source, destination) the engine first builds the default
// XY route, and then the adaptive "general case" route (R1): Dijkstra's
// algorithm over the mesh, where the cost of using the link from router u to
// neighbour v is the sum of the sizes of the messages that already hold a
// route over that link (link_load, kept by the controller).  The paper's cost
// is the summed size of the messages whose routes intersect the candidate
// route; summing per link counts a message once for every shared link, which
// is this design's simplification.  To break ties between equally loaded
// routes every link also costs one hop, kept below the load in weight:
//   w(u->v) = link_load(u->v) * 64 + 1,
// so the low 6 bits of a path cost are its hop count (a simple path in a
// mesh of at most 64 routers has at most 63 hops).
//
// Each route is delivered as the router-configure words it needs: one word per
// router on the path (rt_used/rt_word), the bitmap of output links it holds
// (rt_mask, bit 4*r+d = output d of router r), the direction of the first hop
// and the hop count.  A router whose hop count from the source is a non-zero
// multiple of HPC_MAX gets its delay bit set, so that a flit stops there and
// continues in the next cycle.
//
// Timing: start is taken when busy is low.  The XY route is built one hop per
// cycle and shown with a one-cycle xy_valid pulse; Dijkstra settles one router
// per cycle, the route is then traced back one router per cycle and shown with
// a one-cycle r1_valid pulse (about 150 cycles in the worst case for 8x8).
// The route outputs hold their value only during the pulse.  src != dst is
// required.
module arsmart_route_engine
  import arsmart_pkg::*;
#(
  parameter int unsigned N       = 8,
  parameter int unsigned HPC_MAX = 8,
  parameter int unsigned LOAD_W  = 24,
  localparam int unsigned R      = N * N,
  localparam int unsigned IDW    = $clog2(R)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [IDW-1:0]    src,
  input  logic [IDW-1:0]    dst,
  input  logic [LOAD_W-1:0] link_load [R*4],
  output logic              busy,
  output logic              xy_valid,
  output logic              r1_valid,
  output logic              rt_used  [R],
  output logic [CFG_W-1:0]  rt_word  [R],
  output logic [R*4-1:0]    rt_mask,
  output logic [1:0]        rt_first,
  output logic [5:0]        rt_hops
);

  localparam int unsigned COST_W = LOAD_W + 14;
  localparam logic [COST_W-1:0] COST_INF = '1;

  typedef enum logic [2:0] {S_IDLE, S_XY, S_DINIT, S_DSTEP, S_BACK} state_e;
  state_e state;

  logic [IDW-1:0]    s_src, s_dst, cur;
  logic [2:0]        cur_port;     // XY: input port at cur; BACK: output port at cur
  logic [5:0]        hop;
  logic [COST_W-1:0] cost [R];
  logic [1:0]        pdir [R];     // input port of a router on its best path
  logic [R-1:0]      visited;

  // Neighbour of router r in direction d (only called where it exists).
  function automatic logic [IDW-1:0] nbr(input logic [IDW-1:0] r, input logic [1:0] d);
    case (d)
      DIR_N:   return r - IDW'(N);
      DIR_S:   return r + IDW'(N);
      DIR_W:   return r - IDW'(1);
      default: return r + IDW'(1);
    endcase
  endfunction

  function automatic logic has_nbr(input logic [IDW-1:0] r, input logic [1:0] d);
    int unsigned row, col;
    row = int'(r) / N;
    col = int'(r) % N;
    case (d)
      DIR_N:   return row != 0;
      DIR_S:   return row != N - 1;
      DIR_W:   return col != 0;
      default: return col != N - 1;
    endcase
  endfunction

  function automatic logic dly_at(input logic [5:0] h);
    return (h != 0) && ((int'(h) % HPC_MAX) == 0);
  endfunction

  // XY: next output direction at cur
  logic [1:0] xy_out;
  always_comb begin
    int unsigned cr, cc, dr, dc;
    cr = int'(cur) / N;   cc = int'(cur) % N;
    dr = int'(s_dst) / N; dc = int'(s_dst) % N;
    if      (cc < dc) xy_out = DIR_E;
    else if (cc > dc) xy_out = DIR_W;
    else if (cr < dr) xy_out = DIR_S;
    else              xy_out = DIR_N;
  end

  // Dijkstra: unvisited router of least cost (lowest index on a tie)
  logic [IDW-1:0]    u_min;
  logic [COST_W-1:0] c_min;
  always_comb begin
    u_min = '0;
    c_min = COST_INF;
    for (int r = R - 1; r >= 0; r--) begin
      if (!visited[r] && cost[r] <= c_min) begin
        u_min = IDW'(r);
        c_min = cost[r];
      end
    end
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      xy_valid <= 1'b0;
      r1_valid <= 1'b0;
      rt_mask  <= '0;
      rt_first <= '0;
      rt_hops  <= '0;
      visited  <= '0;
      hop      <= '0;
      cur      <= '0;
      cur_port <= '0;
      s_src    <= '0;
      s_dst    <= '0;
      for (int r = 0; r < R; r++) begin
        rt_used[r] <= 1'b0;
        rt_word[r] <= '0;
        cost[r]    <= COST_INF;
        pdir[r]    <= '0;
      end
    end else begin
      xy_valid <= 1'b0;
      r1_valid <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          s_src    <= src;
          s_dst    <= dst;
          cur      <= src;
          cur_port <= PORT_L;
          hop      <= '0;
          rt_mask  <= '0;
          for (int r = 0; r < R; r++) rt_used[r] <= 1'b0;
          state    <= S_XY;
        end

        S_XY: begin
          rt_used[cur] <= 1'b1;
          if (cur == s_dst) begin
            rt_word[cur] <= word_local(cur_port[1:0], 1'b1);
            rt_hops      <= hop;
            xy_valid     <= 1'b1;
            state        <= S_DINIT;
          end else begin
            rt_word[cur] <= word_nonlocal(xy_out, cur_port, dly_at(hop));
            rt_mask[int'(cur) * 4 + int'(xy_out)] <= 1'b1;
            if (hop == 0) rt_first <= xy_out;
            cur      <= nbr(cur, xy_out);
            cur_port <= {1'b0, opposite(xy_out)};
            hop      <= hop + 6'd1;
          end
        end

        S_DINIT: begin
          rt_mask <= '0;
          visited <= '0;
          for (int r = 0; r < R; r++) begin
            rt_used[r] <= 1'b0;
            cost[r]    <= (r == int'(s_src)) ? '0 : COST_INF;
          end
          state <= S_DSTEP;
        end

        S_DSTEP: begin
          visited[u_min] <= 1'b1;
          if (u_min == s_dst) begin
            cur      <= s_dst;
            cur_port <= PORT_L;
            state    <= S_BACK;
          end else begin
            for (int d = 0; d < 4; d++) begin
              if (has_nbr(u_min, 2'(d))) begin
                logic [IDW-1:0]    v;
                logic [COST_W-1:0] nc;
                v  = nbr(u_min, 2'(d));
                nc = c_min + COST_W'({link_load[int'(u_min) * 4 + d], 6'd0}) + COST_W'(1);
                if (!visited[v] && nc < cost[v]) begin
                  cost[v] <= nc;
                  pdir[v] <= opposite(2'(d));
                end
              end
            end
          end
        end

        S_BACK: begin
          logic [2:0] in_port;
          in_port = (cur == s_src) ? PORT_L : {1'b0, pdir[cur]};
          rt_used[cur] <= 1'b1;
          if (cur_port == PORT_L) begin
            rt_word[cur] <= word_local(in_port[1:0], 1'b1);
            rt_hops      <= cost[cur][5:0];
          end else begin
            rt_word[cur] <= word_nonlocal(cur_port[1:0], in_port, dly_at(cost[cur][5:0]));
            rt_mask[int'(cur) * 4 + int'(cur_port[1:0])] <= 1'b1;
          end
          if (cur == s_src) begin
            rt_first <= cur_port[1:0];
            r1_valid <= 1'b1;
            state    <= S_IDLE;
          end else begin
            cur      <= nbr(cur, pdir[cur]);
            cur_port <= {1'b0, opposite(pdir[cur])};
          end
        end

        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
