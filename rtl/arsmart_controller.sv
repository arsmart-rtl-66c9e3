// arsmart_controller -- ArSMART cluster controller (one cluster of N x N routers).
//
// The controller holds one thread per message and runs the C4R sequence for
// it: compute, check, configure, communicate, release.
//   * Compute: a transmission-request from a PE (destination and message
//     size; the source is the port it arrives on) takes a free thread and is
//     queued for the route engine, which first delivers the default XY route
//     and later the adaptive R1 route.  The R1 route replaces the XY route
//     only if the message has not been granted yet; a message whose task ends
//     before R1 is ready is sent along the XY route.
//   * Check: processor-finish from a PE makes all its pending messages ready,
//     stamped with the current cycle.  Among ready messages whose links are all
//     free in the link-state memory, the one that became ready first wins
//     (first come, first served) and all its links become busy at once.  The
//     arbitration is non-preemptive, and a message that finds one link busy
//     requests none of its links, so it never holds links for a later message.
//   * Configure: in the next cycle the controller sends one router-configure
//     word to every router on the route, all at once over the point-to-point
//     links, and waits for their configuration-finish bits.
//   * Communicate: it then sends transmission-begin to the source PE, with the
//     destination and the first-hop direction (the 1-bit signal of the paper
//     widened so that a PE with several messages knows which one to send and
//     on which injection channel).
//   * Release: transmission-finish (source = port, destination) frees the
//     thread; after the flits still in flight have arrived (hops/HPC_MAX + 1
//     cycles) the routers on the route receive release words and the links
//     become free.
// The link-state memory has one busy bit per router output link (R x 4).  The
// design also keeps, per link, the summed size of all messages that hold a
// route over it and have not finished: the cost input of the R1 route engine.
//
// One request, one transmission-finish, one grant and one release are handled
// per cycle; requests and finishes are taken round-robin over the PEs with a
// valid/ready handshake (the handshake is this design's choice).  The thread
// table is a register array of THREADS rows.
module arsmart_controller
  import arsmart_pkg::*;
#(
  parameter int unsigned N       = 8,
  parameter int unsigned HPC_MAX = 8,
  parameter int unsigned THREADS = 1024,
  parameter int unsigned SIZE_W  = 16,
  parameter int unsigned LOAD_W  = 24,
  localparam int unsigned R      = N * N,
  localparam int unsigned IDW    = $clog2(R),
  localparam int unsigned TW     = $clog2(THREADS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // transmission-request
  input  logic              req_valid   [R],
  input  logic [IDW-1:0]    req_dst     [R],
  input  logic [SIZE_W-1:0] req_size    [R],
  output logic              req_ready   [R],
  // processor-finish
  input  logic              pfin_valid  [R],
  // transmission-finish
  input  logic              tfin_valid  [R],
  input  logic [IDW-1:0]    tfin_dst    [R],
  output logic              tfin_ready  [R],
  // transmission-begin
  output logic              begin_valid [R],
  output logic [IDW-1:0]    begin_dst   [R],
  output logic [1:0]        begin_dir   [R],
  // router-configure and configuration-finish
  output logic              cfg_valid   [R],
  output logic [CFG_W-1:0]  cfg_word    [R],
  input  logic              cfg_done    [R],
  output ctl_events_t       events
);

  typedef enum logic [2:0] {T_FREE, T_QUEUED, T_XY, T_ROUTED, T_ACTIVE} tstate_e;
  typedef enum logic [1:0] {C_IDLE, C_SEND, C_WAIT} cphase_e;
  typedef enum logic [1:0] {RL_IDLE, RL_WAIT} rphase_e;

  // ---------------- thread table ----------------
  tstate_e           t_state [THREADS];
  logic [IDW-1:0]    t_src   [THREADS];
  logic [IDW-1:0]    t_dst   [THREADS];
  logic [SIZE_W-1:0] t_size  [THREADS];
  logic              t_fin   [THREADS];
  logic [31:0]       t_ts    [THREADS];
  logic [R-1:0]      t_used  [THREADS];
  logic [CFG_W-1:0]  t_word  [THREADS][R];
  logic [R*4-1:0]    t_mask  [THREADS];
  logic [1:0]        t_first [THREADS];
  logic [5:0]        t_hops  [THREADS];

  // ---------------- shared link state ----------------
  logic [R*4-1:0]    link_busy;
  logic [LOAD_W-1:0] link_load [R*4];
  logic [31:0]       now;

  // grant of the link arbitration (declared early: the route commit uses it)
  logic           gnt;
  logic [TW-1:0]  gnt_tid;

  // ---------------- route engine and its queue ----------------
  logic [TW-1:0]  q_mem [THREADS];
  logic [TW-1:0]  q_head, q_tail;
  logic [TW:0]    q_count;
  logic [TW-1:0]  eng_tid;
  logic           eng_start, eng_busy, eng_xy, eng_r1;
  logic           rt_used [R];
  logic [CFG_W-1:0] rt_word [R];
  logic [R*4-1:0] rt_mask;
  logic [1:0]     rt_first;
  logic [5:0]     rt_hops;

  assign eng_start = !eng_busy && (q_count != 0);

  arsmart_route_engine #(.N(N), .HPC_MAX(HPC_MAX), .LOAD_W(LOAD_W)) u_engine (
    .clk, .rst_n,
    .start (eng_start),
    .src   (t_src[q_mem[q_head]]),
    .dst   (t_dst[q_mem[q_head]]),
    .link_load,
    .busy  (eng_busy),
    .xy_valid (eng_xy),
    .r1_valid (eng_r1),
    .rt_used, .rt_word, .rt_mask, .rt_first, .rt_hops
  );

  logic [R-1:0] rt_used_v;
  always_comb for (int r = 0; r < R; r++) rt_used_v[r] = rt_used[r];

  logic commit_xy, commit_r1;
  assign commit_xy = eng_xy && (t_state[eng_tid] == T_QUEUED);
  assign commit_r1 = eng_r1 && (t_state[eng_tid] == T_XY) && !(gnt && gnt_tid == eng_tid);

  // ---------------- request intake (round robin) ----------------
  logic [IDW-1:0] rq_ptr, rq_pe;
  logic           rq_any;
  logic [TW-1:0]  free_tid;
  logic           free_any;

  always_comb begin
    rq_any = 1'b0;
    rq_pe  = '0;
    for (int k = R - 1; k >= 0; k--) begin
      logic [IDW-1:0] p;
      p = rq_ptr + IDW'(k);
      if (req_valid[p]) begin rq_any = 1'b1; rq_pe = p; end
    end
    free_any = 1'b0;
    free_tid = '0;
    for (int t = THREADS - 1; t >= 0; t--)
      if (t_state[t] == T_FREE) begin free_any = 1'b1; free_tid = TW'(t); end
  end

  logic rq_take;
  assign rq_take = rq_any && free_any && (q_count < (TW+1)'(THREADS));
  always_comb for (int p = 0; p < R; p++) req_ready[p] = rq_take && (rq_pe == IDW'(p));

  // ---------------- check: FCFS link arbitration ----------------
  cphase_e        cphase;
  logic [TW-1:0]  cfg_tid;
  logic [R-1:0]   cfg_got;
  logic           any_blocked;
  rphase_e        rphase;
  logic           rel_send;

  always_comb begin
    logic [31:0] best_ts;
    gnt         = 1'b0;
    gnt_tid     = '0;
    best_ts     = '1;
    any_blocked = 1'b0;
    for (int t = THREADS - 1; t >= 0; t--) begin
      if (t_fin[t] && (t_state[t] == T_XY || t_state[t] == T_ROUTED)) begin
        if ((t_mask[t] & link_busy) != '0) any_blocked = 1'b1;
        else if (!gnt || t_ts[t] <= best_ts) begin
          gnt     = 1'b1;
          gnt_tid = TW'(t);
          best_ts = t_ts[t];
        end
      end
    end
    if (cphase != C_IDLE) gnt = 1'b0;
  end

  // ---------------- release intake (round robin) ----------------
  logic [IDW-1:0] tf_ptr, tf_pe;
  logic           tf_any;
  logic [TW-1:0]  tf_tid;
  logic           tf_found;
  logic [TW-1:0]  rel_tid;
  logic [6:0]     rel_cnt;

  always_comb begin
    tf_any = 1'b0;
    tf_pe  = '0;
    for (int k = R - 1; k >= 0; k--) begin
      logic [IDW-1:0] p;
      p = tf_ptr + IDW'(k);
      if (tfin_valid[p]) begin tf_any = 1'b1; tf_pe = p; end
    end
    tf_found = 1'b0;
    tf_tid   = '0;
    for (int t = THREADS - 1; t >= 0; t--)
      if (t_state[t] == T_ACTIVE && t_src[t] == tf_pe && t_dst[t] == tfin_dst[tf_pe]) begin
        tf_found = 1'b1;
        tf_tid   = TW'(t);
      end
  end

  logic tf_take;
  assign tf_take = tf_any && (rphase == RL_IDLE);
  always_comb for (int p = 0; p < R; p++) tfin_ready[p] = tf_take && (tf_pe == IDW'(p));

  // release words go out when the count has run down, never in a SEND cycle
  assign rel_send = (rphase == RL_WAIT) && (rel_cnt == 0) && (cphase != C_SEND);

  // ---------------- router-configure outputs ----------------
  always_comb begin
    for (int r = 0; r < R; r++) begin
      cfg_valid[r] = 1'b0;
      cfg_word[r]  = '0;
      if (cphase == C_SEND && t_used[cfg_tid][r]) begin
        cfg_valid[r] = 1'b1;
        cfg_word[r]  = t_word[cfg_tid][r];
      end else if (rel_send && t_used[rel_tid][r]) begin
        cfg_valid[r] = 1'b1;
        cfg_word[r]  = release_of(t_word[rel_tid][r]);
      end
    end
  end

  logic [R-1:0] done_v;
  always_comb for (int r = 0; r < R; r++) done_v[r] = cfg_done[r];

  // ---------------- events ----------------
  always_comb begin
    events           = '0;
    events.grant     = gnt;
    events.grant_xy  = gnt && (t_state[gnt_tid] == T_XY);
    events.blocked   = any_blocked;
    events.r1_commit = commit_r1;
    events.r1_detour = commit_r1 && (rt_mask != t_mask[eng_tid]);
    events.release_  = rel_send;
  end

  // ---------------- sequential state ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int t = 0; t < THREADS; t++) begin
        t_state[t] <= T_FREE;
        t_fin[t]   <= 1'b0;
        t_src[t]   <= '0;
        t_dst[t]   <= '0;
        t_size[t]  <= '0;
        t_ts[t]    <= '0;
        t_used[t]  <= '0;
        t_mask[t]  <= '0;
        t_first[t] <= '0;
        t_hops[t]  <= '0;
        q_mem[t]   <= '0;
      end
      for (int l = 0; l < R * 4; l++) link_load[l] <= '0;
      for (int p = 0; p < R; p++) begin
        begin_valid[p] <= 1'b0;
        begin_dst[p]   <= '0;
        begin_dir[p]   <= '0;
      end
      link_busy <= '0;
      now       <= '0;
      q_head    <= '0;
      q_tail    <= '0;
      q_count   <= '0;
      eng_tid   <= '0;
      rq_ptr    <= '0;
      tf_ptr    <= '0;
      cphase    <= C_IDLE;
      cfg_tid   <= '0;
      cfg_got   <= '0;
      rphase    <= RL_IDLE;
      rel_tid   <= '0;
      rel_cnt   <= '0;
    end else begin
      now <= now + 32'd1;
      for (int p = 0; p < R; p++) begin_valid[p] <= 1'b0;

      // compute: take a request
      if (rq_take) begin
        t_state[free_tid] <= T_QUEUED;
        t_src[free_tid]   <= rq_pe;
        t_dst[free_tid]   <= req_dst[rq_pe];
        t_size[free_tid]  <= req_size[rq_pe];
        t_fin[free_tid]   <= 1'b0;
        q_mem[q_tail]     <= free_tid;
        q_tail            <= q_tail + TW'(1);
        rq_ptr            <= rq_pe + IDW'(1);
      end
      if (eng_start) begin
        eng_tid <= q_mem[q_head];
        q_head  <= q_head + TW'(1);
      end
      q_count <= q_count + (TW+1)'(rq_take) - (TW+1)'(eng_start);

      // compute: store a route delivered by the engine
      if (commit_xy || commit_r1) begin
        t_state[eng_tid] <= commit_r1 ? T_ROUTED : T_XY;
        t_used[eng_tid]  <= rt_used_v;
        t_mask[eng_tid]  <= rt_mask;
        t_first[eng_tid] <= rt_first;
        t_hops[eng_tid]  <= rt_hops;
        for (int r = 0; r < R; r++) t_word[eng_tid][r] <= rt_word[r];
      end

      // check: processor-finish makes the PE's messages ready
      for (int t = 0; t < THREADS; t++) begin
        if (t_state[t] != T_FREE && !t_fin[t] && pfin_valid[t_src[t]]) begin
          t_fin[t] <= 1'b1;
          t_ts[t]  <= now;
        end
      end

      // check: grant, links become busy before configuration
      if (gnt) begin
        t_state[gnt_tid] <= T_ACTIVE;
        cfg_tid          <= gnt_tid;
        cphase           <= C_SEND;
      end

      // configure and communicate
      case (cphase)
        C_SEND: begin
          cfg_got <= '0;
          cphase  <= C_WAIT;
        end
        C_WAIT: begin
          cfg_got <= cfg_got | done_v;
          if (((cfg_got | done_v) & t_used[cfg_tid]) == t_used[cfg_tid]) begin
            begin_valid[t_src[cfg_tid]] <= 1'b1;
            begin_dst[t_src[cfg_tid]]   <= t_dst[cfg_tid];
            begin_dir[t_src[cfg_tid]]   <= t_first[cfg_tid];
            cphase <= C_IDLE;
          end
        end
        default: ;
      endcase

      // release
      if (tf_take) tf_ptr <= tf_pe + IDW'(1);
      case (rphase)
        RL_IDLE: if (tf_take && tf_found) begin
          rel_tid <= tf_tid;
          rel_cnt <= 7'(t_hops[tf_tid] / 6'(HPC_MAX)) + 7'd1;
          rphase  <= RL_WAIT;
        end
        RL_WAIT: begin
          if (rel_cnt != 0) rel_cnt <= rel_cnt - 7'd1;
          if (rel_send) begin
            t_state[rel_tid] <= T_FREE;
            t_fin[rel_tid]   <= 1'b0;
            rphase           <= RL_IDLE;
          end
        end
        default: rphase <= RL_IDLE;
      endcase

      // link-state memory: busy bits and per-link load
      link_busy <= (link_busy | (gnt ? t_mask[gnt_tid] : '0))
                 & ~(rel_send ? t_mask[rel_tid] : '0);
      for (int l = 0; l < R * 4; l++) begin
        logic [LOAD_W-1:0] nl;
        nl = link_load[l];
        if (commit_r1 && rt_mask[l])                              nl = nl + LOAD_W'(t_size[eng_tid]);
        if (gnt && t_state[gnt_tid] == T_XY && t_mask[gnt_tid][l]) nl = nl + LOAD_W'(t_size[gnt_tid]);
        if (rel_send && t_mask[rel_tid][l])                       nl = nl - LOAD_W'(t_size[rel_tid]);
        link_load[l] <= nl;
      end
    end
  end

endmodule
