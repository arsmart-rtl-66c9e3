// arsmart_ni -- network interface of an ArSMART processing element.
//
// The network interface is the PE's side of the C4R control sequence:
//   1. the processor hands over a message (destination, size in flits); the
//      interface sends a transmission-request to the cluster controller so that
//      route computation runs while the task still executes;
//   2. when the processor signals the end of its task (task_done), the
//      interface sends processor-finish, after all requests are out;
//   3. on transmission-begin (destination, first-hop direction) it streams the
//      message's flits, one per cycle, into the router's injection channel of
//      that direction, reading them from the PE memory through the rd_* port
//      (data is expected combinationally in the same cycle);
//   4. after the last flit it sends transmission-finish with the destination.
// There is no head flit: the path is set up by the controller, so every flit
// is payload.  Up to four messages can stream at once, one per direction.
// Flits ejected by the router (one channel per input side) are registered and
// handed to the processor on rx_flit one cycle after they arrive.
//
// The slot table (NI_MSGS messages), the handshakes and the one-flit-per-cycle
// streaming are this design's choices; the paper describes the interface only
// by the signals it exchanges.  Message size must be at least one flit.
module arsmart_ni
  import arsmart_pkg::*;
#(
  parameter int unsigned N       = 8,
  parameter int unsigned SIZE_W  = 16,
  parameter int unsigned NI_MSGS = 4,
  localparam int unsigned R      = N * N,
  localparam int unsigned IDW    = $clog2(R)
) (
  input  logic              clk,
  input  logic              rst_n,
  // processor side
  input  logic              msg_valid,
  input  logic [IDW-1:0]    msg_dst,
  input  logic [SIZE_W-1:0] msg_size,
  output logic              msg_ready,
  input  logic              task_done,
  output logic              rd_valid [4],
  output logic [IDW-1:0]    rd_dst   [4],
  output logic [SIZE_W-1:0] rd_idx   [4],
  input  logic [FLIT_W-1:0] rd_data  [4],
  output flit_t             rx_flit  [4],
  // cluster controller side
  output logic              req_valid,
  output logic [IDW-1:0]    req_dst,
  output logic [SIZE_W-1:0] req_size,
  input  logic              req_ready,
  output logic              pfin_valid,
  input  logic              begin_valid,
  input  logic [IDW-1:0]    begin_dst,
  input  logic [1:0]        begin_dir,
  output logic              tfin_valid,
  output logic [IDW-1:0]    tfin_dst,
  input  logic              tfin_ready,
  // router side
  output flit_t             inj_flit [4],
  input  flit_t             ej_flit  [4]
);

  localparam int unsigned SW = (NI_MSGS > 1) ? $clog2(NI_MSGS) : 1;

  logic              s_valid [NI_MSGS];
  logic              s_req   [NI_MSGS];
  logic              s_send  [NI_MSGS];
  logic              s_tfin  [NI_MSGS];
  logic [IDW-1:0]    s_dst   [NI_MSGS];
  logic [SIZE_W-1:0] s_size  [NI_MSGS];

  logic              ch_act  [4];
  logic [SW-1:0]     ch_slot [4];
  logic [SIZE_W-1:0] ch_idx  [4];

  logic              fin_pend;

  // slot searches
  logic          free_any, req_any, beg_any, tf_any, all_req;
  logic [SW-1:0] free_s, req_s, beg_s, tf_s;
  always_comb begin
    free_any = 1'b0; free_s = '0;
    req_any  = 1'b0; req_s  = '0;
    beg_any  = 1'b0; beg_s  = '0;
    tf_any   = 1'b0; tf_s   = '0;
    for (int s = NI_MSGS - 1; s >= 0; s--) begin
      if (!s_valid[s]) begin free_any = 1'b1; free_s = SW'(s); end
      if (s_valid[s] && !s_req[s]) begin req_any = 1'b1; req_s = SW'(s); end
      if (s_valid[s] && s_req[s] && !s_send[s] && !s_tfin[s] && s_dst[s] == begin_dst) begin
        beg_any = 1'b1; beg_s = SW'(s);
      end
      if (s_tfin[s]) begin tf_any = 1'b1; tf_s = SW'(s); end
    end
    all_req = !req_any;
  end

  assign msg_ready  = free_any;
  assign req_valid  = req_any;
  assign req_dst    = s_dst[req_s];
  assign req_size   = s_size[req_s];
  assign pfin_valid = fin_pend && all_req;
  assign tfin_valid = tf_any;
  assign tfin_dst   = s_dst[tf_s];

  always_comb begin
    for (int d = 0; d < 4; d++) begin
      rd_valid[d] = ch_act[d];
      rd_dst[d]   = s_dst[ch_slot[d]];
      rd_idx[d]   = ch_idx[d];
      inj_flit[d].valid = ch_act[d];
      inj_flit[d].data  = ch_act[d] ? rd_data[d] : '0;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < NI_MSGS; s++) begin
        s_valid[s] <= 1'b0;
        s_req[s]   <= 1'b0;
        s_send[s]  <= 1'b0;
        s_tfin[s]  <= 1'b0;
        s_dst[s]   <= '0;
        s_size[s]  <= '0;
      end
      for (int d = 0; d < 4; d++) begin
        ch_act[d]  <= 1'b0;
        ch_slot[d] <= '0;
        ch_idx[d]  <= '0;
        rx_flit[d] <= '0;
      end
      fin_pend <= 1'b0;
    end else begin
      for (int d = 0; d < 4; d++) rx_flit[d] <= ej_flit[d];

      if (msg_valid && free_any) begin
        s_valid[free_s] <= 1'b1;
        s_req[free_s]   <= 1'b0;
        s_send[free_s]  <= 1'b0;
        s_tfin[free_s]  <= 1'b0;
        s_dst[free_s]   <= msg_dst;
        s_size[free_s]  <= msg_size;
      end
      if (req_any && req_ready) s_req[req_s] <= 1'b1;

      if (task_done) fin_pend <= 1'b1;
      else if (pfin_valid) fin_pend <= 1'b0;

      // streaming channels
      for (int d = 0; d < 4; d++) begin
        if (ch_act[d]) begin
          ch_idx[d] <= ch_idx[d] + SIZE_W'(1);
          if (ch_idx[d] == s_size[ch_slot[d]] - SIZE_W'(1)) begin
            ch_act[d]              <= 1'b0;
            s_send[ch_slot[d]]     <= 1'b0;
            s_tfin[ch_slot[d]]     <= 1'b1;
          end
        end
      end
      if (begin_valid && beg_any) begin
        ch_act[begin_dir]  <= 1'b1;
        ch_slot[begin_dir] <= beg_s;
        ch_idx[begin_dir]  <= '0;
        s_send[beg_s]      <= 1'b1;
      end

      if (tf_any && tfin_ready) begin
        s_tfin[tf_s]  <= 1'b0;
        s_valid[tf_s] <= 1'b0;
      end
    end
  end

  // A transmission-begin always names a message that is waiting to be sent.
  a_begin_known: assert property (@(posedge clk) disable iff (!rst_n) begin_valid |-> beg_any);

endmodule
