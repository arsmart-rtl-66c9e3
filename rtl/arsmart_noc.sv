// arsmart_noc -- ArSMART network-on-chip: an N x N mesh of bufferless
// reconfigurable routers, one network interface per processing element, and
// one cluster controller that sets up every path.
//
// In the configuration built here the cluster covers the whole mesh (8 x 8
// routers, one controller), so all paths are set up by a single controller.
// The controller has a point-to-point configure link to every router and a
// point-to-point control link to every network interface.  Router r sits in
// row r / N and column r % N; row 0 is the north edge.  Links at the mesh
// edge are tied off.
//
// A message moves as follows: the PE's processor gives the message to its
// network interface at the start of its task; the interface asks the
// controller for a route; the processor signals the end of its task; the
// controller grants all links of the route at once (or keeps the message
// waiting at its source), configures every router on the path in one cycle,
// and tells the source to start; the flits then cross up to HPC_MAX routers
// per cycle, with no arbitration and no buffering on the way, and are handed
// to the destination processor.  transmission-finish releases the path.
//
// Ports: per PE the processor-side ports of arsmart_ni (the processor and its
// memory are outside this design), plus the controller's event pulses.
//
// Timing: a route is configured in one cycle and its first flit leaves the
// source the cycle after transmission-begin; a flit crosses up to HPC_MAX
// routers in the same cycle and stops for one cycle in the delay register of
// every HPC_MAX-th router.  Because the router multiplexers are chained
// combinationally across the mesh, tools see the output nets r_out as one
// circular combinational structure.  The loop is structural only: the
// controller enables a path only along a route that never revisits a router,
// so no enabled path closes a cycle.
module arsmart_noc
  import arsmart_pkg::*;
#(
  parameter int unsigned N       = 8,
  parameter int unsigned HPC_MAX = 8,
  parameter int unsigned THREADS = 1024,
  parameter int unsigned SIZE_W  = 16,
  parameter int unsigned LOAD_W  = 24,
  parameter int unsigned NI_MSGS = 4,
  localparam int unsigned R      = N * N,
  localparam int unsigned IDW    = $clog2(R)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              msg_valid [R],
  input  logic [IDW-1:0]    msg_dst   [R],
  input  logic [SIZE_W-1:0] msg_size  [R],
  output logic              msg_ready [R],
  input  logic              task_done [R],
  output logic              rd_valid  [R][4],
  output logic [IDW-1:0]    rd_dst    [R][4],
  output logic [SIZE_W-1:0] rd_idx    [R][4],
  input  logic [FLIT_W-1:0] rd_data   [R][4],
  output flit_t             rx_flit   [R][4],
  output ctl_events_t       events
);

  // controller <-> network interfaces
  logic              req_valid   [R];
  logic [IDW-1:0]    req_dst     [R];
  logic [SIZE_W-1:0] req_size    [R];
  logic              req_ready   [R];
  logic              pfin_valid  [R];
  logic              tfin_valid  [R];
  logic [IDW-1:0]    tfin_dst    [R];
  logic              tfin_ready  [R];
  logic              begin_valid [R];
  logic [IDW-1:0]    begin_dst   [R];
  logic [1:0]        begin_dir   [R];
  // controller <-> routers
  logic              cfg_valid   [R];
  logic [CFG_W-1:0]  cfg_word    [R];
  logic              cfg_done    [R];
  // data plane
  flit_t             r_in  [R][4];
  flit_t             r_out [R][4];
  flit_t             inj   [R][4];
  flit_t             ej    [R][4];

  arsmart_controller #(
    .N(N), .HPC_MAX(HPC_MAX), .THREADS(THREADS), .SIZE_W(SIZE_W), .LOAD_W(LOAD_W)
  ) u_ctrl (
    .clk, .rst_n,
    .req_valid, .req_dst, .req_size, .req_ready,
    .pfin_valid,
    .tfin_valid, .tfin_dst, .tfin_ready,
    .begin_valid, .begin_dst, .begin_dir,
    .cfg_valid, .cfg_word, .cfg_done,
    .events
  );

  for (genvar r = 0; r < R; r++) begin : g_node
    localparam int unsigned ROW = r / N;
    localparam int unsigned COL = r % N;

    // mesh links: input on side d comes from the neighbour's opposite output
    assign r_in[r][DIR_N] = (ROW > 0)     ? r_out[(ROW > 0)     ? r - N : r][DIR_S] : '0;
    assign r_in[r][DIR_S] = (ROW < N - 1) ? r_out[(ROW < N - 1) ? r + N : r][DIR_N] : '0;
    assign r_in[r][DIR_W] = (COL > 0)     ? r_out[(COL > 0)     ? r - 1 : r][DIR_E] : '0;
    assign r_in[r][DIR_E] = (COL < N - 1) ? r_out[(COL < N - 1) ? r + 1 : r][DIR_W] : '0;

    arsmart_router u_router (
      .clk, .rst_n,
      .cfg_valid (cfg_valid[r]),
      .cfg_word  (cfg_word[r]),
      .cfg_done  (cfg_done[r]),
      .in_flit   (r_in[r]),
      .inj_flit  (inj[r]),
      .out_flit  (r_out[r]),
      .ej_flit   (ej[r])
    );

    arsmart_ni #(.N(N), .SIZE_W(SIZE_W), .NI_MSGS(NI_MSGS)) u_ni (
      .clk, .rst_n,
      .msg_valid   (msg_valid[r]),
      .msg_dst     (msg_dst[r]),
      .msg_size    (msg_size[r]),
      .msg_ready   (msg_ready[r]),
      .task_done   (task_done[r]),
      .rd_valid    (rd_valid[r]),
      .rd_dst      (rd_dst[r]),
      .rd_idx      (rd_idx[r]),
      .rd_data     (rd_data[r]),
      .rx_flit     (rx_flit[r]),
      .req_valid   (req_valid[r]),
      .req_dst     (req_dst[r]),
      .req_size    (req_size[r]),
      .req_ready   (req_ready[r]),
      .pfin_valid  (pfin_valid[r]),
      .begin_valid (begin_valid[r]),
      .begin_dst   (begin_dst[r]),
      .begin_dir   (begin_dir[r]),
      .tfin_valid  (tfin_valid[r]),
      .tfin_dst    (tfin_dst[r]),
      .tfin_ready  (tfin_ready[r]),
      .inj_flit    (inj[r]),
      .ej_flit     (ej[r])
    );
  end

endmodule
