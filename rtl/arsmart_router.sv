// arsmart_router -- bufferless reconfigurable ArSMART router.
//
// The router makes no decisions of its own: it has no route computation, no
// virtual channels and no switch allocation.  The cluster controller writes
// its configuration register (arsmart_cfg_reg) with 6-bit router-configure
// words, and the crossbar (arsmart_crossbar) then connects inputs to outputs
// as configured, with an optional one-cycle delay register per output.
//
// Interface: four neighbour links in and out (index N,S,W,E = side of this
// router), four injection and four ejection channels to the local processor,
// the configure word from the controller and the 1-bit configuration-finish
// back to it.  Timing: a configure word in cycle t takes effect in cycle t+1,
// when cfg_done is also high; flits cross the router in zero cycles, or one
// cycle through an output whose delay bit is set.
module arsmart_router
  import arsmart_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cfg_valid,
  input  logic [CFG_W-1:0] cfg_word,
  output logic             cfg_done,
  input  flit_t            in_flit  [4],
  input  flit_t            inj_flit [4],
  output flit_t            out_flit [4],
  output flit_t            ej_flit  [4]
);

  logic [1:0] nl_sel [4];
  logic [3:0] nl_dly, nl_en, loc_en;

  arsmart_cfg_reg u_cfg (
    .clk, .rst_n, .cfg_valid, .cfg_word, .cfg_done,
    .nl_sel, .nl_dly, .nl_en, .loc_en
  );

  arsmart_crossbar u_xbar (
    .clk, .rst_n, .nl_sel, .nl_dly, .nl_en, .loc_en,
    .in_flit, .inj_flit, .out_flit, .ej_flit
  );

endmodule
