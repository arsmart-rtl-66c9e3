// arsmart_crossbar -- bufferless crossbar with one-flit delay registers.
//
// Each non-local output o (N,S,W,E) has a 4:1 multiplexer whose candidates are
// the other three directions and the local processor, in the order N,S,W,E,L
// with o left out (nl_sel = 0..3 picks the 1st..4th candidate).  Flits pass
// through combinationally, so a flit can cross several routers in one cycle
// (the single-cycle multi-hop bypass).  When nl_dly[o] is set the output is
// taken from a one-flit delay register instead, which holds the flit for one
// cycle; this is how a path longer than HPC_max hops is cut into one-cycle
// segments.  The delay register sits behind each output multiplexer, as the
// router drawing shows; the text speaks of one per input port, which is the
// same count of registers on any path because a path uses one output per
// input.  An output whose enable nl_en is low drives an idle flit.
//
// The local processor has its own injection input per output (inj[o]) and
// its own ejection output per input (ej[i], enabled by loc_en[i]), so it can
// send and receive in all directions at once.
//
// Because a route may turn in any direction, the multiplexers of neighbouring
// routers form structural combinational loops through the mesh.  The
// controller only ever enables acyclic paths, so no loop is ever closed while
// enabled; tools that report a combinational loop here report that structure.
module arsmart_crossbar
  import arsmart_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic [1:0] nl_sel [4],
  input  logic [3:0] nl_dly,
  input  logic [3:0] nl_en,
  input  logic [3:0] loc_en,
  input  flit_t      in_flit  [4],   // from the neighbour on side N,S,W,E
  input  flit_t      inj_flit [4],   // from the local processor, for output N,S,W,E
  output flit_t      out_flit [4],   // to the neighbour on side N,S,W,E
  output flit_t      ej_flit  [4]    // to the local processor, from input N,S,W,E
);

  flit_t mux_out [4];
  flit_t dly_q   [4];

  always_comb begin
    for (int o = 0; o < 4; o++) begin
      logic [2:0] p;
      p = cand_port(2'(o), nl_sel[o]);
      if (!nl_en[o])        mux_out[o] = '0;
      else if (p == PORT_L) mux_out[o] = inj_flit[o];
      else                  mux_out[o] = in_flit[p[1:0]];
      out_flit[o] = nl_dly[o] ? dly_q[o] : mux_out[o];
      ej_flit[o]  = loc_en[o] ? in_flit[o] : '0;
    end
  end

  always_ff @(posedge clk) begin
    for (int o = 0; o < 4; o++) begin
      if (!rst_n) dly_q[o].valid <= 1'b0;
      else        dly_q[o].valid <= mux_out[o].valid;
      dly_q[o].data <= mux_out[o].data;
    end
  end

endmodule
