// arsmart_pkg -- types, constants and helper functions shared by the ArSMART
// network-on-chip.
//
// Port and direction codes follow the configuration format of the router:
// the non-local outputs are N=00, S=01, W=10, E=11.  The local processor is
// given the code 4 when a 3-bit port number is needed (this code never appears
// in a configure word).  Routers are numbered row-major, id = row*N + col,
// with row 0 at the north edge (this numbering is a choice of this design).
//
// The router-configure word is 6 bits, bit 5 sent first:
//   non-local write : 0 | out[1:0] | insel[1:0] | delay
//   local write     : 1 | in[1:0]  | connect    | 0 | 0
//   output release  : 1 | out[1:0] | 0          | 1 | 0
// The first two formats are the ones of the configuration decoding of the
// design; the release format uses a bit that is a don't-care in the local
// format and is this design's own addition.
package arsmart_pkg;

  localparam int unsigned FLIT_W = 128;   // flit width
  localparam int unsigned CFG_W  = 6;     // router-configure word width

  typedef enum logic [1:0] {
    DIR_N = 2'd0,
    DIR_S = 2'd1,
    DIR_W = 2'd2,
    DIR_E = 2'd3
  } dir_e;

  localparam logic [2:0] PORT_L = 3'd4;   // local processor as a port number

  typedef struct packed {
    logic              valid;
    logic [FLIT_W-1:0] data;
  } flit_t;

  // Direction that leads back along a link.
  function automatic logic [1:0] opposite(input logic [1:0] d);
    case (d)
      DIR_N:   return DIR_S;
      DIR_S:   return DIR_N;
      DIR_W:   return DIR_E;
      default: return DIR_W;
    endcase
  endfunction

  // Port (0..3 = N,S,W,E, 4 = local) that is the k-th candidate input of
  // non-local output o: the order N,S,W,E,L with o itself left out.
  function automatic logic [2:0] cand_port(input logic [1:0] o, input logic [1:0] k);
    logic [2:0] p;
    p = {1'b0, k};
    if (p >= {1'b0, o}) p = p + 3'd1;
    return p;
  endfunction

  // Inverse of cand_port: input-selection code that picks port p (p != o).
  function automatic logic [1:0] insel_code(input logic [1:0] o, input logic [2:0] p);
    return (p > {1'b0, o}) ? 2'(p - 3'd1) : p[1:0];
  endfunction

  function automatic logic [CFG_W-1:0] word_nonlocal(input logic [1:0] o,
                                                     input logic [2:0] in_port,
                                                     input logic dly);
    return {1'b0, o, insel_code(o, in_port), dly};
  endfunction

  function automatic logic [CFG_W-1:0] word_local(input logic [1:0] in_dir,
                                                  input logic connect);
    return {1'b1, in_dir, connect, 2'b00};
  endfunction

  function automatic logic [CFG_W-1:0] word_release(input logic [1:0] o);
    return {1'b1, o, 1'b0, 2'b10};
  endfunction

  // One-cycle event pulses of the cluster controller, for monitoring.
  typedef struct packed {
    logic grant;       // a message won all links of its route
    logic grant_xy;    // ... while only its default XY route was ready
    logic blocked;     // a ready message waits at its source for busy links
    logic r1_commit;   // an adaptive (R1) route replaced the XY route
    logic r1_detour;   // ... and differs from the XY route
    logic release_;    // a finished message released its links
  } ctl_events_t;

  // Release word that undoes a configure word.
  function automatic logic [CFG_W-1:0] release_of(input logic [CFG_W-1:0] w);
    return w[5] ? word_local(w[4:3], 1'b0) : word_release(w[4:3]);
  endfunction

endpackage
