// arsmart_cfg_reg -- configuration decoder and configuration registers of an
// ArSMART router.
//
// The cluster controller reaches every router over a point-to-point link that
// carries one 6-bit router-configure word per cycle.  The word is decoded into
// two registers, as the design describes:
//   * the non-local register, 4 entries of 3 bits, one per output N,S,W,E:
//     2 bits of input selection plus 1 delay-register bit;
//   * the local register, 4 entries of 1 bit, one per input N,S,W,E: 1 joins
//     that input to the local processor.
// Bit 5 of the word chooses the register, bits 4:3 the entry, and the rest is
// stored (see arsmart_pkg for the exact formats).  In addition to the paper's
// two formats this design keeps an enable bit per non-local output, set by a
// non-local write and cleared by a release word (local format with bit 1 set),
// so that outputs of finished paths drive idle flits and stale settings can
// never close a combinational ring through the mesh.
//
// Timing: a word presented with cfg_valid in cycle t is visible on the
// register outputs from cycle t+1; cfg_done (the 1-bit configuration-finish
// signal) is high in cycle t+1.  Reset (active low, synchronous) clears all
// entries; the reset behaviour is this design's choice.
module arsmart_cfg_reg
  import arsmart_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cfg_valid,
  input  logic [CFG_W-1:0] cfg_word,
  output logic             cfg_done,
  output logic [1:0]       nl_sel [4],
  output logic [3:0]       nl_dly,
  output logic [3:0]       nl_en,
  output logic [3:0]       loc_en
);

  logic [1:0] entry;
  assign entry = cfg_word[4:3];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < 4; i++) nl_sel[i] <= 2'd0;
      nl_dly   <= '0;
      nl_en    <= '0;
      loc_en   <= '0;
      cfg_done <= 1'b0;
    end else begin
      cfg_done <= cfg_valid;
      if (cfg_valid) begin
        if (!cfg_word[5]) begin
          // non-local register: 2 bits input selection, 1 bit delay
          nl_sel[entry] <= cfg_word[2:1];
          nl_dly[entry] <= cfg_word[0];
          nl_en[entry]  <= 1'b1;
        end else if (!cfg_word[1]) begin
          // local register: 1 bit connection
          loc_en[entry] <= cfg_word[2];
        end else begin
          // release of a non-local output
          nl_en[entry]  <= 1'b0;
          nl_dly[entry] <= 1'b0;
        end
      end
    end
  end

endmodule
