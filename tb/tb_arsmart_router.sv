// tb_arsmart_router -- self-checking test of the whole router driven only by
// router-configure words.  It reproduces the two worked examples of the
// configuration format: a router that holds a flit from its N input in the
// delay register and forwards it to S one cycle later (word 0 01 00 1), and a
// destination router that ejects its N input to the processor (word 1 00 1 xx).
// It also checks injection from the processor, release of an output, and the
// one-cycle configuration-finish answer.
module tb_arsmart_router;
  import arsmart_pkg::*;

  logic clk = 0, rst_n = 0;
  logic cfg_valid;
  logic [5:0] cfg_word;
  logic cfg_done;
  flit_t in_flit [4], inj_flit [4], out_flit [4], ej_flit [4];

  int checks = 0, failures = 0;

  arsmart_router dut (.*);

  always #5 clk = ~clk;

  task automatic expect_flit(input flit_t got, input flit_t exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got v=%b %h exp v=%b %h", what, got.valid, got.data, exp.valid, exp.data);
    end
  endtask

  task automatic configure(input logic [5:0] w);
    @(negedge clk);
    cfg_valid = 1; cfg_word = w;
    @(negedge clk);
    cfg_valid = 0;
    checks++;
    if (cfg_done !== 1'b1) begin failures++; $display("FAIL no configuration-finish for %b", w); end
  endtask

  function automatic flit_t mk(input logic [31:0] tag);
    flit_t f;
    f.valid = 1'b1;
    f.data  = {4{tag}};
    return f;
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_valid = 0; cfg_word = 0;
    for (int i = 0; i < 4; i++) begin in_flit[i] = '0; inj_flit[i] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int o = 0; o < 4; o++) begin
      expect_flit(out_flit[o], '0, "idle after reset");
      expect_flit(ej_flit[o], '0, "no ejection after reset");
    end

    // N -> S through the delay register
    configure(6'b001001);
    in_flit[DIR_N] = mk(32'hA1);
    #1 expect_flit(out_flit[DIR_S], '0, "delayed output before the clock");
    @(negedge clk);
    in_flit[DIR_N] = mk(32'hA2);
    #1 expect_flit(out_flit[DIR_S], mk(32'hA1), "delayed output one cycle later");
    @(negedge clk);
    in_flit[DIR_N] = '0;
    #1 expect_flit(out_flit[DIR_S], mk(32'hA2), "second delayed flit");
    expect_flit(out_flit[DIR_E], '0, "unconfigured output E stays idle");

    // local register: N input to the processor
    configure(6'b100100);
    in_flit[DIR_N] = mk(32'hB1);
    in_flit[DIR_W] = mk(32'hB2);
    #1 expect_flit(ej_flit[DIR_N], mk(32'hB1), "ejection of N");
    expect_flit(ej_flit[DIR_W], '0, "W not ejected");

    // injection: E output from the processor, no delay (0 11 11 0)
    configure(6'b011110);
    inj_flit[DIR_E] = mk(32'hC1);
    #1 expect_flit(out_flit[DIR_E], mk(32'hC1), "injection to E");

    // W input to N output without delay: N candidates S,W,E,L -> W is 2nd (01)
    configure(6'b000010);
    in_flit[DIR_W] = mk(32'hD1);
    #1 expect_flit(out_flit[DIR_N], mk(32'hD1), "W -> N bypass");

    // release of S and E, and disconnect of the N ejection
    configure(word_release(DIR_E));
    #1 expect_flit(out_flit[DIR_E], '0, "E released");
    configure(6'b100000);
    #1 expect_flit(ej_flit[DIR_N], '0, "N ejection removed");
    expect_flit(out_flit[DIR_N], mk(32'hD1), "N still configured");
    @(negedge clk);
    checks++;
    if (cfg_done !== 1'b0) begin failures++; $display("FAIL configuration-finish without a word"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
