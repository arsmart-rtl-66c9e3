// tb_arsmart_cfg_reg -- self-checking test of the router configuration
// decoder and registers.  It applies the two worked examples of the
// configuration format (non-local entry S <- 1st input with delay, and local
// entry N connected), a release word, and then random words, comparing the
// registers with a reference model kept in the testbench and checking that
// configuration-finish follows every word by exactly one cycle.
module tb_arsmart_cfg_reg;
  import arsmart_pkg::*;

  logic clk = 0, rst_n = 0;
  logic cfg_valid;
  logic [5:0] cfg_word;
  logic cfg_done;
  logic [1:0] nl_sel [4];
  logic [3:0] nl_dly, nl_en, loc_en;

  int checks = 0, failures = 0;

  arsmart_cfg_reg dut (.*);

  always #5 clk = ~clk;

  // reference model
  logic [1:0] m_sel [4];
  logic [3:0] m_dly, m_en, m_loc;

  task automatic model(input logic [5:0] w);
    int e = int'(w[4:3]);
    if (w[5] == 1'b0) begin
      m_sel[e] = w[2:1]; m_dly[e] = w[0]; m_en[e] = 1'b1;
    end else if (w[1] == 1'b0) begin
      m_loc[e] = w[2];
    end else begin
      m_en[e] = 1'b0; m_dly[e] = 1'b0;
    end
  endtask

  task automatic check(input string what);
    bit ok = 1;
    for (int i = 0; i < 4; i++) if (nl_sel[i] !== m_sel[i]) ok = 0;
    if (nl_dly !== m_dly || nl_en !== m_en || loc_en !== m_loc) ok = 0;
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: dly=%b en=%b loc=%b exp dly=%b en=%b loc=%b", what, nl_dly, nl_en, loc_en, m_dly, m_en, m_loc);
    end
  endtask

  task automatic send(input logic [5:0] w);
    cfg_valid <= 1'b1; cfg_word <= w;
    @(posedge clk);
    cfg_valid <= 1'b0;
    model(w);
    #1;
    checks++;
    if (cfg_done !== 1'b1) begin failures++; $display("FAIL cfg_done not high after word"); end
    check($sformatf("word %b", w));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_valid = 0; cfg_word = 0;
    for (int i = 0; i < 4; i++) m_sel[i] = 0;
    m_dly = 0; m_en = 0; m_loc = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk); #1;
    check("after reset");

    // example: non-local entry 01 (S) gets 001: input 1st (N), delay on
    send(6'b001001);
    checks++;
    if (!(nl_sel[1] == 2'b00 && nl_dly[1] && nl_en[1])) begin failures++; $display("FAIL example 001001"); end
    // example: local entry 00 (N) connected
    send(6'b100100);
    checks++;
    if (loc_en !== 4'b0001) begin failures++; $display("FAIL example 100100"); end
    // release of output S
    send(word_release(DIR_S));
    checks++;
    if (nl_en[1] !== 1'b0) begin failures++; $display("FAIL release"); end
    // cfg_done must drop when no word is sent
    @(posedge clk); #1;
    checks++;
    if (cfg_done !== 1'b0) begin failures++; $display("FAIL cfg_done stuck"); end

    for (int n = 0; n < 300; n++) begin
      logic [5:0] w;
      w = 6'($urandom);
      if (w[5] && !w[1]) w[0] = 1'b0;
      send(w);
      if ($urandom_range(3) == 0) begin
        @(posedge clk); #1;
        check("idle cycle");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
