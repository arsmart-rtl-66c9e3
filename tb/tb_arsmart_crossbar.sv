// tb_arsmart_crossbar -- self-checking test of the bufferless crossbar and its
// delay registers.  Every cycle it drives random settings and random flits
// and compares all outputs with a reference model that uses its own table of
// input candidates (N:{S,W,E,L} S:{N,W,E,L} W:{N,S,E,L} E:{N,S,W,L}).  A
// delayed output must show the flit its multiplexer selected one cycle before.
module tb_arsmart_crossbar;
  import arsmart_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [1:0] nl_sel [4];
  logic [3:0] nl_dly, nl_en, loc_en;
  flit_t in_flit [4], inj_flit [4], out_flit [4], ej_flit [4];

  int checks = 0, failures = 0;

  arsmart_crossbar dut (.*);

  always #5 clk = ~clk;

  // candidate table: 0..3 = N,S,W,E, 4 = local
  int cand [4][4] = '{'{1, 2, 3, 4}, '{0, 2, 3, 4}, '{0, 1, 3, 4}, '{0, 1, 2, 4}};

  function automatic flit_t rnd_flit();
    flit_t f;
    f.valid = 1'($urandom);
    f.data  = {$urandom, $urandom, $urandom, $urandom};
    return f;
  endfunction

  function automatic flit_t ref_mux(int o);
    int p;
    if (!nl_en[o]) return '0;
    p = cand[o][nl_sel[o]];
    return (p == 4) ? inj_flit[o] : in_flit[p];
  endfunction

  flit_t prev_mux [4];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) begin
      nl_sel[i] = 0; in_flit[i] = '0; inj_flit[i] = '0; prev_mux[i] = '0;
    end
    nl_dly = 0; nl_en = 0; loc_en = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      // new stimulus just after the clock edge
      @(negedge clk);
      for (int i = 0; i < 4; i++) begin
        in_flit[i]  = rnd_flit();
        inj_flit[i] = rnd_flit();
        if (n % 5 == 0) nl_sel[i] = 2'($urandom);
      end
      if (n % 5 == 0) begin
        nl_dly = 4'($urandom); nl_en = 4'($urandom); loc_en = 4'($urandom);
      end
      #1;
      for (int o = 0; o < 4; o++) begin
        flit_t exp_o, exp_e;
        exp_o = nl_dly[o] ? prev_mux[o] : ref_mux(o);
        exp_e = loc_en[o] ? in_flit[o] : '0;
        checks += 2;
        if (n > 0 && out_flit[o] !== exp_o) begin
          failures++;
          $display("FAIL cycle %0d out %0d sel=%0d dly=%b en=%b", n, o, nl_sel[o], nl_dly[o], nl_en[o]);
        end
        if (ej_flit[o] !== exp_e) begin
          failures++;
          $display("FAIL cycle %0d eject %0d", n, o);
        end
      end
      for (int o = 0; o < 4; o++) prev_mux[o] = ref_mux(o);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
