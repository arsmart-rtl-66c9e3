// tb_arsmart_ni -- self-checking test of the network interface.  The
// testbench plays both the processor (messages, end of task, memory) and the
// cluster controller (request handshake, transmission-begin, finish
// handshake).  It checks that processor-finish never overtakes an outstanding
// transmission-request, that a message streams exactly its flits, one per
// cycle, on the direction named by transmission-begin, starting the cycle
// after it, that two messages stream at once on two directions, that
// transmission-finish names the destination, and that ejected flits reach the
// processor one cycle later.
module tb_arsmart_ni;
  import arsmart_pkg::*;

  localparam int SW = 16;

  logic clk = 0, rst_n = 0;
  logic msg_valid; logic [5:0] msg_dst; logic [SW-1:0] msg_size; logic msg_ready;
  logic task_done;
  logic rd_valid [4]; logic [5:0] rd_dst [4]; logic [SW-1:0] rd_idx [4];
  logic [FLIT_W-1:0] rd_data [4];
  flit_t rx_flit [4];
  logic req_valid; logic [5:0] req_dst; logic [SW-1:0] req_size; logic req_ready;
  logic pfin_valid;
  logic begin_valid; logic [5:0] begin_dst; logic [1:0] begin_dir;
  logic tfin_valid; logic [5:0] tfin_dst; logic tfin_ready;
  flit_t inj_flit [4], ej_flit [4];

  arsmart_ni #(.N(8), .SIZE_W(SW)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  function automatic logic [FLIT_W-1:0] mem(logic [5:0] d, logic [SW-1:0] i);
    return {64'hFEED_0000_0000_0000 | 64'(d), 48'd0, i};
  endfunction
  always_comb for (int d = 0; d < 4; d++) rd_data[d] = mem(rd_dst[d], rd_idx[d]);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cycle); end
  endtask

  // flits seen per direction
  int got [4][$];
  int got_dst [4][$];
  int first_cycle [4];
  always @(posedge clk) if (rst_n)
    for (int d = 0; d < 4; d++) if (inj_flit[d].valid) begin
      if (got[d].size() == 0) first_cycle[d] = cycle;
      got[d].push_back(int'(inj_flit[d].data[SW-1:0]));
      got_dst[d].push_back(int'(inj_flit[d].data[69:64]));
    end

  task automatic give_msg(int d, int size);
    @(negedge clk);
    msg_valid = 1; msg_dst = 6'(d); msg_size = SW'(size);
    do @(posedge clk); while (!msg_ready);
    @(negedge clk);
    msg_valid = 0;
  endtask

  task automatic take_req(int d, int size);
    int t0 = cycle;
    @(negedge clk);
    while (!req_valid && cycle < t0 + 20) @(negedge clk);
    chk(req_valid && req_dst == 6'(d) && req_size == SW'(size), $sformatf("request for %0d", d));
    req_ready = 1;
    @(negedge clk);
    req_ready = 0;
  endtask

  task automatic send_begin(int d, int dir);
    @(negedge clk);
    begin_valid = 1; begin_dst = 6'(d); begin_dir = 2'(dir);
    @(negedge clk);
    begin_valid = 0;
  endtask

  task automatic take_tfin(int d);
    int t0 = cycle;
    while (!tfin_valid && cycle < t0 + 40) @(negedge clk);
    chk(tfin_valid && tfin_dst == 6'(d), $sformatf("transmission-finish for %0d", d));
    tfin_ready = 1;
    @(negedge clk);
    tfin_ready = 0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int tb;
    msg_valid = 0; msg_dst = 0; msg_size = 0; task_done = 0; req_ready = 0;
    begin_valid = 0; begin_dst = 0; begin_dir = 0; tfin_ready = 0;
    for (int d = 0; d < 4; d++) begin ej_flit[d] = '0; first_cycle[d] = -1; end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // two messages, the task ends before the controller takes the requests
    give_msg(5, 3);
    give_msg(9, 2);
    @(negedge clk);
    task_done = 1;
    @(negedge clk);
    task_done = 0;
    repeat (3) begin
      chk(!pfin_valid, "processor-finish held back by outstanding requests");
      @(negedge clk);
    end
    take_req(5, 3);
    chk(!pfin_valid, "processor-finish held back by the second request");
    take_req(9, 2);
    chk(pfin_valid, "processor-finish after the requests");
    @(negedge clk);
    chk(!pfin_valid, "processor-finish is one pulse");

    // both messages stream at once
    @(negedge clk);
    begin_valid = 1; begin_dst = 6'd5; begin_dir = 2'(DIR_E);
    tb = cycle;
    @(negedge clk);
    begin_dst = 6'd9; begin_dir = 2'(DIR_S);
    @(negedge clk);
    begin_valid = 0;
    // both end in the same cycle; the older message is reported first
    take_tfin(5);
    take_tfin(9);
    chk(first_cycle[DIR_E] == tb + 1, "first flit the cycle after transmission-begin");
    chk(got[DIR_E].size() == 3 && got[DIR_E][0] == 0 && got[DIR_E][1] == 1 && got[DIR_E][2] == 2, "three flits in order on E");
    chk(got[DIR_S].size() == 2 && got[DIR_S][0] == 0 && got[DIR_S][1] == 1, "two flits in order on S");
    chk(got_dst[DIR_E][0] == 5 && got_dst[DIR_S][0] == 9, "data read for the right message");
    chk(got[DIR_N].size() == 0 && got[DIR_W].size() == 0, "nothing on N and W");
    repeat (3) @(negedge clk);
    chk(!tfin_valid, "no further transmission-finish");

    // ejection
    ej_flit[DIR_W].valid = 1; ej_flit[DIR_W].data = 128'h1234;
    @(negedge clk);
    ej_flit[DIR_W] = '0;
    chk(rx_flit[DIR_W].valid && rx_flit[DIR_W].data == 128'h1234, "ejected flit registered");
    @(negedge clk);
    chk(!rx_flit[DIR_W].valid, "ejected flit for one cycle");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
