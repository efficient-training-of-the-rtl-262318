// tb_rbm_ctrl - self-checking test of the RBM layer controller.
//
// For each command the testbench records, clock by clock, which strobes the
// controller raises and compares the trace with the expected phase order
// (forward, sample, capture h, backward, sample, capture v', forward,
// sample, capture h', CD pass), including the clock each strobe falls on
// and the start-to-done latency. The counter array is stood in for by a
// delay of D clocks between cd_start/cd_clear and cd_done.
module tb_rbm_ctrl;
  import dbn_pkg::*;
  localparam int D = 7;

  logic clk = 0, rst_n = 0, start = 0;
  layer_cmd_e cmd = LC_FWD;
  logic busy, done, ld_v, fwd_src, cap_h, cap_vr, cap_hr;
  logic xb_init, xb_fwd, xb_bwd, smp_hid, smp_vis, cd_start, cd_clear, cd_done;
  int checks = 0, failures = 0;
  int cd_cnt = -1;

  rbm_ctrl dut (.*);

  always #5 clk = ~clk;

  // stand-in for the counter array: done D clocks after start
  always_ff @(posedge clk) begin
    cd_done <= 1'b0;
    if (cd_start || cd_clear) cd_cnt <= D - 1;
    else if (cd_cnt > 0) cd_cnt <= cd_cnt - 1;
    else if (cd_cnt == 0) begin cd_done <= 1'b1; cd_cnt <= -1; end
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic string strobes();
    string s;
    s = "";
    if (ld_v)     s = {s, "L"};
    if (xb_fwd)   s = {s, fwd_src ? "f" : "F"};
    if (smp_hid)  s = {s, "S"};
    if (cap_h)    s = {s, "H"};
    if (xb_bwd)   s = {s, "B"};
    if (smp_vis)  s = {s, "s"};
    if (cap_vr)   s = {s, "V"};
    if (cap_hr)   s = {s, "R"};
    if (cd_start) s = {s, "C"};
    if (xb_init)  s = {s, "I"};
    if (cd_clear) s = {s, "Z"};
    if (done)     s = {s, "D"};
    if (s == "")  s = ".";
    return s;
  endfunction

  task automatic run(layer_cmd_e c, string exp_trace, int exp_lat);
    string tr;
    int lat;
    @(negedge clk) begin start = 1; cmd = c; end
    @(negedge clk) start = 0;
    tr = ""; lat = 1;
    chk(busy, "busy after start");
    while (1) begin
      tr = {tr, strobes()};
      if (done) break;
      @(negedge clk);
      lat++;
    end
    chk(tr == exp_trace, $sformatf("%s trace %s vs %s", c.name(), tr, exp_trace));
    chk(lat == exp_lat, $sformatf("%s latency %0d vs %0d", c.name(), lat, exp_lat));
    @(negedge clk);
    chk(!busy, "idle after done");
  endtask

  initial begin
    string w;
    #22 rst_n = 1;
    w = "";
    for (int i = 0; i <= D; i++) w = {w, "."};  // cd_done D+1 clocks after the strobe, DONE one later
    run(LC_FWD, "LFSHD", 5);
    run(LC_BWD, "BsVD", 4);
    run(LC_TRAIN, {"LFSHBsVfSRC", w, "D"}, 12 + D + 1);
    run(LC_INIT, {"IZ", w, "D"}, 2 + D + 1);
    run(LC_TRAIN, {"LFSHBsVfSRC", w, "D"}, 12 + D + 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
