// tb_dcds_sequencer -- runs lines through the sequencer and checks, cycle by
// cycle against a counter model, the per-sample flags, start_of_pixel,
// dump_event, pixactive and lineactive; also that a trigger is ignored
// while disabled and that the line ends only on line_done.
module tb_dcds_sequencer;
  import dcds_pkg::*;
  logic clk = 0, rst = 1, enable = 0, trig = 0, line_done = 0;
  dcds_cfg_t cfg;
  logic idle, lineactive, pixactive, sop, dump;
  smp_flags_t flags;
  int checks = 0, failures = 0;

  dcds_sequencer dut (.clk, .rst, .cfg, .enable, .trig, .line_done, .idle, .lineactive,
                      .pixactive, .start_of_pixel(sop), .dump_event(dump), .flags);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("%0t: %s", $time, what); end
  endtask

  task automatic run_line();
    int k, waitc;
    @(negedge clk) trig = 1;
    @(negedge clk) trig = 0;
    waitc = 0;
    while (!sop && waitc < 10) begin @(negedge clk); waitc++; end
    chk(waitc == 1, "start_of_pixel one cycle after the trigger was taken");
    for (int p = 0; p < int'(cfg.nserial); p++) begin
      for (k = 0; k < int'(cfg.l_pixel); k++) begin
        automatic logic r = k >= cfg.start_ref && k <= cfg.end_ref;
        automatic logic s = k >= cfg.start_sig && k <= cfg.end_sig;
        chk(sop == (k == 0), "start_of_pixel");
        chk(dump == (k == int'(cfg.dmp)), "dump_event");
        chk(pixactive && lineactive && flags.line, "active");
        chk(flags.first == (k == 0), "first");
        chk(flags.ref_s == r && flags.sig_s == s, $sformatf("pedestal flags at %0d", k));
        chk(flags.last == (k == int'(cfg.end_sig)), "last");
        chk(flags.lastpix == (p == int'(cfg.nserial) - 1), "lastpix");
        chk(flags.eol == (p == int'(cfg.nserial) - 1 && k == int'(cfg.l_pixel) - 1), "eol");
        if (r) chk(flags.idx == 8'(k - cfg.start_ref), "ref idx");
        if (s) chk(flags.idx == 8'(k - cfg.start_sig), "sig idx");
        @(negedge clk);
      end
    end
    // draining: still in the line until line_done
    repeat (5) begin
      chk(!pixactive && !flags.line && lineactive && !idle, "drain");
      @(negedge clk);
    end
    line_done = 1;
    @(negedge clk) line_done = 0;
    chk(idle && !lineactive, "idle after line_done");
  endtask

  initial begin
    cfg = '0;
    cfg.nserial = 3; cfg.l_pixel = 40; cfg.dmp = 16;
    cfg.start_ref = 5; cfg.end_ref = 12; cfg.start_sig = 20; cfg.end_sig = 27;
    repeat (3) @(posedge clk);
    rst <= 0;
    // disabled: trigger ignored
    @(negedge clk) trig = 1;
    @(negedge clk) trig = 0;
    repeat (5) begin chk(idle && !sop && !lineactive, "ignored trigger"); @(negedge clk); end
    enable = 1;
    run_line();
    cfg.nserial = 2; cfg.l_pixel = 300; cfg.dmp = 0;
    cfg.start_ref = 0; cfg.end_ref = 255; cfg.start_sig = 256; cfg.end_sig = 294;
    run_line();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
