// tb_dcds_processor -- end-to-end test of the DCDS processor at its default
// parameters.
//
// The testbench plays the host (loads registers and weights on ramclk,
// raises dataloaded, triggers lines), a synthetic CCD video source and a
// pipelined ADC (a pure delay of ADC_LAT clocks on adcCLK, with clkDCO a
// phase-shifted copy of adcCLK). Each pixel is a reference level followed,
// after the dump event, by a lower signal level, both with random noise.
// For every pixel the expected output is worked out here from the samples
// actually sent: bias = (reference weight sum) << 10, plus weighted
// reference samples, minus weighted signal samples, times
// floor((2^32-1)/sum), bits 47..30. PixelWR must come exactly 20 adcCLK
// cycles after the last signal sample reaches the processor.
// Scenarios: a bias frame, a ramp, a bias frame with every 16th column
// bright (persistence check), all-1 versus all-255 weights (equal images),
// a sloped 0..255 weight profile, full 256-sample pedestals, oscilloscope
// mode (raw samples with the pedestal flag in the low bit), an
// inconsistent configuration (error set, trigger ignored) and a trigger
// during an active line (ignored). Each is counted and must occur.
module tb_dcds_processor;
  import dcds_pkg::*;

  localparam int ADC_LAT = 12;            // ADC pipeline, clocks
  localparam int ADCPL   = ADC_LAT;       // ADC pipeline length register

  logic adcCLK = 0, clkDCO = 0, ramclk = 0;
  logic Coeff_wen = 0, Config_wen = 0, rst = 1, linetrig = 0, dataloaded = 0;
  logic [15:0] SetupDATAfromHost = 0, ADC_DATA = 0;
  logic error, ready, lineactive, pixactive, PixelWR, start_of_pixel, dump_event;
  logic [17:0] PIXELOUT;

  dcds_processor dut (.*);

  always #25 adcCLK = ~adcCLK;                       // 20 MHz
  initial begin #10; forever #25 clkDCO = ~clkDCO; end
  always #4 ramclk = ~ramclk;                        // host clock

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge adcCLK) cycle++;

  initial begin
    repeat (400000) @(posedge adcCLK);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- config
  logic [15:0] regs [16];
  logic [7:0]  w [512];
  int sr, er, ss, es, lp, ns, dmp;
  bit scope;

  task automatic set_timing(input int nserial, l_pixel, start_ref, ped, start_sig, dump);
    ns = nserial; lp = l_pixel; sr = start_ref; er = start_ref + ped - 1;
    ss = start_sig; es = start_sig + ped - 1; dmp = dump;
  endtask

  task automatic host_load();
    for (int i = 0; i < 16; i++) regs[i] = 16'($urandom);
    regs[0] = 16'(ADCPL); regs[1] = 16'(ns); regs[2] = 16'(dmp);
    regs[3] = 16'(sr); regs[4] = 16'(er); regs[5] = 16'(ss); regs[6] = 16'(es);
    regs[7] = 16'(lp); regs[8] = {15'($urandom), scope};
    @(negedge ramclk);
    for (int i = 0; i < 16; i++) begin
      Config_wen = 1; SetupDATAfromHost = regs[i]; @(negedge ramclk);
    end
    Config_wen = 0;
    for (int i = 0; i < 512; i++) begin
      Coeff_wen = 1; SetupDATAfromHost = {8'($urandom), w[i]}; @(negedge ramclk);
    end
    Coeff_wen = 0;
    dataloaded = 1;
    repeat (30) @(negedge ramclk);
    dataloaded = 0;
  endtask

  // ---------------------------------------------------------------- video
  typedef enum {BIAS, RAMP, IMPULSE, FLAT} scene_e;
  scene_e scene;
  int ref_level [1024];
  int sig_step  [1024];

  function automatic int level(input int p, k);
    int v;
    v = (k < dmp) ? ref_level[p] : ref_level[p] - sig_step[p];
    v += $urandom_range(0, 40) - 20;   // read noise
    if (v < 0) v = 0;
    if (v > 65535) v = 65535;
    return v;
  endfunction

  // sequencer-time line model: filled while the line runs
  int    pix_k = -1, pix_p = -1;
  logic [15:0] adc_pipe [$];
  logic [15:0] smp_line [$];     // every sample of the line, in order
  bit          flg_line [$];
  longint      exp_pix [$];
  int          exp_cyc [$];
  longint      acc_m;
  longint      sum_ref;
  longint      scale_m;
  bit          in_line = 0;

  always @(negedge adcCLK) begin
    logic [15:0] x;
    if (start_of_pixel) begin
      pix_k = 0; pix_p++;
      acc_m = sum_ref << 10;
    end else if (pix_k >= 0) pix_k++;
    if (pix_k >= 0 && pix_k < lp && in_line) begin
      x = 16'(level(pix_p, pix_k));
      smp_line.push_back(x);
      flg_line.push_back((pix_k >= sr && pix_k <= er) || (pix_k >= ss && pix_k <= es));
      if (pix_k >= sr && pix_k <= er) acc_m += longint'(w[pix_k - sr]) * x;
      if (pix_k >= ss && pix_k <= es) acc_m -= longint'(w[256 + pix_k - ss]) * x;
      if (pix_k == es && !scope) begin
        longint a32, prod;
        a32 = acc_m & 64'hFFFF_FFFF;
        prod = a32 * scale_m;
        exp_pix.push_back((prod >> 30) & 64'h3FFFF);
        exp_cyc.push_back(cycle + ADC_LAT + 2 + 20);   // + two input registers
      end
      if (pix_k == lp - 1 && pix_p == ns - 1) pix_k = -1;
    end else begin
      x = 16'($urandom_range(30000, 30100));   // video between lines
    end
    adc_pipe.push_back(x);
    if (adc_pipe.size() > ADC_LAT) ADC_DATA = adc_pipe.pop_front();
  end

  // ---------------------------------------------------------------- output
  longint got_pix [$];
  int n_pix_ok = 0, n_scope_ok = 0, n_flag = 0, n_late = 0;

  always @(negedge adcCLK) if (PixelWR) begin
    if (!scope) begin
      checks += 2;
      if (exp_pix.size() == 0) begin failures++; $display("unexpected pixel"); end
      else begin
        automatic longint e = exp_pix.pop_front();
        automatic int     t = exp_cyc.pop_front();
        got_pix.push_back(longint'(PIXELOUT));
        if (PIXELOUT !== 18'(e)) begin
          failures++; $display("pixel %0d: got %0d exp %0d", got_pix.size(), PIXELOUT, e);
        end else n_pix_ok++;
        if (cycle != t) begin
          failures++; n_late++; $display("pixel latency off by %0d", cycle - t);
        end
      end
    end else begin
      checks++;
      if (smp_line.size() == 0) begin failures++; $display("unexpected scope word"); end
      else begin
        automatic logic [15:0] x = smp_line.pop_front();
        automatic bit f = flg_line.pop_front();
        if (PIXELOUT !== {x[15:1], f, 2'b00}) begin
          failures++; $display("scope word %h exp %h", PIXELOUT, {x[15:1], f, 2'b00});
        end else n_scope_ok++;
        if (f) n_flag++;
      end
    end
  end

  // ---------------------------------------------------------------- runs
  int n_lines = 0, n_error = 0, n_ignored = 0, n_busy_trig = 0, n_reload = 0;

  task automatic configure();
    int wt;
    sum_ref = 0;
    for (int i = 0; i <= er - sr; i++) sum_ref += longint'(w[i]);
    scale_m = (sum_ref == 0) ? 64'hFFFF_FFFF : 64'hFFFF_FFFF / sum_ref;
    host_load();
    n_reload++;
    wt = 0;
    while (!ready && !error && wt < 2000) begin @(negedge adcCLK); wt++; end
    repeat (5) @(negedge adcCLK);
    checks++;
    if (!ready || error) begin failures++; $display("not ready after load (error=%b)", error); end
  endtask

  task automatic run_line(input bit poke_busy = 0);
    int wt;
    smp_line.delete(); flg_line.delete(); got_pix.delete();
    pix_p = -1; pix_k = -1;
    in_line = 1;
    @(negedge adcCLK) linetrig = 1;
    repeat (3) @(negedge adcCLK);
    linetrig = 0;
    if (poke_busy) begin
      repeat (lp + 7) @(negedge adcCLK);
      checks++;
      if (!lineactive || ready) failures++;
      linetrig = 1; repeat (3) @(negedge adcCLK); linetrig = 0;
      n_busy_trig++;
    end
    wt = 0;
    while ((lineactive || wt < 5) && wt < 200000) begin @(negedge adcCLK); wt++; end
    in_line = 0;
    repeat (ADCPL + 30) @(negedge adcCLK);
    checks += 2;
    if (!ready) begin failures++; $display("not ready after line"); end
    if (exp_pix.size() != 0 || (scope && smp_line.size() != 0)) begin
      failures++; $display("missing outputs: %0d pixels, %0d samples", exp_pix.size(), smp_line.size());
    end
    if (!scope && got_pix.size() != ns) begin failures++; $display("pixels %0d", got_pix.size()); end
    n_lines++;
  endtask

  int img_w1 [$];
  int cnt_lp_dump = 0;
  always @(negedge adcCLK) if (dump_event) cnt_lp_dump++;

  initial begin
    repeat (4) @(posedge adcCLK);
    rst = 0;
    @(negedge adcCLK);
    checks++;
    if (ready) failures++;

    // 1. bias frame, uniform weights 255, 40-sample pedestals
    set_timing(20, 200, 40, 40, 100, 84);
    scope = 0;
    for (int i = 0; i < 512; i++) w[i] = 8'd255;
    for (int p = 0; p < 1024; p++) begin ref_level[p] = 60000; sig_step[p] = 0; end
    configure();
    run_line();
    foreach (got_pix[i]) begin
      checks++;   // digital bias: a bias pixel sits near 1024 ADU
      if (got_pix[i] >> 2 < 1014 || got_pix[i] >> 2 > 1034) failures++;
    end

    // 2. ramp image, weights all 1, then all 255: same image within rounding
    for (int p = 0; p < 1024; p++) begin ref_level[p] = 64000; sig_step[p] = p * 3000; end
    for (int i = 0; i < 512; i++) w[i] = 8'd1;
    configure();
    run_line(1);
    foreach (got_pix[i]) img_w1.push_back(int'(got_pix[i] >> 2));
    for (int i = 0; i < 512; i++) w[i] = 8'd255;
    configure();
    run_line();
    foreach (got_pix[i]) begin
      automatic int d = int'(got_pix[i] >> 2) - img_w1[i];
      checks++;
      if (d < -25 || d > 25) begin failures++; $display("w1/w255 differ by %0d", d); end
    end

    // 3. impulse: every 16th column bright; the next pixel must not leak
    set_timing(48, 200, 40, 40, 100, 84);
    for (int p = 0; p < 1024; p++) begin
      ref_level[p] = 62000; sig_step[p] = (p % 16 == 0) ? 55000 + p : 0;
    end
    configure();
    run_line();
    foreach (got_pix[i]) if (i % 16 == 1) begin
      checks++;
      if (got_pix[i] >> 2 > 1040) begin failures++; $display("persistence at %0d", i); end
    end

    // 4. sloped weights 0..255, full 256-sample pedestals
    set_timing(4, 600, 10, 256, 300, 280);
    for (int i = 0; i < 256; i++) begin w[i] = 8'(i); w[256+i] = 8'(i); end
    for (int p = 0; p < 1024; p++) begin ref_level[p] = 50000; sig_step[p] = 1000 + 7000 * p; end
    configure();
    run_line();

    // 5. oscilloscope mode
    set_timing(10, 200, 40, 40, 100, 84);
    for (int i = 0; i < 512; i++) w[i] = 8'd200;
    scope = 1;
    configure();
    run_line();
    checks++;
    if (n_flag != 10 * 80) begin failures++; $display("flagged samples %0d", n_flag); end
    scope = 0;

    // 6. inconsistent configuration: pedestals of unequal length
    set_timing(10, 200, 40, 40, 100, 84);
    es = es + 3;
    host_load();
    repeat (300) @(negedge adcCLK);
    checks += 2;
    if (!error || ready) failures++; else n_error++;
    linetrig = 1; repeat (3) @(negedge adcCLK); linetrig = 0;
    repeat (50) @(negedge adcCLK);
    if (lineactive || start_of_pixel) failures++; else n_ignored++;

    // 7. back to a good configuration
    set_timing(5, 200, 40, 40, 100, 84);
    configure();
    run_line();

    // every mechanism must have happened
    checks += 8;
    if (n_pix_ok == 0)    begin failures++; $display("no pixel checked"); end
    if (n_scope_ok == 0)  begin failures++; $display("no scope word"); end
    if (n_error == 0)     begin failures++; $display("no error"); end
    if (n_ignored == 0)   begin failures++; $display("no ignored trigger"); end
    if (n_busy_trig == 0) begin failures++; $display("no busy trigger"); end
    if (n_reload < 5)     begin failures++; $display("reloads %0d", n_reload); end
    if (n_lines != 7)     begin failures++; $display("lines %0d", n_lines); end
    if (cnt_lp_dump == 0) begin failures++; $display("no dump_event"); end
    $display("pixels=%0d scope_words=%0d flagged=%0d lines=%0d reloads=%0d errors=%0d ignored=%0d busy_trig=%0d dumps=%0d",
             n_pix_ok, n_scope_ok, n_flag, n_lines, n_reload, n_error, n_ignored, n_busy_trig, cnt_lp_dump);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
