// tb_dcds_output_stage -- normal mode: random pixels must reach PIXELOUT
// with PixelWR exactly PAD+1 cycles later and line_done must follow the
// line's last pixel; oscilloscope mode: each flagged sample must come out
// one cycle later as {sample[15:1], flag, 00}.
module tb_dcds_output_stage;
  import dcds_pkg::*;
  localparam int PAD = 8;
  logic clk = 0, rst = 1, scope = 0, pv = 0, plast = 0;
  logic [17:0] pixel = 0, pixelout;
  logic [15:0] smp = 0;
  smp_flags_t sf = '0;
  logic pixelwr, line_done;
  logic [17:0] e_pix [$];
  int e_t [$];
  int checks = 0, failures = 0, cycle = 0, ndone = 0;

  dcds_output_stage #(.PAD(PAD)) dut (.clk, .rst, .scope_mode(scope), .pix_valid(pv), .pixel,
    .pix_lastpix(plast), .smp, .smp_flags(sf), .pixelout, .pixelwr, .line_done);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (!rst) begin
    if (pixelwr) begin
      checks++;
      if (e_pix.size() == 0) begin failures++; $display("unexpected write"); end
      else begin
        automatic logic [17:0] e = e_pix.pop_front();
        automatic int t = e_t.pop_front();
        if (pixelout !== e || cycle - t != (scope ? 1 : PAD + 1)) begin
          failures++; $display("out %h exp %h after %0d", pixelout, e, cycle - t);
        end
      end
    end
    if (line_done) ndone++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      pv = ($urandom_range(0, 3) == 0);
      plast = (i == 199);
      pixel = 18'($urandom);
      if (i == 199) pv = 1;
      if (pv) begin e_pix.push_back(pixel); e_t.push_back(cycle); end
    end
    @(negedge clk) pv = 0; plast = 0;
    repeat (PAD + 4) @(negedge clk);
    checks++;
    if (ndone != 1 || e_pix.size() != 0) begin failures++; $display("normal line_done %0d", ndone); end
    scope = 1;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      smp = 16'($urandom);
      sf = '0;
      sf.line = (i < 299);
      sf.ref_s = ($urandom_range(0, 2) == 0);
      sf.sig_s = !sf.ref_s && ($urandom_range(0, 2) == 0);
      sf.eol = (i == 298);
      if (sf.line) begin
        e_pix.push_back({smp[15:1], sf.ref_s | sf.sig_s, 2'b00});
        e_t.push_back(cycle);
      end
    end
    @(negedge clk) sf = '0;
    repeat (3) @(negedge clk);
    checks++;
    if (ndone != 2 || e_pix.size() != 0) begin failures++; $display("scope line_done %0d", ndone); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
