// tb_dcds_normaliser -- random accumulator values and scalers; checks the
// 18-bit result (product bits 47..30) and the 6-cycle latency, including a
// worked case: 1024*S + 5000*S scaled by (2^32-1)/S gives about 6024 ADU.
module tb_dcds_normaliser;
  logic clk = 0, rst = 1, in_valid = 0, out_valid;
  logic [31:0] acc = 0, scale = 0;
  logic [17:0] pixel;
  logic tin = 0, tout;
  logic [17:0] ep [$];
  int          et [$];
  int checks = 0, failures = 0, cycle = 0;

  dcds_normaliser #(.TAG_W(1)) dut (.clk, .rst, .in_valid, .acc, .scale, .tag_in(tin),
                                    .out_valid, .pixel, .tag_out(tout));

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (!rst && out_valid) begin
    logic [17:0] e;
    int t;
    e = ep.pop_front();
    t = et.pop_front();
    checks += 2;
    if (pixel !== e) begin failures++; $display("pixel %h exp %h", pixel, e); end
    if (cycle - t != 6) begin failures++; $display("latency %0d", cycle - t); end
  end

  initial begin
    logic [63:0] p;
    repeat (3) @(posedge clk);
    rst <= 0;
    // worked case: S = 255*60 weights, pixel of 5000 ADU above the bias
    @(negedge clk);
    in_valid = 1;
    scale = 32'(64'hFFFF_FFFF / 64'(255*60));
    acc   = 32'((1024 + 5000) * 255 * 60);
    p = 64'(acc) * 64'(scale);
    ep.push_back(p[47:30]); et.push_back(cycle);
    checks++;
    if (p[47:32] != 16'd6023 && p[47:32] != 16'd6024) failures++;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 2) == 0);
      acc   = $urandom;
      scale = $urandom;
      if (in_valid) begin
        p = 64'(acc) * 64'(scale);
        ep.push_back(p[47:30]); et.push_back(cycle);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (ep.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
