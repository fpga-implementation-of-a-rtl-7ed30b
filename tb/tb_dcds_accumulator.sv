// tb_dcds_accumulator -- runs random pixels (reset, reference products
// added, signal products subtracted, idle samples in between) and checks
// the running sum every cycle and the final sum when done pulses.
module tb_dcds_accumulator;
  logic clk = 0, rst = 1, first = 0, up = 0, down = 0, last = 0, done;
  logic [31:0] reset_val = 0, acc, model = 0;
  logic [23:0] prod = 0;
  int checks = 0, failures = 0, ndone = 0;

  dcds_accumulator dut (.clk, .rst, .reset_val, .first, .up, .down, .last, .prod, .acc, .done);

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input logic f, u, d, l, input logic [23:0] p);
    @(negedge clk);
    first = f; up = u; down = d; last = l; prod = p;
    if (f) model = reset_val;
    if (u) model = model + 32'(p);
    else if (d) model = model - 32'(p);
    @(negedge clk);
    first = 0; up = 0; down = 0; last = 0;
    checks += 2;
    if (acc !== model) begin failures++; $display("acc %h exp %h", acc, model); end
    if (done !== l) failures++;
    if (done) ndone++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int px = 0; px < 60; px++) begin
      automatic int n = $urandom_range(1, 40);
      reset_val = 32'($urandom_range(1, 65280)) << 10;
      step(1, 0, 0, 0, 24'($urandom));                       // count 0, idle
      for (int i = 0; i < n; i++) step(0, 1, 0, 0, 24'($urandom));
      step(0, 0, 0, 0, 24'($urandom));                       // gap: no change
      for (int i = 0; i < n; i++) step(0, 0, 1, i == n-1, 24'($urandom));
    end
    checks++;
    if (ndone != 60) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
