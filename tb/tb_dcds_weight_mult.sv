// tb_dcds_weight_mult -- random samples and weights, one per cycle; checks
// each product and its tag three cycles later.
module tb_dcds_weight_mult;
  logic clk = 0;
  logic [15:0] a = 0;
  logic [7:0]  b = 0;
  logic [3:0]  tin = 0, tout;
  logic [23:0] prod;
  logic [23:0] ep [$];
  logic [3:0]  et [$];
  int checks = 0, failures = 0;

  dcds_weight_mult #(.TAG_W(4)) dut (.clk, .a, .b, .tag_in(tin), .prod, .tag_out(tout));

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      if (i >= 3) begin
        checks++;
        if (prod !== ep[i-3] || tout !== et[i-3]) begin
          failures++;
          $display("i=%0d prod %0d exp %0d", i, prod, ep[i-3]);
        end
      end
      a   = (i < 4) ? 16'hFFFF : 16'($urandom);
      b   = (i < 4) ? 8'hFF : 8'($urandom);
      tin = 4'($urandom);
      ep.push_back(24'(a) * 24'(b));
      et.push_back(tin);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
