// tb_dcds_recip_div -- streams divisors into the pipelined divider, one per
// cycle, and checks each quotient against (2^32-1)/d and its 66-cycle latency.
module tb_dcds_recip_div;
  import dcds_pkg::*;
  logic clk = 0, rst = 1, in_valid = 0, out_valid;
  logic [15:0] divisor = 0;
  logic [31:0] quotient;
  logic [15:0] sent [$];
  int          sent_t [$];
  int checks = 0, failures = 0, cycle = 0, nout = 0;

  dcds_recip_div dut (.clk, .rst, .in_valid, .divisor, .out_valid, .quotient);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (!rst && out_valid) begin
    logic [15:0] d;
    int t;
    d = sent.pop_front();
    t = sent_t.pop_front();
    checks += 2;
    nout++;
    if (quotient !== 32'(64'hFFFF_FFFF / 64'(d == 0 ? 16'hFFFF : d)) && d != 0) begin
      failures++; $display("d=%0d q=%0d", d, quotient);
    end
    if (d == 0 && quotient !== 32'hFFFF_FFFF) failures++;
    if (cycle - t != 66) begin
      failures++; $display("latency %0d", cycle - t);
    end
  end

  initial begin
    automatic logic [15:0] ds [8] = '{16'd1, 16'd2, 16'd3, 16'd255, 16'd65280, 16'd65535, 16'd1000, 16'd0};
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      divisor  = (i < 8) ? ds[i] : 16'($urandom);
      if (in_valid) begin
        sent.push_back(divisor);
        sent_t.push_back(cycle);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (80) @(posedge clk);
    checks++;
    if (sent.size() != 0 || nout == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
