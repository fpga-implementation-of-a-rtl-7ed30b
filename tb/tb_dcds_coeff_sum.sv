// tb_dcds_coeff_sum -- sums random weights over several pedestal lengths
// from a one-cycle-latency memory model and checks the sum and that done
// comes len+2 cycles after start.
module tb_dcds_coeff_sum;
  import dcds_pkg::*;
  logic clk = 0, rst = 1, start = 0;
  logic [8:0] len = 0, raddr;
  logic [7:0] rdata, mem [512];
  logic busy, done;
  logic [15:0] sum;
  int checks = 0, failures = 0;

  dcds_coeff_sum dut (.clk, .rst, .start, .len, .raddr, .rdata, .busy, .done, .sum);

  always #5 clk = ~clk;
  always_ff @(posedge clk) rdata <= mem[raddr];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int lens [6] = '{1, 2, 17, 100, 255, 256};
    int exp_s, cyc;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int t = 0; t < 10; t++) begin
      for (int i = 0; i < 512; i++) mem[i] = (t == 0) ? 8'd255 : 8'($urandom);
      len   <= 9'(lens[t % 6]);
      start <= 1;
      @(posedge clk);
      start <= 0;
      exp_s = 0;
      for (int i = 0; i < lens[t % 6]; i++) exp_s += int'(mem[i]);
      cyc = 0;
      do begin @(posedge clk); cyc++; end while (!done && cyc < 1000);
      checks += 2;
      if (sum !== 16'(exp_s)) begin
        failures++; $display("len %0d: sum %0d exp %0d", lens[t%6], sum, exp_s);
      end
      if (cyc != lens[t % 6] + 2) begin
        failures++; $display("len %0d: done after %0d cycles", lens[t%6], cyc);
      end
      repeat (3) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
