// tb_dcds_align -- feeds a counting pattern through the delay line at
// several programmed delays and checks the output lags the input by exactly
// that many cycles.
module tb_dcds_align;
  logic clk = 0, rst = 1;
  logic [15:0] delay = 0;
  logic [11:0] din = 0, dout;
  logic [11:0] hist [$];
  int checks = 0, failures = 0;

  dcds_align #(.W(12), .MAX_DELAY(64)) dut (.clk, .rst, .delay, .din, .dout);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int ds [7] = '{0, 1, 2, 16, 33, 63, 64};
    repeat (3) @(posedge clk);
    rst <= 0;
    foreach (ds[j]) begin
      delay = 16'(ds[j]);
      hist.delete();
      for (int i = 0; i < 200; i++) begin
        @(negedge clk);
        din = 12'($urandom);
        hist.push_front(din);
        #1;
        if (i > 70) begin
          checks++;
          if (dout !== hist[ds[j]]) begin
            failures++;
            $display("delay %0d: got %h exp %h", ds[j], dout, hist[ds[j]]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
