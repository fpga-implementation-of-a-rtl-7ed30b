// tb_dcds_coeff_ram -- fills the 512-word weight memory through the
// auto-incrementing port and reads every word back with one cycle latency.
module tb_dcds_coeff_ram;
  import dcds_pkg::*;
  logic wclk = 0, rclk = 0, rst = 1, wen = 0, dl = 0;
  logic [15:0] wdata = 0;
  logic [8:0] raddr = 0;
  logic [7:0] rdata;
  logic [7:0] ref_m [512];
  int checks = 0, failures = 0;

  dcds_coeff_ram dut (.wclk, .rst, .wen, .wdata, .dataloaded(dl), .rclk, .raddr, .rdata);

  always #5 wclk = ~wclk;
  always #7 rclk = ~rclk;
  initial begin
    repeat (20000) @(posedge wclk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge wclk);
    rst <= 0;
    // a partial load, then dataloaded, then a full load from word 0
    for (int i = 0; i < 37; i++) begin
      wdata <= 16'($urandom); wen <= 1; @(posedge wclk);
    end
    wen <= 0; dl <= 1; @(posedge wclk); dl <= 0; @(posedge wclk);
    for (int i = 0; i < 512; i++) begin
      wdata <= 16'($urandom);
      wen <= 1;
      @(posedge wclk);
      ref_m[i] = wdata[7:0];
    end
    wen <= 0;
    repeat (2) @(posedge wclk);
    for (int i = 0; i < 512; i++) begin
      raddr <= 9'(i);
      @(posedge rclk);
      @(negedge rclk);
      checks++;
      if (rdata !== ref_m[i]) begin
        failures++;
        $display("word %0d = %h, expected %h", i, rdata, ref_m[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
