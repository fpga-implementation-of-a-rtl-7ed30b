// tb_dcds_config_regs -- loads the register bank twice through the
// auto-incrementing write port and checks every word, the pointer wrap and
// the pointer reset on dataloaded.
module tb_dcds_config_regs;
  import dcds_pkg::*;
  logic clk = 0, rst = 1, wen = 0, dl = 0;
  logic [15:0] wdata = 0;
  logic [NREGS*REG_W-1:0] regs;
  logic [15:0] exp_r [NREGS];
  int checks = 0, failures = 0;

  dcds_config_regs dut (.clk, .rst, .wen, .wdata, .dataloaded(dl), .regs);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(input int n);
    for (int i = 0; i < n; i++) begin
      wdata <= 16'($urandom);
      wen   <= 1'b1;
      @(posedge clk);
      exp_r[i % NREGS] = wdata;
    end
    wen <= 1'b0;
    @(posedge clk);
  endtask

  task automatic check_all();
    for (int i = 0; i < NREGS; i++) begin
      checks++;
      if (regs[i*REG_W +: REG_W] !== exp_r[i]) begin
        failures++;
        $display("reg %0d = %h, expected %h", i, regs[i*REG_W +: REG_W], exp_r[i]);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int i = 0; i < NREGS; i++) exp_r[i] = 0;
    check_all();
    load(NREGS);
    check_all();
    // three more writes wrap to words 0..2
    load(3);
    check_all();
    // dataloaded returns the pointer to word 0
    dl <= 1; @(posedge clk); dl <= 0; @(posedge clk);
    load(NREGS);
    check_all();
    checks++;
    if (dut.unpack_cfg(regs).end_sig !== exp_r[R_END_SIG]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
