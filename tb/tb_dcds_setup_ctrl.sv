// tb_dcds_setup_ctrl -- plays the weight summer and divider with
// behavioural responders and checks that a dataloaded edge snapshots the
// register bank, starts the summer with the reference pedestal length,
// passes the sum to the divider, and stores scaler and digital bias before
// raising configured; a zero sum must be flagged.
module tb_dcds_setup_ctrl;
  import dcds_pkg::*;
  logic clk = 0, rst = 1, dl = 0;
  logic [NREGS*REG_W-1:0] regs = '0;
  logic sum_start, sum_done = 0, div_start, div_valid = 0, sum_zero, configured;
  logic [8:0] sum_len;
  logic [15:0] sum = 0, div_divisor;
  logic [31:0] div_q = 0, scale, reset_val;
  dcds_cfg_t cfg;
  int checks = 0, failures = 0;

  dcds_setup_ctrl dut (.clk, .rst, .dataloaded(dl), .regs, .sum_start, .sum_len, .sum_done, .sum,
    .div_start, .div_divisor, .div_valid, .div_quotient(div_q), .cfg, .scale, .reset_val,
    .sum_zero, .configured);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // responders
  logic [15:0] next_sum;
  initial forever begin
    @(posedge clk);
    if (sum_start && !rst) begin
      checks++;
      if (sum_len != 9'(32'(cfg.end_ref) - 32'(cfg.start_ref) + 1)) begin failures++; $display("len %0d sr %0d er %0d", sum_len, cfg.start_ref, cfg.end_ref); end
      repeat (10) @(posedge clk);
      sum <= next_sum; sum_done <= 1;
      @(posedge clk) sum_done <= 0;
    end
  end
  initial forever begin
    @(posedge clk);
    if (div_start && !rst) begin
      automatic logic [15:0] d = div_divisor;
      repeat (65) @(posedge clk);
      div_q <= (d == 0) ? '1 : 32'(32'hFFFF_FFFF / d); div_valid <= 1;
      @(posedge clk) div_valid <= 0;
    end
  end

  task automatic load(input logic [15:0] s, input logic [15:0] sr, er);
    int w;
    for (int i = 0; i < NREGS; i++) regs[i*REG_W +: REG_W] = 16'($urandom);
    regs[R_START_REF*REG_W +: REG_W] = sr;
    regs[R_END_REF*REG_W +: REG_W]   = er;
    next_sum = s;
    @(negedge clk) dl = 1;
    repeat (3) @(negedge clk);
    dl = 0;
    @(negedge clk);
    checks++;
    if (configured) begin failures++; $display("still configured"); end
    w = 0;
    while (!configured && w < 500) begin @(negedge clk); w++; end
    checks += 5;
    if (cfg !== unpack_cfg(regs)) begin failures++; $display("cfg"); end
    if (scale !== ((s == 0) ? 32'hFFFF_FFFF : 32'hFFFF_FFFF / 32'(s))) begin failures++; $display("scale %h", scale); end
    if (reset_val !== 32'(s) << 10) begin failures++; $display("bias %h", reset_val); end
    if (sum_zero !== (s == 0)) begin failures++; $display("zero"); end
    if (w >= 500) begin failures++; $display("timeout"); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    checks++;
    if (configured) failures++;
    load(16'd15300, 10, 69);
    load(16'd1, 0, 0);
    load(16'd65280, 0, 255);
    load(16'd0, 3, 9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
