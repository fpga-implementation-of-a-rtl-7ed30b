// tb_dcds_config_check -- applies directed and random pixel timings and
// compares each error output with a reference written from the rules.
module tb_dcds_config_check;
  import dcds_pkg::*;
  dcds_cfg_t cfg;
  logic err_len, err_overlap, err_end, err_other, error;
  int checks = 0, failures = 0;

  dcds_config_check #(.MAX_ADCPL(64)) dut (.cfg, .err_len, .err_overlap, .err_end, .err_other, .error);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    int lr, ls;
    logic e_len, e_ov, e_end, e_oth;
    #1;
    lr = int'(cfg.end_ref) - int'(cfg.start_ref) + 1;
    ls = int'(cfg.end_sig) - int'(cfg.start_sig) + 1;
    e_len = (lr < 1) || (ls < 1) || (lr != ls) || (lr > 256);
    e_ov  = int'(cfg.start_sig) <= int'(cfg.end_ref);
    e_end = int'(cfg.end_sig) + 5 >= int'(cfg.l_pixel);
    e_oth = (cfg.adcpl > 64) || (cfg.nserial == 0) || (cfg.dmp >= cfg.l_pixel);
    checks++;
    if ({err_len, err_overlap, err_end, err_other, error} !==
        {e_len, e_ov, e_end, e_oth, e_len|e_ov|e_end|e_oth}) begin
      failures++;
      $display("cfg sr=%0d er=%0d ss=%0d es=%0d lp=%0d: got %b%b%b%b exp %b%b%b%b",
        cfg.start_ref, cfg.end_ref, cfg.start_sig, cfg.end_sig, cfg.l_pixel,
        err_len, err_overlap, err_end, err_other, e_len, e_ov, e_end, e_oth);
    end
  endtask

  function automatic dcds_cfg_t good();
    dcds_cfg_t c = '0;
    c.adcpl = 16; c.nserial = 10; c.dmp = 90;
    c.start_ref = 20; c.end_ref = 79; c.start_sig = 110; c.end_sig = 169;
    c.l_pixel = 200;
    return c;
  endfunction

  int n_err = 0;
  initial begin
    cfg = good(); check(); if (error) failures++;          // legal
    cfg = good(); cfg.end_sig = 194; cfg.start_sig = 135; check(); if (error) failures++; // exactly 5 cycles spare
    cfg = good(); cfg.end_sig = 195; cfg.start_sig = 136; check(); if (!err_end) failures++; // 4 cycles spare
    cfg = good(); cfg.end_sig = 170; check(); if (!err_len) failures++;  // unequal lengths
    cfg = good(); cfg.start_sig = 70; cfg.end_sig = 129; check(); if (!err_overlap) failures++;
    cfg = good(); cfg.start_ref = 0; cfg.end_ref = 255; cfg.start_sig = 300; cfg.end_sig = 555;
      cfg.l_pixel = 600; check(); if (error) failures++;    // 256-sample pedestals
    cfg = good(); cfg.start_ref = 0; cfg.end_ref = 256; cfg.start_sig = 300; cfg.end_sig = 556;
      cfg.l_pixel = 600; check(); if (!err_len) failures++; // 257 samples
    checks += 7;
    for (int i = 0; i < 20000; i++) begin
      cfg = good();
      cfg.start_ref = 16'($urandom_range(0, 300));
      cfg.end_ref   = cfg.start_ref + 16'($urandom_range(0, 260)) - 16'($urandom_range(0, 2));
      cfg.start_sig = cfg.end_ref + 16'($urandom_range(0, 40)) - 16'($urandom_range(0, 3));
      cfg.end_sig   = cfg.start_sig + (cfg.end_ref - cfg.start_ref) + 16'($urandom_range(0, 1));
      cfg.l_pixel   = cfg.end_sig + 16'($urandom_range(0, 12));
      cfg.adcpl     = 16'($urandom_range(60, 66));
      cfg.nserial   = 16'($urandom_range(0, 3));
      cfg.dmp       = cfg.l_pixel - 16'($urandom_range(0, 2));
      check();
      if (error) n_err++;
    end
    checks++;
    if (n_err == 0 || n_err == 20000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
