// tb_fail_bit_classifier: checks the pass verdict and the fail-bit range
// against a reference written with plain integer division: for F above gamma
// the range is ceil(F / delta), capped at 8 (above 7*delta). Boundary values
// (each k*delta and k*delta+1, gamma, F_PASS) are tested for two threshold
// settings, then random counts.
module tb_fail_bit_classifier;
  import aero_pkg::*;

  logic [FBC_W-1:0]   f, gamma, delta, f_pass;
  logic               pass;
  logic [RANGE_W-1:0] range;

  fail_bit_classifier dut (.f, .gamma, .delta, .f_pass, .pass, .range);

  int checks = 0, failures = 0;

  function automatic int ref_range(int fv, int g, int d);
    int r;
    if (fv <= g) return 0;
    r = (fv + d - 1) / d;
    if (r < 1) r = 1;
    return (r > 8) ? 8 : r;
  endfunction

  task automatic try(int fv);
    f = FBC_W'(fv);
    #1;
    checks++;
    if (pass !== (fv <= int'(f_pass)) || int'(range) != ref_range(fv, int'(gamma), int'(delta))) begin
      failures++;
      $display("FAIL: F=%0d gamma=%0d delta=%0d -> pass=%0d range=%0d, expected %0d/%0d",
               fv, gamma, delta, pass, range, fv <= int'(f_pass),
               ref_range(fv, int'(gamma), int'(delta)));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int cfg = 0; cfg < 2; cfg++) begin
      gamma  = cfg == 0 ? GAMMA_DEFAULT  : FBC_W'(300);
      delta  = cfg == 0 ? DELTA_DEFAULT  : FBC_W'(40000);
      f_pass = cfg == 0 ? F_PASS_DEFAULT : FBC_W'(20);
      try(0); try(int'(f_pass)); try(int'(f_pass) + 1);
      try(int'(gamma)); try(int'(gamma) + 1);
      for (int k = 1; k <= 8; k++) begin
        try(k * int'(delta) - 1); try(k * int'(delta)); try(k * int'(delta) + 1);
      end
      try((1 << FBC_W) - 1);
      for (int i = 0; i < 2000; i++) try(int'($urandom_range(9 * int'(delta), 0)));
    end
    // spot values worked out by hand (gamma 1000, delta 5000)
    gamma = GAMMA_DEFAULT; delta = DELTA_DEFAULT; f_pass = F_PASS_DEFAULT;
    f = 20'd999;   #1; checks++; if (range != 4'd0 || pass) failures++;
    f = 20'd1001;  #1; checks++; if (range != 4'd1) failures++;
    f = 20'd10001; #1; checks++; if (range != 4'd3) failures++;
    f = 20'd35000; #1; checks++; if (range != 4'd7) failures++;
    f = 20'd35001; #1; checks++; if (range != 4'd8) failures++;
    f = 20'd100;   #1; checks++; if (!pass) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
