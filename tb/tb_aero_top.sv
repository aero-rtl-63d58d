// tb_aero_top: end-to-end test of the adaptive erase engine at its default
// size (31,808 blocks, aggressive latency model) against the behavioural chip
// model.
//
// Phase 1 erases hand-picked blocks whose outcome was worked out by hand from
// the latency model (pulse count, total pulse time, highest voltage step,
// status, shallow erasure, flag update, mispredictions). Phase 2 erases random
// blocks with random erase profiles and checks the engine's report against
// what the chip model saw, the rules of the scheme and the cycle count of
// every erase (fixed controller/command overhead per pulse plus the pulse time).
// Every mechanism (shallow erasure, remainder erasure, flag update, shortened
// pulse, full pulse, skipped final loop, ECC acceptance, misprediction retry,
// erase failure, plain pass) must occur at least once.
module tb_aero_top;
  import aero_pkg::*;

  localparam int unsigned NB    = 31808;
  localparam int unsigned BW    = $clog2(NB);
  localparam int unsigned CPU   = 4;   // cycles per 0.5 ms pulse unit
  localparam int unsigned TVR   = 3;
  localparam int unsigned TCMD  = 2;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic               req_valid, req_ready, done_valid;
  logic [BW-1:0]      req_blk, done_blk;
  ers_result_t        done_result;
  logic               cmd_valid, cmd_ready, rsp_valid;
  nand_op_e           cmd_op;
  logic [BW-1:0]      cmd_blk;
  logic [LOOP_W-1:0]  cmd_vlevel;
  logic [TEP_W-1:0]   cmd_tep;
  logic [FBC_W-1:0]   rsp_fbc;

  aero_top dut (
    .clk, .rst_n,
    .cfg_gamma(GAMMA_DEFAULT), .cfg_delta(DELTA_DEFAULT), .cfg_f_pass(F_PASS_DEFAULT),
    .cfg_tse(TSE_DEFAULT),
    .cfg_ept_we(1'b0), .cfg_ept_loop('0), .cfg_ept_range('0), .cfg_ept_tep('0),
    .req_valid, .req_ready, .req_blk, .done_valid, .done_blk, .done_result,
    .cmd_valid, .cmd_ready, .cmd_op, .cmd_blk, .cmd_vlevel, .cmd_tep,
    .rsp_valid, .rsp_fbc
  );

  nand_erase_model #(
    .NUM_BLOCKS(NB), .CYC_PER_UNIT(CPU), .T_VR(TVR), .T_CMD(TCMD),
    .GAMMA(int'(GAMMA_DEFAULT)), .DELTA(int'(DELTA_DEFAULT)), .F_PASS(int'(F_PASS_DEFAULT))
  ) chip (
    .clk, .cmd_valid, .cmd_ready, .cmd_op, .cmd_blk, .cmd_vlevel, .cmd_tep,
    .rsp_valid, .rsp_fbc
  );

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---- mechanism counters -----------------------------------------------------
  int c_shallow, c_remainder, c_sef_clear, c_short, c_full, c_skip_final;
  int c_ecc_accept, c_mispredict, c_fail, c_pass, c_sef_skip;
  int pulse_idx;

  always @(posedge clk) begin
    if (cmd_valid && cmd_ready && cmd_op == NAND_ERASE_LOOP) begin
      if (cmd_tep == TEP_DEFAULT) c_full++;
      else if (pulse_idx > 0 || !dut.u_ctrl.res_q.shallow) c_short++;
      if (dut.u_ctrl.res_q.shallow && pulse_idx == 1) c_remainder++;
      pulse_idx++;
    end
  end

  // ---- one erase --------------------------------------------------------------
  ers_result_t res;
  int          lat;

  task automatic erase(int b);
    int t0;
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1'b1;
    req_blk   = BW'(b);
    pulse_idx = 0;
    t0 = 0;
    @(negedge clk);
    req_valid = 1'b0;
    while (!done_valid) begin
      @(negedge clk);
      t0++;
    end
    res = done_result;
    lat = t0 + 1;
    check(done_blk == BW'(b), "done_blk");
    if (res.shallow) c_shallow++; else c_sef_skip++;
    if (res.sef_cleared) c_sef_clear++;
    if (res.mispredicts != 0) c_mispredict++;
    case (res.status)
      ERS_PASS:     c_pass++;
      ERS_PASS_ECC: begin
        c_ecc_accept++;
        if (chip.acc[b] == 7) c_skip_final++;
      end
      default:      c_fail++;
    endcase
    // model agreement and cycle count: per pulse three commands, each costing
    // its latency plus 2 cycles (accept, answer), and 1 decision cycle; the
    // erase pulse itself adds CPU cycles per 0.5 ms; 2 cycles per erase for
    // the flag read and the completion.
    check(int'(res.tep_total) == chip.total[b], $sformatf("blk %0d total %0d vs chip %0d", b, res.tep_total, chip.total[b]));
    check(int'(res.n_pulses) == chip.pulses[b], "pulse count vs chip");
    check(int'(res.n_ispe) == chip.level[b], "highest voltage step vs chip");
    check(lat == 2 + int'(res.n_pulses) * (2 * (TCMD + 2) + (TVR + 2) + 1) + int'(res.tep_total) * CPU,
          $sformatf("blk %0d latency %0d cycles", b, lat));
  endtask

  task automatic expect_res(int b, ers_status_e st, int np, int tot, int nis,
                            bit sh, bit clr, int mis);
    check(res.status == st,                $sformatf("blk %0d status %0d exp %0d", b, res.status, st));
    check(int'(res.n_pulses) == np,        $sformatf("blk %0d pulses %0d exp %0d", b, res.n_pulses, np));
    check(int'(res.tep_total) == tot,      $sformatf("blk %0d total %0d exp %0d", b, res.tep_total, tot));
    check(int'(res.n_ispe) == nis,         $sformatf("blk %0d n_ispe %0d exp %0d", b, res.n_ispe, nis));
    check(res.shallow == sh,               $sformatf("blk %0d shallow", b));
    check(res.sef_cleared == clr,          $sformatf("blk %0d sef_cleared", b));
    check(int'(res.mispredicts) == mis,    $sformatf("blk %0d mispredicts", b));
  endtask

  // ---- watchdog ---------------------------------------------------------------
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int b, n, m, ex;
    req_valid = 1'b0;
    req_blk   = '0;
    rst_n     = 1'b0;
    c_shallow = 0; c_remainder = 0; c_sef_clear = 0; c_short = 0; c_full = 0;
    c_skip_final = 0; c_ecc_accept = 0; c_mispredict = 0; c_fail = 0; c_pass = 0;
    c_sef_skip = 0; pulse_idx = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // the flag bitmap is cleared one 32-bit word per cycle
    @(negedge clk);
    check(!req_ready, "busy while clearing flags");
    repeat ((NB + 31) / 32 + 2) @(negedge clk);
    check(req_ready, "ready after flag clearing");

    // ---- phase 1: worked examples (0.5 ms units) -----------------------------
    // 1 step, 1.5 ms needed: 1 ms shallow leaves F <= gamma -> accepted by ECC
    chip.set_profile(10, 1, 3, 0); erase(10);
    expect_res(10, ERS_PASS_ECC, 1, 2, 1, 1, 0, 0);
    // 1 step, 3.5 ms: F(0) in (3d,4d] -> remainder 1.5 ms -> F <= d -> ECC
    chip.set_profile(11, 1, 7, 0); erase(11);
    expect_res(11, ERS_PASS_ECC, 2, 5, 1, 1, 0, 0);
    // 1 step, 1 ms: shallow erasure alone passes
    chip.set_profile(12, 1, 2, 0); erase(12);
    expect_res(12, ERS_PASS, 1, 2, 1, 1, 0, 0);
    // 2 steps: F(0) > 7d -> 2.5 ms remainder (flag set FALSE), then 1 ms at
    // step 2 leaves F <= d -> ECC
    chip.set_profile(13, 2, 4, 0); erase(13);
    expect_res(13, ERS_PASS_ECC, 3, 9, 2, 1, 1, 0);
    // same block again: no shallow erasure any more
    chip.set_profile(13, 2, 4, 0); erase(13);
    expect_res(13, ERS_PASS_ECC, 2, 9, 2, 0, 0, 0);
    // 2 steps, 1 ms at step 2: F(1) <= d -> the final loop is skipped
    chip.set_profile(13, 2, 2, 0); erase(13);
    expect_res(13, ERS_PASS_ECC, 1, 7, 1, 0, 0, 0);
    // 5 steps, outlier: 1.5 ms predicted at step 5 is short by 0.5 ms
    chip.set_profile(14, 5, 3, 1); erase(14);
    expect_res(14, ERS_PASS, 7, 32, 5, 1, 1, 1);
    // block that cannot be erased: 5 full steps then FAIL
    chip.set_profile(15, 6, 7, 0); erase(15);
    expect_res(15, ERS_FAIL, 6, 35, 5, 1, 1, 0);
    // 3 steps: 3 ms predicted at step 2 leaves F <= d -> ECC
    chip.set_profile(16, 3, 1, 0); erase(16);
    expect_res(16, ERS_PASS_ECC, 3, 13, 2, 1, 1, 0);

    // ---- phase 2: random blocks and profiles ----------------------------------
    for (int i = 0; i < 300; i++) begin
      b  = int'($urandom_range(NB - 1, 0));
      n  = int'($urandom_range(5, 1));
      m  = int'($urandom_range(7, 1));
      ex = ($urandom_range(9, 0) == 0) ? 1 : 0;
      chip.set_profile(b, n, m, ex);
      erase(b);
      if (res.status == ERS_PASS)
        check(chip.left_k[b] <= 0, "PASS but block not erased");
      if (res.status == ERS_PASS_ECC && ex == 0)
        check(chip.left_k[b] <= 2, "ECC acceptance beyond one delta of fail bits");
      if ((n - 1) * 7 + m + ex <= 35)
        check(res.status != ERS_FAIL, "erasable block reported FAIL");
      // never more pulse time than plain ISPE would use
      check(int'(res.tep_total) <= 7 * n + 7 * ex, "longer than ISPE");
    end

    $display("mechanisms: shallow=%0d remainder=%0d sef_clear=%0d sef_skip=%0d short_pulse=%0d full_pulse=%0d",
             c_shallow, c_remainder, c_sef_clear, c_sef_skip, c_short, c_full);
    $display("            skip_final=%0d ecc_accept=%0d mispredict=%0d fail=%0d pass=%0d",
             c_skip_final, c_ecc_accept, c_mispredict, c_fail, c_pass);
    check(c_shallow > 0,    "shallow erasure never happened");
    check(c_remainder > 0,  "remainder erasure never happened");
    check(c_sef_clear > 0,  "SEF update never happened");
    check(c_sef_skip > 0,   "erase without shallow step never happened");
    check(c_short > 0,      "shortened pulse never happened");
    check(c_full > 0,       "full pulse never happened");
    check(c_skip_final > 0, "final-loop skip never happened");
    check(c_ecc_accept > 0, "ECC acceptance never happened");
    check(c_mispredict > 0, "misprediction never happened");
    check(c_fail > 0,       "erase failure never happened");
    check(c_pass > 0,       "plain pass never happened");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
