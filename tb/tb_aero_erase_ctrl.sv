// tb_aero_erase_ctrl: checks the erase sequencer on its own. The testbench
// plays the classifier, the latency table (the conservative model, written
// here in ms), the flag bitmap (a bit array with a one-cycle read) and the
// chip (nand_erase_model). For each worked case it checks the exact sequence
// of erase pulses (voltage step, pulse length) the sequencer sends, the
// SET_TEP / ERASE_LOOP / GET_FBC order around every pulse, the flag update and
// the result record, then runs random cases against the chip model.
module tb_aero_erase_ctrl;
  import aero_pkg::*;

  localparam int unsigned NB = 256;
  localparam int unsigned BW = $clog2(NB);

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  logic               req_valid, req_ready, done_valid;
  logic [BW-1:0]      req_blk, done_blk;
  ers_result_t        done_result;
  logic               cmd_valid, cmd_ready, rsp_valid;
  nand_op_e           cmd_op;
  logic [BW-1:0]      cmd_blk;
  logic [LOOP_W-1:0]  cmd_vlevel;
  logic [TEP_W-1:0]   cmd_tep;
  logic [FBC_W-1:0]   rsp_fbc;
  logic [FBC_W-1:0]   cls_f;
  logic               cls_pass;
  logic [RANGE_W-1:0] cls_range;
  logic [LOOP_W-1:0]  ept_loop;
  logic [RANGE_W-1:0] ept_range;
  logic [TEP_W-1:0]   ept_tep;
  logic               sef_busy, sef_rd_en, sef_rd_flag, sef_set_en;
  logic [BW-1:0]      sef_rd_blk, sef_set_blk;

  aero_erase_ctrl #(.NUM_BLOCKS(NB)) dut (
    .clk, .rst_n, .cfg_tse(TSE_DEFAULT),
    .req_valid, .req_ready, .req_blk, .done_valid, .done_blk, .done_result,
    .cmd_valid, .cmd_ready, .cmd_op, .cmd_blk, .cmd_vlevel, .cmd_tep,
    .rsp_valid, .rsp_fbc,
    .cls_f, .cls_pass, .cls_range,
    .ept_loop, .ept_range, .ept_tep,
    .sef_busy, .sef_rd_en, .sef_rd_blk, .sef_rd_flag, .sef_set_en, .sef_set_blk
  );

  nand_erase_model #(.NUM_BLOCKS(NB), .CYC_PER_UNIT(2), .T_VR(2), .T_CMD(1)) chip (
    .clk, .cmd_valid, .cmd_ready, .cmd_op, .cmd_blk, .cmd_vlevel, .cmd_tep,
    .rsp_valid, .rsp_fbc
  );

  // ---- classifier and table, written independently ---------------------------
  real ms_cons [5][9] = '{
    '{0.5, 1.0, 1.5, 2.0, 2.5, 2.5, 2.5, 2.5, 2.5},
    '{0.5, 1.0, 1.5, 2.0, 2.5, 3.0, 3.5, 3.5, 3.5},
    '{0.5, 1.0, 1.5, 2.0, 2.5, 3.0, 3.5, 3.5, 3.5},
    '{0.5, 1.0, 1.5, 2.0, 2.5, 3.0, 3.5, 3.5, 3.5},
    '{0.5, 1.0, 1.5, 2.0, 2.5, 3.0, 3.5, 3.5, 3.5}};

  always_comb begin
    int fv, r;
    fv = int'(cls_f);
    cls_pass = fv <= 100;
    if (fv <= 1000) r = 0;
    else begin
      r = (fv + 4999) / 5000;
      if (r > 8) r = 8;
    end
    cls_range = RANGE_W'(r);
  end

  always_comb begin
    if (ept_loop >= 1 && ept_loop <= 5 && ept_range <= 8)
      ept_tep = TEP_W'(int'(ms_cons[ept_loop - 1][ept_range] * 2.0));
    else
      ept_tep = 3'd7;
  end

  // ---- flag bitmap --------------------------------------------------------------
  bit flags [NB];
  assign sef_busy = 1'b0;
  always @(posedge clk) begin
    if (sef_rd_en) sef_rd_flag <= flags[sef_rd_blk];
    if (sef_set_en) flags[sef_set_blk] = 1'b1;
  end

  // ---- pulse log and command order --------------------------------------------
  int pl_v [$];
  int pl_t [$];
  nand_op_e last_op;
  int order_err;

  always @(posedge clk) begin
    if (cmd_valid && cmd_ready) begin
      if (cmd_op == NAND_ERASE_LOOP) begin
        pl_v.push_back(int'(cmd_vlevel));
        pl_t.push_back(int'(cmd_tep));
        if (last_op != NAND_SET_TEP) order_err++;
      end else if (cmd_op == NAND_GET_FBC) begin
        if (last_op != NAND_ERASE_LOOP) order_err++;
      end else if (last_op == NAND_ERASE_LOOP) order_err++;
      last_op <= cmd_op;
    end
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  ers_result_t res;
  task automatic erase(int b);
    pl_v.delete(); pl_t.delete();
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1'b1; req_blk = BW'(b);
    @(negedge clk);
    req_valid = 1'b0;
    while (!done_valid) @(negedge clk);
    res = done_result;
    check(done_blk == BW'(b), "done_blk");
  endtask

  // expected pulses as "v:t" pairs
  task automatic expect_pulses(string name, int v [], int t []);
    bit ok;
    ok = (pl_v.size() == v.size());
    for (int i = 0; ok && i < v.size(); i++)
      if (pl_v[i] != v[i] || pl_t[i] != t[i]) ok = 0;
    check(ok, $sformatf("%s: pulse sequence", name));
    if (!ok) for (int i = 0; i < pl_v.size(); i++)
      $display("   got pulse %0d: step %0d, %0d units", i, pl_v[i], pl_t[i]);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int b, n, m, ex;
    order_err = 0; last_op = NAND_GET_FBC;
    req_valid = 1'b0; req_blk = '0; rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // shallow 1 ms, F(0) <= gamma -> 0.5 ms remainder (conservative model)
    chip.set_profile(1, 1, 3, 0); erase(1);
    expect_pulses("A", '{1, 1}, '{2, 1});
    check(res.status == ERS_PASS && res.shallow && !res.sef_cleared, "A result");
    // F(0) in (3d,4d] -> 2.5 ms remainder = full loop -> flag set FALSE
    chip.set_profile(2, 1, 7, 0); erase(2);
    expect_pulses("B", '{1, 1}, '{2, 5});
    check(res.status == ERS_PASS && res.sef_cleared && flags[2], "B result and flag");
    // block 2 again: no shallow erasure, a 2-step block: 3.5 ms then F(1)
    // in (d,2d] -> 1.5 ms at step 2
    chip.set_profile(2, 2, 3, 0); erase(2);
    expect_pulses("C", '{1, 2}, '{7, 3});
    check(res.status == ERS_PASS && !res.shallow && res.n_ispe == 2 && res.tep_total == 10, "C result");
    // 4-step block, 1 ms at step 4
    chip.set_profile(3, 4, 2, 0); erase(3);
    expect_pulses("D", '{1, 1, 2, 3, 4}, '{2, 5, 7, 7, 2});
    check(res.status == ERS_PASS && res.n_ispe == 4 && res.n_pulses == 5, "D result");
    // outlier: 1 ms predicted at step 2, 0.5 ms more needed at the same step
    chip.set_profile(2, 2, 2, 1); erase(2);
    expect_pulses("E", '{1, 2, 2}, '{7, 2, 1});
    check(res.status == ERS_PASS && res.mispredicts == 1, "E misprediction");
    // outlier: F(1) looks like 3.5 ms at step 2 (full pulse), still failing
    // -> step 3 with 0.5 ms, which falls short once more (misprediction)
    chip.set_profile(2, 2, 7, 2); erase(2);
    expect_pulses("F", '{1, 2, 3, 3}, '{7, 7, 1, 1});
    check(res.status == ERS_PASS && res.mispredicts == 1 && res.n_ispe == 3, "F step after misprediction");
    // unerasable: FAIL after the fifth full step
    chip.set_profile(2, 6, 7, 0); erase(2);
    expect_pulses("G", '{1, 2, 3, 4, 5}, '{7, 7, 7, 7, 7});
    check(res.status == ERS_FAIL && res.n_ispe == 5, "G fail");

    // persistent misprediction: F keeps looking like "0.5 ms left" while the
    // block needs 31 units. Step 1: shallow + remainder + 4 retries (7 units);
    // steps 2-4: one predicted pulse + 6 retries each; step 5: 3 pulses.
    // 30 pulses, 24 of them retries: the counters must not wrap at 16.
    chip.set_profile(4, 1, 1, 30); erase(4);
    check(res.status == ERS_PASS && res.n_ispe == 5, "H result");
    check(res.n_pulses == 30 && res.tep_total == 31 && res.mispredicts == 24,
          $sformatf("H counters: pulses %0d total %0d mispredicts %0d",
                    res.n_pulses, res.tep_total, res.mispredicts));

    for (int i = 0; i < 200; i++) begin
      b  = int'($urandom_range(NB - 1, 0));
      n  = int'($urandom_range(5, 1));
      m  = int'($urandom_range(7, 1));
      ex = int'($urandom_range(3, 0) == 0);
      chip.set_profile(b, n, m, ex);
      erase(b);
      check(int'(res.tep_total) == chip.total[b], "total vs chip");
      if ((n - 1) * 7 + m + ex <= 35) begin
        // conservative model: always completely erased, never an ECC pass
        check(res.status == ERS_PASS && chip.left_k[b] <= 0, $sformatf("random %0d erased", i));
        if (ex == 0) begin
          check(res.mispredicts == 0, "no misprediction without outliers");
          // exactly the needed time, plus the shallow step overshoot only
          // when the first step was not the last
          check(int'(res.tep_total) == (n - 1) * 7 + m ||
                (n == 1 && !res.shallow && int'(res.tep_total) == 7) ||
                (n == 1 && res.shallow && m < 2 && int'(res.tep_total) == 2),
                $sformatf("random %0d minimal time: n=%0d m=%0d got %0d", i, n, m, res.tep_total));
        end
      end
    end
    check(order_err == 0, "command order SET_TEP -> ERASE_LOOP -> GET_FBC");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
