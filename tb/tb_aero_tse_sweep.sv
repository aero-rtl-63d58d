// tb_aero_tse_sweep: shallow-erasure time sweep. Two engines at the default
// size run side by side on identical chip models: index 0 uses the aggressive
// latency model, index 1 the conservative one. Both are driven with the
// shallow-erasure time cfg_tse = 0.5, 1, 1.5 and 2 ms (codes 1..4). Each
// setting erases 150 fresh blocks, so every erase starts with a shallow
// erasure. Then it erases again each block whose flag was cleared.
//
// Block mix, a choice of this testbench:
//   - 60% of blocks need one voltage step, 30% two and 10% three;
//   - the pulse time needed at the last step is uniform over 0.5..3.5 ms.
//
// The first row of the latency table is the remainder erasure. Its values
// follow from the fail-bit count alone, so the same row serves every tSE. The
// remainder is cut so that the first loop never goes beyond 3.5 ms. With s the
// shallow time and m the time a one-step block needs (0.5 ms units), the
// conservative engine is checked for:
//   - m <= s: one pulse of s, PASS, flag kept;
//   - s < m < 7 and m - s <= 5: a remainder of m - s, PASS, flag kept;
//   - m = 7: the first loop fills to 3.5 ms;
//   - blocks needing more steps: exactly the time needed.
// For s >= 2 the remainder brings the first loop to 3.5 ms, so in those two
// cases the flag is cleared. The largest remainder is 2.5 ms, so at s = 1 the
// first loop reaches only 3 ms. One retry pulse of 0.5 ms follows (one
// misprediction) and the flag stays set: a 0.5 ms shallow erasure needs a
// reloaded first row to work as intended.
// For every erase it also checks:
//   - the first pulse is s long at voltage step 1;
//   - a re-erase of a cleared block starts with a full 3.5 ms pulse.
// The aggressive engine is checked for finishing. For each tSE the testbench
// prints how many one-step blocks the shallow pulse alone erased, how many
// erased in less than 3.5 ms, and the mean pulse time of both engines.
module tb_aero_tse_sweep;
  import aero_pkg::*;

  localparam int unsigned NB   = 31808;
  localparam int unsigned BW   = $clog2(NB);
  localparam int unsigned CPU  = 2;
  localparam int unsigned NPER = 150;
  localparam int unsigned NE   = 2;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic [TEP_W-1:0]   tse;
  logic               req_valid  [NE];
  logic               req_ready  [NE];
  logic [BW-1:0]      req_blk    [NE];
  logic               done_valid [NE];
  logic [BW-1:0]      done_blk   [NE];
  ers_result_t        done_result[NE];
  int                 first_v    [NE];
  int                 first_t    [NE];
  int                 n_loops    [NE];

  for (genvar e = 0; e < NE; e++) begin : g_eng
    logic               cmd_valid, cmd_ready, rsp_valid;
    nand_op_e           cmd_op;
    logic [BW-1:0]      cmd_blk;
    logic [LOOP_W-1:0]  cmd_vlevel;
    logic [TEP_W-1:0]   cmd_tep;
    logic [FBC_W-1:0]   rsp_fbc;

    aero_top #(.AGGRESSIVE(e == 0)) dut (
      .clk, .rst_n,
      .cfg_gamma(GAMMA_DEFAULT), .cfg_delta(DELTA_DEFAULT), .cfg_f_pass(F_PASS_DEFAULT),
      .cfg_tse(tse),
      .cfg_ept_we(1'b0), .cfg_ept_loop('0), .cfg_ept_range('0), .cfg_ept_tep('0),
      .req_valid(req_valid[e]), .req_ready(req_ready[e]), .req_blk(req_blk[e]),
      .done_valid(done_valid[e]), .done_blk(done_blk[e]), .done_result(done_result[e]),
      .cmd_valid, .cmd_ready, .cmd_op, .cmd_blk, .cmd_vlevel, .cmd_tep,
      .rsp_valid, .rsp_fbc
    );
    nand_erase_model #(.NUM_BLOCKS(NB), .CYC_PER_UNIT(CPU)) chip (
      .clk, .cmd_valid, .cmd_ready, .cmd_op, .cmd_blk, .cmd_vlevel, .cmd_tep,
      .rsp_valid, .rsp_fbc
    );

    // the chip's pulse length register and the first pulse of each erase
    int tep_seen;
    always @(posedge clk) begin
      if (cmd_valid && cmd_ready) begin
        if (cmd_op == NAND_SET_TEP) tep_seen <= int'(cmd_tep);
        if (cmd_op == NAND_ERASE_LOOP) begin
          if (n_loops[e] == 0) begin
            first_v[e] <= int'(cmd_vlevel);
            first_t[e] <= tep_seen;
          end
          n_loops[e] <= n_loops[e] + 1;
        end
      end
    end
  end

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic set_profile(int e, int b, int n, int m);
    if (e == 0) g_eng[0].chip.set_profile(b, n, m, 0);
    else        g_eng[1].chip.set_profile(b, n, m, 0);
  endtask

  function automatic int left_of(int b);
    return g_eng[1].chip.left_k[b];
  endfunction

  ers_result_t res [NE];

  task automatic erase(int e, int b);
    @(negedge clk);
    while (!req_ready[e]) @(negedge clk);
    n_loops[e]   = 0;
    req_valid[e] = 1'b1;
    req_blk[e]   = BW'(b);
    @(negedge clk);
    req_valid[e] = 1'b0;
    while (!done_valid[e]) @(negedge clk);
    res[e] = done_result[e];
    check(done_blk[e] == BW'(b), "done_blk");
  endtask

  task automatic erase_both(int b);
    fork
      erase(0, b);
      erase(1, b);
    join
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int blk, n_cleared_total, n_retry_total;
    int cleared [$];
    int cleared_n [$];
    int cleared_m [$];
    for (int e = 0; e < NE; e++) begin
      req_valid[e] = 1'b0;
      req_blk[e]   = '0;
      n_loops[e]   = 0;
    end
    tse   = TSE_DEFAULT;
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    blk = 0;
    n_cleared_total = 0;
    n_retry_total = 0;
    for (int s = 1; s <= 4; s++) begin
      int n_one, n_shallow_only, n_short, sum_t [NE];
      tse = TEP_W'(s);
      n_one = 0; n_shallow_only = 0; n_short = 0;
      sum_t[0] = 0; sum_t[1] = 0;
      cleared.delete(); cleared_n.delete(); cleared_m.delete();
      for (int i = 0; i < NPER; i++) begin
        int n, m, p;
        p = int'($urandom_range(99, 0));
        n = (p < 60) ? 1 : (p < 90) ? 2 : 3;
        m = int'($urandom_range(7, 1));
        set_profile(0, blk, n, m);
        set_profile(1, blk, n, m);
        erase_both(blk);
        for (int e = 0; e < NE; e++) begin
          check(first_v[e] == 1 && first_t[e] == s && res[e].shallow,
                $sformatf("tSE %0d engine %0d blk %0d: first pulse step %0d, %0d units",
                          s, e, blk, first_v[e], first_t[e]));
          check(res[e].status != ERS_FAIL, $sformatf("tSE %0d engine %0d blk %0d erased", s, e, blk));
          check(int'(res[e].n_pulses) == n_loops[e], "pulse count matches the chip");
          sum_t[e] += int'(res[e].tep_total);
        end
        // conservative engine, exact
        check(res[1].status == ERS_PASS && left_of(blk) <= 0,
              $sformatf("tSE %0d blk %0d conservative complete", s, blk));
        if (n == 1) begin
          n_one++;
          if (m <= s) begin
            n_shallow_only++;
            check(res[1].n_pulses == 1 && int'(res[1].tep_total) == s && !res[1].sef_cleared,
                  $sformatf("tSE %0d blk %0d m=%0d: shallow pulse alone", s, blk, m));
          end else if (m < 7 && m - s <= 5) begin
            check(res[1].n_pulses == 2 && int'(res[1].tep_total) == m && !res[1].sef_cleared,
                  $sformatf("tSE %0d blk %0d m=%0d: remainder %0d, got %0d pulses %0d units",
                            s, blk, m, m - s, res[1].n_pulses, res[1].tep_total));
          end else if (m == 7) begin
            check(int'(res[1].tep_total) == 7 && res[1].sef_cleared == (s >= 2)
                  && int'(res[1].mispredicts) == ((s == 1) ? 1 : 0),
                  $sformatf("tSE %0d blk %0d m=7: full first loop, flag %0b", s, blk, res[1].sef_cleared));
          end
          if (m < 7) n_short++;
        end else begin
          check(int'(res[1].tep_total) == (n - 1) * 7 + m && res[1].sef_cleared == (s >= 2)
                && int'(res[1].n_ispe) == n,
                $sformatf("tSE %0d blk %0d n=%0d m=%0d: time %0d, flag %0b",
                          s, blk, n, m, res[1].tep_total, res[1].sef_cleared));
          check(int'(res[1].mispredicts) == ((s == 1) ? 1 : 0),
                $sformatf("tSE %0d blk %0d n=%0d: %0d mispredictions", s, blk, n, res[1].mispredicts));
          if (res[1].mispredicts != 0) n_retry_total++;
        end
        if (res[1].sef_cleared) begin
          cleared.push_back(blk);
          cleared_n.push_back(n);
          cleared_m.push_back(m);
        end
        blk++;
      end
      $display("tSE %0.1f ms: %0d of %0d one-step blocks erased by the shallow pulse alone, %0d in less than 3.5 ms; mean pulse time conservative %0.3f ms, aggressive %0.3f ms; %0d flags cleared",
               real'(s) * 0.5, n_shallow_only, n_one, n_short,
               real'(sum_t[1]) * 0.5 / NPER, real'(sum_t[0]) * 0.5 / NPER, cleared.size());
      check(n_shallow_only > 0 && (cleared.size() > 0) == (s >= 2),
            $sformatf("tSE %0d: shallow-only erases happen, flags cleared only from 1 ms", s));
      n_cleared_total += cleared.size();
      // a cleared block is erased without a shallow erasure from now on
      foreach (cleared[j]) begin
        set_profile(0, cleared[j], cleared_n[j], cleared_m[j]);
        set_profile(1, cleared[j], cleared_n[j], cleared_m[j]);
        erase_both(cleared[j]);
        check(!res[1].shallow && first_t[1] == int'(TEP_DEFAULT) && first_v[1] == 1,
              $sformatf("tSE %0d blk %0d re-erase: no shallow erasure", s, cleared[j]));
        check(res[1].status == ERS_PASS && left_of(cleared[j]) <= 0 && !res[1].sef_cleared
              && int'(res[1].tep_total) == (cleared_n[j] - 1) * 7 + cleared_m[j]
              && res[1].mispredicts == 0,
              $sformatf("tSE %0d blk %0d re-erase: time %0d", s, cleared[j], res[1].tep_total));
      end
    end
    check(n_retry_total > 0, "a retry after the capped remainder at tSE 0.5 ms");
    $display("%0d flags cleared, %0d retries after a capped remainder", n_cleared_total, n_retry_total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
