// tb_aero_mispredict: cost of mispredictions. Four engines at the default size
// run in lock step, each on its own chip model:
//   0  aggressive model, normal blocks
//   1  aggressive model, outlier blocks
//   2  conservative model, normal blocks
//   3  conservative model, outlier blocks
// Each erase uses a fresh block index, so every erase starts with a shallow
// erasure.
//
// Normal and outlier blocks need the same erase: n voltage steps and m pulse
// units at the last one. An outlier's fail-bit count reads one unit lower
// than its true work (profile (n, m-1) with one extra unit), so its predicted
// pulse comes out 0.5 ms short. At misprediction rates 0, 1, 5, 10 and 20%, a
// block is an outlier with that probability. Each rate runs 200 erases.
//
// For the conservative model the expected cost of a misprediction is one
// extra pulse with its verify-read and no extra pulse time. The retry covers
// exactly the missing 0.5 ms, and the pulses before it are that much shorter.
// The checks, per outlier:
//   - the same total pulse time as the normal block;
//   - one pulse more for each misprediction;
//   - at most one misprediction;
//   - a complete erase.
// A short mispredicted pulse can only cost 0.5 ms more than a normal block.
// The aggressive engines are checked for finishing and for spending at most
// 0.5 ms more. The testbench prints, per rate, the mean pulse time and the
// mean number of verify-reads for each engine.
module tb_aero_mispredict;
  import aero_pkg::*;

  localparam int unsigned NB   = 31808;
  localparam int unsigned BW   = $clog2(NB);
  localparam int unsigned CPU  = 2;
  localparam int unsigned NPER = 200;
  localparam int unsigned NE   = 4;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic               req_valid  [NE];
  logic               req_ready  [NE];
  logic [BW-1:0]      req_blk    [NE];
  logic               done_valid [NE];
  logic [BW-1:0]      done_blk   [NE];
  ers_result_t        done_result[NE];

  for (genvar e = 0; e < NE; e++) begin : g_eng
    logic               cmd_valid, cmd_ready, rsp_valid;
    nand_op_e           cmd_op;
    logic [BW-1:0]      cmd_blk;
    logic [LOOP_W-1:0]  cmd_vlevel;
    logic [TEP_W-1:0]   cmd_tep;
    logic [FBC_W-1:0]   rsp_fbc;

    aero_top #(.AGGRESSIVE(e < 2)) dut (
      .clk, .rst_n,
      .cfg_gamma(GAMMA_DEFAULT), .cfg_delta(DELTA_DEFAULT), .cfg_f_pass(F_PASS_DEFAULT),
      .cfg_tse(TSE_DEFAULT),
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
  end

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic set_profile(int e, int b, int n, int m, int ex);
    case (e)
      0:       g_eng[0].chip.set_profile(b, n, m, ex);
      1:       g_eng[1].chip.set_profile(b, n, m, ex);
      2:       g_eng[2].chip.set_profile(b, n, m, ex);
      default: g_eng[3].chip.set_profile(b, n, m, ex);
    endcase
  endtask

  function automatic int left_of(int e, int b);
    case (e)
      0:       return g_eng[0].chip.left_k[b];
      1:       return g_eng[1].chip.left_k[b];
      2:       return g_eng[2].chip.left_k[b];
      default: return g_eng[3].chip.left_k[b];
    endcase
  endfunction

  ers_result_t res [NE];

  task automatic erase(int e, int b);
    @(negedge clk);
    while (!req_ready[e]) @(negedge clk);
    req_valid[e] = 1'b1;
    req_blk[e]   = BW'(b);
    @(negedge clk);
    req_valid[e] = 1'b0;
    while (!done_valid[e]) @(negedge clk);
    res[e] = done_result[e];
    check(done_blk[e] == BW'(b), "done_blk");
  endtask

  int rates [5] = '{0, 1, 5, 10, 20};

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int blk;
    int sum_t [NE];
    int sum_p [NE];
    int n_mis;
    for (int e = 0; e < NE; e++) begin
      req_valid[e] = 1'b0;
      req_blk[e]   = '0;
    end
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    blk = 0;
    for (int r = 0; r < 5; r++) begin
      for (int e = 0; e < NE; e++) begin sum_t[e] = 0; sum_p[e] = 0; end
      n_mis = 0;
      for (int i = 0; i < NPER; i++) begin
        int n, m;
        bit outlier;
        n = int'($urandom_range(5, 1));
        m = int'($urandom_range(7, 2));
        outlier = int'($urandom_range(99, 0)) < rates[r];
        for (int e = 0; e < NE; e++) begin
          if (outlier && (e % 2 == 1)) set_profile(e, blk, n, m - 1, 1);
          else                         set_profile(e, blk, n, m, 0);
        end
        fork
          erase(0, blk);
          erase(1, blk);
          erase(2, blk);
          erase(3, blk);
        join
        for (int e = 0; e < NE; e++) begin
          check(res[e].status != ERS_FAIL, $sformatf("rate %0d%% engine %0d blk %0d erased", rates[r], e, blk));
          sum_t[e] += int'(res[e].tep_total);
          sum_p[e] += int'(res[e].n_pulses);
        end
        // conservative pair
        check(res[3].status == ERS_PASS && left_of(3, blk) <= 0,
              $sformatf("blk %0d conservative outlier engine complete", blk));
        check(res[3].tep_total == res[2].tep_total,
              $sformatf("blk %0d (n=%0d m=%0d) conservative pulse time %0d vs %0d",
                        blk, n, m, res[3].tep_total, res[2].tep_total));
        check(int'(res[3].n_pulses) == int'(res[2].n_pulses) + int'(res[3].mispredicts)
              && res[3].mispredicts <= 1 && res[2].mispredicts == 0,
              $sformatf("blk %0d conservative pulses %0d vs %0d, mispredicts %0d",
                        blk, res[3].n_pulses, res[2].n_pulses, res[3].mispredicts));
        if (!outlier) check(res[3] == res[2] && res[1] == res[0], "normal blocks behave alike");
        // aggressive pair: at most one 0.5 ms unit more
        check(int'(res[1].tep_total) <= int'(res[0].tep_total) + 1,
              $sformatf("blk %0d aggressive pulse time %0d vs %0d", blk, res[1].tep_total, res[0].tep_total));
        if (res[3].mispredicts != 0) n_mis++;
        blk++;
      end
      $display("rate %2d%%: conservative %0.3f / %0.3f ms, %0.2f / %0.2f verify-reads; aggressive %0.3f / %0.3f ms, %0.2f / %0.2f verify-reads (normal / with outliers, %0d mispredictions)",
               rates[r],
               real'(sum_t[2]) * 0.5 / NPER, real'(sum_t[3]) * 0.5 / NPER,
               real'(sum_p[2]) / NPER,       real'(sum_p[3]) / NPER,
               real'(sum_t[0]) * 0.5 / NPER, real'(sum_t[1]) * 0.5 / NPER,
               real'(sum_p[0]) / NPER,       real'(sum_p[1]) / NPER, n_mis);
      if (rates[r] == 0) check(n_mis == 0, "no misprediction at rate 0");
      if (rates[r] >= 10) check(n_mis > 0, $sformatf("mispredictions at rate %0d%%", rates[r]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
