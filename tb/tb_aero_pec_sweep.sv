// tb_aero_pec_sweep: erase-latency workload across a block population as it
// wears out. Two engines at the default size run side by side on identical
// chip models: one with the aggressive latency model (ECC margin used, the
// default) and one with the conservative model (AGGRESSIVE = 0). The same 200
// blocks are erased at five wear points, 0.5K, 1K, 2.5K, 3K and 4.5K P/E
// cycles. The flags each engine keeps carry over from one wear point to the
// next, as they would in a drive.
//
// Loop-count mix per wear point. The stated figures come from measurements on
// real chips:
//   - most blocks need one loop at 0.5K;
//   - 76.5% need one loop at 1K;
//   - 92% need at most two loops at 2.5K;
//   - 40% need three loops at 3K;
//   - every block needs 2 to 4 loops beyond 2K.
// The rest of each mix, and all of 4.5K, is a choice of this testbench. The
// pulse time needed in the last loop is uniform over 0.5..3.5 ms. No outliers
// are injected.
//
// Per block it checks:
//   - both engines finish the erase;
//   - the conservative engine leaves the block completely erased, never
//     mispredicts and never relies on the ECC margin;
//   - the aggressive engine never spends more pulse time than the conservative
//     one, which never spends more than fixed-pulse ISPE (N_ISPE x 3.5 ms).
// Per wear point it prints the mean erase-pulse time of the three schemes.
module tb_aero_pec_sweep;
  import aero_pkg::*;

  localparam int unsigned NB    = 31808;
  localparam int unsigned BW    = $clog2(NB);
  localparam int unsigned CPU   = 2;
  localparam int unsigned NPOP  = 200;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  // ---- two engines, two identical chips ----------------------------------------
  logic               req_valid [2];
  logic               req_ready [2];
  logic [BW-1:0]      req_blk   [2];
  logic               done_valid[2];
  logic [BW-1:0]      done_blk  [2];
  ers_result_t        done_result[2];
  logic               cmd_valid [2];
  logic               cmd_ready [2];
  nand_op_e           cmd_op    [2];
  logic [BW-1:0]      cmd_blk   [2];
  logic [LOOP_W-1:0]  cmd_vlevel[2];
  logic [TEP_W-1:0]   cmd_tep   [2];
  logic               rsp_valid [2];
  logic [FBC_W-1:0]   rsp_fbc   [2];

  // index 0: aggressive (default), index 1: conservative
  aero_top dut_aggr (
    .clk, .rst_n,
    .cfg_gamma(GAMMA_DEFAULT), .cfg_delta(DELTA_DEFAULT), .cfg_f_pass(F_PASS_DEFAULT),
    .cfg_tse(TSE_DEFAULT),
    .cfg_ept_we(1'b0), .cfg_ept_loop('0), .cfg_ept_range('0), .cfg_ept_tep('0),
    .req_valid(req_valid[0]), .req_ready(req_ready[0]), .req_blk(req_blk[0]),
    .done_valid(done_valid[0]), .done_blk(done_blk[0]), .done_result(done_result[0]),
    .cmd_valid(cmd_valid[0]), .cmd_ready(cmd_ready[0]), .cmd_op(cmd_op[0]),
    .cmd_blk(cmd_blk[0]), .cmd_vlevel(cmd_vlevel[0]), .cmd_tep(cmd_tep[0]),
    .rsp_valid(rsp_valid[0]), .rsp_fbc(rsp_fbc[0])
  );
  aero_top #(.AGGRESSIVE(1'b0)) dut_cons (
    .clk, .rst_n,
    .cfg_gamma(GAMMA_DEFAULT), .cfg_delta(DELTA_DEFAULT), .cfg_f_pass(F_PASS_DEFAULT),
    .cfg_tse(TSE_DEFAULT),
    .cfg_ept_we(1'b0), .cfg_ept_loop('0), .cfg_ept_range('0), .cfg_ept_tep('0),
    .req_valid(req_valid[1]), .req_ready(req_ready[1]), .req_blk(req_blk[1]),
    .done_valid(done_valid[1]), .done_blk(done_blk[1]), .done_result(done_result[1]),
    .cmd_valid(cmd_valid[1]), .cmd_ready(cmd_ready[1]), .cmd_op(cmd_op[1]),
    .cmd_blk(cmd_blk[1]), .cmd_vlevel(cmd_vlevel[1]), .cmd_tep(cmd_tep[1]),
    .rsp_valid(rsp_valid[1]), .rsp_fbc(rsp_fbc[1])
  );

  nand_erase_model #(.NUM_BLOCKS(NB), .CYC_PER_UNIT(CPU)) chip_aggr (
    .clk, .cmd_valid(cmd_valid[0]), .cmd_ready(cmd_ready[0]), .cmd_op(cmd_op[0]),
    .cmd_blk(cmd_blk[0]), .cmd_vlevel(cmd_vlevel[0]), .cmd_tep(cmd_tep[0]),
    .rsp_valid(rsp_valid[0]), .rsp_fbc(rsp_fbc[0])
  );
  nand_erase_model #(.NUM_BLOCKS(NB), .CYC_PER_UNIT(CPU)) chip_cons (
    .clk, .cmd_valid(cmd_valid[1]), .cmd_ready(cmd_ready[1]), .cmd_op(cmd_op[1]),
    .cmd_blk(cmd_blk[1]), .cmd_vlevel(cmd_vlevel[1]), .cmd_tep(cmd_tep[1]),
    .rsp_valid(rsp_valid[1]), .rsp_fbc(rsp_fbc[1])
  );

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---- one erase on engine e ----------------------------------------------------
  ers_result_t res [2];

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

  // loop count for one block at a wear point, from a percentage draw
  function automatic int draw_n(int pec_idx, int p);
    case (pec_idx)
      0: return (p < 95) ? 1 : 2;                                  // 0.5K
      1: return (p < 77) ? 1 : 2;                                  // 1K: 76.5% one loop
      2: return (p < 92) ? 2 : 3;                                  // 2.5K: 92% <= 2
      3: return (p < 55) ? 2 : (p < 95) ? 3 : 4;                   // 3K: 40% three
      default: return (p < 30) ? 3 : (p < 80) ? 4 : 5;             // 4.5K
    endcase
  endfunction

  string pec_name [5] = '{"0.5K", "1K", "2.5K", "3K", "4.5K"};

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sum_ispe, sum_aggr, sum_cons, n_ecc;
    int blk [NPOP];
    for (int e = 0; e < 2; e++) begin
      req_valid[e] = 1'b0;
      req_blk[e]   = '0;
    end
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // a fixed population of blocks spread over the whole address range
    for (int i = 0; i < NPOP; i++) blk[i] = i * (NB / NPOP) + int'($urandom_range(NB / NPOP - 1, 0));

    for (int pec = 0; pec < 5; pec++) begin
      sum_ispe = 0; sum_aggr = 0; sum_cons = 0; n_ecc = 0;
      for (int i = 0; i < NPOP; i++) begin
        int n, m;
        n = draw_n(pec, int'($urandom_range(99, 0)));
        m = int'($urandom_range(7, 1));
        chip_aggr.set_profile(blk[i], n, m, 0);
        chip_cons.set_profile(blk[i], n, m, 0);
        fork
          erase(0, blk[i]);
          erase(1, blk[i]);
        join
        check(res[0].status != ERS_FAIL && res[1].status != ERS_FAIL,
              $sformatf("%s blk %0d erased by both", pec_name[pec], blk[i]));
        check(res[1].status == ERS_PASS && chip_cons.left_k[blk[i]] <= 0 && res[1].mispredicts == 0,
              $sformatf("%s blk %0d conservative: complete, no misprediction", pec_name[pec], blk[i]));
        check(int'(res[0].tep_total) <= int'(res[1].tep_total),
              $sformatf("%s blk %0d (n=%0d m=%0d) aggressive %0d > conservative %0d",
                        pec_name[pec], blk[i], n, m, res[0].tep_total, res[1].tep_total));
        check(int'(res[1].tep_total) <= n * 7,
              $sformatf("%s blk %0d conservative %0d > ISPE %0d", pec_name[pec], blk[i], res[1].tep_total, n * 7));
        sum_ispe += n * 7;
        sum_aggr += int'(res[0].tep_total);
        sum_cons += int'(res[1].tep_total);
        if (res[0].status == ERS_PASS_ECC) n_ecc++;
      end
      $display("PEC %-4s mean pulse time per erase: ISPE %0.2f ms, conservative %0.2f ms, aggressive %0.2f ms (%0d of %0d on ECC margin)",
               pec_name[pec], real'(sum_ispe) * 0.5 / NPOP, real'(sum_cons) * 0.5 / NPOP,
               real'(sum_aggr) * 0.5 / NPOP, n_ecc, NPOP);
      check(sum_aggr < sum_cons && sum_cons < sum_ispe,
            $sformatf("%s mean ordering aggressive < conservative < ISPE", pec_name[pec]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
