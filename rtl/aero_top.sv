// aero_top: adaptive erase (AERO) engine of an SSD flash controller.
//
// The firmware hands it the index of a block to erase; the engine runs the
// whole erase on the block's NAND chip and reports how it went. Instead of the
// fixed 3.5 ms erase pulse of every ISPE loop it predicts, from the fail-bit
// count of each verify-read, the shortest pulse that finishes the block, and
// it splits the first loop into a 1 ms shallow erasure plus a remainder whose
// length is predicted the same way.
//
// Inside: aero_erase_ctrl (the sequencer), fail_bit_classifier (pass test and
// fail-bit range), ept (the latency table) and sef (one shallow-erasure flag
// per block). The NAND chips are outside: their command port is brought out.
//
// Ports: cfg_* are run-time registers (gamma, delta, F_PASS, tSE) plus an EPT
// write port for loading a table profiled for another chip type. The erase
// request, completion and NAND command signals are those of aero_erase_ctrl.
// req_ready stays low for ceil(NUM_BLOCKS/32) cycles after reset while the
// flags are cleared.
//
// Parameters: NUM_BLOCKS defaults to the 31,808 blocks of the paper's simulated
// 1 TB SSD; AGGRESSIVE selects the latency model that also uses the ECC margin
// (the paper's main configuration) or the conservative one.
module aero_top
  import aero_pkg::*;
#(
  parameter int unsigned NUM_BLOCKS = 31808,
  parameter bit          AGGRESSIVE = 1'b1,
  localparam int unsigned BLK_W     = $clog2(NUM_BLOCKS)
) (
  input  logic               clk,
  input  logic               rst_n,
  // configuration
  input  logic [FBC_W-1:0]   cfg_gamma,
  input  logic [FBC_W-1:0]   cfg_delta,
  input  logic [FBC_W-1:0]   cfg_f_pass,
  input  logic [TEP_W-1:0]   cfg_tse,
  input  logic               cfg_ept_we,
  input  logic [LOOP_W-1:0]  cfg_ept_loop,
  input  logic [RANGE_W-1:0] cfg_ept_range,
  input  logic [TEP_W-1:0]   cfg_ept_tep,
  // erase request / completion
  input  logic               req_valid,
  output logic               req_ready,
  input  logic [BLK_W-1:0]   req_blk,
  output logic               done_valid,
  output logic [BLK_W-1:0]   done_blk,
  output ers_result_t        done_result,
  // NAND command port
  output logic               cmd_valid,
  input  logic               cmd_ready,
  output nand_op_e           cmd_op,
  output logic [BLK_W-1:0]   cmd_blk,
  output logic [LOOP_W-1:0]  cmd_vlevel,
  output logic [TEP_W-1:0]   cmd_tep,
  input  logic               rsp_valid,
  input  logic [FBC_W-1:0]   rsp_fbc
);

  logic [FBC_W-1:0]   cls_f;
  logic               cls_pass;
  logic [RANGE_W-1:0] cls_range;
  logic [LOOP_W-1:0]  ept_loop;
  logic [RANGE_W-1:0] ept_range;
  logic [TEP_W-1:0]   ept_tep;
  logic               sef_busy, sef_rd_en, sef_rd_flag, sef_set_en, sef_set_busy;
  logic [BLK_W-1:0]   sef_rd_blk, sef_set_blk;

  aero_erase_ctrl #(.NUM_BLOCKS(NUM_BLOCKS)) u_ctrl (
    .clk, .rst_n, .cfg_tse,
    .req_valid, .req_ready, .req_blk,
    .done_valid, .done_blk, .done_result,
    .cmd_valid, .cmd_ready, .cmd_op, .cmd_blk, .cmd_vlevel, .cmd_tep,
    .rsp_valid, .rsp_fbc,
    .cls_f, .cls_pass, .cls_range,
    .ept_loop, .ept_range, .ept_tep,
    .sef_busy, .sef_rd_en, .sef_rd_blk, .sef_rd_flag, .sef_set_en, .sef_set_blk
  );

  fail_bit_classifier u_cls (
    .f(cls_f), .gamma(cfg_gamma), .delta(cfg_delta), .f_pass(cfg_f_pass),
    .pass(cls_pass), .range(cls_range)
  );

  ept #(.AGGRESSIVE(AGGRESSIVE)) u_ept (
    .clk, .rst_n,
    .lk_loop(ept_loop), .lk_range(ept_range), .lk_tep(ept_tep),
    .wr_en(cfg_ept_we), .wr_loop(cfg_ept_loop), .wr_range(cfg_ept_range),
    .wr_tep(cfg_ept_tep)
  );

  sef #(.NUM_BLOCKS(NUM_BLOCKS)) u_sef (
    .clk, .rst_n, .busy(sef_busy),
    .rd_en(sef_rd_en), .rd_blk(sef_rd_blk), .rd_flag(sef_rd_flag),
    .set_en(sef_set_en), .set_blk(sef_set_blk), .set_busy(sef_set_busy)
  );

  // The controller issues at most one flag update per erase and the next one
  // comes at least one full pulse later, so a set can never collide.
  assert property (@(posedge clk) disable iff (!rst_n) sef_set_busy |-> !sef_set_en)
    else $error("aero_top: SEF update collision");

endmodule
