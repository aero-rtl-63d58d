// aero_erase_ctrl: adaptive block-erase sequencer (AERO).
//
// Erases one flash block per request with the shortest erase-pulse time that
// still erases it, instead of a fixed 3.5 ms pulse per ISPE loop. The chip is
// driven through three commands: SET_TEP (SET FEATURE: pulse length), ERASE_LOOP
// (one erase pulse at voltage step V_ERASE(vlevel), then a verify-read) and
// GET_FBC (GET FEATURE: the fail-bit count F of that verify-read).
//
// Sequence for block k:
//  1. Read the block's shallow-erasure flag (SEF). If TRUE, the first pulse is
//     a shallow erasure of tSE (1 ms) at V_ERASE(1); otherwise it is a full
//     default pulse (3.5 ms).
//  2. After every pulse, read F. F <= F_PASS ends the erase (PASS).
//  3. Otherwise the fail-bit range of F picks the next pulse length from the
//     erase-timing parameter table (EPT). The row is the voltage step the next
//     pulse uses: the same step when the current step has not yet received its
//     full 3.5 ms (after a shallow erasure, or after a shortened pulse that
//     failed), else the next step, V_ERASE(n+1).
//     - After a shallow erasure the pulse is the remainder erasure tRE. If the
//       remainder cannot shorten the first loop (tSE + tRE = default tEP), the
//       block's SEF bit is set to FALSE so later erases skip the shallow step.
//     - An EPT entry of 0 ends the erase (PASS_ECC): the remaining fail bits
//       are left to the ECC-capability margin and the loop is skipped.
//     - A shortened pulse that still fails is looked up in the row of its own
//       step. A 0 entry means the fail bits left are within the ECC margin
//       (PASS_ECC); otherwise it is a misprediction: another pulse at the same
//       voltage (at least 0.5 ms, at most what brings the step to 3.5 ms)
//       follows. Only a full 3.5 ms at a step moves on to the next step.
//  4. After MAX_LOOPS voltage steps with full pulses the erase ends (FAIL).
//
// Follows the paper: the flow of shallow erasure, remainder erasure, FELP
// lookup per loop, the SEF update rule, the 0-entry skip of the final loop, and
// the misprediction rule (same V_ERASE while the accumulated time is below the
// default, higher V_ERASE otherwise), here applied per voltage step. This
// design's own choices: the command/response handshake, the result record,
// the 0.5 ms minimum for a retry pulse, and FAIL after the fifth step.
//
// Interface: req_valid/req_ready/req_blk start an erase (ready only in IDLE
// and once the SEF has finished its reset sweep). done_valid pulses one cycle
// with done_blk and done_result. cmd_valid/cmd_ready hand one command to the
// chip; the chip answers each with one rsp_valid pulse (rsp_fbc valid for
// GET_FBC). Only one command is outstanding at a time. Each pulse costs six
// controller cycles plus the chip's response times; the decision after a
// verify-read takes one cycle. sef_rd_blk is req_blk and ept_range is
// cls_range, wired straight through: the SEF read starts in the request
// cycle and the table lookup is combinational with the classification.
module aero_erase_ctrl
  import aero_pkg::*;
#(
  parameter int unsigned NUM_BLOCKS = 31808,
  localparam int unsigned BLK_W     = $clog2(NUM_BLOCKS)
) (
  input  logic               clk,
  input  logic               rst_n,
  // configuration
  input  logic [TEP_W-1:0]   cfg_tse,      // shallow-erasure time, 0.5 ms units
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
  input  logic [FBC_W-1:0]   rsp_fbc,
  // fail-bit classifier
  output logic [FBC_W-1:0]   cls_f,
  input  logic               cls_pass,
  input  logic [RANGE_W-1:0] cls_range,
  // EPT lookup
  output logic [LOOP_W-1:0]  ept_loop,
  output logic [RANGE_W-1:0] ept_range,
  input  logic [TEP_W-1:0]   ept_tep,
  // SEF
  input  logic               sef_busy,
  output logic               sef_rd_en,
  output logic [BLK_W-1:0]   sef_rd_blk,
  input  logic               sef_rd_flag,
  output logic               sef_set_en,
  output logic [BLK_W-1:0]   sef_set_blk
);

  typedef enum logic [3:0] {
    S_IDLE, S_SEF, S_SET, S_SET_W, S_ERS, S_ERS_W, S_GET, S_GET_W, S_EVAL, S_DONE
  } state_e;

  // what kind of pulse was issued last
  typedef enum logic [1:0] {
    P_SHALLOW, P_FULL, P_PRED
  } pulse_e;

  state_e            state_q;
  pulse_e            kind_q;
  logic [BLK_W-1:0]  blk_q;
  logic [LOOP_W-1:0] level_q;     // current V_ERASE step
  logic [TEP_W:0]    acc_q;       // pulse time applied at this step
  logic [TEP_W-1:0]  tep_q;       // pulse length to program / programmed
  logic [FBC_W-1:0]  fbc_q;
  ers_result_t       res_q;

  // ---- decision after a verify-read (S_EVAL) -------------------------------
  logic             step_full;    // current voltage step received 3.5 ms
  logic [TEP_W:0]   room;         // pulse time left at this step
  logic [TEP_W-1:0] retry_tep;

  assign step_full = (acc_q >= (TEP_W+1)'(TEP_DEFAULT));
  assign room      = (TEP_W+1)'(TEP_DEFAULT) - acc_q;

  assign cls_f     = fbc_q;
  assign ept_range = cls_range;
  assign ept_loop  = step_full ? level_q + 1'b1 : level_q;

  always_comb begin
    retry_tep = ept_tep;
    if ((TEP_W+1)'(retry_tep) > room) retry_tep = room[TEP_W-1:0];
    if (retry_tep == '0) retry_tep = TEP_W'(1);
  end

  // ---- outputs ---------------------------------------------------------------
  assign req_ready  = (state_q == S_IDLE) && !sef_busy;
  assign sef_rd_en  = req_valid && req_ready;
  assign sef_rd_blk = req_blk;

  // Held low during reset: before the first reset edge state_q is unknown, and
  // the chip must not see a command from that state.
  assign cmd_valid  = rst_n && ((state_q == S_SET) || (state_q == S_ERS) || (state_q == S_GET));
  assign cmd_blk    = blk_q;
  assign cmd_vlevel = level_q;
  assign cmd_tep    = tep_q;
  always_comb begin
    unique case (state_q)
      S_SET:   cmd_op = NAND_SET_TEP;
      S_ERS:   cmd_op = NAND_ERASE_LOOP;
      default: cmd_op = NAND_GET_FBC;
    endcase
  end

  assign done_valid  = (state_q == S_DONE);
  assign done_blk    = blk_q;
  assign done_result = res_q;

  assign sef_set_blk = blk_q;

  always_comb begin
    sef_set_en = 1'b0;
    if (state_q == S_EVAL && !cls_pass && !step_full && kind_q == P_SHALLOW
        && ept_tep != '0 && (TEP_W+1)'(ept_tep) >= room)
      sef_set_en = 1'b1;
  end

  // ---- state machine ---------------------------------------------------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      kind_q  <= P_FULL;
      blk_q   <= '0;
      level_q <= LOOP_W'(1);
      acc_q   <= '0;
      tep_q   <= TEP_DEFAULT;
      fbc_q   <= '0;
      res_q   <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (req_valid && req_ready) begin
          blk_q   <= req_blk;
          level_q <= LOOP_W'(1);
          acc_q   <= '0;
          res_q   <= '0;
          state_q <= S_SEF;
        end
        S_SEF: begin
          // sef_rd_flag = 1 means FALSE: no shallow erasure for this block
          if (!sef_rd_flag) begin
            kind_q        <= P_SHALLOW;
            tep_q         <= cfg_tse;
            res_q.shallow <= 1'b1;
          end else begin
            kind_q <= P_FULL;
            tep_q  <= TEP_DEFAULT;
          end
          res_q.n_ispe <= LOOP_W'(1);
          state_q      <= S_SET;
        end
        S_SET:   if (cmd_ready) state_q <= S_SET_W;
        S_SET_W: if (rsp_valid) state_q <= S_ERS;
        S_ERS:   if (cmd_ready) state_q <= S_ERS_W;
        S_ERS_W: if (rsp_valid) begin
          acc_q           <= acc_q + (TEP_W+1)'(tep_q);
          res_q.tep_total <= res_q.tep_total + TOT_W'(tep_q);
          res_q.n_pulses  <= res_q.n_pulses + 1'b1;
          state_q         <= S_GET;
        end
        S_GET:   if (cmd_ready) state_q <= S_GET_W;
        S_GET_W: if (rsp_valid) begin
          fbc_q   <= rsp_fbc;
          state_q <= S_EVAL;
        end
        S_EVAL: begin
          if (cls_pass) begin
            res_q.status <= ERS_PASS;
            state_q      <= S_DONE;
          end else if (!step_full) begin
            if (kind_q == P_SHALLOW) begin
              // remainder erasure at V_ERASE(1)
              if (ept_tep == '0) begin
                res_q.status <= ERS_PASS_ECC;
                state_q      <= S_DONE;
              end else begin
                if ((TEP_W+1)'(ept_tep) >= room) res_q.sef_cleared <= 1'b1;
                tep_q   <= ((TEP_W+1)'(ept_tep) > room) ? room[TEP_W-1:0] : ept_tep;
                kind_q  <= P_PRED;
                state_q <= S_SET;
              end
            end else if (ept_tep == '0) begin
              // the shortened pulse left only what the ECC margin covers
              res_q.status <= ERS_PASS_ECC;
              state_q      <= S_DONE;
            end else begin
              // misprediction: more time at the same voltage step
              res_q.mispredicts <= res_q.mispredicts + 1'b1;
              tep_q   <= retry_tep;
              kind_q  <= P_PRED;
              state_q <= S_SET;
            end
          end else if (level_q >= LOOP_W'(MAX_LOOPS)) begin
            res_q.status <= ERS_FAIL;
            state_q      <= S_DONE;
          end else if (ept_tep == '0) begin
            // final loop skipped: left to the ECC-capability margin
            res_q.status <= ERS_PASS_ECC;
            state_q      <= S_DONE;
          end else begin
            level_q      <= level_q + 1'b1;
            res_q.n_ispe <= level_q + 1'b1;
            acc_q        <= '0;
            tep_q        <= ept_tep;
            kind_q       <= (ept_tep == TEP_DEFAULT) ? P_FULL : P_PRED;
            state_q      <= S_SET;
          end
        end
        S_DONE:  state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // ---- handshake rules -------------------------------------------------------
  // A command stays stable until the chip accepts it.
  assert property (@(posedge clk) disable iff (!rst_n)
                   cmd_valid && !cmd_ready |=> cmd_valid && $stable(cmd_op))
    else $error("aero_erase_ctrl: command dropped before it was accepted");
  // The chip answers only while a command is outstanding.
  assert property (@(posedge clk) disable iff (!rst_n)
                   rsp_valid |-> (state_q == S_SET_W || state_q == S_ERS_W || state_q == S_GET_W))
    else $error("aero_erase_ctrl: response with no command outstanding");

endmodule
