// nand_erase_model: behavioural model of the erase behaviour of a NAND flash
// chip, for simulation only (not synthesizable, it uses delays in cycles).
//
// It answers the three commands of the erase engine's NAND port. SET_TEP stores
// the erase-pulse length, ERASE_LOOP applies one pulse at voltage step vlevel
// and performs the verify-read, GET_FBC returns the fail-bit count of that
// verify-read. Each answer is one rsp_valid pulse after a fixed latency:
// T_CMD cycles for the feature commands, tep * CYC_PER_UNIT + T_VR cycles for an
// erase loop.
//
// Erase physics follow the linear trend measured on real 3D TLC chips: each
// block b needs n_ispe[b] voltage steps and m_units[b] pulse units (0.5 ms)
// at the last step; a step below that one is never enough. With a pulse time
// a applied at step v, the work left is
//   k = (n_ispe - v) * 7 + m_units + extra - a
// and the fail-bit count is F = F_PASS/2 when k <= 0, gamma/2 when the
// reported k is 1, and (k-2)*delta + delta/2 for a reported k >= 2, so every
// extra 0.5 ms lowers F by delta. extra[b] > 0 marks an outlier block whose
// F under-reports the work left by extra units (the reported k is
// max(1, k - extra)); such blocks make the prediction too short.
// n_ispe[b] = 6 models a block that cannot be erased.
//
// The testbench sets a block's profile with set_profile() before erasing it.
// The model keeps, per erase, the pulse time applied and the work left
// (left_k) so the testbench can check the engine's report.
module nand_erase_model
  import aero_pkg::*;
#(
  parameter int unsigned NUM_BLOCKS   = 64,
  parameter int unsigned CYC_PER_UNIT = 4,
  parameter int unsigned T_VR         = 3,
  parameter int unsigned T_CMD        = 2,
  parameter int unsigned GAMMA        = 1000,
  parameter int unsigned DELTA        = 5000,
  parameter int unsigned F_PASS       = 100,
  localparam int unsigned BLK_W       = $clog2(NUM_BLOCKS)
) (
  input  logic              clk,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  nand_op_e          cmd_op,
  input  logic [BLK_W-1:0]  cmd_blk,
  input  logic [LOOP_W-1:0] cmd_vlevel,
  input  logic [TEP_W-1:0]  cmd_tep,
  output logic              rsp_valid,
  output logic [FBC_W-1:0]  rsp_fbc
);

  int n_ispe  [NUM_BLOCKS];
  int m_units [NUM_BLOCKS];
  int extra   [NUM_BLOCKS];
  int level   [NUM_BLOCKS];   // highest voltage step applied in this erase
  int acc     [NUM_BLOCKS];   // pulse time at that step
  int total   [NUM_BLOCKS];   // pulse time of this erase
  int left_k  [NUM_BLOCKS];   // work left after the last pulse
  int pulses  [NUM_BLOCKS];

  int tep_reg;
  int last_fbc;
  int busy_cnt;
  logic busy;

  int n_cmds;

  function automatic int fbc_of(int k, int ex);
    int kr;
    if (k <= 0) return F_PASS / 2;
    kr = (k - ex < 1) ? 1 : k - ex;
    if (kr == 1) return GAMMA / 2;
    return (kr - 2) * DELTA + DELTA / 2;
  endfunction

  task automatic set_profile(int b, int n, int m, int ex);
    n_ispe[b]  = n;
    m_units[b] = m;
    extra[b]   = ex;
    level[b]   = 0;
    acc[b]     = 0;
    total[b]   = 0;
    pulses[b]  = 0;
    left_k[b]  = (n - 1) * 7 + m + ex;
  endtask

  initial begin
    for (int b = 0; b < NUM_BLOCKS; b++) set_profile(b, 1, 7, 0);
    tep_reg   = 7;
    last_fbc  = 0;
    busy      = 1'b0;
    busy_cnt  = 0;
    rsp_valid = 1'b0;
    rsp_fbc   = '0;
    n_cmds    = 0;
  end

  assign cmd_ready = !busy;

  always @(posedge clk) begin
    rsp_valid <= 1'b0;
    if (busy) begin
      if (busy_cnt <= 1) begin
        busy      <= 1'b0;
        rsp_valid <= 1'b1;
        rsp_fbc   <= FBC_W'(last_fbc);
      end
      busy_cnt <= busy_cnt - 1;
    end else if (cmd_valid) begin
      int b;
      b = int'(cmd_blk);
      n_cmds <= n_cmds + 1;
      busy   <= 1'b1;
      unique case (cmd_op)
        NAND_SET_TEP: begin
          tep_reg  = int'(cmd_tep);
          busy_cnt <= T_CMD;
        end
        NAND_ERASE_LOOP: begin
          int v;
          v = int'(cmd_vlevel);
          if (v < level[b]) $error("nand model: voltage step went down");
          if (v > level[b]) begin
            level[b] = v;
            acc[b]   = 0;
          end
          acc[b]    = acc[b] + tep_reg;
          total[b]  = total[b] + tep_reg;
          pulses[b] = pulses[b] + 1;
          if (v >= n_ispe[b])
            left_k[b] = (n_ispe[b] - 1) * 7 + m_units[b] + extra[b] - ((v - 1) * 7 + acc[b]);
          else
            left_k[b] = (n_ispe[b] - v) * 7 + m_units[b] + extra[b] - acc[b];
          // a step below n_ispe never finishes the block
          if (v < n_ispe[b] && left_k[b] < 1) left_k[b] = 1;
          last_fbc = fbc_of(left_k[b], extra[b]);
          busy_cnt <= tep_reg * CYC_PER_UNIT + T_VR;
        end
        default: begin
          busy_cnt <= T_CMD;
        end
      endcase
    end
  end

endmodule
