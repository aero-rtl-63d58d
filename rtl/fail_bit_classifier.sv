// fail_bit_classifier: turns a fail-bit count into the erase verdict and the
// fail-bit range used to look up the next erase-pulse latency.
//
// After every verify-read the chip reports F, the number of bitlines that
// still hold an insufficiently erased cell. The erase loop passes when
// F <= F_PASS. Otherwise F is sorted into one of the ranges of the latency
// model: 0 for F <= gamma, k for (k-1)*delta < F <= k*delta with k = 1..7
// (range 1 begins just above gamma), and 8 for F > 7*delta, i.e. above F_HIGH,
// where the next pulse must use the full default tEP. Because one extra
// 0.5 ms of pulse lowers F by almost the same delta on every block, the range
// number is a direct proxy for the pulse time still needed.
//
// Interface: purely combinational; f, gamma, delta and f_pass in, pass and
// range out. The thresholds k*delta are formed by constant multiples of the
// run-time delta register so the firmware can re-profile a chip type.
// Follows the paper: range boundaries (gamma, delta ... 7*delta), F_HIGH =
// 7*delta (the last column of the model). Own choice: F <= F_PASS counts as a
// pass (the paper uses both "<" and "<=" for this test; "<=" is used here as in
// its latency-reduction description).
module fail_bit_classifier
  import aero_pkg::*;
(
  input  logic [FBC_W-1:0]   f,
  input  logic [FBC_W-1:0]   gamma,
  input  logic [FBC_W-1:0]   delta,
  input  logic [FBC_W-1:0]   f_pass,
  output logic               pass,
  output logic [RANGE_W-1:0] range
);

  // Thresholds are kept FBC_W+3 bits wide so 7*delta cannot wrap.
  logic [FBC_W+2:0] thr [1:7];

  always_comb begin
    for (int k = 1; k <= 7; k++) begin
      thr[k] = (FBC_W+3)'(delta) * (FBC_W+3)'(k);
    end
  end

  always_comb begin
    pass  = (f <= f_pass);
    range = RANGE_W'(8);
    if (f <= gamma) begin
      range = '0;
    end else begin
      for (int k = 7; k >= 1; k--) begin
        if ((FBC_W+3)'(f) <= thr[k]) range = RANGE_W'(k);
      end
    end
  end

endmodule
