// tb_ept: checks the reset contents of the erase-timing parameter table for
// both latency models against the table printed in milliseconds (converted
// here to 0.5 ms codes as ms*2), the out-of-range default, and the write port.
module tb_ept;
  import aero_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  logic [LOOP_W-1:0]  lk_loop;
  logic [RANGE_W-1:0] lk_range;
  logic [TEP_W-1:0]   tep_a, tep_c;
  logic               wr_en;
  logic [LOOP_W-1:0]  wr_loop;
  logic [RANGE_W-1:0] wr_range;
  logic [TEP_W-1:0]   wr_tep;

  ept #(.AGGRESSIVE(1'b1)) dut_a (.clk, .rst_n, .lk_loop, .lk_range, .lk_tep(tep_a),
                                  .wr_en, .wr_loop, .wr_range, .wr_tep);
  ept #(.AGGRESSIVE(1'b0)) dut_c (.clk, .rst_n, .lk_loop, .lk_range, .lk_tep(tep_c),
                                  .wr_en(1'b0), .wr_loop, .wr_range, .wr_tep);

  // the printed model in ms; column 8 (F above 7*delta) is the full pulse
  real ms_cons [5][9] = '{
    '{0.5, 1.0, 1.5, 2.0, 2.5, 2.5, 2.5, 2.5, 2.5},
    '{0.5, 1.0, 1.5, 2.0, 2.5, 3.0, 3.5, 3.5, 3.5},
    '{0.5, 1.0, 1.5, 2.0, 2.5, 3.0, 3.5, 3.5, 3.5},
    '{0.5, 1.0, 1.5, 2.0, 2.5, 3.0, 3.5, 3.5, 3.5},
    '{0.5, 1.0, 1.5, 2.0, 2.5, 3.0, 3.5, 3.5, 3.5}};
  real ms_aggr [5][9] = '{
    '{0.0, 0.0, 0.5, 1.0, 1.5, 2.0, 2.5, 2.5, 2.5},
    '{0.0, 0.0, 0.5, 1.0, 1.5, 2.0, 2.5, 3.0, 3.5},
    '{0.0, 0.0, 0.5, 1.0, 1.5, 2.0, 2.5, 3.0, 3.5},
    '{0.0, 0.5, 1.0, 1.5, 2.0, 2.5, 3.0, 3.5, 3.5},
    '{0.5, 1.0, 1.5, 2.0, 2.5, 3.0, 3.5, 3.5, 3.5}};

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; wr_en = 1'b0; wr_loop = '0; wr_range = '0; wr_tep = '0;
    lk_loop = LOOP_W'(1); lk_range = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int l = 1; l <= 5; l++)
      for (int r = 0; r < 9; r++) begin
        lk_loop = LOOP_W'(l); lk_range = RANGE_W'(r); #1;
        check(int'(tep_a) == int'(ms_aggr[l-1][r] * 2.0), $sformatf("aggr [%0d][%0d] = %0d", l, r, tep_a));
        check(int'(tep_c) == int'(ms_cons[l-1][r] * 2.0), $sformatf("cons [%0d][%0d] = %0d", l, r, tep_c));
      end
    // out of range: loop 0, loop 6, range 9 -> default 3.5 ms
    lk_loop = '0;          lk_range = '0;         #1; check(tep_a == 3'd7, "loop 0 default");
    lk_loop = LOOP_W'(6);  lk_range = '0;         #1; check(tep_a == 3'd7, "loop 6 default");
    lk_loop = LOOP_W'(2);  lk_range = RANGE_W'(9);#1; check(tep_a == 3'd7, "range 9 default");
    // write one entry, read it back, neighbours unchanged
    @(negedge clk);
    wr_en = 1'b1; wr_loop = LOOP_W'(3); wr_range = RANGE_W'(4); wr_tep = 3'd6;
    @(negedge clk);
    wr_en = 1'b0;
    lk_loop = LOOP_W'(3); lk_range = RANGE_W'(4); #1; check(tep_a == 3'd6, "written entry");
    lk_range = RANGE_W'(3); #1; check(tep_a == 3'd2, "neighbour unchanged");
    lk_loop = LOOP_W'(2); lk_range = RANGE_W'(4); #1; check(tep_a == 3'd3, "other row unchanged");
    // out-of-range write is ignored
    @(negedge clk);
    wr_en = 1'b1; wr_loop = LOOP_W'(7); wr_range = RANGE_W'(0); wr_tep = 3'd5;
    @(negedge clk);
    wr_en = 1'b0;
    for (int l = 1; l <= 5; l++) begin
      lk_loop = LOOP_W'(l); lk_range = '0; #1;
      check(int'(tep_a) == int'(ms_aggr[l-1][0] * 2.0), "ignored write");
    end
    // reset restores the model
    rst_n = 1'b0; @(posedge clk); #1 rst_n = 1'b1;
    lk_loop = LOOP_W'(3); lk_range = RANGE_W'(4); #1; check(tep_a == 3'd3, "reset restores");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
