// tb_sef: checks the shallow-erasure flag bitmap against a reference array:
// busy for ceil(NUM_BLOCKS/32) cycles after reset, all flags TRUE (0) after
// that, set/read of random blocks, the one-cycle read latency and the
// forwarding of a set to a read of the same word right after it. Runs at a
// reduced size of 1000 blocks (not a multiple of 32).
module tb_sef;

  localparam int unsigned NB = 1000;
  localparam int unsigned BW = $clog2(NB);

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, busy, rd_en, rd_flag, set_en, set_busy;
  logic [BW-1:0] rd_blk, set_blk;

  sef #(.NUM_BLOCKS(NB)) dut (.clk, .rst_n, .busy, .rd_en, .rd_blk, .rd_flag,
                              .set_en, .set_blk, .set_busy);

  bit ref_flags [NB];
  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic rd(int b);
    @(negedge clk);
    rd_en = 1'b1; rd_blk = BW'(b);
    @(negedge clk);
    rd_en = 1'b0;
    check(rd_flag == ref_flags[b], $sformatf("flag of block %0d = %0d", b, rd_flag));
  endtask

  task automatic set(int b);
    @(negedge clk);
    set_en = 1'b1; set_blk = BW'(b);
    @(negedge clk);
    set_en = 1'b0;
    ref_flags[b] = 1'b1;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    rst_n = 1'b0; rd_en = 1'b0; set_en = 1'b0; rd_blk = '0; set_blk = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    cyc = 0;
    while (busy) begin @(negedge clk); cyc++; end
    check(cyc == (NB + 31) / 32, $sformatf("clear sweep took %0d cycles", cyc));
    for (int b = 0; b < NB; b += 37) rd(b);
    rd(NB - 1);
    // set, then read the same word in the very next cycle (forwarding)
    @(negedge clk);
    set_en = 1'b1; set_blk = BW'(65);
    @(negedge clk);
    set_en = 1'b0; ref_flags[65] = 1'b1;
    check(set_busy, "set_busy in write cycle");
    rd_en = 1'b1; rd_blk = BW'(65);
    @(negedge clk);
    rd_en = 1'b0;
    check(rd_flag == 1'b1, "forwarded flag");
    rd(64); rd(66);
    for (int i = 0; i < 300; i++) begin
      int b;
      b = int'($urandom_range(NB - 1, 0));
      if ($urandom_range(1, 0) == 1) set(b);
      rd(int'($urandom_range(NB - 1, 0)));
      rd(b);
    end
    // reset clears everything again
    @(negedge clk) rst_n = 1'b0;
    @(negedge clk) rst_n = 1'b1;
    while (busy) @(negedge clk);
    for (int b = 0; b < NB; b++) ref_flags[b] = 1'b0;
    for (int b = 0; b < NB; b += 13) rd(b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
