// sef: Shallow Erasure Flags, one bit per flash block.
//
// A 0 bit reads as TRUE: the next erase of that block starts with a shallow
// erasure. Every flag starts at 0, so a fresh block is always shallow-erased.
// When the remainder erasure of a block could not shorten its first erase
// loop, the erase controller sets the flag to 1 (FALSE) and later erases of
// the block skip the shallow step and its extra verify-read.
//
// Storage is a memory of NUM_BLOCKS/WORD_W words of WORD_W bits. After reset
// the module clears one word per cycle (busy = 1 meanwhile), which stands in
// for the all-zero initial state of the bitmap; this takes
// ceil(NUM_BLOCKS/WORD_W) cycles (994 for the default 31,808 blocks, the block
// count of the simulated 1 TB SSD: 8 channels x 2 chips x 4 planes x 497).
// The word organisation, the clearing sweep and the read-modify-write are this
// design's choices.
//
// Interface and timing: rd_en/rd_blk gives rd_flag one cycle later (registered
// read). set_en/set_blk sets one flag; it takes two cycles internally (read the
// word, write it back) and set_busy is high in the second. A read in the cycle
// after a set to the same word returns the updated value (forwarded).
module sef #(
  parameter int unsigned NUM_BLOCKS = 31808,
  parameter int unsigned WORD_W     = 32,
  localparam int unsigned BLK_W     = $clog2(NUM_BLOCKS),
  localparam int unsigned NWORDS    = (NUM_BLOCKS + WORD_W - 1) / WORD_W,
  localparam int unsigned ADDR_W    = (NWORDS > 1) ? $clog2(NWORDS) : 1,
  localparam int unsigned BIT_W     = (WORD_W > 1) ? $clog2(WORD_W) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  output logic             busy,       // clearing after reset
  // read
  input  logic             rd_en,
  input  logic [BLK_W-1:0] rd_blk,
  output logic             rd_flag,    // 1 = FALSE (skip shallow erasure)
  // set to FALSE
  input  logic             set_en,
  input  logic [BLK_W-1:0] set_blk,
  output logic             set_busy
);

  logic [WORD_W-1:0] mem [NWORDS];

  logic              clearing;
  logic [ADDR_W-1:0] clr_addr;

  // pending read-modify-write
  logic              rmw_q;
  logic [ADDR_W-1:0] rmw_addr_q;
  logic [BIT_W-1:0]  rmw_bit_q;
  logic [WORD_W-1:0] rmw_word;

  logic [BIT_W-1:0]  rd_bit_q;
  logic [WORD_W-1:0] rd_word_q;

  wire [ADDR_W-1:0] rd_addr  = ADDR_W'(rd_blk / BLK_W'(WORD_W));
  wire [BIT_W-1:0]  rd_bit   = BIT_W'(rd_blk % BLK_W'(WORD_W));
  wire [ADDR_W-1:0] set_addr = ADDR_W'(set_blk / BLK_W'(WORD_W));
  wire [BIT_W-1:0]  set_bit  = BIT_W'(set_blk % BLK_W'(WORD_W));

  assign busy     = clearing;
  assign set_busy = rmw_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      clearing <= 1'b1;
      clr_addr <= '0;
    end else if (clearing) begin
      clr_addr <= clr_addr + 1'b1;
      if (clr_addr == ADDR_W'(NWORDS - 1)) clearing <= 1'b0;
    end
  end

  always_comb begin
    rmw_word            = mem[rmw_addr_q];
    rmw_word[rmw_bit_q] = 1'b1;
  end

  // memory write port: clearing sweep or the write half of a set
  always_ff @(posedge clk) begin
    if (clearing)   mem[clr_addr]   <= '0;
    else if (rmw_q) mem[rmw_addr_q] <= rmw_word;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rmw_q      <= 1'b0;
      rmw_addr_q <= '0;
      rmw_bit_q  <= '0;
    end else begin
      rmw_q <= set_en && !clearing && !rmw_q;
      if (set_en) begin
        rmw_addr_q <= set_addr;
        rmw_bit_q  <= set_bit;
      end
    end
  end

  // registered read with forwarding of a write in flight
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_word_q <= '0;
      rd_bit_q  <= '0;
    end else if (rd_en) begin
      rd_word_q <= (rmw_q && rmw_addr_q == rd_addr) ? rmw_word : mem[rd_addr];
      rd_bit_q  <= rd_bit;
    end
  end

  assign rd_flag = rd_word_q[rd_bit_q];

  // A set may not be issued while the previous one is still being written.
  assert property (@(posedge clk) disable iff (!rst_n) rmw_q |-> !set_en)
    else $error("sef: set_en while a set is in progress");

endmodule
