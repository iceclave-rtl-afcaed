// counter_cache: on-chip cache of counter blocks for the memory encryption
// engine.
//
// The engine must know a line's counter before it can check or decrypt the
// line, and a counter block read from DRAM is only trusted after its path up
// the integrity tree has been verified. A counter block held on chip needs
// no such walk, because an attacker cannot reach it. This cache keeps such
// blocks: direct-mapped, one block per entry, addressed by a key that names
// the block (for the engine: {tree, block index} of a level-0 block). The low
// CCW bits of the key select the entry and the rest is its tag.
//
// Interface and timing:
//   wr_en/wr_key/wr_data  write (allocate or overwrite) an entry this cycle.
//   rd_key                looked up every cycle; rd_hit/rd_data are valid the
//                         next cycle. A write in the same cycle makes that
//                         lookup a miss.
//   clear                 invalidates every entry.
// Data is held in a plain array without reset (a memory); only the valid bits
// are reset, and data is never used without its valid bit.
//
// From the paper: the engine has a counter cache of 128 KB. The paper does not
// describe its organisation. The direct mapping, write-allocate, one-cycle
// lookup and the key layout are this design's choices.
module counter_cache #(
  parameter int unsigned ENTRIES = 2048,   // blocks held, a power of two >= 2
  parameter int unsigned KW      = 13,     // key width
  parameter int unsigned DW      = 576,    // block width
  localparam int unsigned CCW    = $clog2(ENTRIES)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          wr_en,
  input  logic [KW-1:0] wr_key,
  input  logic [DW-1:0] wr_data,
  input  logic [KW-1:0] rd_key,
  output logic          rd_hit,
  output logic [DW-1:0] rd_data
);

  logic [KW+DW-1:0] mem [ENTRIES];
  logic [ENTRIES-1:0] valid_q;
  logic [KW+DW-1:0] rd_q;
  logic             rd_valid_q;
  logic [KW-1:0]    rd_key_q;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_key[CCW-1:0]] <= {wr_key, wr_data};
    rd_q <= mem[rd_key[CCW-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q    <= '0;
      rd_valid_q <= 1'b0;
      rd_key_q   <= '0;
    end else begin
      rd_valid_q <= valid_q[rd_key[CCW-1:0]] && !wr_en && !clear;
      rd_key_q   <= rd_key;
      if (clear)      valid_q <= '0;
      else if (wr_en) valid_q[wr_key[CCW-1:0]] <= 1'b1;
    end
  end

  assign rd_hit  = rd_valid_q && (rd_q[KW+DW-1:DW] == rd_key_q);
  assign rd_data = rd_q[DW-1:0];

endmodule
