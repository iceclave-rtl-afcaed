// stream_buffer: keystream FIFO between the Trivium core and the XOR stage.
//
// The cipher runs ahead of the data and parks its 64-bit keystream words here,
// so a data beat that arrives finds its pad waiting and is XORed in the same
// cycle. A plain synchronous FIFO with valid/ready on both sides, a `flush`
// that empties it when a new key/IV is loaded, and first-word fall-through
// (`rd_data` is the head word whenever `rd_valid`). Simultaneous push and pop
// are allowed when full. The paper draws the buffer but gives no depth: DEPTH
// is this design's choice.
module stream_buffer #(
  parameter int unsigned W     = 64,
  parameter int unsigned DEPTH = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         flush,
  input  logic         wr_valid,
  output logic         wr_ready,
  input  logic [W-1:0] wr_data,
  output logic         rd_valid,
  input  logic         rd_ready,
  output logic [W-1:0] rd_data
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem_q [DEPTH];
  logic [AW-1:0] wp_q, rp_q;
  logic [AW:0]   cnt_q;
  logic          push, pop;

  assign rd_valid = (cnt_q != 0);
  assign wr_ready = (cnt_q != (AW+1)'(DEPTH)) || rd_ready;
  assign push     = wr_valid && wr_ready;
  assign pop      = rd_valid && rd_ready;
  assign rd_data  = mem_q[rp_q];

  function automatic logic [AW-1:0] incr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk) begin
    if (push && !flush) mem_q[wp_q] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp_q  <= '0;
      rp_q  <= '0;
      cnt_q <= '0;
    end else if (flush) begin
      wp_q  <= '0;
      rp_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push) wp_q <= incr(wp_q);
      if (pop)  rp_q <= incr(rp_q);
      cnt_q <= cnt_q + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  // a full buffer only accepts a word when one leaves in the same cycle
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
    end else if (cnt_q == (AW+1)'(DEPTH) && wr_valid && !rd_ready) begin
      assert (!wr_ready);
    end
  end

endmodule
