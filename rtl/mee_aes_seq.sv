// mee_aes_seq: AES-128 sequencer of the memory encryption engine.
//
// Runs the one AES core of the engine in one of two ways:
//   * CBC-MAC (cbc=1): x0 = 0, x(j+1) = AES(x(j) ^ m(j)) over the five
//     128-bit chunks of `msg` (chunk 0 in bits [639:512]); `mac` is the top
//     64 bits of the last x. Used for the 64-bit MACs of data lines and of
//     counter blocks: the first four chunks carry the 512 protected bits, the
//     fifth carries the address, the counter and a domain tag.
//   * counter mode (cbc=0): four pads AES(seed ^ j), j = 0..3, form the 512-bit
//     one-time pad of a cache line (pad j in bits [511-128j -: 128]); the seed
//     is msg[127:0].
// The paper specifies AES-128 for the pads and "hashing" for the MACs; the
// CBC-MAC construction and the chunk layout are this design's choices.
//
// Timing: `done` pulses 5 x 11 = 55 cycles (CBC) or 4 x 11 = 44 cycles (CTR)
// after `start`; results hold until the next start.
module mee_aes_seq (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [127:0] key,
  input  logic         start,
  input  logic         cbc,
  input  logic [639:0] msg,
  output logic         done,
  output logic [511:0] pad,
  output logic [63:0]  mac
);

  logic [639:0] msg_q;
  logic         cbc_q, run_q, aes_start, aes_busy, aes_done;
  logic [2:0]   j_q;
  logic [127:0] x_q, aes_pt, aes_ct;

  aes128_enc u_aes (
    .clk, .rst_n, .start(aes_start), .key, .pt(aes_pt),
    .busy(aes_busy), .done(aes_done), .ct(aes_ct)
  );

  always_comb begin
    if (cbc_q) aes_pt = x_q ^ msg_q[639 - 128*j_q -: 128];
    else       aes_pt = msg_q[127:0] ^ 128'(j_q);
  end

  logic issue_q;   // start the core on the next cycle
  assign aes_start = issue_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      msg_q   <= '0;
      cbc_q   <= 1'b0;
      run_q   <= 1'b0;
      issue_q <= 1'b0;
      j_q     <= '0;
      x_q     <= '0;
      pad     <= '0;
      mac     <= '0;
      done    <= 1'b0;
    end else begin
      done    <= 1'b0;
      issue_q <= 1'b0;
      if (start && !run_q) begin
        msg_q   <= msg;
        cbc_q   <= cbc;
        run_q   <= 1'b1;
        issue_q <= 1'b1;
        j_q     <= '0;
        x_q     <= '0;
      end else if (run_q && aes_done) begin
        if (cbc_q) x_q <= aes_ct;
        else       pad[511 - 128*j_q -: 128] <= aes_ct;
        if (j_q == (cbc_q ? 3'd4 : 3'd3)) begin
          run_q <= 1'b0;
          done  <= 1'b1;
          if (cbc_q) mac <= aes_ct[127:64];
        end else begin
          j_q     <= j_q + 3'd1;
          issue_q <= 1'b1;
        end
      end
    end
  end

endmodule
