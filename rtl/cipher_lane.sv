// cipher_lane: keystream generator, stream buffer and XOR of one cipher engine.
//
// This is the datapath of both cipher engines: the Trivium core is keyed with
// the secret key (held in a register loaded only from the secure world) and an
// IV, warms up for 18 cycles, then fills the stream buffer with one 64-bit
// keystream word per cycle. Each 64-bit data beat is XORed with the head word
// of the buffer. Encryption and decryption are the same operation; the
// decryption engine at the DRAM side uses the IV that travelled with the
// ciphered page. Structure (cipher, buffer, XOR) and the 64-bit rate are the
// paper's; the handshakes, the key-register write port and restarting the
// keystream per page (`start`) are this design's choices.
//
// Interface: key_we/key_world load the key (ignored unless secure).
// `start` with `iv` begins a new page: the buffer is flushed and the core is
// re-initialised. Data enters on in_valid/in_ready and leaves on
// out_valid/out_ready; a beat passes in the cycle it is accepted
// (combinational XOR), so after warm-up a page of N beats takes N cycles.
module cipher_lane
  import iceclave_pkg::*;
#(
  parameter int unsigned BUF_DEPTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             key_we,
  input  world_e           key_world,
  input  logic [KEY_W-1:0] key_in,
  input  logic             start,
  input  logic [IV_W-1:0]  iv,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [KS_W-1:0]  in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [KS_W-1:0]  out_data
);

  logic [KEY_W-1:0] key_q;
  logic             ks_valid, ks_ready, busy;
  logic [KS_W-1:0]  ks;
  logic             buf_valid;
  logic [KS_W-1:0]  buf_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                      key_q <= '0;
    else if (key_we && key_world == WORLD_SECURE)    key_q <= key_in;
  end

  trivium64 u_core (
    .clk, .rst_n, .load(start), .key(key_q), .iv,
    .busy, .ks_valid, .ks_ready, .ks
  );

  stream_buffer #(.W(KS_W), .DEPTH(BUF_DEPTH)) u_buf (
    .clk, .rst_n, .flush(start),
    .wr_valid(ks_valid), .wr_ready(ks_ready), .wr_data(ks),
    .rd_valid(buf_valid), .rd_ready(in_valid && out_ready && !start),
    .rd_data(buf_data)
  );

  // no beat passes in the cycle the keystream restarts: the buffer still
  // holds words of the previous IV then
  assign in_ready  = buf_valid && out_ready && !start;
  assign out_valid = buf_valid && in_valid && !start;
  assign out_data  = in_data ^ buf_data;

endmodule
