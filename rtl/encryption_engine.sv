// encryption_engine: flash-side half of the stream cipher engine.
//
// When the flash controller starts delivering a page from its page buffer,
// the engine asks the IV generator for a fresh IV ({48-bit random base,
// 32-bit PPA}), restarts its cipher lane with that IV and the secret key, and
// XORs every 64-bit beat of the page with the keystream. The IV is sent ahead
// of the page on the (unsecure) internal bus so the DRAM-side decryption
// engine can regenerate the same keystream. Block structure is the paper's;
// the handshakes, and holding the page's beats off from page_start until
// the lane has restarted, are this design's.
//
// Interface: `page_start` with `ppa` (one cycle) opens a page. `iv_valid`
// pulses one cycle later with `iv_out`. Beats flow on in_*/out_* once the
// cipher has warmed up (about 20 cycles after page_start), one per cycle.
module encryption_engine
  import iceclave_pkg::*;
#(
  parameter int unsigned BUF_DEPTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             key_we,
  input  world_e           key_world,
  input  logic [KEY_W-1:0] key_in,
  input  logic             seed_we,
  input  logic [IV0_W-1:0] seed,
  input  logic             page_start,
  input  logic [PPA_W-1:0] ppa,
  output logic             iv_valid,
  output logic [IV_W-1:0]  iv_out,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [KS_W-1:0]  in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [KS_W-1:0]  out_data
);

  logic seed_ok, opening, lane_in_ready;
  assign seed_ok = seed_we && key_world == WORLD_SECURE;
  // between page_start and the lane restart no beat may use the old keystream
  assign opening  = page_start || iv_valid;
  assign in_ready = lane_in_ready && !opening;

  iv_generator u_ivgen (
    .clk, .rst_n, .seed_we(seed_ok), .seed, .req(page_start), .ppa,
    .iv_valid, .iv(iv_out)
  );

  cipher_lane #(.BUF_DEPTH(BUF_DEPTH)) u_lane (
    .clk, .rst_n, .key_we, .key_world, .key_in,
    .start(iv_valid), .iv(iv_out),
    .in_valid(in_valid && !opening), .in_ready(lane_in_ready), .in_data,
    .out_valid, .out_ready, .out_data
  );

endmodule
