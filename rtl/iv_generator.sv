// iv_generator: per-page IV for the flash-side encryption engine.
//
// A Trivium IV is 80 bits. It is built from a 48-bit IV base IV0, drawn from
// the PRNG for every page so that it is unique in time, placed above the
// page's 32-bit physical page address, which makes it unique in space:
//     iv = {IV0, PPA}  (IV0 shifted up by 32, PPA in the low 32 bits).
// The 48/32 split and the concatenation are the paper's; drawing a fresh IV0
// on every request is this design's reading of "temporally unique".
//
// Interface: pulse `req` with the page's `ppa`; `iv_valid` pulses one cycle
// later with the IV, which also stays on `iv` until the next request.
module iv_generator
  import iceclave_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              seed_we,
  input  logic [IV0_W-1:0]  seed,
  input  logic              req,
  input  logic [PPA_W-1:0]  ppa,
  output logic              iv_valid,
  output logic [IV_W-1:0]   iv
);

  logic [IV0_W-1:0] iv0;
  logic [PPA_W-1:0] ppa_q;

  prng #(.W(IV0_W)) u_prng (
    .clk, .rst_n, .seed_we, .seed, .next(req), .rnd(iv0)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ppa_q    <= '0;
      iv_valid <= 1'b0;
    end else begin
      iv_valid <= req;
      if (req) ppa_q <= ppa;
    end
  end

  // shifter: IV0 moved above the PPA field, then combined with the PPA
  assign iv = (IV_W'(iv0) << PPA_W) | IV_W'(ppa_q);

endmodule
