// trivium64: Trivium keystream generator producing 64 keystream bits a cycle.
//
// The stream cipher engine's "Stream Cipher" box (key register, state
// register, keystream output) is the Trivium cipher: an 80-bit key and an
// 80-bit IV are loaded into a 288-bit state (three shift registers of 93, 84
// and 111 bits), the state is clocked 4 x 288 = 1152 times without output,
// and each further clock yields one keystream bit. No feedback tap lies within
// 64 positions of its register's input, so 64 clocks are unrolled into one
// cycle: initialisation takes 18 cycles and every later cycle delivers a
// 64-bit word, the rate the paper states.
//
// Interface: pulse `load` with `key`/`iv`; `busy` is high for the 18 warm-up
// cycles, then `ks_valid` stays high. `ks` is the next keystream word; it is
// consumed (and the state advanced) in a cycle with ks_valid && ks_ready.
// Bit conventions (this design's choice, the paper fixes none): key bit i-1 is
// Trivium's K_i, iv bit i-1 is IV_i, and keystream bit j of a word is the
// j-th output of that word's 64 clocks.
module trivium64
  import iceclave_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [KEY_W-1:0] key,
  input  logic [IV_W-1:0]  iv,
  output logic             busy,
  output logic             ks_valid,
  input  logic             ks_ready,
  output logic [KS_W-1:0]  ks
);

  localparam int unsigned INIT_WORDS = 1152 / KS_W;   // 18

  logic [287:0] s_q, s_next;
  logic [4:0]   warm_q;          // remaining warm-up words
  logic         ready_q;         // initialised

  // 64 unrolled Trivium clocks from s_q: next state and keystream bits
  always_comb begin
    logic [287:0] s;
    logic t1, t2, t3;
    s = s_q;
    for (int j = 0; j < KS_W; j++) begin
      t1 = s[65]  ^ s[92];
      t2 = s[161] ^ s[176];
      t3 = s[242] ^ s[287];
      ks[j] = t1 ^ t2 ^ t3;
      t1 = t1 ^ (s[90]  & s[91])  ^ s[170];
      t2 = t2 ^ (s[174] & s[175]) ^ s[263];
      t3 = t3 ^ (s[285] & s[286]) ^ s[68];
      s[92:0]    = {s[91:0], t3};
      s[176:93]  = {s[175:93], t1};
      s[287:177] = {s[286:177], t2};
    end
    s_next = s;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_q     <= '0;
      warm_q  <= '0;
      ready_q <= 1'b0;
    end else if (load) begin
      s_q     <= {3'b111, 108'd0, 4'd0, iv, 13'd0, key};
      warm_q  <= 5'(INIT_WORDS);
      ready_q <= 1'b0;
    end else if (warm_q != 0) begin
      s_q    <= s_next;
      warm_q <= warm_q - 5'd1;
      if (warm_q == 5'd1) ready_q <= 1'b1;
    end else if (ready_q && ks_ready) begin
      s_q <= s_next;
    end
  end

  assign busy     = (warm_q != 0);
  assign ks_valid = ready_q;

endmodule
