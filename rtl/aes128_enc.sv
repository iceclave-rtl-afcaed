// aes128_enc: iterative AES-128 block encryption, one round per cycle.
//
// The memory encryption engine needs a block cipher twice: to turn a counter
// into a one-time pad for counter-mode encryption of a cache line, and as the
// keyed compression step of the MACs that protect the counter blocks. The
// paper names AES-128 as that cipher; this is a standard FIPS-197 encryptor.
// The S-box is computed at elaboration (multiplicative inverse in GF(2^8),
// found by walking powers of 3, followed by the affine map); the round keys
// are expanded on the fly.
//
// Interface: pulse `start` with `key` and `pt` while !busy. `busy` is high for
// the 10 rounds; `done` pulses for one cycle with `ct` valid, 10 cycles after
// start, and `ct` holds until the next start. Byte 0 of a block is bits
// [127:120]. The one-round-per-cycle structure is this design's choice.
module aes128_enc (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [127:0] key,
  input  logic [127:0] pt,
  output logic         busy,
  output logic         done,
  output logic [127:0] ct
);

  function automatic logic [7:0] xtime(logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [2047:0] gen_sbox();
    // walk the multiplicative group with generator 3: p runs over 3^i and
    // q over 3^-i, so q is the inverse of p
    logic [2047:0] t;
    logic [7:0]    p, q, s;
    t = '0;
    p = 8'd1;
    q = 8'd1;
    for (int i = 0; i < 255; i++) begin
      p = p ^ xtime(p);
      q = q ^ {q[6:0], 1'b0};
      q = q ^ {q[5:0], 2'b0};
      q = q ^ {q[3:0], 4'b0};
      if (q[7]) q = q ^ 8'h09;
      s = q ^ {q[6:0], q[7]} ^ {q[5:0], q[7:6]} ^ {q[4:0], q[7:5]}
            ^ {q[3:0], q[7:4]} ^ 8'h63;
      t[p*8 +: 8] = s;
    end
    t[7:0] = 8'h63;                       // 0 has no inverse
    return t;
  endfunction

  localparam logic [2047:0] SBOX = gen_sbox();

  function automatic logic [7:0] sb(logic [7:0] x);
    return SBOX[x*8 +: 8];
  endfunction

  // byte r,c of a block (byte index r + 4c counted from the MSB)
  function automatic logic [7:0] get(logic [127:0] s, int r, int c);
    return s[127 - 8*(r + 4*c) -: 8];
  endfunction

  function automatic logic [127:0] round_fn(logic [127:0] s, logic [127:0] rk,
                                            logic last);
    logic [127:0] o;
    logic [7:0]   a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      // SubBytes + ShiftRows
      a0 = sb(get(s, 0, c));
      a1 = sb(get(s, 1, (c + 1) % 4));
      a2 = sb(get(s, 2, (c + 2) % 4));
      a3 = sb(get(s, 3, (c + 3) % 4));
      if (last) begin
        o[127 - 32*c -: 32] = {a0, a1, a2, a3};
      end else begin
        o[127 - 32*c -: 32] = {
          xtime(a0) ^ (xtime(a1) ^ a1) ^ a2 ^ a3,
          a0 ^ xtime(a1) ^ (xtime(a2) ^ a2) ^ a3,
          a0 ^ a1 ^ xtime(a2) ^ (xtime(a3) ^ a3),
          (xtime(a0) ^ a0) ^ a1 ^ a2 ^ xtime(a3)};
      end
    end
    return o ^ rk;
  endfunction

  function automatic logic [127:0] next_key(logic [127:0] k, logic [7:0] rcon);
    logic [31:0] w0, w1, w2, w3, t;
    {w0, w1, w2, w3} = k;
    t  = {sb(w3[23:16]) ^ rcon, sb(w3[15:8]), sb(w3[7:0]), sb(w3[31:24])};
    w0 = w0 ^ t;
    w1 = w1 ^ w0;
    w2 = w2 ^ w1;
    w3 = w3 ^ w2;
    return {w0, w1, w2, w3};
  endfunction

  logic [127:0] st_q, rk_q, rk_n;
  logic [3:0]   rnd_q;
  logic [7:0]   rcon_q;

  assign rk_n = next_key(rk_q, rcon_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q   <= '0;
      rk_q   <= '0;
      rnd_q  <= '0;
      rcon_q <= 8'h01;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && rnd_q == 0) begin
        st_q   <= pt ^ key;
        rk_q   <= key;
        rcon_q <= 8'h01;
        rnd_q  <= 4'd1;
      end else if (rnd_q != 0) begin
        st_q   <= round_fn(st_q, rk_n, rnd_q == 4'd10);
        rk_q   <= rk_n;
        rcon_q <= xtime(rcon_q);
        if (rnd_q == 4'd10) begin
          rnd_q <= '0;
          done  <= 1'b1;
        end else begin
          rnd_q <= rnd_q + 4'd1;
        end
      end
    end
  end

  assign busy = (rnd_q != 0);
  assign ct   = st_q;

endmodule
