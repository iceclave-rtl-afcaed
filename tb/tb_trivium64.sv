// tb_trivium64: the 64-bit-per-cycle core against a bit-serial Trivium model.
// For several random keys and IVs, a one-bit-per-step reference (state s1..s288
// as in the Trivium specification, 1152 blank steps) produces the expected
// keystream; the core must deliver the same bits, 18 cycles after load, one
// 64-bit word per cycle, and hold its word while ks_ready is low.
module tb_trivium64;
  import iceclave_pkg::*;
  logic clk = 0, rst_n = 0, load = 0, busy, ks_valid, ks_ready = 0;
  logic [79:0] key = 0, iv = 0;
  logic [63:0] ks;
  int checks = 0, failures = 0;

  trivium64 dut (.*);
  always #5 clk = ~clk;

  bit s [1:288];
  function automatic bit step();
    bit t1, t2, t3, z;
    t1 = s[66] ^ s[93]; t2 = s[162] ^ s[177]; t3 = s[243] ^ s[288];
    z = t1 ^ t2 ^ t3;
    t1 = t1 ^ (s[91] & s[92]) ^ s[171];
    t2 = t2 ^ (s[175] & s[176]) ^ s[264];
    t3 = t3 ^ (s[286] & s[287]) ^ s[69];
    for (int i = 93; i > 1; i--) s[i] = s[i-1];
    s[1] = t3;
    for (int i = 177; i > 94; i--) s[i] = s[i-1];
    s[94] = t1;
    for (int i = 288; i > 178; i--) s[i] = s[i-1];
    s[178] = t2;
    return z;
  endfunction

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int trial = 0; trial < 6; trial++) begin
      int cyc;
      key = {16'($urandom), $urandom, $urandom};
      iv  = {16'($urandom), $urandom, $urandom};
      if (trial == 0) begin key = '0; iv = '0; end
      for (int i = 1; i <= 288; i++) s[i] = 0;
      for (int i = 1; i <= 80; i++) s[i] = key[i-1];
      for (int i = 1; i <= 80; i++) s[93+i] = iv[i-1];
      s[286] = 1; s[287] = 1; s[288] = 1;
      for (int i = 0; i < 1152; i++) void'(step());
      @(negedge clk); load = 1;
      @(negedge clk); load = 0;
      cyc = 0;
      while (!ks_valid) begin @(negedge clk); cyc++; end
      chk(cyc == 18, $sformatf("warm-up took %0d cycles after the load cycle", cyc));
      for (int w = 0; w < 40; w++) begin
        logic [63:0] exp;
        for (int j = 0; j < 64; j++) exp[j] = step();
        ks_ready = 0;
        if (w % 7 == 3) begin @(negedge clk); chk(ks == exp, "hold while not ready"); end
        ks_ready = 1;
        chk(ks_valid && ks == exp, $sformatf("trial %0d word %0d: %h exp %h", trial, w, ks, exp));
        @(negedge clk);
      end
      ks_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
