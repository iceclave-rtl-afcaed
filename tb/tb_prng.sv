// tb_prng: LFSR draws against a one-step-at-a-time model of
// x^48 + x^47 + x^21 + x^20 + 1, seed loading, zero-seed guard, and that
// consecutive draws are distinct.
module tb_prng;
  logic clk = 0, rst_n = 0, seed_we = 0, next = 0;
  logic [47:0] seed = 0, rnd, m;
  int checks = 0, failures = 0;

  prng dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask
  function automatic logic [47:0] adv(logic [47:0] r);
    for (int i = 0; i < 48; i++) begin
      logic fb;
      fb = r[47] ^ r[46] ^ r[20] ^ r[19];
      r = r << 1;
      r[0] = fb;
    end
    return r;
  endfunction

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    m = 48'hACE1_5EED_0001;
    chk(rnd == m, "reset seed");
    for (int i = 0; i < 200; i++) begin
      logic [47:0] prev;
      prev = rnd;
      next = ($urandom % 4) != 0;
      @(negedge clk);
      if (next) begin
        m = adv(m);
        chk(rnd != prev, "draw changes");
      end
      chk(rnd == m, $sformatf("draw %0d: %h exp %h", i, rnd, m));
    end
    next = 0;
    seed_we = 1; seed = 48'h1234_5678_9ABC; @(negedge clk); seed_we = 0;
    chk(rnd == 48'h1234_5678_9ABC, "seed load");
    next = 1; @(negedge clk); next = 0;
    chk(rnd == adv(48'h1234_5678_9ABC), "draw after seed");
    seed_we = 1; seed = 0; @(negedge clk); seed_we = 0;
    chk(rnd == 48'd1, "zero seed replaced");
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
