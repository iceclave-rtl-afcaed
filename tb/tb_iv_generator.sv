// tb_iv_generator: IV = {48-bit PRNG draw, 32-bit PPA}, a fresh draw per page,
// valid one cycle after the request; no two IVs of a run are equal even for
// the same PPA.
module tb_iv_generator;
  logic clk = 0, rst_n = 0, seed_we = 0, req = 0, iv_valid;
  logic [47:0] seed = 0, m;
  logic [31:0] ppa = 0;
  logic [79:0] iv;
  logic [79:0] seen [$];
  int checks = 0, failures = 0;

  iv_generator dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask
  function automatic logic [47:0] adv(logic [47:0] r);
    for (int i = 0; i < 48; i++) r = {r[46:0], r[47] ^ r[46] ^ r[20] ^ r[19]};
    return r;
  endfunction

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    seed_we = 1; seed = 48'h0000_DEAD_BEEF; @(negedge clk); seed_we = 0;
    m = 48'h0000_DEAD_BEEF;
    for (int i = 0; i < 100; i++) begin
      req = 1; ppa = (i % 10 == 0) ? 32'h42 : $urandom;
      m = adv(m);
      @(negedge clk); req = 0;
      chk(iv_valid, "iv_valid one cycle after req");
      chk(iv == {m, ppa}, $sformatf("iv %h exp %h", iv, {m, ppa}));
      foreach (seen[j]) if (seen[j] == iv) chk(0, "IV reused");
      seen.push_back(iv);
      @(negedge clk);
      chk(!iv_valid && iv == {m, ppa}, "iv held, valid dropped");
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
