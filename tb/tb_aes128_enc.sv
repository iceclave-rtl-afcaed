// tb_aes128_enc: FIPS-197 and SP 800-38A known-answer vectors, back-to-back
// operations, the 10-cycle latency, and that a start while busy is ignored.
module tb_aes128_enc;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [127:0] key = 0, pt = 0, ct;
  int checks = 0, failures = 0;

  aes128_enc dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic run(input logic [127:0] k, input logic [127:0] p, input logic [127:0] e);
    int cyc = 0;
    @(negedge clk); start = 1; key = k; pt = p;
    @(negedge clk); start = 0;
    // a second start while busy must not disturb the operation
    start = 1; key = ~k; pt = ~p; @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    chk(ct == e, $sformatf("ct %h exp %h", ct, e));
    chk(cyc == 10, $sformatf("latency %0d", cyc));
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    run(128'h000102030405060708090a0b0c0d0e0f, 128'h00112233445566778899aabbccddeeff,
        128'h69c4e0d86a7b0430d8cdb78070b4c55a);
    run(128'h2b7e151628aed2a6abf7158809cf4f3c, 128'h6bc1bee22e409f96e93d7e117393172a,
        128'h3ad77bb40d7a3660a89ecaf32466ef97);
    run(128'h2b7e151628aed2a6abf7158809cf4f3c, 128'hae2d8a571e03ac9c9eb76fac45af8e51,
        128'hf5d3d58503b9699de785895a96fdbaaf);
    run(128'h2b7e151628aed2a6abf7158809cf4f3c, 128'h30c81c46a35ce411e5fbc1191a0a52ef,
        128'h43b1cd7f598ece23881b00e3ed030688);
    run(128'h2b7e151628aed2a6abf7158809cf4f3c, 128'hf69f2445df4f9b17ad2b417be66c3710,
        128'h7b0c785e27e8ad3f8223207104725dd4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
