// tb_cipher_lane: one cipher engine (decryption side) end to end.
// A secure key write is accepted and a normal-world one ignored; for several
// IVs a 4 KB page (512 beats) is XORed and compared beat by beat with data ^
// reference keystream. With no stalls the page must take 512 cycles after the
// first beat (64 bits per cycle); random stalls on both sides must not lose or
// reorder beats. Restarting mid-page discards the old keystream.
module tb_cipher_lane;
  import iceclave_pkg::*;
  import tb_trivium_ref_pkg::*;
  logic clk = 0, rst_n = 0, key_we = 0, start = 0;
  world_e key_world = WORLD_SECURE;
  logic [79:0] key_in = 0, iv = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [63:0] in_data = 0, out_data;
  int checks = 0, failures = 0;
  trivium_ref r = new();

  cipher_lane dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic page(input logic [79:0] k, input logic [79:0] v, input int beats, input bit stalls);
    int sent = 0, got = 0, first = -1, cyc = 0;
    logic [63:0] d [$], ks [$];
    r.init(k, v);
    @(negedge clk); start = 1; iv = v;
    @(negedge clk); start = 0;
    while (got < beats) begin
      if (!in_valid || (in_valid && in_ready && out_ready)) begin end
      in_valid  = (sent < beats) && (!stalls || $urandom % 3 != 0);
      out_ready = !stalls || $urandom % 4 != 0;
      if (in_valid && d.size() == sent) d.push_back({$urandom, $urandom});
      in_data = d[sent];
      #1;
      if (in_valid && in_ready && out_ready) begin
        logic [63:0] w;
        w = r.word();
        chk(out_valid && out_data == (d[sent] ^ w), $sformatf("beat %0d", sent));
        chk(out_data != d[sent], "data is changed");
        if (first < 0) first = cyc;
        sent++; got++;
      end
      @(negedge clk); cyc++;
    end
    in_valid = 0;
    if (!stalls) chk(cyc - first == beats, $sformatf("%0d beats in %0d cycles", beats, cyc - first));
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); key_we = 1; key_in = 80'h0F_1E2D_3C4B_5A69_7887; key_world = WORLD_SECURE;
    @(negedge clk); key_world = WORLD_NORMAL; key_in = 80'hFFFF;   // ignored
    @(negedge clk); key_we = 0;
    page(80'h0F_1E2D_3C4B_5A69_7887, 80'h1234_5678_9ABC_0000_0001, 512, 0);
    page(80'h0F_1E2D_3C4B_5A69_7887, 80'hCAFE_F00D_0000_0000_0002, 300, 1);
    // restart in mid-page
    @(negedge clk); start = 1; iv = 80'h99; @(negedge clk); start = 0;
    repeat (5) @(negedge clk);
    page(80'h0F_1E2D_3C4B_5A69_7887, 80'hABCDEF, 64, 0);
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
