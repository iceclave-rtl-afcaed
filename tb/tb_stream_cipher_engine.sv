// tb_stream_cipher_engine: flash page -> encryption -> unsecure bus ->
// decryption -> DRAM. The DRAM side must receive exactly the flash data, in
// order, while every beat on the bus equals data ^ Trivium(key, bus IV) and
// the bus IV carries the page's PPA in its low 32 bits. A full 4 KB page
// (512 beats) with no stalls must stream at one beat per cycle after the
// warm-up; a second page runs with random DRAM back-pressure.
module tb_stream_cipher_engine;
  import iceclave_pkg::*;
  import tb_trivium_ref_pkg::*;
  logic clk = 0, rst_n = 0, key_we = 0, seed_we = 0, page_start = 0;
  world_e key_world = WORLD_SECURE;
  logic [79:0] key_in = 0, bus_iv;
  logic [47:0] seed = 0;
  logic [31:0] ppa = 0;
  logic flash_valid = 0, flash_ready, bus_iv_valid, bus_valid, dram_valid, dram_ready = 1;
  logic [63:0] flash_data = 0, bus_data, dram_data;
  int checks = 0, failures = 0;
  trivium_ref r = new();
  localparam logic [79:0] KEY = 80'hC0DE_0BAD_F00D_1234_5678;

  stream_cipher_engine dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic page(input logic [31:0] pp, input bit bp);
    int n = 0, cyc = 0, first = -1;
    logic [63:0] d;
    ppa = pp; page_start = 1;
    @(negedge clk); page_start = 0;
    chk(bus_iv_valid && bus_iv[31:0] == pp, "IV carries PPA");
    r.init(KEY, bus_iv);
    while (n < 512) begin
      d = {pp, 32'(n)} ^ 64'h0123_4567_89AB_CDEF;
      flash_valid = 1; flash_data = d;
      dram_ready = bp ? ($urandom % 3 != 0) : 1'b1;
      #1;
      if (flash_ready) begin
        chk(bus_valid && bus_data == (d ^ r.word()), $sformatf("page %h bus beat %0d ciphered", pp, n));
        chk(dram_valid && dram_data == d, $sformatf("page %h beat %0d plain", pp, n));
        if (first < 0) first = cyc;
        n++;
      end else chk(!dram_valid || !dram_ready, "no beat lost");
      @(negedge clk); cyc++;
    end
    flash_valid = 0;
    if (!bp) begin
      chk(first <= 20, $sformatf("first beat after %0d cycles", first));
      chk(cyc - first == 512, $sformatf("512 beats in %0d cycles", cyc - first));
    end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    key_we = 1; key_in = KEY; @(negedge clk); key_we = 0;
    page(32'h0000_0042, 0);
    page(32'h00AB_CDEF, 0);
    page(32'h00AB_CDE0, 1);
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
