// tb_encryption_engine: flash-side engine with its IV generator.
// Each page must be announced by an IV {PRNG draw, PPA} one cycle after
// page_start, and its beats must equal data ^ Trivium(key, that IV). The PRNG
// seed is loaded from the secure world (a normal-world seed write is
// ignored); IVs of successive pages differ.
module tb_encryption_engine;
  import iceclave_pkg::*;
  import tb_trivium_ref_pkg::*;
  logic clk = 0, rst_n = 0, key_we = 0, seed_we = 0, page_start = 0, iv_valid;
  world_e key_world = WORLD_SECURE;
  logic [79:0] key_in = 0, iv_out;
  logic [47:0] seed = 0, m;
  logic [31:0] ppa = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  logic [63:0] in_data = 0, out_data;
  int checks = 0, failures = 0;
  trivium_ref r = new();
  localparam logic [79:0] KEY = 80'h5A5A_0102_0304_0506_0708;

  encryption_engine dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask
  function automatic logic [47:0] adv(logic [47:0] x);
    for (int i = 0; i < 48; i++) x = {x[46:0], x[47] ^ x[46] ^ x[20] ^ x[19]};
    return x;
  endfunction

  initial begin
    logic [79:0] last_iv;
    repeat (2) @(negedge clk); rst_n = 1;
    key_we = 1; key_in = KEY; seed_we = 1; seed = 48'h7777_0000_1111;
    @(negedge clk); key_we = 0; seed_we = 0;
    m = 48'h7777_0000_1111;
    last_iv = '0;
    for (int p = 0; p < 4; p++) begin
      int n = 0;
      if (p == 2) begin
        // a normal-world seed write must not disturb the IV sequence
        key_world = WORLD_NORMAL; seed_we = 1; seed = 48'h0000_0000_0001;
        @(negedge clk);
        seed_we = 0; key_world = WORLD_SECURE;
      end
      ppa = 32'h100 + p;
      page_start = 1;
      m = adv(m);
      @(negedge clk); page_start = 0;
      chk(iv_valid && iv_out == {m, ppa}, $sformatf("page %0d iv %h", p, iv_out));
      chk(iv_out != last_iv, "fresh IV");
      last_iv = iv_out;
      r.init(KEY, {m, ppa});
      while (n < 128) begin
        in_valid = 1; in_data = {p[15:0], 16'(n), $urandom};
        #1;
        if (in_ready) begin
          chk(out_valid && out_data == (in_data ^ r.word()), $sformatf("page %0d beat %0d", p, n));
          n++;
        end
        @(negedge clk);
      end
      in_valid = 0;
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
