// tb_counter_cache: random writes, lookups and clears against a model.
// The model keeps, per entry, the key and data last written and a valid bit;
// a lookup must hit exactly when the entry is valid, holds the same key and
// was not written in the lookup's own cycle, and a hit must return the data
// last written for that key. Lookups are checked one cycle after the key is
// presented. Keys are drawn from a range four times the cache size so that
// entries are evicted and tags compared; a directed part checks that two
// keys sharing an entry evict each other. The cache is run at 16 entries;
// sizes, keys and data are this testbench's own.
module tb_counter_cache;
  localparam int unsigned ENTRIES = 16;
  localparam int unsigned KW = 6;
  localparam int unsigned DW = 40;

  logic clk = 0, rst_n = 0, clear = 0, wr_en = 0, rd_hit;
  logic [KW-1:0] wr_key = 0, rd_key = 0;
  logic [DW-1:0] wr_data = 0, rd_data;
  int checks = 0, failures = 0, hits = 0, misses = 0;

  counter_cache #(.ENTRIES(ENTRIES), .KW(KW), .DW(DW)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  bit            m_valid [ENTRIES];
  logic [KW-1:0] m_key   [ENTRIES];
  logic [DW-1:0] m_data  [ENTRIES];

  // one cycle: present inputs at negedge, update model at posedge, check the
  // lookup result at the next negedge
  task automatic step(input bit we, input logic [KW-1:0] wk, input logic [DW-1:0] wd,
                      input logic [KW-1:0] rk, input bit clr);
    bit exp_hit;
    logic [DW-1:0] exp_data;
    int ri;
    ri = int'(rk) % ENTRIES;
    exp_hit  = m_valid[ri] && m_key[ri] == rk && !we && !clr;
    exp_data = m_data[ri];
    wr_en = we; wr_key = wk; wr_data = wd; rd_key = rk; clear = clr;
    @(posedge clk);
    if (clr) foreach (m_valid[i]) m_valid[i] = 0;
    else if (we) begin
      m_valid[int'(wk) % ENTRIES] = 1;
      m_key[int'(wk) % ENTRIES]   = wk;
      m_data[int'(wk) % ENTRIES]  = wd;
    end
    @(negedge clk);
    chk(rd_hit == exp_hit, $sformatf("key %0d hit %0b expected %0b", rk, rd_hit, exp_hit));
    if (exp_hit) begin
      chk(rd_data == exp_data, $sformatf("key %0d data", rk));
      hits++;
    end else misses++;
    wr_en = 0; clear = 0;
  endtask

  initial begin
    foreach (m_valid[i]) begin m_valid[i] = 0; m_key[i] = 0; m_data[i] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    // empty after reset
    for (int k = 0; k < 64; k += 5) step(0, 0, 0, KW'(k), 0);
    // directed: keys 3 and 19 share entry 3
    step(1, 6'd3, 40'hAA, 6'd0, 0);
    step(0, 0, 0, 6'd3, 0);
    chk(rd_hit && rd_data == 40'hAA, "key 3 cached");
    step(1, 6'd19, 40'hBB, 6'd3, 0);
    chk(!rd_hit, "lookup in the cycle of a write misses");
    step(0, 0, 0, 6'd3, 0);
    chk(!rd_hit, "key 3 evicted by key 19");
    step(0, 0, 0, 6'd19, 0);
    chk(rd_hit && rd_data == 40'hBB, "key 19 cached");
    // random traffic
    for (int n = 0; n < 4000; n++) begin
      int r;
      r = int'($urandom % 100);
      step(r < 40, KW'($urandom), DW'({$urandom, $urandom}), KW'($urandom), r == 99);
    end
    chk(hits > 100 && misses > 100, $sformatf("hits %0d misses %0d", hits, misses));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
