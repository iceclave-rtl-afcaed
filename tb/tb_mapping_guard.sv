// tb_mapping_guard: translation permission checks against a reference map.
// The FTL (secure world) fills entries with owner IDs; TEEs look up LPAs: an
// owned entry must hit with the right PPA, another TEE's entry must be a
// violation with no PPA leaked, an uncached LPA a miss, and an entry evicted by
// a conflicting fill a miss. Normal-world fills and SetIDBits are refused;
// a secure SetIDBits hands an entry to a new TEE.
module tb_mapping_guard;
  import iceclave_pkg::*;
  localparam int N = 64;
  logic clk = 0, rst_n = 0;
  logic lk_valid = 0, lk_resp_valid, fill_valid = 0, setid_valid = 0, wr_err;
  logic [31:0] lk_lpa = 0, fill_lpa = 0, setid_lpa = 0, fill_ppa = 0, lk_ppa;
  logic [3:0]  lk_id = 0, fill_id = 0, setid_id = 0;
  world_e fill_world = WORLD_SECURE, setid_world = WORLD_SECURE;
  xlate_e lk_status;
  int checks = 0, failures = 0;
  // reference: per cache set the LPA held, its PPA and owner
  logic [31:0] ref_lpa [N], ref_ppa [N];
  logic [3:0]  ref_id [N];
  bit          ref_v [N];

  mapping_guard #(.ENTRIES(N)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic fill(input logic [31:0] lpa, input logic [31:0] ppa, input logic [3:0] id, input world_e w);
    @(negedge clk); fill_valid = 1; fill_lpa = lpa; fill_ppa = ppa; fill_id = id; fill_world = w;
    @(negedge clk); fill_valid = 0;
    chk(wr_err == (w != WORLD_SECURE), "fill wr_err");
    if (w == WORLD_SECURE) begin
      ref_v[lpa % N] = 1; ref_lpa[lpa % N] = lpa; ref_ppa[lpa % N] = ppa; ref_id[lpa % N] = id;
    end
  endtask

  task automatic lookup(input logic [31:0] lpa, input logic [3:0] id);
    xlate_e es; logic [31:0] ep;
    @(negedge clk); lk_valid = 1; lk_lpa = lpa; lk_id = id;
    if (!ref_v[lpa % N] || ref_lpa[lpa % N] != lpa) begin es = XLATE_MISS; ep = 0; end
    else if (ref_id[lpa % N] != id) begin es = XLATE_VIOLATION; ep = 0; end
    else begin es = XLATE_HIT; ep = ref_ppa[lpa % N]; end
    @(posedge clk); #1;
    chk(lk_resp_valid && lk_status == es && lk_ppa == ep,
        $sformatf("lpa %h id %0d: got %0d %h exp %0d %h", lpa, id, lk_status, lk_ppa, es, ep));
    @(negedge clk); lk_valid = 0;
  endtask

  int hits = 0, misses = 0, viols = 0;
  initial begin
    for (int i = 0; i < N; i++) ref_v[i] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    lookup(32'h10, 1);                          // empty table: miss
    for (int i = 0; i < 48; i++) fill(32'h1000 + i, 32'hA000 + i*7, 4'(i % 3), WORLD_SECURE);
    fill(32'h2000, 32'h5555, 4'd2, WORLD_NORMAL);   // refused
    lookup(32'h2000, 2);
    for (int i = 0; i < 300; i++) begin
      logic [31:0] lpa; logic [3:0] id;
      lpa = (i % 5 == 0) ? 32'h3000 + ($urandom % 64) : 32'h1000 + ($urandom % 48);
      id  = 4'($urandom % 3);
      lookup(lpa, id);
    end
    // conflicting fill evicts
    fill(32'h1000 + N, 32'hBEEF, 4'd1, WORLD_SECURE);
    lookup(32'h1000, 0);
    lookup(32'h1000 + N, 1);
    // SetIDBits moves entry 0x1001 (owner 1) to TEE 5
    @(negedge clk); setid_valid = 1; setid_lpa = 32'h1001; setid_id = 4'd5; setid_world = WORLD_NORMAL;
    @(negedge clk); setid_valid = 0; chk(wr_err, "normal SetIDBits refused");
    lookup(32'h1001, 1);
    @(negedge clk); setid_valid = 1; setid_world = WORLD_SECURE;
    @(negedge clk); setid_valid = 0; chk(!wr_err, "secure SetIDBits");
    ref_id[32'h1001 % N] = 5;
    lookup(32'h1001, 1);
    lookup(32'h1001, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
