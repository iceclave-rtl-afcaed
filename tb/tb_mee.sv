// tb_mee: memory encryption engine against a plain-data model and attacks.
// A small memory model (one 576-bit word per address, one-cycle read latency,
// random request stalls) backs the engine. The test initialises the trees,
// fills a writable page, reads it back, turns it read-only and back to
// writable (whole-page re-encryption each time), wraps a minor counter
// (page re-encryption plus re-MAC of sibling blocks), and then attacks the
// memory: a flipped data bit, a flipped counter bit, a replayed line with its
// counter block, and a whole-memory rollback must all be reported, and a store
// to a read-only page refused. The memory must never hold a plain line.
// The engine runs without its counter cache (CC_ENTRIES = 0) so that every
// read fetches the counter blocks the attacks alter; the cache is checked in
// tb_counter_cache and, inside the engine, by the top-level testbenches.
module tb_mee;
  import iceclave_pkg::*;
  localparam int PAGES = 512;
  localparam int MAW   = $clog2(PAGES) + 7;
  logic clk = 0, rst_n = 0, key_we = 0, init_start = 0, init_done;
  world_e key_world = WORLD_SECURE;
  logic [127:0] key_in = 0;
  logic req_valid = 0, req_ready, req_writable = 0, resp_valid, resp_err, resp_reenc;
  mee_op_e req_op = MEE_READ;
  logic [$clog2(PAGES)+5:0] req_line = 0;
  logic [511:0] req_wdata = 0, resp_rdata;
  logic cc_hit;
  logic mem_valid, mem_ready = 1, mem_we, mem_rvalid = 0;
  logic [MAW-1:0] mem_addr;
  logic [575:0] mem_wdata, mem_rdata = 0;
  int checks = 0, failures = 0, reencs = 0, writes_seen = 0;
  logic [575:0] mem [int];
  logic [511:0] plain [int];

  mee #(.PAGES(PAGES), .CC_ENTRIES(0)) dut (.*);
  always #5 clk = ~clk;

  // memory model
  always @(posedge clk) begin
    mem_rvalid <= 1'b0;
    if (mem_valid && mem_ready) begin
      if (mem_we) begin
        mem[int'(mem_addr)] = mem_wdata;
        writes_seen++;
      end else begin
        mem_rvalid <= 1'b1;
        mem_rdata  <= mem.exists(int'(mem_addr)) ? mem[int'(mem_addr)] : '0;
      end
    end
  end
  always @(negedge clk) mem_ready = ($urandom % 4) != 0;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic op(input mee_op_e o, input int pg, input int ln, input bit wr,
                    input logic [511:0] wd, output logic [511:0] rd,
                    output bit err, output bit reenc);
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1; req_op = o; req_line = {9'(pg), 6'(ln)}; req_writable = wr; req_wdata = wd;
    @(negedge clk); req_valid = 0;
    while (!resp_valid) @(negedge clk);
    rd = resp_rdata; err = resp_err; reenc = resp_reenc;
    if (reenc) reencs++;
  endtask

  function automatic int node_addr(int t, int k, int idx);
    return (1 << (MAW - 1)) | (t << 12) | (k << 9) | idx;
  endfunction

  logic [511:0] rd, wd;
  bit err, re;
  logic [575:0] saved [int];
  logic [575:0] sv_line, sv_node;

  task automatic rd_chk(input int pg, input int ln, input bit wr, input string m);
    op(MEE_READ, pg, ln, wr, '0, rd, err, re);
    chk(!err && rd == plain[pg*64+ln], $sformatf("%s: page %0d line %0d", m, pg, ln));
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    key_we = 1; key_in = 128'h0011_2233_4455_6677_8899_AABB_CCDD_EEFF;
    @(negedge clk); key_we = 0;
    init_start = 1; @(negedge clk); init_start = 0;
    while (!init_done) @(negedge clk);
    // fill pages 3 and 5 (writable)
    foreach (plain[i]) ;
    for (int p = 3; p <= 5; p += 2)
      for (int l = 0; l < 64; l++) begin
        wd = {16{$urandom}};
        plain[p*64+l] = wd;
        op(MEE_WRITE, p, l, 1, wd, rd, err, re);
        chk(!err, "write accepted");
        chk(mem[p*64+l][575:64] != wd, "line stored encrypted");
      end
    chk(reencs == 0, "no re-encryption yet");
    for (int l = 0; l < 64; l += 5) rd_chk(3, l, 1, "readback");
    // page 3 becomes read-only
    op(MEE_TO_RO, 3, 0, 0, '0, rd, err, re);
    chk(!err && re, "to read-only re-encrypts");
    for (int l = 0; l < 64; l += 3) rd_chk(3, l, 0, "read-only read");
    op(MEE_READ, 3, 7, 1, '0, rd, err, re);
    chk(err, "read through the wrong tree is detected");
    op(MEE_WRITE, 3, 7, 0, '1, rd, err, re);
    chk(err, "store to read-only page refused");
    rd_chk(3, 7, 0, "page intact after refused store");
    // and back to writable
    op(MEE_TO_RW, 3, 0, 1, '0, rd, err, re);
    chk(!err && re, "to writable re-encrypts");
    for (int l = 0; l < 64; l += 7) rd_chk(3, l, 1, "writable again");
    // wrap the minor counter of line 9: 64 stores
    for (int i = 0; i < 64; i++) begin
      wd = {16{$urandom}};
      plain[3*64+9] = wd;
      op(MEE_WRITE, 3, 9, 1, wd, rd, err, re);
      chk(!err, "store");
      chk(re == (i == 63), $sformatf("store %0d re-encryption flag %b", i, re));
    end
    for (int l = 0; l < 64; l += 4) rd_chk(3, l, 1, "after minor wrap");
    rd_chk(3, 9, 1, "after minor wrap");
    for (int l = 0; l < 64; l += 9) rd_chk(5, l, 1, "sibling page after upper wrap");
    // attack 1: flip a data bit
    sv_line = mem[5*64+2];
    mem[5*64+2][300] = ~mem[5*64+2][300];
    op(MEE_READ, 5, 2, 1, '0, rd, err, re);
    chk(err && rd == '0, "flipped data bit detected, nothing returned");
    mem[5*64+2] = sv_line;
    rd_chk(5, 2, 1, "restored line");
    // attack 2: flip a counter bit in the page's split-counter block
    sv_node = mem[node_addr(1, 0, 5)];
    mem[node_addr(1, 0, 5)][64 + 2*6] = ~sv_node[64 + 2*6];
    op(MEE_READ, 5, 2, 1, '0, rd, err, re);
    chk(err, "flipped counter detected");
    mem[node_addr(1, 0, 5)] = sv_node;
    // attack 3: replay an old line together with its old counter block
    sv_line = mem[5*64+2];
    wd = {16{$urandom}};
    plain[5*64+2] = wd;
    op(MEE_WRITE, 5, 2, 1, wd, rd, err, re);
    mem[5*64+2] = sv_line;
    mem[node_addr(1, 0, 5)] = sv_node;
    op(MEE_READ, 5, 2, 1, '0, rd, err, re);
    chk(err, "replayed line + counter block detected");
    // attack 4: roll the whole memory back
    saved = mem;
    op(MEE_WRITE, 5, 4, 1, {16{32'h1234}}, rd, err, re);
    mem = saved;
    op(MEE_READ, 5, 4, 1, '0, rd, err, re);
    chk(err, "whole-memory rollback detected by the root");
    // read-only tree tamper
    mem[node_addr(0, 1, 0)][100] = ~mem[node_addr(0, 1, 0)][100];
    op(MEE_READ, 3, 0, 0, '0, rd, err, re);
    chk(err, "tampered major-counter block detected");
    chk(reencs == 3, $sformatf("page re-encryptions %0d", reencs));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
