// tb_iceclave_top: end-to-end test of the controller at its full size
// (16 MB under the memory encryption engine, 1024 mapping entries).
//
// A DRAM model answers the engine's memory port with random stalls. The test
//   1. configures keys, seed and TZASC boundaries from the secure world and
//      checks that a normal-world configuration write is refused;
//   2. loads two flash pages through the stream cipher (each bus beat must be
//      data ^ Trivium(key, bus IV), the IV must carry the PPA) into TEE pages
//      while the engine back-pressures the flash stream;
//   3. reads the lines back from the normal world and compares them with the
//      flash data, writes and re-reads a line;
//   4. exercises the permission rules: protected and secure descriptors,
//      a TZASC-protected address, a normal-world permission change, an
//      address outside the protected span;
//   5. switches a page to read-only and back (re-encryption each time), and
//      stores 64 times into one line so its minor counter wraps;
//   6. tampers with DRAM and expects an integrity error;
//   7. runs mapping-table lookups: hit, miss, violation, SetIDBits, and a
//      refused normal-world fill.
// Every mechanism is counted, counter-cache hits among them, and the test
// fails if one never happened.
// The mechanisms are the ones the published design names; the scenario
// (keys, region bases, addresses, data patterns) is this testbench's own.
// Cycle checks: the check path answers a refused request within 5 cycles,
// and a verified line read completes within 1000 cycles.
module tb_iceclave_top;
  import iceclave_pkg::*;
  import tb_trivium_ref_pkg::*;

  localparam int unsigned PAGES  = 4096;
  localparam int unsigned MEM_AW = $clog2(PAGES) + 7;

  logic clk = 0, rst_n = 0;
  world_e cfg_world = WORLD_SECURE;
  logic cfg_stream_key_we = 0, cfg_seed_we = 0, cfg_mee_key_we = 0;
  logic cfg_tzasc_we = 0, cfg_tzasc_sel = 0, cfg_err, mee_init_start = 0, mee_init_done;
  logic [KEY_W-1:0] cfg_stream_key = 0;
  logic [IV0_W-1:0] cfg_seed = 0;
  logic [127:0] cfg_mee_key = 0;
  logic [31:0] cfg_tzasc_data = 0;
  logic cpu_req_valid = 0, cpu_req_ready;
  mee_op_e cpu_req_op = MEE_READ;
  logic [31:0] cpu_req_addr = 0;
  world_e cpu_req_world = WORLD_NORMAL;
  logic [63:0] cpu_req_pte = 0;
  logic [LINE_W-1:0] cpu_req_wdata = 0, cpu_resp_rdata;
  logic cpu_resp_valid, cpu_resp_fault, cpu_resp_integrity, cpu_resp_reenc;
  logic mee_cc_hit;
  logic xl_valid = 0, xl_resp_valid;
  logic [LPA_W-1:0] xl_lpa = 0;
  logic [ID_W-1:0] xl_id = 0;
  xlate_e xl_status;
  logic [PPA_W-1:0] xl_ppa;
  logic ftl_fill_valid = 0, rt_setid_valid = 0, map_wr_err;
  world_e ftl_fill_world = WORLD_SECURE, rt_setid_world = WORLD_SECURE;
  logic [LPA_W-1:0] ftl_fill_lpa = 0, rt_setid_lpa = 0;
  logic [PPA_W-1:0] ftl_fill_ppa = 0;
  logic [ID_W-1:0] ftl_fill_id = 0, rt_setid_id = 0;
  logic fl_page_start = 0, fl_valid = 0, fl_ready, fl_line_done;
  logic [PPA_W-1:0] fl_ppa = 0;
  logic [$clog2(PAGES)-1:0] fl_dest_page = 0;
  logic [KS_W-1:0] fl_data = 0;
  logic bus_iv_valid, bus_valid;
  logic [IV_W-1:0] bus_iv;
  logic [KS_W-1:0] bus_data;
  logic mem_valid, mem_ready = 0, mem_we, mem_rvalid = 0;
  logic [MEM_AW-1:0] mem_addr;
  logic [NODE_W-1:0] mem_wdata, mem_rdata = 0;

  iceclave_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_stall = 0, n_reenc = 0, n_mode = 0, n_pte_fault = 0, n_tz_fault = 0;
  int n_window = 0, n_integ = 0, n_hit = 0, n_miss = 0, n_viol = 0;
  int n_map_err = 0, n_cfg_err = 0, n_lines = 0, n_cc_hit = 0;
  trivium_ref r = new();

  localparam logic [79:0]  SKEY = 80'h1CEC_1A7E_5EED_0BAD_CAFE;
  localparam logic [127:0] MKEY = 128'h2B7E_1516_28AE_D2A6_ABF7_1588_09CF_4F3C;
  localparam logic [63:0] PTE_RW  = (64'd1 << 55) | (64'b01 << 6) | (64'd1 << 5);
  localparam logic [63:0] PTE_RO  = (64'd1 << 55) | (64'b11 << 6) | (64'd1 << 5);
  localparam logic [63:0] PTE_PROT = (64'b01 << 6) | (64'd1 << 5);
  localparam logic [63:0] PTE_SEC = 64'd0;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  // ---------------------------------------------------------------- DRAM
  logic [NODE_W-1:0] dram [bit [MEM_AW-1:0]];
  always @(posedge clk) begin
    mem_rvalid <= 1'b0;
    if (mem_valid && mem_ready) begin
      if (mem_we) dram[mem_addr] = mem_wdata;
      else begin
        mem_rvalid <= 1'b1;
        mem_rdata  <= dram.exists(mem_addr) ? dram[mem_addr] : '0;
      end
    end
    mem_ready <= ($urandom % 4) != 0;
  end

  // ---------------------------------------------------------------- counters
  always @(posedge clk) if (rst_n) begin
    if (fl_valid && !fl_ready) n_stall++;
    if (fl_line_done) n_lines++;
    if (mee_cc_hit) n_cc_hit++;
    if (map_wr_err) n_map_err++;
    if (cfg_err) n_cfg_err++;
    if (xl_resp_valid) begin
      if (xl_status == XLATE_HIT) n_hit++;
      if (xl_status == XLATE_MISS) n_miss++;
      if (xl_status == XLATE_VIOLATION) n_viol++;
    end
  end

  function automatic logic [63:0] plain(int pg, int beat);
    return {16'hF1A5, 16'(pg), 32'(beat * 32'h9E37_79B9)};
  endfunction

  // one CPU request; returns the response and the cycles it took
  task automatic cpu(input mee_op_e op, input world_e w, input logic [63:0] pte,
                     input logic [31:0] addr, input logic [LINE_W-1:0] wd,
                     output logic [LINE_W-1:0] rd, output logic f, output logic ie,
                     output logic re, output int cyc);
    cpu_req_op = op; cpu_req_world = w; cpu_req_pte = pte; cpu_req_addr = addr;
    cpu_req_wdata = wd; cpu_req_valid = 1;
    do @(posedge clk); while (!cpu_req_ready);
    #1 cpu_req_valid = 0;
    cyc = 0;
    do begin @(posedge clk); cyc++; end while (!cpu_resp_valid);
    rd = cpu_resp_rdata; f = cpu_resp_fault; ie = cpu_resp_integrity; re = cpu_resp_reenc;
    if (re) n_reenc++;
    if (ie) n_integ++;
    #1;
  endtask

  // load a flash page (PPA pp) into TEE page pg
  task automatic flash_page(input logic [31:0] pp, input int pg);
    int n = 0, lines0;
    lines0 = n_lines;
    @(negedge clk);
    fl_ppa = pp; fl_dest_page = pg[$clog2(PAGES)-1:0]; fl_page_start = 1;
    @(negedge clk); fl_page_start = 0;
    chk(bus_iv_valid && bus_iv[31:0] == pp, "bus IV carries the PPA");
    r.init(SKEY, bus_iv);
    while (n < 512) begin
      fl_valid = 1; fl_data = plain(pg, n);
      #1;
      if (fl_ready) begin
        chk(bus_valid && bus_data == (plain(pg, n) ^ r.word()),
            $sformatf("page %0d bus beat %0d is ciphertext", pg, n));
        chk(bus_data != plain(pg, n) || n == 0, "bus never shows plaintext");
        n++;
      end
      @(negedge clk);
    end
    fl_valid = 0;
    while (n_lines - lines0 < 64) @(negedge clk);
    chk(n_lines - lines0 == 64, "64 lines written per page");
  endtask

  function automatic logic [LINE_W-1:0] flash_line(int pg, int l);
    logic [LINE_W-1:0] v;
    for (int j = 0; j < 8; j++) v[64*j +: 64] = plain(pg, 8*l + j);
    return v;
  endfunction

  function automatic logic [31:0] la(int pg, int l);
    return 32'(pg * 4096 + l * 64);
  endfunction

  task automatic map_op(input int kind, input world_e w, input logic [31:0] lpa,
                        input logic [31:0] ppa, input logic [3:0] id);
    @(negedge clk);
    if (kind == 0) begin
      ftl_fill_valid = 1; ftl_fill_world = w; ftl_fill_lpa = lpa; ftl_fill_ppa = ppa; ftl_fill_id = id;
    end else if (kind == 1) begin
      rt_setid_valid = 1; rt_setid_world = w; rt_setid_lpa = lpa; rt_setid_id = id;
    end else begin
      xl_valid = 1; xl_lpa = lpa; xl_id = id;
    end
    @(negedge clk);
    ftl_fill_valid = 0; rt_setid_valid = 0; xl_valid = 0;
  endtask

  initial begin
    logic [LINE_W-1:0] rd, wd;
    logic f, ie, re;
    int cyc;
    repeat (3) @(negedge clk); rst_n = 1;

    // 1. secure configuration
    cfg_world = WORLD_SECURE;
    cfg_stream_key_we = 1; cfg_stream_key = SKEY;
    cfg_seed_we = 1; cfg_seed = 48'h5EED_1234_5678;
    cfg_mee_key_we = 1; cfg_mee_key = MKEY;
    cfg_tzasc_we = 1; cfg_tzasc_sel = 0; cfg_tzasc_data = 32'h0080_0000;  // protected from 8 MB
    @(negedge clk);
    cfg_stream_key_we = 0; cfg_seed_we = 0; cfg_mee_key_we = 0;
    cfg_tzasc_sel = 1; cfg_tzasc_data = 32'h00C0_0000;                    // secure from 12 MB
    @(negedge clk);
    cfg_world = WORLD_NORMAL; cfg_tzasc_sel = 0; cfg_tzasc_data = 32'h0;   // refused
    @(negedge clk);
    cfg_tzasc_we = 0; cfg_world = WORLD_SECURE;
    @(negedge clk);
    chk(n_cfg_err == 1, "normal-world TZASC write refused");
    mee_init_start = 1; @(negedge clk); mee_init_start = 0;
    while (!mee_init_done) @(negedge clk);

    // 2. flash pages into TEE pages 2 and 7
    flash_page(32'h0012_3400, 2);
    flash_page(32'h0ABC_DE01, 7);
    chk(n_stall > 0, "flash stream was back-pressured");

    // 3. read back from the normal world
    for (int l = 0; l < 64; l += 9) begin
      cpu(MEE_READ, WORLD_NORMAL, PTE_RW, la(2, l), '0, rd, f, ie, re, cyc);
      chk(!f && !ie && rd == flash_line(2, l), $sformatf("page 2 line %0d from flash", l));
      chk(cyc < 1000, $sformatf("verified read took %0d cycles", cyc));
    end
    cpu(MEE_READ, WORLD_NORMAL, PTE_RW, la(7, 63), '0, rd, f, ie, re, cyc);
    chk(!f && !ie && rd == flash_line(7, 63), "page 7 line 63 from flash");
    wd = {16{32'hD00D_F00D}};
    cpu(MEE_WRITE, WORLD_NORMAL, PTE_RW, la(2, 4), wd, rd, f, ie, re, cyc);
    chk(!f && !ie, "normal-world store");
    cpu(MEE_READ, WORLD_NORMAL, PTE_RW, la(2, 4), '0, rd, f, ie, re, cyc);
    chk(rd == wd, "stored line read back");

    // 4. permission rules
    cpu(MEE_WRITE, WORLD_NORMAL, PTE_PROT, la(2, 1), wd, rd, f, ie, re, cyc);
    chk(f, "normal world may not write a protected page"); n_pte_fault += f;
    chk(cyc <= 5, $sformatf("refusal after %0d cycles", cyc));
    cpu(MEE_READ, WORLD_NORMAL, PTE_SEC, la(2, 1), '0, rd, f, ie, re, cyc);
    chk(f && rd == '0, "normal world may not read a secure page"); n_pte_fault += f;
    cpu(MEE_READ, WORLD_SECURE, PTE_SEC, la(2, 1), '0, rd, f, ie, re, cyc);
    chk(!f && rd == flash_line(2, 1), "secure world reads any page");
    cpu(MEE_WRITE, WORLD_NORMAL, PTE_RW, 32'h0090_0000, wd, rd, f, ie, re, cyc);
    chk(f, "TZASC refuses a normal-world write above the protected base"); n_tz_fault += f;
    cpu(MEE_READ, WORLD_NORMAL, PTE_RW, 32'h00D0_0000, '0, rd, f, ie, re, cyc);
    chk(f, "TZASC refuses a normal-world read of the secure region"); n_tz_fault += f;
    cpu(MEE_TO_RO, WORLD_NORMAL, PTE_RW, la(2, 0), '0, rd, f, ie, re, cyc);
    chk(f, "normal world may not change page permissions"); n_pte_fault += f;
    cpu(MEE_READ, WORLD_SECURE, PTE_RW, 32'h0100_0000, '0, rd, f, ie, re, cyc);
    chk(f, "address outside the protected span refused"); n_window += f;

    // 5. mode switches and minor-counter overflow
    cpu(MEE_TO_RO, WORLD_SECURE, PTE_RW, la(7, 0), '0, rd, f, ie, re, cyc);
    chk(!f && !ie && re, "page 7 made read-only, re-encrypted"); n_mode += !f;
    cpu(MEE_READ, WORLD_NORMAL, PTE_RO, la(7, 5), '0, rd, f, ie, re, cyc);
    chk(!f && !ie && rd == flash_line(7, 5), "read-only page reads through the major tree");
    cpu(MEE_WRITE, WORLD_NORMAL, PTE_RO, la(7, 5), wd, rd, f, ie, re, cyc);
    chk(f, "store to a read-only page refused"); n_pte_fault += f;
    cpu(MEE_READ, WORLD_NORMAL, PTE_RW, la(7, 5), '0, rd, f, ie, re, cyc);
    chk(ie, "reading a read-only page through the split tree fails");
    cpu(MEE_TO_RW, WORLD_SECURE, PTE_RO, la(7, 0), '0, rd, f, ie, re, cyc);
    chk(!f && !ie && re, "page 7 writable again, re-encrypted"); n_mode += !f;
    cpu(MEE_READ, WORLD_NORMAL, PTE_RW, la(7, 5), '0, rd, f, ie, re, cyc);
    chk(!f && !ie && rd == flash_line(7, 5), "page 7 data kept across both switches");
    for (int i = 1; i <= 64; i++) begin
      wd = {16{32'(i)}};
      cpu(MEE_WRITE, WORLD_NORMAL, PTE_RW, la(7, 9), wd, rd, f, ie, re, cyc);
      chk(!f && !ie && re == (i == 64), $sformatf("store %0d: re-encryption only on the wrap", i));
    end
    cpu(MEE_READ, WORLD_NORMAL, PTE_RW, la(7, 9), '0, rd, f, ie, re, cyc);
    chk(!ie && rd == {16{32'd64}}, "last store kept");
    cpu(MEE_READ, WORLD_NORMAL, PTE_RW, la(7, 10), '0, rd, f, ie, re, cyc);
    chk(!ie && rd == flash_line(7, 10), "neighbour line survives page re-encryption");

    // 6. tampering with DRAM
    begin
      bit [MEM_AW-1:0] a;
      a = MEM_AW'(2 * 64 + 20);                 // page 2 line 20
      dram[a][300] = ~dram[a][300];
      cpu(MEE_READ, WORLD_NORMAL, PTE_RW, la(2, 20), '0, rd, f, ie, re, cyc);
      chk(ie, "flipped ciphertext bit detected");
      dram[a][300] = ~dram[a][300];
      cpu(MEE_READ, WORLD_NORMAL, PTE_RW, la(2, 20), '0, rd, f, ie, re, cyc);
      chk(!ie && rd == flash_line(2, 20), "restored line verifies");
    end

    // 7. mapping table
    map_op(0, WORLD_SECURE, 32'h100, 32'h0012_3400, 4'd3);
    map_op(2, WORLD_NORMAL, 32'h100, 0, 4'd3);
    chk(xl_status == XLATE_HIT && xl_ppa == 32'h0012_3400, "own entry hits");
    map_op(2, WORLD_NORMAL, 32'h100, 0, 4'd5);
    chk(xl_status == XLATE_VIOLATION && xl_ppa == 0, "other TEE's entry is a violation");
    map_op(2, WORLD_NORMAL, 32'h101, 0, 4'd3);
    chk(xl_status == XLATE_MISS, "unfilled entry misses");
    map_op(1, WORLD_SECURE, 32'h100, 0, 4'd5);
    map_op(2, WORLD_NORMAL, 32'h100, 0, 4'd5);
    chk(xl_status == XLATE_HIT, "SetIDBits hands the entry over");
    map_op(0, WORLD_NORMAL, 32'h102, 32'h77, 4'd5);
    @(negedge clk);
    chk(n_map_err == 1, "normal-world fill refused");
    map_op(2, WORLD_NORMAL, 32'h102, 0, 4'd5);
    chk(xl_status == XLATE_MISS, "refused fill left no entry");
    @(negedge clk);

    // every mechanism must have happened
    chk(n_stall > 0, "mechanism: flash back-pressure stall");
    chk(n_lines == 128, "mechanism: flash lines into DRAM");
    chk(n_reenc >= 3, "mechanism: page re-encryption (2 switches + overflow)");
    chk(n_mode == 2, "mechanism: permission mode switches");
    chk(n_pte_fault == 4, "mechanism: descriptor faults");
    chk(n_tz_fault == 2, "mechanism: TZASC refusals");
    chk(n_window == 1, "mechanism: out-of-span refusal");
    chk(n_integ >= 2, "mechanism: integrity failures");
    chk(n_hit == 2 && n_miss == 2 && n_viol == 1, "mechanism: mapping hit / miss / violation");
    chk(n_cfg_err == 1, "mechanism: refused configuration");
    chk(n_cc_hit > 0, "mechanism: counter-cache hit");
    $display("stalls=%0d cc_hits=%0d reenc=%0d modes=%0d pte=%0d tz=%0d integ=%0d hit=%0d miss=%0d viol=%0d",
             n_stall, n_cc_hit, n_reenc, n_mode, n_pte_fault, n_tz_fault, n_integ, n_hit, n_miss, n_viol);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5_000_000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
