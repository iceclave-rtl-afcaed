// tb_workloads: the in-storage workloads, run as far as the controller sees
// them. Each offloaded program is characterised by its share of memory
// writes among its memory accesses; the eleven ratios below are the
// published characterisation of the evaluated workloads (Arithmetic,
// Aggregate, Filter, TPC-B, TPC-C, Wordcount, TPC-H queries 1, 3, 12, 14 and
// 19). The workloads differ only in that ratio as far as this hardware is
// concerned, so one testbench runs all of them.
//
// For each workload, with its own TEE ID:
//   1. the FTL fills mapping entries for two logical pages of input data and
//      the program translates them (each must hit and return the PPA);
//   2. the two flash pages stream through the cipher into TEE pages, and are
//      switched to read-only, so they are covered by the major-counter tree;
//   3. the program makes 128 memory accesses: reads walk the input lines in
//      order (each must equal the flash data and verify), and writes, placed
//      evenly so that writes/accesses follows the workload's ratio rounded to
//      the nearest access, store intermediate results into a writable page;
//   4. the program's result line is stored, and every written line is read
//      back.
// A translation by another TEE must be refused as a violation. The average
// read and write latency of each workload is printed. The data, the TEE IDs,
// the page numbers and the access count of 128 (a full run touches
// gigabytes) are this testbench's own.
module tb_workloads;
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
  int n_reads = 0, n_writes = 0;
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

  typedef struct { string name; real ratio; } wl_t;
  wl_t wl [11] = '{
    '{"Arithmetic", 2.02e-4}, '{"Aggregate", 2.08e-4}, '{"Filter", 1.71e-4},
    '{"TPC-B", 5.19e-2}, '{"TPC-C", 9.05e-2}, '{"Wordcount", 4.61e-1},
    '{"TPC-H Q1", 6.40e-6}, '{"TPC-H Q3", 3.96e-3}, '{"TPC-H Q12", 2.99e-5},
    '{"TPC-H Q14", 3.94e-6}, '{"TPC-H Q19", 9.92e-7}};
  localparam int N_ACC = 128;

  initial begin
    logic [LINE_W-1:0] rd, wd, acc;
    logic [LINE_W-1:0] out_model [64];
    bit out_written [64];
    logic f, ie, re;
    int cyc, rcyc, wcyc, nr, nw;
    repeat (3) @(negedge clk); rst_n = 1;

    cfg_world = WORLD_SECURE;
    cfg_stream_key_we = 1; cfg_stream_key = SKEY;
    cfg_seed_we = 1; cfg_seed = 48'hA11C_E5EE_D001;
    cfg_mee_key_we = 1; cfg_mee_key = MKEY;
    @(negedge clk);
    cfg_stream_key_we = 0; cfg_seed_we = 0; cfg_mee_key_we = 0;
    mee_init_start = 1; @(negedge clk); mee_init_start = 0;
    while (!mee_init_done) @(negedge clk);

    for (int w = 0; w < 11; w++) begin
      logic [3:0] tee;
      logic [31:0] ppa [2];
      int in_pg [2], out_pg, writes_due;
      tee = 4'(1 + w % 15);
      in_pg[0] = 16 + 3 * w; in_pg[1] = 17 + 3 * w; out_pg = 18 + 3 * w;

      // 1. mapping entries of the input pages, translated by the program
      for (int i = 0; i < 2; i++) begin
        logic [31:0] lpa;
        lpa = 32'(32'h4000 + 2 * w + i);
        map_op(0, WORLD_SECURE, lpa, 32'h0100_0000 + 32'(w * 64 + i), tee);
        map_op(2, WORLD_NORMAL, lpa, 0, tee);
        chk(xl_status == XLATE_HIT, $sformatf("%s: input page %0d translates", wl[w].name, i));
        ppa[i] = xl_ppa;
        chk(ppa[i] == 32'h0100_0000 + 32'(w * 64 + i), "translation returns the filled PPA");
      end
      map_op(2, WORLD_NORMAL, 32'(32'h4000 + 2 * w), 0, tee ^ 4'hF);
      chk(xl_status == XLATE_VIOLATION, "another TEE may not translate the program's pages");

      // 2. input pages from flash, then read-only
      for (int i = 0; i < 2; i++) begin
        flash_page(ppa[i], in_pg[i]);
        cpu(MEE_TO_RO, WORLD_SECURE, PTE_RW, la(in_pg[i], 0), '0, rd, f, ie, re, cyc);
        chk(!f && !ie && re, "input page made read-only");
        n_mode += !f;
      end

      // 3. the program's accesses
      foreach (out_written[i]) begin out_written[i] = 0; out_model[i] = '0; end
      acc = '0; rcyc = 0; wcyc = 0; nr = 0; nw = 0;
      for (int a = 0; a < N_ACC; a++) begin
        writes_due = int'(wl[w].ratio * real'(a + 1));
        if (nw < writes_due) begin
          wd = acc ^ LINE_W'(a);
          cpu(MEE_WRITE, WORLD_NORMAL, PTE_RW, la(out_pg, nw % 64), wd, rd, f, ie, re, cyc);
          chk(!f && !ie, $sformatf("%s: store %0d", wl[w].name, nw));
          out_model[nw % 64] = wd; out_written[nw % 64] = 1;
          wcyc += cyc; nw++;
        end else begin
          int pg, l;
          pg = in_pg[(nr / 64) % 2]; l = nr % 64;
          cpu(MEE_READ, WORLD_NORMAL, PTE_RO, la(pg, l), '0, rd, f, ie, re, cyc);
          chk(!f && !ie && rd == flash_line(pg, l), $sformatf("%s: read page %0d line %0d", wl[w].name, pg, l));
          acc = acc ^ rd;
          rcyc += cyc; nr++;
        end
      end

      // 4. result line, then read back what was written
      cpu(MEE_WRITE, WORLD_NORMAL, PTE_RW, la(out_pg, 63), acc, rd, f, ie, re, cyc);
      chk(!f && !ie, "result stored");
      out_model[63] = acc; out_written[63] = 1;
      for (int l = 0; l < 64; l++) if (out_written[l]) begin
        cpu(MEE_READ, WORLD_NORMAL, PTE_RW, la(out_pg, l), '0, rd, f, ie, re, cyc);
        chk(!f && !ie && rd == out_model[l], $sformatf("%s: output line %0d read back", wl[w].name, l));
      end
      chk(nw == int'(wl[w].ratio * real'(N_ACC)), "write count follows the ratio");
      n_reads += nr; n_writes += nw;
      $display("%-10s ratio %e: %0d reads (avg %0d cycles), %0d writes (avg %0d cycles)",
               wl[w].name, wl[w].ratio, nr, nr > 0 ? rcyc / nr : 0, nw, nw > 0 ? wcyc / nw : 0);
    end

    chk(n_lines == 22 * 64, "all input lines reached protected memory");
    chk(n_stall > 0, "flash stream back-pressured");
    chk(n_mode == 22, "every input page switched to read-only");
    chk(n_hit == 22 && n_viol == 11, "translations: hits and violations");
    chk(n_writes > 0, "some workload wrote intermediate data");
    chk(n_cc_hit > 0, "counter cache served reads");
    $display("reads=%0d writes=%0d stalls=%0d cc_hits=%0d", n_reads, n_writes, n_stall, n_cc_hit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20_000_000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
