// iceclave_top: hardware of an SSD controller that hosts in-storage TEEs.
//
// The controller's processors run the FTL and the TEE runtime in the secure
// world and the offloaded programs (TEEs) in the normal world. This top
// gathers the hardware those worlds rely on:
//
//   * CPU memory path. Each request carries the requesting world and the page
//     descriptor the MMU found. pte_perm_check applies the three-region rules
//     (normal / protected / secure) of the descriptor, tzasc_filter applies
//     the same rules by physical address in the memory controller, and only a
//     request both allow reaches the memory encryption engine (mee), which
//     encrypts, MACs and tree-verifies every line it moves to or from SSD
//     DRAM. The descriptor's read-only flag picks the engine's counter tree.
//     Page permission changes (MEE_TO_RO / MEE_TO_RW) are secure-world
//     requests.
//   * Flash load path. A page read from flash enters the stream cipher engine
//     at the flash controller, crosses the internal bus encrypted (the bus is
//     exported for observation), is decrypted next to DRAM, packed into
//     64-byte lines and written through the mee into the TEE page named by
//     `fl_dest_page`, so it lands in DRAM encrypted under the TEE's counters.
//   * Translation guard. TEEs translate LPAs through mapping_guard, the
//     cached FTL mapping table with per-entry TEE IDs; misses go to the FTL
//     (secure world), which fills the entry; SetIDBits comes from the runtime.
//
// The processors, the interconnect, the flash controller, the flash chips
// and the DRAM are outside this module: their signals are its ports.
// Which blocks exist and how data flows between them follows the paper's
// architecture and workflow figures. This design's choices: the mee covers a
// 16 MB window at the bottom of DRAM (PAGES = 4096 pages, the runtime's
// default TEE allocation); CPU requests outside it are refused (cpu_fault)
// as no other DRAM traffic is modelled; one CPU request is handled at a time;
// a completed flash line has priority over a CPU request at the mee.
//
// mee_cc_hit pulses when a read was served with its counter block from the
// mee's counter cache (CC_ENTRIES blocks, 128 KB of counters by default).
//
// Timing: a CPU request takes 3 cycles of checks plus the mee operation
// (about 120 cycles for a read with a cached counter block, a few hundred
// otherwise, see mee); a flash page streams at 64 bits per cycle
// into the line packer, which stalls the stream while the mee is busy.
module iceclave_top
  import iceclave_pkg::*;
#(
  parameter int unsigned PAGES       = 4096,  // TEE memory under the mee (16 MB)
  parameter int unsigned MAP_ENTRIES = 1024,  // cached mapping-table entries
  parameter int unsigned BUF_DEPTH   = 8,     // keystream buffer words
  parameter int unsigned CC_ENTRIES  = 2048,  // mee counter cache (128 KB of blocks)
  localparam int unsigned MEM_AW     = $clog2(PAGES) + 7,
  localparam int unsigned LINE_AW    = $clog2(PAGES) + 6
) (
  input  logic                clk,
  input  logic                rst_n,
  // ---- secure-world configuration
  input  world_e              cfg_world,
  input  logic                cfg_stream_key_we,
  input  logic [KEY_W-1:0]    cfg_stream_key,
  input  logic                cfg_seed_we,
  input  logic [IV0_W-1:0]    cfg_seed,
  input  logic                cfg_mee_key_we,
  input  logic [127:0]        cfg_mee_key,
  input  logic                cfg_tzasc_we,
  input  logic                cfg_tzasc_sel,
  input  logic [31:0]         cfg_tzasc_data,
  output logic                cfg_err,
  input  logic                mee_init_start,
  output logic                mee_init_done,
  // ---- CPU memory requests (one outstanding)
  input  logic                cpu_req_valid,
  output logic                cpu_req_ready,
  input  mee_op_e             cpu_req_op,
  input  logic [31:0]         cpu_req_addr,   // byte address
  input  world_e              cpu_req_world,
  input  logic [63:0]         cpu_req_pte,
  input  logic [LINE_W-1:0]   cpu_req_wdata,
  output logic                cpu_resp_valid,
  output logic [LINE_W-1:0]   cpu_resp_rdata,
  output logic                cpu_resp_fault,     // permission fault
  output logic                cpu_resp_integrity, // mee integrity failure
  output logic                cpu_resp_reenc,     // page was re-encrypted
  output logic                mee_cc_hit,         // counter block found on chip
  // ---- TEE translation and FTL / runtime updates of the mapping table
  input  logic                xl_valid,
  input  logic [LPA_W-1:0]    xl_lpa,
  input  logic [ID_W-1:0]     xl_id,
  output logic                xl_resp_valid,
  output xlate_e              xl_status,
  output logic [PPA_W-1:0]    xl_ppa,
  input  logic                ftl_fill_valid,
  input  world_e              ftl_fill_world,
  input  logic [LPA_W-1:0]    ftl_fill_lpa,
  input  logic [PPA_W-1:0]    ftl_fill_ppa,
  input  logic [ID_W-1:0]     ftl_fill_id,
  input  logic                rt_setid_valid,
  input  world_e              rt_setid_world,
  input  logic [LPA_W-1:0]    rt_setid_lpa,
  input  logic [ID_W-1:0]     rt_setid_id,
  output logic                map_wr_err,
  // ---- flash controller (page buffer side)
  input  logic                fl_page_start,
  input  logic [PPA_W-1:0]    fl_ppa,
  input  logic [$clog2(PAGES)-1:0] fl_dest_page,
  input  logic                fl_valid,
  output logic                fl_ready,
  input  logic [KS_W-1:0]     fl_data,
  output logic                fl_line_done,       // a flash line reached DRAM
  // ---- internal (unsecure) bus, for observation
  output logic                bus_iv_valid,
  output logic [IV_W-1:0]     bus_iv,
  output logic                bus_valid,
  output logic [KS_W-1:0]     bus_data,
  // ---- SSD DRAM
  output logic                mem_valid,
  input  logic                mem_ready,
  output logic                mem_we,
  output logic [MEM_AW-1:0]   mem_addr,
  output logic [NODE_W-1:0]   mem_wdata,
  input  logic                mem_rvalid,
  input  logic [NODE_W-1:0]   mem_rdata
);

  localparam int unsigned PAGE_AW = $clog2(PAGES);

  // ------------------------------------------------------------ translation
  mapping_guard #(.ENTRIES(MAP_ENTRIES)) u_map (
    .clk, .rst_n,
    .lk_valid(xl_valid), .lk_lpa(xl_lpa), .lk_id(xl_id),
    .lk_resp_valid(xl_resp_valid), .lk_status(xl_status), .lk_ppa(xl_ppa),
    .fill_valid(ftl_fill_valid), .fill_world(ftl_fill_world),
    .fill_lpa(ftl_fill_lpa), .fill_ppa(ftl_fill_ppa), .fill_id(ftl_fill_id),
    .setid_valid(rt_setid_valid), .setid_world(rt_setid_world),
    .setid_lpa(rt_setid_lpa), .setid_id(rt_setid_id),
    .wr_err(map_wr_err)
  );

  // ------------------------------------------------------------ flash path
  logic             dram_valid, dram_ready;
  logic [KS_W-1:0]  dram_data;

  stream_cipher_engine #(.BUF_DEPTH(BUF_DEPTH)) u_sce (
    .clk, .rst_n,
    .key_we(cfg_stream_key_we), .key_world(cfg_world), .key_in(cfg_stream_key),
    .seed_we(cfg_seed_we), .seed(cfg_seed),
    .page_start(fl_page_start), .ppa(fl_ppa),
    .flash_valid(fl_valid), .flash_ready(fl_ready), .flash_data(fl_data),
    .bus_iv_valid, .bus_iv, .bus_valid, .bus_data,
    .dram_valid, .dram_ready, .dram_data
  );

  // line packer: 8 plain beats -> one 64-byte line for the mee
  logic [LINE_W-1:0]  pk_line_q;
  logic [2:0]         pk_beat_q;
  logic               pk_full_q;
  logic [PAGE_AW-1:0] pk_page_q;
  logic [5:0]         pk_line_idx_q;
  logic               fl_grant;

  assign dram_ready = !pk_full_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pk_line_q     <= '0;
      pk_beat_q     <= '0;
      pk_full_q     <= 1'b0;
      pk_page_q     <= '0;
      pk_line_idx_q <= '0;
    end else begin
      if (fl_page_start) begin
        pk_page_q     <= fl_dest_page;
        pk_line_idx_q <= '0;
        pk_beat_q     <= '0;
      end
      if (dram_valid && dram_ready) begin
        pk_line_q[pk_beat_q*KS_W +: KS_W] <= dram_data;   // beat 0 lowest
        pk_beat_q <= pk_beat_q + 3'd1;
        if (pk_beat_q == 3'd7) pk_full_q <= 1'b1;
      end
      if (fl_grant) begin
        pk_full_q     <= 1'b0;
        pk_line_idx_q <= pk_line_idx_q + 6'd1;
      end
    end
  end

  // ------------------------------------------------------------ CPU path
  logic    pte_allow, pte_ro;
  logic    tz_resp_valid, tz_allow;

  typedef enum logic [2:0] { C_IDLE, C_CHECK, C_DECIDE, C_ISSUE, C_WAIT, C_RESP } cpu_state_e;
  cpu_state_e        cs_q;
  mee_op_e           c_op_q;
  logic [31:0]       c_addr_q;
  world_e            c_world_q;
  logic [63:0]       c_pte_q;
  logic [LINE_W-1:0] c_wdata_q;
  logic              c_pte_ok_q;

  pte_perm_check u_pte (
    .pte(c_pte_q), .world(c_world_q),
    .is_write(c_op_q != MEE_READ),
    .region(), .page_ro(pte_ro), .allow(pte_allow), .fault()
  );

  logic tz_cfg_err;
  tzasc_filter #(.ADDR_W(32)) u_tzasc (
    .clk, .rst_n,
    .cfg_we(cfg_tzasc_we), .cfg_world(cfg_world), .cfg_sel(cfg_tzasc_sel),
    .cfg_data(cfg_tzasc_data), .cfg_err(tz_cfg_err),
    .req_valid(cs_q == C_CHECK), .req_addr(c_addr_q), .req_world(c_world_q),
    .req_write(c_op_q != MEE_READ),
    .resp_valid(tz_resp_valid), .resp_allow(tz_allow), .resp_region()
  );

  assign cfg_err = tz_cfg_err;

  // ------------------------------------------------------------ mee + arbiter
  logic              m_req_valid, m_req_ready, m_req_writable;
  mee_op_e           m_req_op;
  logic [LINE_AW-1:0] m_req_line;
  logic [LINE_W-1:0] m_req_wdata, m_resp_rdata;
  logic              m_resp_valid, m_resp_err, m_resp_reenc;
  logic              cpu_grant, owner_fl_q;

  mee #(.PAGES(PAGES), .CC_ENTRIES(CC_ENTRIES)) u_mee (
    .clk, .rst_n,
    .key_we(cfg_mee_key_we), .key_world(cfg_world), .key_in(cfg_mee_key),
    .init_start(mee_init_start), .init_done(mee_init_done),
    .req_valid(m_req_valid), .req_ready(m_req_ready), .req_op(m_req_op),
    .req_line(m_req_line), .req_writable(m_req_writable), .req_wdata(m_req_wdata),
    .resp_valid(m_resp_valid), .resp_rdata(m_resp_rdata),
    .resp_err(m_resp_err), .resp_reenc(m_resp_reenc), .cc_hit(mee_cc_hit),
    .mem_valid, .mem_ready, .mem_we, .mem_addr, .mem_wdata,
    .mem_rvalid, .mem_rdata
  );

  logic in_window;
  assign in_window = (c_addr_q >> (LINE_AW + 6)) == 0;

  always_comb begin
    fl_grant  = m_req_ready && pk_full_q;
    cpu_grant = m_req_ready && !pk_full_q && cs_q == C_ISSUE;
    if (pk_full_q) begin
      m_req_valid    = 1'b1;
      m_req_op       = MEE_WRITE;
      m_req_line     = {pk_page_q, pk_line_idx_q};
      m_req_writable = 1'b1;
      m_req_wdata    = pk_line_q;
    end else begin
      m_req_valid    = cs_q == C_ISSUE;
      m_req_op       = c_op_q;
      m_req_line     = LINE_AW'(c_addr_q >> 6);
      m_req_writable = (c_op_q == MEE_TO_RW) ? 1'b1
                     : (c_op_q == MEE_TO_RO) ? 1'b0 : !pte_ro;
      m_req_wdata    = c_wdata_q;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cs_q               <= C_IDLE;
      c_op_q             <= MEE_READ;
      c_addr_q           <= '0;
      c_world_q          <= WORLD_NORMAL;
      c_pte_q            <= '0;
      c_wdata_q          <= '0;
      c_pte_ok_q         <= 1'b0;
      owner_fl_q         <= 1'b0;
      fl_line_done       <= 1'b0;
      cpu_resp_valid     <= 1'b0;
      cpu_resp_rdata     <= '0;
      cpu_resp_fault     <= 1'b0;
      cpu_resp_integrity <= 1'b0;
      cpu_resp_reenc     <= 1'b0;
    end else begin
      cpu_resp_valid <= 1'b0;
      fl_line_done   <= 1'b0;
      if (fl_grant)  owner_fl_q <= 1'b1;
      if (cpu_grant) owner_fl_q <= 1'b0;
      if (m_resp_valid && owner_fl_q) fl_line_done <= 1'b1;
      unique case (cs_q)
        C_IDLE: if (cpu_req_valid) begin
          c_op_q    <= cpu_req_op;
          c_addr_q  <= cpu_req_addr;
          c_world_q <= cpu_req_world;
          c_pte_q   <= cpu_req_pte;
          c_wdata_q <= cpu_req_wdata;
          cs_q      <= C_CHECK;
        end
        C_CHECK: begin
          // descriptor check now; the address check answers next cycle
          c_pte_ok_q <= pte_allow &&
                        (c_op_q == MEE_READ || c_op_q == MEE_WRITE ||
                         c_world_q == WORLD_SECURE);
          cs_q <= C_DECIDE;
        end
        C_DECIDE: begin
          if (!(c_pte_ok_q && tz_resp_valid && tz_allow && in_window)) begin
            cpu_resp_fault     <= 1'b1;
            cpu_resp_integrity <= 1'b0;
            cpu_resp_reenc     <= 1'b0;
            cpu_resp_rdata     <= '0;
            cs_q               <= C_RESP;
          end else begin
            cs_q <= C_ISSUE;
          end
        end
        C_ISSUE: if (cpu_grant) cs_q <= C_WAIT;
        C_WAIT: if (m_resp_valid && !owner_fl_q) begin
          cpu_resp_fault     <= 1'b0;
          cpu_resp_integrity <= m_resp_err;
          cpu_resp_reenc     <= m_resp_reenc;
          cpu_resp_rdata     <= m_resp_rdata;
          cs_q               <= C_RESP;
        end
        C_RESP: begin
          cpu_resp_valid <= 1'b1;
          cs_q           <= C_IDLE;
        end
        default: cs_q <= C_IDLE;
      endcase
    end
  end

  assign cpu_req_ready = (cs_q == C_IDLE);

  // the address check answers in the cycle after it is asked
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
    end else if (cs_q == C_DECIDE) begin
      assert (tz_resp_valid);
    end
  end

endmodule
