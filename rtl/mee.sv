// mee: memory encryption engine with hybrid counters and two integrity trees.
//
// Everything a TEE keeps in SSD DRAM is encrypted and integrity-checked by
// this engine, which sits between the controller's interconnect and the DRAM.
// A 64-byte line is encrypted in counter mode: the line is XORed with a
// one-time pad that AES-128 makes from the line's address and counter, and a
// 64-bit MAC over the ciphered line, its address and its counter is stored
// with it. The counters are what must not be rolled back, so they are kept in
// counter blocks that are themselves protected by a tree of counter blocks
// (a Bonsai Merkle tree): the MAC of each block is keyed by its parent's
// counter for it, and the single block at the top is checked against a root
// MAC held in an on-chip register.
//
// In-storage programs mostly read, so counters are kept in two forms (the
// hybrid-counter scheme):
//   * read-only pages use one 64-bit major counter per 4 KB page, eight per
//     counter block ("major-counter tree", 8-ary);
//   * writable pages use one counter block per page: a 64-bit major counter
//     and 64 6-bit minor counters, one per line ("split-counter tree", 64-ary,
//     its upper levels are split-counter blocks too).
// Each tree has its own root register. The page-table permission bit of an
// access (`req_writable`) selects the tree.
//
// Operations (one at a time; every operation first fetches and verifies the
// counter path(s) it needs, then):
//   MEE_READ   fetch the line, check its MAC, return the plain line.
//   MEE_WRITE  writable pages only: bump the line's minor counter, encrypt and
//              store the line, update MACs and parent counters up to the root.
//              A minor counter that wraps bumps the major counter, clears all
//              minors and re-encrypts the other 63 lines of the page; a wrap in
//              an upper-level block re-MACs that block's other 63 children.
//   MEE_TO_RW  page becomes writable: its major counter + 1 becomes the major
//              of a fresh split-counter block, minors cleared, and all 64
//              lines are re-encrypted under it.
//   MEE_TO_RO  page becomes read-only: its split major + 1 is copied back to
//              its slot of the major-counter block and the 64 lines are
//              re-encrypted under it.
// A failed MAC check ends the operation with resp_err (the runtime then aborts
// the TEE); a write to a page marked read-only is refused the same way.
// `init_start` writes every counter block with zero counters and valid MACs
// and sets both roots; it must run once before use.
//
// From the paper: counter-mode encryption with AES-128, split counters with
// 64-bit majors and 64 6-bit minors per 4 KB page, 8 majors per read-only
// block, the increment-and-copy rules of the permission changes, BMT with two
// on-chip root MACs, and a 128 KB counter cache (CC_ENTRIES = 2048 blocks of
// 64 bytes of counters; see counter_cache). A read whose level-0 counter
// block is cached skips the tree walk but still checks the line's MAC; every
// update walks and re-MACs the whole path. This design's choices: caching
// level-0 blocks only, using the cache for reads only, the MAC
// construction (AES CBC-MAC, see mee_aes_seq), the pad seed layout, a 64-bit MAC stored next to every line and block (576-bit
// memory words), the memory map of lines and blocks, the 16 MB protected span
// (PAGES = 4096, the runtime's default per-TEE region), re-encryption done by
// the engine itself, and sibling blocks re-MACed without re-verification.
//
// Memory port: one request at a time, valid/ready, read data returns with
// mem_rvalid. Word address: bit MEM_AW-1 = 0 selects line {page, line};
// = 1 selects a counter block {tree, level, index}. Latency: a read of a page
// costs (levels + 1) block fetches, (levels) CBC-MACs of ~56 cycles, one line
// fetch, one MAC and one 45-cycle pad; roughly 300-400 cycles. A read that
// hits the counter cache costs 2 cycles of lookup, one line fetch, one MAC
// and one pad (about 120 cycles). cc_hit pulses for each such read.
module mee
  import iceclave_pkg::*;
#(
  parameter  int unsigned PAGES  = 4096,  // 4 KB pages covered (16 MB)
  parameter  int unsigned CC_ENTRIES = 2048,  // counter cache blocks, 0 = none
  localparam int unsigned MEM_AW = $clog2(PAGES) + 7
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  key_we,      // secure-world key load
  input  world_e                key_world,
  input  logic [127:0]          key_in,
  input  logic                  init_start,
  output logic                  init_done,
  // request
  input  logic                  req_valid,
  output logic                  req_ready,
  input  mee_op_e               req_op,
  input  logic [$clog2(PAGES)+5:0] req_line,  // {page, line in page}
  input  logic                  req_writable,
  input  logic [LINE_W-1:0]     req_wdata,
  output logic                  resp_valid,
  output logic [LINE_W-1:0]     resp_rdata,
  output logic                  resp_err,
  output logic                  resp_reenc,  // the op re-encrypted a whole page
  output logic                  cc_hit,      // a read found its counter block cached
  // memory
  output logic                  mem_valid,
  input  logic                  mem_ready,
  output logic                  mem_we,
  output logic [MEM_AW-1:0]     mem_addr,
  output logic [NODE_W-1:0]     mem_wdata,
  input  logic                  mem_rvalid,
  input  logic [NODE_W-1:0]     mem_rdata
);

  // ------------------------------------------------------------ geometry
  localparam int unsigned PAGE_AW = $clog2(PAGES);
  localparam int unsigned LINE_AW = PAGE_AW + 6;

  function automatic int unsigned levels_of(int unsigned first, int unsigned ar_log);
    int unsigned n, lv;
    n  = first;
    lv = 1;
    while (n > 1) begin
      n  = n >> ar_log;
      lv = lv + 1;
    end
    return lv;
  endfunction

  localparam int unsigned RO_LV  = levels_of(PAGES / 8, 3);   // 4 for 4096
  localparam int unsigned W_LV   = levels_of(PAGES, 6);       // 3 for 4096
  localparam int unsigned MAXL   = (RO_LV > W_LV) ? RO_LV : W_LV;
  localparam int unsigned LVW    = (MAXL > 1) ? $clog2(MAXL) : 1;  // level index
  localparam int unsigned IDX_W  = PAGE_AW;                   // node index
  localparam int unsigned META_W = 1 + 3 + IDX_W;             // tree, level, index

  localparam logic [7:0] TAG_NODE = 8'h01, TAG_DATA = 8'h02, TAG_PAD = 8'h03;

  // ------------------------------------------------------------ helpers
  typedef struct packed {
    logic        mode;    // 1: split counter (writable page)
    logic [63:0] major;
    logic [5:0]  minor;
  } ctr_t;

  function automatic logic [63:0] ro_major(logic [511:0] p, logic [5:0] s);
    return p[s*64 +: 64];
  endfunction
  function automatic logic [63:0] w_major(logic [511:0] p);
    return p[511:448];
  endfunction
  function automatic logic [5:0] w_minor(logic [511:0] p, logic [5:0] s);
    return p[s*6 +: 6];
  endfunction

  // index of the path node at level k of tree t for page pg
  function automatic logic [IDX_W-1:0] idx_of(logic t, logic [2:0] k,
                                               logic [PAGE_AW-1:0] pg);
    return t ? IDX_W'(pg >> (6*k)) : IDX_W'(pg >> (3*(k+1)));
  endfunction
  // position of a level-k path node inside its parent
  function automatic logic [5:0] slot_in_parent(logic t, logic [2:0] k,
                                               logic [PAGE_AW-1:0] pg);
    logic [IDX_W-1:0] i;
    i = idx_of(t, k, pg);
    return t ? i[5:0] : {3'b000, i[2:0]};
  endfunction
  function automatic int unsigned top_of(logic t);
    return t ? W_LV - 1 : RO_LV - 1;
  endfunction

  function automatic logic [MEM_AW-1:0] node_addr(logic t, logic [2:0] k,
                                                  logic [IDX_W-1:0] idx);
    return MEM_AW'({1'b1, {(MEM_AW-1-META_W){1'b0}}, t, 3'(k), idx});
  endfunction
  function automatic logic [MEM_AW-1:0] line_addr(logic [PAGE_AW-1:0] pg,
                                                  logic [5:0] l);
    return MEM_AW'({pg, l});
  endfunction

  // counter a parent block gives to its child in slot s
  function automatic ctr_t parent_ctr(logic t, logic [511:0] p, logic [5:0] s);
    ctr_t c;
    c.mode  = t;
    c.major = t ? w_major(p) : ro_major(p, s);
    c.minor = t ? w_minor(p, s) : 6'd0;
    return c;
  endfunction

  function automatic ctr_t zero_ctr(logic t);
    ctr_t c;
    c.mode  = t;
    c.major = '0;
    c.minor = '0;
    return c;
  endfunction

  function automatic logic [127:0] tail(logic [7:0] tag, logic [MEM_AW-1:0] a,
                                        ctr_t c, logic [15:0] extra);
    return {tag, 32'(a), c.major, {1'b0, c.mode, c.minor}, extra};
  endfunction

  // bump the counter of slot s in a block; returns overflow of a minor
  function automatic logic [512:0] bump(logic t, logic [511:0] p, logic [5:0] s);
    logic [511:0] n;
    logic         ov;
    n  = p;
    ov = 1'b0;
    if (!t) begin
      n[s*64 +: 64] = p[s*64 +: 64] + 64'd1;
    end else if (p[s*6 +: 6] == 6'h3f) begin
      ov          = 1'b1;
      n[383:0]    = '0;
      n[511:448]  = p[511:448] + 64'd1;
    end else begin
      n[s*6 +: 6] = p[s*6 +: 6] + 6'd1;
    end
    return {ov, n};
  endfunction

  // ------------------------------------------------------------ state
  typedef enum logic [4:0] {
    S_IDLE, S_INIT, S_INIT_MAC, S_FETCH, S_VERIFY, S_DISPATCH,
    S_RD_LINE, S_RD_MAC, S_RD_PAD, S_BUMP,
    S_L_FETCH, S_L_CHK, S_L_OLDPAD, S_L_NEWPAD, S_L_MAC, S_L_WRITE,
    S_P_MAC, S_P_WRITE, S_S_FETCH, S_S_MAC, S_S_WRITE,
    S_MEM, S_CRYPTO, S_RESP, S_INIT_END, S_CC
  } state_e;

  state_e            st_q, ret_q;
  mee_op_e           op_q;
  logic [PAGE_AW-1:0] pg_q;
  logic [5:0]        ln_q;
  logic              wr_q;
  logic [LINE_W-1:0] wdata_q, plain_q;
  logic              t_q;          // tree being fetched / verified / built
  logic [2:0]        k_q;          // level
  logic [IDX_W:0]    i_q;          // init index
  logic [6:0]        c_q;          // line / child loop
  logic [NODE_W-1:0] node_q [2][MAXL];
  logic [511:0]      new_q  [MAXL];
  logic [MAXL-1:0]   ovf_q;
  logic [1:0]        need_q;       // trees to verify: bit0 RO, bit1 W
  logic              err_q, reenc_q;
  logic [63:0]       root_q [2];
  logic [127:0]      key_q;
  logic [NODE_W-1:0] word_q;       // last line word read
  logic              cc_tried_q;   // counter cache already looked up

  // ------------------------------------------------------------ counter cache
  // Level-0 blocks only, keyed by {tree, block index}. The on-chip copy is
  // trusted: every level-0 block the engine writes to DRAM is written to the
  // cache too (write-allocate), and a block that passed verification is
  // filled in. Only reads use it; updates always walk the whole path.
  localparam int unsigned CKW = IDX_W + 1;
  logic              cc_we, cc_rd_hit;
  logic [CKW-1:0]    cc_wkey, cc_rkey;
  logic [NODE_W-1:0] cc_wdata, cc_rd_data;

  function automatic logic is_leaf(logic [MEM_AW-1:0] a);
    return a[MEM_AW-1] && (a[IDX_W+2:IDX_W] == 3'd0);
  endfunction

  // memory sub-transaction
  logic              m_we_q;
  logic [MEM_AW-1:0] m_addr_q;
  logic [NODE_W-1:0] m_wdata_q;
  logic              m_issued_q;

  // crypto sub-transaction
  logic         cr_done;
  logic [511:0] cr_pad;
  logic [63:0]  cr_mac;
  logic         cr_start_q, cr_cbc_q;
  logic [639:0] cr_msg_q;

  mee_aes_seq u_seq (
    .clk, .rst_n, .key(key_q), .start(cr_start_q), .cbc(cr_cbc_q),
    .msg(cr_msg_q), .done(cr_done), .pad(cr_pad), .mac(cr_mac)
  );


  // ------------------------------------------------------------ derived
  logic         ut;                 // tree updated by the op
  ctr_t         old_c, new_c;       // counters of line c_q
  logic [511:0] bump_n [MAXL];
  logic [MAXL-1:0] bump_ov;
  logic         line_sel;           // c_q takes part in the line loop

  always_comb begin
    ut = (op_q != MEE_TO_RO);
    // old / new counter of line c_q
    unique case (op_q)
      MEE_READ:  old_c = wr_q ? parent_ctr(1'b1, node_q[1][0][575:64], c_q[5:0])
                              : parent_ctr(1'b0, node_q[0][0][575:64], {3'b000, pg_q[2:0]});
      MEE_TO_RW: old_c = parent_ctr(1'b0, node_q[0][0][575:64], {3'b000, pg_q[2:0]});
      default:   old_c = parent_ctr(1'b1, node_q[1][0][575:64], c_q[5:0]);
    endcase
    if (op_q == MEE_TO_RO) new_c = parent_ctr(1'b0, new_q[0], {3'b000, pg_q[2:0]});
    else                   new_c = parent_ctr(1'b1, new_q[0], c_q[5:0]);

    // new level-0 block and bumped upper blocks of the updated tree
    for (int k = 0; k < MAXL; k++) begin
      bump_n[k]  = '0;
      bump_ov[k] = 1'b0;
    end
    unique case (op_q)
      MEE_WRITE: {bump_ov[0], bump_n[0]} = bump(1'b1, node_q[1][0][575:64], ln_q);
      MEE_TO_RW: bump_n[0] = {ro_major(node_q[0][0][575:64], {3'b000, pg_q[2:0]}) + 64'd1, 448'd0};
      default: begin
        bump_n[0] = node_q[0][0][575:64];
        bump_n[0][pg_q[2:0]*64 +: 64] = w_major(node_q[1][0][575:64]) + 64'd1;
      end
    endcase
    for (int k = 1; k < MAXL; k++) begin
      if (k <= top_of(ut))
        {bump_ov[k], bump_n[k]} = bump(ut, node_q[ut][k][575:64],
                                       slot_in_parent(ut, 3'(k - 1), pg_q));
    end

    line_sel = !(op_q == MEE_WRITE && !ovf_q[0]) || (c_q[5:0] == ln_q);
  end

  always_comb begin
    cc_rkey  = {t_q, idx_of(t_q, 3'd0, pg_q)};
    cc_we    = 1'b0;
    cc_wkey  = {m_addr_q[IDX_W+3], m_addr_q[IDX_W-1:0]};
    cc_wdata = m_wdata_q;
    if (CC_ENTRIES > 0) begin
      if (st_q == S_MEM && !m_issued_q && mem_ready && m_we_q && is_leaf(m_addr_q)) begin
        cc_we = 1'b1;                                   // engine writes a block
      end else if (st_q == S_DISPATCH && c_q == 7'h7f && !err_q) begin
        cc_we    = 1'b1;                                // verified block
        cc_wkey  = cc_rkey;
        cc_wdata = node_q[t_q][0];
      end
    end
  end

  if (CC_ENTRIES > 0) begin : g_cc
    counter_cache #(.ENTRIES(CC_ENTRIES), .KW(CKW), .DW(NODE_W)) u_cc (
      .clk, .rst_n,
      .clear(st_q == S_IDLE && init_start),
      .wr_en(cc_we), .wr_key(cc_wkey), .wr_data(cc_wdata),
      .rd_key(cc_rkey), .rd_hit(cc_rd_hit), .rd_data(cc_rd_data)
    );
  end else begin : g_no_cc
    assign cc_rd_hit  = 1'b0;
    assign cc_rd_data = '0;
  end

  // ------------------------------------------------------------ FSM
  function automatic int unsigned nodes_at(logic t, int unsigned k);
    return t ? (PAGES >> (6*k)) : (PAGES >> (3*(k+1)));
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q       <= S_IDLE;
      ret_q      <= S_IDLE;
      op_q       <= MEE_READ;
      pg_q       <= '0;
      ln_q       <= '0;
      wr_q       <= 1'b0;
      wdata_q    <= '0;
      plain_q    <= '0;
      t_q        <= 1'b0;
      k_q        <= '0;
      i_q        <= '0;
      c_q        <= '0;
      ovf_q      <= '0;
      need_q     <= '0;
      err_q      <= 1'b0;
      reenc_q    <= 1'b0;
      root_q     <= '{default: '0};
      key_q      <= '0;
      word_q     <= '0;
      cc_tried_q <= 1'b0;
      cc_hit     <= 1'b0;
      m_we_q     <= 1'b0;
      m_addr_q   <= '0;
      m_wdata_q  <= '0;
      m_issued_q <= 1'b0;
      cr_start_q <= 1'b0;
      cr_cbc_q   <= 1'b0;
      cr_msg_q   <= '0;
      init_done  <= 1'b0;
      resp_valid <= 1'b0;
      resp_rdata <= '0;
      resp_err   <= 1'b0;
      resp_reenc <= 1'b0;
      for (int t = 0; t < 2; t++)
        for (int k = 0; k < MAXL; k++) node_q[t][k] <= '0;
      for (int k = 0; k < MAXL; k++) new_q[k] <= '0;
    end else begin
      cr_start_q <= 1'b0;
      init_done  <= 1'b0;
      resp_valid <= 1'b0;
      cc_hit     <= 1'b0;
      if (key_we && key_world == WORLD_SECURE && st_q == S_IDLE) key_q <= key_in;

      unique case (st_q)
        // ---------------------------------------------------- idle
        S_IDLE: begin
          if (init_start) begin
            t_q  <= 1'b0;
            k_q  <= '0;
            i_q  <= '0;
            st_q <= S_INIT_MAC;
          end else if (req_valid) begin
            op_q    <= req_op;
            pg_q    <= req_line[LINE_AW-1:6];
            ln_q    <= req_line[5:0];
            wr_q    <= req_writable;
            wdata_q <= req_wdata;
            err_q   <= 1'b0;
            reenc_q <= 1'b0;
            ovf_q   <= '0;
            cc_tried_q <= 1'b0;
            unique case (req_op)
              MEE_READ:  need_q <= req_writable ? 2'b10 : 2'b01;
              MEE_WRITE: need_q <= 2'b10;
              default:   need_q <= 2'b11;
            endcase
            t_q  <= (req_op == MEE_READ || req_op == MEE_WRITE) ? req_writable : 1'b0;
            k_q  <= '0;
            if (req_op == MEE_WRITE && !req_writable) begin
              err_q <= 1'b1;           // stores to read-only pages are refused
              st_q  <= S_RESP;
            end else begin
              st_q <= S_FETCH;
            end
          end
        end

        // ---------------------------------------------------- init: zero blocks
        S_INIT_MAC: begin
          cr_cbc_q   <= 1'b1;
          cr_msg_q   <= {512'd0, tail(TAG_NODE, node_addr(t_q, k_q, i_q[IDX_W-1:0]),
                                      zero_ctr(t_q), 16'd0)};
          cr_start_q <= 1'b1;
          ret_q      <= S_INIT;
          st_q       <= S_CRYPTO;
        end
        S_INIT: begin
          if (k_q == 3'(top_of(t_q))) root_q[t_q] <= cr_mac;
          m_we_q    <= 1'b1;
          m_addr_q  <= node_addr(t_q, k_q, i_q[IDX_W-1:0]);
          m_wdata_q <= {512'd0, cr_mac};
          st_q      <= S_MEM;
          if (i_q + 1 < (IDX_W+1)'(nodes_at(t_q, k_q))) begin
            i_q   <= i_q + 1'b1;
            ret_q <= S_INIT_MAC;
          end else if (k_q < 3'(top_of(t_q))) begin
            i_q   <= '0;
            k_q   <= k_q + 3'd1;
            ret_q <= S_INIT_MAC;
          end else if (!t_q) begin
            i_q   <= '0;
            k_q   <= '0;
            t_q   <= 1'b1;
            ret_q <= S_INIT_MAC;
          end else begin
            ret_q <= S_INIT_END;
          end
        end

        // ---------------------------------------------------- fetch path
        S_FETCH: begin
          if (CC_ENTRIES > 0 && op_q == MEE_READ && k_q == 3'd0 && !cc_tried_q) begin
            cc_tried_q <= 1'b1;          // look the level-0 block up first
            st_q       <= S_CC;
          end else begin
            m_we_q   <= 1'b0;
            m_addr_q <= node_addr(t_q, k_q, idx_of(t_q, k_q, pg_q));
            ret_q    <= S_VERIFY;
            st_q     <= S_MEM;
          end
        end
        S_CC: begin
          if (cc_rd_hit) begin
            // trusted on-chip copy: no tree walk
            node_q[t_q][0] <= cc_rd_data;
            cc_hit         <= 1'b1;
            c_q            <= 7'h7f;
            st_q           <= S_DISPATCH;
          end else begin
            st_q <= S_FETCH;
          end
        end
        S_VERIFY: begin
          // word just read is in word_q; all levels are fetched bottom-up,
          // then verified top-down once the top is in
          node_q[t_q][k_q[LVW-1:0]] <= word_q;
          if (k_q < 3'(top_of(t_q))) begin
            k_q  <= k_q + 3'd1;
            st_q <= S_FETCH;
          end else begin
            // compute MACs level by level: reuse k_q counting down
            st_q <= S_DISPATCH;
            ret_q <= S_DISPATCH;
            c_q  <= 7'd0;            // c_q = level being checked
            cr_cbc_q   <= 1'b1;
            cr_msg_q   <= '0;
          end
        end
        S_DISPATCH: begin
          // check level c_q of tree t_q, then the next tree, then the op
          if (c_q == 7'h7f) begin
            if (err_q) st_q <= S_RESP;
            else if (op_q == MEE_READ) begin
              c_q      <= {1'b0, ln_q};
              m_we_q   <= 1'b0;
              m_addr_q <= line_addr(pg_q, ln_q);
              ret_q    <= S_RD_LINE;
              st_q     <= S_MEM;
            end else begin
              st_q <= S_BUMP;
            end
          end else if (c_q[6]) begin
            // result of the MAC for level c_q[2:0] is ready
            if (cr_mac != ((c_q[2:0] == 3'(top_of(t_q))) ? root_q[t_q]
                                                          : node_q[t_q][c_q[LVW-1:0]][63:0]))
              err_q <= 1'b1;
            if (c_q[2:0] < 3'(top_of(t_q))) begin
              c_q <= {1'b0, 3'd0, c_q[2:0] + 3'd1};
            end else if (need_q[0] && need_q[1] && !t_q) begin
              t_q  <= 1'b1;
              k_q  <= '0;
              c_q  <= '0;
              st_q <= S_FETCH;
            end else begin
              c_q <= 7'h7f;            // all verified
            end
          end else begin
            cr_cbc_q <= 1'b1;
            cr_msg_q <= {node_q[t_q][c_q[LVW-1:0]][575:64],
                         tail(TAG_NODE,
                              node_addr(t_q, c_q[2:0],
                                        idx_of(t_q, c_q[2:0], pg_q)),
                              (c_q[2:0] == 3'(top_of(t_q)))
                                ? zero_ctr(t_q)
                                : parent_ctr(t_q, node_q[t_q][LVW'(c_q[2:0] + 3'd1)][575:64],
                                             slot_in_parent(t_q, c_q[2:0], pg_q)),
                              16'd0)};
            cr_start_q <= 1'b1;
            c_q        <= {1'b1, c_q[5:0]};
            ret_q      <= S_DISPATCH;
            st_q       <= S_CRYPTO;
          end
        end

        // ---------------------------------------------------- read
        S_RD_LINE: begin
          cr_cbc_q <= 1'b1;
          cr_msg_q <= {word_q[575:64],
                       tail(TAG_DATA, line_addr(pg_q, ln_q), old_c, 16'd0)};
          cr_start_q <= 1'b1;
          ret_q    <= S_RD_MAC;
          st_q     <= S_CRYPTO;
        end
        S_RD_MAC: begin
          if (cr_mac != word_q[63:0]) begin
            err_q <= 1'b1;
            st_q  <= S_RESP;
          end else begin
            cr_cbc_q   <= 1'b0;
            cr_msg_q   <= {512'd0, tail(TAG_PAD, line_addr(pg_q, ln_q), old_c, 16'd0)};
            cr_start_q <= 1'b1;
            ret_q      <= S_RD_PAD;
            st_q       <= S_CRYPTO;
          end
        end
        S_RD_PAD: begin
          resp_rdata <= word_q[575:64] ^ cr_pad;
          st_q       <= S_RESP;
        end

        // ---------------------------------------------------- update ops
        S_BUMP: begin
          for (int k = 0; k < MAXL; k++) new_q[k] <= bump_n[k];
          ovf_q   <= bump_ov;
          reenc_q <= (op_q != MEE_WRITE) || bump_ov[0];
          c_q     <= '0;
          st_q    <= S_L_FETCH;
        end
        // line loop over c_q = 0..63
        S_L_FETCH: begin
          if (c_q[6]) begin
            k_q  <= '0;
            st_q <= S_P_MAC;
          end else if (!line_sel) begin
            c_q <= c_q + 7'd1;
          end else if (op_q == MEE_WRITE && c_q[5:0] == ln_q) begin
            plain_q <= wdata_q;
            st_q    <= S_L_NEWPAD;
          end else begin
            m_we_q   <= 1'b0;
            m_addr_q <= line_addr(pg_q, c_q[5:0]);
            ret_q    <= S_L_CHK;
            st_q     <= S_MEM;
          end
        end
        S_L_CHK: begin
          cr_cbc_q   <= 1'b1;
          cr_msg_q   <= {word_q[575:64],
                         tail(TAG_DATA, line_addr(pg_q, c_q[5:0]), old_c, 16'd0)};
          cr_start_q <= 1'b1;
          ret_q      <= S_L_OLDPAD;
          st_q       <= S_CRYPTO;
        end
        S_L_OLDPAD: begin
          if (cr_mac != word_q[63:0]) begin
            err_q <= 1'b1;            // corrupted line: stop before any write
            st_q  <= S_RESP;
          end else begin
          cr_cbc_q   <= 1'b0;
          cr_msg_q   <= {512'd0, tail(TAG_PAD, line_addr(pg_q, c_q[5:0]), old_c, 16'd0)};
          cr_start_q <= 1'b1;
          ret_q      <= S_L_NEWPAD;
          st_q       <= S_CRYPTO;
          end
        end
        S_L_NEWPAD: begin
          if (!(op_q == MEE_WRITE && c_q[5:0] == ln_q))
            plain_q <= word_q[575:64] ^ cr_pad;
          cr_cbc_q   <= 1'b0;
          cr_msg_q   <= {512'd0, tail(TAG_PAD, line_addr(pg_q, c_q[5:0]), new_c, 16'd0)};
          cr_start_q <= 1'b1;
          ret_q      <= S_L_MAC;
          st_q       <= S_CRYPTO;
        end
        S_L_MAC: begin
          m_wdata_q[575:64] <= plain_q ^ cr_pad;
          cr_cbc_q   <= 1'b1;
          cr_msg_q   <= {plain_q ^ cr_pad,
                         tail(TAG_DATA, line_addr(pg_q, c_q[5:0]), new_c, 16'd0)};
          cr_start_q <= 1'b1;
          ret_q      <= S_L_WRITE;
          st_q       <= S_CRYPTO;
        end
        S_L_WRITE: begin
          m_we_q          <= 1'b1;
          m_addr_q        <= line_addr(pg_q, c_q[5:0]);
          m_wdata_q[63:0] <= cr_mac;
          c_q             <= c_q + 7'd1;
          ret_q           <= S_L_FETCH;
          st_q            <= S_MEM;
        end
        // path blocks of the updated tree, k_q = 0..top
        S_P_MAC: begin
          cr_cbc_q <= 1'b1;
          cr_msg_q <= {new_q[k_q[LVW-1:0]],
                       tail(TAG_NODE, node_addr(ut, k_q, idx_of(ut, k_q, pg_q)),
                            (k_q == 3'(top_of(ut)))
                              ? zero_ctr(ut)
                              : parent_ctr(ut, new_q[LVW'(k_q + 3'd1)],
                                           slot_in_parent(ut, k_q, pg_q)),
                            16'd0)};
          cr_start_q <= 1'b1;
          ret_q      <= S_P_WRITE;
          st_q       <= S_CRYPTO;
        end
        S_P_WRITE: begin
          if (k_q == 3'(top_of(ut))) root_q[ut] <= cr_mac;
          m_we_q    <= 1'b1;
          m_addr_q  <= node_addr(ut, k_q, idx_of(ut, k_q, pg_q));
          m_wdata_q <= {new_q[k_q[LVW-1:0]], cr_mac};
          st_q      <= S_MEM;
          if (k_q < 3'(top_of(ut))) begin
            k_q   <= k_q + 3'd1;
            ret_q <= S_P_MAC;
          end else begin
            k_q   <= 3'd1;
            c_q   <= '0;
            ret_q <= S_S_FETCH;
          end
        end
        // siblings of a wrapped upper block: k_q = 1..top, c_q = child
        S_S_FETCH: begin
          if (k_q > 3'(top_of(ut))) begin
            st_q <= S_RESP;
          end else if (!ovf_q[k_q[LVW-1:0]] || c_q[6]) begin
            k_q <= k_q + 3'd1;
            c_q <= '0;
          end else if (c_q[5:0] == slot_in_parent(ut, k_q - 3'd1, pg_q)) begin
            c_q <= c_q + 7'd1;       // the path child is already written
          end else begin
            m_we_q   <= 1'b0;
            m_addr_q <= node_addr(ut, k_q - 3'd1,
                                  IDX_W'({idx_of(ut, k_q, pg_q), c_q[5:0]}));
            ret_q    <= S_S_MAC;
            st_q     <= S_MEM;
          end
        end
        S_S_MAC: begin
          cr_cbc_q <= 1'b1;
          cr_msg_q <= {word_q[575:64],
                       tail(TAG_NODE, m_addr_q,
                            parent_ctr(ut, new_q[k_q[LVW-1:0]], c_q[5:0]), 16'd0)};
          cr_start_q <= 1'b1;
          ret_q      <= S_S_WRITE;
          st_q       <= S_CRYPTO;
        end
        S_S_WRITE: begin
          m_we_q    <= 1'b1;
          m_wdata_q <= {word_q[575:64], cr_mac};
          c_q       <= c_q + 7'd1;
          ret_q     <= S_S_FETCH;
          st_q      <= S_MEM;
        end

        // ---------------------------------------------------- sub-transactions
        S_MEM: begin
          if (!m_issued_q) begin
            if (mem_ready) begin
              m_issued_q <= 1'b1;
              if (m_we_q) begin
                m_issued_q <= 1'b0;
                st_q       <= ret_q;
              end
            end
          end else if (mem_rvalid) begin
            m_issued_q <= 1'b0;
            word_q     <= mem_rdata;
            st_q       <= ret_q;
          end
        end
        S_INIT_END: begin
          init_done <= 1'b1;
          st_q      <= S_IDLE;
        end
        S_CRYPTO: begin
          if (cr_done) st_q <= ret_q;
        end
        S_RESP: begin
          resp_valid <= 1'b1;
          resp_err   <= err_q;
          resp_reenc <= reenc_q;
          if (op_q != MEE_READ || err_q) resp_rdata <= '0;
          st_q <= S_IDLE;
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  assign req_ready = (st_q == S_IDLE) && !init_start;
  assign mem_valid = (st_q == S_MEM) && !m_issued_q;
  assign mem_we    = m_we_q;
  assign mem_addr  = m_addr_q;
  assign mem_wdata = m_wdata_q;

  // one memory request outstanding: no new request while a read is pending
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
    end else if (m_issued_q) begin
      assert (!mem_valid);
    end
  end

endmodule
