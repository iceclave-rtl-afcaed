// mapping_guard: permission-checked FTL address translation for TEEs.
//
// The FTL keeps its logical-to-physical mapping table in flash and caches part
// of it in the protected memory region, where TEEs may read it without a
// switch to the secure world. Each 8-byte entry carries a 4-bit TEE ID set by
// the runtime (SetIDBits) when it creates the TEE; a translation is served
// only when the requesting TEE's ID matches the entry's ID, so a TEE cannot
// probe the physical locations of another TEE's data. This block is the
// checker in front of that cached table:
//
//   * lookup (normal world, a TEE with its ID): returns HIT with the PPA,
//     MISS when the LPA is not cached (the TEE must call ReadMappingEntry and
//     the FTL must load the entry: a world switch), or VIOLATION when the entry
//     belongs to another TEE (the runtime aborts the TEE: ThrowOutTEE);
//   * fill (secure world, the FTL): writes an entry loaded from flash;
//   * set_id (secure world, the runtime): rewrites the ID of a cached entry.
// Fill and set_id from the normal world are refused and flagged (wr_err).
//
// The 4-bit ID, 8-byte entries and the hit/miss/violation behaviour are the
// paper's. The cache organisation (direct mapped, indexed by the low LPA
// bits, tag in the entry), its size and the one-cycle lookup are this
// design's choices. Writes win over a lookup of the same cycle; the lookup
// sees the table as it was before the write.
module mapping_guard
  import iceclave_pkg::*;
#(
  parameter int unsigned ENTRIES = 1024   // cached mapping entries
) (
  input  logic             clk,
  input  logic             rst_n,
  // TEE lookup
  input  logic             lk_valid,
  input  logic [LPA_W-1:0] lk_lpa,
  input  logic [ID_W-1:0]  lk_id,
  output logic             lk_resp_valid,
  output xlate_e           lk_status,
  output logic [PPA_W-1:0] lk_ppa,
  // FTL fill of a missing entry (secure world)
  input  logic             fill_valid,
  input  world_e           fill_world,
  input  logic [LPA_W-1:0] fill_lpa,
  input  logic [PPA_W-1:0] fill_ppa,
  input  logic [ID_W-1:0]  fill_id,
  // runtime SetIDBits on a cached entry (secure world)
  input  logic             setid_valid,
  input  world_e           setid_world,
  input  logic [LPA_W-1:0] setid_lpa,
  input  logic [ID_W-1:0]  setid_id,
  output logic             wr_err
);

  localparam int unsigned IDX_W = $clog2(ENTRIES);
  localparam int unsigned TAG_W = MAP_TAG_W;

  map_entry_t      table_q [ENTRIES];
  logic [ENTRIES-1:0] valid_q;

  function automatic logic [IDX_W-1:0] idx_of(logic [LPA_W-1:0] lpa);
    return lpa[IDX_W-1:0];
  endfunction
  function automatic logic [TAG_W-1:0] tag_of(logic [LPA_W-1:0] lpa);
    return TAG_W'(lpa >> IDX_W);
  endfunction

  map_entry_t lk_e;
  logic       lk_v;
  map_entry_t sid_e;
  logic       sid_hit;

  always_comb begin
    lk_e    = table_q[idx_of(lk_lpa)];
    lk_v    = valid_q[idx_of(lk_lpa)] && (lk_e.tag == tag_of(lk_lpa));
    sid_e   = table_q[idx_of(setid_lpa)];
    sid_hit = valid_q[idx_of(setid_lpa)] && (sid_e.tag == tag_of(setid_lpa));
  end

  logic fill_ok, setid_ok;
  assign fill_ok  = fill_valid  && fill_world  == WORLD_SECURE;
  assign setid_ok = setid_valid && setid_world == WORLD_SECURE && sid_hit;

  // table storage (no reset: validity is held in valid_q)
  always_ff @(posedge clk) begin
    if (setid_ok) table_q[idx_of(setid_lpa)].id <= setid_id;
    if (fill_ok) begin
      table_q[idx_of(fill_lpa)] <= '{valid: 1'b1, id: fill_id,
                                     tag: tag_of(fill_lpa), ppa: fill_ppa};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q       <= '0;
      wr_err        <= 1'b0;
      lk_resp_valid <= 1'b0;
      lk_status     <= XLATE_MISS;
      lk_ppa        <= '0;
    end else begin
      if (fill_ok) valid_q[idx_of(fill_lpa)] <= 1'b1;
      wr_err <= (fill_valid  && fill_world  != WORLD_SECURE) ||
                (setid_valid && setid_world != WORLD_SECURE);
      lk_resp_valid <= lk_valid;
      if (lk_valid) begin
        if (!lk_v) begin
          lk_status <= XLATE_MISS;
          lk_ppa    <= '0;
        end else if (lk_e.id != lk_id) begin
          lk_status <= XLATE_VIOLATION;
          lk_ppa    <= '0;          // never leak another TEE's PPA
        end else begin
          lk_status <= XLATE_HIT;
          lk_ppa    <= lk_e.ppa;
        end
      end
    end
  end

  initial begin
    assert (IDX_W + TAG_W >= LPA_W)
      else $error("mapping_guard: ENTRIES too small for the entry tag field");
  end

endmodule
