// pte_perm_check: three-region permission check on a page descriptor.
//
// The in-storage TEE splits physical memory into normal, protected and secure
// regions. A page's region is encoded in its 64-bit descriptor by the NS bit
// (bit 5), the access flags AP[2:1] (bits 7:6) and the ES bit (bit 55, a
// reserved descriptor bit given a new meaning):
//
//     region      ES  AP[2:1]  NS   normal world   secure world
//     normal       1    01      1   read/write     read/write
//     protected    0    01      1   read only      read/write
//     secure       0    00      0   no access      read/write
//
// The encodings and the permission columns are the paper's. A normal page may
// also carry AP[2] = 1, the usual ARMv8 read-only flag (AP = 11): it stays in
// the normal region but refuses normal-world stores, and `page_ro` tells the
// memory encryption engine to use the read-only (major-counter) tree. Any other
// combination is reported as REGION_INVALID and faults in the normal world;
// the secure world keeps read/write everywhere, as the paper gives the secure
// world access to the whole memory (this treatment of other encodings is this
// design's choice). Purely combinational: decision in the same cycle.
module pte_perm_check
  import iceclave_pkg::*;
(
  input  logic [63:0] pte,       // page descriptor of the accessed page
  input  world_e      world,     // world issuing the access
  input  logic        is_write,  // 1 = store, 0 = load
  output region_e     region,    // decoded region
  output logic        page_ro,   // AP[2]: page is read-only
  output logic        allow,     // access permitted
  output logic        fault      // access refused (MMU permission fault)
);

  logic       es, ns;
  logic [1:0] ap;

  always_comb begin
    es = pte[PTE_ES_BIT];
    ns = pte[PTE_NS_BIT];
    ap = pte[PTE_AP_HI:PTE_AP_LO];
    unique case ({es, ap, ns})
      4'b1_01_1,
      4'b1_11_1: region = REGION_NORMAL;
      4'b0_01_1: region = REGION_PROTECTED;
      4'b0_00_0: region = REGION_SECURE;
      default:   region = REGION_INVALID;
    endcase

    if (world == WORLD_SECURE) begin
      allow = 1'b1;
    end else begin
      unique case (region)
        REGION_NORMAL:    allow = !(is_write && ap[1]);
        REGION_PROTECTED: allow = !is_write;
        default:          allow = 1'b0;
      endcase
    end
    fault   = !allow;
    page_ro = ap[1];
  end

endmodule
