// tzasc_filter: region filter of the TrustZone address-space controller.
//
// The memory controller holds two programmable boundaries that cut the
// physical address space into three contiguous regions, as drawn in the
// paper's memory map: secure at the top (runtime metadata, FTL), protected
// below it (the cached FTL mapping table) and normal at the bottom (TEE
// memory). Every access is classified by its address; a normal-world access
// may read and write normal memory, only read protected memory and never touch
// secure memory; the secure world may do anything. The boundary registers can
// only be written by a secure-world configuration access.
//
// The three regions, their order and the access rules follow the paper; it
// gives no addresses. The two-boundary register layout, the reset values
// (protected from 2 GB, secure from 3 GB) and the one-cycle registered
// response are this design's choices.
//
// Timing: one access per cycle when req_valid; resp_* valid one cycle later.
module tzasc_filter
  import iceclave_pkg::*;
#(
  parameter int unsigned ADDR_W = 32   // 4 GB SSD DRAM
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration (secure world only)
  input  logic              cfg_we,
  input  world_e            cfg_world,
  input  logic              cfg_sel,     // 0: protected base, 1: secure base
  input  logic [ADDR_W-1:0] cfg_data,
  output logic              cfg_err,     // refused configuration write
  // access check
  input  logic              req_valid,
  input  logic [ADDR_W-1:0] req_addr,
  input  world_e            req_world,
  input  logic              req_write,
  output logic              resp_valid,
  output logic              resp_allow,
  output region_e           resp_region
);

  logic [ADDR_W-1:0] prot_base, sec_base;
  region_e           region;
  logic              allow;

  // Reset map: top quarter secure, next quarter protected, rest normal.
  localparam logic [ADDR_W-1:0] PROT_RST = ADDR_W'(2'b10) << (ADDR_W - 2);
  localparam logic [ADDR_W-1:0] SEC_RST  = ADDR_W'(2'b11) << (ADDR_W - 2);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prot_base <= PROT_RST;
      sec_base  <= SEC_RST;
      cfg_err   <= 1'b0;
    end else begin
      cfg_err <= cfg_we && (cfg_world != WORLD_SECURE);
      if (cfg_we && cfg_world == WORLD_SECURE) begin
        if (cfg_sel) sec_base  <= cfg_data;
        else         prot_base <= cfg_data;
      end
    end
  end

  always_comb begin
    if (req_addr >= sec_base)       region = REGION_SECURE;
    else if (req_addr >= prot_base) region = REGION_PROTECTED;
    else                            region = REGION_NORMAL;
    if (req_world == WORLD_SECURE) allow = 1'b1;
    else begin
      unique case (region)
        REGION_NORMAL:    allow = 1'b1;
        REGION_PROTECTED: allow = !req_write;
        default:          allow = 1'b0;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      resp_valid  <= 1'b0;
      resp_allow  <= 1'b0;
      resp_region <= REGION_NORMAL;
    end else begin
      resp_valid  <= req_valid;
      resp_allow  <= req_valid && allow;
      resp_region <= region;
    end
  end

endmodule
