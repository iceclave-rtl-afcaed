// stream_cipher_engine: protects flash pages on their way to SSD DRAM.
//
// Pages read from flash cross the controller's internal bus, which a board-
// level attacker may snoop. The encryption engine next to the flash
// controller encrypts each page with a Trivium keystream seeded by a per-page
// IV; the IV and the ciphered beats cross the bus; the decryption engine next
// to SSD DRAM regenerates the keystream from the same key and IV and restores
// the plain page. Both engines hold the same key, written only from the secure
// world. The bus signals are outputs so the ciphered traffic can be observed.
//
// Interface: `page_start`/`ppa` open a page, page beats enter on flash_*,
// plain beats leave on dram_*. Latency: the first beat leaves about 20 cycles
// after page_start (IV draw + 18-cycle Trivium warm-up, both engines in
// lockstep); then one 64-bit beat per cycle. The pairing of the two engines
// over the unsecure bus follows the paper's figure; the signal-level protocol
// is this design's.
module stream_cipher_engine
  import iceclave_pkg::*;
#(
  parameter int unsigned BUF_DEPTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             key_we,
  input  world_e           key_world,
  input  logic [KEY_W-1:0] key_in,
  input  logic             seed_we,
  input  logic [IV0_W-1:0] seed,
  input  logic             page_start,
  input  logic [PPA_W-1:0] ppa,
  // from the flash controller's page buffer
  input  logic             flash_valid,
  output logic             flash_ready,
  input  logic [KS_W-1:0]  flash_data,
  // the unsecure bus, observable
  output logic             bus_iv_valid,
  output logic [IV_W-1:0]  bus_iv,
  output logic             bus_valid,
  output logic [KS_W-1:0]  bus_data,
  // to SSD DRAM
  output logic             dram_valid,
  input  logic             dram_ready,
  output logic [KS_W-1:0]  dram_data
);

  logic bus_ready;

  encryption_engine #(.BUF_DEPTH(BUF_DEPTH)) u_enc (
    .clk, .rst_n, .key_we, .key_world, .key_in, .seed_we, .seed,
    .page_start, .ppa, .iv_valid(bus_iv_valid), .iv_out(bus_iv),
    .in_valid(flash_valid), .in_ready(flash_ready), .in_data(flash_data),
    .out_valid(bus_valid), .out_ready(bus_ready), .out_data(bus_data)
  );

  cipher_lane #(.BUF_DEPTH(BUF_DEPTH)) u_dec (
    .clk, .rst_n, .key_we, .key_world, .key_in,
    .start(bus_iv_valid), .iv(bus_iv),
    .in_valid(bus_valid), .in_ready(bus_ready), .in_data(bus_data),
    .out_valid(dram_valid), .out_ready(dram_ready), .out_data(dram_data)
  );

endmodule
