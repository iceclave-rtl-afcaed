// tb_tzasc_filter: region filter of the address-space controller.
// Programs the two boundaries from the secure world, tries to move them from
// the normal world (must be refused), then checks random accesses against a
// model of the three-region map and the permission rules, including the
// one-cycle response latency.
module tb_tzasc_filter;
  import iceclave_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0, cfg_sel = 0, cfg_err;
  world_e cfg_world = WORLD_SECURE, req_world = WORLD_NORMAL;
  logic [31:0] cfg_data = 0, req_addr = 0;
  logic req_valid = 0, req_write = 0, resp_valid, resp_allow;
  region_e resp_region;
  int checks = 0, failures = 0;
  logic [31:0] pbase, sbase;

  tzasc_filter dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic cfg(input world_e w, input logic sel, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_world = w; cfg_sel = sel; cfg_data = d;
    @(negedge clk); cfg_we = 0;
    chk(cfg_err == (w != WORLD_SECURE), "cfg_err");
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    // reset map
    pbase = 32'h8000_0000; sbase = 32'hC000_0000;
    pbase = 32'h3000_0000; sbase = 32'h3800_0000;
    cfg(WORLD_SECURE, 0, pbase);
    cfg(WORLD_SECURE, 1, sbase);
    cfg(WORLD_NORMAL, 1, 32'hFFFF_FFF0);    // refused
    for (int i = 0; i < 400; i++) begin
      region_e er; logic ea;
      @(negedge clk);
      req_valid = 1;
      case (i % 4)
        0: req_addr = pbase + ($urandom % (sbase - pbase));
        1: req_addr = sbase + ($urandom % 32'h1000);
        2: req_addr = $urandom % pbase;
        default: req_addr = (i % 8 == 3) ? pbase - 1 : sbase - 1;
      endcase
      req_world = ($urandom % 2) ? WORLD_SECURE : WORLD_NORMAL;
      req_write = $urandom % 2;
      er = (req_addr >= sbase) ? REGION_SECURE : (req_addr >= pbase) ? REGION_PROTECTED : REGION_NORMAL;
      ea = (req_world == WORLD_SECURE) || er == REGION_NORMAL || (er == REGION_PROTECTED && !req_write);
      @(posedge clk); #1;
      chk(resp_valid && resp_region == er && resp_allow == ea,
          $sformatf("addr %h world %0d wr %b", req_addr, req_world, req_write));
    end
    @(negedge clk); req_valid = 0;
    @(posedge clk); #1; chk(!resp_valid && !resp_allow, "idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
