// tb_pte_perm_check: exhaustive check of the three-region descriptor decode.
// Every combination of ES, AP[2:1], NS, world and direction is applied with
// random filler in the other descriptor bits; expected region and permission
// come from the region table (normal: ES=1 AP=01 NS=1, protected: ES=0 AP=01
// NS=1, secure: ES=0 AP=00 NS=0; secure world always allowed), plus the
// read-only normal page (ES=1 AP=11 NS=1) that refuses normal-world stores.
module tb_pte_perm_check;
  import iceclave_pkg::*;
  logic [63:0] pte;
  world_e      world;
  logic        is_write, allow, fault, page_ro;
  region_e     region;
  int checks = 0, failures = 0;

  pte_perm_check dut (.pte, .world, .is_write, .region, .page_ro, .allow, .fault);

  initial begin
    for (int rep = 0; rep < 4; rep++)
      for (int v = 0; v < 64; v++) begin
        logic es, ns, wr, sw; logic [1:0] ap;
        region_e er; logic ea;
        {es, ap, ns, wr, sw} = 6'(v);
        pte = {$urandom, $urandom};
        pte[55] = es; pte[7:6] = ap; pte[5] = ns;
        world = sw ? WORLD_SECURE : WORLD_NORMAL;
        is_write = wr;
        if (es && ap[0] && ns)              er = REGION_NORMAL;
        else if (!es && ap == 2'b01 && ns)  er = REGION_PROTECTED;
        else if (!es && ap == 2'b00 && !ns) er = REGION_SECURE;
        else                                er = REGION_INVALID;
        ea = sw ? 1'b1 : (er == REGION_NORMAL) ? !(wr && ap[1]) :
             (er == REGION_PROTECTED) ? !wr : 1'b0;
        #1;
        checks++;
        if (region != er || allow != ea || fault != !ea || page_ro != ap[1]) begin
          failures++;
          $display("FAIL es=%b ap=%b ns=%b wr=%b sw=%b: region %0d allow %b", es, ap, ns, wr, sw, region, allow);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
