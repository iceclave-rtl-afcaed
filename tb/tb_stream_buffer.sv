// tb_stream_buffer: random push/pop traffic against a queue model, checking
// order, full/empty flow control, push-while-full-with-pop and flush.
module tb_stream_buffer;
  localparam int D = 6;
  logic clk = 0, rst_n = 0, flush = 0, wr_valid = 0, wr_ready, rd_valid, rd_ready = 0;
  logic [63:0] wr_data = 0, rd_data;
  logic [63:0] q [$];
  int checks = 0, failures = 0, fulls = 0;

  stream_buffer #(.W(64), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      wr_valid = ($urandom % 3) != 0;
      wr_data  = {$urandom, $urandom};
      rd_ready = (i / 200) % 2 ? ($urandom % 4 == 0) : ($urandom % 2);
      flush    = (i % 500 == 499);
      #1;
      chk(rd_valid == (q.size() != 0), "rd_valid");
      chk(wr_ready == (q.size() < D || rd_ready), "wr_ready");
      if (q.size() == D) fulls++;
      if (rd_valid) chk(rd_data == q[0], "order");
      @(posedge clk);
      if (flush) q.delete();
      else begin
        if (rd_valid && rd_ready) void'(q.pop_front());
        if (wr_valid && wr_ready) q.push_back(wr_data);
      end
      @(negedge clk);
    end
    chk(fulls > 0, "buffer filled at least once");
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
