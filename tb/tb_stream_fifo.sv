// tb_stream_fifo: random push/pop traffic against a queue model; checks
// order, data, the full flag at DEPTH entries and the level output.
module tb_stream_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  localparam int D = 8;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [15:0] in_data, out_data;
  logic [3:0] level;
  stream_fifo #(.T(logic [15:0]), .DEPTH(D)) dut (.*);

  logic [15:0] q[$];
  int popped = 0;
  bit held = 0;
  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // fill to full
    for (int i = 0; i < D; i++) begin
      in_valid = 1; in_data = 16'(100 + i); q.push_back(in_data);
      @(posedge clk); #1;
    end
    in_valid = 0;
    #1;
    chk(!in_ready, "full after DEPTH pushes");
    chk(level == 4'(D), "level equals DEPTH");
    // random traffic
    for (int c = 0; c < 2000; c++) begin
      // a producer keeps an unaccepted word (the handshake rule)
      if (!held) begin
        in_valid = ($urandom % 3) != 0;
        in_data  = 16'($urandom);
      end
      out_ready = ($urandom % 2) != 0;
      #1;
      if (out_valid && out_ready) begin
        chk(out_data == q[0], "data order");
        void'(q.pop_front());
        popped++;
      end
      if (in_valid && in_ready) q.push_back(in_data);
      held = in_valid && !in_ready;
      @(posedge clk); #1;
      chk(32'(level) == q.size(), "level tracks model");
    end
    chk(popped > 500, "enough traffic");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
