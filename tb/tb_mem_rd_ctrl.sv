// tb_mem_rd_ctrl: a burst memory model answers the read channel; the word
// stream must reproduce memory contents in order, burst lengths must not
// exceed BURST_LEN, done must pulse, and with a memory that never stalls
// the controller must deliver about one word per cycle (the 64 bits per
// cycle input rate).
module tb_mem_rd_ctrl;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic start, busy, done, ar_valid, ar_ready, r_valid, r_ready, r_last, out_valid, out_ready;
  logic [31:0] base, nwords, ar_addr;
  logic [7:0] ar_len;
  logic [63:0] r_data, out_data;
  mem_rd_ctrl #(.BURST_LEN(16), .FIFO_DEPTH(64)) dut (.*);

  function automatic logic [63:0] mem(logic [31:0] a);
    return {a ^ 32'hA5A5_0000, a * 3};
  endfunction

  // memory model: bursts queued, beats returned with optional stalls
  logic [31:0] bq_addr[$];
  int          bq_len[$];
  int beat = 0;
  bit stall_mode = 0;
  assign ar_ready = 1'b1;
  int bad_len = 0;
  always @(posedge clk) begin
    bit hr, ha;
    logic [31:0] aa; logic [7:0] al;
    hr = rst_n && r_valid && r_ready; ha = rst_n && ar_valid && ar_ready; aa = ar_addr; al = ar_len;
    #1;
    if (hr) begin
      if (beat == bq_len[0] - 1) begin beat = 0; void'(bq_addr.pop_front()); void'(bq_len.pop_front()); end
      else beat++;
    end
    if (ha) begin
      bq_addr.push_back(aa); bq_len.push_back(al + 1);
      if (al > 15) bad_len++;
    end
    // drive the next beat
    r_valid = 0; r_data = '0; r_last = 0;
    if (bq_addr.size() > 0 && !(stall_mode && ($urandom % 3 == 0))) begin
      r_valid = 1;
      r_data  = mem(bq_addr[0] + 32'(beat * 8));
      r_last  = (beat == bq_len[0] - 1);
    end
  end

  task automatic run(int n, logic [31:0] b, bit stalls, bit rand_ready);
    int got = 0, t0, t1;
    bit saw_done = 0;
    stall_mode = stalls;
    base = b; nwords = n; start = 1;
    @(posedge clk); #1; start = 0;
    t0 = $time;
    while (!saw_done) begin
      out_ready = rand_ready ? ($urandom % 4 != 0) : 1'b1;
      #1;
      if (out_valid && out_ready) begin
        chk(out_data == mem(b + 32'(got * 8)), $sformatf("word %0d", got));
        got++;
      end
      @(posedge clk); #1;
      if (done) saw_done = 1;
    end
    t1 = $time;
    chk(got == n, $sformatf("word count %0d of %0d", got, n));
    if (!stalls && !rand_ready)
      chk((t1 - t0) / 10 <= n + 8, $sformatf("rate: %0d cycles for %0d words", (t1 - t0) / 10, n));
  endtask

  initial begin
    start = 0; base = 0; nwords = 0; out_ready = 1; r_valid = 0; r_data = 0; r_last = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    run(200, 32'h1000, 0, 0);
    run(37, 32'h8000, 1, 1);
    run(1, 32'h40, 1, 0);
    chk(bad_len == 0, "burst length within BURST_LEN");
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
