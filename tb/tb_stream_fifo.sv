// tb_stream_fifo: random traffic through a 4-deep FIFO with random stalls on
// both sides. Checks order and content against a queue, that it never accepts
// when full (count <= DEPTH) and that a back-to-back run moves one word per
// cycle.
module tb_stream_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [15:0] in_data, out_data;
  logic [2:0] count;
  logic [15:0] q[$];

  stream_fifo #(.WIDTH(16), .DEPTH(4)) dut (.*);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int sent = 0, got = 0, full_seen = 0, n_fast = 0;
  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // phase 1: random valid/ready
    while (got < 500) begin
      @(negedge clk);
      in_valid  = (sent < 500) && ($urandom % 3 != 0);
      in_data   = 16'($urandom);
      out_ready = ($urandom % 3 != 0);
      @(posedge clk);
      if (!in_ready) full_seen++;
      if (out_valid && out_ready) begin
        checks++;
        if (q.size() == 0 || out_data != q[0]) begin
          failures++;
          $display("mismatch: got %h", out_data);
        end
        if (q.size() != 0) void'(q.pop_front());
        got++;
      end
      if (in_valid && in_ready) begin q.push_back(in_data); sent++; end
      checks++;
      if (count > 4) failures++;
      #1;
    end
    // phase 2: both sides always ready -> one word per cycle
    @(negedge clk);
    out_ready = 1;
    for (int i = 0; i < 50; i++) begin
      in_valid = 1; in_data = 16'(i);
      @(posedge clk);
      if (out_valid) begin
        checks++;
        if (out_data != 16'(n_fast)) failures++;
        n_fast++;
      end
      @(negedge clk);
    end
    checks++;
    if (n_fast < 48) begin failures++; $display("throughput %0d/50", n_fast); end
    checks++;
    if (full_seen == 0) begin failures++; $display("never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
