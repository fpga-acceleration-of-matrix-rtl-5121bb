// tb_ee_input_loader: 21 events (two full 512-bit words and a partial one)
// are unpacked from memory with random memory stalls and random output
// back-pressure. Each packet must carry numbers 2e and 2e+1 of the stream,
// exactly 21 packets must leave, and without back-pressure the loader must
// deliver one event per cycle once data flows.
module tb_ee_input_loader;
  import me_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, done, arvalid, arready, rvalid, rready, rlast, out_valid, out_ready;
  logic [63:0] src_addr, araddr;
  logic [31:0] n_events;
  logic [7:0] arlen;
  logic [511:0] rdata;
  rnd_pkt_t out_pkt;

  ee_input_loader dut (.clk, .rst_n, .start, .src_addr, .n_events, .done,
    .m_arvalid(arvalid), .m_arready(arready), .m_araddr(araddr), .m_arlen(arlen),
    .m_rvalid(rvalid), .m_rready(rready), .m_rdata(rdata), .m_rlast(rlast),
    .out_valid, .out_ready, .out_pkt);

  logic awready_u, wready_u, bvalid_u;
  axi_mem_model #(.DATA_W(512), .STALL_PCT(20)) mem (.clk, .rst_n,
    .arvalid, .arready, .araddr, .arlen, .rvalid, .rready, .rdata, .rlast,
    .awvalid(1'b0), .awready(awready_u), .awaddr('0), .awlen('0),
    .wvalid(1'b0), .wready(wready_u), .wdata('0), .wlast(1'b0), .bvalid(bvalid_u), .bready(1'b0));

  function automatic logic [31:0] num(int k);
    return 32'h1000_0000 + 32'(k * 7);
  endfunction

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int n, bit bp, output int first, output int last);
    int got, cyc;
    got = 0; cyc = 0; first = -1; last = -1;
    @(negedge clk);
    src_addr = 64'h1000; n_events = n; start = 1;
    @(negedge clk);
    start = 0;
    while (got < n && cyc < 3000) begin
      out_ready = bp ? ($urandom % 3 != 0) : 1'b1;
      @(posedge clk);
      cyc++;
      if (out_valid && out_ready) begin
        if (first < 0) first = cyc;
        last = cyc;
        checks++;
        if (out_pkt.r_theta != num(2*got) || out_pkt.r_phi != num(2*got+1)) begin
          failures++;
          $display("event %0d: %h %h", got, out_pkt.r_theta, out_pkt.r_phi);
        end
        got++;
      end
      @(negedge clk);
    end
    out_ready = 1;
    repeat (20) @(posedge clk);
    checks++;
    if (got != n || out_valid) begin failures++; $display("got %0d of %0d", got, n); end
    checks++;
    if (!done) begin failures++; $display("done low"); end
  endtask

  initial begin
    int f, l;
    start = 0; out_ready = 0; src_addr = 0; n_events = 0;
    for (int w = 0; w < 16; w++) begin
      logic [511:0] d;
      for (int k = 0; k < 16; k++) d[32*k +: 32] = num(16*w + k);
      mem.mem[64'(64 + w)] = d;        // 0x1000 / 64 = 64
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(21, 1, f, l);
    run(64, 0, f, l);
    // 64 events in 8 words: once flowing, close to one event per cycle
    checks++;
    if (l - f > 64 + 16) begin failures++; $display("rate: %0d cycles", l - f); end
    $display("64 events delivered over %0d cycles", l - f + 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
