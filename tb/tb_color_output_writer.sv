// tb_color_output_writer: 37 random 32-bit results are written through a
// memory model with 30% random stalls while the producer pauses at random.
// Results must land four to a 128-bit word in order; the 37th result must be
// flushed alone in a tenth word with the other three slots zero. A second run
// of 8 results to another address must give exactly two full words, and done
// must rise after each run.
module tb_color_output_writer;
  import me_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, done, in_valid, in_ready, awvalid, awready, wvalid, wready, wlast, bvalid, bready;
  logic [63:0] dst_addr, awaddr;
  logic [31:0] n_events;
  logic [7:0] awlen;
  logic [127:0] wdata;
  logic signed [31:0] in_result;
  logic [31:0] res [$];

  color_output_writer dut (.clk, .rst_n, .start, .dst_addr, .n_events, .done,
    .in_valid, .in_ready, .in_result,
    .m_awvalid(awvalid), .m_awready(awready), .m_awaddr(awaddr), .m_awlen(awlen),
    .m_wvalid(wvalid), .m_wready(wready), .m_wdata(wdata), .m_wlast(wlast),
    .m_bvalid(bvalid), .m_bready(bready));

  logic arready_u, rvalid_u, rlast_u;
  logic [127:0] rdata_u;
  axi_mem_model #(.DATA_W(128), .STALL_PCT(30)) mem (.clk, .rst_n,
    .arvalid(1'b0), .arready(arready_u), .araddr('0), .arlen('0),
    .rvalid(rvalid_u), .rready(1'b0), .rdata(rdata_u), .rlast(rlast_u),
    .awvalid, .awready, .awaddr, .awlen, .wvalid, .wready, .wdata, .wlast, .bvalid, .bready);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(longint base, int n);
    int sent;
    bit taken;
    res.delete();
    for (int i = 0; i < n; i++) res.push_back($urandom);
    @(negedge clk);
    dst_addr = 64'(base); n_events = 32'(n); start = 1;
    @(negedge clk);
    start = 0;
    sent = 0; taken = 0;
    while (!done || sent < n) begin
      @(negedge clk);
      if (taken) in_valid = 0;
      if (!in_valid && sent < n && ($urandom % 4 != 0)) begin
        in_valid = 1; in_result = res[sent];
      end
      #1;
      taken = in_valid && in_ready;
      if (taken) sent++;
    end
    @(negedge clk);
    in_valid = 0;
    for (int w = 0; w < (n + 3) / 4; w++) begin
      logic [127:0] got, e;
      got = mem.mem.exists(64'(base / 16 + w)) ? mem.mem[64'(base / 16 + w)] : 'x;
      e = '0;
      for (int s = 0; s < 4; s++) if (4*w + s < n) e[32*s +: 32] = res[4*w + s];
      checks++;
      if (got !== e) begin
        failures++;
        $display("run of %0d: word %0d is %h, expected %h", n, w, got, e);
      end
    end
    checks++;
    if (mem.mem.exists(64'(base / 16 + (n + 3) / 4))) begin
      failures++;
      $display("run of %0d: word written past the end", n);
    end
  endtask

  initial begin
    start = 0; in_valid = 0; in_result = 0; dst_addr = 0; n_events = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(64'h4000, 37);
    run(64'h8000, 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
