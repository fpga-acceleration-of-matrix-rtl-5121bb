// tb_axi_burst_writer: streams 37 words (two 16-beat bursts and a 5-beat
// one) into the writer with random gaps, against a memory model with random
// stalls. Checks that every word lands at its address, that words next to the
// block are untouched, that done rises only after all data is written, and
// the burst boundaries (the model flags a missing or early wlast).
module tb_axi_burst_writer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int DW = 64;
  logic start, done, in_valid, in_ready, awvalid, awready, wvalid, wready, wlast, bvalid, bready;
  logic [63:0] base_addr, awaddr;
  logic [31:0] n_beats;
  logic [7:0]  awlen;
  logic [DW-1:0] in_data, wdata;
  int n_aw = 0;

  axi_burst_writer #(.DATA_W(DW)) dut (.clk, .rst_n, .start, .base_addr, .n_beats, .done,
    .in_valid, .in_ready, .in_data,
    .m_awvalid(awvalid), .m_awready(awready), .m_awaddr(awaddr), .m_awlen(awlen),
    .m_wvalid(wvalid), .m_wready(wready), .m_wdata(wdata), .m_wlast(wlast),
    .m_bvalid(bvalid), .m_bready(bready));

  logic arready_u, rvalid_u, rlast_u;
  logic [DW-1:0] rdata_u;
  axi_mem_model #(.DATA_W(DW), .STALL_PCT(30)) mem (.clk, .rst_n,
    .arvalid(1'b0), .arready(arready_u), .araddr('0), .arlen('0),
    .rvalid(rvalid_u), .rready(1'b0), .rdata(rdata_u), .rlast(rlast_u),
    .awvalid, .awready, .awaddr, .awlen, .wvalid, .wready, .wdata, .wlast, .bvalid, .bready);

  always @(posedge clk) if (awvalid && awready) n_aw++;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sent;
    start = 0; in_valid = 0; in_data = 0; base_addr = 0; n_beats = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    base_addr = 64'h80; n_beats = 37; start = 1;   // word index 16
    @(negedge clk);
    start = 0;
    sent = 0;
    while (!done) begin
      // a source keeps a word on offer until it is taken
      if (!in_valid) in_valid = (sent < 37) && ($urandom % 3 != 0);
      in_data  = 64'hC0DE_0000_0000_0000 | 64'(sent);
      @(posedge clk);
      if (in_valid && in_ready) begin sent++; #1 in_valid = 0; end
      @(negedge clk);
    end
    checks++;
    if (sent != 37) begin failures++; $display("sent %0d", sent); end
    for (int i = 0; i < 37; i++) begin
      checks++;
      if (!mem.mem.exists(64'(16 + i)) || mem.mem[64'(16 + i)] != (64'hC0DE_0000_0000_0000 | 64'(i))) begin
        failures++;
        $display("word %0d wrong", i);
      end
    end
    checks++;
    if (mem.mem.exists(64'd15) || mem.mem.exists(64'd53)) begin failures++; $display("stray write"); end
    checks++;
    if (n_aw != 3) begin failures++; $display("bursts %0d", n_aw); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
