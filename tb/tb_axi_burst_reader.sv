// tb_axi_burst_reader: reads 45 words (two full 16-beat bursts and a short
// one) from a memory model with random stalls and latency, with random
// back-pressure on the output stream. Every word must arrive in order and
// unchanged, and done must rise after the last word. A second run without
// back-pressure or memory stalls must deliver close to one word per cycle.
module tb_axi_burst_reader;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int DW = 128;
  logic start, done, arvalid, arready, rvalid, rready, rlast, out_valid, out_ready;
  logic [63:0] base_addr, araddr;
  logic [31:0] n_beats;
  logic [7:0]  arlen;
  logic [DW-1:0] rdata, out_data;
  logic        stall_en;

  axi_burst_reader #(.DATA_W(DW)) dut (.clk, .rst_n, .start, .base_addr, .n_beats, .done,
    .m_arvalid(arvalid), .m_arready(arready), .m_araddr(araddr), .m_arlen(arlen),
    .m_rvalid(rvalid), .m_rready(rready), .m_rdata(rdata), .m_rlast(rlast),
    .out_valid, .out_ready, .out_data);

  logic awready_u, wready_u, bvalid_u;
  axi_mem_model #(.DATA_W(DW), .STALL_PCT(25)) mem (.clk, .rst_n,
    .arvalid, .arready, .araddr, .arlen, .rvalid, .rready, .rdata, .rlast,
    .awvalid(1'b0), .awready(awready_u), .awaddr('0), .awlen('0),
    .wvalid(1'b0), .wready(wready_u), .wdata('0), .wlast(1'b0), .bvalid(bvalid_u), .bready(1'b0));

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int n, longint base, bit bp, output int cycles);
    int got;
    got = 0; cycles = 0;
    @(negedge clk);
    base_addr = 64'(base); n_beats = n; start = 1;
    @(negedge clk);
    start = 0;
    while (!done) begin
      out_ready = bp ? ($urandom % 4 != 0) : 1'b1;
      @(posedge clk);
      cycles++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data != {DW/32{32'(base/16 + got) ^ 32'h5a5a0000}}) begin
          failures++;
          $display("word %0d wrong: %h", got, out_data);
        end
        got++;
      end
      @(negedge clk);
      if (cycles > 5000) break;
    end
    checks++;
    if (got != n) begin failures++; $display("got %0d of %0d", got, n); end
  endtask

  initial begin
    int cyc;
    start = 0; out_ready = 0; base_addr = 0; n_beats = 0; stall_en = 1;
    for (int i = 0; i < 200; i++) mem.mem[64'(i)] = {DW/32{32'(i) ^ 32'h5a5a0000}};
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(45, 64'h40, 1, cyc);
    run(7, 64'h400, 1, cyc);
    // without back-pressure: 64 words in well under 2 cycles per word
    run(64, 64'h100, 0, cyc);
    checks++;
    if (cyc > 64 * 2) begin failures++; $display("slow: %0d cycles", cyc); end
    $display("64 words in %0d cycles", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
