// tb_color_input_loader: amplitude records of 120 colour flows (3840 bits,
// four 1024-bit words per event) are read from two memory models. The first
// loader sees a memory with 30% random stalls and a slow consumer, ready one
// cycle in eight; every record must arrive complete and in order. The second
// loader sees a stall-free memory and a consumer that is always ready: after
// the first record, records must come exactly four cycles apart, which is
// the initiation interval of the 120-flow kernel.
module tb_color_input_loader;
  import me_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int NEV = 24;
  localparam int VW  = 3840;

  logic [1:0] start, done, arvalid, arready, rvalid, rready, rlast, out_valid, out_ready;
  logic [63:0] araddr [2];
  logic [7:0] arlen [2];
  logic [1023:0] rdata [2];
  logic [VW-1:0] out_amps [2];
  logic [VW-1:0] ev [NEV];
  logic unused_aw [2], unused_w [2], unused_b [2];

  for (genvar g = 0; g < 2; g++) begin : gi
    color_input_loader dut (.clk, .rst_n, .start(start[g]), .src_addr(64'h1000),
      .n_events(32'(NEV)), .done(done[g]),
      .m_arvalid(arvalid[g]), .m_arready(arready[g]), .m_araddr(araddr[g]), .m_arlen(arlen[g]),
      .m_rvalid(rvalid[g]), .m_rready(rready[g]), .m_rdata(rdata[g]), .m_rlast(rlast[g]),
      .out_valid(out_valid[g]), .out_ready(out_ready[g]), .out_amps(out_amps[g]));
    axi_mem_model #(.DATA_W(1024), .STALL_PCT(g == 0 ? 30 : 0)) mem (.clk, .rst_n,
      .arvalid(arvalid[g]), .arready(arready[g]), .araddr(araddr[g]), .arlen(arlen[g]),
      .rvalid(rvalid[g]), .rready(rready[g]), .rdata(rdata[g]), .rlast(rlast[g]),
      .awvalid(1'b0), .awready(unused_aw[g]), .awaddr('0), .awlen('0),
      .wvalid(1'b0), .wready(unused_w[g]), .wdata('0), .wlast(1'b0),
      .bvalid(unused_b[g]), .bready(1'b1));
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic run(int g);
    int got;
    int t [$];
    got = 0;
    @(negedge clk);
    start[g] = 1;
    @(negedge clk);
    start[g] = 0;
    while (got < NEV) begin
      @(negedge clk);
      out_ready[g] = (g == 1) ? 1'b1 : ($urandom % 8 == 0);
      #1;
      if (out_valid[g] && out_ready[g]) begin
        checks++;
        if (out_amps[g] != ev[got]) begin
          failures++;
          $display("loader %0d: record %0d wrong", g, got);
        end
        t.push_back(cyc);
        got++;
      end
    end
    if (g == 1) begin
      checks++;
      if (t[NEV-1] - t[0] != 4 * (NEV - 1)) begin
        failures++;
        $display("records not 4 cycles apart: %0d cycles for %0d", t[NEV-1] - t[0], NEV - 1);
      end else
        $display("stall-free memory: one record every 4 cycles");
    end
    repeat (4) @(negedge clk);
    checks++;
    if (!done[g]) begin failures++; $display("loader %0d: done not raised", g); end
  endtask

  initial begin
    start = 0; out_ready = 0;
    for (int e = 0; e < NEV; e++) begin
      logic [4095:0] rec;
      for (int k = 0; k < 128; k++) rec[32*k +: 32] = $urandom;
      ev[e] = rec[VW-1:0];
      for (int w = 0; w < 4; w++) begin
        gi[0].mem.mem[64'(32 + 4*e + w)] = rec[1024*w +: 1024];
        gi[1].mem.mem[64'(32 + 4*e + w)] = rec[1024*w +: 1024];
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
