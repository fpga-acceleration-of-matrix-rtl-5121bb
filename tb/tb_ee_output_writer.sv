// tb_ee_output_writer: 40 events with random results and momenta are written
// through a stalling memory model. Each 512-bit word must hold |M|^2 in slot
// 0 unchanged and the eight momentum components multiplied by 1024 (the
// fixed-point raw value shifted left by 12, since the memory format has two
// more fractional bits), with slots 9-15 zero; done must follow the last
// write.
module tb_ee_output_writer;
  import me_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, done, in_valid, in_ready, awvalid, awready, wvalid, wready, wlast, bvalid, bready;
  logic [63:0] dst_addr, awaddr;
  logic [31:0] n_events;
  logic [7:0] awlen;
  logic [511:0] wdata;
  me_pkt_t in_pkt;
  me_pkt_t ev [40];

  ee_output_writer dut (.clk, .rst_n, .start, .dst_addr, .n_events, .done,
    .in_valid, .in_ready, .in_pkt,
    .m_awvalid(awvalid), .m_awready(awready), .m_awaddr(awaddr), .m_awlen(awlen),
    .m_wvalid(wvalid), .m_wready(wready), .m_wdata(wdata), .m_wlast(wlast),
    .m_bvalid(bvalid), .m_bready(bready));

  logic arready_u, rvalid_u, rlast_u;
  logic [511:0] rdata_u;
  axi_mem_model #(.DATA_W(512), .STALL_PCT(30)) mem (.clk, .rst_n,
    .arvalid(1'b0), .arready(arready_u), .araddr('0), .arlen('0),
    .rvalid(rvalid_u), .rready(1'b0), .rdata(rdata_u), .rlast(rlast_u),
    .awvalid, .awready, .awaddr, .awlen, .wvalid, .wready, .wdata, .wlast, .bvalid, .bready);

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fx_t rnd_fx();
    return fx_t'(int'($urandom % 100000) - 50000);
  endfunction

  function automatic logic [31:0] up(fx_t p);
    return 32'(longint'(p) * 4096);
  endfunction

  initial begin
    int sent;
    start = 0; in_valid = 0; in_pkt = '0; dst_addr = 0; n_events = 0;
    for (int i = 0; i < 40; i++) begin
      ev[i].me = mem_fx_t'($urandom);
      ev[i].mom.p3 = '{e: rnd_fx(), x: rnd_fx(), y: rnd_fx(), z: rnd_fx()};
      ev[i].mom.p4 = '{e: rnd_fx(), x: rnd_fx(), y: rnd_fx(), z: rnd_fx()};
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    dst_addr = 64'h2000; n_events = 40; start = 1;
    @(negedge clk);
    start = 0;
    sent = 0;
    while (!done) begin
      if (!in_valid && sent < 40 && ($urandom % 4 != 0)) begin
        in_valid = 1; in_pkt = ev[sent];
      end
      @(posedge clk);
      if (in_valid && in_ready) begin sent++; #1 in_valid = 0; end
      @(negedge clk);
    end
    for (int i = 0; i < 40; i++) begin
      logic [511:0] w, e;
      w = mem.mem.exists(64'(128 + i)) ? mem.mem[64'(128 + i)] : '0;
      e = '0;
      e[31:0]    = ev[i].me;
      e[63:32]   = up(ev[i].mom.p3.e);
      e[95:64]   = up(ev[i].mom.p3.x);
      e[127:96]  = up(ev[i].mom.p3.y);
      e[159:128] = up(ev[i].mom.p3.z);
      e[191:160] = up(ev[i].mom.p4.e);
      e[223:192] = up(ev[i].mom.p4.x);
      e[255:224] = up(ev[i].mom.p4.y);
      e[287:256] = up(ev[i].mom.p4.z);
      checks++;
      if (w != e) begin failures++; $display("event %0d word wrong", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
