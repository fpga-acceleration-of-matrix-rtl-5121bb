// tb_color_kernel: the 120-flow colour kernel (gg -> ttbar ggg) from memory
// to memory. Two kernels share one coefficient load of the 7260 folded
// colour-matrix entries. Kernel 0 reads and writes through memory models
// with 30% random stalls and processes 13 events, so the last 128-bit output
// word holds a single result and must be flushed with three zero slots.
// Kernel 1 has stall-free memories and 32 events; its contraction unit must
// finish one event every 4 cycles (the paper's II = 4). Every result is
// compared with a bit-exact model of the fixed-point arithmetic and with the
// real-valued double sum.
module tb_color_kernel;
  import me_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int N = 120;
  localparam int NEV [2] = '{13, 32};

  logic [1:0] start, done, arvalid, arready, rvalid, rready, rlast;
  logic [1:0] awvalid, awready, wvalid, wready, wlast, bvalid, bready;
  logic [63:0] araddr [2], awaddr [2];
  logic [7:0] arlen [2], awlen [2];
  logic [1023:0] rdata [2];
  logic [127:0] wdata [2];
  logic cfg_we;
  logic [12:0] cfg_addr;
  coef_t cfg_data;
  logic u_aw [2], u_w [2], u_b [2], u_ar [2], u_rv [2], u_rl [2];
  logic [127:0] u_rd [2];
  logic [1023:0] u_wd [2];

  for (genvar g = 0; g < 2; g++) begin : gi
    color_kernel dut (.clk, .rst_n, .start(start[g]), .src_addr(64'h0),
      .dst_addr(64'h100000), .n_events(32'(NEV[g])), .done(done[g]),
      .cfg_we, .cfg_addr, .cfg_data,
      .m_arvalid(arvalid[g]), .m_arready(arready[g]), .m_araddr(araddr[g]), .m_arlen(arlen[g]),
      .m_rvalid(rvalid[g]), .m_rready(rready[g]), .m_rdata(rdata[g]), .m_rlast(rlast[g]),
      .m_awvalid(awvalid[g]), .m_awready(awready[g]), .m_awaddr(awaddr[g]), .m_awlen(awlen[g]),
      .m_wvalid(wvalid[g]), .m_wready(wready[g]), .m_wdata(wdata[g]), .m_wlast(wlast[g]),
      .m_bvalid(bvalid[g]), .m_bready(bready[g]));
    axi_mem_model #(.DATA_W(1024), .STALL_PCT(g == 0 ? 30 : 0)) rmem (.clk, .rst_n,
      .arvalid(arvalid[g]), .arready(arready[g]), .araddr(araddr[g]), .arlen(arlen[g]),
      .rvalid(rvalid[g]), .rready(rready[g]), .rdata(rdata[g]), .rlast(rlast[g]),
      .awvalid(1'b0), .awready(u_aw[g]), .awaddr('0), .awlen('0),
      .wvalid(1'b0), .wready(u_w[g]), .wdata(u_wd[g]), .wlast(1'b0),
      .bvalid(u_b[g]), .bready(1'b1));
    axi_mem_model #(.DATA_W(128), .STALL_PCT(g == 0 ? 30 : 0)) wmem (.clk, .rst_n,
      .arvalid(1'b0), .arready(u_ar[g]), .araddr('0), .arlen('0),
      .rvalid(u_rv[g]), .rready(1'b0), .rdata(u_rd[g]), .rlast(u_rl[g]),
      .awvalid(awvalid[g]), .awready(awready[g]), .awaddr(awaddr[g]), .awlen(awlen[g]),
      .wvalid(wvalid[g]), .wready(wready[g]), .wdata(wdata[g]), .wlast(wlast[g]),
      .bvalid(bvalid[g]), .bready(bready[g]));
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // contraction-unit result times of kernel 1
  int cyc = 0;
  int t_mp [$];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (gi[1].dut.u_mp.out_valid && gi[1].dut.u_mp.out_ready) t_mp.push_back(cyc);
  end

  longint cq [$];
  real    cm [$];
  longint expq [2][$];
  real    expr [2][$];

  initial begin
    int t;
    start = 0; cfg_we = 0; cfg_addr = 0; cfg_data = 0;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) cm.push_back(color_entry(5, i, j));
    for (int i = 0; i < N; i++)
      for (int j = i; j < N; j++) cq.push_back(coef_q(5, i, j));
    // amplitude records, four 1024-bit words per event
    for (int g = 0; g < 2; g++)
      for (int e = 0; e < NEV[g]; e++) begin
        longint re [$], im [$];
        logic [4095:0] rec;
        rec = '0;
        re.delete(); im.delete();
        for (int j = 0; j < N; j++) begin
          re.push_back(longint'(int'($urandom % 4096) - 2048));
          im.push_back(longint'(int'($urandom % 4096) - 2048));
          rec[32*j +: 16]      = 16'(re[j]);
          rec[32*j + 16 +: 16] = 16'(im[j]);
        end
        expq[g].push_back(color_fixed(N, cq, re, im));
        expr[g].push_back(color_real(N, cm, re, im));
        for (int w = 0; w < 4; w++)
          if (g == 0) gi[0].rmem.mem[64'(4*e + w)] = rec[1024*w +: 1024];
          else        gi[1].rmem.mem[64'(4*e + w)] = rec[1024*w +: 1024];
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    t = 0;
    for (int i = 0; i < N; i++)
      for (int j = i; j < N; j++) begin
        @(negedge clk);
        cfg_we = 1; cfg_addr = 13'(t); cfg_data = coef_t'(cq[t]);
        t++;
      end
    @(negedge clk);
    cfg_we = 0;
    start = 2'b11;
    @(negedge clk);
    start = 0;
    while (done != 2'b11) @(negedge clk);
    for (int g = 0; g < 2; g++) begin
      real worst;
      worst = 0.0;
      for (int e = 0; e < NEV[g]; e++) begin
        logic [127:0] w;
        logic signed [31:0] v;
        real d;
        if (g == 0) w = gi[0].wmem.mem.exists(64'(65536 + e/4)) ? gi[0].wmem.mem[64'(65536 + e/4)] : 'x;
        else        w = gi[1].wmem.mem.exists(64'(65536 + e/4)) ? gi[1].wmem.mem[64'(65536 + e/4)] : 'x;
        v = w[32*(e%4) +: 32];
        checks++;
        if (longint'(v) != expq[g][e]) begin
          failures++;
          $display("kernel %0d event %0d: %0d, expected %0d", g, e, v, expq[g][e]);
        end
        d = rabs(fx2r(longint'(v), 13) - expr[g][e]);
        if (d > worst) worst = d;
        checks++;
        if (d > 0.02 + 0.01 * rabs(expr[g][e])) begin
          failures++;
          $display("kernel %0d event %0d: %f, double sum %f", g, e, fx2r(longint'(v), 13), expr[g][e]);
        end
        if (e == NEV[g] - 1 && e % 4 != 3) begin
          checks++;
          if ((w >> (32*(e%4+1))) !== '0) begin
            failures++;
            $display("kernel %0d: partial last word not zero-filled", g);
          end else
            $display("kernel %0d: last word flushed with %0d of 4 slots", g, e % 4 + 1);
        end
      end
      $display("kernel %0d: %0d events, first result %0d, largest deviation from the double sum %f", g, NEV[g], expq[g][0], worst);
    end
    checks++;
    if (t_mp.size() != NEV[1] || t_mp[NEV[1]-1] - t_mp[0] != 4 * (NEV[1] - 1)) begin
      failures++;
      $display("kernel 1: contraction results not 4 cycles apart");
    end else
      $display("kernel 1: one event every 4 cycles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
