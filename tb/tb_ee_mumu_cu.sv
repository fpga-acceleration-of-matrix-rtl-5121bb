// tb_ee_mumu_cu: one complete run of a compute unit. 200 events of random
// numbers are placed in memory, the unit is started, and every output word is
// checked against a real-valued reference of the whole chain: |M|^2 within
// 2 %, momenta within 6 GeV (the paper's largest momentum deviation is
// 5.11 GeV; it occurs, as here, where sin(theta) is close to zero). The run is made twice: against a memory that stalls at random,
// which exercises back-pressure through all four stages, and against one
// that never stalls, where the unit must sustain about one event per cycle
// (the paper's II = 1): 200 events in under 200 + 120 cycles from start.
module tb_ee_mumu_cu;
  import me_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [1:0] start, done;
  logic [63:0] src_addr, dst_addr;
  logic [31:0] n_events;
  logic [1:0] arvalid, arready, rvalid, rready, rlast, awvalid, awready, wvalid, wready, wlast, bvalid, bready;
  logic [1:0][63:0] araddr, awaddr;
  logic [1:0][7:0] arlen, awlen;
  logic [1:0][511:0] rdata, wdata;

  for (genvar u = 0; u < 2; u++) begin : g
    ee_mumu_cu dut (.clk, .rst_n, .start(start[u]), .src_addr, .dst_addr, .n_events, .done(done[u]),
      .m_arvalid(arvalid[u]), .m_arready(arready[u]), .m_araddr(araddr[u]), .m_arlen(arlen[u]),
      .m_rvalid(rvalid[u]), .m_rready(rready[u]), .m_rdata(rdata[u]), .m_rlast(rlast[u]),
      .m_awvalid(awvalid[u]), .m_awready(awready[u]), .m_awaddr(awaddr[u]), .m_awlen(awlen[u]),
      .m_wvalid(wvalid[u]), .m_wready(wready[u]), .m_wdata(wdata[u]), .m_wlast(wlast[u]),
      .m_bvalid(bvalid[u]), .m_bready(bready[u]));
    axi_mem_model #(.DATA_W(512), .STALL_PCT(u == 0 ? 30 : 0)) mem (.clk, .rst_n,
      .arvalid(arvalid[u]), .arready(arready[u]), .araddr(araddr[u]), .arlen(arlen[u]),
      .rvalid(rvalid[u]), .rready(rready[u]), .rdata(rdata[u]), .rlast(rlast[u]),
      .awvalid(awvalid[u]), .awready(awready[u]), .awaddr(awaddr[u]), .awlen(awlen[u]),
      .wvalid(wvalid[u]), .wready(wready[u]), .wdata(wdata[u]), .wlast(wlast[u]),
      .bvalid(bvalid[u]), .bready(bready[u]));
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] rnd [2*N];

  task automatic load_mem(int u);
    for (int w = 0; w < (2*N + 15) / 16; w++) begin
      logic [511:0] d;
      d = '0;
      for (int k = 0; k < 16; k++) if (16*w + k < 2*N) d[32*k +: 32] = rnd[16*w + k];
      if (u == 0) g[0].mem.mem[64'(w)] = d; else g[1].mem.mem[64'(w)] = d;
    end
  endtask

  task automatic check_out(int u);
    real max_rel_me, max_abs_p;
    max_rel_me = 0.0; max_abs_p = 0.0;
    for (int e = 0; e < N; e++) begin
      logic [511:0] w;
      real p3 [4];
      real me_r, me_g, c;
      longint idx;
      idx = 64'h100 + e;   // dst 0x4000 / 64
      if (u == 0) w = g[0].mem.mem.exists(idx) ? g[0].mem.mem[idx] : '0;
      else        w = g[1].mem.mem.exists(idx) ? g[1].mem.mem[idx] : '0;
      rambo_ref(fx2r(longint'(rnd[2*e]), MEM_F), fx2r(longint'(rnd[2*e+1]), MEM_F), p3);
      c    = p3[3] / p3[0];
      me_r = me_ref(c);
      me_g = fx2r(longint'($signed(w[31:0])), MEM_F);
      checks++;
      if (rabs(me_g - me_r) / me_r > 0.02 && rabs(me_g - me_r) > 5e-5) begin
        failures++;
        $display("cu%0d event %0d: |M|^2 %g expected %g", u, e, me_g, me_r);
      end
      if (rabs(me_g - me_r) / me_r > max_rel_me) max_rel_me = rabs(me_g - me_r) / me_r;
      for (int k = 0; k < 4; k++) begin
        real g3, g4;
        g3 = fx2r(longint'($signed(w[32*(1+k) +: 32])), MEM_F);
        g4 = fx2r(longint'($signed(w[32*(5+k) +: 32])), MEM_F);
        checks++;
        if (rabs(g3 - p3[k]) > 6.0 || rabs(g4 - (k == 0 ? p3[0] : -p3[k])) > 6.0) begin
          failures++;
          $display("cu%0d event %0d component %0d: %f %f expected %f", u, e, k, g3, g4, p3[k]);
        end
        if (rabs(g3 - p3[k]) > max_abs_p) max_abs_p = rabs(g3 - p3[k]);
      end
    end
    $display("cu%0d: largest |M|^2 deviation %f %%, largest momentum deviation %f GeV",
             u, 100.0 * max_rel_me, max_abs_p);
  endtask

  initial begin
    int cyc;
    start = 0; src_addr = 0; dst_addr = 64'h4000; n_events = N;
    for (int i = 0; i < 2*N; i++) rnd[i] = 32'($urandom % (1 << MEM_F));
    rnd[0] = 0; rnd[1] = 0;                         // cos(theta) = -1, phi = 0
    rnd[2] = 32'((1 << MEM_F) - 1); rnd[3] = 32'(1 << (MEM_F - 1));
    load_mem(0);
    load_mem(1);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // run 1: stalling memory
    @(negedge clk); start = 2'b01; @(negedge clk); start = 0;
    cyc = 0;
    while (!done[0] && cyc < 20000) begin @(posedge clk); cyc++; end
    checks++;
    if (!done[0]) failures++;
    check_out(0);
    // run 2: memory without stalls, rate check
    @(negedge clk); start = 2'b10; @(negedge clk); start = 0;
    cyc = 1;
    while (!done[1] && cyc < 20000) begin @(posedge clk); cyc++; end
    checks++;
    if (cyc > N + 120) begin failures++; end
    $display("%0d events in %0d cycles from start to done", N, cyc);
    check_out(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
