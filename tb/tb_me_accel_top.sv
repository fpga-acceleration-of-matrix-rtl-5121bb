// tb_me_accel_top: end-to-end and full-size test of the accelerator top with
// its default parameters (8 e+e- -> mu+mu- compute units, 512-bit buses,
// 120-flow colour kernel with a 1024-bit read bus). Each compute unit has
// its own memory model; units 0-3 see 30% random stalls on every channel,
// units 4-7 none. All eight are started together on different event counts
// (150 + 23u), so output runs span several 16-beat bursts. At the same time
// the 7260 folded colour coefficients of gg -> ttbar ggg are loaded and the
// colour kernel processes 21 events, reading through a memory with 25% stalls
// and writing through one with 95% stalls so that the output side pushes
// back into the contraction unit. The last output word is a partial one.
// Checked: every |M|^2 within 2% and every momentum within 6 GeV of a
// real-valued reference; every colour result bit-exact against a model of
// the fixed-point casts and close to the double sum; the zero-filled partial
// word; no contraction results closer than 4 cycles; done of every unit.
// Counted, and each must occur: back-pressure into the matrix-element stage,
// write-channel stalls, back-to-back phase-space acceptance (II = 1),
// multi-burst writes in every unit, four or more units writing in the same
// cycle, contraction results exactly 4 cycles apart (II = 4), contraction
// stalls, and the partial-word flush.
module tb_me_accel_top;
  import me_pkg::*;
  import tb_ref_pkg::*;
  localparam int NU = 8;
  localparam int NMAX = 150 + 23 * (NU - 1);
  localparam int NC = 120;
  localparam int NCOL = 21;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NU-1:0] ee_start, ee_done, ee_arvalid, ee_arready, ee_rvalid, ee_rready, ee_rlast;
  logic [NU-1:0] ee_awvalid, ee_awready, ee_wvalid, ee_wready, ee_wlast, ee_bvalid, ee_bready;
  logic [NU-1:0][63:0] ee_src_addr, ee_dst_addr, ee_araddr, ee_awaddr;
  logic [NU-1:0][31:0] ee_n_events;
  logic [NU-1:0][7:0] ee_arlen, ee_awlen;
  logic [NU-1:0][511:0] ee_rdata, ee_wdata;

  logic col_start, col_done, col_cfg_we;
  logic [63:0] col_src_addr, col_dst_addr, col_araddr, col_awaddr;
  logic [31:0] col_n_events;
  logic [12:0] col_cfg_addr;
  coef_t col_cfg_data;
  logic col_arvalid, col_arready, col_rvalid, col_rready, col_rlast;
  logic col_awvalid, col_awready, col_wvalid, col_wready, col_wlast, col_bvalid, col_bready;
  logic [7:0] col_arlen, col_awlen;
  logic [1023:0] col_rdata;
  logic [127:0] col_wdata;

  me_accel_top dut (.*);

  for (genvar u = 0; u < NU; u++) begin : g
    axi_mem_model #(.DATA_W(512), .STALL_PCT(u < 4 ? 30 : 0)) mem (.clk, .rst_n,
      .arvalid(ee_arvalid[u]), .arready(ee_arready[u]), .araddr(ee_araddr[u]), .arlen(ee_arlen[u]),
      .rvalid(ee_rvalid[u]), .rready(ee_rready[u]), .rdata(ee_rdata[u]), .rlast(ee_rlast[u]),
      .awvalid(ee_awvalid[u]), .awready(ee_awready[u]), .awaddr(ee_awaddr[u]), .awlen(ee_awlen[u]),
      .wvalid(ee_wvalid[u]), .wready(ee_wready[u]), .wdata(ee_wdata[u]), .wlast(ee_wlast[u]),
      .bvalid(ee_bvalid[u]), .bready(ee_bready[u]));
  end

  logic u_aw, u_w, u_b, u_ar, u_rv, u_rl;
  logic [127:0] u_rd;
  logic [1023:0] u_wd;
  axi_mem_model #(.DATA_W(1024), .STALL_PCT(25)) crmem (.clk, .rst_n,
    .arvalid(col_arvalid), .arready(col_arready), .araddr(col_araddr), .arlen(col_arlen),
    .rvalid(col_rvalid), .rready(col_rready), .rdata(col_rdata), .rlast(col_rlast),
    .awvalid(1'b0), .awready(u_aw), .awaddr('0), .awlen('0),
    .wvalid(1'b0), .wready(u_w), .wdata(u_wd), .wlast(1'b0), .bvalid(u_b), .bready(1'b1));
  axi_mem_model #(.DATA_W(128), .STALL_PCT(95)) cwmem (.clk, .rst_n,
    .arvalid(1'b0), .arready(u_ar), .araddr('0), .arlen('0),
    .rvalid(u_rv), .rready(1'b0), .rdata(u_rd), .rlast(u_rl),
    .awvalid(col_awvalid), .awready(col_awready), .awaddr(col_awaddr), .awlen(col_awlen),
    .wvalid(col_wvalid), .wready(col_wready), .wdata(col_wdata), .wlast(col_wlast),
    .bvalid(col_bvalid), .bready(col_bready));

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- counters
  int n_me_backpressure = 0, n_write_stall = 0, n_ps_b2b = 0, n_concurrent = 0;
  int n_col_ii4 = 0, n_col_too_close = 0, n_col_stall = 0, n_partial = 0;
  int n_aw [NU];
  logic [NU-1:0] ps_acc, ps_acc_d, me_bp;
  int cyc = 0, last_mp = -100;

  for (genvar u = 0; u < NU; u++) begin : gm
    assign ps_acc[u] = dut.g_cu[u].u_cu.s1_v && dut.g_cu[u].u_cu.s1_r;
    assign me_bp[u]  = dut.g_cu[u].u_cu.s4_v && !dut.g_cu[u].u_cu.s4_r;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (|me_bp) n_me_backpressure++;
      if (|(ee_wvalid & ~ee_wready)) n_write_stall++;
      if (|(ps_acc & ps_acc_d)) n_ps_b2b++;
      if ($countones(ee_wvalid & ee_wready) >= 4) n_concurrent++;
      for (int u = 0; u < NU; u++) if (ee_awvalid[u] && ee_awready[u]) n_aw[u]++;
      if (dut.u_color.u_mp.out_valid && !dut.u_color.u_mp.out_ready) n_col_stall++;
      if (dut.u_color.u_mp.out_valid && dut.u_color.u_mp.out_ready) begin
        if (cyc - last_mp == 4) n_col_ii4++;
        if (cyc - last_mp < 4) n_col_too_close++;
        last_mp <= cyc;
      end
    end
    ps_acc_d <= ps_acc;
  end

  // --------------------------------------------------------------- stimulus
  logic [31:0] rnd [NU][2*NMAX];
  longint cq [$];
  real    cm [$];
  longint cexp [$];
  real    cexr [$];

  function automatic int nev(int u);
    return 150 + 23 * u;
  endfunction

  task automatic check_ee(int u);
    real max_rel_me, max_abs_p;
    max_rel_me = 0.0; max_abs_p = 0.0;
    for (int e = 0; e < nev(u); e++) begin
      logic [511:0] w;
      real p3 [4];
      real me_r, me_g;
      w = g_word(u, 64'h1000 + e);
      rambo_ref(fx2r(longint'(rnd[u][2*e]), MEM_F), fx2r(longint'(rnd[u][2*e+1]), MEM_F), p3);
      me_r = me_ref(p3[3] / p3[0]);
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
    $display("cu%0d: %0d events, largest |M|^2 deviation %f %%, largest momentum deviation %f GeV",
             u, nev(u), 100.0 * max_rel_me, max_abs_p);
  endtask

  function automatic logic [511:0] g_word(int u, longint idx);
    case (u)
      0: return g[0].mem.mem.exists(idx) ? g[0].mem.mem[idx] : 'x;
      1: return g[1].mem.mem.exists(idx) ? g[1].mem.mem[idx] : 'x;
      2: return g[2].mem.mem.exists(idx) ? g[2].mem.mem[idx] : 'x;
      3: return g[3].mem.mem.exists(idx) ? g[3].mem.mem[idx] : 'x;
      4: return g[4].mem.mem.exists(idx) ? g[4].mem.mem[idx] : 'x;
      5: return g[5].mem.mem.exists(idx) ? g[5].mem.mem[idx] : 'x;
      6: return g[6].mem.mem.exists(idx) ? g[6].mem.mem[idx] : 'x;
      default: return g[7].mem.mem.exists(idx) ? g[7].mem.mem[idx] : 'x;
    endcase
  endfunction

  task automatic put_word(int u, longint idx, logic [511:0] d);
    case (u)
      0: g[0].mem.mem[idx] = d;
      1: g[1].mem.mem[idx] = d;
      2: g[2].mem.mem[idx] = d;
      3: g[3].mem.mem[idx] = d;
      4: g[4].mem.mem[idx] = d;
      5: g[5].mem.mem[idx] = d;
      6: g[6].mem.mem[idx] = d;
      default: g[7].mem.mem[idx] = d;
    endcase
  endtask

  initial begin
    int t, wait_cyc;
    ee_start = 0; col_start = 0; col_cfg_we = 0; col_cfg_addr = 0; col_cfg_data = 0;
    ps_acc_d = 0;
    for (int u = 0; u < NU; u++) begin
      n_aw[u] = 0;
      ee_src_addr[u] = 64'h0;
      ee_dst_addr[u] = 64'h40000;      // word 0x1000
      ee_n_events[u] = 32'(nev(u));
      for (int i = 0; i < 2*nev(u); i++) rnd[u][i] = 32'($urandom % (1 << MEM_F));
      for (int w = 0; w < (2*nev(u) + 15) / 16; w++) begin
        logic [511:0] d;
        d = '0;
        for (int k = 0; k < 16; k++) if (16*w + k < 2*nev(u)) d[32*k +: 32] = rnd[u][16*w + k];
        put_word(u, 64'(w), d);
      end
    end
    // colour matrix of gg -> ttbar ggg and the input records
    for (int i = 0; i < NC; i++)
      for (int j = 0; j < NC; j++) cm.push_back(color_entry(5, i, j));
    for (int i = 0; i < NC; i++)
      for (int j = i; j < NC; j++) cq.push_back(coef_q(5, i, j));
    col_src_addr = 64'h0; col_dst_addr = 64'h10000; col_n_events = NCOL;
    for (int e = 0; e < NCOL; e++) begin
      longint re [$], im [$];
      logic [4095:0] rec;
      rec = '0;
      re.delete(); im.delete();
      for (int j = 0; j < NC; j++) begin
        re.push_back(longint'(int'($urandom % 4096) - 2048));
        im.push_back(longint'(int'($urandom % 4096) - 2048));
        rec[32*j +: 16]      = 16'(re[j]);
        rec[32*j + 16 +: 16] = 16'(im[j]);
      end
      cexp.push_back(color_fixed(NC, cq, re, im));
      cexr.push_back(color_real(NC, cm, re, im));
      for (int w = 0; w < 4; w++) crmem.mem[64'(4*e + w)] = rec[1024*w +: 1024];
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // the compute units start at once; the coefficient load runs meanwhile
    @(negedge clk);
    ee_start = '1;
    @(negedge clk);
    ee_start = '0;
    t = 0;
    for (int i = 0; i < NC; i++)
      for (int j = i; j < NC; j++) begin
        col_cfg_we = 1; col_cfg_addr = 13'(t); col_cfg_data = coef_t'(cq[t]);
        t++;
        @(negedge clk);
      end
    col_cfg_we = 0;
    @(negedge clk);
    col_start = 1;
    @(negedge clk);
    col_start = 0;
    wait_cyc = 0;
    while ((ee_done != '1 || !col_done) && wait_cyc < 100000) begin
      @(negedge clk);
      wait_cyc++;
    end
    checks++;
    if (ee_done != '1 || !col_done) begin
      failures++;
      $display("not all units finished: ee_done %b col_done %b", ee_done, col_done);
    end
    for (int u = 0; u < NU; u++) check_ee(u);
    // colour results
    begin
      real worst;
      worst = 0.0;
      for (int e = 0; e < NCOL; e++) begin
        logic [127:0] w;
        logic signed [31:0] v;
        real d;
        w = cwmem.mem.exists(64'(4096 + e/4)) ? cwmem.mem[64'(4096 + e/4)] : 'x;
        v = w[32*(e%4) +: 32];
        checks++;
        if (longint'(v) != cexp[e]) begin
          failures++;
          $display("colour event %0d: %0d, expected %0d", e, v, cexp[e]);
        end
        d = rabs(fx2r(longint'(v), 13) - cexr[e]);
        if (d > worst) worst = d;
        checks++;
        if (d > 0.02 + 0.01 * rabs(cexr[e])) begin
          failures++;
          $display("colour event %0d: %f, double sum %f", e, fx2r(longint'(v), 13), cexr[e]);
        end
        if (e == NCOL - 1 && e % 4 != 3) begin
          checks++;
          if ((w >> (32*(e%4+1))) !== '0) begin
            failures++;
            $display("colour: partial last word not zero-filled");
          end else n_partial++;
        end
      end
      $display("colour: %0d events of %0d flows, largest deviation from the double sum %f",
               NCOL, NC, worst);
    end
    checks++;
    if (n_col_too_close != 0) begin
      failures++;
      $display("colour: %0d contraction results closer than 4 cycles", n_col_too_close);
    end
    // every mechanism must have occurred
    $display("mechanisms: ME back-pressure %0d, write stalls %0d, back-to-back phase space %0d",
             n_me_backpressure, n_write_stall, n_ps_b2b);
    $display("            >=4 units writing together %0d, colour II=4 gaps %0d, colour stalls %0d, partial flush %0d",
             n_concurrent, n_col_ii4, n_col_stall, n_partial);
    checks += 7;
    if (n_me_backpressure == 0) begin failures++; $display("no back-pressure into the ME stage"); end
    if (n_write_stall == 0)     begin failures++; $display("no write stalls"); end
    if (n_ps_b2b == 0)          begin failures++; $display("no back-to-back phase-space events"); end
    if (n_concurrent == 0)      begin failures++; $display("never four units writing together"); end
    if (n_col_ii4 == 0)         begin failures++; $display("no colour results 4 cycles apart"); end
    if (n_col_stall == 0)       begin failures++; $display("no contraction stalls"); end
    if (n_partial == 0)         begin failures++; $display("no partial flush"); end
    for (int u = 0; u < NU; u++) begin
      checks++;
      if (n_aw[u] < 2) begin failures++; $display("cu%0d wrote in a single burst", u); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
