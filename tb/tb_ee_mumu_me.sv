// tb_ee_mumu_me: 500 phase-space points with cos(theta) spread over [-1, 1]
// go through the matrix-element stage back to back, then 200 more with random
// output back-pressure. Each |M|^2 is compared with a real-valued evaluation
// of the photon + Z helicity amplitudes (within 2 % relative or 5e-5
// absolute; the paper reports 1.35 % as its largest deviation). The momenta
// must pass through unchanged, one point per cycle, with a 4-cycle latency.
module tb_ee_mumu_me;
  import me_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready;
  mom_pkt_t in_mom;
  me_pkt_t  out_pkt;

  ee_mumu_me dut (.*);

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  mom_pkt_t sent[$];
  int       t_in[$];
  int       cyc = 0, n_out = 0, lat_bad = 0;
  real      max_rel = 0.0;
  bit       bp = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    mom_pkt_t m;
    real ref_me, got, rel;
    int t0;
    m  = sent.pop_front();
    t0 = t_in.pop_front();
    if (!bp && cyc - t0 != 4) lat_bad++;
    ref_me = me_ref(fx2r(m.p3.z, FX_F) / fx2r(m.p3.e, FX_F));
    got    = fx2r(out_pkt.me, MEM_F);
    rel    = rabs(got - ref_me) / ref_me;
    if (rel > max_rel) max_rel = rel;
    checks++;
    if (rel > 0.02 && rabs(got - ref_me) > 5e-5) begin
      failures++;
      $display("point %0d: |M|^2 %g expected %g", n_out, got, ref_me);
    end
    checks++;
    if (out_pkt.mom != m) begin failures++; $display("momenta changed"); end
    n_out++;
  end

  task automatic drive(int n);
    int k;
    k = 0;
    while (k < n) begin
      real c, s, ph;
      @(negedge clk);
      c  = -1.0 + 2.0 * real'(k) / real'(n - 1);
      if (bp) c = 2.0 * real'($urandom % 10000) / 10000.0 - 1.0;
      s  = $sqrt(1.0 - c * c);
      ph = 2.0 * PI * real'($urandom % 1000) / 1000.0;
      in_valid = 1;
      in_mom.p3.e  = EBEAM_DEF;
      in_mom.p3.x = fx_t'(r2fx(EBEAM_GEV / SCALE * s * $cos(ph), FX_F));
      in_mom.p3.y = fx_t'(r2fx(EBEAM_GEV / SCALE * s * $sin(ph), FX_F));
      in_mom.p3.z = fx_t'(r2fx(EBEAM_GEV / SCALE * c, FX_F));
      in_mom.p4    = '{e: EBEAM_DEF, x: -in_mom.p3.x, y: -in_mom.p3.y, z: -in_mom.p3.z};
      if (bp) out_ready = ($urandom % 3 != 0);
      @(posedge clk);
      if (in_ready) begin sent.push_back(in_mom); t_in.push_back(cyc); k++; end
    end
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    in_valid = 0; out_ready = 1; in_mom = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    drive(500);
    repeat (10) @(posedge clk);
    checks++;
    if (n_out != 500 || lat_bad != 0) begin
      failures++;
      $display("streaming: %0d out, %0d with wrong latency", n_out, lat_bad);
    end
    bp = 1;
    drive(200);
    out_ready = 1;
    repeat (10) @(posedge clk);
    checks++;
    if (n_out != 700) begin failures++; $display("lost points: %0d", n_out); end
    $display("largest relative deviation %f %%", 100.0 * max_rel);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
