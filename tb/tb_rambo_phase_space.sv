// tb_rambo_phase_space: 400 random points. For each the momenta are compared
// with a real-valued evaluation of the same two-body construction (within
// 1e-3 in scaled units, about 1 GeV, per component), and the exact rules are
// checked: both energies equal the beam energy, the three-momenta cancel, and
// p3 is massless to within rounding. A back-to-back run checks one point per
// cycle and the 3-cycle latency; a run with random back-pressure checks that
// nothing is lost or reordered.
module tb_rambo_phase_space;
  import me_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready;
  rnd_pkt_t in_pkt;
  mom_pkt_t out_mom;

  rambo_phase_space dut (.*);

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  rnd_pkt_t sent[$];
  int       t_in[$];
  int       cyc = 0;
  int       n_out = 0, lat_bad = 0;
  bit       bp = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // checker
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    rnd_pkt_t r;
    real p3 [4];
    real tol, m2;
    r = sent.pop_front();
    if (!bp && cyc - t_in.pop_front() != 3) lat_bad++;
    else if (bp) void'(t_in.pop_front());
    rambo_ref(fx2r(longint'(r.r_theta), MEM_F), fx2r(longint'(r.r_phi), MEM_F), p3);
    // near cos(theta) = +-1 the square root magnifies the rounding of c^2;
    // 1e-3 scaled units is about 1 GeV
    tol = 1.0e-3;
    checks++;
    if (rabs(fx2r(out_mom.p3.x, FX_F) - p3[1] / SCALE) > tol ||
        rabs(fx2r(out_mom.p3.y, FX_F) - p3[2] / SCALE) > tol ||
        rabs(fx2r(out_mom.p3.z, FX_F) - p3[3] / SCALE) > tol) begin
      failures++;
      $display("point %0d: (%f %f %f) expected (%f %f %f)", n_out,
        fx2r(out_mom.p3.x, FX_F), fx2r(out_mom.p3.y, FX_F), fx2r(out_mom.p3.z, FX_F),
        p3[1]/SCALE, p3[2]/SCALE, p3[3]/SCALE);
    end
    checks++;
    if (out_mom.p3.e != EBEAM_DEF || out_mom.p4.e != EBEAM_DEF ||
        out_mom.p3.x + out_mom.p4.x != 0 || out_mom.p3.y + out_mom.p4.y != 0 ||
        out_mom.p3.z + out_mom.p4.z != 0) begin
      failures++;
      $display("conservation broken at point %0d", n_out);
    end
    m2 = fx2r(out_mom.p3.e, FX_F) ** 2 - fx2r(out_mom.p3.x, FX_F) ** 2
       - fx2r(out_mom.p3.y, FX_F) ** 2 - fx2r(out_mom.p3.z, FX_F) ** 2;
    checks++;
    if (rabs(m2) > 2e-4) begin failures++; $display("mass^2 %g", m2); end
    n_out++;
  end

  task automatic drive(int n);
    int k;
    k = 0;
    while (k < n) begin
      @(negedge clk);
      if (!in_valid || in_ready) begin end
      in_valid = 1;
      in_pkt.r_theta = mem_fx_t'($urandom % (1 << MEM_F));
      in_pkt.r_phi   = mem_fx_t'($urandom % (1 << MEM_F));
      if (bp) out_ready = ($urandom % 3 != 0);
      @(posedge clk);
      if (in_ready) begin sent.push_back(in_pkt); t_in.push_back(cyc); k++; end
    end
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    int c0;
    in_valid = 0; out_ready = 1; in_pkt = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // edge values first: r = 0 gives c = -1 (sin theta = 0), phi = 0
    @(negedge clk);
    c0 = n_out;
    drive(200);
    repeat (10) @(posedge clk);
    checks++;
    if (n_out - c0 != 200 || lat_bad != 0) begin
      failures++;
      $display("streaming: %0d out, %0d with wrong latency", n_out - c0, lat_bad);
    end
    bp = 1;
    drive(200);
    out_ready = 1;
    repeat (10) @(posedge clk);
    checks++;
    if (n_out != 400 || sent.size() != 0) begin failures++; $display("lost points: %0d", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
