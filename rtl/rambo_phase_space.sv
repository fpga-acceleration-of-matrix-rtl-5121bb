// rambo_phase_space: stage 2 of the e+e- -> mu+mu- compute unit. Turns two
// uniform random numbers into the final-state four-momenta of one event, in
// ap_fixed<24,8> with momenta scaled by 1/1024.
//
// The RAMBO construction draws each massless direction as cos(theta) = 2r-1,
// phi = 2*pi*r'. For two massless bodies in the centre-of-mass frame energy
// and momentum conservation then fix everything else: both muons carry the
// beam energy and are back to back. This stage therefore computes
//   c = 2 r_theta - 1,  s = sqrt(1 - c^2),  phi = 2 pi r_phi,
//   p3 = E (1, s cos phi, s sin phi, c),   p4 = E (1, -s cos phi, -s sin phi, -c).
// The paper names a RAMBO-based generator adapted to hardware but gives no
// equations; the reduction to this direct two-body form (no logarithmic
// energies, no boost) is this design's choice. It gives the same, uniform,
// distribution of points but not the same point for the same random numbers
// as the generic n-body RAMBO. The square root is a bit-serial integer root
// and cos/sin come from an 18-step CORDIC, both unrolled.
//
// Timing: three register stages, one event per cycle (II = 1). The whole pipe
// advances when its last stage is empty or its output is taken
// (in_ready = !out_valid || out_ready).
module rambo_phase_space
  import me_pkg::*;
#(
  parameter fx_t EBEAM = EBEAM_DEF     // beam energy, scaled (750 GeV / 1024)
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  output logic     in_ready,
  input  rnd_pkt_t in_pkt,
  output logic     out_valid,
  input  logic     out_ready,
  output mom_pkt_t out_mom
);
  logic adv;
  logic v1, v2, v3;

  // stage 1
  fx_t                c1;
  logic signed [31:0] ang1;
  // stage 2
  fx_t c2, st2, cph2, sph2;

  assign adv      = !v3 || out_ready;
  assign in_ready = adv;
  assign out_valid = v3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; v3 <= 1'b0;
      c1 <= '0; ang1 <= '0;
      c2 <= '0; st2 <= '0; cph2 <= '0; sph2 <= '0;
      out_mom <= '0;
    end else if (adv) begin
      // ---- stage 1: cos(theta) and azimuth
      v1 <= in_valid;
      begin
        fx_t r;
        logic signed [63:0] a;
        r    = mem_to_fx(in_pkt.r_theta);
        c1   <= fx_t'((r <<< 1) - (fx_t'(1) <<< FX_F));
        a    = 64'(in_pkt.r_phi) * 64'(TWOPI_F20);
        ang1 <= 32'(a >>> MEM_F);
      end
      // ---- stage 2: sin(theta) by square root, cos/sin(phi) by CORDIC
      v2 <= v1;
      begin
        fx_t one_m_c2;
        logic [47:0] x;
        logic [2*FX_W-1:0] cs;
        one_m_c2 = (fx_t'(1) <<< FX_F) - fx_mul(c1, c1);
        x   = (one_m_c2 < 0) ? 48'd0 : (48'(one_m_c2) << FX_F);
        st2 <= fx_t'(isqrt48(x));
        cs   = cordic_cos_sin(ang1);
        cph2 <= cs[2*FX_W-1:FX_W];
        sph2 <= cs[FX_W-1:0];
        c2   <= c1;
      end
      // ---- stage 3: four-momenta
      v3 <= v2;
      begin
        fx_t px, py, pz;
        px = fx_mul(EBEAM, fx_mul(st2, cph2));
        py = fx_mul(EBEAM, fx_mul(st2, sph2));
        pz = fx_mul(EBEAM, c2);
        out_mom.p3 <= '{e: EBEAM, x: px,  y: py,  z: pz};
        out_mom.p4 <= '{e: EBEAM, x: -px, y: -py, z: -pz};
      end
    end
  end

endmodule
