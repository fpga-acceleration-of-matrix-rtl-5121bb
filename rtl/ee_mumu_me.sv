// ee_mumu_me: stage 3 of the e+e- -> mu+mu- compute unit. Evaluates the
// squared matrix element |M|^2 of one phase-space point, summed over all 16
// helicity configurations and averaged over the 4 initial ones, in fixed
// point. The momenta pass through unchanged so the output writer can store
// them next to the result.
//
// Two Feynman diagrams contribute, s-channel photon and s-channel Z. In the
// massless limit a fermion line is non-zero only when its fermion and
// antifermion have opposite helicity, and the spinor currents contract to
//   J_e . J_mu = 4 p1.p4 = s(1 + cos theta)  (e- and mu- of equal helicity)
//   J_e . J_mu = 4 p1.p3 = s(1 - cos theta)  (opposite helicity).
// Each helicity amplitude is the coherent sum of the two diagrams,
//   A = e^2 (J_e . J_mu) [ Q_e Q_mu / s + g_e g_mu / (s - MZ^2 + i MZ WZ) ],
// with g = gL or gR of the helicity. The helicity loop is fully unrolled and
// |A|^2 = Re(A)^2 + Im(A)^2 is summed in the wider ap_fixed<32,12>
// accumulator (all from the paper). The paper evaluates the same diagrams with
// general HELAS wavefunction and vertex routines; writing out the massless
// currents directly, dropping their phase (which cancels in |A|^2), is this
// design's own simplification. Propagator denominators use exact division.
//
// Timing: four register stages, one event per cycle (II = 1); the pipe
// advances when its last stage is empty or its output is taken.
module ee_mumu_me
  import me_pkg::*;
#(
  parameter fx_t MZ = MZ_DEF,   // Z mass, scaled by 1/1024
  parameter fx_t WZ = WZ_DEF,   // Z width, scaled by 1/1024
  parameter fx_t E2 = E2_DEF,   // e^2 = 4 pi alpha
  parameter fx_t GL = GL_DEF,   // Z coupling, left-handed lepton (units of e)
  parameter fx_t GR = GR_DEF    // Z coupling, right-handed lepton
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  output logic     in_ready,
  input  mom_pkt_t in_mom,
  output logic     out_valid,
  input  logic     out_ready,
  output me_pkt_t  out_pkt
);
  localparam int NHEL = 16;

  logic adv;
  logic v1, v2, v3, v4;
  mom_pkt_t m1, m2, m3;
  // stage 1: invariants
  fx_t s1, kp1, km1;
  // stage 2: propagators
  fx_t kp2, km2, inv_s2, chi_re2, chi_im2;
  // stage 3: helicity amplitudes squared
  logic signed [HACC_W-1:0] a2_3 [NHEL];

  assign adv       = !v4 || out_ready;
  assign in_ready  = adv;
  assign out_valid = v4;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; v3 <= 1'b0; v4 <= 1'b0;
      m1 <= '0; m2 <= '0; m3 <= '0;
      s1 <= '0; kp1 <= '0; km1 <= '0;
      kp2 <= '0; km2 <= '0; inv_s2 <= '0; chi_re2 <= '0; chi_im2 <= '0;
      for (int h = 0; h < NHEL; h++) a2_3[h] <= '0;
      out_pkt <= '0;
    end else if (adv) begin
      // ---- stage 1: s = (p1+p2)^2 and the two current contractions.
      // Incoming beams p1 = (E,0,0,E) (e-), p2 = (E,0,0,-E) (e+), E from
      // energy conservation.
      v1 <= in_valid;
      m1 <= in_mom;
      begin
        fx_t eb;
        eb  = fx_t'((in_mom.p3.e + in_mom.p4.e) >>> 1);
        s1  <= fx_mul(eb, eb) <<< 2;                                   // 2 p1.p2
        kp1 <= (fx_mul(eb, in_mom.p4.e) - fx_mul(eb, in_mom.p4.z)) <<< 2; // 4 p1.p4
        km1 <= (fx_mul(eb, in_mom.p3.e) - fx_mul(eb, in_mom.p3.z)) <<< 2; // 4 p1.p3
      end
      // ---- stage 2: photon propagator 1/s, Z propagator 1/(s - MZ^2 + i MZ WZ)
      v2 <= v1;
      m2 <= m1;
      kp2 <= kp1;
      km2 <= km1;
      begin
        fx_t a, b, den;
        logic signed [47:0] num;
        a   = s1 - fx_mul(MZ, MZ);
        b   = fx_mul(MZ, WZ);
        den = fx_mul(a, a) + fx_mul(b, b);
        num = 48'sd1 <<< (2*FX_F);
        inv_s2  <= (s1  == 0) ? '0 : fx_t'(num / 48'(s1));
        chi_re2 <= (den == 0) ? '0 : fx_t'((48'(a) <<< FX_F) / 48'(den));
        chi_im2 <= (den == 0) ? '0 : fx_t'(-((48'(b) <<< FX_F) / 48'(den)));
      end
      // ---- stage 3: all 16 helicity amplitudes, squared
      v3 <= v2;
      m3 <= m2;
      for (int h = 0; h < NHEL; h++) begin
        // helicity bits: [3] e-, [2] e+, [1] mu-, [0] mu+ ; 1 = right-handed
        logic he, hp, hm, hq;
        fx_t ge, gm, k, gg, are, aim, ek;
        logic signed [2*FX_W:0] sq;
        he = 1'((h >> 3) & 1); hp = 1'((h >> 2) & 1);
        hm = 1'((h >> 1) & 1); hq = 1'(h & 1);
        ge = he ? GR : GL;
        gm = hm ? GR : GL;
        k  = (he == hm) ? kp2 : km2;
        gg = fx_mul(ge, gm);
        ek = fx_mul(E2, k);
        are = fx_mul(ek, inv_s2 + fx_mul(gg, chi_re2));
        aim = fx_mul(ek, fx_mul(gg, chi_im2));
        sq  = are * are + aim * aim;
        if (he != hp && hm != hq)
          a2_3[h] <= HACC_W'(sq >>> (2*FX_F - HACC_F));
        else
          a2_3[h] <= '0;
      end
      // ---- stage 4: helicity sum, average over 4 initial helicities
      v4 <= v3;
      begin
        hacc_t sum;
        sum = '0;
        for (int h = 0; h < NHEL; h++) sum = sum + a2_3[h];
        sum = sum >>> 2;
        out_pkt.me  <= mem_fx_t'(sum >>> (HACC_F - MEM_F));
        out_pkt.mom <= m3;
      end
    end
  end

endmodule
