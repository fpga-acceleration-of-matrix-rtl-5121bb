// me_pkg: shared types, fixed-point formats, physics constants and arithmetic helpers
// for the matrix-element accelerator.
//
// Fixed-point formats follow the paper's table of formats. A format written
// ap_fixed<W,I> is a W-bit two's-complement number with I integer bits (sign
// included), so W-I fractional bits. All casts truncate toward minus infinity
// and wrap on overflow, which is the default behaviour of that type in HLS.
//
//   e+e- -> mu+mu- pipeline
//     memory interface / output   ap_fixed<32,14>  (18 fractional bits)
//     phase space and ME          ap_fixed<24,8>   (16 fractional bits)
//     helicity accumulation       ap_fixed<32,12>  (20 fractional bits)
//     momentum output rescaling   ap_fixed<48,24>  (24 fractional bits)
//   colour kernel (gg -> ttbar + 3 jets)
//     amplitude components        ap_fixed<16,4>   (12 fractional bits)
//     colour-matrix coefficients  ap_fixed<24,7>   (17 fractional bits)
//     reduced intermediate values ap_fixed<22,10>  (12 fractional bits)
//     accumulation                ap_fixed<28,15>  (13 fractional bits)
//     output                      32-bit raw value, packed four to a 128-bit word
//
// Momenta, masses and widths are divided by S = 2^10 before they enter the
// fixed-point pipeline (from the paper). The electroweak parameters (MZ, WZ,
// alpha, sin^2 theta_W) are the default values of the Standard Model
// parameter card of the event generator; the paper does not list them, so they
// are this design's choice and can be overridden where the modules take them.
package me_pkg;

  // ---------------------------------------------------------------- formats
  localparam int MEM_W   = 32, MEM_F   = 18;   // ap_fixed<32,14>
  localparam int FX_W    = 24, FX_F    = 16;   // ap_fixed<24,8>
  localparam int HACC_W  = 32, HACC_F  = 20;   // ap_fixed<32,12>
  localparam int WIDE_W  = 48, WIDE_F  = 24;   // ap_fixed<48,24>

  localparam int AMP_W   = 16, AMP_F   = 12;   // ap_fixed<16,4>
  localparam int COEF_W  = 24, COEF_F  = 17;   // ap_fixed<24,7>
  localparam int RED_W   = 22, RED_F   = 12;   // ap_fixed<22,10>
  localparam int CACC_W  = 28, CACC_F  = 13;   // ap_fixed<28,15>
  localparam int COUT_W  = 32;                 // ap_int<32>
  localparam int CWORD_W = 128;                // ap_uint<128>

  typedef logic signed [MEM_W-1:0]  mem_fx_t;
  typedef logic signed [FX_W-1:0]   fx_t;
  typedef logic signed [HACC_W-1:0] hacc_t;
  typedef logic signed [WIDE_W-1:0] wide_t;
  typedef logic signed [AMP_W-1:0]  amp_t;
  typedef logic signed [COEF_W-1:0] coef_t;
  typedef logic signed [RED_W-1:0]  red_t;
  typedef logic signed [CACC_W-1:0] cacc_t;

  // Momentum scale S = 2^10 (paper).
  localparam int SCALE_LOG2 = 10;

  // ---------------------------------------------------------------- physics
  // Beam energy per beam, scaled: 750 GeV / 1024 (sqrt(s) = 1500 GeV).
  localparam fx_t EBEAM_DEF = 24'sd48000;
  // Z mass and width, scaled by 1/1024, ap_fixed<24,8>.
  localparam fx_t MZ_DEF    = 24'sd5836;     // 91.188 GeV
  localparam fx_t WZ_DEF    = 24'sd156;      // 2.4414 GeV
  // e^2 = 4 pi alpha, alpha = 1/132.507.
  localparam fx_t E2_DEF    = 24'sd6215;     // 0.094836
  // Z couplings to left / right-handed charged leptons in units of e:
  // gL = (-1/2 + sw2)/(sw cw), gR = sw2/(sw cw), sw2 = 0.22225.
  localparam fx_t GL_DEF    = -24'sd43783;   // -0.66807
  localparam fx_t GR_DEF    = 24'sd35033;    //  0.53456

  // ---------------------------------------------------------------- events
  // One event of the e+e- pipeline after unpacking: two uniform random
  // numbers in [0,1), in the memory format.
  typedef struct packed {
    mem_fx_t r_theta;
    mem_fx_t r_phi;
  } rnd_pkt_t;

  typedef struct packed {
    fx_t e, x, y, z;
  } p4_t;

  // Final-state momenta of one event (incoming beams are fixed along z).
  typedef struct packed {
    p4_t p3;   // mu-
    p4_t p4;   // mu+
  } mom_pkt_t;

  typedef struct packed {
    mem_fx_t  me;       // |M|^2, averaged over initial helicities
    mom_pkt_t mom;
  } me_pkt_t;

  // ---------------------------------------------------------------- helpers
  // Product of two ap_fixed<24,8> values, cast back to ap_fixed<24,8>.
  function automatic fx_t fx_mul(fx_t a, fx_t b);
    logic signed [2*FX_W-1:0] p;
    p = a * b;
    return fx_t'(p >>> FX_F);
  endfunction

  // ap_fixed<32,14> -> ap_fixed<24,8>
  function automatic fx_t mem_to_fx(mem_fx_t a);
    return fx_t'(a >>> (MEM_F - FX_F));
  endfunction

  // Integer square root of an unsigned value (bit-serial restoring method,
  // unrolled). Returns floor(sqrt(x)).
  function automatic logic [23:0] isqrt48(logic [47:0] x);
    logic [47:0] rem, root, trial;
    rem  = x;
    root = '0;
    for (int i = 23; i >= 0; i--) begin
      trial = root | (48'd1 << (2*i));
      if (rem >= trial) begin
        rem  = rem - trial;
        root = (root >> 1) | (48'd1 << (2*i));
      end else begin
        root = root >> 1;
      end
    end
    return root[23:0];
  endfunction

  // CORDIC rotation (18 iterations, 20 fractional bits). Input: angle in
  // [0, 2*pi) as an unsigned 20-fractional-bit value. Output: cos and sin in
  // ap_fixed<24,8>.
  localparam int CORDIC_N = 18;
  localparam logic [31:0] CORDIC_ATAN [CORDIC_N] = '{
    32'd823550, 32'd486170, 32'd256879, 32'd130396, 32'd65451, 32'd32757,
    32'd16383, 32'd8192, 32'd4096, 32'd2048, 32'd1024, 32'd512, 32'd256,
    32'd128, 32'd64, 32'd32, 32'd16, 32'd8};
  localparam logic signed [31:0] CORDIC_K   = 32'sd636751;   // prod 1/sqrt(1+2^-2i)
  localparam logic signed [31:0] PI_F20     = 32'sd3294199;
  localparam logic signed [31:0] HALFPI_F20 = 32'sd1647099;
  localparam logic signed [31:0] TWOPI_F20  = 32'sd6588397;

  function automatic logic [2*FX_W-1:0] cordic_cos_sin(logic signed [31:0] ang);
    logic signed [31:0] z, x, y, xn, yn;
    logic neg;
    fx_t c, s;
    z = ang;
    if (z > PI_F20) z = z - TWOPI_F20;        // (-pi, pi]
    neg = 1'b0;
    if (z > HALFPI_F20) begin
      z = z - PI_F20; neg = 1'b1;
    end else if (z < -HALFPI_F20) begin
      z = z + PI_F20; neg = 1'b1;
    end
    x = CORDIC_K;
    y = '0;
    for (int i = 0; i < CORDIC_N; i++) begin
      if (z >= 0) begin
        xn = x - (y >>> i); yn = y + (x >>> i); z = z - $signed(CORDIC_ATAN[i]);
      end else begin
        xn = x + (y >>> i); yn = y - (x >>> i); z = z + $signed(CORDIC_ATAN[i]);
      end
      x = xn; y = yn;
    end
    if (neg) begin x = -x; y = -y; end
    c = fx_t'(x >>> 4);
    s = fx_t'(y >>> 4);
    return {c, s};
  endfunction

endpackage
