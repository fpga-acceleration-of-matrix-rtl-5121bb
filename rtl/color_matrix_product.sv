// color_matrix_product: the colour-reduction kernel. For each event it takes
// the NCOLOR colour-flow amplitudes A_j and returns
//   DeltaME = sum_i Re( A_i^* sum_j C_ij A_j ),
// contracted in the folded triangular form of the paper: with a real,
// symmetric colour matrix C the double sum equals
//   sum_i [ Re A_i * sum_{j>=i} C'_ij Re A_j + Im A_i * sum_{j>=i} C'_ij Im A_j ]
// where C'_ii = C_ii and C'_ij = 2 C_ij for j > i. Only the upper triangle
// C' (NCOLOR*(NCOLOR+1)/2 coefficients) is stored.
//
// Arithmetic (formats from the paper): amplitudes ap_fixed<16,4>,
// coefficients ap_fixed<24,7>; each row's sums S_i = sum_j C'_ij A_j are kept
// exact and then cast to the reduced intermediate type ap_fixed<22,10>; each
// row term Re A_i Re S_i + Im A_i Im S_i is cast to the ap_fixed<28,15>
// accumulator and summed with wrap-around. The result leaves as a 32-bit raw
// integer: the accumulator bits sign-extended, i.e. DeltaME * 2^13.
//
// Organisation: the rows are split into II groups, rows i with i mod II == k
// forming group k, so the triangle's uneven row lengths spread evenly. One
// group is evaluated per cycle with all its multiply-accumulates in parallel;
// an event therefore takes II cycles and a new event is accepted in the cycle
// its predecessor finishes (one event every II cycles, matching the loader's
// rate; II = 4 for 120 amplitudes as in the paper, 1 for 6 and 24).
//
// Coefficient store: the paper keeps the colour matrix in an on-chip constant
// ROM. Its coefficients are process data the paper does not list, so here
// the store is an on-chip array written once through the cfg_* port (address
// = index of (i,j), j >= i, in row-major upper-triangle order:
// i*NCOLOR - i*(i-1)/2 + (j-i)) before events are sent. That port is this
// design's departure from a hard-wired ROM.
module color_matrix_product
  import me_pkg::*;
#(
  parameter int unsigned NCOLOR = 120,
  parameter int unsigned II     = 4
) (
  input  logic clk,
  input  logic rst_n,
  // coefficient load port
  input  logic                                      cfg_we,
  input  logic [$clog2(NCOLOR*(NCOLOR+1)/2)-1:0]    cfg_addr,
  input  coef_t                                     cfg_data,
  // amplitude vectors in
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [2*AMP_W*NCOLOR-1:0] in_amps,
  // results out
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic signed [COUT_W-1:0]  out_result
);
  localparam int unsigned NTRI = NCOLOR*(NCOLOR+1)/2;
  localparam int unsigned ROWS = (NCOLOR + II - 1) / II;   // rows per group
  localparam int unsigned KW   = (II > 1) ? $clog2(II) : 1;
  localparam int unsigned PW   = AMP_W + COEF_W;           // product width
  localparam int unsigned SW   = PW + $clog2(NCOLOR) + 1;  // exact row sum width

  coef_t coef [NTRI];

  amp_t  are [NCOLOR];
  amp_t  aim [NCOLOR];
  logic  busy;
  logic [KW-1:0] k;
  cacc_t acc, group_sum, acc_next;
  logic  last, stall, accept;

  always_ff @(posedge clk) begin
    if (cfg_we) coef[cfg_addr] <= cfg_data;
  end

  // One group of rows, all multiply-accumulates in parallel.
  always_comb begin
    int i;
    logic signed [SW-1:0] sre, sim;
    red_t  rre, rim;
    coef_t c;
    logic signed [AMP_W+RED_W:0] term;
    group_sum = '0;
    for (int m = 0; m < int'(ROWS); m++) begin
      i   = int'(k) + m * int'(II);
      sre = '0;
      sim = '0;
      for (int j = 0; j < int'(NCOLOR); j++) begin
        c = '0;
        if (i < int'(NCOLOR) && j >= i) c = coef[i*int'(NCOLOR) - (i*(i-1))/2 + (j-i)];
        sre = sre + SW'(c) * SW'(are[j]);
        sim = sim + SW'(c) * SW'(aim[j]);
      end
      rre  = red_t'(sre >>> (AMP_F + COEF_F - RED_F));
      rim  = red_t'(sim >>> (AMP_F + COEF_F - RED_F));
      term = '0;
      if (i < int'(NCOLOR)) term = are[i] * rre + aim[i] * rim;
      group_sum = group_sum + cacc_t'(term >>> (AMP_F + RED_F - CACC_F));
    end
  end

  assign last     = (k == KW'(II - 1));
  assign stall    = busy && last && out_valid && !out_ready;
  assign in_ready = !busy || (last && !stall);
  assign accept   = in_valid && in_ready;
  assign acc_next = ((k == '0) ? cacc_t'(0) : acc) + group_sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      k          <= '0;
      acc        <= '0;
      out_valid  <= 1'b0;
      out_result <= '0;
      for (int j = 0; j < int'(NCOLOR); j++) begin
        are[j] <= '0;
        aim[j] <= '0;
      end
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (busy && !stall) begin
        acc <= acc_next;
        if (last) begin
          out_valid  <= 1'b1;
          out_result <= COUT_W'(acc_next);   // sign-extended raw value
          busy       <= 1'b0;
          k          <= '0;
        end else begin
          k <= k + 1'b1;
        end
      end
      if (accept) begin
        busy <= 1'b1;
        k    <= '0;
        for (int j = 0; j < int'(NCOLOR); j++) begin
          are[j] <= amp_t'(in_amps[2*AMP_W*j +: AMP_W]);
          aim[j] <= amp_t'(in_amps[2*AMP_W*j + AMP_W +: AMP_W]);
        end
      end
    end
  end

  a_no_overwrite: assert property (@(posedge clk) disable iff (!rst_n)
    (out_valid && !out_ready) |=> out_valid);

endmodule
