// color_kernel: the colour-algebra accelerator kernel for gg -> ttbar + X.
// Three dataflow stages run concurrently, joined by stream FIFOs:
//   input loader (AXI reads, unpacking) -> colour matrix product
//   -> output writer (packing, AXI writes).
// The host writes the normalised upper-triangular colour matrix once through
// the cfg_* port, then starts a run with src_addr, dst_addr and n_events; done
// rises when the last packed result word is in memory. The default size is
// the three-jet process (120 colour flows, one event every 4 cycles); set
// NCOLOR = 6 or 24 for the one- and two-jet processes, which then run at one
// event per cycle. All three kernels use the fixed-point formats the paper
// gives for the three-jet case (the paper's one- and two-jet kernels use
// 32-bit floating point instead).
module color_kernel
  import me_pkg::*;
#(
  parameter int unsigned NCOLOR     = 120,
  parameter int unsigned IN_W       = 1024,
  parameter int unsigned ADDR_W     = 64,
  parameter int unsigned FIFO_DEPTH = 2,
  parameter int unsigned II         = (2*AMP_W*NCOLOR + IN_W - 1) / IN_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] src_addr,
  input  logic [ADDR_W-1:0] dst_addr,
  input  logic [31:0]       n_events,
  output logic              done,
  input  logic                                   cfg_we,
  input  logic [$clog2(NCOLOR*(NCOLOR+1)/2)-1:0] cfg_addr,
  input  coef_t                                  cfg_data,
  // read master
  output logic              m_arvalid,
  input  logic              m_arready,
  output logic [ADDR_W-1:0] m_araddr,
  output logic [7:0]        m_arlen,
  input  logic              m_rvalid,
  output logic              m_rready,
  input  logic [IN_W-1:0]   m_rdata,
  input  logic              m_rlast,
  // write master
  output logic              m_awvalid,
  input  logic              m_awready,
  output logic [ADDR_W-1:0] m_awaddr,
  output logic [7:0]        m_awlen,
  output logic              m_wvalid,
  input  logic              m_wready,
  output logic [CWORD_W-1:0] m_wdata,
  output logic              m_wlast,
  input  logic              m_bvalid,
  output logic              m_bready
);
  localparam int unsigned VW = 2*AMP_W*NCOLOR;
  localparam int unsigned CW = $clog2(FIFO_DEPTH) + 1;

  logic          ld_done;
  logic          a_v, a_r, b_v, b_r, c_v, c_r, d_v, d_r;
  logic [VW-1:0] a_d, b_d;
  logic signed [COUT_W-1:0] c_d, d_d;
  logic [CW-1:0] n0, n1;

  color_input_loader #(.NCOLOR(NCOLOR), .IN_W(IN_W), .ADDR_W(ADDR_W), .BEATS(II)) u_load (
    .clk, .rst_n, .start, .src_addr, .n_events, .done (ld_done),
    .m_arvalid, .m_arready, .m_araddr, .m_arlen,
    .m_rvalid, .m_rready, .m_rdata, .m_rlast,
    .out_valid (a_v), .out_ready (a_r), .out_amps (a_d));

  stream_fifo #(.WIDTH(VW), .DEPTH(FIFO_DEPTH)) u_f0 (
    .clk, .rst_n, .in_valid (a_v), .in_ready (a_r), .in_data (a_d),
    .out_valid (b_v), .out_ready (b_r), .out_data (b_d), .count (n0));

  color_matrix_product #(.NCOLOR(NCOLOR), .II(II)) u_mp (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
    .in_valid (b_v), .in_ready (b_r), .in_amps (b_d),
    .out_valid (c_v), .out_ready (c_r), .out_result (c_d));

  stream_fifo #(.WIDTH(COUT_W), .DEPTH(FIFO_DEPTH)) u_f1 (
    .clk, .rst_n, .in_valid (c_v), .in_ready (c_r), .in_data (c_d),
    .out_valid (d_v), .out_ready (d_r), .out_data (d_d), .count (n1));

  color_output_writer #(.ADDR_W(ADDR_W)) u_wr (
    .clk, .rst_n, .start, .dst_addr, .n_events, .done,
    .in_valid (d_v), .in_ready (d_r), .in_result (d_d),
    .m_awvalid, .m_awready, .m_awaddr, .m_awlen,
    .m_wvalid, .m_wready, .m_wdata, .m_wlast, .m_bvalid, .m_bready);

endmodule
