// ee_mumu_cu: one compute unit of the e+e- -> mu+mu- accelerator. The four
// dataflow stages of the paper run concurrently and are joined by stream
// FIFOs:
//   input loader -> FIFO -> RAMBO phase space -> FIFO -> matrix element
//   -> FIFO -> output writer.
// Every stage accepts one event per cycle, so in steady state the unit
// finishes one event per clock (II = 1, as the paper reports); a stage that
// cannot hand on its result stalls the stages before it through the ready
// signals. Control follows the usual HLS block protocol in a reduced form: a
// start pulse with src_addr, dst_addr and n_events launches a run; done goes
// high when the writer has received the last write response and stays high
// until the next start. Each unit has its own read and write AXI master; the
// accelerator replicates the unit N_CU times. FIFO depths are this design's
// choice.
module ee_mumu_cu
  import me_pkg::*;
#(
  parameter int unsigned DATA_W     = 512,
  parameter int unsigned ADDR_W     = 64,
  parameter int unsigned FIFO_DEPTH = 4,
  parameter fx_t         EBEAM      = EBEAM_DEF
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] src_addr,
  input  logic [ADDR_W-1:0] dst_addr,
  input  logic [31:0]       n_events,
  output logic              done,
  // read master
  output logic              m_arvalid,
  input  logic              m_arready,
  output logic [ADDR_W-1:0] m_araddr,
  output logic [7:0]        m_arlen,
  input  logic              m_rvalid,
  output logic              m_rready,
  input  logic [DATA_W-1:0] m_rdata,
  input  logic              m_rlast,
  // write master
  output logic              m_awvalid,
  input  logic              m_awready,
  output logic [ADDR_W-1:0] m_awaddr,
  output logic [7:0]        m_awlen,
  output logic              m_wvalid,
  input  logic              m_wready,
  output logic [DATA_W-1:0] m_wdata,
  output logic              m_wlast,
  input  logic              m_bvalid,
  output logic              m_bready
);
  localparam int CW = $clog2(FIFO_DEPTH) + 1;

  logic     ld_done;
  logic     s0_v, s0_r, s1_v, s1_r, s2_v, s2_r, s3_v, s3_r;
  rnd_pkt_t s0_d, s1_d;
  mom_pkt_t s2_d, s3_d;
  logic     s4_v, s4_r, s5_v, s5_r;
  me_pkt_t  s4_d, s5_d;
  logic [CW-1:0] c0, c1, c2;

  ee_input_loader #(.DATA_W(DATA_W), .ADDR_W(ADDR_W)) u_load (
    .clk, .rst_n, .start, .src_addr, .n_events, .done (ld_done),
    .m_arvalid, .m_arready, .m_araddr, .m_arlen,
    .m_rvalid, .m_rready, .m_rdata, .m_rlast,
    .out_valid (s0_v), .out_ready (s0_r), .out_pkt (s0_d)
  );

  stream_fifo #(.WIDTH($bits(rnd_pkt_t)), .DEPTH(FIFO_DEPTH)) u_f0 (
    .clk, .rst_n, .in_valid (s0_v), .in_ready (s0_r), .in_data (s0_d),
    .out_valid (s1_v), .out_ready (s1_r), .out_data (s1_d), .count (c0));

  rambo_phase_space #(.EBEAM(EBEAM)) u_ps (
    .clk, .rst_n, .in_valid (s1_v), .in_ready (s1_r), .in_pkt (s1_d),
    .out_valid (s2_v), .out_ready (s2_r), .out_mom (s2_d));

  stream_fifo #(.WIDTH($bits(mom_pkt_t)), .DEPTH(FIFO_DEPTH)) u_f1 (
    .clk, .rst_n, .in_valid (s2_v), .in_ready (s2_r), .in_data (s2_d),
    .out_valid (s3_v), .out_ready (s3_r), .out_data (s3_d), .count (c1));

  ee_mumu_me u_me (
    .clk, .rst_n, .in_valid (s3_v), .in_ready (s3_r), .in_mom (s3_d),
    .out_valid (s4_v), .out_ready (s4_r), .out_pkt (s4_d));

  stream_fifo #(.WIDTH($bits(me_pkt_t)), .DEPTH(FIFO_DEPTH)) u_f2 (
    .clk, .rst_n, .in_valid (s4_v), .in_ready (s4_r), .in_data (s4_d),
    .out_valid (s5_v), .out_ready (s5_r), .out_data (s5_d), .count (c2));

  ee_output_writer #(.DATA_W(DATA_W), .ADDR_W(ADDR_W)) u_wr (
    .clk, .rst_n, .start, .dst_addr, .n_events, .done,
    .in_valid (s5_v), .in_ready (s5_r), .in_pkt (s5_d),
    .m_awvalid, .m_awready, .m_awaddr, .m_awlen,
    .m_wvalid, .m_wready, .m_wdata, .m_wlast, .m_bvalid, .m_bready);


endmodule
