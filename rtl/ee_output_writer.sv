// ee_output_writer: stage 4 of the e+e- -> mu+mu- compute unit. Rescales the
// momenta back to GeV, packs each event's result and momenta into one wide
// memory word and writes the words to global memory with AXI write bursts.
//
// Rescaling multiplies by S = 2^10 in the temporary ap_fixed<48,24> type and
// casts to the ap_fixed<32,14> memory format (both from the paper). Word
// layout (this design's choice; the paper says only that results and momenta
// are written): 32-bit slot 0 = |M|^2, slots 1-4 = mu- (E, px, py, pz),
// slots 5-8 = mu+ (E, px, py, pz), slots 9-15 zero. Output word e goes to
// dst_addr + e*DATA_W/8. One register stage for the rescaling, then the burst
// writer; one event per cycle. done rises after the last write response.
module ee_output_writer
  import me_pkg::*;
#(
  parameter int unsigned DATA_W    = 512,
  parameter int unsigned ADDR_W    = 64,
  parameter int unsigned MAX_BURST = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] dst_addr,
  input  logic [31:0]       n_events,
  output logic              done,
  input  logic              in_valid,
  output logic              in_ready,
  input  me_pkt_t           in_pkt,
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
  function automatic mem_fx_t rescale(fx_t p);
    wide_t w;
    w = wide_t'(p) <<< (WIDE_F - FX_F);   // ap_fixed<24,8> -> ap_fixed<48,24>
    w = w <<< SCALE_LOG2;                 // times S
    return mem_fx_t'(w >>> (WIDE_F - MEM_F));
  endfunction

  logic              pv;
  logic [DATA_W-1:0] pword;
  logic              p_ready;

  assign in_ready = !pv || p_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pv    <= 1'b0;
      pword <= '0;
    end else if (in_ready) begin
      pv <= in_valid;
      if (in_valid) begin
        logic [DATA_W-1:0] w;
        w = '0;
        w[0*MEM_W +: MEM_W] = in_pkt.me;
        w[1*MEM_W +: MEM_W] = rescale(in_pkt.mom.p3.e);
        w[2*MEM_W +: MEM_W] = rescale(in_pkt.mom.p3.x);
        w[3*MEM_W +: MEM_W] = rescale(in_pkt.mom.p3.y);
        w[4*MEM_W +: MEM_W] = rescale(in_pkt.mom.p3.z);
        w[5*MEM_W +: MEM_W] = rescale(in_pkt.mom.p4.e);
        w[6*MEM_W +: MEM_W] = rescale(in_pkt.mom.p4.x);
        w[7*MEM_W +: MEM_W] = rescale(in_pkt.mom.p4.y);
        w[8*MEM_W +: MEM_W] = rescale(in_pkt.mom.p4.z);
        pword <= w;
      end
    end
  end

  axi_burst_writer #(.DATA_W(DATA_W), .ADDR_W(ADDR_W), .MAX_BURST(MAX_BURST)) u_wr (
    .clk, .rst_n, .start, .base_addr (dst_addr), .n_beats (n_events), .done,
    .in_valid (pv), .in_ready (p_ready), .in_data (pword),
    .m_awvalid, .m_awready, .m_awaddr, .m_awlen,
    .m_wvalid, .m_wready, .m_wdata, .m_wlast, .m_bvalid, .m_bready
  );

endmodule
