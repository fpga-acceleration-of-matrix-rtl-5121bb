// ee_input_loader: stage 1 of the e+e- -> mu+mu- compute unit. Reads the
// host's pseudo-random numbers from global memory with wide AXI reads and
// unpacks them into one packet per event.
//
// Memory layout (this design's choice; the paper gives only the 32-bit
// ap_fixed<32,14> format of the memory interface): each DATA_W-bit word holds
// DATA_W/32 numbers, word k at bits [32k+31:32k]; event e uses numbers 2e
// (polar angle) and 2e+1 (azimuth). With the default 512-bit bus a word
// carries 8 events. The unpacker emits one event per cycle, so one memory word
// is needed every 8 cycles, well within what the reader can fetch.
// A start pulse launches n_events events read from src_addr; done goes high
// when the reader has delivered its last word.
module ee_input_loader
  import me_pkg::*;
#(
  parameter int unsigned DATA_W    = 512,
  parameter int unsigned ADDR_W    = 64,
  parameter int unsigned MAX_BURST = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] src_addr,
  input  logic [31:0]       n_events,
  output logic              done,
  output logic              m_arvalid,
  input  logic              m_arready,
  output logic [ADDR_W-1:0] m_araddr,
  output logic [7:0]        m_arlen,
  input  logic              m_rvalid,
  output logic              m_rready,
  input  logic [DATA_W-1:0] m_rdata,
  input  logic              m_rlast,
  output logic              out_valid,
  input  logic              out_ready,
  output rnd_pkt_t          out_pkt
);
  localparam int unsigned EV_PER_WORD = DATA_W / (2 * MEM_W);
  localparam int unsigned SW = $clog2(EV_PER_WORD) + 1;

  logic              w_valid, w_ready;
  logic [DATA_W-1:0] w_data;
  logic [31:0]       n_beats;
  logic [31:0]       ev_left;
  logic [SW-1:0]     slot;
  logic [DATA_W-1:0] word;
  logic              word_valid;

  assign n_beats = (n_events + EV_PER_WORD - 1) / EV_PER_WORD;

  axi_burst_reader #(.DATA_W(DATA_W), .ADDR_W(ADDR_W), .MAX_BURST(MAX_BURST)) u_rd (
    .clk, .rst_n, .start, .base_addr (src_addr), .n_beats, .done,
    .m_arvalid, .m_arready, .m_araddr, .m_arlen,
    .m_rvalid, .m_rready, .m_rdata, .m_rlast,
    .out_valid (w_valid), .out_ready (w_ready), .out_data (w_data)
  );

  // Unpack: hold one word, hand out its events one per cycle. A new word is
  // taken in the cycle its predecessor's last event leaves.
  logic last_slot;
  assign last_slot = (slot == SW'(EV_PER_WORD - 1)) || (ev_left == 1);
  assign w_ready   = !word_valid || (out_ready && last_slot);
  assign out_valid = word_valid;
  assign out_pkt.r_theta = word[2*MEM_W*slot +: MEM_W];
  assign out_pkt.r_phi   = word[2*MEM_W*slot + MEM_W +: MEM_W];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      word_valid <= 1'b0;
      word       <= '0;
      slot       <= '0;
      ev_left    <= '0;
    end else if (start) begin
      word_valid <= 1'b0;
      slot       <= '0;
      ev_left    <= n_events;
    end else begin
      if (out_valid && out_ready) begin
        ev_left <= ev_left - 1;
        slot    <= last_slot ? '0 : slot + 1'b1;
        if (last_slot) word_valid <= 1'b0;
      end
      if (w_valid && w_ready) begin
        word       <= w_data;
        word_valid <= 1'b1;
        slot       <= '0;
      end
    end
  end

endmodule
