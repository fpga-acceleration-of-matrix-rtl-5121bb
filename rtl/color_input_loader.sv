// color_input_loader: stage 1 of the colour-algebra kernel. Reads the
// precomputed colour-flow amplitudes (jamps) of each event from global memory
// with wide AXI reads and unpacks them into one amplitude vector per event.
//
// Each amplitude is a complex number with ap_fixed<16,4> real and imaginary
// parts (paper). Layout, this design's choice: amplitude j of an event sits
// at bits [32j+15:32j] (real) and [32j+31:32j+16] (imaginary) of the event's
// record, and a record fills BEATS = ceil(32*NCOLOR/IN_W) consecutive bus
// words, padded with zeros. With the default 1024-bit bus the 120-amplitude
// basis of gg -> ttbar + 3 jets needs 4 words, so the loader delivers one
// vector every 4 cycles, the input-bound interval the paper reports for that
// kernel; 6 and 24 amplitudes fit in one word (one event per cycle).
// A start pulse launches n_events events read from src_addr.
module color_input_loader
  import me_pkg::*;
#(
  parameter int unsigned NCOLOR    = 120,
  parameter int unsigned IN_W      = 1024,
  parameter int unsigned ADDR_W    = 64,
  parameter int unsigned MAX_BURST = 16,
  parameter int unsigned BEATS     = (2*AMP_W*NCOLOR + IN_W - 1) / IN_W
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
  input  logic [IN_W-1:0]   m_rdata,
  input  logic              m_rlast,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [2*AMP_W*NCOLOR-1:0] out_amps
);
  localparam int unsigned VW = 2*AMP_W*NCOLOR;
  localparam int unsigned BW = (BEATS > 1) ? $clog2(BEATS) : 1;

  logic              w_valid, w_ready;
  logic [IN_W-1:0]   w_data;
  logic [BEATS*IN_W-1:0] shadow;
  logic [BW-1:0]     beat;
  logic [31:0]       n_beats;

  assign n_beats = n_events * BEATS;

  axi_burst_reader #(.DATA_W(IN_W), .ADDR_W(ADDR_W), .MAX_BURST(MAX_BURST)) u_rd (
    .clk, .rst_n, .start, .base_addr (src_addr), .n_beats, .done,
    .m_arvalid, .m_arready, .m_araddr, .m_arlen,
    .m_rvalid, .m_rready, .m_rdata, .m_rlast,
    .out_valid (w_valid), .out_ready (w_ready), .out_data (w_data)
  );

  // Words are gathered in a shadow register; the completed record moves to
  // the output register, so gathering the next event overlaps with handing
  // out the current one.
  logic last_beat;
  assign last_beat = (beat == BW'(BEATS - 1));
  assign w_ready   = !last_beat || !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shadow    <= '0;
      beat      <= '0;
      out_valid <= 1'b0;
      out_amps  <= '0;
    end else if (start) begin
      beat      <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (w_valid && w_ready) begin
        logic [BEATS*IN_W-1:0] nxt;
        nxt = shadow;
        nxt[beat*IN_W +: IN_W] = w_data;
        shadow <= nxt;
        if (last_beat) begin
          beat      <= '0;
          out_valid <= 1'b1;
          out_amps  <= nxt[VW-1:0];
        end else begin
          beat <= beat + 1'b1;
        end
      end
    end
  end

endmodule
