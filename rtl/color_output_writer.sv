// color_output_writer: last stage of the colour-algebra kernel. Packs the
// 32-bit raw results four to a 128-bit word (the paper's ap_int<32> results
// and ap_uint<128> output word) and writes the words to global memory with
// AXI write bursts.
//
// Result e goes to bits [32*(e mod 4)+31 : 32*(e mod 4)] of word e/4 at
// dst_addr + 16*(e/4). When n_events is not a multiple of four the last word
// is flushed with its unused slots zero. The slot order, the flushing rule
// and the burst writer are this design's choices. One result per cycle in;
// done rises after the last write response.
module color_output_writer
  import me_pkg::*;
#(
  parameter int unsigned ADDR_W    = 64,
  parameter int unsigned MAX_BURST = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [ADDR_W-1:0]        dst_addr,
  input  logic [31:0]              n_events,
  output logic                     done,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic signed [COUT_W-1:0] in_result,
  output logic                     m_awvalid,
  input  logic                     m_awready,
  output logic [ADDR_W-1:0]        m_awaddr,
  output logic [7:0]               m_awlen,
  output logic                     m_wvalid,
  input  logic                     m_wready,
  output logic [CWORD_W-1:0]       m_wdata,
  output logic                     m_wlast,
  input  logic                     m_bvalid,
  output logic                     m_bready
);
  localparam int unsigned PER_WORD = CWORD_W / COUT_W;   // 4

  logic [CWORD_W-1:0] word;
  logic [1:0]         slot;
  logic [31:0]        ev_left;
  logic               wv, w_ready;
  logic [31:0]        n_words;

  assign n_words  = (n_events + PER_WORD - 1) / PER_WORD;
  assign in_ready = !wv || w_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      word    <= '0;
      slot    <= '0;
      ev_left <= '0;
      wv      <= 1'b0;
    end else if (start) begin
      word    <= '0;
      slot    <= '0;
      ev_left <= n_events;
      wv      <= 1'b0;
    end else begin
      if (wv && w_ready) begin
        wv   <= 1'b0;
        word <= '0;
      end
      if (in_valid && in_ready) begin
        logic [CWORD_W-1:0] w;
        w = (wv && w_ready) ? '0 : word;
        w[COUT_W*slot +: COUT_W] = in_result;
        word    <= w;
        ev_left <= ev_left - 1;
        // word complete, or last result of the run: flush it
        if (slot == 2'(PER_WORD - 1) || ev_left == 1) begin
          wv   <= 1'b1;
          slot <= '0;
        end else begin
          slot <= slot + 1'b1;
        end
      end
    end
  end

  axi_burst_writer #(.DATA_W(CWORD_W), .ADDR_W(ADDR_W), .MAX_BURST(MAX_BURST)) u_wr (
    .clk, .rst_n, .start, .base_addr (dst_addr), .n_beats (n_words), .done,
    .in_valid (wv), .in_ready (w_ready), .in_data (word),
    .m_awvalid, .m_awready, .m_awaddr, .m_awlen,
    .m_wvalid, .m_wready, .m_wdata, .m_wlast, .m_bvalid, .m_bready
  );

endmodule
