// axi_burst_writer: memory side of an output writer. Writes N_BEATS DATA_W-bit
// words arriving on a valid/ready stream to consecutive addresses of global
// memory, starting at byte address base_addr.
//
// The write address channel issues bursts of up to MAX_BURST beats (AXI4
// INCR) as fast as the memory accepts them. Write data for a burst is sent
// only after that burst's address has been accepted, with wlast on its final
// beat, and flows straight from the input stream (in_ready = wready while a
// burst is open). done rises once every burst's write response has arrived,
// so results are in memory when the kernel reports completion, and stays high
// until the next start. Burst size and ordering are this design's choices; the
// paper only calls for wide AXI writes.
module axi_burst_writer #(
  parameter int unsigned DATA_W    = 512,
  parameter int unsigned ADDR_W    = 64,
  parameter int unsigned MAX_BURST = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] base_addr,
  input  logic [31:0]       n_beats,
  output logic              done,
  // input stream
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [DATA_W-1:0] in_data,
  // AXI4 write channels (subset)
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
  localparam int unsigned BYTES = DATA_W / 8;

  logic        busy;
  logic [31:0] aw_left;      // beats whose address is not yet issued
  logic [31:0] w_left;       // beats not yet written
  logic [31:0] bursts_open;  // addresses accepted, data not complete
  logic [31:0] b_pending;    // bursts issued, response not yet seen
  logic [7:0]  w_cnt;        // beat index inside the current data burst
  logic [7:0]  blen;
  logic        w_active;

  assign blen     = (aw_left >= MAX_BURST) ? 8'(MAX_BURST) : aw_left[7:0];
  assign w_active = busy && (bursts_open != 0) && (w_left != 0);
  assign m_wvalid = w_active && in_valid;
  assign in_ready = w_active && m_wready;
  assign m_wdata  = in_data;
  // last beat of a burst: burst boundary or final beat of the transfer
  assign m_wlast  = (w_cnt == 8'(MAX_BURST - 1)) || (w_left == 1);
  assign m_bready = 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy        <= 1'b0;
      done        <= 1'b0;
      aw_left     <= '0;
      w_left      <= '0;
      bursts_open <= '0;
      b_pending   <= '0;
      w_cnt       <= '0;
      m_awvalid   <= 1'b0;
      m_awaddr    <= '0;
      m_awlen     <= '0;
    end else if (start) begin
      busy        <= (n_beats != 0);
      done        <= (n_beats == 0);
      aw_left     <= n_beats;
      w_left      <= n_beats;
      bursts_open <= '0;
      b_pending   <= '0;
      w_cnt       <= '0;
      m_awvalid   <= 1'b0;
      m_awaddr    <= base_addr;
    end else begin
      logic [31:0] bo, bp;
      bo = bursts_open;
      bp = b_pending;
      if (m_awvalid && m_awready) begin
        m_awvalid <= 1'b0;
        m_awaddr  <= m_awaddr + ADDR_W'(ADDR_W'(m_awlen) + 1) * ADDR_W'(BYTES);
        bo = bo + 1;
        bp = bp + 1;
      end else if (busy && !m_awvalid && aw_left != 0) begin
        m_awvalid <= 1'b1;
        m_awlen   <= blen - 8'd1;
        aw_left   <= aw_left - 32'(blen);
      end
      if (m_wvalid && m_wready) begin
        w_left <= w_left - 1;
        if (m_wlast) begin
          w_cnt <= '0;
          bo = bo - 1;
        end else begin
          w_cnt <= w_cnt + 8'd1;
        end
      end
      if (m_bvalid && m_bready) bp = bp - 1;
      bursts_open <= bo;
      b_pending   <= bp;
      if (busy && aw_left == 0 && !m_awvalid && w_left == 0 && bp == 0) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  a_w_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (m_wvalid && !m_wready) |=> m_wvalid);

endmodule
