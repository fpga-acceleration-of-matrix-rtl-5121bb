// axi_burst_reader: memory side of an input loader. Reads N_BEATS consecutive
// DATA_W-bit words from global memory, starting at byte address base_addr,
// and delivers them in order on a valid/ready stream.
//
// The read address channel issues bursts of up to MAX_BURST beats (AXI4 INCR,
// full-width beats). Several bursts may be outstanding. Returned data goes
// into an internal FIFO of FIFO_DEPTH words; a burst is only requested when
// the FIFO is sure to have room for it, so rready is always high and the
// memory never stalls on this master. A pulse on start begins a transfer;
// done stays high from the cycle after the last word has been delivered until
// the next start. The burst size, FIFO depth and this credit scheme are this
// design's choices; the paper only calls for wide AXI reads.
module axi_burst_reader #(
  parameter int unsigned DATA_W     = 512,
  parameter int unsigned ADDR_W     = 64,
  parameter int unsigned MAX_BURST  = 16,
  parameter int unsigned FIFO_DEPTH = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] base_addr,
  input  logic [31:0]       n_beats,
  output logic              done,
  // AXI4 read address / data channels (subset)
  output logic              m_arvalid,
  input  logic              m_arready,
  output logic [ADDR_W-1:0] m_araddr,
  output logic [7:0]        m_arlen,
  input  logic              m_rvalid,
  output logic              m_rready,
  input  logic [DATA_W-1:0] m_rdata,
  input  logic              m_rlast,
  // output stream
  output logic              out_valid,
  input  logic              out_ready,
  output logic [DATA_W-1:0] out_data
);
  localparam int unsigned BYTES = DATA_W / 8;
  localparam int unsigned CW    = $clog2(FIFO_DEPTH) + 1;

  logic        busy;
  logic [31:0] req_left;      // beats not yet requested
  logic [31:0] out_left;      // beats not yet delivered
  logic [31:0] credit;        // beats requested and not yet delivered
  logic [7:0]  blen;          // beats in the next burst
  logic [$clog2(FIFO_DEPTH):0] fcount;
  logic        f_in_ready;

  assign blen = (req_left >= MAX_BURST) ? 8'(MAX_BURST) : req_left[7:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      req_left  <= '0;
      out_left  <= '0;
      credit    <= '0;
      m_arvalid <= 1'b0;
      m_araddr  <= '0;
      m_arlen   <= '0;
    end else begin
      if (start) begin
        busy      <= (n_beats != 0);
        done      <= (n_beats == 0);
        req_left  <= n_beats;
        out_left  <= n_beats;
        credit    <= '0;
        m_arvalid <= 1'b0;
        m_araddr  <= base_addr;
      end else begin
        logic [31:0] c;
        c = credit;
        if (m_arvalid && m_arready) begin
          m_arvalid <= 1'b0;
          m_araddr  <= m_araddr + ADDR_W'(ADDR_W'(m_arlen) + 1) * ADDR_W'(BYTES);
        end else if (busy && !m_arvalid && req_left != 0 &&
                     (credit + 32'(blen)) <= FIFO_DEPTH) begin
          m_arvalid <= 1'b1;
          m_arlen   <= blen - 8'd1;
          req_left  <= req_left - 32'(blen);
          c = c + 32'(blen);
        end
        if (out_valid && out_ready) begin
          c = c - 1;
          out_left <= out_left - 1;
          if (out_left == 1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
        credit <= c;
      end
    end
  end

  assign m_rready = f_in_ready;

  stream_fifo #(.WIDTH(DATA_W), .DEPTH(FIFO_DEPTH)) u_rfifo (
    .clk, .rst_n,
    .in_valid (m_rvalid), .in_ready (f_in_ready), .in_data (m_rdata),
    .out_valid, .out_ready, .out_data,
    .count (fcount)
  );

  // The credit scheme guarantees room for every returned beat.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    m_rvalid |-> f_in_ready);
  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n || start)
    (m_arvalid && !m_arready) |=> (m_arvalid && $stable(m_araddr)));

endmodule
