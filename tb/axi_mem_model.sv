// axi_mem_model: behavioural model of one global-memory port (DDR4 behind its
// controller), for simulation only. It answers the AXI4 subset the kernels
// use: INCR bursts of full-width beats on the read and write channels, any
// number of outstanding bursts, in-order responses. Memory is a sparse array
// of DATA_W-bit words indexed by byte address / (DATA_W/8); unwritten words
// read as zero. The ready and valid outputs are withheld at random, STALL_PCT
// percent of the cycles, and read data starts LATENCY cycles after its burst
// is accepted, to exercise the kernels' back-pressure paths. Testbenches
// preload and inspect the array `mem` directly.
module axi_mem_model #(
  parameter int unsigned DATA_W    = 512,
  parameter int unsigned ADDR_W    = 64,
  parameter int unsigned STALL_PCT = 20,
  parameter int unsigned LATENCY   = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              arvalid,
  output logic              arready,
  input  logic [ADDR_W-1:0] araddr,
  input  logic [7:0]        arlen,
  output logic              rvalid,
  input  logic              rready,
  output logic [DATA_W-1:0] rdata,
  output logic              rlast,
  input  logic              awvalid,
  output logic              awready,
  input  logic [ADDR_W-1:0] awaddr,
  input  logic [7:0]        awlen,
  input  logic              wvalid,
  output logic              wready,
  input  logic [DATA_W-1:0] wdata,
  input  logic              wlast,
  output logic              bvalid,
  input  logic              bready
);
  localparam longint BYTES = DATA_W / 8;

  logic [DATA_W-1:0] mem [longint];

  typedef struct { longint idx; int len; longint t; } burst_t;
  burst_t rq[$];
  burst_t wq[$];
  int     rbeat, wbeat, bcount;
  longint cycle;
  int     stall_r, stall_ar, stall_aw, stall_w, stall_b;

  assign arready = rst_n && !stall_ar;
  assign awready = rst_n && !stall_aw;
  assign wready  = rst_n && (wq.size() != 0) && !stall_w;
  assign bvalid  = rst_n && (bcount != 0) && !stall_b;

  always_comb begin
    rvalid = 1'b0;
    rdata  = '0;
    rlast  = 1'b0;
    if (rst_n && rq.size() != 0 && !stall_r && cycle >= rq[0].t) begin
      rvalid = 1'b1;
      rdata  = mem.exists(rq[0].idx + rbeat) ? mem[rq[0].idx + rbeat] : '0;
      rlast  = (rbeat == rq[0].len - 1);
    end
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      rq.delete(); wq.delete();
      rbeat <= 0; wbeat <= 0; bcount <= 0; cycle <= 0;
      stall_r <= 0; stall_ar <= 0; stall_aw <= 0; stall_w <= 0; stall_b <= 0;
    end else begin
      int bc;
      bc = bcount;
      cycle <= cycle + 1;
      if (arvalid && arready)
        rq.push_back('{idx: longint'(araddr) / BYTES, len: int'(arlen) + 1, t: cycle + LATENCY});
      if (rvalid && rready) begin
        if (rlast) begin
          void'(rq.pop_front());
          rbeat <= 0;
        end else rbeat <= rbeat + 1;
      end
      if (awvalid && awready)
        wq.push_back('{idx: longint'(awaddr) / BYTES, len: int'(awlen) + 1, t: 0});
      if (wvalid && wready) begin
        mem[wq[0].idx + wbeat] = wdata;
        if (wbeat == wq[0].len - 1) begin
          if (!wlast) $error("axi_mem_model: wlast missing at end of burst");
          void'(wq.pop_front());
          wbeat <= 0;
          bc++;
        end else begin
          if (wlast) $error("axi_mem_model: early wlast");
          wbeat <= wbeat + 1;
        end
      end
      if (bvalid && bready) bc--;
      bcount   <= bc;
      stall_r  <= ($urandom % 100) < STALL_PCT;
      stall_ar <= ($urandom % 100) < STALL_PCT;
      stall_aw <= ($urandom % 100) < STALL_PCT;
      stall_w  <= ($urandom % 100) < STALL_PCT;
      stall_b  <= ($urandom % 100) < STALL_PCT;
    end
  end
endmodule
