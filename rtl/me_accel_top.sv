// me_accel_top: programmable-logic side of the matrix-element accelerator
// card. It holds N_CU replicated compute units of the full e+e- -> mu+mu-
// matrix-element pipeline (8 in the paper's fastest configuration) and one
// colour-algebra kernel for gg -> ttbar + X (120 colour flows by default).
//
// Every kernel instance is independent: it has its own control inputs
// (start pulse, source and destination addresses, event count), its own done
// output and its own AXI4 read and write masters towards global memory. The
// host, the PCIe link and the DDR4 memory with its controllers sit outside
// this module; their connections are the ports below. In the paper the two
// workloads are built as separate accelerator images; placing both in one
// top, side by side, is this design's choice so that one module carries the
// whole design.
module me_accel_top
  import me_pkg::*;
#(
  parameter int unsigned N_CU   = 8,
  parameter int unsigned EE_W   = 512,
  parameter int unsigned ADDR_W = 64,
  parameter int unsigned NCOLOR = 120,
  parameter int unsigned COL_W  = 1024
) (
  input  logic clk,
  input  logic rst_n,
  // ---- e+e- -> mu+mu- compute units
  input  logic [N_CU-1:0]              ee_start,
  input  logic [N_CU-1:0][ADDR_W-1:0]  ee_src_addr,
  input  logic [N_CU-1:0][ADDR_W-1:0]  ee_dst_addr,
  input  logic [N_CU-1:0][31:0]        ee_n_events,
  output logic [N_CU-1:0]              ee_done,
  output logic [N_CU-1:0]              ee_arvalid,
  input  logic [N_CU-1:0]              ee_arready,
  output logic [N_CU-1:0][ADDR_W-1:0]  ee_araddr,
  output logic [N_CU-1:0][7:0]         ee_arlen,
  input  logic [N_CU-1:0]              ee_rvalid,
  output logic [N_CU-1:0]              ee_rready,
  input  logic [N_CU-1:0][EE_W-1:0]    ee_rdata,
  input  logic [N_CU-1:0]              ee_rlast,
  output logic [N_CU-1:0]              ee_awvalid,
  input  logic [N_CU-1:0]              ee_awready,
  output logic [N_CU-1:0][ADDR_W-1:0]  ee_awaddr,
  output logic [N_CU-1:0][7:0]         ee_awlen,
  output logic [N_CU-1:0]              ee_wvalid,
  input  logic [N_CU-1:0]              ee_wready,
  output logic [N_CU-1:0][EE_W-1:0]    ee_wdata,
  output logic [N_CU-1:0]              ee_wlast,
  input  logic [N_CU-1:0]              ee_bvalid,
  output logic [N_CU-1:0]              ee_bready,
  // ---- colour-algebra kernel
  input  logic                         col_start,
  input  logic [ADDR_W-1:0]            col_src_addr,
  input  logic [ADDR_W-1:0]            col_dst_addr,
  input  logic [31:0]                  col_n_events,
  output logic                         col_done,
  input  logic                                   col_cfg_we,
  input  logic [$clog2(NCOLOR*(NCOLOR+1)/2)-1:0] col_cfg_addr,
  input  coef_t                                  col_cfg_data,
  output logic                         col_arvalid,
  input  logic                         col_arready,
  output logic [ADDR_W-1:0]            col_araddr,
  output logic [7:0]                   col_arlen,
  input  logic                         col_rvalid,
  output logic                         col_rready,
  input  logic [COL_W-1:0]             col_rdata,
  input  logic                         col_rlast,
  output logic                         col_awvalid,
  input  logic                         col_awready,
  output logic [ADDR_W-1:0]            col_awaddr,
  output logic [7:0]                   col_awlen,
  output logic                         col_wvalid,
  input  logic                         col_wready,
  output logic [CWORD_W-1:0]           col_wdata,
  output logic                         col_wlast,
  input  logic                         col_bvalid,
  output logic                         col_bready
);

  for (genvar u = 0; u < int'(N_CU); u++) begin : g_cu
    ee_mumu_cu #(.DATA_W(EE_W), .ADDR_W(ADDR_W)) u_cu (
      .clk, .rst_n,
      .start     (ee_start[u]),
      .src_addr  (ee_src_addr[u]),
      .dst_addr  (ee_dst_addr[u]),
      .n_events  (ee_n_events[u]),
      .done      (ee_done[u]),
      .m_arvalid (ee_arvalid[u]), .m_arready (ee_arready[u]),
      .m_araddr  (ee_araddr[u]),  .m_arlen   (ee_arlen[u]),
      .m_rvalid  (ee_rvalid[u]),  .m_rready  (ee_rready[u]),
      .m_rdata   (ee_rdata[u]),   .m_rlast   (ee_rlast[u]),
      .m_awvalid (ee_awvalid[u]), .m_awready (ee_awready[u]),
      .m_awaddr  (ee_awaddr[u]),  .m_awlen   (ee_awlen[u]),
      .m_wvalid  (ee_wvalid[u]),  .m_wready  (ee_wready[u]),
      .m_wdata   (ee_wdata[u]),   .m_wlast   (ee_wlast[u]),
      .m_bvalid  (ee_bvalid[u]),  .m_bready  (ee_bready[u])
    );
  end

  color_kernel #(.NCOLOR(NCOLOR), .IN_W(COL_W), .ADDR_W(ADDR_W)) u_color (
    .clk, .rst_n,
    .start    (col_start),
    .src_addr (col_src_addr),
    .dst_addr (col_dst_addr),
    .n_events (col_n_events),
    .done     (col_done),
    .cfg_we   (col_cfg_we), .cfg_addr (col_cfg_addr), .cfg_data (col_cfg_data),
    .m_arvalid (col_arvalid), .m_arready (col_arready),
    .m_araddr  (col_araddr),  .m_arlen   (col_arlen),
    .m_rvalid  (col_rvalid),  .m_rready  (col_rready),
    .m_rdata   (col_rdata),   .m_rlast   (col_rlast),
    .m_awvalid (col_awvalid), .m_awready (col_awready),
    .m_awaddr  (col_awaddr),  .m_awlen   (col_awlen),
    .m_wvalid  (col_wvalid),  .m_wready  (col_wready),
    .m_wdata   (col_wdata),   .m_wlast   (col_wlast),
    .m_bvalid  (col_bvalid),  .m_bready  (col_bready)
  );

endmodule
