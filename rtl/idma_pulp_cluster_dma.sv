// idma_pulp_cluster_dma: complete DMA engine of a PULP-style compute cluster,
// assembled from the modular parts.
//
// Control plane: NumCoreFe core-private reg_32_3d front-ends (one per cluster
// core) plus NumHostFe more for the host processor, each with its own
// register bus. Mid-ends: a round-robin arbitration mid-end picks one
// front-end's 3D transfer at a time and hands it to the tensor mid-end
// (NumDim = 3), which issues the 1D transfers. Data plane: one back-end with
// an AXI4 manager port towards the SoC (L2 / external memory), an OBI read
// and an OBI write port towards the cluster's tightly-coupled L1 memory, and
// the Init pseudo protocol for memory initialisation. Source and
// destination protocol are chosen per transfer in each front-end's
// configuration register, so L2-to-L1, L1-to-L2, L1-to-L1, L2-to-L2 and
// initialisation all use the same engine.
// Completion of a 3D transfer returns to the front-end that launched it and
// advances its status register.
// Latency from a launching register read to the first read request: one
// cycle in the arbitration mid-end, none in the tensor mid-end, two in the
// back-end. Defaults: 64-bit data (the cluster's AXI width), 32-bit
// addresses, 16 outstanding transfers.
// The line-up of front-ends, mid-ends and back-end follows the cluster
// configuration of the architecture. One multi-protocol back-end is used
// (the published block diagram draws two single-direction back-ends); the
// host front-ends are of the same reg_32_3d type as the core ones.
module idma_pulp_cluster_dma #(
  parameter int unsigned NumCoreFe     = 8,
  parameter int unsigned NumHostFe     = 2,
  parameter int unsigned DataWidth     = 64,
  parameter int unsigned NumAxInFlight = 16,
  parameter int unsigned BufferDepth   = 3
) (
  input  logic                               clk_i,
  input  logic                               rst_ni,
  // register buses of the front-ends (cores first, then host)
  input  logic [NumCoreFe+NumHostFe-1:0]        cfg_req_i,
  input  logic [NumCoreFe+NumHostFe-1:0]        cfg_we_i,
  input  logic [NumCoreFe+NumHostFe-1:0][5:0]   cfg_addr_i,
  input  logic [NumCoreFe+NumHostFe-1:0][31:0]  cfg_wdata_i,
  output logic [NumCoreFe+NumHostFe-1:0]        cfg_gnt_o,
  output logic [NumCoreFe+NumHostFe-1:0]        cfg_rvalid_o,
  output logic [NumCoreFe+NumHostFe-1:0][31:0]  cfg_rdata_o,
  output logic                               busy_o,
  // AXI4 manager port (SoC side)
  output idma_pkg::axi_ax_t                  axi_ar_o,
  output logic                               axi_ar_valid_o,
  input  logic                               axi_ar_ready_i,
  input  logic [DataWidth-1:0]               axi_r_data_i,
  input  logic [1:0]                         axi_r_resp_i,
  input  logic                               axi_r_last_i,
  input  logic                               axi_r_valid_i,
  output logic                               axi_r_ready_o,
  output idma_pkg::axi_ax_t                  axi_aw_o,
  output logic                               axi_aw_valid_o,
  input  logic                               axi_aw_ready_i,
  output logic [DataWidth-1:0]               axi_w_data_o,
  output logic [DataWidth/8-1:0]             axi_w_strb_o,
  output logic                               axi_w_last_o,
  output logic                               axi_w_valid_o,
  input  logic                               axi_w_ready_i,
  input  logic [1:0]                         axi_b_resp_i,
  input  logic                               axi_b_valid_i,
  output logic                               axi_b_ready_o,
  // OBI read port (L1 side)
  output logic                               obir_req_o,
  output idma_pkg::addr_t                    obir_addr_o,
  output logic                               obir_we_o,
  output logic [DataWidth/8-1:0]             obir_be_o,
  output logic [DataWidth-1:0]               obir_wdata_o,
  input  logic                               obir_gnt_i,
  input  logic                               obir_rvalid_i,
  input  logic [DataWidth-1:0]               obir_rdata_i,
  input  logic                               obir_err_i,
  // OBI write port (L1 side)
  output logic                               obiw_req_o,
  output idma_pkg::addr_t                    obiw_addr_o,
  output logic                               obiw_we_o,
  output logic [DataWidth/8-1:0]             obiw_be_o,
  output logic [DataWidth-1:0]               obiw_wdata_o,
  input  logic                               obiw_gnt_i,
  input  logic                               obiw_rvalid_i,
  input  logic [DataWidth-1:0]               obiw_rdata_i,
  input  logic                               obiw_err_i
);
  import idma_pkg::*;
  localparam int unsigned NumFe  = NumCoreFe + NumHostFe;
  localparam int unsigned NumDim = 3;

  idma_req_t [NumFe-1:0]             fe_req;
  idma_dim_t [NumFe-1:0][NumDim-2:0] fe_dims;
  logic      [NumFe-1:0]             fe_valid, fe_ready, fe_done;

  for (genvar i = 0; i < NumFe; i++) begin : gen_fe
    idma_reg32_3d i_fe (
      .clk_i, .rst_ni,
      .req_i      (cfg_req_i[i]),
      .we_i       (cfg_we_i[i]),
      .addr_i     (cfg_addr_i[i]),
      .wdata_i    (cfg_wdata_i[i]),
      .gnt_o      (cfg_gnt_o[i]),
      .rvalid_o   (cfg_rvalid_o[i]),
      .rdata_o    (cfg_rdata_o[i]),
      .nd_req_o   (fe_req[i]),
      .nd_dims_o  (fe_dims[i]),
      .nd_valid_o (fe_valid[i]),
      .nd_ready_i (fe_ready[i]),
      .done_i     (fe_done[i])
    );
  end

  idma_req_t                 arb_req;
  idma_dim_t [NumDim-2:0]    arb_dims;
  logic                      arb_valid, arb_ready, nd_rsp;

  idma_rr_arb #(.NumInp(NumFe), .NumDim(NumDim), .NumAxInFlight(NumAxInFlight)) i_rr_arb (
    .clk_i, .rst_ni,
    .req_i (fe_req), .dims_i (fe_dims), .valid_i (fe_valid), .ready_o (fe_ready),
    .req_o (arb_req), .dims_o (arb_dims), .valid_o (arb_valid), .ready_i (arb_ready),
    .rsp_valid_i (nd_rsp), .rsp_valid_o (fe_done)
  );

  idma_req_t be_req;
  logic      be_valid, be_ready, be_rsp_valid, be_rsp_last, be_busy, nd_busy;

  idma_tensor_nd #(.NumDim(NumDim)) i_tensor_3d (
    .clk_i, .rst_ni,
    .nd_req_i (arb_req), .nd_dims_i (arb_dims), .nd_valid_i (arb_valid), .nd_ready_o (arb_ready),
    .req_o (be_req), .req_valid_o (be_valid), .req_ready_i (be_ready),
    .rsp_valid_i (be_rsp_valid), .rsp_last_i (be_rsp_last), .rsp_valid_o (nd_rsp),
    .busy_o (nd_busy)
  );

  idma_backend #(
    .DataWidth(DataWidth), .NumAxInFlight(NumAxInFlight), .BufferDepth(BufferDepth)
  ) i_backend (
    .clk_i, .rst_ni,
    .req_i (be_req), .req_valid_i (be_valid), .req_ready_o (be_ready),
    .rsp_valid_o (be_rsp_valid), .rsp_last_o (be_rsp_last), .busy_o (be_busy),
    .axi_ar_o, .axi_ar_valid_o, .axi_ar_ready_i,
    .axi_r_data_i, .axi_r_resp_i, .axi_r_last_i, .axi_r_valid_i, .axi_r_ready_o,
    .axi_aw_o, .axi_aw_valid_o, .axi_aw_ready_i,
    .axi_w_data_o, .axi_w_strb_o, .axi_w_last_o, .axi_w_valid_o, .axi_w_ready_i,
    .axi_b_resp_i, .axi_b_valid_i, .axi_b_ready_o,
    .obir_req_o, .obir_addr_o, .obir_we_o, .obir_be_o, .obir_wdata_o,
    .obir_gnt_i, .obir_rvalid_i, .obir_rdata_i, .obir_err_i,
    .obiw_req_o, .obiw_addr_o, .obiw_we_o, .obiw_be_o, .obiw_wdata_o,
    .obiw_gnt_i, .obiw_rvalid_i, .obiw_rdata_i, .obiw_err_i
  );

  assign busy_o = be_busy || nd_busy || arb_valid;

endmodule
