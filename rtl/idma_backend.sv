// idma_backend: the data-plane part of the engine; executes in-order,
// arbitrary-length 1D transfers on its protocol ports.
//
// A 1D transfer descriptor (idma_pkg::idma_req_t, ready/valid) enters the
// transfer legalizer, whose read and write bursts go to the transport layer.
// This configuration has an AXI4 port (read and write), an OBI read port,
// an OBI write port and the Init pseudo protocol as a source; the protocol
// of each side is chosen per transfer through the descriptor options.
// When all write responses of a transfer have arrived, rsp_valid_o pulses
// for one cycle with the transfer's `last` option flag; completions come in
// descriptor order.
// Timing: a descriptor accepted at cycle t shows its first read request at a
// protocol port at cycle t+2 (one cycle in the legalizer state, one in the
// source decoupling FIFO). Up to NumAxInFlight bursts can be outstanding per
// side. The architecture's optional error handler is not part of this
// back-end: bus error responses are ignored ("continue").
// Parameters: DataWidth (bus width in bits), NumAxInFlight (outstanding
// transfers), BufferDepth (dataflow element depth, own choice).
module idma_backend #(
  parameter int unsigned DataWidth     = 64,
  parameter int unsigned NumAxInFlight = 16,
  parameter int unsigned BufferDepth   = 3
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  idma_pkg::idma_req_t      req_i,
  input  logic                     req_valid_i,
  output logic                     req_ready_o,
  output logic                     rsp_valid_o,
  output logic                     rsp_last_o,
  output logic                     busy_o,
  // AXI4 manager port
  output idma_pkg::axi_ax_t        axi_ar_o,
  output logic                     axi_ar_valid_o,
  input  logic                     axi_ar_ready_i,
  input  logic [DataWidth-1:0]     axi_r_data_i,
  input  logic [1:0]               axi_r_resp_i,
  input  logic                     axi_r_last_i,
  input  logic                     axi_r_valid_i,
  output logic                     axi_r_ready_o,
  output idma_pkg::axi_ax_t        axi_aw_o,
  output logic                     axi_aw_valid_o,
  input  logic                     axi_aw_ready_i,
  output logic [DataWidth-1:0]     axi_w_data_o,
  output logic [DataWidth/8-1:0]   axi_w_strb_o,
  output logic                     axi_w_last_o,
  output logic                     axi_w_valid_o,
  input  logic                     axi_w_ready_i,
  input  logic [1:0]               axi_b_resp_i,
  input  logic                     axi_b_valid_i,
  output logic                     axi_b_ready_o,
  // OBI read port
  output logic                     obir_req_o,
  output idma_pkg::addr_t          obir_addr_o,
  output logic                     obir_we_o,
  output logic [DataWidth/8-1:0]   obir_be_o,
  output logic [DataWidth-1:0]     obir_wdata_o,
  input  logic                     obir_gnt_i,
  input  logic                     obir_rvalid_i,
  input  logic [DataWidth-1:0]     obir_rdata_i,
  input  logic                     obir_err_i,
  // OBI write port
  output logic                     obiw_req_o,
  output idma_pkg::addr_t          obiw_addr_o,
  output logic                     obiw_we_o,
  output logic [DataWidth/8-1:0]   obiw_be_o,
  output logic [DataWidth-1:0]     obiw_wdata_o,
  input  logic                     obiw_gnt_i,
  input  logic                     obiw_rvalid_i,
  input  logic [DataWidth-1:0]     obiw_rdata_i,
  input  logic                     obiw_err_i
);
  import idma_pkg::*;

  burst_t r_burst, w_burst;
  logic   r_valid, r_ready, w_valid, w_ready, leg_busy;

  idma_legalizer #(.DataWidth(DataWidth)) i_legalizer (
    .clk_i, .rst_ni,
    .req_i, .req_valid_i, .req_ready_o,
    .r_burst_o (r_burst), .r_valid_o (r_valid), .r_ready_i (r_ready),
    .w_burst_o (w_burst), .w_valid_o (w_valid), .w_ready_i (w_ready),
    .busy_o    (leg_busy)
  );

  idma_transport #(
    .DataWidth(DataWidth), .NumAxInFlight(NumAxInFlight), .BufferDepth(BufferDepth)
  ) i_transport (
    .clk_i, .rst_ni,
    .r_burst_i (r_burst), .r_valid_i (r_valid), .r_ready_o (r_ready),
    .w_burst_i (w_burst), .w_valid_i (w_valid), .w_ready_o (w_ready),
    .done_valid_o (rsp_valid_o), .done_last_o (rsp_last_o),
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

  // Outstanding 1D transfers: accepted but not yet completed.
  logic [15:0] open_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) open_q <= '0;
    else open_q <= open_q + 16'(req_valid_i && req_ready_o) - 16'(rsp_valid_o);
  end
  assign busy_o = leg_busy || (open_q != '0);

endmodule
