// idma_transport: transport layer of the back-end, the part that actually
// moves data.
//
// Read part: legalized read bursts wait in the source decoupling FIFO
// (NumAxInFlight entries). Each is dispatched to the read manager of its
// protocol (AXI4, OBI or Init); a read-order FIFO records which manager and
// which transfer offset every dispatched burst has, so the read mux can take
// the managers' read-aligned beats strictly in burst order. The source
// shifter rotates each beat by its transfer's source offset and pushes the
// bytes into the dataflow element, where the stream is bus-aligned.
// Write part: write bursts wait in the destination decoupling FIFO and are
// dispatched to the write manager of their protocol (AXI4 or OBI); a
// write-order FIFO steers the dataflow element's bytes to the manager whose
// burst is next, through the destination shifter (rotation by the transfer's
// destination offset). A completion-order FIFO tracks every issued write
// burst; when the last burst of a 1D transfer has been answered by its
// manager, done_valid_o pulses with the transfer's `last` flag. Zero-length
// transfers arrive as null write bursts and complete in order without bus
// access.
// Read and write parts share nothing but the dataflow element, so they run
// concurrently, and managers change from one burst to the next without idle
// cycles. Timing: a burst pushed into a decoupling FIFO at cycle t reaches
// its protocol port at cycle t+1.
// Structure (decoupling FIFOs, managers, mux, shifters, dataflow element,
// demux) follows the architecture; the ordering FIFOs and their depth
// (NumAxInFlight) are this implementation's way of keeping mixed-protocol
// streams in order. A write burst of protocol Init is not legal; it is sent
// to the AXI4 manager.
module idma_transport #(
  parameter int unsigned DataWidth     = 64,
  parameter int unsigned NumAxInFlight = 16,
  parameter int unsigned BufferDepth   = 3
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  // legalized bursts
  input  idma_pkg::burst_t         r_burst_i,
  input  logic                     r_valid_i,
  output logic                     r_ready_o,
  input  idma_pkg::burst_t         w_burst_i,
  input  logic                     w_valid_i,
  output logic                     w_ready_o,
  // completed 1D transfers
  output logic                     done_valid_o,
  output logic                     done_last_o,
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
  // OBI read manager port
  output logic                     obir_req_o,
  output idma_pkg::addr_t          obir_addr_o,
  output logic                     obir_we_o,
  output logic [DataWidth/8-1:0]   obir_be_o,
  output logic [DataWidth-1:0]     obir_wdata_o,
  input  logic                     obir_gnt_i,
  input  logic                     obir_rvalid_i,
  input  logic [DataWidth-1:0]     obir_rdata_i,
  input  logic                     obir_err_i,
  // OBI write manager port
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
  localparam int unsigned StrbWidth = DataWidth / 8;
  typedef logic [DataWidth-1:0] data_t;
  typedef logic [StrbWidth-1:0] strb_t;

  typedef struct packed {
    protocol_e protocol;
    off_t      xfer_off;
  } order_t;

  typedef struct packed {
    protocol_e protocol;
    logic      last_burst;
    logic      last;
    logic      null_xfer;
  } cpl_t;

  // ---------------------------------------------------------------------------
  // Read part
  // ---------------------------------------------------------------------------
  burst_t rq;
  logic   rq_valid, rq_ready;

  idma_fifo #(.Width($bits(burst_t)), .Depth(NumAxInFlight)) i_src_decouple (
    .clk_i, .rst_ni,
    .in_valid_i (r_valid_i), .in_ready_o (r_ready_o), .in_data_i (r_burst_i),
    .out_valid_o(rq_valid),  .out_ready_i(rq_ready),  .out_data_o(rq),
    .full_o(), .empty_o()
  );

  logic   rord_in_ready, rord_valid, rord_pop;
  order_t rord, rord_push;
  assign rord_push = '{protocol: rq.protocol, xfer_off: rq.xfer_off};
  logic   axr_req_valid, axr_req_ready, obr_req_valid, obr_req_ready, inr_req_valid, inr_req_ready;
  logic   sel_ready;

  always_comb begin
    axr_req_valid = 1'b0;
    obr_req_valid = 1'b0;
    inr_req_valid = 1'b0;
    unique case (rq.protocol)
      PROT_OBI:  begin obr_req_valid = rq_valid && rord_in_ready; sel_ready = obr_req_ready; end
      PROT_INIT: begin inr_req_valid = rq_valid && rord_in_ready; sel_ready = inr_req_ready; end
      default:   begin axr_req_valid = rq_valid && rord_in_ready; sel_ready = axr_req_ready; end
    endcase
    rq_ready = sel_ready && rord_in_ready;
  end

  idma_fifo #(.Width($bits(order_t)), .Depth(NumAxInFlight)) i_read_order (
    .clk_i, .rst_ni,
    .in_valid_i (rq_valid && rq_ready), .in_ready_o (rord_in_ready),
    .in_data_i  (rord_push),
    .out_valid_o(rord_valid), .out_ready_i(rord_pop), .out_data_o(rord),
    .full_o(), .empty_o()
  );

  data_t axr_data, obr_data, inr_data;
  strb_t axr_strb, obr_strb, inr_strb;
  logic  axr_last, obr_last, inr_last;
  logic  axr_valid, obr_valid, inr_valid;
  logic  axr_ready, obr_ready, inr_ready;

  idma_axi_read #(.DataWidth(DataWidth), .NumAxInFlight(NumAxInFlight)) i_axi_read (
    .clk_i, .rst_ni,
    .req_i (rq), .req_valid_i (axr_req_valid), .req_ready_o (axr_req_ready),
    .ar_o (axi_ar_o), .ar_valid_o (axi_ar_valid_o), .ar_ready_i (axi_ar_ready_i),
    .r_data_i (axi_r_data_i), .r_resp_i (axi_r_resp_i), .r_last_i (axi_r_last_i),
    .r_valid_i (axi_r_valid_i), .r_ready_o (axi_r_ready_o),
    .data_o (axr_data), .strb_o (axr_strb), .last_o (axr_last),
    .valid_o (axr_valid), .ready_i (axr_ready)
  );

  idma_obi_read #(.DataWidth(DataWidth), .NumAxInFlight(NumAxInFlight)) i_obi_read (
    .clk_i, .rst_ni,
    .req_i (rq), .req_valid_i (obr_req_valid), .req_ready_o (obr_req_ready),
    .obi_req_o (obir_req_o), .obi_addr_o (obir_addr_o), .obi_we_o (obir_we_o),
    .obi_be_o (obir_be_o), .obi_wdata_o (obir_wdata_o), .obi_gnt_i (obir_gnt_i),
    .obi_rvalid_i (obir_rvalid_i), .obi_rdata_i (obir_rdata_i), .obi_err_i (obir_err_i),
    .data_o (obr_data), .strb_o (obr_strb), .last_o (obr_last),
    .valid_o (obr_valid), .ready_i (obr_ready)
  );

  idma_init_read #(.DataWidth(DataWidth), .NumAxInFlight(NumAxInFlight)) i_init_read (
    .clk_i, .rst_ni,
    .req_i (rq), .req_valid_i (inr_req_valid), .req_ready_o (inr_req_ready),
    .data_o (inr_data), .strb_o (inr_strb), .last_o (inr_last),
    .valid_o (inr_valid), .ready_i (inr_ready)
  );

  // read mux: take beats in dispatch order
  data_t rmux_data, src_data;
  strb_t rmux_strb, src_strb;
  logic  rmux_last, rmux_valid, df_in_ready;

  always_comb begin
    axr_ready = 1'b0;
    obr_ready = 1'b0;
    inr_ready = 1'b0;
    unique case (rord.protocol)
      PROT_OBI: begin
        rmux_data = obr_data; rmux_strb = obr_strb; rmux_last = obr_last;
        rmux_valid = obr_valid && rord_valid; obr_ready = df_in_ready && rord_valid;
      end
      PROT_INIT: begin
        rmux_data = inr_data; rmux_strb = inr_strb; rmux_last = inr_last;
        rmux_valid = inr_valid && rord_valid; inr_ready = df_in_ready && rord_valid;
      end
      default: begin
        rmux_data = axr_data; rmux_strb = axr_strb; rmux_last = axr_last;
        rmux_valid = axr_valid && rord_valid; axr_ready = df_in_ready && rord_valid;
      end
    endcase
  end
  assign rord_pop = rmux_valid && df_in_ready && rmux_last;

  idma_shifter #(.DataWidth(DataWidth), .RotateLeft(1'b0)) i_src_shifter (
    .data_i (rmux_data), .strb_i (rmux_strb), .shift_i (rord.xfer_off),
    .data_o (src_data),  .strb_o (src_strb)
  );

  // ---------------------------------------------------------------------------
  // Dataflow element
  // ---------------------------------------------------------------------------
  strb_t df_out_strb;
  data_t df_out_data;
  logic  df_out_valid, df_out_ready;

  idma_dataflow #(.DataWidth(DataWidth), .BufferDepth(BufferDepth)) i_dataflow (
    .clk_i, .rst_ni,
    .in_data_i (src_data), .in_strb_i (src_strb), .in_valid_i (rmux_valid),
    .in_ready_o (df_in_ready),
    .out_strb_i (df_out_strb), .out_data_o (df_out_data),
    .out_valid_o (df_out_valid), .out_ready_i (df_out_ready)
  );

  // ---------------------------------------------------------------------------
  // Write part
  // ---------------------------------------------------------------------------
  burst_t wq;
  logic   wq_valid, wq_ready;

  idma_fifo #(.Width($bits(burst_t)), .Depth(NumAxInFlight)) i_dst_decouple (
    .clk_i, .rst_ni,
    .in_valid_i (w_valid_i), .in_ready_o (w_ready_o), .in_data_i (w_burst_i),
    .out_valid_o(wq_valid),  .out_ready_i(wq_ready),  .out_data_o(wq),
    .full_o(), .empty_o()
  );

  logic   axw_req_valid, axw_req_ready, obw_req_valid, obw_req_ready, wsel_ready;
  logic   w_room;
  protocol_e wq_prot;
  logic   word_in_ready, word_valid, word_pop;
  order_t word;
  logic   cpl_in_ready, cpl_valid, cpl_pop;
  cpl_t   cpl;

  assign wq_prot = (wq.protocol == PROT_OBI) ? PROT_OBI : PROT_AXI;
  assign w_room  = word_in_ready && cpl_in_ready;

  order_t word_push;
  cpl_t   cpl_push;
  assign word_push = '{protocol: wq_prot, xfer_off: wq.xfer_off};
  assign cpl_push  = '{protocol: wq_prot, last_burst: wq.last_burst, last: wq.last,
                       null_xfer: wq.null_xfer};

  always_comb begin
    axw_req_valid = 1'b0;
    obw_req_valid = 1'b0;
    if (wq.null_xfer) begin
      wsel_ready = 1'b1;
    end else if (wq_prot == PROT_OBI) begin
      obw_req_valid = wq_valid && w_room;
      wsel_ready    = obw_req_ready;
    end else begin
      axw_req_valid = wq_valid && w_room;
      wsel_ready    = axw_req_ready;
    end
    wq_ready = wsel_ready && w_room;
  end

  idma_fifo #(.Width($bits(order_t)), .Depth(NumAxInFlight)) i_write_order (
    .clk_i, .rst_ni,
    .in_valid_i (wq_valid && wq_ready && !wq.null_xfer), .in_ready_o (word_in_ready),
    .in_data_i  (word_push),
    .out_valid_o(word_valid), .out_ready_i(word_pop), .out_data_o(word),
    .full_o(), .empty_o()
  );

  idma_fifo #(.Width($bits(cpl_t)), .Depth(NumAxInFlight)) i_cpl_order (
    .clk_i, .rst_ni,
    .in_valid_i (wq_valid && wq_ready), .in_ready_o (cpl_in_ready),
    .in_data_i  (cpl_push),
    .out_valid_o(cpl_valid), .out_ready_i(cpl_pop), .out_data_o(cpl),
    .full_o(), .empty_o()
  );

  strb_t axw_need, obw_need, need_strb;
  logic  axw_need_valid, obw_need_valid, need_valid;
  logic  axw_last, obw_last, wsel_last;
  logic  axw_valid, obw_valid, axw_ready, obw_ready, wsel_rdy;
  logic  axw_done, obw_done, axw_done_ready, obw_done_ready;
  data_t dst_data;
  strb_t unused_strb;

  idma_axi_write #(.DataWidth(DataWidth), .NumAxInFlight(NumAxInFlight)) i_axi_write (
    .clk_i, .rst_ni,
    .req_i (wq), .req_valid_i (axw_req_valid), .req_ready_o (axw_req_ready),
    .aw_o (axi_aw_o), .aw_valid_o (axi_aw_valid_o), .aw_ready_i (axi_aw_ready_i),
    .w_data_o (axi_w_data_o), .w_strb_o (axi_w_strb_o), .w_last_o (axi_w_last_o),
    .w_valid_o (axi_w_valid_o), .w_ready_i (axi_w_ready_i),
    .b_resp_i (axi_b_resp_i), .b_valid_i (axi_b_valid_i), .b_ready_o (axi_b_ready_o),
    .need_strb_o (axw_need), .need_valid_o (axw_need_valid), .last_o (axw_last),
    .data_i (dst_data), .valid_i (axw_valid), .ready_o (axw_ready),
    .done_valid_o (axw_done), .done_ready_i (axw_done_ready)
  );

  idma_obi_write #(.DataWidth(DataWidth), .NumAxInFlight(NumAxInFlight)) i_obi_write (
    .clk_i, .rst_ni,
    .req_i (wq), .req_valid_i (obw_req_valid), .req_ready_o (obw_req_ready),
    .obi_req_o (obiw_req_o), .obi_addr_o (obiw_addr_o), .obi_we_o (obiw_we_o),
    .obi_be_o (obiw_be_o), .obi_wdata_o (obiw_wdata_o), .obi_gnt_i (obiw_gnt_i),
    .obi_rvalid_i (obiw_rvalid_i), .obi_rdata_i (obiw_rdata_i), .obi_err_i (obiw_err_i),
    .need_strb_o (obw_need), .need_valid_o (obw_need_valid), .last_o (obw_last),
    .data_i (dst_data), .valid_i (obw_valid), .ready_o (obw_ready),
    .done_valid_o (obw_done), .done_ready_i (obw_done_ready)
  );

  // write demux: feed the manager whose burst is next
  always_comb begin
    axw_valid = 1'b0;
    obw_valid = 1'b0;
    if (word.protocol == PROT_OBI) begin
      need_strb  = obw_need;
      need_valid = obw_need_valid && word_valid;
      wsel_last  = obw_last;
      wsel_rdy   = obw_ready;
      obw_valid  = df_out_valid && need_valid;
    end else begin
      need_strb  = axw_need;
      need_valid = axw_need_valid && word_valid;
      wsel_last  = axw_last;
      wsel_rdy   = axw_ready;
      axw_valid  = df_out_valid && need_valid;
    end
  end

  // destination shifter: lanes needed in the bus-aligned stream, and the
  // write-aligned data handed to the manager
  strb_t need_stream;
  data_t unused_data;
  idma_shifter #(.DataWidth(DataWidth), .RotateLeft(1'b0)) i_dst_need (
    .data_i ('0), .strb_i (need_strb), .shift_i (word.xfer_off),
    .data_o (unused_data), .strb_o (need_stream)
  );
  idma_shifter #(.DataWidth(DataWidth), .RotateLeft(1'b1)) i_dst_shifter (
    .data_i (df_out_data), .strb_i ('0), .shift_i (word.xfer_off),
    .data_o (dst_data), .strb_o (unused_strb)
  );

  assign df_out_strb  = need_valid ? need_stream : '0;
  assign df_out_ready = need_valid && wsel_rdy;
  assign word_pop     = df_out_valid && need_valid && wsel_rdy && wsel_last;

  // completion in issue order
  always_comb begin
    axw_done_ready = 1'b0;
    obw_done_ready = 1'b0;
    cpl_pop        = 1'b0;
    if (cpl_valid) begin
      if (cpl.null_xfer) begin
        cpl_pop = 1'b1;
      end else if (cpl.protocol == PROT_OBI) begin
        obw_done_ready = 1'b1;
        cpl_pop        = obw_done;
      end else begin
        axw_done_ready = 1'b1;
        cpl_pop        = axw_done;
      end
    end
  end

  assign done_valid_o = cpl_pop && cpl.last_burst;
  assign done_last_o  = cpl.last;

  logic unused;
  assign unused = ^{unused_data, unused_strb};

endmodule
