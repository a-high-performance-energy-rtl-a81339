// idma_axi_write: AXI4 write manager of the transport layer.
//
// Takes one legalized write burst per handshake and issues it as one AW
// request. Its W beats are then built from the write-aligned byte stream:
// for the burst at the head of its queue the manager announces which byte
// lanes the current beat needs (need_strb_o); once the transport layer
// offers those bytes (valid_i) and W is ready, the beat leaves with exactly
// that strobe and with W.last on the final beat. Each B response is passed
// on as one completed burst (done_valid_o).
// Up to NumAxInFlight bursts may have been issued on AW and still wait for
// their W data. AW is driven combinationally from an incoming burst; W data
// passes combinationally from the stream.
// Follows the architecture's write manager (write transfer information plus
// a write-aligned byte stream in, protocol port out). Burst encoding (INCR,
// ID 0, full-width beats) is this implementation's choice; B.resp is not
// evaluated as this configuration has no error handler.
module idma_axi_write #(
  parameter int unsigned DataWidth     = 64,
  parameter int unsigned NumAxInFlight = 16
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  // legalized write bursts
  input  idma_pkg::burst_t         req_i,
  input  logic                     req_valid_i,
  output logic                     req_ready_o,
  // AXI4 AW, W and B channels
  output idma_pkg::axi_ax_t        aw_o,
  output logic                     aw_valid_o,
  input  logic                     aw_ready_i,
  output logic [DataWidth-1:0]     w_data_o,
  output logic [DataWidth/8-1:0]   w_strb_o,
  output logic                     w_last_o,
  output logic                     w_valid_o,
  input  logic                     w_ready_i,
  input  logic [1:0]               b_resp_i,
  input  logic                     b_valid_i,
  output logic                     b_ready_o,
  // write-aligned byte stream
  output logic [DataWidth/8-1:0]   need_strb_o,
  output logic                     need_valid_o,
  output logic                     last_o,
  input  logic [DataWidth-1:0]     data_i,
  input  logic                     valid_i,
  output logic                     ready_o,
  // completed bursts
  output logic                     done_valid_o,
  input  logic                     done_ready_i
);
  import idma_pkg::*;
  localparam int unsigned StrbWidth = DataWidth / 8;
  localparam int unsigned OffBits   = $clog2(StrbWidth);

  typedef struct packed {
    off_t off;
    len_t len;
  } meta_t;

  meta_t push_meta, head_meta;
  logic  meta_in_ready, meta_valid, meta_pop, beat_last;
  len_t  beats;

  always_comb begin
    push_meta.off = off_t'(req_i.addr[OffBits-1:0]);
    push_meta.len = req_i.len;
    beats         = (len_t'(push_meta.off) + req_i.len + len_t'(StrbWidth - 1)) >> OffBits;
    aw_o          = '0;
    aw_o.addr     = req_i.addr;
    aw_o.len      = 8'(beats - 1);
    aw_o.size     = 3'(OffBits);
    aw_o.burst    = AxiBurstIncr;
  end

  assign aw_valid_o  = req_valid_i && meta_in_ready;
  assign req_ready_o = aw_ready_i && meta_in_ready;

  idma_fifo #(.Width($bits(meta_t)), .Depth(NumAxInFlight)) i_wdata_meta (
    .clk_i, .rst_ni,
    .in_valid_i  (req_valid_i && req_ready_o),
    .in_ready_o  (meta_in_ready),
    .in_data_i   (push_meta),
    .out_valid_o (meta_valid),
    .out_ready_i (meta_pop),
    .out_data_o  (head_meta),
    .full_o      (),
    .empty_o     ()
  );

  idma_beat_gen #(.StrbWidth(StrbWidth)) i_beats (
    .clk_i, .rst_ni,
    .off_i  (head_meta.off),
    .len_i  (head_meta.len),
    .fire_i (w_valid_o && w_ready_i),
    .strb_o (need_strb_o),
    .last_o (beat_last)
  );

  assign need_valid_o = meta_valid;
  assign last_o       = beat_last;
  assign w_valid_o    = valid_i && meta_valid;
  assign ready_o      = w_ready_i && meta_valid;
  assign w_data_o     = data_i;
  assign w_strb_o     = need_strb_o;
  assign w_last_o     = beat_last;
  assign meta_pop     = w_valid_o && w_ready_i && beat_last;

  // One B response closes one burst.
  assign done_valid_o = b_valid_i;
  assign b_ready_o    = done_ready_i;
  logic unused_resp;
  assign unused_resp = ^b_resp_i;

  // AXI rule: W payload stays stable while W is stalled.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   (w_valid_o && !w_ready_i) |=> w_valid_o);

endmodule
