// idma_obi_read: OBI read manager of the transport layer.
//
// OBI has no bursts, so the legalizer hands this manager bursts of at most
// one bus word. Each burst becomes one OBI read request (word-aligned
// address, byte enables of the requested bytes). Returned words are queued
// and leave as a read-aligned byte stream, one beat per request, with the
// lane mask of the requested bytes and the last flag set.
// OBI read data cannot be stalled, so the manager never has more requests
// in flight than it can buffer: a request is only issued while the
// NumAxInFlight-deep request queue has room, and the response queue has the
// same depth. This keeps back pressure protocol-legal, as the architecture
// requires. Request valid follows an incoming burst combinationally; data
// leaves one cycle after rvalid (registered response queue).
// The queue-based flow control and the fixed `we`=0 port are this
// implementation's choices; `err` is not evaluated (no error handler).
module idma_obi_read #(
  parameter int unsigned DataWidth     = 64,
  parameter int unsigned NumAxInFlight = 16
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  idma_pkg::burst_t         req_i,
  input  logic                     req_valid_i,
  output logic                     req_ready_o,
  // OBI manager port (read only)
  output logic                     obi_req_o,
  output idma_pkg::addr_t          obi_addr_o,
  output logic                     obi_we_o,
  output logic [DataWidth/8-1:0]   obi_be_o,
  output logic [DataWidth-1:0]     obi_wdata_o,
  input  logic                     obi_gnt_i,
  input  logic                     obi_rvalid_i,
  input  logic [DataWidth-1:0]     obi_rdata_i,
  input  logic                     obi_err_i,
  // read-aligned byte stream
  output logic [DataWidth-1:0]     data_o,
  output logic [DataWidth/8-1:0]   strb_o,
  output logic                     last_o,
  output logic                     valid_o,
  input  logic                     ready_i
);
  import idma_pkg::*;
  localparam int unsigned StrbWidth = DataWidth / 8;
  localparam int unsigned OffBits   = $clog2(StrbWidth);

  typedef struct packed {
    off_t off;
    len_t len;
  } meta_t;

  meta_t push_meta, head_meta;
  logic  meta_in_ready, meta_valid, meta_pop;
  logic  rsp_valid, beat_last;

  always_comb begin
    push_meta.off = off_t'(req_i.addr[OffBits-1:0]);
    push_meta.len = req_i.len;
    for (int unsigned i = 0; i < StrbWidth; i++) begin
      obi_be_o[i] = (len_t'(i) >= len_t'(push_meta.off)) &&
                    (len_t'(i) <  len_t'(push_meta.off) + req_i.len);
    end
  end

  assign obi_req_o   = req_valid_i && meta_in_ready;
  assign obi_addr_o  = {req_i.addr[AddrWidth-1:OffBits], OffBits'(0)};
  assign obi_we_o    = 1'b0;
  assign obi_wdata_o = '0;
  assign req_ready_o = obi_gnt_i && meta_in_ready;

  idma_fifo #(.Width($bits(meta_t)), .Depth(NumAxInFlight)) i_inflight (
    .clk_i, .rst_ni,
    .in_valid_i  (obi_req_o && obi_gnt_i),
    .in_ready_o  (meta_in_ready),
    .in_data_i   (push_meta),
    .out_valid_o (meta_valid),
    .out_ready_i (meta_pop),
    .out_data_o  (head_meta),
    .full_o      (),
    .empty_o     ()
  );

  // Response queue: never overflows, at most NumAxInFlight requests are open.
  idma_fifo #(.Width(DataWidth), .Depth(NumAxInFlight)) i_rsp (
    .clk_i, .rst_ni,
    .in_valid_i  (obi_rvalid_i),
    .in_ready_o  (),
    .in_data_i   (obi_rdata_i),
    .out_valid_o (rsp_valid),
    .out_ready_i (meta_pop),
    .out_data_o  (data_o),
    .full_o      (),
    .empty_o     ()
  );

  idma_beat_gen #(.StrbWidth(StrbWidth)) i_beats (
    .clk_i, .rst_ni,
    .off_i  (head_meta.off),
    .len_i  (head_meta.len),
    .fire_i (valid_o && ready_i),
    .strb_o (strb_o),
    .last_o (beat_last)
  );

  assign valid_o  = rsp_valid && meta_valid;
  assign last_o   = beat_last;
  assign meta_pop = valid_o && ready_i;

  logic unused_err;
  assign unused_err = obi_err_i;

  // Legalized OBI bursts never span more than one bus word.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   (valid_o && ready_i) |-> beat_last);

endmodule
