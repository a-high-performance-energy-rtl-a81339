// idma_axi_read: AXI4 read manager of the transport layer.
//
// Takes one legalized read burst per handshake (start address and length in
// bytes), issues it as a single AR request and turns the returning R beats
// into a read-aligned byte stream: every beat leaves with its data word, the
// mask of the lanes that belong to the burst and a last-beat flag.
// A FIFO of NumAxInFlight entries remembers the bursts whose data is still
// outstanding, so up to NumAxInFlight AR requests may be in flight; once it
// is full, no further AR is issued.
// Timing: AR is driven combinationally from an incoming burst (no added
// cycle); R data passes to the stream combinationally, R back pressure comes
// only from the downstream stream.
// Follows the architecture: a protocol-specific manager emitting a generic
// byte stream. INCR bursts with unaligned start address, ID 0 and full-width
// beats are this implementation's choices; read errors are not reported
// (no error handler in this configuration).
module idma_axi_read #(
  parameter int unsigned DataWidth     = 64,
  parameter int unsigned NumAxInFlight = 16
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  // legalized read bursts
  input  idma_pkg::burst_t         req_i,
  input  logic                     req_valid_i,
  output logic                     req_ready_o,
  // AXI4 AR and R channels
  output idma_pkg::axi_ax_t        ar_o,
  output logic                     ar_valid_o,
  input  logic                     ar_ready_i,
  input  logic [DataWidth-1:0]     r_data_i,
  input  logic [1:0]               r_resp_i,
  input  logic                     r_last_i,
  input  logic                     r_valid_i,
  output logic                     r_ready_o,
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
  logic  beat_last;
  len_t  beats;

  // AR request
  always_comb begin
    push_meta.off = off_t'(req_i.addr[OffBits-1:0]);
    push_meta.len = req_i.len;
    beats         = (len_t'(push_meta.off) + req_i.len + len_t'(StrbWidth - 1)) >> OffBits;
    ar_o          = '0;
    ar_o.addr     = req_i.addr;
    ar_o.len      = 8'(beats - 1);
    ar_o.size     = 3'(OffBits);
    ar_o.burst    = AxiBurstIncr;
  end

  assign ar_valid_o  = req_valid_i && meta_in_ready;
  assign req_ready_o = ar_ready_i && meta_in_ready;

  idma_fifo #(.Width($bits(meta_t)), .Depth(NumAxInFlight)) i_inflight (
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
    .fire_i (valid_o && ready_i),
    .strb_o (strb_o),
    .last_o (beat_last)
  );

  // R beats to byte stream
  assign valid_o   = r_valid_i && meta_valid;
  assign r_ready_o = ready_i && meta_valid;
  assign data_o    = r_data_i;
  assign last_o    = beat_last;
  assign meta_pop  = valid_o && ready_i && beat_last;

  // The subordinate must close each burst exactly where the manager expects.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   (valid_o && ready_i) |-> (r_last_i == beat_last));
  // r_resp is not evaluated in this configuration (no error handler).
  logic unused_resp;
  assign unused_resp = ^r_resp_i;

endmodule
