// idma_obi_write: OBI write manager of the transport layer.
//
// Legalized OBI write bursts are at most one bus word long. The manager
// queues them (NumAxInFlight entries); for the burst at the head it
// announces the byte lanes it needs from the write-aligned stream
// (need_strb_o). When the stream offers them, one OBI write request goes out
// with the word-aligned address, those lanes as byte enables and the data.
// Every OBI response (rvalid) completes one burst and is reported through
// done_valid_o/done_ready_i; responses are counted, so none is ever dropped.
// At most NumAxInFlight writes are open (granted but not yet reported).
// The request is combinational from the stream; the completion is reported
// from the cycle after rvalid.
// The counting scheme and the queue depth are this implementation's
// choices; `err` is not evaluated (no error handler in this configuration).
module idma_obi_write #(
  parameter int unsigned DataWidth     = 64,
  parameter int unsigned NumAxInFlight = 16
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  idma_pkg::burst_t         req_i,
  input  logic                     req_valid_i,
  output logic                     req_ready_o,
  // OBI manager port (write only)
  output logic                     obi_req_o,
  output idma_pkg::addr_t          obi_addr_o,
  output logic                     obi_we_o,
  output logic [DataWidth/8-1:0]   obi_be_o,
  output logic [DataWidth-1:0]     obi_wdata_o,
  input  logic                     obi_gnt_i,
  input  logic                     obi_rvalid_i,
  input  logic [DataWidth-1:0]     obi_rdata_i,
  input  logic                     obi_err_i,
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
  localparam int unsigned CntW      = $clog2(NumAxInFlight + 1);

  typedef struct packed {
    addr_t addr;
    len_t  len;
  } meta_t;

  meta_t head_meta;
  logic  meta_valid, meta_pop, beat_last, fire;
  logic [CntW-1:0] open_q, done_q;

  idma_fifo #(.Width($bits(meta_t)), .Depth(NumAxInFlight)) i_queue (
    .clk_i, .rst_ni,
    .in_valid_i  (req_valid_i),
    .in_ready_o  (req_ready_o),
    .in_data_i   ({req_i.addr, req_i.len}),
    .out_valid_o (meta_valid),
    .out_ready_i (meta_pop),
    .out_data_o  (head_meta),
    .full_o      (),
    .empty_o     ()
  );

  idma_beat_gen #(.StrbWidth(StrbWidth)) i_beats (
    .clk_i, .rst_ni,
    .off_i  (off_t'(head_meta.addr[OffBits-1:0])),
    .len_i  (head_meta.len),
    .fire_i (fire),
    .strb_o (need_strb_o),
    .last_o (beat_last)
  );

  logic credit;
  assign credit       = (open_q < CntW'(NumAxInFlight));
  assign need_valid_o = meta_valid && credit;
  assign last_o       = beat_last;
  assign obi_req_o    = valid_i && meta_valid && credit;
  assign obi_addr_o   = {head_meta.addr[AddrWidth-1:OffBits], OffBits'(0)};
  assign obi_we_o     = 1'b1;
  assign obi_be_o     = need_strb_o;
  assign obi_wdata_o  = data_i;
  assign ready_o      = obi_gnt_i && meta_valid && credit;
  assign fire         = obi_req_o && obi_gnt_i;
  assign meta_pop     = fire;

  // open_q: granted writes not yet reported; done_q: responses not yet reported.
  logic report;
  assign done_valid_o = (done_q != '0);
  assign report       = done_valid_o && done_ready_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      open_q <= '0;
      done_q <= '0;
    end else begin
      open_q <= open_q + CntW'(fire) - CntW'(report);
      done_q <= done_q + CntW'(obi_rvalid_i) - CntW'(report);
    end
  end

  logic unused;
  assign unused = obi_err_i ^ (^obi_rdata_i);

  assert property (@(posedge clk_i) disable iff (!rst_ni) fire |-> beat_last);

endmodule
