// idma_legalizer: transfer legalizer of the back-end.
//
// Accepts one 1D transfer descriptor and cuts it into bursts that the
// selected protocols allow. Source and destination have a state register
// each (address, bytes left) and advance independently: every cycle the
// source side may emit one read burst and the destination side one write
// burst. The legal length of a burst comes from the legalizer core of its
// protocol:
//   page splitter (AXI4)   do not cross a boundary of min(4 KiB, 256 beats);
//                          with the descriptor's burst limit enabled for
//                          that side, also not 2**burst_beats_log2 beats
//   single splitter (OBI)  do not cross a bus word (one access per burst)
//   Init (source only)     no limit, the whole transfer is one burst
// The burst length is the smaller of that distance and the bytes left.
// Every burst also carries the byte offset of its transfer's start in the
// bus word (for the shifters) and, on the write side, whether it is the
// transfer's last burst. For an Init source the burst address is the byte
// index in the transfer and the source address is passed on as init value.
// Zero-length transfers cannot be legalized; they are rejected by turning
// them into one null write burst that completes without bus access.
// Timing: a transfer accepted at cycle t produces its first bursts from
// cycle t+1 (registered state). A new transfer is accepted in the cycle the
// last bursts of the previous one leave, so back-to-back transfers have no
// gap. Page and single splitters, per-side state and the protocol mux follow
// the architecture; the power-of-two splitter serves TileLink, which this
// configuration does not have.
module idma_legalizer #(
  parameter int unsigned DataWidth = 64
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  idma_pkg::idma_req_t req_i,
  input  logic               req_valid_i,
  output logic               req_ready_o,
  output idma_pkg::burst_t   r_burst_o,
  output logic               r_valid_o,
  input  logic               r_ready_i,
  output idma_pkg::burst_t   w_burst_o,
  output logic               w_valid_o,
  input  logic               w_ready_i,
  output logic               busy_o
);
  import idma_pkg::*;
  localparam int unsigned StrbWidth = DataWidth / 8;
  localparam int unsigned OffBits   = $clog2(StrbWidth);
  localparam int unsigned AxiBurstBytes = AxiMaxBeats * StrbWidth;
  localparam int unsigned AxiBound  = (AxiBurstBytes < AxiPageBytes) ? AxiBurstBytes : AxiPageBytes;

  typedef struct packed {
    logic      active;
    logic      null_xfer;
    addr_t     addr;
    len_t      rem;
    protocol_e protocol;
    off_t      xfer_off;
    logic      limit;
  } side_t;

  side_t      src_q, dst_q;
  init_mode_e init_mode_q;
  addr_t      init_value_q;
  logic       last_q;
  logic [3:0] beats_log2_q;

  // distance to the next protocol boundary, limited to the bytes left
  function automatic len_t legal_len(protocol_e prot, addr_t addr, len_t rem,
                                     logic limit, logic [3:0] beats_log2);
    len_t bound, gap;
    unique case (prot)
      PROT_OBI:  bound = len_t'(StrbWidth);                       // single splitter
      PROT_INIT: bound = '0;                                       // no bus, no limit
      default: begin                                               // page splitter
        bound = len_t'(AxiBound);
        if (limit && ((len_t'(StrbWidth) << beats_log2) < bound))
          bound = len_t'(StrbWidth) << beats_log2;
      end
    endcase
    gap = bound - (len_t'(addr) & (bound - 1));
    if (prot == PROT_INIT) return rem;
    return (rem < gap) ? rem : gap;
  endfunction

  len_t r_len, w_len;
  logic r_last, w_last;

  always_comb begin
    r_len  = legal_len(src_q.protocol, src_q.addr, src_q.rem, src_q.limit, beats_log2_q);
    w_len  = dst_q.null_xfer ? '0 :
             legal_len(dst_q.protocol, dst_q.addr, dst_q.rem, dst_q.limit, beats_log2_q);
    r_last = (r_len == src_q.rem);
    w_last = (w_len == dst_q.rem);

    r_burst_o            = '0;
    r_burst_o.addr       = src_q.addr;
    r_burst_o.len        = r_len;
    r_burst_o.xfer_off   = src_q.xfer_off;
    r_burst_o.protocol   = src_q.protocol;
    r_burst_o.init_mode  = init_mode_q;
    r_burst_o.init_value = init_value_q;
    r_burst_o.last_burst = r_last;
    r_burst_o.last       = last_q;

    w_burst_o            = '0;
    w_burst_o.addr       = dst_q.addr;
    w_burst_o.len        = w_len;
    w_burst_o.xfer_off   = dst_q.xfer_off;
    w_burst_o.protocol   = dst_q.protocol;
    w_burst_o.last_burst = w_last;
    w_burst_o.last       = last_q;
    w_burst_o.null_xfer  = dst_q.null_xfer;
  end

  assign r_valid_o = src_q.active;
  assign w_valid_o = dst_q.active;

  logic r_fire, w_fire, src_done, dst_done;
  assign r_fire      = r_valid_o && r_ready_i;
  assign w_fire      = w_valid_o && w_ready_i;
  assign src_done    = !src_q.active || (r_fire && r_last);
  assign dst_done    = !dst_q.active || (w_fire && w_last);
  assign req_ready_o = src_done && dst_done;
  assign busy_o      = src_q.active || dst_q.active;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      src_q        <= '0;
      dst_q        <= '0;
      init_mode_q  <= INIT_REPEAT;
      init_value_q <= '0;
      last_q       <= 1'b0;
      beats_log2_q <= '0;
    end else begin
      if (r_fire) begin
        src_q.addr <= src_q.addr + r_len;
        src_q.rem  <= src_q.rem - r_len;
        if (r_last) src_q.active <= 1'b0;
      end
      if (w_fire) begin
        dst_q.addr <= dst_q.addr + w_len;
        dst_q.rem  <= dst_q.rem - w_len;
        if (w_last) dst_q.active <= 1'b0;
      end
      if (req_valid_i && req_ready_o) begin
        automatic options_t  o    = req_i.options;
        automatic protocol_e sp   = o.protocol_selection.src_protocol;
        automatic logic      zero = (req_i.length == '0);
        src_q.active    <= !zero;
        src_q.null_xfer <= 1'b0;
        src_q.addr      <= (sp == PROT_INIT) ? '0 : req_i.src_addr;
        src_q.rem       <= req_i.length;
        src_q.protocol  <= sp;
        src_q.xfer_off  <= (sp == PROT_INIT) ? '0 : off_t'(req_i.src_addr[OffBits-1:0]);
        src_q.limit     <= o.backend_options.limit_src_burst_len;
        dst_q.active    <= 1'b1;
        dst_q.null_xfer <= zero;
        dst_q.addr      <= req_i.dst_addr;
        dst_q.rem       <= req_i.length;
        dst_q.protocol  <= o.protocol_selection.dst_protocol;
        dst_q.xfer_off  <= off_t'(req_i.dst_addr[OffBits-1:0]);
        dst_q.limit     <= o.backend_options.limit_dst_burst_len;
        init_mode_q     <= o.protocol_options.init_mode;
        init_value_q    <= req_i.src_addr;
        last_q          <= o.last;
        beats_log2_q    <= o.backend_options.burst_beats_log2;
      end
    end
  end

  // Legal bursts never exceed the AXI4 limits.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   (r_valid_o && src_q.protocol == PROT_AXI) |-> (r_len <= len_t'(AxiBound)));
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   (w_valid_o && dst_q.protocol == PROT_AXI) |-> (w_len <= len_t'(AxiBound)));

endmodule
