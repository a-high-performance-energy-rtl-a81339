// idma_init_read: read manager of the Init pseudo protocol, used to fill
// memory without reading it.
//
// Instead of a bus port, the manager generates the read-aligned byte stream
// itself. For an Init transfer the legalizer passes the byte index within the
// transfer as the burst address and the descriptor's source address as the
// init value. Data is organised in 32-bit little-endian words, word k being
// the k-th word of the transfer:
//   INIT_REPEAT  every word equals the init value
//   INIT_INCR    word k equals value + k
//   INIT_PRNG    word 0 equals the value, each next word is one step of a
//                32-bit Galois LFSR (polynomial idma_pkg::InitLfsrPoly)
// Bursts are queued (NumAxInFlight entries) and accepted at once; one beat
// per cycle leaves as long as the stream is ready.
// The three pattern kinds come from the architecture; the word size, the
// increment of one per word and the LFSR polynomial are this
// implementation's choices. DataWidth must be a multiple of 32.
module idma_init_read #(
  parameter int unsigned DataWidth     = 64,
  parameter int unsigned NumAxInFlight = 16
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  idma_pkg::burst_t         req_i,
  input  logic                     req_valid_i,
  output logic                     req_ready_o,
  output logic [DataWidth-1:0]     data_o,
  output logic [DataWidth/8-1:0]   strb_o,
  output logic                     last_o,
  output logic                     valid_o,
  input  logic                     ready_i
);
  import idma_pkg::*;
  localparam int unsigned StrbWidth = DataWidth / 8;
  localparam int unsigned OffBits   = $clog2(StrbWidth);
  localparam int unsigned Words     = DataWidth / 32;

  typedef struct packed {
    addr_t      addr;
    len_t       len;
    init_mode_e mode;
    addr_t      value;
  } meta_t;

  meta_t head;
  logic  head_valid, fire, beat_last;
  addr_t beat_q;      // beats of the current burst already sent
  logic [31:0] lfsr_q;
  logic [31:0] words [Words];
  logic [31:0] lfsr_next;

  idma_fifo #(.Width($bits(meta_t)), .Depth(NumAxInFlight)) i_queue (
    .clk_i, .rst_ni,
    .in_valid_i  (req_valid_i),
    .in_ready_o  (req_ready_o),
    .in_data_i   ({req_i.addr, req_i.len, req_i.init_mode, req_i.init_value}),
    .out_valid_o (head_valid),
    .out_ready_i (fire && beat_last),
    .out_data_o  (head),
    .full_o      (),
    .empty_o     ()
  );

  idma_beat_gen #(.StrbWidth(StrbWidth)) i_beats (
    .clk_i, .rst_ni,
    .off_i  (off_t'(head.addr[OffBits-1:0])),
    .len_i  (head.len),
    .fire_i (fire),
    .strb_o (strb_o),
    .last_o (beat_last)
  );

  function automatic logic [31:0] lfsr_step(logic [31:0] s);
    return s[0] ? ((s >> 1) ^ InitLfsrPoly) : (s >> 1);
  endfunction

  addr_t word_base;
  logic  xfer_start;
  always_comb begin
    // index of the first 32-bit word of this beat within the transfer
    word_base  = ((head.addr >> OffBits) + beat_q) * addr_t'(Words);
    xfer_start = (head.addr == '0) && (beat_q == '0);
    lfsr_next  = xfer_start ? head.value : lfsr_q;
    for (int unsigned j = 0; j < Words; j++) begin
      unique case (head.mode)
        INIT_INCR: words[j] = head.value + word_base + addr_t'(j);
        INIT_PRNG: begin
          words[j]  = lfsr_next;
          lfsr_next = lfsr_step(lfsr_next);
        end
        default:   words[j] = head.value;
      endcase
    end
    for (int unsigned j = 0; j < Words; j++) data_o[32*j +: 32] = words[j];
  end

  assign valid_o = head_valid;
  assign last_o  = beat_last;
  assign fire    = valid_o && ready_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      beat_q <= '0;
      lfsr_q <= '0;
    end else if (fire) begin
      beat_q <= beat_last ? '0 : beat_q + 1'b1;
      if (head.mode == INIT_PRNG) lfsr_q <= lfsr_next;
    end
  end

endmodule
