// idma_shifter: byte-lane rotator aligning the transport layer's byte stream.
//
// The transport layer uses two instances, one on each side of the dataflow
// element. The source shifter (RotateLeft = 0) rotates a read-aligned beat
// right by the source offset of its 1D transfer, so that byte n of the
// transfer lands in lane n mod (DataWidth/8): the stream inside the dataflow
// element is aligned to the bus regardless of either address. The destination
// shifter (RotateLeft = 1) rotates left by the destination offset, producing
// the write-aligned beat. Data and lane mask are rotated together. Purely
// combinational, no latency.
// The two shifters and their placement follow the architecture; building
// them as rotators over one bus word is this implementation's choice.
module idma_shifter #(
  parameter int unsigned DataWidth  = 64,
  parameter bit          RotateLeft = 1'b0
) (
  input  logic [DataWidth-1:0]   data_i,
  input  logic [DataWidth/8-1:0] strb_i,
  input  idma_pkg::off_t         shift_i,
  output logic [DataWidth-1:0]   data_o,
  output logic [DataWidth/8-1:0] strb_o
);
  localparam int unsigned StrbWidth = DataWidth / 8;
  localparam int unsigned OffBits   = (StrbWidth <= 1) ? 1 : $clog2(StrbWidth);

  logic [OffBits-1:0] sh;
  assign sh = shift_i[OffBits-1:0];

  always_comb begin
    for (int unsigned i = 0; i < StrbWidth; i++) begin
      logic [OffBits-1:0] src;
      src = RotateLeft ? OffBits'(i) - sh : OffBits'(i) + sh;
      data_o[8*i +: 8] = data_i[8*src +: 8];
      strb_o[i]        = strb_i[src];
    end
  end

endmodule
