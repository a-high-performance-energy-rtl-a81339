// idma_dataflow: the dataflow element between the read and the write part of
// the transport layer.
//
// It holds the bus-aligned byte stream in DataWidth/8 independent byte-lane
// FIFOs of BufferDepth entries each. A read beat is accepted when every lane
// it carries (in_strb_i) has room, and pushes only those lanes. A write beat
// names the lanes it needs (out_strb_i); it is offered (out_valid_o) once all
// of them hold a byte and pops only those lanes. Because bytes of consecutive
// transfers keep their order within each lane, beats of different sizes and
// offsets on the two sides can be combined freely (transfer coalescing), and
// each side applies back pressure only through its own ready/valid pair.
// Push and pop both act at the clock edge; a byte pushed in cycle t can be
// popped from cycle t+1. The element also cuts every combinational path
// between the read and the write managers.
// The architecture gives the purpose (decouple, coalesce, cut timing paths,
// small FIFO); the per-lane organisation and the default depth of 3 are this
// implementation's choices. Depth 3 is what one beat per cycle needs when
// source and destination have different byte offsets: a lane then holds
// bytes of two read beats while it waits for the write beat that takes the
// older one, and because a lane that is full refuses a push even in a cycle
// it is popped (which keeps the read and write sides free of combinational
// paths), a third entry is needed. Depth 2 suffices for aligned copies only.
module idma_dataflow #(
  parameter int unsigned DataWidth   = 64,
  parameter int unsigned BufferDepth = 3
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic [DataWidth-1:0]   in_data_i,
  input  logic [DataWidth/8-1:0] in_strb_i,
  input  logic                   in_valid_i,
  output logic                   in_ready_o,
  input  logic [DataWidth/8-1:0] out_strb_i,
  output logic [DataWidth-1:0]   out_data_o,
  output logic                   out_valid_o,
  input  logic                   out_ready_i
);
  localparam int unsigned StrbWidth = DataWidth / 8;

  logic [StrbWidth-1:0] lane_full, lane_empty, lane_push, lane_pop;

  always_comb begin
    in_ready_o  = 1'b1;
    out_valid_o = 1'b1;
    for (int unsigned i = 0; i < StrbWidth; i++) begin
      if (in_strb_i[i]  && lane_full[i])  in_ready_o  = 1'b0;
      if (out_strb_i[i] && lane_empty[i]) out_valid_o = 1'b0;
    end
  end

  for (genvar i = 0; i < StrbWidth; i++) begin : gen_lane
    assign lane_push[i] = in_valid_i && in_ready_o && in_strb_i[i];
    assign lane_pop[i]  = out_valid_o && out_ready_i && out_strb_i[i];

    logic in_rdy_unused;
    logic out_vld;
    idma_fifo #(.Width(8), .Depth(BufferDepth)) i_lane (
      .clk_i, .rst_ni,
      .in_valid_i  (lane_push[i]),
      .in_ready_o  (in_rdy_unused),
      .in_data_i   (in_data_i[8*i +: 8]),
      .out_valid_o (out_vld),
      .out_ready_i (lane_pop[i]),
      .out_data_o  (out_data_o[8*i +: 8]),
      .full_o      (lane_full[i]),
      .empty_o     (lane_empty[i])
    );
  end

endmodule
