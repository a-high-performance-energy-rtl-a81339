// idma_beat_gen: walks one burst beat by beat and produces, for the current
// beat, the byte-lane mask of the bytes that belong to the burst and whether
// the beat is the burst's last one.
//
// The burst is given by the byte offset of its start address within a bus
// word and its length in bytes; both must stay stable until the last beat has
// been consumed (fire_i with last_o). The first beat covers lanes from the
// start offset upward, every further beat starts at lane 0. Used by all
// protocol managers, so every protocol splits bursts into beats the same way.
// Purely this implementation's helper; the architecture only states that the
// managers turn a base address and a length into a byte stream.
module idma_beat_gen #(
  parameter int unsigned StrbWidth = 8
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  idma_pkg::off_t        off_i,
  input  idma_pkg::len_t        len_i,
  input  logic                  fire_i,
  output logic [StrbWidth-1:0]  strb_o,
  output logic                  last_o
);
  import idma_pkg::*;

  logic started_q;
  len_t rem_q;
  len_t rem, room, nbytes;
  off_t off;

  always_comb begin
    off    = started_q ? '0 : (off_i & off_t'(StrbWidth - 1));
    rem    = started_q ? rem_q : len_i;
    room   = len_t'(StrbWidth) - len_t'(off);
    nbytes = (rem < room) ? rem : room;
    last_o = (rem <= room);
    for (int unsigned i = 0; i < StrbWidth; i++) begin
      strb_o[i] = (len_t'(i) >= len_t'(off)) && (len_t'(i) < len_t'(off) + nbytes);
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      started_q <= 1'b0;
      rem_q     <= '0;
    end else if (fire_i) begin
      started_q <= !last_o;
      rem_q     <= rem - nbytes;
    end
  end

endmodule
