// idma_fifo: synchronous ready/valid FIFO used for every decoupling buffer
// of the engine (outstanding-transfer queues, response routing, ordering).
//
// Entries are written into a register array and read from the head; the
// output is registered storage, so data pushed in cycle t is visible at the
// output from cycle t+1. A push into a full FIFO is accepted in the same cycle
// as a pop (full throughput at any depth >= 1). Width and depth are
// parameters; the depth is this engine's choice wherever it is used.
module idma_fifo #(
  parameter int unsigned Width = 8,
  parameter int unsigned Depth = 2
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             in_valid_i,
  output logic             in_ready_o,
  input  logic [Width-1:0] in_data_i,
  output logic             out_valid_o,
  input  logic             out_ready_i,
  output logic [Width-1:0] out_data_o,
  output logic             full_o,
  output logic             empty_o
);
  localparam int unsigned PtrW = (Depth <= 1) ? 1 : $clog2(Depth);
  localparam int unsigned CntW = $clog2(Depth + 1);

  logic [Width-1:0] mem_q [Depth];
  logic [PtrW-1:0]  rd_q, wr_q;
  logic [CntW-1:0]  cnt_q;
  logic             push, pop;

  assign empty_o     = (cnt_q == '0);
  assign full_o      = (cnt_q == CntW'(Depth));
  assign out_valid_o = !empty_o;
  assign out_data_o  = mem_q[rd_q];
  assign pop         = out_valid_o && out_ready_i;
  assign in_ready_o  = !full_o || out_ready_i;
  assign push        = in_valid_i && in_ready_o;

  function automatic logic [PtrW-1:0] incr(logic [PtrW-1:0] p);
    return (p == PtrW'(Depth - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push) wr_q <= incr(wr_q);
      if (pop)  rd_q <= incr(rd_q);
      if (push && !pop)      cnt_q <= cnt_q + 1'b1;
      else if (pop && !push) cnt_q <= cnt_q - 1'b1;
    end
  end

  always_ff @(posedge clk_i) begin
    if (push) mem_q[wr_q] <= in_data_i;
  end

  // Handshake rules: data must not be popped from an empty FIFO.
  assert property (@(posedge clk_i) disable iff (!rst_ni) pop |-> !empty_o);

endmodule
