// idma_rr_arb: round-robin arbitration mid-end, merging the transfers of
// several front-ends onto one downstream mid-end or back-end.
//
// Each input offers an ND transfer (1D descriptor plus NumDim-1 extra
// dimensions). Among the valid inputs the first one at or after the
// round-robin pointer wins; the pointer then moves past the winner, so no
// front-end can starve another. The winning transfer is registered (one
// cycle of latency, as for every mid-end of the architecture) and offered
// downstream with ready/valid. The index of every granted input is queued
// (NumAxInFlight entries); each completion arriving from downstream is
// handed back to the input at the head of that queue, which is correct
// because downstream completes transfers in order. When the queue is full no
// further transfer is granted.
// Round-robin arbitration between front-ends is named by the architecture;
// the registered output, the completion routing queue and its depth are
// this implementation's choices.
module idma_rr_arb #(
  parameter int unsigned NumInp        = 10,
  parameter int unsigned NumDim        = 3,
  parameter int unsigned NumAxInFlight = 16
) (
  input  logic                                     clk_i,
  input  logic                                     rst_ni,
  input  idma_pkg::idma_req_t [NumInp-1:0]             req_i,
  input  idma_pkg::idma_dim_t [NumInp-1:0][NumDim-2:0] dims_i,
  input  logic [NumInp-1:0]                        valid_i,
  output logic [NumInp-1:0]                        ready_o,
  output idma_pkg::idma_req_t                      req_o,
  output idma_pkg::idma_dim_t [NumDim-2:0]         dims_o,
  output logic                                     valid_o,
  input  logic                                     ready_i,
  input  logic                                     rsp_valid_i,
  output logic [NumInp-1:0]                        rsp_valid_o
);
  import idma_pkg::*;
  localparam int unsigned IdxW = (NumInp <= 1) ? 1 : $clog2(NumInp);

  logic [IdxW-1:0] ptr_q, winner, head_idx;
  logic            any, accept, route_ready, route_valid;

  // first valid input at or after the pointer
  always_comb begin
    any    = 1'b0;
    winner = '0;
    for (int unsigned k = 0; k < NumInp; k++) begin
      automatic int unsigned i = (int'(ptr_q) + k) % NumInp;
      if (!any && valid_i[i]) begin
        any    = 1'b1;
        winner = IdxW'(i);
      end
    end
  end

  assign accept = any && route_ready && (!valid_o || ready_i);

  always_comb begin
    ready_o = '0;
    if (accept) ready_o[winner] = 1'b1;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ptr_q   <= '0;
      valid_o <= 1'b0;
      req_o   <= '0;
      dims_o  <= '0;
    end else begin
      if (ready_i) valid_o <= 1'b0;
      if (accept) begin
        valid_o <= 1'b1;
        req_o   <= req_i[winner];
        dims_o  <= dims_i[winner];
        ptr_q   <= (winner == IdxW'(NumInp - 1)) ? '0 : winner + 1'b1;
      end
    end
  end

  idma_fifo #(.Width(IdxW), .Depth(NumAxInFlight)) i_route (
    .clk_i, .rst_ni,
    .in_valid_i  (accept),
    .in_ready_o  (route_ready),
    .in_data_i   (winner),
    .out_valid_o (route_valid),
    .out_ready_i (rsp_valid_i),
    .out_data_o  (head_idx),
    .full_o      (),
    .empty_o     ()
  );

  always_comb begin
    rsp_valid_o = '0;
    if (rsp_valid_i && route_valid) rsp_valid_o[head_idx] = 1'b1;
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) rsp_valid_i |-> route_valid);

endmodule
