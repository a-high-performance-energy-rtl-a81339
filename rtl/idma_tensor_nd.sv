// idma_tensor_nd: tensor mid-end, decomposing an N-dimensional affine
// transfer into 1D transfers.
//
// The incoming ND transfer is a 1D descriptor (base addresses, inner length
// in bytes, options) plus NumDim-1 further dimensions, each with a repetition
// count and a source and destination stride in bytes. The mid-end walks the
// dimensions like nested loops, innermost dimension (index 0) first, and
// emits one 1D transfer per iteration with
//   src = src_base + sum_d idx_d * src_stride_d   (dst likewise).
// A repetition count of 0 counts as 1. Only the very last 1D transfer
// carries the incoming `last` option; the ND transfer is consumed when that
// one leaves. Back-end completions pass through only when they carry `last`,
// so upstream sees one completion per ND transfer.
// Timing: zero latency. The first 1D transfer is offered in the same cycle
// as the ND transfer arrives, so the chain adds no cycle to the back-end's
// two; afterwards one 1D transfer per cycle. Index registers hold the
// position, address offsets are kept as running sums (no multiplier).
// The programming model (addresses, repetitions and strides per dimension)
// and the zero-cycle option follow the architecture; the dimension order and
// the treatment of zero repetitions are this implementation's choices.
module idma_tensor_nd #(
  parameter int unsigned NumDim = 3
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  // ND transfer in
  input  idma_pkg::idma_req_t          nd_req_i,
  input  idma_pkg::idma_dim_t [NumDim-2:0] nd_dims_i,
  input  logic                         nd_valid_i,
  output logic                         nd_ready_o,
  // 1D transfers out
  output idma_pkg::idma_req_t          req_o,
  output logic                         req_valid_o,
  input  logic                         req_ready_i,
  // completions
  input  logic                         rsp_valid_i,
  input  logic                         rsp_last_i,
  output logic                         rsp_valid_o,
  output logic                         busy_o
);
  import idma_pkg::*;
  localparam int unsigned ND = NumDim - 1;

  len_t  idx_q     [ND];
  addr_t src_acc_q [ND];
  addr_t dst_acc_q [ND];

  logic [ND-1:0] at_end;   // dimension d is at its last repetition
  logic          all_end;
  addr_t         src_sum, dst_sum;

  always_comb begin
    src_sum = '0;
    dst_sum = '0;
    for (int unsigned d = 0; d < ND; d++) begin
      automatic len_t reps = (nd_dims_i[d].num_reps == '0) ? len_t'(1) : nd_dims_i[d].num_reps;
      at_end[d] = (idx_q[d] == reps - 1);
      src_sum   = src_sum + src_acc_q[d];
      dst_sum   = dst_sum + dst_acc_q[d];
    end
    all_end = &at_end;

    req_o          = nd_req_i;
    req_o.src_addr = nd_req_i.src_addr + src_sum;
    req_o.dst_addr = nd_req_i.dst_addr + dst_sum;
    req_o.options.last = nd_req_i.options.last && all_end;
  end

  assign req_valid_o = nd_valid_i;
  assign nd_ready_o  = req_ready_i && all_end;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int unsigned d = 0; d < ND; d++) begin
        idx_q[d]     <= '0;
        src_acc_q[d] <= '0;
        dst_acc_q[d] <= '0;
      end
    end else if (req_valid_o && req_ready_i) begin
      // odometer increment: wrap every dimension at its end up to the first
      // one that can still advance
      automatic logic carry = 1'b1;
      for (int unsigned d = 0; d < ND; d++) begin
        if (carry) begin
          if (at_end[d]) begin
            idx_q[d]     <= '0;
            src_acc_q[d] <= '0;
            dst_acc_q[d] <= '0;
          end else begin
            idx_q[d]     <= idx_q[d] + 1'b1;
            src_acc_q[d] <= src_acc_q[d] + nd_dims_i[d].src_stride;
            dst_acc_q[d] <= dst_acc_q[d] + nd_dims_i[d].dst_stride;
            carry = 1'b0;
          end
        end
      end
    end
  end

  assign rsp_valid_o = rsp_valid_i && rsp_last_i;
  assign busy_o      = nd_valid_i;

  // ND input must stay stable while it is being expanded.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   (nd_valid_i && !nd_ready_o) |=> (nd_valid_i && $stable(nd_req_i)));

endmodule
