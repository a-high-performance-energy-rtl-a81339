// tb_idma_tensor_nd: self-checking testbench of the tensor mid-end (3D).
//
// Random 3D transfers (repetition counts 0..4 per outer dimension, random
// strides, random `last` option) are offered; the expected 1D transfers are
// generated by nested loops in the testbench, innermost dimension first, and
// compared one by one with what leaves the mid-end under random ready.
// Checks: addresses, length and options of every 1D transfer, `last` only on
// the final one, zero latency (the first 1D transfer is offered in the cycle
// the 3D transfer arrives), one 1D transfer per cycle while ready, and that
// completions pass upstream only when they carry `last`.
module tb_idma_tensor_nd;
  import idma_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  idma_req_t           nd_req = '0, req;
  idma_dim_t [1:0]     dims = '0;
  logic nd_valid = 1'b0, nd_ready, req_valid, req_ready = 1'b0;
  logic rsp_valid = 1'b0, rsp_last = 1'b0, rsp_out, busy;
  int checks = 0, failures = 0;

  idma_tensor_nd #(.NumDim(3)) i_dut (
    .clk_i (clk), .rst_ni (rst_n),
    .nd_req_i (nd_req), .nd_dims_i (dims), .nd_valid_i (nd_valid), .nd_ready_o (nd_ready),
    .req_o (req), .req_valid_o (req_valid), .req_ready_i (req_ready),
    .rsp_valid_i (rsp_valid), .rsp_last_i (rsp_last), .rsp_valid_o (rsp_out), .busy_o (busy));

  idma_req_t exp_q [$];
  int n_out = 0;

  always @(posedge clk) if (rst_n) begin
    // the 3D transfer is consumed together with its final 1D transfer
    if (nd_valid && nd_ready) begin
      checks++;
      if (exp_q.size() != 1) begin failures++; $display("ERROR: 3D transfer consumed early"); end
    end
    if (req_valid && req_ready) begin
      n_out++;
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("ERROR: unexpected 1D transfer");
      end else begin
        automatic idma_req_t e = exp_q.pop_front();
        if (req != e) begin
          failures++;
          if (failures < 10) $display("ERROR: 1D src %h dst %h last %0b, expected %h %h %0b", req.src_addr,
                                      req.dst_addr, req.options.last, e.src_addr, e.dst_addr, e.options.last);
        end
      end
    end
    checks++;
    if (rsp_out != (rsp_valid && rsp_last)) begin failures++; $display("ERROR: completion filter"); end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 300; n++) begin
      int unsigned r2, r3, total, t0;
      logic full_rate = (n % 4 == 0);
      nd_req = '0;
      nd_req.src_addr = $urandom; nd_req.dst_addr = $urandom; nd_req.length = $urandom % 5000;
      nd_req.options.protocol_selection.src_protocol = protocol_e'($urandom % 3);
      nd_req.options.last = ($urandom % 2 == 0);
      for (int d = 0; d < 2; d++) begin
        dims[d].num_reps = $urandom % 5;
        dims[d].src_stride = $urandom; dims[d].dst_stride = $urandom;
      end
      r2 = (dims[0].num_reps == 0) ? 1 : dims[0].num_reps;
      r3 = (dims[1].num_reps == 0) ? 1 : dims[1].num_reps;
      total = r2 * r3;
      for (int unsigned j3 = 0; j3 < r3; j3++)
        for (int unsigned j2 = 0; j2 < r2; j2++) begin
          automatic idma_req_t e = nd_req;
          e.src_addr = nd_req.src_addr + j2 * dims[0].src_stride + j3 * dims[1].src_stride;
          e.dst_addr = nd_req.dst_addr + j2 * dims[0].dst_stride + j3 * dims[1].dst_stride;
          e.options.last = nd_req.options.last && (j2 == r2 - 1) && (j3 == r3 - 1);
          exp_q.push_back(e);
        end
      nd_valid = 1'b1;
      req_ready = full_rate ? 1'b1 : ($urandom % 2 == 0);
      rsp_valid = ($urandom % 2 == 0); rsp_last = ($urandom % 2 == 0);
      #1;
      checks++;
      if (!req_valid) begin failures++; $display("ERROR: no zero-latency 1D transfer"); end
      t0 = n_out;
      @(negedge clk);
      while (exp_q.size() != 0) begin
        if (!full_rate) req_ready = ($urandom % 2 == 0);
        rsp_valid = ($urandom % 2 == 0); rsp_last = ($urandom % 2 == 0);
        @(negedge clk);
      end
      nd_valid = 1'b0;
      req_ready = 1'b0;
      if (full_rate) begin
        checks++;
        if (n_out - t0 != total) begin failures++; $display("ERROR: rate: %0d of %0d in %0d cycles", n_out - t0, total, total); end
      end
      repeat ($urandom % 3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
