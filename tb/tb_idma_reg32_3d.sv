// tb_idma_reg32_3d: self-checking testbench of the reg_32_3d front-end.
//
// Over the register bus the testbench writes random values to every
// configuration register and reads them back (rvalid one cycle after the
// grant). It then launches transfers by reading transfer_id while the
// downstream ready is held off for a random number of cycles: the grant must
// wait for it, the offered descriptor and dimensions must carry exactly the
// programmed fields (configuration bits decoded by the testbench), and the
// returned IDs must count 1, 2, 3, ... Completion pulses must advance the
// status register by one each, including one that arrives in the cycle of
// the status read.
module tb_idma_reg32_3d;
  import idma_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        req = 1'b0, we = 1'b0, gnt, rvalid, nd_valid, nd_ready = 1'b0, done = 1'b0;
  logic [5:0]  addr = '0;
  logic [31:0] wdata = '0, rdata;
  idma_req_t       nd_req;
  idma_dim_t [1:0] nd_dims;
  int checks = 0, failures = 0;

  idma_reg32_3d i_dut (
    .clk_i (clk), .rst_ni (rst_n),
    .req_i (req), .we_i (we), .addr_i (addr), .wdata_i (wdata),
    .gnt_o (gnt), .rvalid_o (rvalid), .rdata_o (rdata),
    .nd_req_o (nd_req), .nd_dims_o (nd_dims), .nd_valid_o (nd_valid), .nd_ready_i (nd_ready),
    .done_i (done));

  logic [31:0] regs [12];
  int          hold;

  task automatic access(logic w, logic [5:0] a, logic [31:0] d, output logic [31:0] rd);
    @(negedge clk);
    req = 1'b1; we = w; addr = a; wdata = d;
    #1;
    while (!gnt) begin
      if (hold > 0) begin hold--; @(negedge clk); #1; end
      else begin nd_ready = 1'b1; #1; end
    end
    @(negedge clk);
    req = 1'b0; nd_ready = 1'b0;
    checks++;
    if (!rvalid) begin failures++; $display("ERROR: no rvalid"); end
    rd = rdata;
  endtask

  function automatic void check_desc();
    logic [31:0] c = regs[3];
    checks++;
    if (nd_req.src_addr != regs[0] || nd_req.dst_addr != regs[1] || nd_req.length != regs[2] ||
        nd_req.options.protocol_selection.src_protocol != protocol_e'(c[1:0]) ||
        nd_req.options.protocol_selection.dst_protocol != protocol_e'(c[3:2]) ||
        nd_req.options.protocol_options.init_mode != init_mode_e'(c[5:4]) ||
        nd_req.options.backend_options.limit_src_burst_len != c[6] ||
        nd_req.options.backend_options.limit_dst_burst_len != c[7] ||
        nd_req.options.backend_options.burst_beats_log2 != c[11:8] || !nd_req.options.last ||
        nd_dims[0].src_stride != regs[6] || nd_dims[0].dst_stride != regs[7] ||
        nd_dims[0].num_reps != regs[8] || nd_dims[1].src_stride != regs[9] ||
        nd_dims[1].dst_stride != regs[10] || nd_dims[1].num_reps != regs[11]) begin
      failures++; $display("ERROR: offered descriptor differs from the registers");
    end
  endfunction

  // descriptor check at the launch handshake
  always @(posedge clk) if (nd_valid && nd_ready) check_desc();

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rd;
    int unsigned exp_status = 0;
    hold = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 1; n <= 40; n++) begin
      // program and read back
      for (int r = 0; r < 12; r++) if (r != 4 && r != 5) begin
        regs[r] = $urandom;
        if (r == 3) regs[r][3:0] = 4'($urandom % 3) | (4'($urandom % 3) << 2);
        access(1'b1, 6'(4 * r), regs[r], rd);
      end
      for (int r = 0; r < 12; r++) if (r != 4 && r != 5) begin
        access(1'b0, 6'(4 * r), '0, rd);
        checks++;
        if (rd != regs[r]) begin failures++; $display("ERROR: reg %0d reads %h, wrote %h", r, rd, regs[r]); end
      end
      // launch with a delayed downstream ready
      hold = $urandom % 5;
      access(1'b0, 6'h14, '0, rd);
      checks++;
      if (rd != n) begin failures++; $display("ERROR: transfer id %0d, expected %0d", rd, n); end
      // completion, sometimes in the very cycle of the status read
      if ($urandom % 2 == 0) begin
        @(negedge clk); done = 1'b1; @(negedge clk); done = 1'b0;
        exp_status++;
        access(1'b0, 6'h10, '0, rd);
      end else begin
        @(negedge clk);
        req = 1'b1; we = 1'b0; addr = 6'h10; done = 1'b1;
        @(negedge clk);
        req = 1'b0; done = 1'b0;
        exp_status++;
        rd = rdata;
      end
      checks++;
      if (rd != exp_status) begin failures++; $display("ERROR: status %0d, expected %0d", rd, exp_status); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
