// tb_idma_dataflow: self-checking testbench of the byte-lane dataflow element.
//
// Random beats with random lane masks are pushed while random lane masks are
// requested on the output side, both sides with random valid/ready. A model
// keeps one byte queue per lane: every popped lane must return the oldest
// byte of its queue, out_valid must be set exactly when all requested lanes
// hold a byte, and in_ready exactly when no lane the input carries is full.
// A second phase streams full beats with both sides always ready and checks
// one beat per cycle. Inputs change on the falling clock edge; the model
// samples at the rising edge.
module tb_idma_dataflow;
  localparam int unsigned DW    = 64;
  localparam int unsigned NB    = DW / 8;
  localparam int unsigned Depth = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [DW-1:0] in_data = '0, out_data;
  logic [NB-1:0] in_strb = '0, out_strb = '1;
  logic          in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  int checks = 0, failures = 0;
  int n_out = 0;

  idma_dataflow #(.DataWidth(DW), .BufferDepth(Depth)) i_dut (
    .clk_i (clk), .rst_ni (rst_n),
    .in_data_i (in_data), .in_strb_i (in_strb), .in_valid_i (in_valid), .in_ready_o (in_ready),
    .out_strb_i (out_strb), .out_data_o (out_data), .out_valid_o (out_valid),
    .out_ready_i (out_ready));

  logic [7:0] q [NB][$];

  always @(posedge clk) if (rst_n) begin
    automatic logic exp_in_ready = 1'b1, exp_out_valid = 1'b1;
    for (int i = 0; i < NB; i++) begin
      if (in_strb[i] && q[i].size() >= Depth) exp_in_ready = 1'b0;
      if (out_strb[i] && q[i].size() == 0) exp_out_valid = 1'b0;
    end
    checks++;
    if (in_ready != exp_in_ready || out_valid != exp_out_valid) begin
      failures++;
      if (failures < 10) $display("ERROR: in_ready %0b/%0b out_valid %0b/%0b", in_ready, exp_in_ready,
                                  out_valid, exp_out_valid);
    end
    if (out_valid && out_ready) begin
      n_out++;
      for (int i = 0; i < NB; i++) if (out_strb[i] && q[i].size() > 0) begin
        automatic logic [7:0] b = q[i].pop_front();
        checks++;
        if (out_data[8*i +: 8] != b) begin
          failures++;
          if (failures < 10) $display("ERROR: lane %0d byte %h, expected %h", i, out_data[8*i +: 8], b);
        end
      end
    end
    if (in_valid && in_ready)
      for (int i = 0; i < NB; i++) if (in_strb[i]) q[i].push_back(in_data[8*i +: 8]);
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // random phase
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      in_valid  = ($urandom % 3 != 0);
      in_data   = {$urandom, $urandom};
      in_strb   = NB'($urandom);
      out_ready = ($urandom % 3 != 0);
      out_strb  = NB'($urandom) | NB'(1 << ($urandom % NB));
    end
    // drain
    @(negedge clk);
    in_valid = 1'b0; out_ready = 1'b1;
    for (int k = 0; k < 4 * Depth; k++) begin
      out_strb = '0;
      for (int i = 0; i < NB; i++) if (q[i].size() > 0) out_strb[i] = 1'b1;
      if (out_strb == '0) out_strb = '1;
      @(negedge clk);
    end
    // throughput phase: full beats, both sides always ready
    out_strb = '1; in_strb = '1; in_valid = 1'b1; out_ready = 1'b1;
    t0 = n_out;
    repeat (100) begin
      in_data = {$urandom, $urandom};
      @(negedge clk);
    end
    checks++;
    if (n_out - t0 < 98) begin failures++; $display("ERROR: %0d beats in 100 cycles", n_out - t0); end
    in_valid = 1'b0;
    repeat (5) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
