// tb_idma_rr_arb: self-checking testbench of the round-robin arbitration
// mid-end with ten inputs.
//
// Each input offers a stream of tagged transfers (the tag sits in the length
// field) with random pauses and holds each until it is accepted. A model of
// the round-robin pointer predicts which input must win whenever several are
// valid; the winner's transfer must appear at the output in the next cycle
// (one cycle of latency) and leave in grant order under random downstream
// ready. Completions are returned in output order at random times and must
// reach the input that issued the transfer. At the end every input must have
// all its transfers completed, and the arbiter must have chosen among
// competing inputs many times.
module tb_idma_rr_arb;
  import idma_pkg::*;
  localparam int unsigned N = 10;
  localparam int unsigned PerInp = 60;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  idma_req_t [N-1:0]      req = '0;
  idma_dim_t [N-1:0][1:0] dims = '0;
  logic [N-1:0]           valid = '0, ready, rsp_o;
  idma_req_t              req_o;
  idma_dim_t [1:0]        dims_o;
  logic                   valid_o, ready_i = 1'b0, rsp_i = 1'b0;
  int checks = 0, failures = 0;

  idma_rr_arb #(.NumInp(N), .NumDim(3), .NumAxInFlight(16)) i_dut (
    .clk_i (clk), .rst_ni (rst_n),
    .req_i (req), .dims_i (dims), .valid_i (valid), .ready_o (ready),
    .req_o (req_o), .dims_o (dims_o), .valid_o (valid_o), .ready_i (ready_i),
    .rsp_valid_i (rsp_i), .rsp_valid_o (rsp_o));

  int        ptr = 0, n_compete = 0;
  int        sent [N];
  int        done [N];
  logic [31:0] out_q [$];
  logic [31:0] cpl_q [$];
  logic        acc_prev = 1'b0;
  logic [N-1:0] granted = '0;
  logic [31:0] acc_tag;

  always @(posedge clk) if (rst_n) begin
    automatic int w = -1;
    // one-cycle latency: the transfer granted at the previous edge is offered now
    if (acc_prev) begin
      checks++;
      if (!valid_o || req_o.length != acc_tag || dims_o[1].num_reps != acc_tag) begin
        failures++; $display("ERROR: granted transfer %h not offered next cycle", acc_tag);
      end
    end
    acc_prev = 1'b0;
    if (valid_o && ready_i) begin
      checks++;
      if (out_q.size() == 0 || out_q[0] != req_o.length) begin
        failures++; $display("ERROR: output %h out of order", req_o.length);
      end else cpl_q.push_back(out_q.pop_front());
    end
    // expected winner
    for (int k = 0; k < N; k++) if (w < 0 && valid[(ptr + k) % N]) w = (ptr + k) % N;
    if (ready != '0) begin
      checks++;
      if ($countones(ready) != 1 || w < 0 || !ready[w]) begin
        failures++; $display("ERROR: grant %b, expected input %0d", ready, w);
      end else begin
        if ($countones(valid) > 1) n_compete++;
        out_q.push_back(req[w].length);
        granted[w] = 1'b1;
        acc_prev = 1'b1;
        acc_tag  = req[w].length;
        ptr = (w + 1) % N;
      end
    end
    // completions
    if (rsp_i) begin
      automatic logic [31:0] t = cpl_q.pop_front();
      automatic int src = int'(t >> 16);
      checks++;
      if (rsp_o != N'(1 << src)) begin failures++; $display("ERROR: completion to %b, expected %0d", rsp_o, src); end
      done[src]++;
    end else begin
      checks++;
      if (rsp_o != '0) begin failures++; $display("ERROR: spurious completion"); end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (sent[i]) begin sent[i] = 0; done[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    forever begin
      @(negedge clk);
      // inputs: hold a valid transfer until its grant
      for (int i = 0; i < N; i++) begin
        if (granted[i]) begin valid[i] = 1'b0; sent[i]++; granted[i] = 1'b0; end
        if (!valid[i] && sent[i] < PerInp && $urandom % 3 != 0) begin
          valid[i] = 1'b1;
          req[i].length = (i << 16) | sent[i];
          dims[i][1].num_reps = req[i].length;
        end
      end
      ready_i = ($urandom % 4 != 0);
      rsp_i   = (cpl_q.size() > 0) && ($urandom % 2 == 0);
    end
  end

  initial begin
    int total;
    wait (rst_n);
    do begin
      repeat (100) @(negedge clk);
      total = 0;
      foreach (done[i]) total += done[i];
    end while (total < N * PerInp);
    foreach (done[i]) begin
      checks++;
      if (done[i] != PerInp) begin failures++; $display("ERROR: input %0d got %0d completions", i, done[i]); end
    end
    checks++;
    if (n_compete < 50) begin failures++; $display("ERROR: only %0d contested grants", n_compete); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
