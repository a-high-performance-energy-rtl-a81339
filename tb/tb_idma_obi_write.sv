// tb_idma_obi_write: self-checking testbench of the OBI write manager on a
// behavioural OBI memory.
//
// Random single-word write bursts are handed to the manager while the
// testbench acts as the write-aligned byte stream, offering for the head
// burst a word whose byte at lane i is a fixed function of its address, with
// random valid. Every granted OBI request must be a write to the
// word-aligned address with byte enables equal to the burst's bytes; one
// completion must be reported per burst, also when completions are accepted
// late (the manager must then hold back, keeping at most 16 writes open). A
// model memory receives the same bytes and both are compared at the end.
// Without stalls, queued bursts must be written at one per cycle.
module tb_idma_obi_write;
  import idma_pkg::*;
  localparam int unsigned DW  = 64;
  localparam int unsigned NB  = DW / 8;
  localparam int unsigned MEM = 65536;

  logic clk = 1'b0, rst_n = 1'b0, stall = 1'b0;
  always #5 clk = ~clk;

  burst_t        bq = '0;
  logic          b_valid = 1'b0, b_ready;
  logic          req, we, gnt, rvalid, err, rgnt, rrvalid, rerr;
  addr_t         addr;
  logic [NB-1:0] be, need;
  logic [DW-1:0] wdata, rdata, rrdata, data = '0;
  logic          need_valid, last, valid = 1'b0, ready, done, done_ready = 1'b0;
  int checks = 0, failures = 0;

  idma_obi_write #(.DataWidth(DW), .NumAxInFlight(16)) i_dut (
    .clk_i (clk), .rst_ni (rst_n),
    .req_i (bq), .req_valid_i (b_valid), .req_ready_o (b_ready),
    .obi_req_o (req), .obi_addr_o (addr), .obi_we_o (we), .obi_be_o (be), .obi_wdata_o (wdata),
    .obi_gnt_i (gnt), .obi_rvalid_i (rvalid), .obi_rdata_i (rdata), .obi_err_i (err),
    .need_strb_o (need), .need_valid_o (need_valid), .last_o (last),
    .data_i (data), .valid_i (valid), .ready_o (ready),
    .done_valid_o (done), .done_ready_i (done_ready));

  tb_obi_mem #(.DataWidth(DW), .MemBytes(MEM), .Latency(1)) i_mem (
    .clk_i (clk), .stall_i (stall),
    .r_req_i (1'b0), .r_addr_i ('0), .r_we_i (1'b0), .r_be_i ('0), .r_wdata_i ('0),
    .r_gnt_o (rgnt), .r_rvalid_o (rrvalid), .r_rdata_o (rrdata), .r_err_o (rerr),
    .w_req_i (req), .w_addr_i (addr), .w_we_i (we), .w_be_i (be), .w_wdata_i (wdata),
    .w_gnt_o (gnt), .w_rvalid_o (rvalid), .w_rdata_o (rdata), .w_err_o (err));

  function automatic logic [7:0] pat(longint unsigned a);
    return 8'(a * 17 + (a >> 8) + 1);
  endfunction

  function automatic logic [NB-1:0] mask(burst_t b);
    logic [NB-1:0] m = '0;
    for (int i = 0; i < NB; i++) if (i >= b.addr % NB && i < b.addr % NB + b.len) m[i] = 1'b1;
    return m;
  endfunction

  logic [7:0] gold [MEM];
  burst_t exp_q [$];
  int     n_wr = 0, n_bursts = 0, n_done = 0, open = 0, max_open = 0;
  longint cyc = 0;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (b_valid && b_ready) begin
      exp_q.push_back(bq);
      n_bursts++;
      for (int i = 0; i < bq.len; i++) gold[(bq.addr + i) % MEM] = pat(bq.addr + i);
    end
    if (req && gnt) begin
      automatic burst_t e = exp_q.pop_front();
      n_wr++;
      open++;
      if (open > max_open) max_open = open;
      checks++;
      if (!we || addr != (e.addr & ~addr_t'(NB - 1)) || be != mask(e) || need != mask(e)) begin
        failures++;
        if (failures < 10) $display("ERROR: write %h be %b for burst %h+%0d", addr, be, e.addr, e.len);
      end
    end
    if (done && done_ready) begin n_done++; open--; end
  end

  initial forever begin
    @(negedge clk);
    if (exp_q.size() > 0)
      for (int i = 0; i < NB; i++)
        data[8*i +: 8] = pat((longint'(exp_q[0].addr) & ~longint'(NB - 1)) + i);
    valid = (exp_q.size() > 0) && (!stall || $urandom % 3 != 0);
    done_ready = !stall || ($urandom % 8 == 0);
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic burst_t rand_burst();
    burst_t b = '0;
    automatic int off = $urandom % NB;
    b.addr = ($urandom % MEM) & ~(NB - 1) | off;
    b.len  = 1 + $urandom % (NB - off);
    b.protocol = PROT_OBI; b.last_burst = 1'b1;
    return b;
  endfunction

  initial begin
    longint t0;
    int     n0, bad;
    for (int i = 0; i < MEM; i++) begin gold[i] = 8'($urandom); i_mem.mem[i] = gold[i]; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // rate: 12 bursts queued, then written back to back
    force valid = 1'b0;
    for (int k = 0; k < 12; k++) begin
      @(negedge clk);
      bq = rand_burst(); b_valid = 1'b1;
      #1;
      while (!b_ready) begin @(negedge clk); #1; end
    end
    @(negedge clk);
    b_valid = 1'b0;
    n0 = n_wr; t0 = cyc;
    release valid;
    while (exp_q.size() != 0) @(negedge clk);
    checks++;
    if (n_wr - n0 != 12 || cyc - t0 > 14) begin failures++; $display("ERROR: 12 writes took %0d cycles", cyc - t0); end
    // random phase with slow completion acceptance
    stall = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      bq = rand_burst(); b_valid = 1'b1;
      #1;
      while (!b_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      b_valid = 1'b0;
    end
    stall = 1'b0;
    while (exp_q.size() != 0 || n_done != n_bursts) @(negedge clk);
    repeat (10) @(negedge clk);
    checks++;
    if (n_done != n_bursts) begin failures++; $display("ERROR: %0d completions for %0d bursts", n_done, n_bursts); end
    checks++;
    if (max_open > 16 || max_open < 8) begin failures++; $display("ERROR: %0d writes open at most", max_open); end
    bad = 0;
    for (int i = 0; i < MEM; i++) if (i_mem.mem[i] != gold[i]) bad++;
    checks++;
    if (bad != 0) begin failures++; $display("ERROR: %0d bytes differ", bad); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
