// tb_idma_axi_write: self-checking testbench of the AXI4 write manager on a
// behavioural AXI memory.
//
// Random legal write bursts (any offset, 1..2048 bytes, never crossing 4 KiB)
// are handed to the manager while the testbench acts as the write-aligned
// byte stream: for the current beat it offers a word whose byte at lane i is
// a fixed function of that lane's address, with random valid. The announced
// lane mask must cover exactly the burst's bytes in that beat, W.last must
// mark the final beat, the AW length must equal the beat count, and one
// completion must follow per burst. A model memory receives the same bytes;
// both memories are compared at the end. The memory stalls at random in the
// second half. Without stalls a 64-beat burst must leave in 64 cycles.
module tb_idma_axi_write;
  import idma_pkg::*;
  localparam int unsigned DW  = 64;
  localparam int unsigned NB  = DW / 8;
  localparam int unsigned MEM = 65536;

  logic clk = 1'b0, rst_n = 1'b0, stall = 1'b0;
  always #5 clk = ~clk;

  burst_t        bq = '0;
  logic          b_valid = 1'b0, b_ready;
  axi_ax_t       aw, ar = '0;
  logic          aw_valid, aw_ready, w_last, w_valid, w_ready, bv, bready;
  logic [DW-1:0] w_data, r_data, data = '0;
  logic [NB-1:0] w_strb, need;
  logic [1:0]    b_resp, r_resp;
  logic          need_valid, last, valid = 1'b0, ready, done, done_ready = 1'b0;
  logic          ar_ready, r_last, r_valid;
  int checks = 0, failures = 0;

  idma_axi_write #(.DataWidth(DW), .NumAxInFlight(16)) i_dut (
    .clk_i (clk), .rst_ni (rst_n),
    .req_i (bq), .req_valid_i (b_valid), .req_ready_o (b_ready),
    .aw_o (aw), .aw_valid_o (aw_valid), .aw_ready_i (aw_ready),
    .w_data_o (w_data), .w_strb_o (w_strb), .w_last_o (w_last), .w_valid_o (w_valid),
    .w_ready_i (w_ready), .b_resp_i (b_resp), .b_valid_i (bv), .b_ready_o (bready),
    .need_strb_o (need), .need_valid_o (need_valid), .last_o (last),
    .data_i (data), .valid_i (valid), .ready_o (ready),
    .done_valid_o (done), .done_ready_i (done_ready));

  tb_axi_mem #(.DataWidth(DW), .MemBytes(MEM), .Latency(3)) i_mem (
    .clk_i (clk), .stall_i (stall),
    .ar_i (ar), .ar_valid_i (1'b0), .ar_ready_o (ar_ready),
    .r_data_o (r_data), .r_resp_o (r_resp), .r_last_o (r_last), .r_valid_o (r_valid),
    .r_ready_i (1'b0),
    .aw_i (aw), .aw_valid_i (aw_valid), .aw_ready_o (aw_ready),
    .w_data_i (w_data), .w_strb_i (w_strb), .w_last_i (w_last), .w_valid_i (w_valid),
    .w_ready_o (w_ready), .b_resp_o (b_resp), .b_valid_o (bv), .b_ready_i (bready));

  function automatic logic [7:0] pat(longint unsigned a);
    return 8'(a * 11 + (a >> 8) + 7);
  endfunction

  logic [7:0] gold [MEM];
  burst_t exp_q [$];
  int     beat = 0, n_beats = 0, n_bursts = 0, n_done = 0;
  longint cyc = 0;
  logic   took = 1'b0;  // a W beat left at the last edge

  function automatic longint unsigned cur_word();
    return (exp_q.size() == 0) ? 0 : (longint'(exp_q[0].addr) & ~longint'(NB - 1)) + beat * NB;
  endfunction

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (b_valid && b_ready) begin
      automatic int nb = ((bq.addr % NB) + bq.len + NB - 1) / NB;
      exp_q.push_back(bq);
      n_bursts++;
      for (int i = 0; i < bq.len; i++) gold[(bq.addr + i) % MEM] = pat(bq.addr + i);
      checks++;
      if (!aw_valid || aw.addr != bq.addr || int'(aw.len) != nb - 1 || aw.burst != AxiBurstIncr) begin
        failures++; $display("ERROR: AW %h len %0d for burst %h+%0d", aw.addr, aw.len, bq.addr, bq.len);
      end
    end
    if (w_valid && w_ready) begin
      automatic burst_t e = exp_q[0];
      automatic longint unsigned w = cur_word();
      automatic int nb = ((e.addr % NB) + e.len + NB - 1) / NB;
      automatic logic [NB-1:0] m = '0;
      n_beats++;
      took = 1'b1;
      for (int i = 0; i < NB; i++) if (w + i >= e.addr && w + i < e.addr + e.len) m[i] = 1'b1;
      checks++;
      if (w_strb != m || need != m || w_last != (beat == nb - 1)) begin
        failures++;
        if (failures < 10) $display("ERROR: beat %0d of %h+%0d: strb %b last %0b, expected %b", beat,
                                    e.addr, e.len, w_strb, w_last, m);
      end
      if (beat == nb - 1) begin beat = 0; void'(exp_q.pop_front()); end
      else beat++;
    end
    if (done && done_ready) n_done++;
  end

  // write-aligned stream and completion acceptance
  initial forever begin
    @(negedge clk);
    for (int i = 0; i < NB; i++) data[8*i +: 8] = pat(cur_word() + i);
    // like the dataflow element, an offered beat stays offered until taken
    if (!(valid && w_valid) || took) valid = (exp_q.size() > 0) && (!stall || $urandom % 3 != 0);
    took = 1'b0;
    done_ready = !stall || ($urandom % 2 == 0);
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(addr_t a, len_t l);
    @(negedge clk);
    bq = '0; bq.addr = a; bq.len = l; bq.protocol = PROT_AXI; bq.last_burst = 1'b1;
    b_valid = 1'b1;
    #1;
    while (!b_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    b_valid = 1'b0;
  endtask

  initial begin
    longint t0;
    int     n0, bad;
    for (int i = 0; i < MEM; i++) begin gold[i] = 8'($urandom); i_mem.mem[i] = gold[i]; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // rate: one 64-beat burst
    send(addr_t'(4096), 512);
    n0 = n_beats; t0 = cyc;
    while (exp_q.size() != 0) @(negedge clk);
    checks++;
    if (n_beats - n0 != 64 || cyc - t0 > 66) begin failures++; $display("ERROR: 64 beats took %0d cycles", cyc - t0); end
    // random phase
    stall = 1'b1;
    for (int n = 0; n < 600; n++) begin
      addr_t a = $urandom % (MEM - 4096);
      len_t  l = 1 + $urandom % ((n % 3 == 0) ? 2048 : 40);
      len_t  gap = 4096 - (a % 4096);
      if (l > gap) l = gap;
      send(a, l);
    end
    stall = 1'b0;
    while (exp_q.size() != 0 || n_done != n_bursts) @(negedge clk);
    repeat (10) @(negedge clk);
    checks++;
    if (n_done != n_bursts) begin failures++; $display("ERROR: %0d completions for %0d bursts", n_done, n_bursts); end
    bad = 0;
    for (int i = 0; i < MEM; i++) if (i_mem.mem[i] != gold[i]) bad++;
    checks++;
    if (bad != 0) begin failures++; $display("ERROR: %0d bytes differ", bad); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
