// tb_idma_axi_read: self-checking testbench of the AXI4 read manager on a
// behavioural AXI memory.
//
// Random legal read bursts (any start offset, 1..2048 bytes, never crossing
// 4 KiB) are handed to the manager; the memory holds a known byte pattern and
// stalls at random in the second half. Every stream beat is compared with the
// memory: the lane mask must cover exactly the burst's bytes in that beat
// (read-aligned), the data under the mask must equal memory, and the last
// flag must mark the burst's final beat. The AR length must equal the beat
// count. Without stalls a 64-beat burst must stream in 64 cycles once its
// first beat arrives (one beat per cycle), and up to 16 bursts must be
// accepted before any data returns (outstanding requests).
module tb_idma_axi_read;
  import idma_pkg::*;
  localparam int unsigned DW  = 64;
  localparam int unsigned NB  = DW / 8;
  localparam int unsigned MEM = 65536;

  logic clk = 1'b0, rst_n = 1'b0, stall = 1'b0;
  always #5 clk = ~clk;

  burst_t        bq = '0;
  logic          b_valid = 1'b0, b_ready;
  axi_ax_t       ar, aw = '0;
  logic          ar_valid, ar_ready, r_last, r_valid, r_ready;
  logic [DW-1:0] r_data, data;
  logic [1:0]    r_resp, b_resp;
  logic [NB-1:0] strb;
  logic          last, valid, ready = 1'b0;
  logic          aw_ready, w_ready, bv;
  int checks = 0, failures = 0;

  idma_axi_read #(.DataWidth(DW), .NumAxInFlight(16)) i_dut (
    .clk_i (clk), .rst_ni (rst_n),
    .req_i (bq), .req_valid_i (b_valid), .req_ready_o (b_ready),
    .ar_o (ar), .ar_valid_o (ar_valid), .ar_ready_i (ar_ready),
    .r_data_i (r_data), .r_resp_i (r_resp), .r_last_i (r_last), .r_valid_i (r_valid),
    .r_ready_o (r_ready),
    .data_o (data), .strb_o (strb), .last_o (last), .valid_o (valid), .ready_i (ready));

  tb_axi_mem #(.DataWidth(DW), .MemBytes(MEM), .Latency(3)) i_mem (
    .clk_i (clk), .stall_i (stall),
    .ar_i (ar), .ar_valid_i (ar_valid), .ar_ready_o (ar_ready),
    .r_data_o (r_data), .r_resp_o (r_resp), .r_last_o (r_last), .r_valid_o (r_valid),
    .r_ready_i (r_ready),
    .aw_i (aw), .aw_valid_i (1'b0), .aw_ready_o (aw_ready),
    .w_data_i ('0), .w_strb_i ('0), .w_last_i (1'b0), .w_valid_i (1'b0), .w_ready_o (w_ready),
    .b_resp_o (b_resp), .b_valid_o (bv), .b_ready_i (1'b0));

  function automatic logic [7:0] pat(longint unsigned a);
    return 8'(a * 13 + (a >> 8) + 5);
  endfunction

  burst_t exp_q [$];
  int     beat = 0, n_beats = 0, n_acc = 0;
  longint cyc = 0;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (b_valid && b_ready) begin
      automatic int nb = ((bq.addr % NB) + bq.len + NB - 1) / NB;
      n_acc++;
      exp_q.push_back(bq);
      checks++;
      if (!ar_valid || ar.addr != bq.addr || int'(ar.len) != nb - 1 || ar.burst != AxiBurstIncr ||
          int'(ar.size) != $clog2(NB)) begin
        failures++; $display("ERROR: AR %h len %0d for burst %h+%0d", ar.addr, ar.len, bq.addr, bq.len);
      end
    end
    if (valid && ready) begin
      automatic burst_t e = exp_q[0];
      automatic longint unsigned w = (longint'(e.addr) & ~longint'(NB - 1)) + beat * NB;
      automatic int nb = ((e.addr % NB) + e.len + NB - 1) / NB;
      automatic logic [NB-1:0] m = '0;
      n_beats++;
      for (int i = 0; i < NB; i++) if (w + i >= e.addr && w + i < e.addr + e.len) m[i] = 1'b1;
      checks++;
      if (strb != m || last != (beat == nb - 1)) begin
        failures++;
        if (failures < 10) $display("ERROR: beat %0d of %h+%0d: strb %b last %0b, expected %b %0b", beat,
                                    e.addr, e.len, strb, last, m, beat == nb - 1);
      end
      for (int i = 0; i < NB; i++) if (m[i]) begin
        checks++;
        if (data[8*i +: 8] != pat(w + i)) begin
          failures++;
          if (failures < 10) $display("ERROR: byte %h reads %h", w + i, data[8*i +: 8]);
        end
      end
      if (beat == nb - 1) begin beat = 0; void'(exp_q.pop_front()); end
      else beat++;
    end
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
    bq = '0; bq.addr = a; bq.len = l; bq.protocol = PROT_AXI;
    b_valid = 1'b1;
    #1;
    while (!b_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    b_valid = 1'b0;
  endtask

  initial begin
    longint t0;
    int     n0;
    for (int i = 0; i < MEM; i++) i_mem.mem[i] = pat(i);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // outstanding: 16 bursts accepted while the stream is held
    for (int k = 0; k < 16; k++) send(addr_t'(k * 256 + k), 40);
    checks++;
    if (n_acc != 16) begin failures++; $display("ERROR: %0d bursts outstanding", n_acc); end
    ready = 1'b1;
    while (exp_q.size() != 0) @(negedge clk);
    // rate: 64 beats back to back
    send(addr_t'(8192), 512);
    while (n_beats == 0 || !valid) @(negedge clk);
    n0 = n_beats; t0 = cyc;
    while (exp_q.size() != 0) @(negedge clk);
    checks++;
    if (n_beats - n0 != 64 || cyc - t0 > 64) begin
      failures++; $display("ERROR: 64 beats took %0d cycles", cyc - t0);
    end
    // random phase
    stall = 1'b1;
    fork
      forever begin @(negedge clk); ready = ($urandom % 4 != 0); end
    join_none
    for (int n = 0; n < 600; n++) begin
      addr_t a = $urandom % (MEM - 4096);
      len_t  l = 1 + $urandom % ((n % 3 == 0) ? 2048 : 40);
      len_t  gap = 4096 - (a % 4096);
      if (l > gap) l = gap;
      send(a, l);
    end
    while (exp_q.size() != 0) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
