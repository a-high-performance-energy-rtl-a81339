// tb_idma_obi_read: self-checking testbench of the OBI read manager on a
// behavioural OBI memory.
//
// Random single-word bursts (any offset and length within one bus word) are
// handed to the manager. The OBI request must carry the word-aligned address
// and the byte enables of exactly the burst's bytes; every stream beat must
// carry the memory word, the same lane mask and the last flag. The stream is
// held back at random while the memory keeps answering, which the manager
// must absorb without losing a word; the memory also withholds grants at
// random. Without back pressure a series of bursts must leave at one beat
// per cycle.
module tb_idma_obi_read;
  import idma_pkg::*;
  localparam int unsigned DW  = 64;
  localparam int unsigned NB  = DW / 8;
  localparam int unsigned MEM = 65536;

  logic clk = 1'b0, rst_n = 1'b0, stall = 1'b0;
  always #5 clk = ~clk;

  burst_t        bq = '0;
  logic          b_valid = 1'b0, b_ready;
  logic          req, we, gnt, rvalid, err, wgnt, wrvalid, werr;
  addr_t         addr;
  logic [NB-1:0] be, strb;
  logic [DW-1:0] wdata, rdata, data, wrdata;
  logic          last, valid, ready = 1'b0;
  int checks = 0, failures = 0;

  idma_obi_read #(.DataWidth(DW), .NumAxInFlight(16)) i_dut (
    .clk_i (clk), .rst_ni (rst_n),
    .req_i (bq), .req_valid_i (b_valid), .req_ready_o (b_ready),
    .obi_req_o (req), .obi_addr_o (addr), .obi_we_o (we), .obi_be_o (be), .obi_wdata_o (wdata),
    .obi_gnt_i (gnt), .obi_rvalid_i (rvalid), .obi_rdata_i (rdata), .obi_err_i (err),
    .data_o (data), .strb_o (strb), .last_o (last), .valid_o (valid), .ready_i (ready));

  tb_obi_mem #(.DataWidth(DW), .MemBytes(MEM), .Latency(1)) i_mem (
    .clk_i (clk), .stall_i (stall),
    .r_req_i (req), .r_addr_i (addr), .r_we_i (we), .r_be_i (be), .r_wdata_i (wdata),
    .r_gnt_o (gnt), .r_rvalid_o (rvalid), .r_rdata_o (rdata), .r_err_o (err),
    .w_req_i (1'b0), .w_addr_i ('0), .w_we_i (1'b0), .w_be_i ('0), .w_wdata_i ('0),
    .w_gnt_o (wgnt), .w_rvalid_o (wrvalid), .w_rdata_o (wrdata), .w_err_o (werr));

  function automatic logic [7:0] pat(longint unsigned a);
    return 8'(a * 29 + (a >> 8) + 3);
  endfunction

  function automatic logic [NB-1:0] mask(burst_t b);
    logic [NB-1:0] m = '0;
    for (int i = 0; i < NB; i++) if (i >= b.addr % NB && i < b.addr % NB + b.len) m[i] = 1'b1;
    return m;
  endfunction

  burst_t exp_q [$];
  int     n_beats = 0;
  longint cyc = 0;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (b_valid && b_ready) begin
      exp_q.push_back(bq);
      checks++;
      if (!req || we || addr != (bq.addr & ~addr_t'(NB - 1)) || be != mask(bq)) begin
        failures++; $display("ERROR: OBI request %h be %b for burst %h+%0d", addr, be, bq.addr, bq.len);
      end
    end
    if (valid && ready) begin
      automatic burst_t e = exp_q.pop_front();
      automatic longint unsigned w = longint'(e.addr) & ~longint'(NB - 1);
      n_beats++;
      checks++;
      if (strb != mask(e) || !last) begin failures++; $display("ERROR: beat strb %b last %0b", strb, last); end
      for (int i = 0; i < NB; i++) if (mask(e)[i]) begin
        checks++;
        if (data[8*i +: 8] != pat(w + i)) begin
          failures++;
          if (failures < 10) $display("ERROR: byte %h reads %h", w + i, data[8*i +: 8]);
        end
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(addr_t a, len_t l);
    @(negedge clk);
    bq = '0; bq.addr = a; bq.len = l; bq.protocol = PROT_OBI; bq.last_burst = 1'b1;
    b_valid = 1'b1;
    #1;
    while (!b_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    b_valid = 1'b0;
  endtask

  function automatic burst_t rand_burst();
    burst_t b = '0;
    automatic int off = $urandom % NB;
    b.addr = ($urandom % MEM) & ~(NB - 1) | off;
    b.len  = 1 + $urandom % (NB - off);
    return b;
  endfunction

  initial begin
    longint t0;
    int     n0;
    for (int i = 0; i < MEM; i++) i_mem.mem[i] = pat(i);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // rate: 32 bursts presented back to back, stream always ready
    ready = 1'b1;
    n0 = n_beats;
    fork
      for (int k = 0; k < 32; k++) begin
        automatic burst_t b = rand_burst();
        @(negedge clk);
        bq = b; b_valid = 1'b1;
        #1;
        while (!b_ready) begin @(negedge clk); #1; end
      end
    join
    t0 = cyc;
    @(negedge clk);
    b_valid = 1'b0;
    while (exp_q.size() != 0) @(negedge clk);
    checks++;
    if (cyc - t0 > 3) begin failures++; $display("ERROR: %0d cycles after the last request", cyc - t0); end
    // random phase with stream back pressure and grant stalls
    stall = 1'b1;
    fork
      forever begin @(negedge clk); ready = ($urandom % 3 == 0); end
    join_none
    for (int n = 0; n < 2000; n++) begin
      automatic burst_t b = rand_burst();
      send(b.addr, b.len);
    end
    while (exp_q.size() != 0) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
