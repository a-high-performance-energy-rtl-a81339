// tb_idma_init_read: self-checking testbench of the Init read manager.
//
// Init bursts of 1..3000 bytes with all three patterns and random init
// values are queued as the legalizer issues them (byte index 0, whole
// transfer in one burst). The testbench computes each transfer's byte
// stream itself from the pattern definition (32-bit little-endian words;
// repeat: the value; incrementing: value + word index; pseudorandom: the
// value, then successive Galois LFSR steps with polynomial 0x80200003) and
// compares every beat: lane mask from lane 0, data under the mask, and the
// last flag on the final beat. With the stream always ready the manager must
// produce one beat per cycle with no gap between bursts.
module tb_idma_init_read;
  import idma_pkg::*;
  localparam int unsigned DW = 64;
  localparam int unsigned NB = DW / 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  burst_t        bq = '0;
  logic          b_valid = 1'b0, b_ready;
  logic [DW-1:0] data;
  logic [NB-1:0] strb;
  logic          last, valid, ready = 1'b0;
  int checks = 0, failures = 0;

  idma_init_read #(.DataWidth(DW), .NumAxInFlight(16)) i_dut (
    .clk_i (clk), .rst_ni (rst_n),
    .req_i (bq), .req_valid_i (b_valid), .req_ready_o (b_ready),
    .data_o (data), .strb_o (strb), .last_o (last), .valid_o (valid), .ready_i (ready));

  function automatic logic [31:0] step(logic [31:0] s);
    return s[0] ? ((s >> 1) ^ 32'h8020_0003) : (s >> 1);
  endfunction

  burst_t exp_q [$];
  int     beat = 0, n_beats = 0;
  logic [31:0] word_q;  // current pattern word of the head burst
  int          word_i;

  always @(posedge clk) if (rst_n) begin
    if (b_valid && b_ready) exp_q.push_back(bq);
    if (valid && ready) begin
      automatic burst_t e = exp_q[0];
      automatic int nb = (e.len + NB - 1) / NB;
      n_beats++;
      if (beat == 0) begin word_q = e.init_value; word_i = 0; end
      for (int i = 0; i < NB; i++) begin
        automatic int idx = beat * NB + i;
        automatic logic in = (idx < e.len);
        checks++;
        if (strb[i] != in) begin failures++; if (failures < 10) $display("ERROR: strb lane %0d", i); end
        if (in) begin
          // advance the model word when a new word starts
          if (idx / 4 != word_i) begin
            word_i = idx / 4;
            unique case (e.init_mode)
              INIT_INCR: word_q = e.init_value + 32'(word_i);
              INIT_PRNG: word_q = step(word_q);
              default:   word_q = e.init_value;
            endcase
          end
          checks++;
          if (data[8*i +: 8] != word_q[8*(idx%4) +: 8]) begin
            failures++;
            if (failures < 10) $display("ERROR: mode %0d byte %0d is %h, expected %h", e.init_mode, idx,
                                        data[8*i +: 8], word_q[8*(idx%4) +: 8]);
          end
        end
      end
      checks++;
      if (last != (beat == nb - 1)) begin failures++; $display("ERROR: last flag at beat %0d", beat); end
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

  task automatic send(int unsigned len, init_mode_e m, logic [31:0] v);
    @(negedge clk);
    bq = '0; bq.addr = 0; bq.len = len; bq.protocol = PROT_INIT; bq.init_mode = m; bq.init_value = v;
    bq.last_burst = 1'b1;
    b_valid = 1'b1;
    #1;
    while (!b_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    b_valid = 1'b0;
  endtask

  initial begin
    int n0, total;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // rate: queue 8 bursts, then stream with ready held high
    total = 0;
    for (int k = 0; k < 8; k++) begin
      automatic int unsigned l = 8 * (1 + $urandom % 20);
      total += l / NB;
      send(l, init_mode_e'(k % 3), $urandom);
    end
    n0 = n_beats;
    @(negedge clk);
    ready = 1'b1;
    repeat (total) @(negedge clk);
    checks++;
    if (n_beats - n0 != total) begin failures++; $display("ERROR: %0d of %0d beats in as many cycles", n_beats - n0, total); end
    // random phase
    fork
      forever begin @(negedge clk); ready = ($urandom % 3 != 0); end
    join_none
    for (int n = 0; n < 400; n++) send(1 + $urandom % 3000, init_mode_e'($urandom % 3), $urandom);
    while (exp_q.size() != 0) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
