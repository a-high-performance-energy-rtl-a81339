// tb_idma_shifter: self-checking testbench of the byte-lane rotator.
//
// A right-rotating (source) and a left-rotating (destination) instance get
// random words, lane masks and shift amounts (including amounts above the
// lane count, of which only the low bits count). Expected lanes are computed
// byte by byte in the testbench: right rotation takes output lane i from
// input lane (i + s) mod 8, left rotation from lane (i - s) mod 8. Rotating
// left the right-rotated word by the same amount must give the input back.
// The shifters are combinational, so results are checked in the same step.
module tb_idma_shifter;
  localparam int unsigned DW = 64;
  localparam int unsigned NB = DW / 8;

  logic [DW-1:0]  d_in = '0, d_r, d_l, d_rl;
  logic [NB-1:0]  s_in = '0, s_r, s_l, s_rl;
  idma_pkg::off_t sh = '0;
  int checks = 0, failures = 0;

  idma_shifter #(.DataWidth(DW), .RotateLeft(1'b0)) i_right (
    .data_i (d_in), .strb_i (s_in), .shift_i (sh), .data_o (d_r), .strb_o (s_r));
  idma_shifter #(.DataWidth(DW), .RotateLeft(1'b1)) i_left (
    .data_i (d_in), .strb_i (s_in), .shift_i (sh), .data_o (d_l), .strb_o (s_l));
  idma_shifter #(.DataWidth(DW), .RotateLeft(1'b1)) i_back (
    .data_i (d_r), .strb_i (s_r), .shift_i (sh), .data_o (d_rl), .strb_o (s_rl));

  initial begin
    #100000;
    failures++;
    $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      int unsigned s;
      d_in = {$urandom, $urandom};
      s_in = NB'($urandom);
      sh   = idma_pkg::off_t'((n < 64) ? n : $urandom);
      #1;
      s = int'(sh) % NB;
      for (int i = 0; i < NB; i++) begin
        checks++;
        if (d_r[8*i +: 8] != d_in[8*((i + s) % NB) +: 8] || s_r[i] != s_in[(i + s) % NB]) begin
          failures++;
          if (failures < 10) $display("ERROR: right shift %0d lane %0d", s, i);
        end
        checks++;
        if (d_l[8*i +: 8] != d_in[8*((i + NB - s) % NB) +: 8] || s_l[i] != s_in[(i + NB - s) % NB]) begin
          failures++;
          if (failures < 10) $display("ERROR: left shift %0d lane %0d", s, i);
        end
      end
      checks++;
      if (d_rl != d_in || s_rl != s_in) begin
        failures++;
        if (failures < 10) $display("ERROR: left(right(x)) != x for shift %0d", s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
