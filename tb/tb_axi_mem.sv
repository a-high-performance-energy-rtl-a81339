// tb_axi_mem: behavioural AXI4 subordinate memory for the testbenches
// (stands in for the L2 memory behind the SoC interconnect; not synthesizable).
//
// A byte array of MemBytes (addresses wrap). AR and AW requests are queued;
// R data of a burst starts Latency cycles after its AR and follows the INCR
// beat addresses of a full-width burst. W beats are written to the burst at
// the head of the AW queue with their strobes, and one B response per burst
// follows. With stall_i set, AR/AW/W ready and R/B valid are withheld at
// random (valid stays up once raised, as AXI requires). With MaxOutstanding
// set, no further AR (AW) is accepted while that many read (write) bursts
// are unfinished, like a memory controller with a fixed number of
// transaction slots. Counters report
// bursts and beats for the testbenches.
module tb_axi_mem #(
  parameter int unsigned DataWidth = 64,
  parameter int unsigned MemBytes  = 65536,
  parameter int unsigned Latency   = 3,
  // outstanding bursts accepted per direction (0: no limit)
  parameter int unsigned MaxOutstanding = 0
) (
  input  logic                   clk_i,
  input  logic                   stall_i,
  input  idma_pkg::axi_ax_t      ar_i,
  input  logic                   ar_valid_i,
  output logic                   ar_ready_o,
  output logic [DataWidth-1:0]   r_data_o,
  output logic [1:0]             r_resp_o,
  output logic                   r_last_o,
  output logic                   r_valid_o,
  input  logic                   r_ready_i,
  input  idma_pkg::axi_ax_t      aw_i,
  input  logic                   aw_valid_i,
  output logic                   aw_ready_o,
  input  logic [DataWidth-1:0]   w_data_i,
  input  logic [DataWidth/8-1:0] w_strb_i,
  input  logic                   w_last_i,
  input  logic                   w_valid_i,
  output logic                   w_ready_o,
  output logic [1:0]             b_resp_o,
  output logic                   b_valid_o,
  input  logic                   b_ready_i
);
  localparam int unsigned NB = DataWidth / 8;

  logic [7:0] mem [MemBytes];

  typedef struct {
    idma_pkg::axi_ax_t ax;
    longint            t;
  } pend_t;

  pend_t  arq[$];
  pend_t  awq[$];
  int     bq[$];
  longint cyc = 0;
  int     r_beat = 0, w_beat = 0;
  int     n_ar = 0, n_aw = 0, n_r = 0, n_w = 0, n_b = 0, n_cross = 0;

  initial begin
    ar_ready_o = 1'b0; aw_ready_o = 1'b0; w_ready_o = 1'b0;
    r_valid_o  = 1'b0; r_last_o = 1'b0; r_data_o = '0; r_resp_o = '0;
    b_valid_o  = 1'b0; b_resp_o = '0;
  end

  function automatic longint unsigned beat_addr(idma_pkg::axi_ax_t ax, int beat);
    return (longint'(ax.addr) & ~longint'(NB - 1)) + longint'(beat) * NB;
  endfunction

  always @(posedge clk_i) begin
    cyc++;
    // request channels
    if (ar_valid_i && ar_ready_o) begin
      arq.push_back('{ax: ar_i, t: cyc});
      n_ar++;
      if ((longint'(ar_i.addr) >> 12) != (beat_addr(ar_i, int'(ar_i.len)) >> 12)) n_cross++;
    end
    if (aw_valid_i && aw_ready_o) begin
      awq.push_back('{ax: aw_i, t: cyc});
      n_aw++;
      if ((longint'(aw_i.addr) >> 12) != (beat_addr(aw_i, int'(aw_i.len)) >> 12)) n_cross++;
    end
    // R handshake
    if (r_valid_o && r_ready_i) begin
      n_r++;
      if (r_last_o) begin
        void'(arq.pop_front());
        r_beat = 0;
      end else r_beat++;
    end
    // W handshake
    if (w_valid_i && w_ready_o) begin
      automatic longint unsigned a = beat_addr(awq[0].ax, w_beat);
      for (int i = 0; i < NB; i++)
        if (w_strb_i[i]) mem[(a + i) % MemBytes] = w_data_i[8*i +: 8];
      n_w++;
      if (w_last_i) begin
        if (w_beat != int'(awq[0].ax.len)) $error("W last at beat %0d of %0d", w_beat, awq[0].ax.len);
        void'(awq.pop_front());
        bq.push_back(0);
        w_beat = 0;
      end else w_beat++;
    end
    if (b_valid_o && b_ready_i) begin
      void'(bq.pop_front());
      n_b++;
    end

    // next outputs
    ar_ready_o <= (MaxOutstanding == 0 || arq.size() < MaxOutstanding) && (!stall_i || ($urandom % 4 != 0));
    aw_ready_o <= (MaxOutstanding == 0 || awq.size() + bq.size() < MaxOutstanding) &&
                  (!stall_i || ($urandom % 4 != 0));
    w_ready_o  <= (awq.size() > 0) && (!stall_i || ($urandom % 4 != 0));
    if (r_valid_o && !r_ready_i) begin
      // hold
    end else if (arq.size() > 0 && cyc >= arq[0].t + Latency && (!stall_i || $urandom % 3 != 0)) begin
      automatic longint unsigned a = beat_addr(arq[0].ax, r_beat);
      r_valid_o <= 1'b1;
      r_last_o  <= (r_beat == int'(arq[0].ax.len));
      for (int i = 0; i < NB; i++) r_data_o[8*i +: 8] <= mem[(a + i) % MemBytes];
    end else begin
      r_valid_o <= 1'b0;
    end
    if (b_valid_o && !b_ready_i) begin
      // hold
    end else begin
      b_valid_o <= (bq.size() > 0) && (!stall_i || $urandom % 3 != 0);
    end
  end

endmodule
