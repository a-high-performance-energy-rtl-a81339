// tb_idma_transport: self-checking testbench of the transport layer on an
// AXI4 memory and a two-port OBI memory.
//
// The testbench plays the legalizer: it cuts random 1D transfers into legal
// read and write bursts itself (AXI: no 4 KiB crossing, at most 256 beats,
// sometimes shorter limits; OBI: one bus word; Init: one burst; zero length:
// one null write burst) and feeds the two burst queues from independent
// processes with random gaps, so the read side runs ahead of the write side
// or behind it. Source and destination protocols are mixed freely (AXI, OBI,
// Init to AXI, OBI), offsets are arbitrary, so the shifters and the dataflow
// element must realign and coalesce every beat. A byte model of both
// memories is compared at the end; each transfer must complete once, in
// order, with its last flag. Without stalls a 4 KiB aligned AXI-to-AXI
// transfer must move at one beat per cycle (512 beats plus a few cycles of
// pipeline).
module tb_idma_transport;
  import idma_pkg::*;
  localparam int unsigned DW   = 64;
  localparam int unsigned NB   = DW / 8;
  localparam int unsigned MEM  = 65536;
  localparam int unsigned HALF = MEM / 2;

  logic clk = 1'b0, rst_n = 1'b0, stall = 1'b0;
  always #5 clk = ~clk;

  burst_t rb = '0, wb = '0;
  logic   rb_valid = 1'b0, rb_ready, wb_valid = 1'b0, wb_ready, done_valid, done_last;

  axi_ax_t          ar, aw;
  logic             ar_valid, ar_ready, r_last, r_valid, r_ready;
  logic [DW-1:0]    r_data, w_data;
  logic [1:0]       r_resp, b_resp;
  logic             aw_valid, aw_ready, w_last, w_valid, w_ready, b_valid, b_ready;
  logic [NB-1:0]    w_strb;
  logic             obir_req, obir_we, obir_gnt, obir_rvalid, obir_err;
  logic             obiw_req, obiw_we, obiw_gnt, obiw_rvalid, obiw_err;
  addr_t            obir_addr, obiw_addr;
  logic [NB-1:0]    obir_be, obiw_be;
  logic [DW-1:0]    obir_wdata, obir_rdata, obiw_wdata, obiw_rdata;

  idma_transport #(.DataWidth(DW), .NumAxInFlight(16), .BufferDepth(3)) i_dut (
    .clk_i (clk), .rst_ni (rst_n),
    .r_burst_i (rb), .r_valid_i (rb_valid), .r_ready_o (rb_ready),
    .w_burst_i (wb), .w_valid_i (wb_valid), .w_ready_o (wb_ready),
    .done_valid_o (done_valid), .done_last_o (done_last),
    .axi_ar_o (ar), .axi_ar_valid_o (ar_valid), .axi_ar_ready_i (ar_ready),
    .axi_r_data_i (r_data), .axi_r_resp_i (r_resp), .axi_r_last_i (r_last),
    .axi_r_valid_i (r_valid), .axi_r_ready_o (r_ready),
    .axi_aw_o (aw), .axi_aw_valid_o (aw_valid), .axi_aw_ready_i (aw_ready),
    .axi_w_data_o (w_data), .axi_w_strb_o (w_strb), .axi_w_last_o (w_last),
    .axi_w_valid_o (w_valid), .axi_w_ready_i (w_ready),
    .axi_b_resp_i (b_resp), .axi_b_valid_i (b_valid), .axi_b_ready_o (b_ready),
    .obir_req_o (obir_req), .obir_addr_o (obir_addr), .obir_we_o (obir_we),
    .obir_be_o (obir_be), .obir_wdata_o (obir_wdata), .obir_gnt_i (obir_gnt),
    .obir_rvalid_i (obir_rvalid), .obir_rdata_i (obir_rdata), .obir_err_i (obir_err),
    .obiw_req_o (obiw_req), .obiw_addr_o (obiw_addr), .obiw_we_o (obiw_we),
    .obiw_be_o (obiw_be), .obiw_wdata_o (obiw_wdata), .obiw_gnt_i (obiw_gnt),
    .obiw_rvalid_i (obiw_rvalid), .obiw_rdata_i (obiw_rdata), .obiw_err_i (obiw_err)
  );

  tb_axi_mem #(.DataWidth(DW), .MemBytes(MEM), .Latency(3)) i_l2 (
    .clk_i (clk), .stall_i (stall),
    .ar_i (ar), .ar_valid_i (ar_valid), .ar_ready_o (ar_ready),
    .r_data_o (r_data), .r_resp_o (r_resp), .r_last_o (r_last), .r_valid_o (r_valid),
    .r_ready_i (r_ready),
    .aw_i (aw), .aw_valid_i (aw_valid), .aw_ready_o (aw_ready),
    .w_data_i (w_data), .w_strb_i (w_strb), .w_last_i (w_last), .w_valid_i (w_valid),
    .w_ready_o (w_ready), .b_resp_o (b_resp), .b_valid_o (b_valid), .b_ready_i (b_ready)
  );

  tb_obi_mem #(.DataWidth(DW), .MemBytes(MEM), .Latency(1)) i_l1 (
    .clk_i (clk), .stall_i (stall),
    .r_req_i (obir_req), .r_addr_i (obir_addr), .r_we_i (obir_we), .r_be_i (obir_be),
    .r_wdata_i (obir_wdata), .r_gnt_o (obir_gnt), .r_rvalid_o (obir_rvalid),
    .r_rdata_o (obir_rdata), .r_err_o (obir_err),
    .w_req_i (obiw_req), .w_addr_i (obiw_addr), .w_we_i (obiw_we), .w_be_i (obiw_be),
    .w_wdata_i (obiw_wdata), .w_gnt_o (obiw_gnt), .w_rvalid_o (obiw_rvalid),
    .w_rdata_o (obiw_rdata), .w_err_o (obiw_err)
  );

  int checks = 0, failures = 0;
  longint cyc = 0, t_first = 0, t_done = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (rb_valid && rb_ready && t_first == 0) t_first = cyc;
    if (done_valid) t_done = cyc;
  end

  logic [7:0] gold_axi [MEM];
  logic [7:0] gold_obi [MEM];
  burst_t rq [$];
  burst_t wq [$];
  logic   exp_last [$];
  int     n_done = 0;

  always @(posedge clk) if (rst_n && done_valid) begin
    n_done++;
    checks++;
    if (exp_last.size() == 0) begin failures++; $display("ERROR: unexpected completion"); end
    else begin
      automatic logic l = exp_last.pop_front();
      if (l != done_last) begin failures++; $display("ERROR: completion last %0b, expected %0b", done_last, l); end
    end
  end

  function automatic logic [31:0] lfsr_step(logic [31:0] s);
    return s[0] ? ((s >> 1) ^ InitLfsrPoly) : (s >> 1);
  endfunction

  // cut one transfer into bursts and apply it to the model
  task automatic xfer(protocol_e s, protocol_e d, init_mode_e im, addr_t sa, addr_t da,
                      len_t len, logic last, int unsigned lim);
    burst_t b;
    len_t   rem;
    addr_t  a;
    logic [31:0] w = sa;
    for (longint unsigned i = 0; i < len; i++) begin
      automatic logic [7:0] v;
      if (i % 4 == 0 && i != 0) begin
        unique case (im)
          INIT_INCR: w = sa + 32'(i / 4);
          INIT_PRNG: w = lfsr_step(w);
          default:   w = sa;
        endcase
      end
      unique case (s)
        PROT_AXI: v = gold_axi[(sa + i) % MEM];
        PROT_OBI: v = gold_obi[(sa + i) % MEM];
        default:  v = w[8*(i%4) +: 8];
      endcase
      if (d == PROT_OBI) gold_obi[(da + i) % MEM] = v; else gold_axi[(da + i) % MEM] = v;
    end
    exp_last.push_back(last);
    if (len == 0) begin
      b = '0; b.null_xfer = 1'b1; b.last_burst = 1'b1; b.last = last; b.protocol = d;
      wq.push_back(b);
      return;
    end
    // read side
    if (s == PROT_INIT) begin
      b = '0; b.addr = 0; b.len = len; b.protocol = PROT_INIT; b.init_mode = im; b.init_value = sa;
      b.last_burst = 1'b1; b.last = last;
      rq.push_back(b);
    end else begin
      rem = len; a = sa;
      while (rem != 0) begin
        automatic len_t bd = (s == PROT_OBI) ? NB : lim;
        automatic len_t g  = bd - (a % bd);
        b = '0; b.addr = a; b.len = (rem < g) ? rem : g; b.protocol = s;
        b.xfer_off = off_t'(sa % NB); b.last = last;
        rem -= b.len; a += b.len; b.last_burst = (rem == 0);
        rq.push_back(b);
      end
    end
    // write side
    rem = len; a = da;
    while (rem != 0) begin
      automatic len_t bd = (d == PROT_OBI) ? NB : lim;
      automatic len_t g  = bd - (a % bd);
      b = '0; b.addr = a; b.len = (rem < g) ? rem : g; b.protocol = d;
      b.xfer_off = off_t'(da % NB); b.last = last;
      rem -= b.len; a += b.len; b.last_burst = (rem == 0);
      wq.push_back(b);
    end
  endtask

  logic gaps = 1'b0;
  logic rb_ready_seen = 1'b0, wb_ready_seen = 1'b0;
  // burst feeders: inputs change on the falling edge
  initial forever begin
    @(negedge clk);
    if (rb_valid && rb_ready_seen) begin rb_valid = 1'b0; void'(rq.pop_front()); end
    if (!rb_valid && rq.size() > 0 && (!gaps || $urandom % 4 != 0)) begin rb = rq[0]; rb_valid = 1'b1; end
  end
  initial forever begin
    @(negedge clk);
    if (wb_valid && wb_ready_seen) begin wb_valid = 1'b0; void'(wq.pop_front()); end
    if (!wb_valid && wq.size() > 0 && (!gaps || $urandom % 4 != 0)) begin wb = wq[0]; wb_valid = 1'b1; end
  end
  always @(posedge clk) begin
    rb_ready_seen <= rb_valid && rb_ready;
    wb_ready_seen <= wb_valid && wb_ready;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wait_idle();
    while (exp_last.size() != 0 || rq.size() != 0 || wq.size() != 0) @(negedge clk);
    repeat (5) @(negedge clk);
  endtask

  initial begin
    int bad, nx;
    for (int i = 0; i < MEM; i++) begin
      gold_axi[i] = 8'($urandom);
      gold_obi[i] = 8'($urandom);
      i_l2.mem[i] = gold_axi[i];
      i_l1.mem[i] = gold_obi[i];
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // rate: 4 KiB aligned AXI to AXI, 2 KiB bursts
    xfer(PROT_AXI, PROT_AXI, INIT_REPEAT, 32'h0, 32'(HALF), 4096, 1'b1, 2048);
    wait_idle();
    checks++;
    if (t_done - t_first > 512 + 12) begin failures++; $display("ERROR: 512 beats took %0d cycles", t_done - t_first); end
    else $display("4 KiB AXI->AXI: %0d cycles", t_done - t_first);
    // random transfers
    gaps = 1'b1;
    stall = 1'b1;
    nx = 1;
    for (int n = 0; n < 600; n++) begin
      automatic protocol_e  s = protocol_e'($urandom % 3);
      automatic protocol_e  d = protocol_e'($urandom % 2);
      automatic int unsigned pick = $urandom % 4;
      automatic len_t l = (pick == 0) ? 0 : (pick == 1) ? $urandom % 40 : $urandom % 3000;
      automatic int unsigned lim = (pick == 3) ? (NB << ($urandom % 5)) : 2048;
      automatic addr_t sa = (s == PROT_INIT) ? $urandom : $urandom % (HALF - 3000);
      automatic addr_t da = HALF + $urandom % (HALF - 3000);
      xfer(s, d, init_mode_e'($urandom % 3), sa, da, l, ($urandom % 2 == 0), lim);
      nx++;
      while (rq.size() > 40 || wq.size() > 40) @(negedge clk);
    end
    stall = 1'b0;
    wait_idle();
    checks++;
    if (n_done != nx) begin failures++; $display("ERROR: %0d completions for %0d transfers", n_done, nx); end
    bad = 0;
    for (int i = 0; i < MEM; i++) begin
      if (i_l2.mem[i] != gold_axi[i]) bad++;
      if (i_l1.mem[i] != gold_obi[i]) bad++;
    end
    checks++;
    if (bad != 0) begin failures++; $display("ERROR: %0d bytes differ", bad); end
    checks++;
    if (i_l2.n_cross != 0) begin failures++; $display("ERROR: AXI burst crosses 4 KiB"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
