// tb_idma_backend: self-checking testbench of the back-end (legalizer plus
// transport layer) on an AXI4 memory and a two-port OBI memory.
//
// Phase 1 (timing, no stalls): the cycles from the descriptor handshake to
// the first read request are measured for an AXI and an OBI source (two
// expected), and an 8 KiB OBI-to-AXI copy must finish within the 1107 cycles
// the cluster engine needs for that transfer, and take at least its 1024 data
// beats. Phase 1b: 60 back-to-back 256 B transfers into AXI whose source
// switches between OBI, AXI and Init every time; the write data channel must
// carry a beat in every cycle from the first to the last (no idle cycle).
// Phase 2: random transfers, with random source protocol (AXI, OBI,
// Init with all three patterns) and destination protocol (AXI, OBI), lengths
// 0..5000 bytes at any alignment, optional burst limits, random gaps and
// random bus stalls. Sources lie in the lower half of each memory and are
// never written, destinations in the upper half; a byte-level model of both
// memories is updated in descriptor order and compared at the end. Every
// completion must arrive with the right `last` flag, AXI bursts must not
// cross a 4 KiB page, and each mechanism (page split, burst-limit split,
// zero-length transfer, each Init pattern, each protocol pair, stalls) is
// counted and must have occurred.
module tb_idma_backend;
  import idma_pkg::*;
  localparam int unsigned DW   = 64;
  localparam int unsigned NB   = DW / 8;
  localparam int unsigned MEM  = 65536;
  localparam int unsigned HALF = MEM / 2;
  localparam int unsigned NRand = 1000;
  localparam int unsigned NSwitch = 60;

  logic clk = 1'b0, rst_n = 1'b0, stall = 1'b0;
  always #5 clk = ~clk;

  idma_req_t req = '0;
  logic      req_valid = 1'b0, req_ready, rsp_valid, rsp_last, busy;

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

  idma_backend i_dut (
    .clk_i (clk), .rst_ni (rst_n),
    .req_i (req), .req_valid_i (req_valid), .req_ready_o (req_ready),
    .rsp_valid_o (rsp_valid), .rsp_last_o (rsp_last), .busy_o (busy),
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
  // cycle counter and timing monitor (sampled at the rising edge)
  longint cyc = 0, t_hs = 0, t_ar = 0, t_obir = 0, t_rsp = 0;
  // W beats of the protocol-switching phase
  logic   meas = 1'b0;
  int     w_beats = 0;
  longint t_w_first = 0, t_w_last = 0;
  always @(posedge clk) if (rst_n && meas && w_valid && w_ready) begin
    if (w_beats == 0) t_w_first = cyc;
    t_w_last = cyc;
    w_beats++;
  end

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (req_valid && req_ready) t_hs = cyc;
    if (ar_valid && t_ar == 0) t_ar = cyc;
    if (obir_req && t_obir == 0) t_obir = cyc;
    if (rsp_valid) t_rsp = cyc;
  end

  // byte models of L2 (AXI) and L1 (OBI)
  logic [7:0] gold_axi [MEM];
  logic [7:0] gold_obi [MEM];

  // completion bookkeeping
  logic exp_last [$];
  int   n_rsp = 0;
  always @(posedge clk) if (rst_n && rsp_valid) begin
    n_rsp++;
    checks++;
    if (exp_last.size() == 0) begin
      failures++; $display("ERROR: unexpected completion");
    end else begin
      automatic logic l = exp_last.pop_front();
      if (l != rsp_last) begin failures++; $display("ERROR: completion last=%0b expected %0b", rsp_last, l); end
    end
  end

  // mechanism counters
  int m_page = 0, m_limit = 0, m_zero = 0, m_stall_cyc = 0;
  int m_init [3] = '{0, 0, 0};
  int m_pair [3][2] = '{'{0, 0}, '{0, 0}, '{0, 0}};
  always @(posedge clk) if (rst_n && stall && (ar_valid && !ar_ready || w_valid && !w_ready ||
                                     obir_req && !obir_gnt || obiw_req && !obiw_gnt)) m_stall_cyc++;

  function automatic logic [31:0] lfsr_step(logic [31:0] s);
    return s[0] ? ((s >> 1) ^ InitLfsrPoly) : (s >> 1);
  endfunction

  // apply a transfer to the model
  task automatic model(idma_req_t q);
    logic [31:0] w = q.src_addr;
    for (longint unsigned i = 0; i < q.length; i++) begin
      automatic logic [7:0] b;
      automatic int unsigned k = int'(i / 4);
      if (i % 4 == 0 && i != 0) begin
        unique case (q.options.protocol_options.init_mode)
          INIT_INCR: w = q.src_addr + k;
          INIT_PRNG: w = lfsr_step(w);
          default:   w = q.src_addr;
        endcase
      end
      unique case (q.options.protocol_selection.src_protocol)
        PROT_AXI: b = gold_axi[(q.src_addr + i) % MEM];
        PROT_OBI: b = gold_obi[(q.src_addr + i) % MEM];
        default:  b = w[8*(i%4) +: 8];
      endcase
      if (q.options.protocol_selection.dst_protocol == PROT_OBI) gold_obi[(q.dst_addr + i) % MEM] = b;
      else                                                      gold_axi[(q.dst_addr + i) % MEM] = b;
    end
  endtask

  // inputs change on the falling edge; ready is looked at before the rising
  // edge that completes the handshake
  task automatic issue(idma_req_t q);
    model(q);
    exp_last.push_back(q.options.last);
    @(negedge clk);
    req       = q;
    req_valid = 1'b1;
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    req_valid = 1'b0;
  endtask

  task automatic wait_idle();
    while (exp_last.size() != 0) @(posedge clk);
    repeat (5) @(posedge clk);
  endtask

  task automatic compare_all(string tag);
    int bad = 0;
    for (int i = 0; i < MEM; i++) begin
      if (i_l2.mem[i] != gold_axi[i]) bad++;
      if (i_l1.mem[i] != gold_obi[i]) bad++;
    end
    checks++;
    if (bad != 0) begin failures++; $display("ERROR: %s: %0d bytes differ", tag, bad); end
  endtask

  function automatic idma_req_t mk(protocol_e s, protocol_e d, addr_t sa, addr_t da, len_t len);
    idma_req_t q = '0;
    q.src_addr = sa; q.dst_addr = da; q.length = len;
    q.options.protocol_selection.src_protocol = s;
    q.options.protocol_selection.dst_protocol = d;
    q.options.last = 1'b1;
    return q;
  endfunction

  // latency: descriptor handshake to first read request
  task automatic latency_test(protocol_e s);
    longint t1;
    t_ar = 0; t_obir = 0;
    issue(mk(s, PROT_AXI, 32'h100, 32'(HALF + 'h100), 64));
    wait_idle();
    t1 = (s == PROT_AXI) ? t_ar : t_obir;
    checks++;
    if (t1 - t_hs != 2) begin
      failures++; $display("ERROR: latency %0d cycles (src %0d), expected 2", t1 - t_hs, s);
    end
  endtask

  initial begin
    // watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0;
    for (int i = 0; i < MEM; i++) begin
      gold_axi[i] = 8'($urandom);
      gold_obi[i] = 8'($urandom);
      i_l2.mem[i] = gold_axi[i];
      i_l1.mem[i] = gold_obi[i];
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);

    // ---- phase 1: timing without stalls
    latency_test(PROT_AXI);
    latency_test(PROT_OBI);
    issue(mk(PROT_OBI, PROT_AXI, 32'h0, 32'(HALF), 8192));
    wait_idle();
    t0 = t_rsp - t_hs;
    checks++;
    if (t0 > 1107 || t0 < 1024) begin
      failures++; $display("ERROR: 8 KiB copy took %0d cycles", t0);
    end else $display("8 KiB OBI->AXI copy: %0d cycles", t0);
    compare_all("phase 1");

    // ---- phase 1b: back-to-back transfers that switch the source protocol
    // every time (OBI, AXI, Init) into AXI; the W channel must stay busy
    meas = 1'b1;
    for (int n = 0; n < NSwitch; n++) begin
      automatic protocol_e s = protocol_e'(n % 3);
      automatic idma_req_t q = mk(s, PROT_AXI, (s == PROT_INIT) ? $urandom : 32'(n * 256),
                                  32'(HALF + n * 256), 256);
      q.options.protocol_options.init_mode = init_mode_e'($urandom % 3);
      issue(q);
    end
    wait_idle();
    meas = 1'b0;
    checks++;
    if (w_beats != NSwitch * 32 || (t_w_last - t_w_first + 1) != w_beats) begin
      failures++;
      $display("ERROR: protocol switching: %0d W beats in %0d cycles", w_beats, t_w_last - t_w_first + 1);
    end else $display("protocol switching: %0d W beats in %0d cycles", w_beats, t_w_last - t_w_first + 1);
    compare_all("phase 1b");

    // ---- phase 2: random transfers
    for (int n = 0; n < NRand; n++) begin
      idma_req_t q;
      protocol_e s, d;
      len_t      len;
      addr_t     sa, da;
      automatic int unsigned pick = $urandom % 4;
      case (pick)
        0: len = 0;
        1: len = $urandom % 64;
        2: len = $urandom % 600;
        default: len = $urandom % 5001;
      endcase
      if (n % 40 == 0) len = 0;
      s  = protocol_e'($urandom % 3);
      d  = protocol_e'($urandom % 2);
      sa = (s == PROT_INIT) ? $urandom : $urandom % (HALF - 5001);
      da = HALF + $urandom % (HALF - 5001);
      q  = mk(s, d, sa, da, len);
      q.options.protocol_options.init_mode = init_mode_e'($urandom % 3);
      q.options.backend_options.limit_src_burst_len = ($urandom % 4 == 0);
      q.options.backend_options.limit_dst_burst_len = ($urandom % 4 == 0);
      q.options.backend_options.burst_beats_log2    = 4'($urandom % 6);
      q.options.last = ($urandom % 2 == 0);
      stall = ($urandom % 2 == 0);
      // mechanism bookkeeping
      if (len == 0) m_zero++;
      if (s == PROT_INIT) m_init[q.options.protocol_options.init_mode]++;
      m_pair[s][d]++;
      if (len != 0 && ((s == PROT_AXI && (sa >> 12) != ((sa + len - 1) >> 12)) ||
                       (d == PROT_AXI && (da >> 12) != ((da + len - 1) >> 12)))) m_page++;
      if (len > (NB << q.options.backend_options.burst_beats_log2) &&
          ((s == PROT_AXI && q.options.backend_options.limit_src_burst_len) ||
           (d == PROT_AXI && q.options.backend_options.limit_dst_burst_len))) m_limit++;
      issue(q);
      repeat ($urandom % 3) @(posedge clk);
    end
    stall = 1'b0;
    wait_idle();
    compare_all("phase 2");

    checks++;
    if (i_l2.n_cross != 0) begin failures++; $display("ERROR: %0d AXI bursts cross 4 KiB", i_l2.n_cross); end
    checks++;
    if (n_rsp != NRand + NSwitch + 3) begin failures++; $display("ERROR: %0d completions", n_rsp); end
    checks++;
    if (busy) begin failures++; $display("ERROR: busy while idle"); end

    $display("mechanisms: page=%0d limit=%0d zero=%0d init=%0d/%0d/%0d stall_cycles=%0d",
             m_page, m_limit, m_zero, m_init[0], m_init[1], m_init[2], m_stall_cyc);
    foreach (m_pair[i, j]) begin
      checks++;
      if (m_pair[i][j] == 0) begin failures++; $display("ERROR: protocol pair %0d->%0d never used", i, j); end
    end
    checks += 7;
    if (m_page == 0)  begin failures++; $display("ERROR: no page split"); end
    if (m_limit == 0) begin failures++; $display("ERROR: no burst-limit split"); end
    if (m_zero == 0)  begin failures++; $display("ERROR: no zero-length transfer"); end
    if (m_stall_cyc == 0) begin failures++; $display("ERROR: no stall"); end
    foreach (m_init[i]) if (m_init[i] == 0) begin failures++; $display("ERROR: init mode %0d unused", i); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
