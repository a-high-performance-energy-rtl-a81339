// tb_idma_pulp_cluster_dma: end-to-end testbench of the cluster DMA engine at
// its default parameters (ten front-ends, 64-bit data, 16 outstanding).
//
// Every front-end is driven by its own process over its register bus, as the
// cluster cores and the host would: it writes addresses, length,
// configuration and the two outer dimensions, launches the transfer by
// reading transfer_id, and polls status until that ID has completed. All ten
// run at the same time, so the arbitration mid-end sees competing requests.
// Transfers are random 3D transfers (up to 4 x 3 repetitions, random strides)
// between L2 (AXI4 memory) and L1 (two-port OBI memory) in every direction,
// plus Init transfers with all three patterns, zero-length transfers, long 1D
// transfers that need 256-beat and 4 KiB splitting, and optional burst
// limits; the memories stall at random in the second half. Each front-end
// writes only its own slice of the upper half of each memory; sources lie in
// the lower half. A byte model of both memories is updated per launch and
// compared at the end. Checks: transfer IDs count up per front-end,
// status reaches each ID, memory contents, no AXI burst crosses 4 KiB, the
// engine is idle at the end, and every mechanism (arbitration between
// competing front-ends, 3D decomposition, page and 256-beat splits, burst
// limits, OBI word splitting, zero-length, each Init pattern, each protocol
// pair, stalls) happened.
module tb_idma_pulp_cluster_dma;
  import idma_pkg::*;
  localparam int unsigned NFe   = 10;
  localparam int unsigned DW    = 64;
  localparam int unsigned NB    = DW / 8;
  localparam int unsigned MEM   = 65536;
  localparam int unsigned HALF  = MEM / 2;
  localparam int unsigned Slice = 3072;
  localparam int unsigned NXfer = 24;   // 3D transfers per front-end

  logic clk = 1'b0, rst_n = 1'b0, stall = 1'b0;
  always #5 clk = ~clk;

  logic [NFe-1:0]       cfg_req = '0, cfg_we = '0, cfg_gnt, cfg_rvalid;
  logic [NFe-1:0][5:0]  cfg_addr = '0;
  logic [NFe-1:0][31:0] cfg_wdata = '0, cfg_rdata;
  logic                 busy;

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

  idma_pulp_cluster_dma i_dut (
    .clk_i (clk), .rst_ni (rst_n),
    .cfg_req_i (cfg_req), .cfg_we_i (cfg_we), .cfg_addr_i (cfg_addr), .cfg_wdata_i (cfg_wdata),
    .cfg_gnt_o (cfg_gnt), .cfg_rvalid_o (cfg_rvalid), .cfg_rdata_o (cfg_rdata),
    .busy_o (busy),
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

  // mechanism counters
  int m_arb = 0, m_3d = 0, m_page = 0, m_beats = 0, m_limit = 0, m_obi = 0, m_zero = 0;
  int m_stall = 0;
  int m_init [3] = '{0, 0, 0};
  int m_pair [3][2] = '{'{0, 0}, '{0, 0}, '{0, 0}};

  always @(posedge clk) if (rst_n) begin
    // arbitration: a transfer is granted while another front-end also waits
    if ($countones(i_dut.fe_valid) > 1 && |i_dut.fe_ready) m_arb++;
    if (stall && (ar_valid && !ar_ready || w_valid && !w_ready ||
                  obir_req && !obir_gnt || obiw_req && !obiw_gnt)) m_stall++;
  end

  logic [7:0] gold_axi [MEM];
  logic [7:0] gold_obi [MEM];

  function automatic logic [31:0] lfsr_step(logic [31:0] s);
    return s[0] ? ((s >> 1) ^ InitLfsrPoly) : (s >> 1);
  endfunction

  // one 1D transfer applied to the model
  task automatic model_1d(protocol_e s, protocol_e d, init_mode_e im, addr_t sa, addr_t da,
                          len_t len, logic lim_s, logic lim_d, int lg);
    logic [31:0] w = sa;
    int unsigned bound = (lg < 8) ? (NB << lg) : 4096;
    if (len == 0) m_zero++;
    if (s == PROT_OBI || d == PROT_OBI) m_obi++;
    if (len != 0 && ((s == PROT_AXI && (sa >> 12) != ((sa + len - 1) >> 12)) ||
                     (d == PROT_AXI && (da >> 12) != ((da + len - 1) >> 12)))) m_page++;
    if ((s == PROT_AXI && ((sa % NB) + len) > 256 * NB) ||
        (d == PROT_AXI && ((da % NB) + len) > 256 * NB)) m_beats++;
    if (len > bound && ((s == PROT_AXI && lim_s) || (d == PROT_AXI && lim_d))) m_limit++;
    for (longint unsigned i = 0; i < len; i++) begin
      automatic logic [7:0] b;
      if (i % 4 == 0 && i != 0) begin
        unique case (im)
          INIT_INCR: w = sa + 32'(i / 4);
          INIT_PRNG: w = lfsr_step(w);
          default:   w = sa;
        endcase
      end
      unique case (s)
        PROT_AXI: b = gold_axi[(sa + i) % MEM];
        PROT_OBI: b = gold_obi[(sa + i) % MEM];
        default:  b = w[8*(i%4) +: 8];
      endcase
      if (d == PROT_OBI) gold_obi[(da + i) % MEM] = b;
      else               gold_axi[(da + i) % MEM] = b;
    end
  endtask

  // register bus: inputs change on the falling edge
  task automatic reg_access(int fe, logic we, logic [5:0] addr, logic [31:0] wd,
                            output logic [31:0] rd);
    @(negedge clk);
    cfg_req[fe] = 1'b1; cfg_we[fe] = we; cfg_addr[fe] = addr; cfg_wdata[fe] = wd;
    #1;
    while (!cfg_gnt[fe]) begin @(negedge clk); #1; end
    @(negedge clk);
    cfg_req[fe] = 1'b0;
    if (!cfg_rvalid[fe]) begin failures++; $display("ERROR: fe %0d: no rvalid", fe); end
    rd = cfg_rdata[fe];
  endtask

  task automatic reg_wr(int fe, logic [5:0] addr, logic [31:0] wd);
    logic [31:0] dummy;
    reg_access(fe, 1'b1, addr, wd, dummy);
  endtask

  task automatic run_fe(int fe);
    logic [31:0] rd, id;
    for (int n = 0; n < NXfer; n++) begin
      protocol_e  s, d;
      init_mode_e im;
      len_t       len;
      int unsigned r2, r3, ss2, ss3, ds2, ds3, lg, ext;
      logic       lim_s, lim_d;
      addr_t      sa, da;
      automatic int unsigned kind = $urandom % 8;
      s   = protocol_e'($urandom % 3);
      d   = protocol_e'($urandom % 2);
      im  = init_mode_e'($urandom % 3);
      lim_s = ($urandom % 4 == 0);
      lim_d = ($urandom % 4 == 0);
      lg  = $urandom % 7;
      if (kind == 0) begin           // long 1D transfer
        len = 2049 + $urandom % 1000; r2 = 1; r3 = 1;
      end else if (kind == 1) begin  // zero-length
        len = 0; r2 = 1 + $urandom % 3; r3 = 1;
      end else begin                 // 3D
        len = 1 + $urandom % 160; r2 = 1 + $urandom % 4; r3 = 1 + $urandom % 3;
      end
      ds2 = len + $urandom % 40;
      ds3 = r2 * ds2 + $urandom % 40;
      ss2 = $urandom % 600;
      ss3 = $urandom % 2000;
      ext = len + (r2 - 1) * ds2 + (r3 - 1) * ds3;
      if (ext > Slice) begin r3 = 1; ext = len + (r2 - 1) * ds2; end
      if (ext > Slice) begin r2 = 1; ext = len; end
      da = HALF + fe * Slice + $urandom % (Slice - ext + 1);
      sa = (s == PROT_INIT) ? $urandom : $urandom % (HALF - 8000);
      if (r2 > 1 && r3 > 1) m_3d++;
      if (s == PROT_INIT) m_init[im]++;
      m_pair[s][d]++;
      // program
      reg_wr(fe, 6'h00, sa);
      reg_wr(fe, 6'h04, da);
      reg_wr(fe, 6'h08, len);
      reg_wr(fe, 6'h0C, {20'd0, 4'(lg), lim_d, lim_s, 2'(im), 2'(d), 2'(s)});
      reg_wr(fe, 6'h18, ss2);
      reg_wr(fe, 6'h1C, ds2);
      reg_wr(fe, 6'h20, ($urandom % 2 == 0 && r2 == 1) ? 0 : r2);
      reg_wr(fe, 6'h24, ss3);
      reg_wr(fe, 6'h28, ds3);
      reg_wr(fe, 6'h2C, r3);
      // model (innermost dimension first)
      for (int unsigned j3 = 0; j3 < r3; j3++)
        for (int unsigned j2 = 0; j2 < r2; j2++)
          model_1d(s, d, im, sa + j2 * ss2 + j3 * ss3, da + j2 * ds2 + j3 * ds3,
                   len, lim_s, lim_d, lg);
      // launch and wait
      reg_access(fe, 1'b0, 6'h14, '0, id);
      checks++;
      if (id != n + 1) begin failures++; $display("ERROR: fe %0d: id %0d, expected %0d", fe, id, n + 1); end
      do begin
        repeat ($urandom % 8) @(negedge clk);
        reg_access(fe, 1'b0, 6'h10, '0, rd);
      end while (rd < id);
      checks++;
      if (rd != id) begin failures++; $display("ERROR: fe %0d: status %0d, expected %0d", fe, rd, id); end
    end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int bad;
    for (int i = 0; i < MEM; i++) begin
      gold_axi[i] = 8'($urandom);
      gold_obi[i] = 8'($urandom);
      i_l2.mem[i] = gold_axi[i];
      i_l1.mem[i] = gold_obi[i];
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    fork
      begin
        repeat (3000) @(negedge clk);
        stall = 1'b1;
      end
    join_none
    for (int f = 0; f < NFe; f++) begin
      fork
        automatic int ff = f;
        run_fe(ff);
      join_none
    end
    wait fork;
    repeat (20) @(negedge clk);

    bad = 0;
    for (int i = 0; i < MEM; i++) begin
      if (i_l2.mem[i] != gold_axi[i]) bad++;
      if (i_l1.mem[i] != gold_obi[i]) bad++;
    end
    checks++;
    if (bad != 0) begin failures++; $display("ERROR: %0d bytes differ from the model", bad); end
    checks++;
    if (i_l2.n_cross != 0) begin failures++; $display("ERROR: AXI burst crosses 4 KiB"); end
    checks++;
    if (busy) begin failures++; $display("ERROR: busy at the end"); end

    $display("mechanisms: arb=%0d 3d=%0d page=%0d 256beat=%0d limit=%0d obi=%0d zero=%0d init=%0d/%0d/%0d stall=%0d",
             m_arb, m_3d, m_page, m_beats, m_limit, m_obi, m_zero, m_init[0], m_init[1], m_init[2], m_stall);
    checks += 8;
    if (m_arb == 0)   begin failures++; $display("ERROR: no competing arbitration"); end
    if (m_3d == 0)    begin failures++; $display("ERROR: no 3D transfer"); end
    if (m_page == 0)  begin failures++; $display("ERROR: no page split"); end
    if (m_beats == 0) begin failures++; $display("ERROR: no 256-beat split"); end
    if (m_limit == 0) begin failures++; $display("ERROR: no burst-limit split"); end
    if (m_obi == 0)   begin failures++; $display("ERROR: no OBI transfer"); end
    if (m_zero == 0)  begin failures++; $display("ERROR: no zero-length transfer"); end
    if (m_stall == 0) begin failures++; $display("ERROR: no stall"); end
    foreach (m_init[i]) begin
      checks++;
      if (m_init[i] == 0) begin failures++; $display("ERROR: init mode %0d unused", i); end
    end
    foreach (m_pair[i, j]) begin
      checks++;
      if (m_pair[i][j] == 0) begin failures++; $display("ERROR: protocol pair %0d->%0d unused", i, j); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
