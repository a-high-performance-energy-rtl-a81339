// tb_idma_frag_copy: bus-utilization workload for the back-end at its
// default parameters (64-bit data, 16 outstanding bursts).
//
// A 64 KiB buffer is copied from one AXI4 memory region to another, cut
// into many independent 1D transfers that are issued back to back. Three
// memory systems run side by side, each with its own back-end:
//   SRAM      3 cycles of latency,  8 outstanding bursts
//   RPC DRAM 13 cycles of latency, 16 outstanding bursts
//   HBM     100 cycles of latency, 64 outstanding bursts
// On each, the copy is run with transfers of one bus word (8 B), of four bus
// words (32 B) and of 1 KiB, all aligned, and once with random transfer
// sizes of 1 B to 1 KiB and different source and destination alignment.
// Bus utilization is payload bytes / (8 B x cycles from the first
// descriptor handshake to the last completion). Checks: the destination
// equals the source byte for byte after every run; one completion arrives
// per transfer; single-word transfers keep the SRAM bus almost fully busy
// (>= 90 %); 1 KiB transfers and the random, unaligned mix do so on every
// memory (the mix has about one partial beat per transfer); and where the memory
// latency exceeds what 16 outstanding bursts can cover, the utilization of
// small transfers stays within the bound 16 x beats / (latency + 3) that
// the outstanding-burst limit sets (at most 10 % above it, at least half of it).
// The three memory systems and the 64 KiB / 1 B..1 KiB workload follow the
// published evaluation (which uses a 32-bit bus); the 90 % thresholds and
// the bound are this testbench's reading of "almost perfect utilization".
module tb_idma_frag_copy;
  import idma_pkg::*;
  localparam int unsigned DW    = 64;
  localparam int unsigned NB    = DW / 8;
  localparam int unsigned NAx   = 16;
  localparam int unsigned TOTAL = 65536;
  localparam int unsigned DBASE = TOTAL + 4096;
  localparam int unsigned MEM   = 2 * TOTAL + 8192;
  localparam int unsigned NSys  = 3;
  localparam int unsigned NRun  = 4;
  localparam int unsigned Lat  [NSys] = '{3, 13, 100};
  localparam int unsigned Outs [NSys] = '{8, 16, 64};
  localparam int unsigned Size [NRun] = '{8, 32, 1024, 0};   // 0: random 1..1024

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  int  checks = 0, failures = 0;
  real util [NSys][NRun];
  logic [NSys-1:0] sys_done = '0;

  for (genvar k = 0; k < NSys; k++) begin : g_sys
    idma_req_t req = '0;
    logic      req_valid = 1'b0, req_ready, rsp_valid, rsp_last, busy;
    logic      took = 1'b0;
    int        n_rsp = 0;
    longint    t_first = 0, t_last = 0;

    axi_ax_t          ar, aw;
    logic             ar_valid, ar_ready, r_last, r_valid, r_ready;
    logic [DW-1:0]    r_data, w_data;
    logic [1:0]       r_resp, b_resp;
    logic             aw_valid, aw_ready, w_last, w_valid, w_ready, b_valid, b_ready;
    logic [NB-1:0]    w_strb;
    logic             obir_req, obir_we, obiw_req, obiw_we;
    addr_t            obir_addr, obiw_addr;
    logic [NB-1:0]    obir_be, obiw_be;
    logic [DW-1:0]    obir_wdata, obiw_wdata;

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
      .obir_be_o (obir_be), .obir_wdata_o (obir_wdata), .obir_gnt_i (1'b0),
      .obir_rvalid_i (1'b0), .obir_rdata_i ('0), .obir_err_i (1'b0),
      .obiw_req_o (obiw_req), .obiw_addr_o (obiw_addr), .obiw_we_o (obiw_we),
      .obiw_be_o (obiw_be), .obiw_wdata_o (obiw_wdata), .obiw_gnt_i (1'b0),
      .obiw_rvalid_i (1'b0), .obiw_rdata_i ('0), .obiw_err_i (1'b0)
    );

    tb_axi_mem #(.DataWidth(DW), .MemBytes(MEM), .Latency(Lat[k]), .MaxOutstanding(Outs[k])) i_mem (
      .clk_i (clk), .stall_i (1'b0),
      .ar_i (ar), .ar_valid_i (ar_valid), .ar_ready_o (ar_ready),
      .r_data_o (r_data), .r_resp_o (r_resp), .r_last_o (r_last), .r_valid_o (r_valid),
      .r_ready_i (r_ready),
      .aw_i (aw), .aw_valid_i (aw_valid), .aw_ready_o (aw_ready),
      .w_data_i (w_data), .w_strb_i (w_strb), .w_last_i (w_last), .w_valid_i (w_valid),
      .w_ready_o (w_ready), .b_resp_o (b_resp), .b_valid_o (b_valid), .b_ready_i (b_ready)
    );

    // handshake and completion monitor (sees the values before the edge)
    always @(posedge clk) if (rst_n) begin
      took <= req_valid && req_ready;
      if (req_valid && req_ready && t_first == 0) t_first = cyc;
      if (rsp_valid) begin
        n_rsp++;
        t_last = cyc;
        if (!rsp_last) begin
          failures++; $display("ERROR: sys %0d completion without last", k);
        end
      end
    end

    // hand one descriptor over; returns after the clock edge that took it
    task automatic send(idma_req_t d);
      req       = d;
      req_valid = 1'b1;
      do begin
        @(posedge clk);
        #1;
      end while (!took);
      req_valid = 1'b0;
    endtask

    initial begin : drive
      idma_req_t d;
      int unsigned n_xfer, off, len, bad, sz, soff, doff;
      wait (rst_n);
      @(negedge clk);
      for (int r = 0; r < NRun; r++) begin
        sz   = Size[r];
        soff = (sz == 0) ? 3 : 0;
        doff = (sz == 0) ? 6 : 0;
        for (int unsigned i = 0; i < MEM; i++) i_mem.mem[i] = 8'($urandom);
        n_rsp = 0; t_first = 0; n_xfer = 0; off = 0;
        while (off < TOTAL) begin
          len = (sz == 0) ? 1 + $urandom % 1024 : sz;
          if (off + len > TOTAL) len = TOTAL - off;
          d = '0;
          d.src_addr = addr_t'(soff + off);
          d.dst_addr = addr_t'(DBASE + doff + off);
          d.length   = len_t'(len);
          d.options.protocol_selection.src_protocol = PROT_AXI;
          d.options.protocol_selection.dst_protocol = PROT_AXI;
          d.options.last = 1'b1;
          send(d);
          n_xfer++;
          off += len;
        end
        while (n_rsp < n_xfer) @(posedge clk);
        @(posedge clk);
        util[k][r] = real'(TOTAL) / (real'(NB) * real'(t_last - t_first + 1));
        bad = 0;
        for (int unsigned i = 0; i < TOTAL; i++)
          if (i_mem.mem[DBASE + doff + i] != i_mem.mem[soff + i]) bad++;
        checks += 2;
        if (bad != 0) begin
          failures++; $display("ERROR: sys %0d run %0d: %0d bytes differ", k, r, bad);
        end
        if (n_rsp != n_xfer) begin
          failures++; $display("ERROR: sys %0d run %0d: %0d completions for %0d transfers", k, r, n_rsp, n_xfer);
        end
        $display("latency %0d, %0d outstanding, transfer size %s: %0d transfers, %0d cycles, utilization %.3f",
                 Lat[k], Outs[k], (sz == 0) ? "1..1024 B" : $sformatf("%0d B", sz), n_xfer,
                 t_last - t_first + 1, util[k][r]);
        @(negedge clk);
      end
      sys_done[k] = 1'b1;
    end
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // utilization the outstanding-burst limit allows for `beats` per transfer
  function automatic real bound(int unsigned k, int unsigned beats);
    real b = real'(NAx * beats) / real'(Lat[k] + 3);
    return (b > 1.0) ? 1.0 : b;
  endfunction

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (&sys_done);
    // single bus-word transfers on SRAM: almost perfect utilization
    checks++;
    if (util[0][0] < 0.9) begin
      failures++; $display("ERROR: SRAM 8 B utilization %.3f", util[0][0]);
    end
    for (int unsigned k = 0; k < NSys; k++) begin
      // 1 KiB transfers keep every bus busy
      checks += 2;
      if (util[k][2] < 0.9) begin
        failures++; $display("ERROR: latency %0d 1 KiB utilization %.3f", Lat[k], util[k][2]);
      end
      if (util[k][3] < 0.9) begin
        failures++; $display("ERROR: latency %0d unaligned mix utilization %.3f", Lat[k], util[k][3]);
      end
      // small transfers: limited by the outstanding bursts, not by more
      for (int unsigned r = 0; r < 2; r++) begin
        automatic real b = bound(k, Size[r] / NB);
        checks++;
        if (util[k][r] > 1.1 * b || util[k][r] < 0.5 * b) begin
          failures++;
          $display("ERROR: latency %0d, %0d B: utilization %.3f, bound %.3f", Lat[k], Size[r], util[k][r], b);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
