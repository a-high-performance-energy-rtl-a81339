// tb_idma_legalizer: self-checking testbench of the transfer legalizer.
//
// Random 1D descriptors (AXI, OBI or Init source; AXI or OBI destination;
// lengths 0..9000 at any alignment; random burst limits) are offered, and the
// read and write bursts are taken with random ready on each side. For every
// descriptor the testbench splits the transfer itself: an AXI burst ends at
// the next multiple of min(4 KiB, 256 beats), or of 2**log2 beats when the
// limit is on for that side; an OBI burst at the next bus word; an Init
// source is one burst with byte index 0 and the source address as init
// value; a zero-length transfer is one null write burst and no read burst.
// Every emitted burst must match the expected one (address, length, transfer
// offset, protocol, last-burst and last flags). In a phase without back
// pressure the first read burst must leave one cycle after the descriptor
// handshake and bursts must follow one per cycle.
module tb_idma_legalizer;
  import idma_pkg::*;
  localparam int unsigned DW = 64;
  localparam int unsigned NB = DW / 8;
  localparam int unsigned AxiBound = (4096 < 256 * NB) ? 4096 : 256 * NB;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  idma_req_t req = '0;
  logic      req_valid = 1'b0, req_ready, r_valid, r_ready = 1'b0, w_valid, w_ready = 1'b0, busy;
  burst_t    r_burst, w_burst;
  int checks = 0, failures = 0;

  idma_legalizer #(.DataWidth(DW)) i_dut (
    .clk_i (clk), .rst_ni (rst_n),
    .req_i (req), .req_valid_i (req_valid), .req_ready_o (req_ready),
    .r_burst_o (r_burst), .r_valid_o (r_valid), .r_ready_i (r_ready),
    .w_burst_o (w_burst), .w_valid_o (w_valid), .w_ready_i (w_ready),
    .busy_o (busy));

  burst_t rq [$];
  burst_t wq [$];
  longint cyc = 0, t_hs = 0, t_r = 0;
  int     n_r = 0, n_w = 0;
  logic   first_r = 1'b0;

  function automatic len_t bound_of(protocol_e p, logic lim, int lg);
    len_t b;
    if (p == PROT_OBI) return NB;
    b = AxiBound;
    if (lim && (NB << lg) < b) b = NB << lg;
    return b;
  endfunction

  // expected bursts of one side
  task automatic split(idma_req_t q, logic src);
    protocol_e p   = src ? q.options.protocol_selection.src_protocol : q.options.protocol_selection.dst_protocol;
    addr_t     a   = src ? q.src_addr : q.dst_addr;
    logic      lim = src ? q.options.backend_options.limit_src_burst_len : q.options.backend_options.limit_dst_burst_len;
    len_t      rem = q.length;
    burst_t    b;
    if (q.length == 0) begin
      if (!src) begin
        b = '0; b.len = 0; b.null_xfer = 1'b1; b.last_burst = 1'b1; b.last = q.options.last;
        wq.push_back(b);
      end
      return;
    end
    if (src && p == PROT_INIT) begin
      b = '0; b.addr = 0; b.len = rem; b.protocol = PROT_INIT;
      b.init_mode = q.options.protocol_options.init_mode; b.init_value = q.src_addr;
      rq.push_back(b);
      return;
    end
    while (rem != 0) begin
      len_t bd  = bound_of(p, lim, int'(q.options.backend_options.burst_beats_log2));
      len_t gap = bd - (a % bd);
      b = '0;
      b.addr = a; b.len = (rem < gap) ? rem : gap; b.protocol = p;
      b.xfer_off = off_t'((src ? q.src_addr : q.dst_addr) % NB);
      rem -= b.len; a += b.len;
      b.last_burst = (rem == 0); b.last = q.options.last;
      if (src) rq.push_back(b); else wq.push_back(b);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (req_valid && req_ready) begin
      t_hs = cyc; first_r = (req.length != 0);
      split(req, 1'b1);
      split(req, 1'b0);
    end
    if (r_valid && r_ready) begin
      automatic burst_t e;
      n_r++;
      if (first_r) begin t_r = cyc; first_r = 1'b0; end
      checks++;
      if (rq.size() == 0) begin failures++; $display("ERROR: unexpected read burst"); end
      else begin
        e = rq.pop_front();
        if (r_burst.addr != e.addr || r_burst.len != e.len || r_burst.protocol != e.protocol ||
            (e.protocol != PROT_INIT && r_burst.xfer_off != e.xfer_off) ||
            (e.protocol == PROT_INIT && (r_burst.init_value != e.init_value || r_burst.init_mode != e.init_mode))) begin
          failures++;
          if (failures < 10) $display("ERROR: read burst %h+%0d p%0d, expected %h+%0d p%0d", r_burst.addr,
                                      r_burst.len, r_burst.protocol, e.addr, e.len, e.protocol);
        end
      end
    end
    if (w_valid && w_ready) begin
      automatic burst_t e;
      n_w++;
      checks++;
      if (wq.size() == 0) begin failures++; $display("ERROR: unexpected write burst"); end
      else begin
        e = wq.pop_front();
        if (w_burst.null_xfer != e.null_xfer || w_burst.len != e.len || w_burst.last_burst != e.last_burst ||
            w_burst.last != e.last ||
            (!e.null_xfer && (w_burst.addr != e.addr || w_burst.protocol != e.protocol || w_burst.xfer_off != e.xfer_off))) begin
          failures++;
          if (failures < 10) $display("ERROR: write burst %h+%0d lb%0d n%0d, expected %h+%0d lb%0d n%0d", w_burst.addr,
                                      w_burst.len, w_burst.last_burst, w_burst.null_xfer, e.addr, e.len,
                                      e.last_burst, e.null_xfer);
        end
      end
    end
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic idma_req_t rand_req();
    idma_req_t q = '0;
    automatic int unsigned pick = $urandom % 4;
    q.length = (pick == 0) ? 0 : (pick == 1) ? $urandom % 70 : $urandom % 9001;
    q.src_addr = $urandom; q.dst_addr = $urandom;
    q.options.protocol_selection.src_protocol = protocol_e'($urandom % 3);
    q.options.protocol_selection.dst_protocol = protocol_e'($urandom % 2);
    q.options.protocol_options.init_mode = init_mode_e'($urandom % 3);
    q.options.backend_options.limit_src_burst_len = ($urandom % 3 == 0);
    q.options.backend_options.limit_dst_burst_len = ($urandom % 3 == 0);
    q.options.backend_options.burst_beats_log2 = 4'($urandom % 10);
    q.options.last = ($urandom % 2 == 0);
    return q;
  endfunction

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // timing phase: AXI to AXI, no back pressure
    r_ready = 1'b1; w_ready = 1'b1;
    for (int n = 0; n < 20; n++) begin
      int r0;
      @(negedge clk);
      req = rand_req();
      req.options.protocol_selection = '{src_protocol: PROT_AXI, dst_protocol: PROT_AXI};
      req.options.backend_options.limit_src_burst_len = 1'b1;
      req.options.backend_options.burst_beats_log2 = 4'd2;
      req.length = 200 + $urandom % 300;
      req_valid = 1'b1;
      #1;
      while (!req_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      req_valid = 1'b0;
      r0 = n_r;
      while (rq.size() != 0 || wq.size() != 0) @(negedge clk);
      checks++;
      if (t_r != t_hs + 1) begin failures++; $display("ERROR: first read burst after %0d cycles", t_r - t_hs); end
      checks++;
      if (cyc - t_r > n_r - r0 + 1) begin failures++; $display("ERROR: read bursts not one per cycle"); end
    end
    // random phase
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      req = rand_req();
      req_valid = 1'b1;
      #1;
      while (!req_ready) begin
        @(negedge clk);
        r_ready = ($urandom % 3 != 0); w_ready = ($urandom % 3 != 0);
        #1;
      end
      @(negedge clk);
      req_valid = 1'b0;
      r_ready = ($urandom % 3 != 0); w_ready = ($urandom % 3 != 0);
    end
    r_ready = 1'b1; w_ready = 1'b1;
    repeat (2000) @(negedge clk);
    checks++;
    if (rq.size() != 0 || wq.size() != 0 || busy) begin
      failures++; $display("ERROR: %0d/%0d bursts missing at the end", rq.size(), wq.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
