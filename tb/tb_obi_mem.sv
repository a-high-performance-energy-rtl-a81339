// tb_obi_mem: behavioural memory with two OBI subordinate ports, one used for
// reads and one for writes, over one shared byte array (stands in for the
// cluster's tightly-coupled L1 memory; not synthesizable).
//
// Each port grants a request (gnt in the request cycle) and answers it with
// rvalid/rdata exactly Latency cycles later, in order; OBI has no response
// back-pressure. Writes take effect at the grant under the byte enables.
// Addresses wrap at MemBytes and are taken word aligned. With stall_i set,
// grants are withheld at random. Counters report granted requests.
module tb_obi_mem #(
  parameter int unsigned DataWidth = 64,
  parameter int unsigned MemBytes  = 65536,
  parameter int unsigned Latency   = 1
) (
  input  logic                   clk_i,
  input  logic                   stall_i,
  // port 0 (reads)
  input  logic                   r_req_i,
  input  idma_pkg::addr_t        r_addr_i,
  input  logic                   r_we_i,
  input  logic [DataWidth/8-1:0] r_be_i,
  input  logic [DataWidth-1:0]   r_wdata_i,
  output logic                   r_gnt_o,
  output logic                   r_rvalid_o,
  output logic [DataWidth-1:0]   r_rdata_o,
  output logic                   r_err_o,
  // port 1 (writes)
  input  logic                   w_req_i,
  input  idma_pkg::addr_t        w_addr_i,
  input  logic                   w_we_i,
  input  logic [DataWidth/8-1:0] w_be_i,
  input  logic [DataWidth-1:0]   w_wdata_i,
  output logic                   w_gnt_o,
  output logic                   w_rvalid_o,
  output logic [DataWidth-1:0]   w_rdata_o,
  output logic                   w_err_o
);
  localparam int unsigned NB = DataWidth / 8;

  logic [7:0] mem [MemBytes];

  typedef struct {
    logic [DataWidth-1:0] data;
    longint               t;
  } rsp_t;

  rsp_t   rq[$];
  rsp_t   wq[$];
  longint cyc = 0;
  int     n_rd = 0, n_wr = 0;
  logic   r_gnt_q = 1'b1, w_gnt_q = 1'b1;

  assign r_gnt_o = r_req_i && r_gnt_q;
  assign w_gnt_o = w_req_i && w_gnt_q;
  assign r_err_o = 1'b0;
  assign w_err_o = 1'b0;

  initial begin
    r_rvalid_o = 1'b0; r_rdata_o = '0;
    w_rvalid_o = 1'b0; w_rdata_o = '0;
  end

  function automatic logic [DataWidth-1:0] access(idma_pkg::addr_t addr, logic we,
                                                 logic [NB-1:0] be, logic [DataWidth-1:0] wd);
    automatic longint unsigned a = longint'(addr) & ~longint'(NB - 1);
    automatic logic [DataWidth-1:0] rd;
    for (int i = 0; i < NB; i++) begin
      rd[8*i +: 8] = mem[(a + i) % MemBytes];
      if (we && be[i]) mem[(a + i) % MemBytes] = wd[8*i +: 8];
    end
    return rd;
  endfunction

  always @(posedge clk_i) begin
    cyc++;
    if (r_gnt_o) begin
      rq.push_back('{data: access(r_addr_i, r_we_i, r_be_i, r_wdata_i), t: cyc});
      n_rd++;
    end
    if (w_gnt_o) begin
      wq.push_back('{data: access(w_addr_i, w_we_i, w_be_i, w_wdata_i), t: cyc});
      n_wr++;
    end
    r_rvalid_o <= 1'b0;
    w_rvalid_o <= 1'b0;
    if (rq.size() > 0 && cyc + 1 >= rq[0].t + Latency) begin
      r_rvalid_o <= 1'b1;
      r_rdata_o  <= rq[0].data;
      void'(rq.pop_front());
    end
    if (wq.size() > 0 && cyc + 1 >= wq[0].t + Latency) begin
      w_rvalid_o <= 1'b1;
      w_rdata_o  <= wq[0].data;
      void'(wq.pop_front());
    end
    r_gnt_q <= !stall_i || ($urandom % 3 != 0);
    w_gnt_q <= !stall_i || ($urandom % 3 != 0);
  end

endmodule
