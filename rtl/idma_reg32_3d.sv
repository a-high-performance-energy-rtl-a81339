// idma_reg32_3d: core-private, register-based front-end for 32-bit hosts
// with 3D transfers (reg_32_3d).
//
// Each core owns one instance, so no two cores can interfere while
// programming a transfer. Registers (32 bit, word offsets from the base):
//   0x00 src_addr        0x18 src_stride_2    0x24 src_stride_3
//   0x04 dst_addr        0x1C dst_stride_2    0x28 dst_stride_3
//   0x08 transfer_length 0x20 num_reps_2      0x2C num_reps_3
//   0x0C configuration   0x10 status (read only: ID of the last completed transfer)
//   0x14 transfer_id     (read only: reading launches the transfer)
// configuration: [1:0] source protocol, [3:2] destination protocol
// (0 AXI4, 1 OBI, 2 Init), [5:4] Init pattern (0 repeat, 1 incrementing,
// 2 pseudorandom), [6] limit source bursts, [7] limit destination bursts,
// [11:8] burst limit as log2 of beats. num_reps of 0 or 1 leaves the
// dimension out, so the reset state describes a plain 1D transfer.
// Reading transfer_id hands the programmed 3D transfer downstream and
// returns its ID, counting up from 1; the bus grant of that read waits until
// the transfer is accepted. Completions (done_i, one per transfer, in order)
// advance status. Register bus: req/we/addr/wdata with gnt in the same cycle
// and rvalid/rdata one cycle later, writes are full-word.
// The register set, launch-by-reading and the status semantics follow the
// architecture; the offsets, the configuration encoding and the bus
// handshake are this implementation's choices.
module idma_reg32_3d (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  // register bus
  input  logic                    req_i,
  input  logic                    we_i,
  input  logic [5:0]              addr_i,
  input  logic [31:0]             wdata_i,
  output logic                    gnt_o,
  output logic                    rvalid_o,
  output logic [31:0]             rdata_o,
  // 3D transfer out
  output idma_pkg::idma_req_t     nd_req_o,
  output idma_pkg::idma_dim_t [1:0] nd_dims_o,
  output logic                    nd_valid_o,
  input  logic                    nd_ready_i,
  // completion of a launched transfer
  input  logic                    done_i
);
  import idma_pkg::*;

  typedef enum logic [3:0] {
    RegSrc = 4'd0, RegDst = 4'd1, RegLen = 4'd2, RegConf = 4'd3, RegStatus = 4'd4,
    RegTid = 4'd5, RegSrcStr2 = 4'd6, RegDstStr2 = 4'd7, RegReps2 = 4'd8,
    RegSrcStr3 = 4'd9, RegDstStr3 = 4'd10, RegReps3 = 4'd11
  } reg_e;

  logic [31:0] src_q, dst_q, len_q, conf_q;
  logic [31:0] src_str_q [2];
  logic [31:0] dst_str_q [2];
  logic [31:0] reps_q    [2];
  logic [31:0] next_id_q, done_id_q;
  logic [3:0]  idx;
  logic        launch;

  assign idx        = addr_i[5:2];
  assign launch     = req_i && !we_i && (idx == 4'(RegTid));
  assign nd_valid_o = launch;
  assign gnt_o      = launch ? nd_ready_i : req_i;

  always_comb begin
    nd_req_o          = '0;
    nd_req_o.src_addr = src_q;
    nd_req_o.dst_addr = dst_q;
    nd_req_o.length   = len_q;
    nd_req_o.options.protocol_selection.src_protocol = protocol_e'(conf_q[1:0]);
    nd_req_o.options.protocol_selection.dst_protocol = protocol_e'(conf_q[3:2]);
    nd_req_o.options.protocol_options.init_mode      = init_mode_e'(conf_q[5:4]);
    nd_req_o.options.backend_options.limit_src_burst_len = conf_q[6];
    nd_req_o.options.backend_options.limit_dst_burst_len = conf_q[7];
    nd_req_o.options.backend_options.burst_beats_log2    = conf_q[11:8];
    nd_req_o.options.last = 1'b1;
    for (int unsigned d = 0; d < 2; d++) begin
      nd_dims_o[d].num_reps   = reps_q[d];
      nd_dims_o[d].src_stride = src_str_q[d];
      nd_dims_o[d].dst_stride = dst_str_q[d];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      src_q     <= '0;
      dst_q     <= '0;
      len_q     <= '0;
      conf_q    <= '0;
      src_str_q <= '{default: '0};
      dst_str_q <= '{default: '0};
      reps_q    <= '{default: '0};
      next_id_q <= 32'd1;
      done_id_q <= '0;
      rvalid_o  <= 1'b0;
      rdata_o   <= '0;
    end else begin
      rvalid_o <= req_i && gnt_o;
      if (done_i) done_id_q <= done_id_q + 1'b1;
      if (req_i && gnt_o) begin
        if (we_i) begin
          unique case (idx)
            4'(RegSrc):     src_q        <= wdata_i;
            4'(RegDst):     dst_q        <= wdata_i;
            4'(RegLen):     len_q        <= wdata_i;
            4'(RegConf):    conf_q       <= wdata_i;
            4'(RegSrcStr2): src_str_q[0] <= wdata_i;
            4'(RegDstStr2): dst_str_q[0] <= wdata_i;
            4'(RegReps2):   reps_q[0]    <= wdata_i;
            4'(RegSrcStr3): src_str_q[1] <= wdata_i;
            4'(RegDstStr3): dst_str_q[1] <= wdata_i;
            4'(RegReps3):   reps_q[1]    <= wdata_i;
            default: ;
          endcase
          rdata_o <= '0;
        end else begin
          unique case (idx)
            4'(RegSrc):     rdata_o <= src_q;
            4'(RegDst):     rdata_o <= dst_q;
            4'(RegLen):     rdata_o <= len_q;
            4'(RegConf):    rdata_o <= conf_q;
            4'(RegStatus):  rdata_o <= done_i ? done_id_q + 1'b1 : done_id_q;
            4'(RegTid):     rdata_o <= next_id_q;
            4'(RegSrcStr2): rdata_o <= src_str_q[0];
            4'(RegDstStr2): rdata_o <= dst_str_q[0];
            4'(RegReps2):   rdata_o <= reps_q[0];
            4'(RegSrcStr3): rdata_o <= src_str_q[1];
            4'(RegDstStr3): rdata_o <= dst_str_q[1];
            4'(RegReps3):   rdata_o <= reps_q[1];
            default:        rdata_o <= '0;
          endcase
          if (launch) next_id_q <= next_id_q + 1'b1;
        end
      end
    end
  end

endmodule
