// idma_pkg: types and constants shared by every part of the modular DMA engine.
//
// The engine is split into front-ends (control plane), mid-ends (transfer
// decomposition) and a back-end (data plane). All three talk through the
// 1D transfer descriptor defined here: source address, destination address,
// length and an options bundle (protocol selection, protocol options,
// back-end options) plus a `last` flag. The field names follow the
// descriptor outline of the architecture; the field widths and the enum
// encodings are this implementation's own choice.
//
// The address width is fixed at 32 bit, as in the register front-end that
// launches transfers in this configuration. The data width and the number
// of outstanding transfers are module parameters of the back-end.
package idma_pkg;

  // Address and length width of the whole engine.
  localparam int unsigned AddrWidth = 32;
  localparam int unsigned LenWidth  = 32;
  // Width of a byte offset within a bus word (enough for buses up to 2048 bit).
  localparam int unsigned OffWidth  = 8;

  typedef logic [AddrWidth-1:0] addr_t;
  typedef logic [LenWidth-1:0]  len_t;
  typedef logic [OffWidth-1:0]  off_t;

  // On-chip protocols a transfer side can use in this engine.
  typedef enum logic [1:0] {
    PROT_AXI  = 2'd0,  // AXI4 manager port (bursts)
    PROT_OBI  = 2'd1,  // OBI manager port (single bus-sized accesses)
    PROT_INIT = 2'd2   // memory-initialisation pseudo protocol (read only)
  } protocol_e;

  // Patterns of the Init read manager.
  typedef enum logic [1:0] {
    INIT_REPEAT = 2'd0,  // every 32-bit word carries the init value
    INIT_INCR   = 2'd1,  // word k of the transfer carries value + k
    INIT_PRNG   = 2'd2   // 32-bit Galois LFSR sequence seeded with the value
  } init_mode_e;

  // AXI4 constants.
  localparam logic [1:0] AxiBurstIncr   = 2'b01;
  localparam int unsigned AxiPageBytes  = 4096;  // bursts may not cross 4 KiB
  localparam int unsigned AxiMaxBeats   = 256;   // AXI4 INCR burst limit
  localparam int unsigned AxiIdWidth    = 4;

  // Galois LFSR feedback polynomial used by the Init pseudorandom pattern.
  localparam logic [31:0] InitLfsrPoly  = 32'h8020_0003;

  typedef struct packed {
    protocol_e src_protocol;
    protocol_e dst_protocol;
  } protocol_selection_t;

  typedef struct packed {
    init_mode_e init_mode;     // only meaningful when src_protocol is PROT_INIT
  } protocol_options_t;

  typedef struct packed {
    logic       limit_src_burst_len;
    logic       limit_dst_burst_len;
    logic [3:0] burst_beats_log2;  // user burst limit: 2**burst_beats_log2 beats
  } backend_options_t;

  typedef struct packed {
    protocol_selection_t protocol_selection;
    protocol_options_t   protocol_options;
    backend_options_t    backend_options;
    logic                last;  // last 1D transfer of a larger (ND) transfer
  } options_t;

  // 1D transfer descriptor (mid-end to back-end).
  typedef struct packed {
    len_t     length;
    addr_t    src_addr;  // for PROT_INIT: the init value / seed
    addr_t    dst_addr;
    options_t options;
  } idma_req_t;

  // One extra tensor dimension of an ND transfer.
  typedef struct packed {
    len_t  num_reps;    // 0 and 1 both mean "once"
    addr_t src_stride;
    addr_t dst_stride;
  } idma_dim_t;

  // One legalized burst, as handed from the legalizer to the transport layer.
  typedef struct packed {
    addr_t      addr;        // burst start address (for PROT_INIT: byte index in transfer)
    len_t       len;         // bytes in the burst (0 only for a null write burst)
    off_t       xfer_off;    // byte offset of the 1D transfer start in the bus word
    protocol_e  protocol;
    init_mode_e init_mode;
    addr_t      init_value;
    logic       last_burst;  // last burst of its 1D transfer (write side)
    logic       last;        // options.last of its 1D transfer
    logic       null_xfer;   // zero-length transfer: complete without bus access
  } burst_t;

  // AXI4 address channel (AW or AR), data channels are carried as plain signals.
  typedef struct packed {
    logic [AxiIdWidth-1:0] id;
    addr_t                 addr;
    logic [7:0]            len;
    logic [2:0]            size;
    logic [1:0]            burst;
  } axi_ax_t;

  function automatic int unsigned clog2_min1(int unsigned v);
    return (v <= 1) ? 1 : $clog2(v);
  endfunction

endpackage
