// sssr_pkg: types and constants shared by the sparse stream semantic register (SSSR) streamer.
//
// The streamer lets an in-order core read and write memory streams through floating-point
// registers. Every SSR lane talks to memory over a simple request/response port (one request
// per cycle on a valid/ready handshake, responses in order, one per request, without
// backpressure) and to the core over a 32-bit configuration port.
//
// Following the paper: 64-bit data words, 17-bit byte addresses (128 KiB of TCDM), four affine
// loop levels, index sizes of 8, 16, 32 and 64 bit, and the three index modes (indirection,
// intersection, union). This design's own choices: the configuration register map below, the
// 2-bit encodings, 16-bit loop bounds, 32-bit internal index width (wider indices are compared
// and shifted on their low 32 bits), and the memory handshake.
package sssr_pkg;

  // ---- Widths -------------------------------------------------------------------------------
  localparam int unsigned DataWidth    = 64;              // FPU / TCDM bank width (paper: n = 64)
  localparam int unsigned StrbWidth    = DataWidth / 8;
  localparam int unsigned AddrWidth    = 17;              // 128 KiB TCDM (paper, Sec. 4.3)
  localparam int unsigned NumLoops     = 4;               // affine loop levels (paper)
  localparam int unsigned BoundWidth   = 16;              // loop bound width (assumed)
  localparam int unsigned IdxWidth     = 32;              // internal index width (assumed)
  localparam int unsigned RepWidth     = 8;               // repetition counter width (assumed)
  localparam int unsigned CfgDataWidth = 32;              // RV32 host core
  localparam int unsigned CfgAddrWidth = 5;               // registers per SSR
  localparam int unsigned WordOffBits  = $clog2(StrbWidth);

  typedef logic [AddrWidth-1:0]    addr_t;
  typedef logic [DataWidth-1:0]    data_t;
  typedef logic [StrbWidth-1:0]    strb_t;
  typedef logic [IdxWidth-1:0]     idx_t;
  typedef logic [BoundWidth-1:0]   bound_t;
  typedef logic [RepWidth-1:0]     rep_t;
  typedef logic [CfgDataWidth-1:0] cfg_data_t;
  typedef logic [CfgAddrWidth-1:0] cfg_addr_t;

  // ---- Encodings ----------------------------------------------------------------------------
  typedef enum logic [1:0] {
    IdxSize8  = 2'd0,
    IdxSize16 = 2'd1,
    IdxSize32 = 2'd2,
    IdxSize64 = 2'd3
  } idx_size_e;

  // Address generation mode. An ESSR treats ModeIntersect/ModeUnion as "egress".
  typedef enum logic [1:0] {
    ModeAffine    = 2'd0,
    ModeIndirect  = 2'd1,
    ModeIntersect = 2'd2,
    ModeUnion     = 2'd3
  } idx_mode_e;

  // Operation the index comparator tells an ISSR to perform on its head index.
  typedef enum logic [1:0] {
    CmpEmit = 2'd0,  // consume head index, stream its data element
    CmpSkip = 2'd1,  // consume head index, stream nothing
    CmpZero = 2'd2,  // keep head index, stream a zero element
    CmpEnd  = 2'd3   // consume the end-of-stream marker, job done
  } cmp_op_e;

  // ---- Configuration register map (word index on the config port) ---------------------------
  localparam cfg_addr_t RegStatus  = 5'd0;   // R: bit0 busy, bit1 shadow pending
  localparam cfg_addr_t RegRepeat  = 5'd1;   // RW: element repetitions - 1
  localparam cfg_addr_t RegBound0  = 5'd2;   // RW: bounds[0..3] at 2..5 (iterations - 1)
  localparam cfg_addr_t RegStride0 = 5'd6;   // RW: strides[0..3] at 6..9 (byte increments)
  localparam cfg_addr_t RegIdxCfg  = 5'd10;  // RW: [1:0] size, [3:2] mode, [7:4] shift, [8] egress
  localparam cfg_addr_t RegIdxBase = 5'd11;  // RW: index array byte address
  localparam cfg_addr_t RegJointLen= 5'd12;  // R : joint indices written by the last egress job
  localparam cfg_addr_t RegRptr0   = 5'd16;  // W : rptr[d] at 16..19, launches a read job of d+1 dims
  localparam cfg_addr_t RegWptr0   = 5'd20;  // W : wptr[d] at 20..23, launches a write job

  // ---- Structures ---------------------------------------------------------------------------
  typedef struct packed {
    rep_t                        reps;
    bound_t [NumLoops-1:0]       bounds;
    addr_t  [NumLoops-1:0]       strides;
    idx_size_e                   idx_size;
    idx_mode_e                   idx_mode;
    logic [3:0]                  idx_shift;
    logic                        egress;      // joint indices are written back by the ESSR
    addr_t                       idx_base;
    addr_t                       data_base;
    logic [1:0]                  dims;        // loop levels used - 1
    logic                        write;
  } cfg_t;

  // Memory request of one SSR port (TCDM-like).
  typedef struct packed {
    addr_t addr;
    logic  write;
    data_t data;
    strb_t strb;
  } mem_req_t;

  // Address token handed from an address generator to its data mover.
  typedef struct packed {
    addr_t addr;
    logic  zero;   // inject a zero element instead of reading memory
    logic  write;
    rep_t  reps;
  } addr_tok_t;

  // Bytes per index for a given size encoding.
  function automatic logic [3:0] idx_bytes(idx_size_e s);
    return 4'd1 << s;
  endfunction

endpackage
