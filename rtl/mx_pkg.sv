// mx_pkg: constants and types shared by the MX-ready vector unit and its cluster.
//
// The numbers follow the Dual-Core configuration: 64-bit elements, 512-bit vector
// registers (eight elements each), four FPU lanes, four memory ports and a 256-byte
// result tile buffer (32 elements, one eighth of the 2 KiB register file). Sub-tile
// sizes m', n', k' take the values 4 or 8.
//
// The instruction encodings of MX are not published, so the scalar core hands over an
// already decoded operation (op_e) together with its register indices and the values of
// its two scalar source registers (offload_req_t). The FPU latency is this design's own
// choice.
package mx_pkg;

  localparam int unsigned ELEN           = 64;
  localparam int unsigned VLEN           = 512;
  localparam int unsigned EPR            = VLEN / ELEN;      // elements per register (8)
  localparam int unsigned NR_VREGS       = 32;
  localparam int unsigned N_FPU          = 4;
  localparam int unsigned N_MEM_PORTS    = 4;
  localparam int unsigned TILE_BUF_BYTES = 256;
  localparam int unsigned TILE_ELEMS     = TILE_BUF_BYTES / (ELEN / 8);  // 32
  localparam int unsigned FPU_LAT        = 3;
  localparam int unsigned AW             = 32;               // byte address width
  localparam int unsigned VL_W           = 7;                // vl up to 64 (LMUL 8)

  typedef logic [ELEN-1:0] elem_t;
  typedef logic [4:0]      vreg_t;
  typedef logic [VLEN-1:0] vword_t;

  // Operations offloaded by the scalar core.
  typedef enum logic [4:0] {
    OP_VSETVL,      // vl    <= rs1
    OP_MSETTILEM,   // m'    <= rs1
    OP_MSETTILEN,   // n'    <= rs1
    OP_MSETTILEK,   // k'    <= rs1, vl <= m'k'
    OP_VLE,         // vd    <= mem[rs1 + 8e]                unit stride
    OP_VLSE,        // vd    <= mem[rs1 + rs2*e]             strided
    OP_VSE,         // mem   <= vd (store data)             unit stride
    OP_VSSE,        // mem   <= vd                          strided
    OP_MLDA,        // A sub-tile m' x k' at rs1, row stride rs2 bytes
    OP_MLDB,        // B sub-tile k' x n' at rs1, row stride rs2 bytes
    OP_MSTC,        // store the m' x n' sub-tile in vd to rs1, row stride rs2 bytes
    OP_MXFMACC,     // vd <= vs1(A) * vs2(B) + (zero_c ? 0 : vd), FP64
    OP_MXMACC,      // same, 64-bit integer
    OP_VFMACC_VV,   // vd[e] <= vs1[e] * vs2[e] + vd[e]
    OP_VFMACC_VF    // vd[e] <= rs1    * vs2[e] + vd[e]
  } op_e;

  typedef struct packed {
    op_e          op;
    vreg_t        vd;
    vreg_t        vs1;
    vreg_t        vs2;
    logic         zero_c;   // C-tile reset for mx[f]macc
    logic [63:0]  rs1;
    logic [63:0]  rs2;
  } offload_req_t;

  // VFU operations.
  typedef enum logic [1:0] {VFU_MXFMACC, VFU_MXMACC, VFU_VFMACC_VV, VFU_VFMACC_VF} vfu_op_e;

  typedef struct packed {
    vfu_op_e      op;
    vreg_t        vd;
    vreg_t        vs1;
    vreg_t        vs2;
    logic         zero_c;
    elem_t        scalar;
    logic [VL_W-1:0] vl;
    logic [3:0]   tm;       // m'
    logic [3:0]   tn;       // n'
    logic [3:0]   tk;       // k'
  } vfu_req_t;

  // VLSU operation: an R x C block of 64-bit elements. Element (r, c) is at
  // base + r*stride + 8*c. In the register group it is element r*C + c, or c*R + r when
  // transposed (the A sub-tile, kept column-major).
  typedef struct packed {
    logic         store;
    vreg_t        vreg;
    logic [AW-1:0] base;
    logic [AW-1:0] stride;
    logic [VL_W-1:0] rows;
    logic [VL_W-1:0] cols;
    logic         transpose;
  } vlsu_req_t;

  // FPU lane operation.
  typedef enum logic {FPU_FMA, FPU_IMAC} fpu_op_e;

  // Number of registers spanned by a group of n elements.
  function automatic int unsigned nregs(int unsigned n);
    return (n + EPR - 1) / EPR;
  endfunction

  // Bit mask of the registers [base, base + n) (wrapping is not used by software).
  function automatic logic [NR_VREGS-1:0] group_mask(vreg_t base, int unsigned n);
    logic [NR_VREGS-1:0] m;
    m = '0;
    for (int unsigned i = 0; i < NR_VREGS; i++)
      if (i >= 32'(base) && i < 32'(base) + n) m[i] = 1'b1;
    return m;
  endfunction

endpackage
