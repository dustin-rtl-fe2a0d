// dustin_pkg: types and constants shared by the cluster blocks.
//
// Sizes follow the cluster described for the chip: 16 cores, a 128 kB L1 data
// memory (TCDM) split into 32 word-interleaved banks of 32-bit words. The SIMD
// format encoding below (two 2-bit precision fields, operand A and operand B)
// is this design's own choice; only the ten legal precision combinations
// (16x16 ... 4x2, B never wider than A) come from the architecture.
package dustin_pkg;

  localparam int unsigned N_CORES    = 16;
  localparam int unsigned N_BANKS    = 32;
  localparam int unsigned L1_BYTES   = 128 * 1024;
  localparam int unsigned BANK_WORDS = L1_BYTES / (N_BANKS * 4);   // 1024 words of 32 bit
  localparam int unsigned N_DMA_PORTS = 1;                          // assumed: one DMA port into the L1

  // Element precision of a SIMD operand.
  typedef enum logic [1:0] {
    PREC_16 = 2'd0,
    PREC_8  = 2'd1,
    PREC_4  = 2'd2,
    PREC_2  = 2'd3
  } prec_e;

  // Content of the SIMD format CSR: precision of operand A and of operand B.
  // Operand B is always the narrower (or equal) one.
  typedef struct packed {
    prec_e prec_a;
    prec_e prec_b;
  } simd_fmt_t;

  // CSR addresses (custom read/write space; this design's own choice).
  localparam logic [11:0] CSR_SIMD_FMT   = 12'hBC0;
  localparam logic [11:0] CSR_MPC_TARGET = 12'hBC1;
  localparam logic [11:0] CSR_MPC_SLICE  = 12'hBC2;

  // Number of bits in one element of the given precision.
  function automatic int unsigned prec_bits(prec_e p);
    case (p)
      PREC_16: return 16;
      PREC_8:  return 8;
      PREC_4:  return 4;
      default: return 2;
    endcase
  endfunction

  // Number of B sub-groups (slices) an operand B register holds for a format:
  // width(A) / width(B), i.e. 2**(prec_b - prec_a). 1 for uniform formats.
  function automatic logic [3:0] n_slices(simd_fmt_t f);
    if (f.prec_b <= f.prec_a) return 4'd1;
    return 4'(1 << (f.prec_b - f.prec_a));
  endfunction

  // One request on the single-cycle TCDM (L1) port.
  typedef struct packed {
    logic [31:0] addr;
    logic        we;
    logic [3:0]  be;
    logic [31:0] wdata;
  } tcdm_req_t;

endpackage
