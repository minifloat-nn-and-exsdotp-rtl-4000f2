// mfnn_pkg: types and constants shared by the MiniFloat-NN expanding
// sum-of-dot-product (ExSdotp) datapath, its SIMD operation group and the FPU
// wrapper around it.
//
// The five formats the SDOTP operation group works on are FP32 (8-bit
// exponent, 23-bit mantissa), FP16 (5/10), FP16alt (8/7, bfloat16 widths with
// IEEE subnormals and rounding), FP8 (5/2) and FP8alt (4/3). The exponent and
// mantissa widths follow the paper; the numeric encoding of the enums below is
// this design's own (the RISC-V rounding-mode encoding is used for rnd_mode_e).
package mfnn_pkg;

  // Floating-point formats handled by the SDOTP operation group.
  typedef enum logic [2:0] {
    FP32    = 3'd0,
    FP16    = 3'd1,
    FP16ALT = 3'd2,
    FP8     = 3'd3,
    FP8ALT  = 3'd4
  } fp_format_e;

  // RISC-V rounding modes (frm encoding).
  typedef enum logic [2:0] {
    RNE = 3'b000,
    RTZ = 3'b001,
    RDN = 3'b010,
    RUP = 3'b011,
    RMM = 3'b100
  } rnd_mode_e;

  // Operations of the SDOTP operation group.
  typedef enum logic [1:0] {
    EXSDOTP = 2'd0,  // a*b + c*d + e, sources w bits, accumulator/result 2w bits
    EXVSUM  = 2'd1,  // a + c + e,     sources w bits, accumulator/result 2w bits
    VSUM    = 2'd2   // a + c + e,     all three operands and the result 2w bits
  } sdotp_op_e;

  // Destination element width selected by the instruction.
  typedef enum logic [1:0] {
    W8  = 2'd0,
    W16 = 2'd1,
    W32 = 2'd2
  } dst_width_e;

  // FPU operation groups, in the order of the output arbiter's inputs.
  typedef enum logic [1:0] {
    OG_ADDMUL = 2'd0,
    OG_COMP   = 2'd1,
    OG_CAST   = 2'd2,
    OG_SDOTP  = 2'd3
  } opgroup_e;

  localparam int unsigned NUM_OPGROUPS = 4;
  localparam int unsigned FLEN         = 64;  // FP register width
  localparam int unsigned TAG_WIDTH    = 5;   // tag carried with each operation

  // IEEE-754 exception flags (fflags order NV DZ OF UF NX).
  typedef struct packed {
    logic nv;
    logic dz;
    logic of;
    logic uf;
    logic nx;
  } status_t;

  function automatic int unsigned exp_bits(fp_format_e f);
    case (f)
      FP32:    return 8;
      FP16:    return 5;
      FP16ALT: return 8;
      FP8:     return 5;
      default: return 4;  // FP8ALT
    endcase
  endfunction

  function automatic int unsigned man_bits(fp_format_e f);
    case (f)
      FP32:    return 23;
      FP16:    return 10;
      FP16ALT: return 7;
      FP8:     return 2;
      default: return 3;  // FP8ALT
    endcase
  endfunction

  function automatic int unsigned fmt_width(fp_format_e f);
    return 1 + exp_bits(f) + man_bits(f);
  endfunction

  function automatic int signed fmt_bias(fp_format_e f);
    return (32'sd1 <<< (exp_bits(f) - 1)) - 1;
  endfunction

endpackage
