// mfnn_fpu: the extended FPU of the MiniFloat-NN processing element.
//
// The FPU is a set of operation groups behind a common front and back end.
// The front end ("operand distribution") hands the three 64-bit operands of
// an instruction, with its rounding mode and tag, to the operation group the
// instruction belongs to; the FPU accepts the instruction when that group is
// ready. Each group has its own pipeline, so results of different groups can
// be ready in the same cycle; the back end picks one per cycle with a
// round-robin arbiter and returns it with its tag (the core uses the tag to
// write the right register). Results of one group leave in order.
//
// Operation groups, in the arbiter's order: ADDMUL, COMP, CAST and the new
// SDOTP group (ExSdotp, ExVsum, Vsum, see sdotp_simd). ADDMUL, COMP and CAST
// are the unchanged groups of the FPU this design extends; they are not part
// of this RTL and connect through the ext_* ports (index 0 = ADDMUL, 1 =
// COMP, 2 = CAST), each with a valid/ready handshake in both directions.
// The SDOTP formats come from the instruction's destination width and the
// two FP CSR bits src_is_alt and dst_is_alt (mfnn_fmt_decode).
//
// Following the paper: the 64-bit operand/result interface (three operands
// in, one result out per cycle), the four operation groups, round-robin
// output arbitration, three pipeline stages for SDOTP and the CSR alt bits.
// This design's own choices: the port list, the valid/ready handshakes, the
// tag, and the illegal_o flag for an expanding operation with an 8-bit
// destination (such an instruction is still executed with FP8 -> FP16 formats;
// the core is expected not to issue it).
// Timing: an SDOTP instruction accepted in cycle t can leave in cycle
// t + SDOTP_PIPE_REGS if the output port is free; a result waiting for the
// arbiter stalls its group's pipeline. Verilator's SYNCASYNCNET note on
// rst_ni comes from the assertions in the submodules, which use the
// asynchronous reset to disable themselves; it is simulation only.
module mfnn_fpu
  import mfnn_pkg::*;
#(
  parameter int unsigned SDOTP_PIPE_REGS = 3
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  // Instruction
  input  logic [2:0][FLEN-1:0]   operands_i,    // {rd / rs3, rs2, rs1}
  input  opgroup_e               opgrp_i,
  input  sdotp_op_e              sdotp_op_i,
  input  dst_width_e             dst_width_i,
  input  logic [3:0]             ext_op_i,      // operation code for ADDMUL/COMP/CAST
  input  rnd_mode_e              rnd_mode_i,
  input  logic                   src_is_alt_i,  // FP CSR bit
  input  logic                   dst_is_alt_i,  // FP CSR bit
  input  logic [TAG_WIDTH-1:0]   tag_i,
  input  logic                   in_valid_i,
  output logic                   in_ready_o,
  output logic                   illegal_o,
  // Result
  output logic [FLEN-1:0]        result_o,
  output status_t                status_o,
  output logic [TAG_WIDTH-1:0]   tag_o,
  output opgroup_e               opgrp_o,
  output logic                   out_valid_o,
  input  logic                   out_ready_i,
  // Operation groups outside this RTL (0 = ADDMUL, 1 = COMP, 2 = CAST)
  output logic [2:0][FLEN-1:0]   ext_operands_o,
  output logic [3:0]             ext_op_o,
  output rnd_mode_e              ext_rnd_mode_o,
  output logic [TAG_WIDTH-1:0]   ext_tag_o,
  output logic [2:0]             ext_in_valid_o,
  input  logic [2:0]             ext_in_ready_i,
  input  logic [2:0][FLEN-1:0]   ext_result_i,
  input  status_t [2:0]          ext_status_i,
  input  logic [2:0][TAG_WIDTH-1:0] ext_tag_i,
  input  logic [2:0]             ext_out_valid_i,
  output logic [2:0]             ext_out_ready_o
);

  // ---------------------------------------------------------------------------
  // Operand distribution
  // ---------------------------------------------------------------------------
  logic [NUM_OPGROUPS-1:0] grp_in_valid, grp_in_ready;
  fp_format_e              src_fmt, dst_fmt;

  always_comb begin
    grp_in_valid = '0;
    grp_in_valid[opgrp_i] = in_valid_i;
  end
  assign in_ready_o     = grp_in_ready[opgrp_i];
  assign ext_in_valid_o = grp_in_valid[2:0];
  assign grp_in_ready[2:0] = ext_in_ready_i;
  assign ext_operands_o = operands_i;
  assign ext_op_o       = ext_op_i;
  assign ext_rnd_mode_o = rnd_mode_i;
  assign ext_tag_o      = tag_i;

  mfnn_fmt_decode i_fmt_decode (
    .op_i         (sdotp_op_i),
    .dst_width_i  (dst_width_i),
    .src_is_alt_i (src_is_alt_i),
    .dst_is_alt_i (dst_is_alt_i),
    .src_fmt_o    (src_fmt),
    .dst_fmt_o    (dst_fmt),
    .illegal_o    (illegal_o)
  );

  // ---------------------------------------------------------------------------
  // SDOTP operation group
  // ---------------------------------------------------------------------------
  logic [NUM_OPGROUPS-1:0]            grp_out_valid, grp_out_ready;
  logic [NUM_OPGROUPS-1:0][FLEN-1:0]  grp_result;
  status_t [NUM_OPGROUPS-1:0]         grp_status;
  logic [NUM_OPGROUPS-1:0][TAG_WIDTH-1:0] grp_tag;

  sdotp_simd #(.NUM_PIPE_REGS(SDOTP_PIPE_REGS)) i_sdotp (
    .clk_i, .rst_ni,
    .operands_i  (operands_i),
    .op_i        (sdotp_op_i),
    .src_fmt_i   (src_fmt),
    .dst_fmt_i   (dst_fmt),
    .rnd_mode_i  (rnd_mode_i),
    .tag_i       (tag_i),
    .in_valid_i  (grp_in_valid[OG_SDOTP]),
    .in_ready_o  (grp_in_ready[OG_SDOTP]),
    .result_o    (grp_result[OG_SDOTP]),
    .status_o    (grp_status[OG_SDOTP]),
    .tag_o       (grp_tag[OG_SDOTP]),
    .out_valid_o (grp_out_valid[OG_SDOTP]),
    .out_ready_i (grp_out_ready[OG_SDOTP])
  );

  assign grp_out_valid[2:0] = ext_out_valid_i;
  assign grp_result[2:0]    = ext_result_i;
  assign grp_status[2:0]    = ext_status_i;
  assign grp_tag[2:0]       = ext_tag_i;
  assign ext_out_ready_o    = grp_out_ready[2:0];

  // ---------------------------------------------------------------------------
  // Round-robin output arbitration
  // ---------------------------------------------------------------------------
  logic [NUM_OPGROUPS-1:0]         gnt;
  logic [$clog2(NUM_OPGROUPS)-1:0] gnt_idx;

  mfnn_rr_arbiter #(.N(NUM_OPGROUPS)) i_arbiter (
    .clk_i, .rst_ni,
    .req_i   (grp_out_valid),
    .ready_i (out_ready_i),
    .gnt_o   (gnt),
    .idx_o   (gnt_idx),
    .valid_o (out_valid_o)
  );

  assign grp_out_ready = gnt & {NUM_OPGROUPS{out_ready_i}};
  assign result_o      = grp_result[gnt_idx];
  assign status_o      = grp_status[gnt_idx];
  assign tag_o         = grp_tag[gnt_idx];
  assign opgrp_o       = opgroup_e'(gnt_idx);

endmodule
