// sdotp_simd: the SDOTP operation group of the FPU, a SIMD wrapper around
// four ExSdotp units.
//
// The FPU hands over three 64-bit operands: rs1 and rs2 with packed source
// elements and rd, the accumulator, with packed destination elements. Lanes
// 0 and 1 are 16-to-32 ExSdotp units, lanes 2 and 3 are 8-to-16 units, so one
// operation computes two FP16/FP16alt -> FP32 or four FP8/FP8alt ->
// FP16/FP16alt sums of dot products per cycle.
//
// Unpacking (lane i, source width sw, destination width dw):
//   EXSDOTP  a = rs1.e[2i], c = rs1.e[2i+1], b = rs2.e[2i], d = rs2.e[2i+1],
//            e = rd.e[i]          (i < 64/dw: 2 lanes for FP32, 4 for FP16)
//   EXVSUM   the same with b = d = 1.0 (rs2 is not read)
//   VSUM     a = rs1.e[2i], c = rs1.e[2i+1], e = rd.e[i], all dw bits wide
//            (i < 32/dw: 1 lane for FP32, 2 for FP16, 4 for FP8)
// where x.e[k] is the k-th element of the register counted from bit 0.
// Packing: lane i's result goes to bits [dw*i +: dw]; bits of lanes that are
// not used by the operation (the upper half after a VSUM) keep the value of
// rd. The flags are the OR of the used lanes' flags.
//
// Following the paper: two 16-to-32 and two 8-to-16 units, the 64-bit
// operands and result, the element-to-lane pairing of its register-file
// figure (the two upper source elements feed the upper accumulator element).
// This design's own choices: the VSUM lane pairing, the lane order, that
// unused result bits keep rd, and that all four units share one valid/ready
// handshake (they have the same depth, so they stay in lockstep). The
// operation/format information needed for packing travels in a side
// pipeline of the same depth. Latency NUM_PIPE_REGS cycles, one operation
// per cycle. Elements are picked with width-specific part-selects of the
// zero-extended registers; the upper half of the packing buffer pk_res only
// exists so that every slice is in range and is never read (Verilator
// UNUSEDSIGNAL). rst_ni is reported as SYNCASYNCNET because the lockstep
// assertion is disabled by the asynchronous reset (simulation only).
module sdotp_simd
  import mfnn_pkg::*;
#(
  parameter int unsigned NUM_PIPE_REGS = 3  // SDOTP pipeline depth in the paper's PE
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic [2:0][FLEN-1:0] operands_i,  // {rd (accumulator), rs2, rs1}
  input  sdotp_op_e            op_i,
  input  fp_format_e           src_fmt_i,
  input  fp_format_e           dst_fmt_i,
  input  rnd_mode_e            rnd_mode_i,
  input  logic [TAG_WIDTH-1:0] tag_i,
  input  logic                 in_valid_i,
  output logic                 in_ready_o,
  output logic [FLEN-1:0]      result_o,
  output status_t              status_o,
  output logic [TAG_WIDTH-1:0] tag_o,
  output logic                 out_valid_o,
  input  logic                 out_ready_i
);

  localparam int unsigned NUM_LANES = 4;

  // Information needed to pack the result, carried alongside the units.
  typedef struct packed {
    logic [FLEN-1:0]      acc;
    logic [NUM_LANES-1:0] active;
    fp_format_e           dst_fmt;
  } meta_t;

  logic [FLEN-1:0] rs1, rs2, acc;
  assign rs1 = operands_i[0];
  assign rs2 = operands_i[1];
  assign acc = operands_i[2];

  // ---------------------------------------------------------------------------
  // Unpacking
  // ---------------------------------------------------------------------------
  logic [NUM_LANES-1:0]       active;
  logic [NUM_LANES-1:0][31:0] lane_a, lane_c, lane_e;
  logic [NUM_LANES-1:0][15:0] lane_b, lane_d;

  logic [31:0]       sw, dw;
  logic [2:0]        n_active;
  logic [4*FLEN-1:0] rs1_x, rs2_x, acc_x;  // zero-extended so every slice is in range

  // Element k of width w (8, 16 or 32 bits) of a register.
  function automatic logic [31:0] elem(logic [4*FLEN-1:0] r, logic [31:0] w, int unsigned k);
    case (w)
      32'd8:   return 32'(r[8*k +: 8]);
      32'd16:  return 32'(r[16*k +: 16]);
      default: return r[32*k +: 32];
    endcase
  endfunction

  always_comb begin
    sw    = fmt_width(src_fmt_i);
    dw    = fmt_width(dst_fmt_i);
    rs1_x = (4*FLEN)'(rs1);
    rs2_x = (4*FLEN)'(rs2);
    acc_x = (4*FLEN)'(acc);
    // lanes used: 64/dw for the expanding operations, 32/dw for VSUM
    case (dw)
      32'd8:   n_active = 3'd4;
      32'd16:  n_active = (op_i == VSUM) ? 3'd2 : 3'd4;
      default: n_active = (op_i == VSUM) ? 3'd1 : 3'd2;
    endcase
    for (int unsigned i = 0; i < NUM_LANES; i++) begin
      active[i] = (i < 32'(n_active));
      lane_b[i] = '0;
      lane_d[i] = '0;
      lane_e[i] = elem(acc_x, dw, i);
      if (op_i == VSUM) begin
        lane_a[i] = elem(rs1_x, dw, 2 * i);
        lane_c[i] = elem(rs1_x, dw, 2 * i + 1);
      end else begin
        lane_a[i] = elem(rs1_x, sw, 2 * i);
        lane_c[i] = elem(rs1_x, sw, 2 * i + 1);
        lane_b[i] = 16'(elem(rs2_x, sw, 2 * i));
        lane_d[i] = 16'(elem(rs2_x, sw, 2 * i + 1));
      end
      if (!active[i]) begin
        lane_a[i] = '0;
        lane_b[i] = '0;
        lane_c[i] = '0;
        lane_d[i] = '0;
        lane_e[i] = '0;
      end
    end
  end

  // ---------------------------------------------------------------------------
  // ExSdotp units
  // ---------------------------------------------------------------------------
  logic [NUM_LANES-1:0]       unit_in_ready, unit_out_valid;
  logic [NUM_LANES-1:0][31:0] unit_result;
  status_t [NUM_LANES-1:0]    unit_status;
  logic [TAG_WIDTH-1:0]       unit_tag [NUM_LANES];

  for (genvar i = 0; i < NUM_LANES; i++) begin : gen_lane
    if (i < 2) begin : gen_wide
      // 16-to-32 unit
      exsdotp #(.SRC_WIDTH(16), .NUM_PIPE_REGS(NUM_PIPE_REGS)) i_unit (
        .clk_i, .rst_ni,
        .operand_a_i (lane_a[i]),
        .operand_b_i (lane_b[i]),
        .operand_c_i (lane_c[i]),
        .operand_d_i (lane_d[i]),
        .operand_e_i (lane_e[i]),
        .op_i, .src_fmt_i, .dst_fmt_i, .rnd_mode_i, .tag_i,
        .in_valid_i  (in_valid_i),
        .in_ready_o  (unit_in_ready[i]),
        .result_o    (unit_result[i]),
        .status_o    (unit_status[i]),
        .tag_o       (unit_tag[i]),
        .out_valid_o (unit_out_valid[i]),
        .out_ready_i (out_ready_i)
      );
    end else begin : gen_narrow
      // 8-to-16 unit; idle for operations with a 32-bit destination
      fp_format_e    n_src_fmt, n_dst_fmt;
      logic [15:0]   n_result;
      assign n_src_fmt = active[i] ? src_fmt_i : FP8;
      assign n_dst_fmt = active[i] ? dst_fmt_i : FP16;
      exsdotp #(.SRC_WIDTH(8), .NUM_PIPE_REGS(NUM_PIPE_REGS)) i_unit (
        .clk_i, .rst_ni,
        .operand_a_i (lane_a[i][15:0]),
        .operand_b_i (lane_b[i][7:0]),
        .operand_c_i (lane_c[i][15:0]),
        .operand_d_i (lane_d[i][7:0]),
        .operand_e_i (lane_e[i][15:0]),
        .op_i,
        .src_fmt_i   (n_src_fmt),
        .dst_fmt_i   (n_dst_fmt),
        .rnd_mode_i, .tag_i,
        .in_valid_i  (in_valid_i),
        .in_ready_o  (unit_in_ready[i]),
        .result_o    (n_result),
        .status_o    (unit_status[i]),
        .tag_o       (unit_tag[i]),
        .out_valid_o (unit_out_valid[i]),
        .out_ready_i (out_ready_i)
      );
      assign unit_result[i] = {16'h0000, n_result};
    end
  end

  // ---------------------------------------------------------------------------
  // Side pipeline with the packing information (same handshake as the units)
  // ---------------------------------------------------------------------------
  meta_t meta_in, meta_out;
  assign meta_in = '{acc: acc, active: active, dst_fmt: dst_fmt_i};

  if (NUM_PIPE_REGS == 0) begin : gen_meta_comb
    assign meta_out = meta_in;
  end else begin : gen_meta_pipe
    meta_t meta_q  [NUM_PIPE_REGS];
    logic  valid_q [NUM_PIPE_REGS];
    logic  ready   [NUM_PIPE_REGS+1];
    logic  v_in    [NUM_PIPE_REGS];
    meta_t d_in    [NUM_PIPE_REGS];
    assign ready[NUM_PIPE_REGS] = out_ready_i;
    assign v_in[0] = in_valid_i;
    assign d_in[0] = meta_in;
    for (genvar s = 1; s < NUM_PIPE_REGS; s++) begin : gen_link
      assign v_in[s] = valid_q[s-1];
      assign d_in[s] = meta_q[s-1];
    end
    for (genvar s = 0; s < NUM_PIPE_REGS; s++) begin : gen_stage
      assign ready[s] = ~valid_q[s] | ready[s+1];
      always_ff @(posedge clk_i or negedge rst_ni) begin
        if (!rst_ni) begin
          valid_q[s] <= 1'b0;
          meta_q[s]  <= '0;
        end else if (ready[s]) begin
          valid_q[s] <= v_in[s];
          if (v_in[s]) meta_q[s] <= d_in[s];
        end
      end
    end
    assign meta_out = meta_q[NUM_PIPE_REGS-1];
  end

  // ---------------------------------------------------------------------------
  // Packing
  // ---------------------------------------------------------------------------
  logic [31:0]       pk_dw;
  logic [2*FLEN-1:0] pk_res;  // one spare register width so every slice is in range

  always_comb begin
    pk_dw    = fmt_width(meta_out.dst_fmt);
    pk_res   = (2*FLEN)'(meta_out.acc);
    status_o = '0;
    for (int unsigned i = 0; i < NUM_LANES; i++) begin
      if (meta_out.active[i]) begin
        case (pk_dw)
          32'd8:   pk_res[8*i +: 8]   = unit_result[i][7:0];
          32'd16:  pk_res[16*i +: 16] = unit_result[i][15:0];
          default: pk_res[32*i +: 32] = unit_result[i];
        endcase
        status_o = status_o | unit_status[i];
      end
    end
    result_o = pk_res[FLEN-1:0];
  end

  assign in_ready_o  = unit_in_ready[0];
  assign out_valid_o = unit_out_valid[0];
  assign tag_o       = unit_tag[0];

  // The four units and the side pipeline move in lockstep.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
    (unit_in_ready == {NUM_LANES{unit_in_ready[0]}}) && (unit_out_valid == {NUM_LANES{unit_out_valid[0]}}));

endmodule
