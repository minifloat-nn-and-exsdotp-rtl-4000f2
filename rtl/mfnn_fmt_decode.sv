// mfnn_fmt_decode: source and destination formats of an SDOTP operation.
//
// The instructions name only the widths: ExSdotp and ExVsum expand from w to
// 2w bits (16 -> 32 or 8 -> 16), Vsum stays at its width (32, 16 or 8). Which
// of the two formats of a width is meant comes from two bits of the FP control
// and status register, src_is_alt and dst_is_alt: FP16 or FP16alt, FP8 or
// FP8alt. FP32 has no alternative. Every combination this decoder produces is
// one of the source/destination pairs the ExSdotp unit supports, so an FP16alt
// kernel differs from an FP16 kernel by a single CSR write.
// Following the paper: the format pairs and the two CSR bits. This design's
// own choice: the dst_width encoding and that an expanding operation asked
// for an 8-bit destination (which does not exist), or an unused op or width
// code, is flagged illegal.
// Purely combinational.
module mfnn_fmt_decode
  import mfnn_pkg::*;
(
  input  sdotp_op_e  op_i,
  input  dst_width_e dst_width_i,
  input  logic       src_is_alt_i,
  input  logic       dst_is_alt_i,
  output fp_format_e src_fmt_o,
  output fp_format_e dst_fmt_o,
  output logic       illegal_o
);

  always_comb begin
    illegal_o = 1'b0;
    src_fmt_o = FP16;
    dst_fmt_o = FP32;
    if (op_i == VSUM) begin
      case (dst_width_i)
        W32: begin
          src_fmt_o = FP32;
          dst_fmt_o = FP32;
        end
        W16: begin
          src_fmt_o = src_is_alt_i ? FP16ALT : FP16;
          dst_fmt_o = dst_is_alt_i ? FP16ALT : FP16;
        end
        default: begin
          src_fmt_o = src_is_alt_i ? FP8ALT : FP8;
          dst_fmt_o = dst_is_alt_i ? FP8ALT : FP8;
        end
      endcase
    end else begin
      case (dst_width_i)
        W32: begin
          src_fmt_o = src_is_alt_i ? FP16ALT : FP16;
          dst_fmt_o = FP32;
        end
        W16: begin
          src_fmt_o = src_is_alt_i ? FP8ALT : FP8;
          dst_fmt_o = dst_is_alt_i ? FP16ALT : FP16;
        end
        default: begin
          src_fmt_o = src_is_alt_i ? FP8ALT : FP8;
          dst_fmt_o = dst_is_alt_i ? FP16ALT : FP16;
          illegal_o = 1'b1;
        end
      endcase
    end
    if (op_i != EXSDOTP && op_i != EXVSUM && op_i != VSUM) illegal_o = 1'b1;
    if (dst_width_i != W8 && dst_width_i != W16 && dst_width_i != W32) illegal_o = 1'b1;
  end

endmodule
