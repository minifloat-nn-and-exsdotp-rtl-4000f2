// tb_mfnn_fmt_decode: exhaustive self-checking test of the SDOTP format
// decoder.
//
// Every combination of operation code, destination-width code and the two
// CSR alt bits is applied. The expected formats come from a table written
// out per instruction (ExSdotp/ExVsum: FP16[alt] -> FP32, FP8[alt] ->
// FP16[alt]; Vsum: FP32, FP16[alt], FP8[alt]), not from the decoder's
// structure. Unused op/width codes and expanding operations with an 8-bit
// destination must raise illegal. The decoder is combinational: each check
// is made 1 ns after the inputs change. Ends with a TB_RESULT line.
module tb_mfnn_fmt_decode;
  import mfnn_pkg::*;

  sdotp_op_e  op;
  dst_width_e dw;
  logic       salt, dalt;
  fp_format_e sf, df;
  logic       ill;
  int         checks = 0, failures = 0;
  int         n_illegal = 0, n_alt_switch = 0;

  mfnn_fmt_decode dut (
    .op_i(op), .dst_width_i(dw), .src_is_alt_i(salt), .dst_is_alt_i(dalt),
    .src_fmt_o(sf), .dst_fmt_o(df), .illegal_o(ill)
  );

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $display("watchdog expired");
    $finish;
  end

  task automatic expect_fmt(fp_format_e esf, fp_format_e edf, logic eill);
    checks++;
    if (ill !== eill) begin
      failures++;
      $display("FAIL op=%0d w=%0d alt=%b%b illegal=%b exp %b", op, dw, salt, dalt, ill, eill);
    end
    if (!eill && (sf !== esf || df !== edf)) begin
      failures++;
      $display("FAIL op=%0d w=%0d alt=%b%b fmt=%s->%s exp %s->%s", op, dw, salt, dalt,
               sf.name(), df.name(), esf.name(), edf.name());
    end
  endtask

  initial begin
    fp_format_e prev_sf;
    prev_sf = FP32;
    for (int o = 0; o < 4; o++)
      for (int w = 0; w < 4; w++)
        for (int a = 0; a < 4; a++) begin
          op   = sdotp_op_e'(o);
          dw   = dst_width_e'(w);
          salt = a[0];
          dalt = a[1];
          #1;
          if (o == 3 || w == 3) begin
            expect_fmt(FP32, FP32, 1'b1);
          end else if (o == int'(VSUM)) begin
            case (w)
              int'(W32): expect_fmt(FP32, FP32, 1'b0);
              int'(W16): expect_fmt(salt ? FP16ALT : FP16, dalt ? FP16ALT : FP16, 1'b0);
              default:   expect_fmt(salt ? FP8ALT : FP8, dalt ? FP8ALT : FP8, 1'b0);
            endcase
          end else begin
            case (w)
              int'(W32): expect_fmt(salt ? FP16ALT : FP16, FP32, 1'b0);
              int'(W16): expect_fmt(salt ? FP8ALT : FP8, dalt ? FP16ALT : FP16, 1'b0);
              default:   expect_fmt(FP32, FP32, 1'b1);
            endcase
          end
          if (ill) n_illegal++;
          if (!ill && sf != prev_sf) n_alt_switch++;
          if (!ill) prev_sf = sf;
        end
    $display("illegal=%0d format_switches=%0d", n_illegal, n_alt_switch);
    if (n_illegal == 0 || n_alt_switch == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
