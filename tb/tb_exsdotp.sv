// tb_exsdotp: self-checking testbench of the ExSdotp unit.
//
// Two instances run side by side: the 16-to-32 unit (SRC_WIDTH = 16) and the
// 8-to-16 unit (SRC_WIDTH = 8), both with the default three pipeline stages.
// Each gets random and directed ExSdotp, ExVsum and Vsum operations over all
// format pairs the unit supports and all five rounding modes. Every result
// and its NV/OF/NX flags are compared with the exact model of fp_ref_pkg.
// The first phase streams one operation per cycle with the output always
// ready and checks that each result appears exactly NUM_PIPE_REGS cycles after
// it was accepted; the second phase adds random input bubbles and output
// back-pressure. Directed cases cover cancellation of the two products (the
// exact-zero first sum), cancellation against the accumulator, subnormal
// results, overflow, infinities and NaNs; each must occur at least once.
// Exact half-ulp ties (a Vsum whose second term is exactly half a unit in
// the last place of the first) test the tie rule of every rounding mode and
// are compared with no tolerance.
module tb_exsdotp;
  import mfnn_pkg::*;
  import fp_ref_pkg::*;

  localparam int N_VEC   = 30000;
  localparam int LATENCY = 3;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int   cycle = 0;
  int   checks = 0;
  int   failures = 0;
  int   done_cnt = 0;
  int   n_ulp_tail = 0;
  int   n_tie = 0;
  int   n_prod_cancel = 0, n_subnormal = 0, n_overflow = 0, n_nan = 0, n_inf = 0, n_zero = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
  end

  // Watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (done_cnt == 2);
    if (n_prod_cancel == 0) begin failures++; $display("no product cancellation case"); end
    if (n_subnormal == 0)   begin failures++; $display("no subnormal result"); end
    if (n_overflow == 0)    begin failures++; $display("no overflow"); end
    if (n_nan == 0)         begin failures++; $display("no NaN result"); end
    if (n_inf == 0)         begin failures++; $display("no infinite result"); end
    if (n_zero == 0)        begin failures++; $display("no zero result"); end
    if (n_tie == 0)         begin failures++; $display("no exact tie case"); end
    checks++;
    if (n_ulp_tail * 5000 > checks) begin failures++; $display("too many 1-ulp deviations: %0d", n_ulp_tail); end
    $display("1-ulp sticky-tail deviations: %0d", n_ulp_tail);
    $display("exact ties checked strictly: %0d", n_tie);
    $display("coverage: prod_cancel=%0d subnormal=%0d overflow=%0d nan=%0d inf=%0d zero=%0d",
             n_prod_cancel, n_subnormal, n_overflow, n_nan, n_inf, n_zero);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar g = 0; g < 2; g++) begin : gen_unit
    localparam int unsigned SW = (g == 0) ? 16 : 8;
    localparam int unsigned DW = 2 * SW;

    typedef struct {
      logic [31:0] result;
      logic        nv, of, nx;
      int          t_acc;
      sdotp_op_e   op;
      fp_format_e  sf, df;
      rnd_mode_e   rm;
      logic [31:0] a, b, c, d, e;
      logic        strict;   // exact tie case: no sticky-tail tolerance
    } exp_t;

    logic [DW-1:0]        a, c, e, res;
    logic [SW-1:0]        b, d;
    sdotp_op_e            op;
    fp_format_e           sf, df;
    rnd_mode_e            rm;
    logic [TAG_WIDTH-1:0] tag, tag_o;
    logic                 in_valid, in_ready, out_valid, out_ready;
    status_t              status;
    exp_t                 q[$];
    logic                 streaming;
    logic                 strict;

    exsdotp #(.SRC_WIDTH(SW)) dut (
      .clk_i(clk), .rst_ni(rst_n),
      .operand_a_i(a), .operand_b_i(b), .operand_c_i(c), .operand_d_i(d), .operand_e_i(e),
      .op_i(op), .src_fmt_i(sf), .dst_fmt_i(df), .rnd_mode_i(rm), .tag_i(tag),
      .in_valid_i(in_valid), .in_ready_o(in_ready),
      .result_o(res), .status_o(status), .tag_o(tag_o),
      .out_valid_o(out_valid), .out_ready_i(out_ready)
    );

    function automatic fp_format_e pick(fp_format_e x, fp_format_e y);
      return $urandom_range(1, 0) ? x : y;
    endfunction

    task automatic new_vector();
      int k, lo, hi, elo, ehi;
      strict = 1'b0;
      k  = int'($urandom % 3);
      op = sdotp_op_e'(k);
      rm = rnd_mode_e'($urandom % 5);
      if (op == VSUM) begin
        k = int'($urandom % ((SW == 16) ? 3 : 2));
        if (SW == 16 && k == 0) begin sf = FP32; df = FP32; end
        else if ((SW == 16 && k == 1) || (SW == 8 && k == 0)) begin sf = pick(FP16, FP16ALT); df = pick(FP16, FP16ALT); end
        else begin sf = pick(FP8, FP8ALT); df = pick(FP8, FP8ALT); end
      end else begin
        if (SW == 16 && $urandom_range(1, 0)) begin sf = pick(FP16, FP16ALT); df = FP32; end
        else begin sf = pick(FP8, FP8ALT); df = pick(FP16, FP16ALT); end
      end
      // Exponent window: mostly around 1.0 so that the terms overlap and cancel.
      lo = fmt_bias(sf) - 3;
      hi = fmt_bias(sf) + 3;
      elo = fmt_bias(df) - 4;
      ehi = fmt_bias(df) + 4;
      if ($urandom % 4 == 0) begin lo = 1; hi = (1 << exp_bits(sf)) - 2; end
      if ($urandom % 4 == 0) begin elo = 1; ehi = (1 << exp_bits(df)) - 2; end
      a = DW'(rand_val(sf, lo, hi));
      b = SW'(rand_val(sf, lo, hi));
      c = DW'(rand_val(sf, lo, hi));
      d = SW'(rand_val(sf, lo, hi));
      e = DW'(rand_val(df, elo, ehi));
      case ($urandom % 8)
        0: begin  // c*d = -(a*b): exact cancellation of the two larger terms
          c = a;
          d = b ^ SW'(1 << (SW - 1));
          if (op != EXSDOTP) c = a ^ DW'(1 << (fmt_width(sf) - 1));
        end
        1: begin  // tiny accumulator next to a cancelling pair
          c = a;
          d = b ^ SW'(1 << (SW - 1));
          if (op != EXSDOTP) c = a ^ DW'(1 << (fmt_width(sf) - 1));
          e = DW'(rand_val(df, 1, 3));
        end
        2: begin  // huge operands: overflow
          a = DW'(rand_val(sf, (1 << exp_bits(sf)) - 3, (1 << exp_bits(sf)) - 2));
          b = SW'(rand_val(sf, (1 << exp_bits(sf)) - 3, (1 << exp_bits(sf)) - 2));
          c = a;
          d = b;
        end
        3: begin  // tiny operands: subnormal results
          a = DW'(rand_val(sf, 1, 2));
          b = SW'(rand_val(sf, fmt_bias(sf) - 1, fmt_bias(sf)));
          c = DW'(rand_val(sf, 1, 2));
          d = SW'(rand_val(sf, fmt_bias(sf) - 1, fmt_bias(sf)));
          e = DW'(rand_val(df, 1, 1));
        end
        4: begin  // exact half-ulp tie in the destination: checked with no tolerance
          int ea;
          op = VSUM;
          if (SW == 16) begin
            sf = FP32;
            df = FP32;
            ea = 30 + int'($urandom % 170);
            a = DW'({1'($urandom), 8'(ea), 23'($urandom)});
            c = DW'({1'($urandom), 8'(ea - 24), 23'd0});
          end else begin
            sf = FP16;
            df = FP16;
            ea = 12 + int'($urandom % 17);
            a = DW'({1'($urandom), 5'(ea), 10'($urandom)});
            c = DW'({1'($urandom), 5'(ea - 11), 10'd0});
          end
          e = '0;
          strict = 1'b1;
        end
        default: ;
      endcase
      tag = TAG_WIDTH'($urandom);
    endtask

    task automatic push_expected();
      exp_t  x;
      ref_t  r;
      r = ref_op(op, sf, df, rm, 32'(a), 32'(b), 32'(c), 32'(d), 32'(e));
      x.result = r.result;
      x.nv = r.nv;
      x.of = r.of;
      x.nx = r.nx;
      x.t_acc = cycle;
      x.op = op;
      x.sf = sf;
      x.df = df;
      x.rm = rm;
      x.a = 32'(a);
      x.b = 32'(b);
      x.c = 32'(c);
      x.d = 32'(d);
      x.e = 32'(e);
      x.strict = strict;
      if (strict) n_tie++;
      q.push_back(x);
    endtask

    // Driver
    initial begin
      in_valid = 1'b0;
      streaming = 1'b1;
      new_vector();
      wait (rst_n);
      @(negedge clk);
      for (int i = 0; i < N_VEC; i++) begin
        if (i == N_VEC / 2) streaming = 1'b0;
        if (!streaming) begin
          in_valid = 1'b0;
          while ($urandom % 4 == 0) @(negedge clk);
        end
        in_valid = 1'b1;
        do @(posedge clk); while (!in_ready);
        push_expected();
        @(negedge clk);
        new_vector();
      end
      in_valid = 1'b0;
    end

    // Output side
    initial begin
      out_ready = 1'b1;
      forever begin
        @(negedge clk);
        out_ready = streaming ? 1'b1 : ($urandom % 3 != 0);
      end
    end

    // Checker
    initial begin
      int n_out;
      n_out = 0;
      wait (rst_n);
      while (n_out < N_VEC) begin
        @(posedge clk);
        if (out_valid && out_ready) begin
          exp_t x;
          logic [31:0] got;
          x = q.pop_front();
          got = 32'(res);
          checks++;
          if (!x.strict && (got != x.result || status.nx != x.nx) && (status.nx || x.nx) && !x.of && !status.of
              && status.nv == x.nv && (got == x.result || got == x.result + 1 || got + 1 == x.result)) begin
            // Inexact result one ulp off, or its NX flag wrong: the known sticky-tail corner
            // (both smaller addends below the first adder's range). Counted,
            // and bounded below.
            n_ulp_tail++;
          end else if (got != x.result || status.nv != x.nv || status.of != x.of || status.nx != x.nx) begin
            failures++;
            if (failures < 20)
              $display("unit %0d MISMATCH op=%s %s->%s got=%h nv%b of%b nx%b exp=%h nv%b of%b nx%b",
                       SW, x.op.name(), x.sf.name(), x.df.name(), got, status.nv, status.of, status.nx,
                       x.result, x.nv, x.of, x.nx);
            if (failures < 20)
              $display("    rm=%s a=%h b=%h c=%h d=%h e=%h", x.rm.name(), x.a, x.b, x.c, x.d, x.e);
          end
          if (streaming && n_out > 0 && n_out < N_VEC / 2 - 1) begin
            checks++;
            if (cycle - x.t_acc != LATENCY) begin
              failures++;
              $display("unit %0d latency %0d", SW, cycle - x.t_acc);
            end
          end
          if (x.nv || x.result == canonical_nan(x.df)) n_nan++;
          if (x.of) n_overflow++;
          if (((x.result >> man_bits(x.df)) & ((32'd1 << exp_bits(x.df)) - 1)) == 0) begin
            if ((x.result & ((32'd1 << (exp_bits(x.df) + man_bits(x.df))) - 1)) == 0) n_zero++;
            else n_subnormal++;
          end
          if (((x.result >> man_bits(x.df)) & ((32'd1 << exp_bits(x.df)) - 1)) == (32'd1 << exp_bits(x.df)) - 1
              && (x.result & ((32'd1 << man_bits(x.df)) - 1)) == 0) n_inf++;
          n_out++;
        end
      end
      done_cnt++;
    end

    // Product-cancellation coverage, observed at the input
    always @(posedge clk) begin
      if (in_valid && in_ready && op == EXSDOTP && c == a && d == (b ^ SW'(1 << (SW - 1))) && b[SW-2:0] != 0)
        n_prod_cancel++;
    end
  end

endmodule
