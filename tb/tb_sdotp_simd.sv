// tb_sdotp_simd: self-checking testbench of the SDOTP operation group.
//
// Random packed registers are sent through all operation/format combinations
// (ExSdotp and ExVsum FP16/FP16alt -> FP32 and FP8/FP8alt -> FP16/FP16alt,
// Vsum on FP32, FP16/FP16alt and FP8/FP8alt) and all rounding modes. Each
// 64-bit result, with its NV/OF/NX flags, is compared with a lane-by-lane
// evaluation of the exact model in fp_ref_pkg, which unpacks and packs the
// registers on its own. The first half streams one instruction per cycle
// with the output always ready and checks the latency of three cycles; the
// second half adds input bubbles and output stalls. The tag must come back
// with its result.
module tb_sdotp_simd;
  import mfnn_pkg::*;
  import fp_ref_pkg::*;

  localparam int N_VEC   = 6000;
  localparam int LATENCY = 3;

  typedef struct {
    ref64_t              r;
    int                  t_acc;
    logic [TAG_WIDTH-1:0] tag;
    sdotp_op_e           op;
    fp_format_e          sf, df;
    rnd_mode_e           rm;
    logic [63:0]         rs1, rs2, acc;
  } exp_t;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int   cycle = 0;
  int   checks = 0;
  int   failures = 0;
  int   n_ulp_tail = 0, n_stall = 0;
  int   n_op [3] = '{0, 0, 0};

  logic [2:0][63:0]     operands;
  sdotp_op_e            op;
  fp_format_e           sf, df;
  rnd_mode_e            rm;
  logic [TAG_WIDTH-1:0] tag, tag_o;
  logic                 in_valid, in_ready, out_valid, out_ready;
  logic [63:0]          result;
  status_t              status;
  exp_t                 q[$];
  logic                 streaming;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  sdotp_simd dut (
    .clk_i(clk), .rst_ni(rst_n), .operands_i(operands), .op_i(op), .src_fmt_i(sf), .dst_fmt_i(df),
    .rnd_mode_i(rm), .tag_i(tag), .in_valid_i(in_valid), .in_ready_o(in_ready),
    .result_o(result), .status_o(status), .tag_o(tag_o), .out_valid_o(out_valid), .out_ready_i(out_ready)
  );

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fp_format_e pick(fp_format_e x, fp_format_e y);
    return $urandom_range(1, 0) ? x : y;
  endfunction

  task automatic new_vector();
    int k, lo, hi;
    op = sdotp_op_e'($urandom % 3);
    rm = rnd_mode_e'($urandom % 5);
    k  = int'($urandom % 3);
    if (op == VSUM) begin
      if (k == 0)      begin sf = FP32; df = FP32; end
      else if (k == 1) begin sf = pick(FP16, FP16ALT); df = pick(FP16, FP16ALT); end
      else             begin sf = pick(FP8, FP8ALT); df = pick(FP8, FP8ALT); end
    end else begin
      if (k == 0) begin sf = pick(FP16, FP16ALT); df = FP32; end
      else        begin sf = pick(FP8, FP8ALT); df = pick(FP16, FP16ALT); end
    end
    lo = fmt_bias(sf) - 3;
    hi = fmt_bias(sf) + 3;
    if ($urandom % 4 == 0) begin lo = 1; hi = (1 << exp_bits(sf)) - 2; end
    operands[0] = rand_reg(sf, lo, hi);
    operands[1] = rand_reg(sf, lo, hi);
    operands[2] = rand_reg(df, fmt_bias(df) - 4, fmt_bias(df) + 4);
    tag = TAG_WIDTH'($urandom);
  endtask

  initial begin
    in_valid = 1'b0;
    streaming = 1'b1;
    new_vector();
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int i = 0; i < N_VEC; i++) begin
      if (i == N_VEC / 2) streaming = 1'b0;
      if (!streaming) begin
        in_valid = 1'b0;
        while ($urandom % 4 == 0) @(negedge clk);
      end
      in_valid = 1'b1;
      do @(posedge clk); while (!in_ready);
      begin
        exp_t x;
        x.r = ref_simd(op, sf, df, rm, operands[0], operands[1], operands[2]);
        x.t_acc = cycle;
        x.tag = tag;
        x.op = op;
        x.sf = sf;
        x.df = df;
        x.rm = rm;
        x.rs1 = operands[0];
        x.rs2 = operands[1];
        x.acc = operands[2];
        q.push_back(x);
        n_op[op]++;
      end
      @(negedge clk);
      new_vector();
    end
    in_valid = 1'b0;
  end

  initial begin
    out_ready = 1'b1;
    forever begin
      @(negedge clk);
      out_ready = streaming ? 1'b1 : ($urandom % 3 != 0);
    end
  end

  initial begin
    int n_out;
    n_out = 0;
    wait (rst_n);
    while (n_out < N_VEC) begin
      @(posedge clk);
      if (out_valid && !out_ready) n_stall++;
      if (out_valid && out_ready) begin
        exp_t x;
        x = q.pop_front();
        checks++;
        if (result != x.r.result || status.nv != x.r.nv || status.of != x.r.of || status.nx != x.r.nx) begin
          // tolerate the documented one-ulp / NX sticky-tail corner in one lane
          // (one lane off by one unit in its last place: the difference is +-2^k)
          logic [63:0] dp, dn;
          dp = result - x.r.result;
          dn = x.r.result - result;
          if (status.nv == x.r.nv && status.of == x.r.of && !x.r.of && (status.nx | x.r.nx)
              && ($countones(dp) <= 1 || $countones(dn) == 1)) begin
            n_ulp_tail++;
          end else begin
            failures++;
            if (failures < 10)
              $display("MISMATCH %s %s->%s %s rs1=%h rs2=%h acc=%h got=%h exp=%h flags got %b%b%b exp %b%b%b",
                       x.op.name(), x.sf.name(), x.df.name(), x.rm.name(), x.rs1, x.rs2, x.acc, result, x.r.result,
                       status.nv, status.of, status.nx, x.r.nv, x.r.of, x.r.nx);
          end
        end
        checks++;
        if (tag_o != x.tag) begin
          failures++;
          $display("tag mismatch");
        end
        if (streaming && n_out > 0 && n_out < N_VEC / 2 - 1) begin
          checks++;
          if (cycle - x.t_acc != LATENCY) begin
            failures++;
            $display("latency %0d", cycle - x.t_acc);
          end
        end
        n_out++;
      end
    end
    checks++;
    if (n_ulp_tail * 2000 > N_VEC) begin failures++; $display("too many sticky-tail deviations %0d", n_ulp_tail); end
    for (int i = 0; i < 3; i++) begin
      checks++;
      if (n_op[i] == 0) begin failures++; $display("op %0d never issued", i); end
    end
    checks++;
    if (n_stall == 0) begin failures++; $display("no output stall"); end
    $display("ops: exsdotp=%0d exvsum=%0d vsum=%0d stalls=%0d sticky-tail=%0d", n_op[0], n_op[1], n_op[2], n_stall, n_ulp_tail);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
