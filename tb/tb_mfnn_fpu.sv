// tb_mfnn_fpu: end-to-end self-checking testbench of the extended FPU at its
// full, default size (no parameter overrides).
//
// The ADDMUL, COMP and CAST operation groups are not part of the RTL; this
// testbench models each of them as a behavioural pipeline with a random
// input-ready, a random latency of 1..4 cycles and a simple result function
// (a mix of the operands, the operation code and the group number), so the
// FPU's operand distribution, tag return and round-robin output arbitration
// are exercised with real contention. SDOTP instructions (ExSdotp, ExVsum,
// Vsum on every width and both CSR alt bits) are checked bit-exactly with
// their NV/OF/NX flags against the exact model of fp_ref_pkg; their formats
// are derived here from the width and alt bits on their own, not by the
// decoder under test.
//
// Phase 1 streams SDOTP-only instructions with the output always ready and
// checks the three-cycle SDOTP latency. Phase 2 mixes all four groups with
// random output stalls and input bubbles; results of each group must leave in
// order with the right tag and operation group. Mechanism counters (input
// back-pressure, output stall, arbitration conflict, pointer wrap, CSR mode
// switch, each SDOTP operation, Vsum bypass, overflow, exact product
// cancellation, NaN, illegal decode, results of each group) must all be
// non-zero. The rare documented sticky-tail deviation (one lane one unit in
// the last place off, NX only) is tolerated at a bounded rate and counted.
module tb_mfnn_fpu;
  import mfnn_pkg::*;
  import fp_ref_pkg::*;

  localparam int N_PHASE1 = 1500;
  localparam int N_PHASE2 = 8000;
  localparam int N_TOTAL  = N_PHASE1 + N_PHASE2;
  localparam int LATENCY  = 3;

  typedef struct {
    logic [63:0]          result;
    logic                 nv, of, nx;
    logic [TAG_WIDTH-1:0] tag;
    int                   t_acc;
    logic                 exact;   // SDOTP: compare with the sticky-tail tolerance
  } exp_t;

  typedef struct {
    logic [63:0]          result;
    logic [TAG_WIDTH-1:0] tag;
    int                   t_rdy;
  } ext_item_t;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int   cycle = 0;
  int   checks = 0, failures = 0;

  // mechanism counters
  int n_in_stall = 0, n_out_stall = 0, n_conflict = 0, n_wrap = 0, n_mode_switch = 0;
  int n_vsum = 0, n_exvsum = 0, n_exsdotp = 0, n_overflow = 0, n_cancel = 0, n_nan = 0;
  int n_illegal = 0, n_ulp_tail = 0;
  int n_grp [4] = '{0, 0, 0, 0};

  // DUT signals
  logic [2:0][63:0]            operands;
  opgroup_e                    opgrp;
  sdotp_op_e                   sop;
  dst_width_e                  dwid;
  logic [3:0]                  ext_op;
  rnd_mode_e                   rm;
  logic                        salt, dalt;
  logic [TAG_WIDTH-1:0]        tag;
  logic                        in_valid, in_ready, illegal;
  logic [63:0]                 result;
  status_t                     status;
  logic [TAG_WIDTH-1:0]        tag_o;
  opgroup_e                    opgrp_o;
  logic                        out_valid, out_ready;
  logic [2:0][63:0]            ext_operands;
  logic [3:0]                  ext_op_o;
  rnd_mode_e                   ext_rm;
  logic [TAG_WIDTH-1:0]        ext_tag;
  logic [2:0]                  ext_in_valid, ext_in_ready;
  logic [2:0][63:0]            ext_result;
  status_t [2:0]               ext_status;
  logic [2:0][TAG_WIDTH-1:0]   ext_tag_i;
  logic [2:0]                  ext_out_valid, ext_out_ready;

  exp_t      exp_q [4][$];
  ext_item_t ext_q [3][$];
  logic      phase2 = 1'b0;
  logic      done_issue = 1'b0;
  logic      cur_cancel;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  mfnn_fpu dut (
    .clk_i(clk), .rst_ni(rst_n),
    .operands_i(operands), .opgrp_i(opgrp), .sdotp_op_i(sop), .dst_width_i(dwid), .ext_op_i(ext_op),
    .rnd_mode_i(rm), .src_is_alt_i(salt), .dst_is_alt_i(dalt), .tag_i(tag),
    .in_valid_i(in_valid), .in_ready_o(in_ready), .illegal_o(illegal),
    .result_o(result), .status_o(status), .tag_o(tag_o), .opgrp_o(opgrp_o),
    .out_valid_o(out_valid), .out_ready_i(out_ready),
    .ext_operands_o(ext_operands), .ext_op_o(ext_op_o), .ext_rnd_mode_o(ext_rm), .ext_tag_o(ext_tag),
    .ext_in_valid_o(ext_in_valid), .ext_in_ready_i(ext_in_ready),
    .ext_result_i(ext_result), .ext_status_i(ext_status), .ext_tag_i(ext_tag_i),
    .ext_out_valid_i(ext_out_valid), .ext_out_ready_o(ext_out_ready)
  );

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // Result function of the behavioural external groups.
  function automatic logic [63:0] ext_func(int g, logic [2:0][63:0] ops, logic [3:0] o, rnd_mode_e r);
    return (ops[0] ^ {ops[1][31:0], ops[1][63:32]}) + ops[2] + 64'(o) * 64'h9e37_79b9 + 64'(g) + (64'(r) << 60);
  endfunction

  // ---------------------------------------------------------------------------
  // Behavioural ADDMUL / COMP / CAST groups
  // ---------------------------------------------------------------------------
  always @(posedge clk) begin
    if (rst_n) for (int g = 0; g < 3; g++) begin
      if (ext_out_valid[g] && ext_out_ready[g]) void'(ext_q[g].pop_front());
      if (ext_in_valid[g] && ext_in_ready[g]) begin
        ext_item_t it;
        it.result = ext_func(g, ext_operands, ext_op_o, ext_rm);
        it.tag    = ext_tag;
        it.t_rdy  = cycle + 1 + int'($urandom % 4);
        ext_q[g].push_back(it);
      end
    end
  end

  always @(negedge clk) begin
    for (int g = 0; g < 3; g++) begin
      ext_in_ready[g]  = phase2 ? ($urandom % 5 != 0) : 1'b1;
      ext_out_valid[g] = (ext_q[g].size() > 0) && (ext_q[g][0].t_rdy <= cycle);
      ext_result[g]    = (ext_q[g].size() > 0) ? ext_q[g][0].result : '0;
      ext_tag_i[g]     = (ext_q[g].size() > 0) ? ext_q[g][0].tag : '0;
      ext_status[g]    = '0;
    end
    out_ready = phase2 ? ($urandom % 4 != 0) : 1'b1;
  end

  // ---------------------------------------------------------------------------
  // Instruction generator
  // ---------------------------------------------------------------------------
  function automatic fp_format_e src_of(sdotp_op_e o, dst_width_e w, logic sa);
    if (o == VSUM) return (w == W32) ? FP32 : (w == W16) ? (sa ? FP16ALT : FP16) : (sa ? FP8ALT : FP8);
    return (w == W32) ? (sa ? FP16ALT : FP16) : (sa ? FP8ALT : FP8);
  endfunction

  function automatic fp_format_e dst_of(sdotp_op_e o, dst_width_e w, logic da);
    if (w == W32) return FP32;
    if (o == VSUM && w == W8) return da ? FP8ALT : FP8;
    return da ? FP16ALT : FP16;
  endfunction

  task automatic new_instr(logic sdotp_only);
    fp_format_e sf, df;
    int lo, hi, sw;
    opgrp  = sdotp_only ? OG_SDOTP : opgroup_e'(($urandom % 2) ? 3 : $urandom % 3);
    sop    = sdotp_op_e'($urandom % 3);
    dwid   = (sop == VSUM) ? dst_width_e'($urandom % 3) : dst_width_e'(1 + $urandom % 2);
    ext_op = 4'($urandom);
    rm     = rnd_mode_e'($urandom % 5);
    // the CSR alt bits change now and then, as a kernel switching formats would
    if ($urandom % 8 == 0) salt = ~salt;
    if ($urandom % 8 == 0) dalt = ~dalt;
    tag    = TAG_WIDTH'($urandom);
    sf = src_of(sop, dwid, salt);
    df = dst_of(sop, dwid, dalt);
    lo = fmt_bias(sf) - 3;
    hi = fmt_bias(sf) + 3;
    if ($urandom % 4 == 0) begin lo = 1; hi = (1 << exp_bits(sf)) - 2; end
    operands[0] = rand_reg(sf, lo, hi);
    operands[1] = rand_reg(sf, lo, hi);
    operands[2] = rand_reg(df, fmt_bias(df) - 4, fmt_bias(df) + 4);
    // large accumulators with the same sign as the products push towards overflow
    if ($urandom % 16 == 0) operands[2] = rand_reg(df, (1 << exp_bits(df)) - 3, (1 << exp_bits(df)) - 2);
    // exact product cancellation: c = -a and d = b in every lane, so a*b + c*d = 0
    cur_cancel = 1'b0;
    if (sop == EXSDOTP && $urandom % 8 == 0) begin
      sw = int'(fmt_width(sf));
      for (int i = 0; i < 64 / (2 * sw); i++) begin
        logic [63:0] m;
        m = (64'd1 << sw) - 1;
        operands[0] = (operands[0] & ~(m << (sw * (2 * i + 1))))
                    | ((((operands[0] >> (sw * 2 * i)) & m) ^ (64'd1 << (sw - 1))) << (sw * (2 * i + 1)));
        operands[1] = (operands[1] & ~(m << (sw * (2 * i + 1))))
                    | (((operands[1] >> (sw * 2 * i)) & m) << (sw * (2 * i + 1)));
      end
      cur_cancel = 1'b1;
    end
  endtask

  sdotp_op_e  last_op;
  logic       last_salt, last_dalt;
  logic       have_last = 1'b0;

  initial begin
    in_valid = 1'b0;
    salt = 1'b0;
    dalt = 1'b0;
    new_instr(1'b1);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int i = 0; i < N_TOTAL; i++) begin
      if (i == N_PHASE1) begin
        // drain phase 1 before the mixed phase starts
        in_valid = 1'b0;
        while (exp_q[OG_SDOTP].size() > 0) @(negedge clk);
        phase2 = 1'b1;
        @(negedge clk);
      end
      if (phase2) begin
        in_valid = 1'b0;
        while ($urandom % 5 == 0) @(negedge clk);
        // present an illegal width now and then while not issuing
        if ($urandom % 20 == 0) begin
          sdotp_op_e  so;
          dst_width_e sw;
          so = sop;
          sw = dwid;
          sop  = EXSDOTP;
          dwid = W8;
          #1;
          checks++;
          if (!illegal) begin failures++; $display("FAIL illegal not flagged"); end
          else n_illegal++;
          sop  = so;
          dwid = sw;
          @(negedge clk);
        end
      end
      in_valid = 1'b1;
      #1;
      checks++;
      if (illegal) begin failures++; $display("FAIL legal instruction flagged illegal"); end
      forever begin
        @(posedge clk);
        if (in_ready) break;
        n_in_stall++;
      end
      begin
        exp_t x;
        x.tag   = tag;
        x.t_acc = cycle;
        x.exact = 1'b1;
        if (opgrp == OG_SDOTP) begin
          ref64_t r;
          r = ref_simd(sop, src_of(sop, dwid, salt), dst_of(sop, dwid, dalt), rm,
                       operands[0], operands[1], operands[2]);
          x.result = r.result;
          x.nv = r.nv;
          x.of = r.of;
          x.nx = r.nx;
          x.exact = 1'b0;
          case (sop)
            VSUM:    n_vsum++;
            EXVSUM:  n_exvsum++;
            default: n_exsdotp++;
          endcase
          if (cur_cancel) n_cancel++;
          if (have_last && (salt != last_salt || dalt != last_dalt) && dwid != W32) n_mode_switch++;
          last_op   = sop;
          last_salt = salt;
          last_dalt = dalt;
          have_last = 1'b1;
        end else begin
          x.result = ext_func(int'(opgrp), operands, ext_op, rm);
          x.nv = 0;
          x.of = 0;
          x.nx = 0;
        end
        exp_q[opgrp].push_back(x);
      end
      @(negedge clk);
      new_instr(!phase2);
    end
    in_valid = 1'b0;
    done_issue = 1'b1;
  end

  // ---------------------------------------------------------------------------
  // Result checker
  // ---------------------------------------------------------------------------
  logic [1:0] last_gnt;
  initial last_gnt = '0;

  initial begin
    int n_out;
    n_out = 0;
    wait (rst_n);
    while (n_out < N_TOTAL) begin
      @(posedge clk);
      if ($countones(dut.grp_out_valid) > 1) n_conflict++;
      if (out_valid && !out_ready) n_out_stall++;
      if (out_valid && out_ready) begin
        exp_t x;
        checks++;
        if (exp_q[opgrp_o].size() == 0) begin
          failures++;
          $display("FAIL unexpected result from group %0d", opgrp_o);
        end else begin
          x = exp_q[opgrp_o].pop_front();
          n_grp[opgrp_o]++;
          if (tag_o != x.tag) begin
            failures++;
            $display("FAIL tag group %0d got %h exp %h", opgrp_o, tag_o, x.tag);
          end
          checks++;
          if (result != x.result || status.nv != x.nv || status.of != x.of || status.nx != x.nx) begin
            logic [63:0] dp, dn;
            dp = result - x.result;
            dn = x.result - result;
            if (!x.exact && status.nv == x.nv && status.of == x.of && !x.of && (status.nx | x.nx)
                && ($countones(dp) <= 1 || $countones(dn) == 1)) begin
              n_ulp_tail++;
            end else begin
              failures++;
              if (failures < 10)
                $display("FAIL group %0d got %h exp %h flags %b%b%b exp %b%b%b", opgrp_o, result, x.result,
                         status.nv, status.of, status.nx, x.nv, x.of, x.nx);
            end
          end
          if (opgrp_o == OG_SDOTP && status.of) n_overflow++;
          if (opgrp_o == OG_SDOTP && status.nv) n_nan++;
          if (!phase2 && n_out > 0) begin
            checks++;
            if (cycle - x.t_acc != LATENCY) begin
              failures++;
              $display("FAIL SDOTP latency %0d", cycle - x.t_acc);
            end
          end
        end
        if (int'(opgrp_o) < int'(last_gnt)) n_wrap++;
        last_gnt = opgrp_o;
        n_out++;
      end
    end
    checks++;
    if (n_ulp_tail * 2000 > N_TOTAL) begin failures++; $display("too many sticky-tail deviations"); end
    $display("in_stall=%0d out_stall=%0d conflict=%0d wrap=%0d mode_switch=%0d", n_in_stall, n_out_stall,
             n_conflict, n_wrap, n_mode_switch);
    $display("exsdotp=%0d exvsum=%0d vsum=%0d overflow=%0d cancel=%0d nan=%0d illegal=%0d sticky-tail=%0d",
             n_exsdotp, n_exvsum, n_vsum, n_overflow, n_cancel, n_nan, n_illegal, n_ulp_tail);
    $display("results per group: addmul=%0d comp=%0d cast=%0d sdotp=%0d", n_grp[0], n_grp[1], n_grp[2], n_grp[3]);
    foreach (n_grp[g]) begin
      checks++;
      if (n_grp[g] == 0) begin failures++; $display("FAIL no results from group %0d", g); end
    end
    checks++;
    if (n_in_stall == 0 || n_out_stall == 0 || n_conflict == 0 || n_wrap == 0 || n_mode_switch == 0
        || n_exsdotp == 0 || n_exvsum == 0 || n_vsum == 0 || n_overflow == 0 || n_cancel == 0
        || n_nan == 0 || n_illegal == 0) begin
      failures++;
      $display("FAIL a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
