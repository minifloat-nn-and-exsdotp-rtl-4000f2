// tb_mfnn_rr_arbiter: self-checking test of the round-robin output arbiter
// at N = 4 (the number of FPU operation groups).
//
// Random request patterns and random downstream stalls are applied for
// 20000 cycles. A model keeps its own priority pointer and predicts the
// grant every cycle: the first requester at or after the pointer, with the
// pointer moving past the granted requester only on a completed handshake.
// Also checked: grant one-hot and only to requesters, valid equals "some
// request", and fairness (a requester that keeps asking is served within N
// handshakes). Counted mechanisms: conflicts (more than one request),
// stalls, wrap-arounds of the pointer; each must be non-zero.
module tb_mfnn_rr_arbiter;
  localparam int N = 4;

  logic         clk = 0, rst_n = 0;
  logic [N-1:0] req, gnt;
  logic [1:0]   idx;
  logic         ready, valid;
  int           checks = 0, failures = 0;
  int           n_conflict = 0, n_stall = 0, n_wrap = 0;
  int           ptr;
  int           wait_cnt [N];

  mfnn_rr_arbiter #(.N(N)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .ready_i(ready),
    .gnt_o(gnt), .idx_o(idx), .valid_o(valid)
  );

  always #5 clk = ~clk;

  initial begin
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int exp_idx;
    req   = '0;
    ready = 1'b0;
    ptr   = 0;
    for (int i = 0; i < N; i++) wait_cnt[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      @(negedge clk);
      // Hold some requesters high for long stretches so fairness is tested.
      for (int i = 0; i < N; i++)
        if ($urandom % 8 == 0) req[i] = ~req[i];
      if (cyc % 500 < 50) req = '1;
      ready = ($urandom % 4) != 0;
      #1;
      exp_idx = -1;
      for (int k = 0; k < N; k++)
        if (exp_idx < 0 && req[(ptr + k) % N]) exp_idx = (ptr + k) % N;
      checks++;
      if (valid !== (req != '0)) begin
        failures++;
        $display("FAIL cyc %0d valid=%b req=%b", cyc, valid, req);
      end
      if (exp_idx >= 0) begin
        if (gnt !== (N'(1) << exp_idx) || int'(idx) != exp_idx) begin
          failures++;
          $display("FAIL cyc %0d req=%b ptr=%0d gnt=%b idx=%0d exp %0d", cyc, req, ptr, gnt, idx, exp_idx);
        end
      end else if (gnt !== '0) begin
        failures++;
        $display("FAIL cyc %0d grant without request", cyc);
      end
      if ($countones(req) > 1) n_conflict++;
      if (valid && !ready) n_stall++;
      if (valid && ready) begin
        for (int i = 0; i < N; i++) begin
          if (i == exp_idx || !req[i]) wait_cnt[i] = 0;
          else wait_cnt[i]++;
          if (wait_cnt[i] >= N) begin
            failures++;
            $display("FAIL cyc %0d requester %0d starved", cyc, i);
          end
        end
        if ((exp_idx + 1) % N < ptr) n_wrap++;
        ptr = (exp_idx + 1) % N;
      end
    end
    $display("conflicts=%0d stalls=%0d wraps=%0d", n_conflict, n_stall, n_wrap);
    if (n_conflict == 0 || n_stall == 0 || n_wrap == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
