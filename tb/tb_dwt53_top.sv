// tb_dwt53_top: end-to-end test of the chained forward and inverse
// transform at its default parameters (8-bit samples).
//
// Frames: a 64-sample Gaussian-like signal around 36, a 30-sample signal of
// growing oscillation (a length that is not a power of two), a 256-sample
// full-range line with continuous input, plus random frames with gaps in
// the input. For every frame the coefficient pairs are compared with the
// software reference and the reconstructed stream with the input (lossless:
// zero error). Each mechanism of the design must occur at least once:
// input stalls, negative update sums (the correction path), even and odd
// selections of the merge multiplexer, flush pairs made from the zero tail,
// and the frame reset. The last sample of the 256-sample line must leave at
// most N + 10 cycles after the first one entered.
module tb_dwt53_top;

  import dwt53_ref_pkg::*;

  localparam int FLUSH = 8;   // 7 suffice for even frame lengths, 8 for odd

  logic clk = 1'b0;
  logic rst;
  logic in_valid;
  logic [7:0] in_sample;
  logic coef_valid;
  logic signed [9:0] coef_s;
  logic signed [8:0] coef_d;
  logic rec_valid;
  logic [7:0] rec_sample;
  logic rec_odd;

  int checks = 0, failures = 0;
  int cycle;
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  dwt53_top dut (.*);

  // mechanism counters
  int n_stall = 0, n_neg_update = 0, n_even_out = 0, n_odd_out = 0;
  int n_flush_pairs = 0, n_frame_reset = 0;

  int_q_t x, sref, dref;
  int got_pairs, got_samples, frame_len;
  int first_in_cycle, last_out_cycle;

  task automatic check(input string what, input int got_v, input int exp);
    checks++;
    if (got_v != exp) begin
      failures++;
      if (failures < 12) $display("FAIL %s: got %0d expected %0d", what, got_v, exp);
    end
  endtask

  always @(posedge clk) begin
    if (!rst && coef_valid) begin
      if (got_pairs < sref.size()) begin
        check($sformatf("s[%0d]", got_pairs), int'(coef_s), sref[got_pairs]);
        check($sformatf("d[%0d]", got_pairs), int'(coef_d), dref[got_pairs]);
        if (2*got_pairs + 1 >= frame_len) n_flush_pairs++;
      end
      got_pairs++;
    end
    if (!rst && rec_valid) begin
      if (got_samples < frame_len) begin
        check($sformatf("rec x[%0d]", got_samples), int'(rec_sample), x[got_samples]);
        check("rec parity", int'(rec_odd), got_samples % 2);
      end else begin
        check("zero tail", int'(rec_sample), 0);
      end
      if (rec_odd) n_odd_out++; else n_even_out++;
      if (got_samples == frame_len - 1) last_out_cycle = cycle;
      got_samples++;
    end
  end

  task automatic run_frame(input bit gaps);
    int npairs;
    frame_len = x.size();
    npairs = (frame_len + FLUSH - 5) / 2 + 1;
    forward(x, npairs, sref, dref);
    for (int n = 0; n < npairs; n++)
      if (dref[n] + (n > 0 ? dref[n-1] : 0) < 0) n_neg_update++;
    rst = 1'b1; in_valid = 1'b0;
    @(posedge clk); #1;
    rst = 1'b0;
    n_frame_reset++;
    got_pairs = 0; got_samples = 0;
    for (int i = 0; i < frame_len + FLUSH; i++) begin
      if (gaps) while ($urandom_range(0, 3) == 0) begin
        in_valid = 1'b0; n_stall++;
        @(posedge clk); #1;
      end
      in_valid  = 1'b1;
      in_sample = (i < frame_len) ? 8'(x[i]) : 8'd0;
      @(posedge clk);
      if (i == 0) first_in_cycle = cycle;
      #1;
    end
    in_valid = 1'b0;
    repeat (6) @(posedge clk);
    #1;
    check("all samples rebuilt", int'(got_samples >= frame_len), 1);
  endtask

  initial begin
    cycle = 0;
    rst = 1'b1; in_valid = 1'b0; in_sample = '0;
    got_pairs = 0; got_samples = 0; frame_len = 0;
    repeat (2) @(posedge clk);

    // 64 samples, Gaussian-like around 36
    x = {};
    for (int i = 0; i < 64; i++) x.push_back(normal_sample(36, 2, 255));
    run_frame(1'b0);

    // 30 samples, oscillation of growing amplitude around 30
    x = {};
    for (int i = 0; i < 30; i++)
      x.push_back(30 + int'($floor((2.0 + i) * $sin(1.3 * i))));
    run_frame(1'b1);

    // 256-sample line, full 8-bit range, continuous input; timed
    x = {};
    for (int i = 0; i < 256; i++) x.push_back(int'($urandom_range(0, 255)));
    run_frame(1'b0);
    $display("256-sample line: %0d cycles from first input to last rebuilt sample (%0d ns at 100 MHz)",
             last_out_cycle - first_in_cycle + 1, 10 * (last_out_cycle - first_in_cycle + 1));
    check("256-sample line within N+10 cycles",
          int'(last_out_cycle - first_in_cycle + 1 <= 256 + 10), 1);

    for (int r = 0; r < 10; r++) begin
      int n;
      n = 2 + int'($urandom_range(0, 70));
      x = {};
      for (int i = 0; i < n; i++) x.push_back(int'($urandom_range(0, 255)));
      run_frame(1'b1);
    end

    $display("mechanisms: stalls=%0d negative_update_sums=%0d even_out=%0d odd_out=%0d flush_pairs=%0d frame_resets=%0d",
             n_stall, n_neg_update, n_even_out, n_odd_out, n_flush_pairs, n_frame_reset);
    check("stall seen",             int'(n_stall > 0), 1);
    check("negative update seen",   int'(n_neg_update > 0), 1);
    check("even merge seen",        int'(n_even_out > 0), 1);
    check("odd merge seen",         int'(n_odd_out > 0), 1);
    check("flush pair seen",        int'(n_flush_pairs > 0), 1);
    check("frame reset seen",       int'(n_frame_reset > 1), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
