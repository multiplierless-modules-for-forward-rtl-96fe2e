// tb_dwt53_fwd: forward transform against the software reference.
// Frames of several lengths and kinds (narrow Gaussian-like values, full
// range random, extreme alternation), each followed by zero flush samples,
// with and without gaps in in_valid. Checks every coefficient pair, their
// count, that pair n appears exactly one cycle after sample 2n+4 was
// accepted, and the rate of one pair per two samples with continuous input.
module tb_dwt53_fwd;

  import dwt53_ref_pkg::*;

  localparam int SW_ = 8;   // sample width
  localparam int FLUSH = 5;

  logic clk = 1'b0;
  logic rst;
  logic in_valid;
  logic [SW_-1:0] in_sample;
  logic out_valid;
  logic signed [SW_+1:0] out_s;
  logic signed [SW_:0]   out_d;

  int checks = 0, failures = 0;
  int neg_updates = 0;

  always #5 clk = ~clk;

  dwt53_fwd #(.SAMPLE_W(SW_)) dut (.*);

  int_q_t x, sref, dref;
  int got_pairs;
  int acc_count;          // samples accepted in this frame
  int acc_cycle[$];       // cycle number of each accepted sample
  int cycle;

  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 12) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // Monitor: compare each pair as it appears.
  always @(posedge clk) begin
    if (!rst && out_valid) begin
      if (got_pairs < sref.size()) begin
        check($sformatf("s[%0d]", got_pairs), int'(out_s), sref[got_pairs]);
        check($sformatf("d[%0d]", got_pairs), int'(out_d), dref[got_pairs]);
        if (got_pairs > 0 && dref[got_pairs] + dref[got_pairs-1] < 0) neg_updates++;
        // latency: one cycle after sample 2n+4 was accepted
        check($sformatf("latency of pair %0d", got_pairs),
              cycle - acc_cycle[2*got_pairs+4], 1);
      end else begin
        checks++; failures++;
        $display("FAIL unexpected extra pair");
      end
      got_pairs++;
    end
  end

  task automatic run_frame(input int kind, input int n, input bit gaps);
    int total;
    int npairs;
    x = {};
    for (int i = 0; i < n; i++) begin
      case (kind)
        0: x.push_back(normal_sample(36, 2, 255));            // narrow, as a test signal
        1: x.push_back(int'($urandom_range(0, 255)));          // full range
        default: x.push_back((i % 2 == 0) ? 0 : 255);          // extreme alternation
      endcase
    end
    // pairs emitted: one per accepted sample index 2k+4 <= n+FLUSH-1
    npairs = (n + FLUSH - 1 - 4) / 2 + 1;
    forward(x, npairs, sref, dref);
    // reset between frames
    rst = 1'b1; in_valid = 1'b0;
    @(posedge clk); #1;
    rst = 1'b0;
    got_pairs = 0; acc_cycle = {};
    total = n + FLUSH;
    for (int i = 0; i < total; i++) begin
      if (gaps) while ($urandom_range(0, 2) == 0) begin
        in_valid = 1'b0; @(posedge clk); #1;
      end
      in_valid  = 1'b1;
      in_sample = (i < n) ? SW_'(x[i]) : '0;
      @(posedge clk);
      acc_cycle.push_back(cycle);
      #1;
    end
    in_valid = 1'b0;
    repeat (3) @(posedge clk);
    #1;
    check("pair count", got_pairs, npairs);
  endtask

  int first_cyc, last_cyc;

  initial begin
    cycle = 0;
    rst = 1'b1; in_valid = 1'b0; in_sample = '0;
    got_pairs = 0;
    repeat (2) @(posedge clk);
    run_frame(0, 64, 1'b0);   // 64-sample frame, continuous
    // rate: continuous input gives a pair every second cycle
    check("rate", acc_cycle[acc_cycle.size()-1] - acc_cycle[0], 64 + FLUSH - 1);
    run_frame(0, 64, 1'b1);
    run_frame(1, 30, 1'b0);
    run_frame(1, 256, 1'b1);
    run_frame(2, 40, 1'b0);
    run_frame(1, 31, 1'b1);   // odd length
    for (int r = 0; r < 20; r++) run_frame(1, 2 + int'($urandom_range(0, 60)), r[0]);
    check("negative update sums seen", int'(neg_updates > 0), 1);
    $display("negative update sums: %0d", neg_updates);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
