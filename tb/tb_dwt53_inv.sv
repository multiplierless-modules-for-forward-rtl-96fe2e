// tb_dwt53_inv: reconstruction from coefficient pairs computed by the
// software reference. The pairs are offered with random gaps and with
// in_valid held high (back to back); the output must equal the original
// frame sample by sample, with the correct even/odd flag, one sample per
// cycle when the pairs come back to back, and the even sample of pair n one
// cycle after pair n+2 was accepted.
module tb_dwt53_inv;

  import dwt53_ref_pkg::*;

  localparam int SW_ = 8;

  logic clk = 1'b0;
  logic rst;
  logic in_valid, in_ready;
  logic signed [SW_+1:0] in_s;
  logic signed [SW_:0]   in_d;
  logic out_valid;
  logic [SW_-1:0] out_sample;
  logic out_odd;

  int checks = 0, failures = 0;
  int cycle;
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  dwt53_inv #(.SAMPLE_W(SW_)) dut (.*);

  int_q_t x, sref, dref;
  int got;             // samples received in this frame
  int acc_cycle[$];    // cycle of each accepted pair
  int first_out, last_out;

  task automatic check(input string what, input int got_v, input int exp);
    checks++;
    if (got_v != exp) begin
      failures++;
      if (failures < 12) $display("FAIL %s: got %0d expected %0d", what, got_v, exp);
    end
  endtask

  always @(posedge clk) begin
    if (!rst && out_valid) begin
      if (got < x.size()) begin
        check($sformatf("x[%0d]", got), int'(out_sample), x[got]);
        check($sformatf("odd flag %0d", got), int'(out_odd), got % 2);
        if (got % 2 == 0)
          check($sformatf("latency of pair %0d", got/2), cycle - acc_cycle[got/2 + 2], 1);
      end
      if (got == 0) first_out = cycle;
      last_out = cycle;
      got++;
    end
  end

  task automatic run_frame(input int kind, input int n, input bit gaps, input bit check_rate);
    int npairs;
    x = {};
    for (int i = 0; i < n; i++)
      x.push_back(kind == 0 ? normal_sample(36, 2, 255) : int'($urandom_range(0, 255)));
    // pairs 0 .. n/2 describe the frame; two more flush the last odd sample
    npairs = (n + 1) / 2 + 3;
    forward(x, npairs, sref, dref);
    rst = 1'b1; in_valid = 1'b0;
    @(posedge clk); #1;
    rst = 1'b0;
    got = 0; acc_cycle = {};
    for (int k = 0; k < npairs; k++) begin
      if (gaps) while ($urandom_range(0, 2) == 0) begin
        in_valid = 1'b0; @(posedge clk); #1;
      end
      in_valid = 1'b1;
      in_s = (SW_+2)'(sref[k]);
      in_d = (SW_+1)'(dref[k]);
      forever begin
        bit ready_now;
        ready_now = in_ready;   // in_ready depends on state only
        @(posedge clk);
        if (ready_now) break;
        #1;
      end
      acc_cycle.push_back(cycle);
      #1;
    end
    in_valid = 1'b0;
    repeat (4) @(posedge clk);
    #1;
    // the frame plus the zero samples the flush pairs describe
    check("sample count", int'(got >= n), 1);
    if (check_rate) check("one sample per cycle", last_out - first_out, got - 1);
  endtask

  initial begin
    cycle = 0;
    rst = 1'b1; in_valid = 1'b0; in_s = '0; in_d = '0; got = 0;
    first_out = 0; last_out = 0;
    repeat (2) @(posedge clk);
    run_frame(0, 64, 1'b0, 1'b1);
    run_frame(0, 64, 1'b1, 1'b0);
    run_frame(1, 30, 1'b0, 1'b1);
    run_frame(1, 256, 1'b1, 1'b0);
    run_frame(1, 31, 1'b0, 1'b0);
    for (int r = 0; r < 20; r++) run_frame(1, 2 + int'($urandom_range(0, 60)), r[0], 1'b0);
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
