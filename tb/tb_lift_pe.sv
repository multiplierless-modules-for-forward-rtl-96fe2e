// tb_lift_pe: checks the processing element against a software history of
// the shifted samples, for the delay settings the modules use and one with
// longer delays. Random data, random shift enables.
module tb_lift_pe;

  localparam int W = 9;

  logic clk = 1'b0;
  logic rst;
  logic en;
  logic signed [W-1:0] din;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  // Three instances: (n, m) = (1, 0), (0, 0), (2, 3)
  logic signed [W:0]   o1_a, o1_b, o1_c;
  logic signed [W-1:0] o2_a, o2_b, o2_c, mid_a, mid_b, mid_c, q1_a, q1_b, q1_c;

  lift_pe #(.W(W), .N_DLY(1), .M_DLY(0)) dut_a (.clk, .rst, .en, .din,
    .out1(o1_a), .out2(o2_a), .mid(mid_a), .q1(q1_a));
  lift_pe #(.W(W), .N_DLY(0), .M_DLY(0)) dut_b (.clk, .rst, .en, .din,
    .out1(o1_b), .out2(o2_b), .mid(mid_b), .q1(q1_b));
  lift_pe #(.W(W), .N_DLY(2), .M_DLY(3)) dut_c (.clk, .rst, .en, .din,
    .out1(o1_c), .out2(o2_c), .mid(mid_c), .q1(q1_c));

  int hist[$];   // every shifted-in value, newest last

  function automatic int past(input int k);  // value shifted in k shifts ago (0 = newest)
    if (k >= hist.size()) return 0;
    return hist[hist.size()-1-k];
  endfunction

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic check_pe(input string nm, input int n, input int m,
                          input int o1, input int o2, input int md, input int q);
    check({nm, ".out1"}, o1, past(0) + past(1 + n));
    check({nm, ".out2"}, o2, past(2 + n + m));
    check({nm, ".mid"},  md, past(n));
    check({nm, ".q1"},   q,  past(0));
  endtask

  initial begin
    rst = 1'b1; en = 1'b0; din = '0;
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      en  = ($urandom_range(0, 3) != 0);
      din = W'($urandom);
      @(posedge clk);
      if (en) hist.push_back(int'(din));
      #1;
      check_pe("a", 1, 0, int'(o1_a), int'(o2_a), int'(mid_a), int'(q1_a));
      check_pe("b", 0, 0, int'(o1_b), int'(o2_b), int'(mid_b), int'(q1_b));
      check_pe("c", 2, 3, int'(o1_c), int'(o2_c), int'(mid_c), int'(q1_c));
    end
    // reset clears the chain
    rst = 1'b1; @(posedge clk); #1 rst = 1'b0;
    hist = {};
    check_pe("c", 2, 3, int'(o1_c), int'(o2_c), int'(mid_c), int'(q1_c));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
