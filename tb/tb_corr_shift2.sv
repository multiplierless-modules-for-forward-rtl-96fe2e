// tb_corr_shift2: exhaustive check of floor(sum / 4) over every 10-bit and
// every 6-bit signed sum.
module tb_corr_shift2;

  import dwt53_ref_pkg::*;

  int checks = 0, failures = 0;

  logic signed [9:0] sum10, q10;
  logic signed [5:0] sum6, q6;

  corr_shift2 #(.W(10)) dut10 (.sum(sum10), .quot(q10));
  corr_shift2 #(.W(6))  dut6  (.sum(sum6),  .quot(q6));

  initial begin
    for (int v = -512; v < 512; v++) begin
      sum10 = 10'(v);
      #1;
      checks++;
      if (int'(q10) != floordiv(v, 4)) begin
        failures++;
        if (failures < 10) $display("FAIL W=10 sum=%0d got %0d", v, q10);
      end
    end
    for (int v = -32; v < 32; v++) begin
      sum6 = 6'(v);
      #1;
      checks++;
      if (int'(q6) != floordiv(v, 4)) begin
        failures++;
        if (failures < 10) $display("FAIL W=6 sum=%0d got %0d", v, q6);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
