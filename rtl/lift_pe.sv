// lift_pe: the basic processing element of the lifting modules.
//
// A chain  R1 -> D^n -> R2 -> D^m -> R3  of signed W-bit registers that all
// shift when `en` is high, plus one adder that sums R1 and R2:
//   out1 = R1 + R2   (W+1 bits, combinational from the registers)
//   out2 = R3
// With N_DLY = n and M_DLY = m, after k shifts R1 holds x[k-1], R2 holds
// x[k-2-n] and R3 holds x[k-3-n-m]; so out1 adds two samples n+1 shifts
// apart and out2 is a copy of the stream delayed to line up with later
// arithmetic. `mid` is the value about to enter R2 (the output of D^n, or
// R1 itself when n = 0); the analysis module reads the middle sample of its
// three-sample window there. `q1` is R1 itself, the newest value.
//
// The chain R-D^n-R-D^m-R with one adder and the two outputs follow the
// processing element of the paper. The `mid` and `q1` taps, the shift enable, the
// synchronous reset to zero and the registered (not programmable at run
// time) delay lengths are this design's choices.
module lift_pe #(
  parameter int unsigned W     = 9,  // data width, signed
  parameter int unsigned N_DLY = 1,  // length of D^n in register stages
  parameter int unsigned M_DLY = 0   // length of D^m in register stages
) (
  input  logic                clk,
  input  logic                rst,   // synchronous, clears every stage
  input  logic                en,    // shift the chain by one sample
  input  logic signed [W-1:0] din,
  output logic signed [W:0]   out1,  // R1 + R2
  output logic signed [W-1:0] out2,  // R3
  output logic signed [W-1:0] mid,   // output of D^n (input of R2)
  output logic signed [W-1:0] q1     // R1
);

  logic signed [W-1:0] r1, r2, r3;
  logic signed [W-1:0] dn_out, dm_out;

  always_ff @(posedge clk) begin
    if (rst) begin
      r1 <= '0;
      r2 <= '0;
      r3 <= '0;
    end else if (en) begin
      r1 <= din;
      r2 <= dn_out;
      r3 <= dm_out;
    end
  end

  // D^n: N_DLY extra register stages between R1 and R2.
  if (N_DLY == 0) begin : g_dn_none
    assign dn_out = r1;
  end else begin : g_dn
    logic signed [W-1:0] dn [N_DLY];
    always_ff @(posedge clk) begin
      if (rst) begin
        for (int i = 0; i < int'(N_DLY); i++) dn[i] <= '0;
      end else if (en) begin
        dn[0] <= r1;
        for (int i = 1; i < int'(N_DLY); i++) dn[i] <= dn[i-1];
      end
    end
    assign dn_out = dn[N_DLY-1];
  end

  // D^m: M_DLY extra register stages between R2 and R3.
  if (M_DLY == 0) begin : g_dm_none
    assign dm_out = r2;
  end else begin : g_dm
    logic signed [W-1:0] dm [M_DLY];
    always_ff @(posedge clk) begin
      if (rst) begin
        for (int i = 0; i < int'(M_DLY); i++) dm[i] <= '0;
      end else if (en) begin
        dm[0] <= r2;
        for (int i = 1; i < int'(M_DLY); i++) dm[i] <= dm[i-1];
      end
    end
    assign dm_out = dm[M_DLY-1];
  end

  assign out1 = (W+1)'(r1) + (W+1)'(r2);
  assign out2 = r3;
  assign mid  = dn_out;
  assign q1   = r1;

endmodule
