// dwt53_top: analysis and reconstruction modules of the 5/3 integer lifting
// wavelet transform, chained for a lossless round trip.
//
// Samples enter dwt53_fwd one per accepted cycle; its coefficient pairs
// (s[n], d[n]) are both brought out and fed straight into dwt53_inv, which
// rebuilds the original samples in order on rec_sample. With integer
// lifting the reconstruction equals the input exactly. Latency: the sample
// with index i leaves rec_sample in the cycles after input sample i + 8
// (even i) or i + 7 (odd i) has been accepted, about ten cycles with
// continuous input; so a frame is flushed by following it with 7 zero
// samples (8 when its length is odd).
// Both modules reset synchronously to an empty frame.
//
// The two modules and the round trip follow the paper's test setup; joining
// them in one top with these ports is this design's choice (the paper built
// them for two separate FPGAs).
module dwt53_top
  import dwt53_pkg::*;
#(
  parameter int unsigned SAMPLE_W = SAMPLE_W_DEFAULT,
  localparam int unsigned DW = d_width(SAMPLE_W),
  localparam int unsigned SW = s_width(SAMPLE_W)
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 in_valid,
  input  logic [SAMPLE_W-1:0]  in_sample,
  output logic                 coef_valid,  // a coefficient pair is present
  output logic signed [SW-1:0] coef_s,
  output logic signed [DW-1:0] coef_d,
  output logic                 rec_valid,   // a reconstructed sample is present
  output logic [SAMPLE_W-1:0]  rec_sample,
  output logic                 rec_odd
);

  logic inv_ready;

  dwt53_fwd #(.SAMPLE_W(SAMPLE_W)) u_fwd (
    .clk, .rst,
    .in_valid, .in_sample,
    .out_valid (coef_valid),
    .out_s     (coef_s),
    .out_d     (coef_d)
  );

  dwt53_inv #(.SAMPLE_W(SAMPLE_W)) u_inv (
    .clk, .rst,
    .in_valid   (coef_valid),
    .in_ready   (inv_ready),
    .in_s       (coef_s),
    .in_d       (coef_d),
    .out_valid  (rec_valid),
    .out_sample (rec_sample),
    .out_odd    (rec_odd)
  );

  // The forward module emits at most one pair every two cycles, which is
  // exactly the rate the inverse accepts; no pair may ever be refused.
  assert property (@(posedge clk) disable iff (rst) coef_valid |-> inv_ready)
    else $error("dwt53_top: coefficient pair refused");

endmodule
