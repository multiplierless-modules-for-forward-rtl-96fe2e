// dwt53_fwd: forward (analysis) 5/3 integer lifting wavelet transform.
//
// Takes one unsigned SAMPLE_W-bit sample per accepted cycle and produces one
// pair of coefficients for every two samples:
//   d[n] = x[2n+1] - floor((x[2n] + x[2n+2]) / 2)         (predict)
//   s[n] = x[2n]   + floor((d[n] + d[n-1]) / 4)           (update)
//
// How it works. Every register moves only when a sample is accepted, so the
// module is a pure shift pipeline in sample time and tolerates any gaps in
// `in_valid`. A processing element (lift_pe, D^n = 1, D^m = 0) holds the
// three-sample window x[t], x[t-1], x[t-2]; when the newest sample has an
// even index 2n+2 its adder gives x[2n] + x[2n+2], the middle tap gives the
// odd sample x[2n+1], and the subtractor gives d[n]. A second processing
// element on the stream of subtractor results (again D^n = 1, because a new
// detail value appears every second sample) gives d[n] + d[n-1]; corr_shift2
// divides it by four with floor rounding, and the third register of the first
// element supplies the even sample x[2n], already delayed to line up, for the
// final adder. The split into even and odd samples is the phase bit `t_odd`.
//
// Boundaries: the signal is taken as zero before its first and after its last
// sample, and d[-1] = 0. Pair n leaves the module one cycle after sample
// 2n+4 has been accepted, so to flush an N-sample frame (N even) feed zeros
// after it: 3 zeros give pairs 0 .. N/2-1, 5 zeros also give pair N/2, which
// the inverse transform needs to rebuild the last odd sample (7 zeros give
// the pair after that, which pushes it out of the inverse). A synchronous
// reset starts a new frame.
//
// Interface: in_valid/in_sample, always ready. out_valid pulses for one cycle
// with out_s and out_d, registered; at most one pair every two cycles.
//
// The equations, the 8-bit input, the three-sample window with one adder,
// the shift for the division by two and the >>2-with-correction for the
// division by four follow the paper. The coefficient widths (9-bit d,
// 10-bit s for lossless results), zero padding at the frame ends, the
// valid-only handshake and the register timing are this design's choices.
module dwt53_fwd
  import dwt53_pkg::*;
#(
  parameter int unsigned SAMPLE_W = SAMPLE_W_DEFAULT,
  localparam int unsigned DW = d_width(SAMPLE_W),
  localparam int unsigned SW = s_width(SAMPLE_W)
) (
  input  logic                 clk,
  input  logic                 rst,        // synchronous, active high
  input  logic                 in_valid,
  input  logic [SAMPLE_W-1:0]  in_sample,  // unsigned input sample x[t]
  output logic                 out_valid,  // one-cycle pulse per pair
  output logic signed [SW-1:0] out_s,      // scaling coefficient s[n]
  output logic signed [DW-1:0] out_d       // detail coefficient d[n]
);

  // ---- control: phase (split into even/odd) and fill level ----
  logic       t_odd;   // index of the last accepted sample is odd
  logic [2:0] nacc;    // accepted samples, saturating at 4
  logic       win_ok;  // window holds x[t-2] .. x[t] with t >= 2
  logic       emit;    // state after an odd sample 2n+3: pair n is ready

  always_ff @(posedge clk) begin
    if (rst) begin
      t_odd <= 1'b1;
      nacc  <= '0;
    end else if (in_valid) begin
      t_odd <= ~t_odd;
      if (nacc != 3'd4) nacc <= nacc + 3'd1;
    end
  end

  assign win_ok = (nacc >= 3'd3);
  assign emit   = t_odd && (nacc == 3'd4);

  // ---- predict: window x[t], x[t-1], x[t-2] and x[t-3] ----
  logic signed [DW:0]   even_sum;   // x[t] + x[t-2]
  logic signed [DW-1:0] odd_smp;    // x[t-1]
  logic signed [DW-1:0] even_dly;   // x[t-3]
  logic signed [DW:0]   d_wide;
  logic signed [DW-1:0] d_new;

  lift_pe #(.W(DW), .N_DLY(1), .M_DLY(0)) u_pe_predict (
    .clk, .rst, .en(in_valid),
    .din  (DW'(in_sample)),  // zero extended: the sample is unsigned
    .out1 (even_sum),
    .out2 (even_dly),
    .mid  (odd_smp),
    .q1   ()
  );

  // d = odd - floor(sum / 2); valid when t is even and t >= 2.
  assign d_wide = (DW+1)'(odd_smp) - (even_sum >>> 1);
  assign d_new  = win_ok ? d_wide[DW-1:0] : '0;   // d[-1] = 0

  // ---- update: d[n] + d[n-1], then floor(/4) and add x[2n] ----
  logic signed [SW-1:0] d_pair_sum;
  logic signed [DW-1:0] d_cur;
  logic signed [DW-1:0] d_unused_out2;
  logic signed [SW-1:0] upd;
  logic signed [SW-1:0] s_new;

  lift_pe #(.W(DW), .N_DLY(1), .M_DLY(0)) u_pe_update (
    .clk, .rst, .en(in_valid),
    .din  (d_new),
    .out1 (d_pair_sum),
    .out2 (d_unused_out2),
    .mid  (),
    .q1   (d_cur)   // R1 holds d[n] in the emit state
  );


  corr_shift2 #(.W(SW)) u_corr (.sum(d_pair_sum), .quot(upd));

  assign s_new = SW'(even_dly) + upd;

  // ---- output registers ----
  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_s     <= '0;
      out_d     <= '0;
    end else begin
      out_valid <= in_valid && emit;
      if (in_valid && emit) begin
        out_s <= s_new;
        out_d <= d_cur;
      end
    end
  end

  // A detail coefficient always fits DW bits for SAMPLE_W-bit input.
  assert property (@(posedge clk) disable iff (rst)
                   win_ok |-> (d_wide[DW] == d_wide[DW-1]))
    else $error("dwt53_fwd: detail coefficient overflow");

endmodule
