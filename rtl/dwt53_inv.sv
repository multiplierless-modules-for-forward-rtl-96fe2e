// dwt53_inv: backward (reconstruction) 5/3 integer lifting wavelet transform.
//
// Takes pairs (s[n], d[n]) as produced by dwt53_fwd and rebuilds the samples
//   even[n] = s[n] - floor((d[n] + d[n-1]) / 4)           (undo update)
//   odd[n]  = d[n] + floor((even[n] + even[n+1]) / 2)     (undo predict)
// and merges them through a multiplexer into the serial stream
//   x[2n] = even[n], x[2n+1] = odd[n].
//
// How it works. A processing element (lift_pe, D^n = 0, D^m = 0) holds the
// detail stream: its adder gives d[K] + d[K-1] for the newest pair K, and its
// third register gives d[K-2], delayed to line up with the odd step.
// corr_shift2 divides the sum by four with floor rounding, the subtractor
// takes it from s[K] and gives even[K]. The "even" register and a second
// register keep the last two even values; their sum, halved by a shift, plus
// d[K-2] gives odd[K-2]. The pipeline advances only when a pair is accepted,
// so output pair n (even[n], odd[n]) appears after pair n+2 has been accepted;
// the caller flushes a frame with the extra pairs the forward module makes
// from trailing zeros. d[-1] is 0, matching dwt53_fwd.
//
// Merge and timing. A small state machine (IDLE, EVEN, ODD) drives the
// output multiplexer: in the cycle after a pair is accepted it presents the
// even sample and captures the odd one, in the next cycle it presents the odd
// sample. in_ready is low only in the EVEN cycle, so the module takes one
// pair every two cycles and delivers one sample per cycle; the forward module
// never offers pairs faster than that.
//
// The equations, the shift-based divisions, the correction of negative sums,
// the even/register pair with adder and the output MUX follow the paper.
// The handshake, the state machine, the word widths (10-bit s, 9-bit d) and
// the delay lengths (one register per stream instead of the longer windows
// the paper's figure shows) are this design's choices.
module dwt53_inv
  import dwt53_pkg::*;
#(
  parameter int unsigned SAMPLE_W = SAMPLE_W_DEFAULT,
  localparam int unsigned DW = d_width(SAMPLE_W),
  localparam int unsigned SW = s_width(SAMPLE_W)
) (
  input  logic                 clk,
  input  logic                 rst,        // synchronous, active high
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic signed [SW-1:0] in_s,       // scaling coefficient s[n]
  input  logic signed [DW-1:0] in_d,       // detail coefficient d[n]
  output logic                 out_valid,
  output logic [SAMPLE_W-1:0]  out_sample, // reconstructed sample
  output logic                 out_odd     // 1: out_sample has an odd index
);

  typedef enum logic [1:0] {S_IDLE, S_EVEN, S_ODD} merge_state_t;

  merge_state_t state;
  logic         accept;
  logic [1:0]   nacc;    // accepted pairs, saturating at 3
  logic         emit;    // the pair being merged is a real output pair

  assign in_ready = (state != S_EVEN);
  assign accept   = in_valid && in_ready;

  // ---- detail stream: d[K] + d[K-1] and d[K-2] ----
  logic signed [SW-1:0] d_pair_sum;
  logic signed [DW-1:0] d_dly2;
  logic signed [SW-1:0] upd;

  lift_pe #(.W(DW), .N_DLY(0), .M_DLY(0)) u_pe_detail (
    .clk, .rst, .en(accept),
    .din  (in_d),
    .out1 (d_pair_sum),
    .out2 (d_dly2),
    .mid  (),
    .q1   ()
  );

  corr_shift2 #(.W(SW)) u_corr (.sum(d_pair_sum), .quot(upd));

  // ---- scaling stream and undo update ----
  logic signed [SW-1:0] s_reg;
  logic signed [SW:0]   even_wide;
  logic signed [SW-1:0] even_new;

  assign even_wide = (SW+1)'(s_reg) - (SW+1)'(upd);
  assign even_new  = even_wide[SW-1:0];

  // ---- even values and undo predict ----
  logic signed [SW-1:0] even_a;   // "even": even[K-1]
  logic signed [SW-1:0] even_b;   // "register": even[K-2]
  logic signed [SW:0]   even_sum;
  logic signed [SW:0]   odd_wide;
  logic [SAMPLE_W-1:0]  odd_reg;  // "odd": the odd sample, as output

  assign even_sum = (SW+1)'(even_a) + (SW+1)'(even_b);
  assign odd_wide = (SW+1)'(d_dly2) + (even_sum >>> 1);

  always_ff @(posedge clk) begin
    if (rst) begin
      s_reg  <= '0;
      even_a <= '0;
      even_b <= '0;
      nacc   <= '0;
    end else if (accept) begin
      s_reg  <= in_s;
      even_a <= even_new;
      even_b <= even_a;
      if (nacc != 2'd3) nacc <= nacc + 2'd1;
    end
  end

  // ---- merge: state machine and output MUX ----
  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= S_IDLE;
      emit    <= 1'b0;
      odd_reg <= '0;
    end else begin
      unique case (state)
        S_IDLE, S_ODD: if (accept) begin
          state <= S_EVEN;
          emit  <= (nacc >= 2'd2);   // pairs 0..K accepted with K >= 2
        end else begin
          state <= S_IDLE;
        end
        S_EVEN: begin
          odd_reg <= odd_wide[SAMPLE_W-1:0];
          state   <= S_ODD;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    out_odd    = (state == S_ODD);
    out_valid  = emit && (state != S_IDLE);
    out_sample = out_odd ? odd_reg : SAMPLE_W'(even_b);
  end

  // A pair may only be offered again after its odd sample has gone out.
  assert property (@(posedge clk) disable iff (rst)
                   (state == S_EVEN) |=> (state == S_ODD))
    else $error("dwt53_inv: merge sequence broken");

endmodule
