// iq_detector: the "IQ Detection" block of the phase channel.
//
// Each decimated sample x of the beat signal at f_diff is mixed with the DDS
// oscillator (dds_nco): I = x*cos(theta) and Q = -x*sin(theta). For
// x = A*cos(theta + phi) this gives I = A/2*cos(phi) and Q = A/2*sin(phi),
// plus a term at 2*f_diff. A moving average over `lp_len` samples removes that
// term: choose lp_len as a whole number of half periods of f_diff. The average
// is a running sum over a circular buffer; `lp_shift` scales it and the result
// saturates to SAMP_W bits. A vectoring CORDIC (cordic_vector) then yields the
// phase phi (PH_W-bit fraction of a turn) and the amplitude A/2 times
// 2^lp_len_bits/2^lp_shift.
//
// Timing: one result per input sample, (DDS_ITER+1) + 3 + (CORDIC_ITER+2)
// = 44 clocks after it. The first lp_len-1 results average over
// fewer samples, because the buffer starts empty. Change lp_len only while in
// reset.
//
// From the paper: digital IQ demodulation against a DDS and quadrature
// signal, then computation of phase and amplitude. The low-pass filter after
// the mixers and all the widths are this design's choices; the paper names no
// filter there.
module iq_detector #(
  parameter int IN_W  = pa_pkg::SAMP_W,
  parameter int PH_W  = pa_pkg::PH_W,
  parameter int AMP_W = pa_pkg::AMP_W,
  parameter int FTW_W = pa_pkg::FTW_W,
  parameter int LP_W  = pa_pkg::LP_W,
  parameter int SHIFT_W = pa_pkg::SHIFT_W,
  parameter int LO_W  = 18,
  parameter int DDS_ITER = 18,
  parameter int CORDIC_ITER = 20
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [FTW_W-1:0]        ftw,
  input  logic [LP_W-1:0]         lp_len,    // 1 .. 2^LP_W-1
  input  logic [SHIFT_W-1:0]      lp_shift,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_data,
  output logic                    out_valid,
  output logic signed [PH_W-1:0]  out_phase,
  output logic [AMP_W-1:0]        out_amp
);

  // ---- oscillator, sample travels as tag ----
  logic                   lo_valid;
  logic signed [LO_W-1:0] lo_cos, lo_sin;
  logic [IN_W-1:0]        lo_x;

  dds_nco #(
    .FTW_W(FTW_W), .PH_W(PH_W), .OUT_W(LO_W), .CORDIC_ITER(DDS_ITER), .TAG_W(IN_W)
  ) u_dds (
    .clk, .rst_n, .ftw,
    .in_valid (in_valid), .in_tag (in_data),
    .out_valid (lo_valid), .out_cos (lo_cos), .out_sin (lo_sin), .out_tag (lo_x)
  );

  // ---- mixers ----
  localparam int PROD_W = IN_W + LO_W;
  logic signed [PROD_W-1:0] p_i, p_q;
  logic signed [IN_W-1:0]   mix_i, mix_q;
  logic                     mix_valid;

  assign p_i = PROD_W'($signed(lo_x)) * PROD_W'(lo_cos);
  assign p_q = -(PROD_W'($signed(lo_x)) * PROD_W'(lo_sin));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mix_valid <= 1'b0; mix_i <= '0; mix_q <= '0;
    end else begin
      mix_valid <= lo_valid;
      // |lo| < 2^(LO_W-1), so the scaled product fits IN_W bits.
      mix_i <= IN_W'(p_i >>> (LO_W - 1));
      mix_q <= IN_W'(p_q >>> (LO_W - 1));
    end
  end

  // ---- moving-average low-pass ----
  localparam int DEPTH = 1 << LP_W;
  localparam int SUM_W = IN_W + LP_W;
  logic signed [IN_W-1:0]  hist_i [DEPTH];
  logic signed [IN_W-1:0]  hist_q [DEPTH];
  logic [LP_W-1:0]         wptr, rptr;
  logic [LP_W:0]           filled;
  logic signed [IN_W-1:0]  old_i, old_q;
  logic signed [SUM_W-1:0] sum_i, sum_q;
  logic                    sum_valid;

  assign rptr  = wptr - lp_len;
  assign old_i = (filled >= {1'b0, lp_len}) ? hist_i[rptr] : '0;
  assign old_q = (filled >= {1'b0, lp_len}) ? hist_q[rptr] : '0;

  always_ff @(posedge clk) begin
    if (mix_valid) begin
      hist_i[wptr] <= mix_i;
      hist_q[wptr] <= mix_q;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0; filled <= '0; sum_i <= '0; sum_q <= '0; sum_valid <= 1'b0;
    end else begin
      sum_valid <= mix_valid;
      if (mix_valid) begin
        wptr <= wptr + LP_W'(1);
        if (filled != (LP_W+1)'(DEPTH)) filled <= filled + (LP_W+1)'(1);
        sum_i <= sum_i + SUM_W'(mix_i) - SUM_W'(old_i);
        sum_q <= sum_q + SUM_W'(mix_q) - SUM_W'(old_q);
      end
    end
  end

  // ---- scale and saturate ----
  localparam logic signed [SUM_W-1:0] SMAX = SUM_W'((64'sd1 <<< (IN_W - 1)) - 1);
  localparam logic signed [SUM_W-1:0] SMIN = -SMAX;

  function automatic logic signed [IN_W-1:0] scale(input logic signed [SUM_W-1:0] v,
                                                   input logic [SHIFT_W-1:0] sh);
    logic signed [SUM_W-1:0] s;
    s = v >>> sh;
    if (s > SMAX) return IN_W'(SMAX);
    if (s < SMIN) return IN_W'(SMIN);
    return IN_W'(s);
  endfunction

  logic                   lp_valid;
  logic signed [IN_W-1:0] lp_i, lp_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lp_valid <= 1'b0; lp_i <= '0; lp_q <= '0;
    end else begin
      lp_valid <= sum_valid;
      lp_i <= scale(sum_i, lp_shift);
      lp_q <= scale(sum_q, lp_shift);
    end
  end

  // ---- phase and amplitude ----
  logic unused_tag;

  cordic_vector #(
    .IN_W(IN_W), .PH_W(PH_W), .AMP_W(AMP_W), .ITER(CORDIC_ITER), .TAG_W(1)
  ) u_vec (
    .clk, .rst_n,
    .in_valid (lp_valid), .in_i (lp_i), .in_q (lp_q), .in_tag (1'b0),
    .out_valid, .out_phase, .out_amp, .out_tag (unused_tag)
  );

endmodule
