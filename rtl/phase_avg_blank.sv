// phase_avg_blank: the "Averaging & Phase blanking" block. It turns the phase
// and amplitude stream from the IQ detector into one output sample per
// time-resolution interval, marked as trustworthy or not.
//
// The block averages M = avg_len input samples (block averaging, not a
// sliding window). Phase is an angle, so it cannot be summed directly. Instead,
// the first phase p0 of each window is kept, and the wrapped offsets
// d_i = p_i - p0 are summed. The output phase is p0 + round(sum(d_i) / M),
// which is exact as long as the phase stays within +/- half a turn of p0
// during the window. The division is a multiply by avg_recip = round(2^32/M),
// which the host computes. Amplitude is averaged the same way. Blanking: when
// any sample of the window has an amplitude below amp_threshold, the output is
// marked invalid (out_ok = 0). The phase of a weak signal is noise, and
// the later unwrapping on the host must skip it.
//
// Timing: one output per M accepted inputs, registered in the clock after the
// M-th input. Set avg_len and avg_recip while in reset.
//
// From the paper: the stage averages, and it uses the amplitude to mark
// phase values as valid or invalid. The block averaging, the wrap-safe
// offset method, the all-samples rule for validity and the reciprocal
// multiply are this design's choices.
module phase_avg_blank #(
  parameter int PH_W  = pa_pkg::PH_W,
  parameter int AMP_W = pa_pkg::AMP_W,
  parameter int AVG_W = pa_pkg::AVG_W,
  parameter int RECIP_FRAC = pa_pkg::RECIP_FRAC,
  localparam int RECIP_W = RECIP_FRAC + 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [AVG_W-1:0]        avg_len,       // M >= 1
  input  logic [RECIP_W-1:0]      avg_recip,     // round(2^RECIP_FRAC / M)
  input  logic [AMP_W-1:0]        amp_threshold,
  input  logic                    in_valid,
  input  logic signed [PH_W-1:0]  in_phase,
  input  logic [AMP_W-1:0]        in_amp,
  output logic                    out_valid,
  output logic                    out_ok,        // 1: phase valid, 0: blanked
  output logic signed [PH_W-1:0]  out_phase,
  output logic [AMP_W-1:0]        out_amp
);

  localparam int DSUM_W = PH_W + AVG_W;
  localparam int ASUM_W = AMP_W + AVG_W;
  localparam int DPROD_W = DSUM_W + RECIP_W + 1;
  localparam int APROD_W = ASUM_W + RECIP_W;

  logic [AVG_W-1:0]         count;
  logic signed [PH_W-1:0]   p0;
  logic signed [DSUM_W-1:0] dsum;
  logic [ASUM_W-1:0]        asum;
  logic                     low_seen;

  // Values including the current input.
  logic signed [PH_W-1:0]   p0_n;
  logic signed [PH_W-1:0]   d_n;
  logic signed [DSUM_W-1:0] dsum_n;
  logic [ASUM_W-1:0]        asum_n;
  logic                     low_n;
  logic signed [DPROD_W-1:0] dprod;
  logic [APROD_W-1:0]        aprod;

  always_comb begin
    p0_n   = (count == '0) ? in_phase : p0;
    d_n    = in_phase - p0_n;                       // wraps modulo one turn
    dsum_n = ((count == '0) ? '0 : dsum) + DSUM_W'(d_n);
    asum_n = ((count == '0) ? '0 : asum) + ASUM_W'(in_amp);
    low_n  = ((count == '0) ? 1'b0 : low_seen) | (in_amp < amp_threshold);
    dprod  = DPROD_W'(dsum_n) * $signed({1'b0, avg_recip})
           + (DPROD_W'(1) <<< (RECIP_FRAC - 1));
    aprod  = APROD_W'(asum_n) * APROD_W'(avg_recip)
           + (APROD_W'(1) << (RECIP_FRAC - 1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0; p0 <= '0; dsum <= '0; asum <= '0; low_seen <= 1'b0;
      out_valid <= 1'b0; out_ok <= 1'b0; out_phase <= '0; out_amp <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        p0       <= p0_n;
        dsum     <= dsum_n;
        asum     <= asum_n;
        low_seen <= low_n;
        if (count >= avg_len - AVG_W'(1)) begin
          count     <= '0;
          out_valid <= 1'b1;
          out_ok    <= ~low_n;
          out_phase <= p0_n + PH_W'(dprod >>> RECIP_FRAC);
          out_amp   <= AMP_W'(aprod >> RECIP_FRAC);
        end else begin
          count <= count + AVG_W'(1);
        end
      end
    end
  end

endmodule
