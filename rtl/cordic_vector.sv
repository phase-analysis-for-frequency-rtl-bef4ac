// cordic_vector: pipelined CORDIC in vectoring mode. It turns an I/Q pair into
// phase and amplitude, the last step of the IQ detector.
//
// If I is negative, the vector is first turned by half a turn. ITER
// micro-rotations by +/-atan(2^-i) then drive Q to zero while the angle
// register sums up the rotations. That sum is the phase, a PH_W-bit
// two's-complement fraction of a turn. The remaining x is the magnitude times
// K = 1.64676. It is multiplied by 1/K (39797/2^16) and saturated to AMP_W bits.
// A TAG_W-bit tag travels along with the data.
//
// Timing: one vector per clock. Results appear ITER+2 clocks after the input
// (pre-rotation, ITER stages, gain correction).
//
// The paper says that phase and amplitude are computed from the mixed signals.
// Using a CORDIC for this is this design's choice.
module cordic_vector #(
  parameter int IN_W  = pa_pkg::SAMP_W,
  parameter int PH_W  = pa_pkg::PH_W,
  parameter int AMP_W = pa_pkg::AMP_W,
  parameter int ITER  = 20,
  parameter int TAG_W = 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] in_i,
  input  logic signed [IN_W-1:0] in_q,
  input  logic [TAG_W-1:0]       in_tag,
  output logic                   out_valid,
  output logic signed [PH_W-1:0] out_phase,
  output logic [AMP_W-1:0]       out_amp,
  output logic [TAG_W-1:0]       out_tag
);

  localparam int XW = IN_W + 3;    // |I|,|Q| < 2^(IN_W-1), times K < 2, plus sign
  localparam logic signed [PH_W-1:0] HALF = PH_W'(1) <<< (PH_W - 1);

  logic signed [XW-1:0]   x [ITER+1];
  logic signed [XW-1:0]   y [ITER+1];
  logic signed [PH_W-1:0] z [ITER+1];
  logic [TAG_W-1:0]       tag [ITER+2];
  logic [ITER+1:0]        vld;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x[0] <= '0; y[0] <= '0; z[0] <= '0; tag[0] <= '0; vld[0] <= 1'b0;
    end else begin
      vld[0] <= in_valid;
      tag[0] <= in_tag;
      if (in_i < 0) begin
        x[0] <= -XW'(in_i); y[0] <= -XW'(in_q); z[0] <= HALF;   // +/- half turn
      end else begin
        x[0] <= XW'(in_i);  y[0] <= XW'(in_q);  z[0] <= '0;
      end
    end
  end

  for (genvar i = 0; i < ITER; i++) begin : g_stage
    localparam logic signed [PH_W-1:0] ATAN = PH_W'(pa_pkg::cordic_atan(i, PH_W));
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        x[i+1] <= '0; y[i+1] <= '0; z[i+1] <= '0; tag[i+1] <= '0; vld[i+1] <= 1'b0;
      end else begin
        vld[i+1] <= vld[i];
        tag[i+1] <= tag[i];
        if (y[i] < 0) begin
          x[i+1] <= x[i] - (y[i] >>> i);
          y[i+1] <= y[i] + (x[i] >>> i);
          z[i+1] <= z[i] - ATAN;
        end else begin
          x[i+1] <= x[i] + (y[i] >>> i);
          y[i+1] <= y[i] - (x[i] >>> i);
          z[i+1] <= z[i] + ATAN;
        end
      end
    end
  end

  // Gain correction.
  localparam int PW = XW + 17;
  logic signed [PW-1:0] prod;
  assign prod = PW'(x[ITER]) * PW'($signed({1'b0, 16'(pa_pkg::CORDIC_INV_GAIN_Q16)}))
              + PW'(1 << 15);

  localparam logic [PW-1:0] AMAX = PW'((64'd1 << AMP_W) - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_phase <= '0; out_amp <= '0; tag[ITER+1] <= '0; vld[ITER+1] <= 1'b0;
    end else begin
      vld[ITER+1] <= vld[ITER];
      tag[ITER+1] <= tag[ITER];
      out_phase   <= z[ITER];
      if (prod < 0)                      out_amp <= '0;
      else if ((prod >>> 16) > $signed(AMAX)) out_amp <= '1;
      else                               out_amp <= AMP_W'(prod >>> 16);
    end
  end

  assign out_valid = vld[ITER+1];
  assign out_tag   = tag[ITER+1];

endmodule
