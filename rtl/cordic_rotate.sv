// cordic_rotate: pipelined CORDIC in rotation mode. It turns a phase into a
// cosine/sine pair and is the waveform generator behind the DDS.
//
// The input angle is a PH_W-bit two's-complement fraction of a turn. A
// quarter-turn pre-rotation brings the residual angle into [-1/4, +1/4] turn.
// ITER micro-rotations by +/-atan(2^-i) then drive the residual to zero. The
// start vector has length (2^(OUT_W-1)-1)/K, where K = 1.64676 is the CORDIC
// gain, so the outputs reach nearly full scale.
// A TAG_W-bit tag rides through the pipeline unchanged. The caller uses it to
// keep the data that belongs to each angle next to the angle's cos/sin.
//
// Timing: fully pipelined, one angle per clock. Results appear ITER+1 clocks
// after the input, with out_valid marking them.
//
// The paper says only that a DDS generates the sinusoid and its quadrature.
// The CORDIC and its sizes are this design's choice.
module cordic_rotate #(
  parameter int PH_W  = pa_pkg::PH_W,
  parameter int OUT_W = 18,
  parameter int ITER  = 18,
  parameter int TAG_W = 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [PH_W-1:0]  in_angle,
  input  logic [TAG_W-1:0]        in_tag,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_cos,
  output logic signed [OUT_W-1:0] out_sin,
  output logic [TAG_W-1:0]        out_tag
);

  localparam int XW = OUT_W + 2;   // guard bits for the growth inside the stages
  // (2^(OUT_W-1)-1) / K, with 1/K = 39797 / 2^16.
  localparam logic signed [XW-1:0] X0 =
    XW'(((64'd1 << (OUT_W - 1)) - 1) * 64'(pa_pkg::CORDIC_INV_GAIN_Q16) >> 16);
  localparam logic signed [PH_W-1:0] QUARTER = PH_W'(1) <<< (PH_W - 2);

  logic signed [XW-1:0]   x [ITER+1];
  logic signed [XW-1:0]   y [ITER+1];
  logic signed [PH_W-1:0] z [ITER+1];
  logic [TAG_W-1:0]       tag [ITER+1];
  logic [ITER:0]          vld;

  // Stage 0: quadrant pre-rotation.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x[0] <= '0; y[0] <= '0; z[0] <= '0; tag[0] <= '0; vld[0] <= 1'b0;
    end else begin
      vld[0] <= in_valid;
      tag[0] <= in_tag;
      if (in_angle > QUARTER) begin          // (1/4, 1/2) turn: start at +90 deg
        x[0] <= '0;  y[0] <= X0;  z[0] <= in_angle - QUARTER;
      end else if (in_angle < -QUARTER) begin // [-1/2, -1/4) turn: start at -90 deg
        x[0] <= '0;  y[0] <= -X0; z[0] <= in_angle + QUARTER;
      end else begin
        x[0] <= X0;  y[0] <= '0;  z[0] <= in_angle;
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
        if (z[i] >= 0) begin
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

  localparam logic signed [XW-1:0] OMAX = XW'((64'sd1 <<< (OUT_W - 1)) - 1);
  localparam logic signed [XW-1:0] OMIN = -OMAX;

  function automatic logic signed [OUT_W-1:0] clip(input logic signed [XW-1:0] v);
    if (v > OMAX) return OUT_W'(OMAX);
    if (v < OMIN) return OUT_W'(OMIN);
    return OUT_W'(v);
  endfunction

  assign out_valid = vld[ITER];
  assign out_cos   = clip(x[ITER]);
  assign out_sin   = clip(y[ITER]);
  assign out_tag   = tag[ITER];

endmodule
