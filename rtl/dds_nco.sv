// dds_nco: the direct digital synthesiser of the IQ detector. It produces the
// local oscillator at f_diff as a cosine/sine (in-phase/quadrature) pair.
//
// A FTW_W-bit phase accumulator advances by the tuning word `ftw` once per
// accepted input sample. The top PH_W bits of the accumulator, before the step,
// go to a pipelined CORDIC (cordic_rotate), which returns cos and sin at
// nearly full OUT_W-bit scale. The oscillator frequency is
// f = ftw / 2^FTW_W * f_step, where f_step is the rate of in_valid (the
// decimated sample rate). The caller's sample goes along as the tag, so each
// sample comes out next to the oscillator value for its own time step.
//
// Timing: one step per in_valid. The outputs appear CORDIC_ITER+1 clocks later.
// The accumulator starts at zero after reset, so the first sample sees phase 0.
//
// The paper calls this a DDS "implemented in software" on the FPGA that
// generates a sinusoid and its quadrature. The accumulator width, the
// CORDIC-based waveform generation and the sizes are this design's choices.
module dds_nco #(
  parameter int FTW_W = pa_pkg::FTW_W,
  parameter int PH_W  = pa_pkg::PH_W,
  parameter int OUT_W = 18,
  parameter int CORDIC_ITER = 18,
  parameter int TAG_W = 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [FTW_W-1:0]        ftw,
  input  logic                    in_valid,
  input  logic [TAG_W-1:0]        in_tag,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_cos,
  output logic signed [OUT_W-1:0] out_sin,
  output logic [TAG_W-1:0]        out_tag
);

  logic [FTW_W-1:0] acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        acc <= '0;
    else if (in_valid) acc <= acc + ftw;
  end

  cordic_rotate #(
    .PH_W(PH_W), .OUT_W(OUT_W), .ITER(CORDIC_ITER), .TAG_W(TAG_W)
  ) u_cordic (
    .clk, .rst_n,
    .in_valid (in_valid),
    .in_angle (acc[FTW_W-1 -: PH_W]),
    .in_tag   (in_tag),
    .out_valid, .out_cos, .out_sin, .out_tag
  );

endmodule
