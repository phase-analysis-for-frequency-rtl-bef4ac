// cic_decimator: the "Filter & Decimator" of each analyzer channel.
//
// A cascaded integrator-comb (CIC) filter of ORDER stages with a decimation
// factor that is set at run time. It low-pass filters the 120 MS/s ADC stream
// and keeps one output for every `decim` inputs. Its impulse response is a
// length-`decim` boxcar convolved with itself ORDER times, so the DC gain is
// decim^ORDER. The `shift` input divides that gain out by a power of two, and
// the result saturates to OUT_W bits. The integrators run at the input rate
// and wrap modulo 2^ACC_W, which is harmless because
// ACC_W >= IN_W + ORDER*DEC_W. The combs run once per output and have a
// differential delay of one.
//
// Timing: the output for input sample n*decim + decim - 1 appears, with
// out_valid high for one cycle, in the cycle after that input was accepted.
// Changing decim restarts the count only at the next wrap, so it should be set
// while in reset.
//
// From the paper: a filter-and-decimate stage with a variable decimation
// factor on every channel, running at the ADC sample rate. The paper does not
// say what kind of filter it is. The CIC structure, its order and the
// power-of-two gain removal are this design's choices: a CIC is the simplest
// filter that decimates by any integer.
module cic_decimator #(
  parameter int ORDER  = 3,
  parameter int IN_W   = pa_pkg::ADC_W,
  parameter int OUT_W  = pa_pkg::SAMP_W,
  parameter int DEC_W  = pa_pkg::DEC_W,
  parameter int SHIFT_W = pa_pkg::SHIFT_W,
  localparam int ACC_W = IN_W + ORDER * DEC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [DEC_W-1:0]         decim,     // decimation factor, >= 1
  input  logic [SHIFT_W-1:0]       shift,     // arithmetic right shift of the output
  input  logic                     in_valid,
  input  logic signed [IN_W-1:0]   in_data,
  output logic                     out_valid,
  output logic signed [OUT_W-1:0]  out_data
);

  logic signed [ACC_W-1:0] integ   [ORDER];
  logic signed [ACC_W-1:0] integ_n [ORDER];
  logic signed [ACC_W-1:0] comb_d  [ORDER];   // comb delay registers
  logic signed [ACC_W-1:0] comb_v  [ORDER+1];
  logic signed [ACC_W-1:0] shifted;
  logic [DEC_W-1:0]        count;

  localparam logic signed [ACC_W-1:0] OUT_MAX = ACC_W'((64'sd1 <<< (OUT_W - 1)) - 1);
  localparam logic signed [ACC_W-1:0] OUT_MIN = -ACC_W'(64'sd1 <<< (OUT_W - 1));

  // Integrator chain, updated with the new input.
  always_comb begin
    integ_n[0] = integ[0] + ACC_W'(in_data);
    for (int k = 1; k < ORDER; k++) integ_n[k] = integ[k] + integ_n[k-1];
  end

  // Comb chain on the newest integrator output.
  always_comb begin
    comb_v[0] = integ_n[ORDER-1];
    for (int k = 0; k < ORDER; k++) comb_v[k+1] = comb_v[k] - comb_d[k];
    shifted = comb_v[ORDER] >>> shift;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < ORDER; k++) begin
        integ[k]  <= '0;
        comb_d[k] <= '0;
      end
      count     <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        for (int k = 0; k < ORDER; k++) integ[k] <= integ_n[k];
        if (count >= decim - DEC_W'(1)) begin
          count <= '0;
          for (int k = 0; k < ORDER; k++) comb_d[k] <= comb_v[k];
          out_valid <= 1'b1;
          if (shifted > OUT_MAX)      out_data <= OUT_W'(OUT_MAX);
          else if (shifted < OUT_MIN) out_data <= OUT_W'(OUT_MIN);
          else                        out_data <= OUT_W'(shifted);
        end else begin
          count <= count + DEC_W'(1);
        end
      end
    end
  end

endmodule
