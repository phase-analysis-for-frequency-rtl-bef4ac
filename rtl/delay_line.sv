// delay_line: the "Delay" stage of the power and AUX/status channels.
//
// It delays a strobed sample stream by `delay` samples (0 .. 2^DLY_W-1), set at
// run time. The phase channel goes through IQ detection and averaging, which
// take longer than the plain filter of the other channels; this delay lines the
// other channels up with it. The samples sit in a circular buffer, and each
// input overwrites the entry written 2^DLY_W samples earlier. Until `delay`
// samples have been seen, the output is zero rather than stale buffer content.
//
// Timing: one output per input. out_valid follows in_valid by one clock, and
// out_data is the input from `delay` strobes earlier (delay = 0: this input).
// Change `delay` only while in reset.
//
// From the paper: a small delay on the auxiliary channels aligns them with the
// phase stream. That the delay counts decimated samples and is set at run time
// is this design's choice.
module delay_line #(
  parameter int W     = pa_pkg::SAMP_W,
  parameter int DLY_W = pa_pkg::DLY_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [DLY_W-1:0] delay,
  input  logic             in_valid,
  input  logic [W-1:0]     in_data,
  output logic             out_valid,
  output logic [W-1:0]     out_data
);

  localparam int DEPTH = 1 << DLY_W;

  logic [W-1:0]     buffer [DEPTH];
  logic [DLY_W-1:0] wptr;
  logic [DLY_W:0]   filled;   // saturates at DEPTH
  logic [DLY_W-1:0] rptr;

  assign rptr = wptr - delay;

  always_ff @(posedge clk) begin
    if (in_valid) buffer[wptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr      <= '0;
      filled    <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        wptr <= wptr + DLY_W'(1);
        if (filled != (DLY_W+1)'(DEPTH)) filled <= filled + (DLY_W+1)'(1);
        if (delay == '0)                        out_data <= in_data;
        else if (filled < {1'b0, delay})        out_data <= '0;
        else                                    out_data <= buffer[rptr];
      end
    end
  end

endmodule
