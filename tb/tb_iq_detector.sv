// tb_iq_detector: self-checking test of the IQ detector.
//
// The input is a synthetic beat signal x[n] = A*cos(2*pi*n*ftw/2^32 + phi),
// at 0.2 of the decimated sample rate. With lp_len = 5 (two periods of the
// 2*f_diff mixing product) the detector must return phase phi and amplitude
// 5*A/2. Three segments change phi and A, including a phase near the +/-pi
// wrap. The test checks every output once the filter has settled on a
// segment, and that the first output comes 44 clocks after the first input.
module tb_iq_detector;
  localparam int IN_W = 24, PH_W = 24, AMP_W = 24;
  localparam logic [31:0] FTW = 32'd858993459;
  localparam int L = 5, LAT = 44;
  localparam real PI = 3.14159265358979;

  logic clk = 0, rst_n = 0;
  logic [31:0] ftw = FTW;
  logic [7:0] lp_len = 8'(L);
  logic [5:0] lp_shift = 0;
  logic in_valid = 0;
  logic signed [IN_W-1:0] in_data = 0;
  logic out_valid;
  logic signed [PH_W-1:0] out_phase;
  logic [AMP_W-1:0] out_amp;
  int checks = 0, failures = 0;

  iq_detector dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real absr(real v); return v < 0.0 ? -v : v; endfunction

  // Segment table: phase in turns and amplitude, per block of SEG inputs.
  localparam int SEG = 200, NSEG = 3;
  real seg_phi[NSEG] = '{0.1234, -0.4987, 0.31};
  real seg_amp[NSEG] = '{1048576.0, 300000.0, 2000000.0};

  int cyc = 0, n_in = 0, n_out = 0, first_in = -1;
  always @(posedge clk) cyc <= cyc + 1;

  // Checker: output n belongs to input n.
  always @(posedge clk) if (rst_n && out_valid) begin
    int s, k;
    real ephi, eamp, dph;
    if (n_out == 0) begin
      checks++;
      if (cyc - first_in != LAT) begin failures++; $display("latency %0d", cyc - first_in); end
    end
    s = n_out / SEG; k = n_out % SEG;
    if (k >= L + 2) begin
      ephi = seg_phi[s]; eamp = seg_amp[s] * L / 2.0;
      dph = real'(out_phase) / 16777216.0 - ephi;
      dph = dph - $rtoi(dph + (dph >= 0 ? 0.5 : -0.5));   // wrap to [-0.5, 0.5]
      checks += 2;
      if (absr(dph) * 16777216.0 > 64.0) begin
        failures++;
        if (failures < 10) $display("n=%0d phase %f exp %f", n_out, real'(out_phase)/16777216.0, ephi);
      end
      if (absr(real'(out_amp) - eamp) > eamp * 1e-3) begin
        failures++;
        if (failures < 10) $display("n=%0d amp %0d exp %f", n_out, out_amp, eamp);
      end
    end
    n_out++;
  end

  initial begin
    real th;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < SEG * NSEG; n++) begin
      @(negedge clk);
      th = 2.0 * PI * (real'((longint'(n) * longint'(FTW)) % 64'h1_0000_0000) / 4294967296.0
                       + seg_phi[n / SEG]);
      in_data = IN_W'($rtoi(seg_amp[n / SEG] * $cos(th)));
      in_valid = 1;
      if (n == 0) first_in = cyc;
      n_in++;
      if ($urandom_range(0, 3) == 0) begin
        @(negedge clk) in_valid = 0;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (n_out != n_in) begin failures++; $display("outputs %0d of %0d", n_out, n_in); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
