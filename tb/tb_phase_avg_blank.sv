// tb_phase_avg_blank: self-checking test of averaging and phase blanking.
//
// Random phase/amplitude samples go in. Within each window the phase wanders
// around a random centre (including centres next to the +/-pi wrap), and now
// and then an amplitude falls below the threshold. For each window, the
// expected output is computed in real arithmetic from the recorded inputs:
// the circular mean, taken as p0 plus the mean wrapped offset from p0; the
// mean amplitude; and valid = no amplitude below the threshold. The test
// checks the values (to within 1 LSB), the number of outputs and that each
// output comes one clock after the last input of its window. It runs with
// M = 15, M = 1 and M = 64.
module tb_phase_avg_blank;
  localparam int PH_W = 24, AMP_W = 24, AVG_W = 16;
  logic clk = 0, rst_n = 0;
  logic [AVG_W-1:0] avg_len;
  logic [32:0] avg_recip;
  logic [AMP_W-1:0] amp_threshold = 24'd1000;
  logic in_valid = 0;
  logic signed [PH_W-1:0] in_phase = 0;
  logic [AMP_W-1:0] in_amp = 0;
  logic out_valid, out_ok;
  logic signed [PH_W-1:0] out_phase;
  logic [AMP_W-1:0] out_amp;
  int checks = 0, failures = 0;

  phase_avg_blank dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real absr(real v); return v < 0.0 ? -v : v; endfunction

  task automatic run(int m, int nwin);
    int p0, d, centre;
    real dsum, asum, eph, eamp, dp;
    logic low;
    int blanked = 0;
    rst_n = 0; avg_len = AVG_W'(m);
    avg_recip = 33'((64'd1 << 32) / 64'(m) + (((64'd1 << 32) % 64'(m)) * 2 >= 64'(m) ? 1 : 0));
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int w = 0; w < nwin; w++) begin
      centre = (w % 3 == 0) ? (1 << 23) - 100 : int'($urandom) >>> 8;  // near +pi every third window
      dsum = 0; asum = 0; low = 0;
      for (int i = 0; i < m; i++) begin
        @(negedge clk);
        in_valid = 1;
        in_phase = PH_W'(centre + $signed($urandom_range(0, 4000)) - 2000);
        in_amp = ($urandom_range(0, 40) == 0) ? AMP_W'($urandom_range(0, 999))
                                              : AMP_W'($urandom_range(1000, 5000000));
        if (i == 0) p0 = in_phase;
        d = int'(PH_W'(in_phase - PH_W'(p0)));           // wrapped offset, 24-bit
        if (d >= (1 << 23)) d -= (1 << 24);
        dsum += d; asum += in_amp;
        if (in_amp < amp_threshold) low = 1;
        @(posedge clk); #1;
        if (i < m - 1) begin
          checks++;
          if (out_valid) begin failures++; $display("early output"); end
        end else begin
          // the output is registered at the edge that takes the last input
          eph = real'(p0) + dsum / m;
          eamp = asum / m;
          if (low) blanked++;
          checks += 4;
          if (!out_valid) begin failures++; $display("no output w=%0d", w); end
          dp = real'(out_phase) - eph;
          while (dp > 8388608.0) dp -= 16777216.0;
          while (dp < -8388608.0) dp += 16777216.0;
          if (absr(dp) > 1.0) begin failures++; $display("m=%0d w=%0d phase %0d exp %f", m, w, out_phase, eph); end
          if (absr(real'(out_amp) - eamp) > 1.0) begin failures++; $display("amp %0d exp %f", out_amp, eamp); end
          if (out_ok !== !low) begin failures++; $display("ok %b low %b", out_ok, low); end
        end
        if ($urandom_range(0, 4) == 0) begin
          @(negedge clk) in_valid = 0;
          @(posedge clk); #1;
        end
      end
      @(negedge clk) in_valid = 0;
    end
    checks++;
    if (blanked == 0 && m > 10) begin failures++; $display("blanking never exercised"); end
  endtask

  initial begin
    run(15, 60);
    run(1, 200);
    run(64, 30);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
