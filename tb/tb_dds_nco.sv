// tb_dds_nco: self-checking test of the DDS oscillator.
//
// For a few tuning words, it steps the oscillator with gaps in in_valid and
// compares each cos/sin output with cos(2*pi*n*ftw/2^32) and sin(...), at
// full scale 2^17-1, computed with real math in the testbench. The tolerance
// is 8 LSB, and it checks that the tag comes back with the right sample
// index. The latency is checked for the first sample: CORDIC_ITER+1 clocks.
module tb_dds_nco;
  localparam int FTW_W = 32, OUT_W = 18, ITER = 18, TAG_W = 16;
  logic clk = 0, rst_n = 0;
  logic [FTW_W-1:0] ftw;
  logic in_valid, out_valid;
  logic [TAG_W-1:0] in_tag, out_tag;
  logic signed [OUT_W-1:0] out_cos, out_sin;
  int checks = 0, failures = 0;

  dds_nco #(.OUT_W(OUT_W), .CORDIC_ITER(ITER), .TAG_W(TAG_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_sent, n_got, cyc, first_in_cyc, first_out_cyc;
  localparam real PI = 3.14159265358979;
  localparam real FS = 131071.0;

  always @(posedge clk) cyc <= cyc + 1;

  function automatic real absr(real v); return v < 0.0 ? -v : v; endfunction

  // Checker
  always @(posedge clk) if (rst_n && out_valid) begin
    real ph, ec, es;
    ph = 2.0 * PI * real'((longint'(n_got) * longint'(ftw)) % 64'h1_0000_0000) / 4294967296.0;
    ec = FS * $cos(ph); es = FS * $sin(ph);
    checks += 3;
    if (absr(real'(out_cos) - ec) > 8.0 || absr(real'(out_sin) - es) > 8.0) begin
      failures++;
      if (failures < 10) $display("n=%0d cos=%0d (%f) sin=%0d (%f)", n_got, out_cos, ec, out_sin, es);
    end
    if (out_tag != TAG_W'(n_got)) begin failures++; $display("tag %0d vs %0d", out_tag, n_got); end
    if (n_got == 0) begin
      first_out_cyc = cyc;
      if (first_out_cyc - first_in_cyc != ITER + 1) begin
        failures++; $display("latency %0d", first_out_cyc - first_in_cyc);
      end
    end
    n_got++;
  end

  task automatic run(logic [31:0] f, int n);
    rst_n = 0; in_valid = 0; in_tag = 0; ftw = f; n_sent = 0; n_got = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    while (n_sent < n) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 4) != 0);
      in_tag = TAG_W'(n_sent);
      if (in_valid && n_sent == 0) first_in_cyc = cyc;
      if (in_valid) n_sent++;
    end
    @(negedge clk) in_valid = 0;
    repeat (ITER + 4) @(posedge clk);
    checks++;
    if (n_got != n) begin failures++; $display("got %0d of %0d", n_got, n); end
  endtask

  initial begin
    cyc = 0;
    run(32'h1000_0000, 100);      // 1/16 of the step rate
    run(32'd858993459, 300);      // 0.2 of the step rate (3 MHz at 15 MS/s)
    run(32'hE123_4567, 300);      // negative frequency
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
