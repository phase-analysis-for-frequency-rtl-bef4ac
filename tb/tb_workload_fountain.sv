// tb_workload_fountain: the analyzer at 0.5 ms time resolution, as used on a
// caesium fountain clock, where the question is whether the microwave phase
// differs by a few microradians between the two Ramsey interactions.
//
// A real fountain cycle lasts more than a second, which is too long to
// simulate; this test keeps the 0.5 ms records and the configuration and
// shortens the cycle to 18 records (9 ms) with a 16-record slice.
//
// Configuration: pre-decimation 8 (order-3 CIC, gain 512 removed by a
// 6-bit shift, leaving x8), difference frequency 1/8 of the decimated rate
// (1.875 MHz, 64 ADC samples per period, dds_ftw = 2^29), a 4-sample I/Q
// low-pass (one period of the 2*f_diff term), averaging 7500
// (8 * 7500 = 60000 samples = 0.5 ms), power/AUX decimation 60000 with an
// order-1 CIC (gain 60000, shift 16), no alignment delay (the phase path is
// some 100 clocks slower, far below one record).
//
// Stimulus: a beat note of 12000 LSB with +/-3 LSB of uniform noise, which
// also dithers the ADC rounding. (At +/-30 LSB
// one 0.5 ms record scatters by about 10 urad; a real measurement averages
// tens of thousands of cycles to get below that, more than can be simulated.
// With the lower noise two cycles test the resolution of the data path.)
// Its phase is
// PHI0 in the first half of the cycle and PHI0 + DELTA in the second, with
// DELTA = 20 urad: the phase difference a faulty microwave switch could
// leave between the two interactions. The AUX channel steps from 1000 to
// 3000 LSB at the same moment; power is constant.
//
// The host reads each slice and checks: one record per 60000 clocks; all
// records valid (except the first after reset); power and AUX equal to the exact CIC result
// floor(C * 60000 / 2^16); the phase in each half equal to its first record
// within 3 urad; the step between the halves, averaged over the records
// and the two slices, equal to DELTA within 1.5 urad.
module tb_workload_fountain;
  import pa_pkg::*;
  localparam int ADDR_W = 25, REC = 60000, SLEN = 16, CYC = 18 * REC, STEP = 8 * REC;
  localparam int NCYC = 2;
  localparam real PI = 3.14159265358979;
  localparam real PHI0 = 0.13;                       // turns
  localparam real DELTA = 20.0e-6 / (2.0 * PI);      // 20 urad in turns
  localparam real TOL_REC = 3.0e-6 / (2.0 * PI), TOL_STEP = 1.5e-6 / (2.0 * PI);

  logic clk = 0, rst_n = 0, enable = 1;
  pa_cfg_t cfg;
  logic [7:0] num_slots = 8'd2;
  logic adc_valid = 1;
  logic signed [ADC_W-1:0] adc_phase = 0, adc_power = 0, adc_aux = 0;
  logic trig_async = 0;
  logic mem_valid, mem_ready;
  logic [ADDR_W-1:0] mem_addr;
  logic [MEM_DATA_W-1:0] mem_data;
  logic [31:0] host_slices_read = 0;
  logic [31:0] slices_started, slices_done, slices_dropped, trig_missed;
  logic fifo_overflow, slicing;
  int checks = 0, failures = 0;

  phase_analyzer dut (.*);
  dram_model #(.ADDR_W(ADDR_W), .DATA_W(MEM_DATA_W), .READY_PCT(80)) ram (
    .clk, .stall (1'b0), .wr_valid (mem_valid), .wr_addr (mem_addr),
    .wr_data (mem_data), .wr_ready (mem_ready));

  always #4.1667 clk = ~clk;   // 120 MHz

  initial begin
    repeat (NCYC * CYC + 6 * REC) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real absr(real v); return v < 0.0 ? -v : v; endfunction
  function automatic real wrap(real t); return t - $floor(t + 0.5); endfunction  // to [-0.5, 0.5)

  // ---------------- stimulus ----------------
  int n = 0;
  localparam int CYC0 = 1000;   // first trigger
  logic gen_trig = 1;

  always @(negedge clk) begin
    int p;
    real ph, v;
    p = (n + CYC - CYC0) % CYC;   // position in the cycle; periodic before the first trigger too
    ph = (p < STEP) ? PHI0 : PHI0 + DELTA;
    v = 12000.0 * $cos(2.0 * PI * (real'(n % 64) / 64.0 + ph))
        + 6.0 * (real'($urandom) / 4294967296.0 - 0.5);
    adc_phase = ADC_W'($rtoi(v));
    adc_power = 16'sd5000;
    adc_aux   = (p < STEP) ? 16'sd1000 : 16'sd3000;
    trig_async = gen_trig && n >= CYC0 && p < 10;
    n++;
  end

  // ---------------- record spacing ----------------
  int last_rec_clk = -1, clk_n = 0;
  always @(posedge clk) begin
    clk_n++;
    if (rst_n && dut.rec_valid) begin
      if (!dut.rec.first) begin
        checks++;
        if (clk_n - last_rec_clk != REC) begin
          failures++; $display("record spacing %0d", clk_n - last_rec_clk);
        end
      end
      last_rec_clk = clk_n;
    end
  end

  // ---------------- host ----------------
  real step_sum = 0.0;
  int  step_n = 0;

  task automatic host_check_slice(int k);
    pa_record_t r;
    real ph, ref0, ref1, m0, m1;
    int base;
    base = (k % int'(num_slots)) * SLEN;
    // records 1..7 lie in the first half, 9..15 in the second; record 0 and
    // record 8 straddle a change and are not compared
    r = pa_record_t'(ram.read(ADDR_W'(base + 1)));  ref0 = real'(r.s.phase) / 16777216.0;
    r = pa_record_t'(ram.read(ADDR_W'(base + 9)));  ref1 = real'(r.s.phase) / 16777216.0;
    m0 = 0.0; m1 = 0.0;
    for (int i = 0; i < SLEN; i++) begin
      r = pa_record_t'(ram.read(ADDR_W'(base + i)));
      ph = real'(r.s.phase) / 16777216.0;
      checks += 3;
      if (r.first !== (i == 0) || r.last !== (i == SLEN - 1)) begin
        failures++; $display("slice %0d rec %0d first/last %b%b", k, i, r.first, r.last);
      end
      // the very first record also spans the pipeline fill after reset
      if (!r.s.valid && !(k == 0 && i == 0)) begin failures++; $display("slice %0d rec %0d blanked", k, i); end
      if (r.s.power !== 24'd4577) begin failures++; $display("slice %0d rec %0d power %0d", k, i, r.s.power); end
      if (i >= 1 && i <= 7) begin
        checks += 2;
        if (absr(wrap(ph - ref0)) > TOL_REC) begin
          failures++; $display("slice %0d rec %0d phase off by %e rad", k, i, 2.0 * PI * wrap(ph - ref0));
        end
        if (r.s.aux !== 24'd915) begin failures++; $display("slice %0d rec %0d aux %0d", k, i, r.s.aux); end
        m0 += wrap(ph - PHI0);
      end
      if (i >= 9) begin
        checks += 2;
        if (absr(wrap(ph - ref1)) > TOL_REC) begin
          failures++; $display("slice %0d rec %0d phase off by %e rad", k, i, 2.0 * PI * wrap(ph - ref1));
        end
        if (r.s.aux !== 24'd2746) begin failures++; $display("slice %0d rec %0d aux %0d", k, i, r.s.aux); end
        m1 += wrap(ph - PHI0);
      end
    end
    step_sum += (m1 - m0) / 7.0;
    step_n++;
  endtask

  initial begin
    forever begin
      @(negedge clk);
      if (rst_n && slices_done > host_slices_read) begin
        host_check_slice(int'(host_slices_read));
        host_slices_read++;
      end
    end
  end

  // ---------------- sequence ----------------
  initial begin
    real step;
    cfg = '0;
    cfg.pre_decim = 16'd8;      cfg.pre_shift = 6'd6;
    cfg.aux_decim = 16'd60000;  cfg.aux_shift = 6'd16;
    cfg.dds_ftw   = 32'h2000_0000;
    cfg.lp_len    = 8'd4;       cfg.lp_shift = 6'd0;
    cfg.avg_len   = 16'd7500;   cfg.avg_recip = 33'd572662;   // round(2^32 / 7500)
    cfg.amp_threshold = 24'd50000;
    cfg.aux_delay = 6'd0;
    cfg.slice_len = 23'(SLEN);
    repeat (10) @(posedge clk);
    #1 rst_n = 1;
    wait (n >= CYC0 + (NCYC - 1) * CYC + 100);
    gen_trig = 0;
    wait (slices_done == NCYC && host_slices_read == NCYC);
    checks += 3;
    if (slices_dropped != 0 || trig_missed != 0) begin
      failures++; $display("dropped %0d missed %0d", slices_dropped, trig_missed);
    end
    if (step_n != NCYC) begin failures++; $display("host saw %0d slices", step_n); end
    step = step_sum / real'(step_n);
    if (absr(step - DELTA) > TOL_STEP) begin failures++; end
    $display("phase difference between the halves: %.2f urad (applied %.2f urad)",
             2.0e6 * PI * step, 2.0e6 * PI * DELTA);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
