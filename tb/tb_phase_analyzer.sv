// tb_phase_analyzer: end-to-end test of the phase analyzer at its default
// parameters. It runs one complete measurement, from ADC samples to slices in
// RAM, and then the host-side coherent average.
//
// Stimulus (120 MS/s, one sample per clock). The DUT cycle lasts CYC = 7200
// samples (60 us), with a trigger at the start of each cycle. The phase
// channel carries a 3 MHz beat note of amplitude 12000 LSB, plus +/-30 LSB of
// noise, shaped like an optical Ramsey cycle:
//   samples    0..2399  phase phi0 (a Ramsey pulse)
//   samples 2400..2639  amplitude 0 (the AOM is off: the phase must be blanked)
//   samples 2640..4799  the phase ramps through one full turn (crosses +/-pi)
//   samples 4800..7199  phase phi0 + DELTA (the cycle-synchronous excursion)
// The power channel is 5000 LSB while the AOM is on and 0 during the gap. The
// AUX channel steps from 1000 to 3000 LSB at sample 4800, with the phase step.
//
// Configuration: pre-decimation 8 (15 MS/s into the IQ detector, DDS at
// 0.2 = 3 MHz), 5-sample low-pass, averaging 15 (1 us time resolution),
// power/AUX decimation 120, 55-record slices, 2 RAM slots. The host is a
// process in this testbench. It reads each finished slice from the
// behavioural RAM model and checks it.
//   - records come every 120 clocks, and first/last mark the slice ends;
//   - phase in the phi0 and phi0+DELTA regions equals the expected value
//     plus one constant filter offset, taken from the first slice;
//   - records in the gap are blanked, and all others are valid;
//   - AUX and power equal the order-1 CIC's exact gain (floor(C*120/2^7));
//   - with aux_delay = 1 the AUX step lands in the same record as the phase step;
//   - the coherent average over all slices gives DELTA.
// The host pauses for a while, so that slices are dropped. One trigger comes
// inside a slice and must be counted as missed. A second run, after a reset,
// stalls the RAM until the FIFO overflows. Each mechanism is counted, and a
// mechanism that never happened counts as a failure.
module tb_phase_analyzer;
  import pa_pkg::*;
  localparam int ADDR_W = 25, CYC = 7200, SLEN = 55, GAP0 = 2400, GAP1 = 2640, STEP = 4800;
  localparam real PI = 3.14159265358979;
  localparam real PHI0 = 0.31, DELTA = 0.03;
  localparam int NCYC = 10;

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
  logic ram_stall = 0;
  int checks = 0, failures = 0;

  phase_analyzer dut (.*);
  dram_model #(.ADDR_W(ADDR_W), .DATA_W(MEM_DATA_W), .READY_PCT(70)) ram (
    .clk, .stall (ram_stall), .wr_valid (mem_valid), .wr_addr (mem_addr),
    .wr_data (mem_data), .wr_ready (mem_ready));

  always #4.1667 clk = ~clk;   // 120 MHz

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real absr(real v); return v < 0.0 ? -v : v; endfunction
  function automatic real wrap(real t); return t - $floor(t + 0.5); endfunction  // to [-0.5, 0.5)

  // ---------------- stimulus ----------------
  int n = 0;              // sample index
  int cyc0 = 4000;        // first trigger
  int extra_trig_at = -1;
  logic gen_trig = 1;

  always @(negedge clk) begin
    int p;
    real ph, amp, v;
    p = (n >= cyc0) ? (n - cyc0) % CYC : (n + CYC - (cyc0 % CYC)) % CYC;
    if (p < GAP1)      ph = PHI0;
    else if (p < STEP) ph = PHI0 + real'(p - GAP1) / real'(STEP - GAP1);
    else               ph = PHI0 + DELTA;
    amp = (p >= GAP0 && p < GAP1) ? 0.0 : 12000.0;
    v = amp * $cos(2.0 * PI * (real'(n % 40) * 0.025 + ph))
        + real'($urandom_range(0, 60)) - 30.0;
    adc_phase = ADC_W'($rtoi(v));
    adc_power = (p >= GAP0 && p < GAP1) ? 16'sd0 : 16'sd5000;
    adc_aux   = (p < STEP) ? 16'sd1000 : 16'sd3000;
    trig_async = gen_trig && n >= cyc0 && (p < 10 || (n >= extra_trig_at && n < extra_trig_at + 10));
    n++;
  end

  // ---------------- mechanism counters ----------------
  int m_wrap = 0, m_blanked = 0, m_dropped, m_missed, m_stall, m_overflow = 0, m_aligned = 0,
      m_slices = 0, m_decim = 0;
  logic signed [PH_W-1:0] last_iq_phase = 0;
  int last_rec_cyc = -1, clk_n = 0;

  always @(posedge clk) begin
    clk_n++;
    if (dut.iq_valid) begin
      if ((dut.iq_phase[PH_W-1] != last_iq_phase[PH_W-1]) &&
          (dut.iq_phase > 24'sd4194304 || dut.iq_phase < -24'sd4194304) &&
          (last_iq_phase > 24'sd4194304 || last_iq_phase < -24'sd4194304)) m_wrap++;
      last_iq_phase = dut.iq_phase;
    end
    if (dut.dec_valid) m_decim++;
    // time resolution: one record per 120 clocks inside a slice
    if (rst_n && dut.rec_valid) begin
      if (!dut.rec.first && !ram_stall) begin
        checks++;
        if (clk_n - last_rec_cyc != 120) begin
          failures++; $display("record spacing %0d", clk_n - last_rec_cyc);
        end
      end
      last_rec_cyc = clk_n;
    end
  end

  // ---------------- host ----------------
  real ref_c;            // constant phase offset of the filters
  logic have_ref = 0;
  real acc_ph[SLEN];     // coherent average, relative to ref
  int  acc_n[SLEN];
  logic host_pause = 0;

  task automatic host_check_slice(int k);
    int slot, base, aux_step_idx, ph_step_idx;
    pa_record_t r;
    real ph, e;
    int inval_in_gap;
    slot = k % int'(num_slots);
    base = slot * SLEN;
    aux_step_idx = -1; ph_step_idx = -1; inval_in_gap = 0;
    if (!have_ref) begin
      // the first slice fixes the constant filter offset, from record 5
      r = pa_record_t'(ram.read(ADDR_W'(base + 5)));
      ref_c = wrap(real'(r.s.phase) / 16777216.0 - PHI0);
      have_ref = 1;
    end
    for (int i = 0; i < SLEN; i++) begin
      r = pa_record_t'(ram.read(ADDR_W'(base + i)));
      checks += 2;
      if (r.first !== (i == 0) || r.last !== (i == SLEN - 1)) begin
        failures++; $display("slice %0d rec %0d first/last %b%b", k, i, r.first, r.last);
      end
      if (i >= 17 && i <= 25) begin
        if (!r.s.valid) inval_in_gap++;
      end else if (!r.s.valid) begin
        failures++; $display("slice %0d rec %0d blanked outside gap (amp %0d)", k, i, r.s.amp);
      end
      ph = real'(r.s.phase) / 16777216.0;
      if ((i >= 3 && i <= 16) || (i >= 43)) begin
        e = (i <= 16) ? PHI0 : PHI0 + DELTA;
        checks++;
        if (absr(wrap(ph - ref_c - e)) > 2.0e-3) begin
          failures++; $display("slice %0d rec %0d phase %f exp %f", k, i, ph, wrap(e + ref_c));
        end
        acc_ph[i] += wrap(ph - ref_c - PHI0);
        acc_n[i]++;
      end
      // AUX and power, away from their steps
      if ((i >= 6 && i <= 16) || (i >= 47)) begin
        checks += 2;
        if (r.s.aux !== ((i <= 16) ? 24'd937 : 24'd2812)) begin
          failures++; $display("slice %0d rec %0d aux %0d", k, i, r.s.aux);
        end
        if (r.s.power !== 24'd4687) begin
          failures++; $display("slice %0d rec %0d power %0d", k, i, r.s.power);
        end
      end
      if (i > 30 && aux_step_idx < 0 && r.s.aux > 24'd1500) aux_step_idx = i;
      // the ramp ends just below PHI0, so only a positive offset marks the step
      if (i > 38 && ph_step_idx < 0 && wrap(ph - ref_c - PHI0) > DELTA / 2
          && wrap(ph - ref_c - PHI0) < 2 * DELTA) ph_step_idx = i;
    end
    m_blanked += inval_in_gap;
    checks += 2;
    if (inval_in_gap < 1 || inval_in_gap > 5) begin
      failures++; $display("slice %0d: %0d blanked records in gap", k, inval_in_gap);
    end
    // The phase path is one record slower than the AUX path (IQ pipeline,
    // phase CIC and I/Q low-pass); aux_delay = 1 must line the steps up.
    if (aux_step_idx < 0 || ph_step_idx < 0 || aux_step_idx != ph_step_idx) begin
      failures++; $display("slice %0d: aux step %0d phase step %0d", k, aux_step_idx, ph_step_idx);
    end else m_aligned++;
    m_slices++;
  endtask

  initial begin
    forever begin
      @(negedge clk);
      if (rst_n && !host_pause && !ram_stall && slices_done > host_slices_read) begin
        repeat ($urandom_range(100, 1500)) @(negedge clk);
        host_check_slice(int'(host_slices_read));
        host_slices_read++;
      end
    end
  end

  // ---------------- sequence ----------------
  initial begin
    real avg_delta;
    int navg;
    cfg = '0;
    cfg.pre_decim = 16'd8;     cfg.pre_shift = 6'd6;
    cfg.aux_decim = 16'd120;   cfg.aux_shift = 6'd7;
    cfg.dds_ftw   = 32'd858993459;
    cfg.lp_len    = 8'd5;      cfg.lp_shift = 6'd0;
    cfg.avg_len   = 16'd15;    cfg.avg_recip = 33'd286331153;
    cfg.amp_threshold = 24'd100000;
    cfg.aux_delay = 6'd1;
    cfg.slice_len = 23'(SLEN);
    foreach (acc_n[i]) begin acc_n[i] = 0; acc_ph[i] = 0.0; end
    extra_trig_at = cyc0 + 6 * CYC + 3600;
    repeat (10) @(posedge clk);
    #1 rst_n = 1;
    // host is slow during cycles 2..4: the two-slot ring fills up
    wait (n >= cyc0 + 2 * CYC) host_pause = 1;
    wait (n >= cyc0 + 5 * CYC) host_pause = 0;
    wait (n >= cyc0 + NCYC * CYC);
    gen_trig = 0;
    wait (slicing == 0 && slices_done == host_slices_read && !mem_valid);
    repeat (200) @(posedge clk);
    m_dropped = int'(slices_dropped);
    m_missed  = int'(trig_missed);
    m_stall   = ram.stall_cycles;
    checks += 3;
    if (slices_started != slices_done + slices_dropped) begin
      failures++; $display("started %0d done %0d dropped %0d", slices_started, slices_done, slices_dropped);
    end
    if (int'(slices_done) != m_slices) begin failures++; $display("host saw %0d slices", m_slices); end
    if (trig_missed != 32'd1) begin failures++; $display("missed triggers %0d", trig_missed); end
    // coherent average: step between the two regions
    avg_delta = 0.0; navg = 0;
    for (int i = 43; i < SLEN; i++) if (acc_n[i] > 0) begin avg_delta += acc_ph[i] / acc_n[i]; navg++; end
    avg_delta /= navg;
    checks++;
    if (absr(avg_delta - DELTA) > 2.0e-4) begin failures++; $display("averaged step %f", avg_delta); end
    $display("averaged phase step %f turn (expected %f) over %0d slices", avg_delta, DELTA, m_slices);

    // second run: the RAM stalls until the FIFO overflows
    rst_n = 0; num_slots = 8'd16; ram_stall = 1; host_slices_read = 0;
    repeat (5) @(posedge clk);
    #1 rst_n = 1; gen_trig = 1; cyc0 = n + 100;
    wait (fifo_overflow || n >= cyc0 + 11 * CYC);
    if (fifo_overflow) m_overflow++;

    $display("mechanisms: decimated=%0d wraps=%0d blanked=%0d slices=%0d dropped=%0d missed=%0d ram_stalls=%0d aligned=%0d overflow=%0d",
             m_decim, m_wrap, m_blanked, m_slices, m_dropped, m_missed, m_stall, m_aligned, m_overflow);
    checks += 9;
    if (m_decim == 0)    begin failures++; $display("no decimation"); end
    if (m_wrap == 0)     begin failures++; $display("no phase wrap"); end
    if (m_blanked == 0)  begin failures++; $display("no blanking"); end
    if (m_slices == 0)   begin failures++; $display("no slices"); end
    if (m_dropped == 0)  begin failures++; $display("no dropped slice"); end
    if (m_missed == 0)   begin failures++; $display("no missed trigger"); end
    if (m_stall == 0)    begin failures++; $display("no RAM stall"); end
    if (m_aligned == 0)  begin failures++; $display("no aligned aux step"); end
    if (m_overflow == 0) begin failures++; $display("no FIFO overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
