// tb_slicer: self-checking test of the slicer.
//
// A phase stream with a sample every 4 clocks, plus power and AUX streams
// whose values come at other moments (sometimes in the same clock as a phase
// sample), feed the slicer. Triggers come at random moments: some well
// spaced, some inside a running slice, and one while `enable` is low. A
// reference model in the testbench follows the stated rules: the edge is seen
// after the two-flop synchronizer and edge detector, the next phase sample
// opens a slice of slice_len records, edges during a slice are counted as
// missed, and power/AUX are the newest values, with a same-clock value taking
// precedence. The test compares every record field by field, and the
// slices_started and trig_missed counters.
module tb_slicer;
  import pa_pkg::*;
  logic clk = 0, rst_n = 0, enable = 1;
  logic [SLICE_W-1:0] slice_len = 23'd7;
  logic trig_async = 0;
  logic ph_valid = 0, ph_ok = 0;
  logic signed [PH_W-1:0] ph_phase = 0;
  logic [AMP_W-1:0] ph_amp = 0;
  logic pw_valid = 0, ax_valid = 0;
  logic [SAMP_W-1:0] pw_data = 0, ax_data = 0;
  logic rec_valid, busy;
  pa_record_t rec;
  logic [31:0] slices_started, trig_missed;
  int checks = 0, failures = 0;

  slicer dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- reference model, evaluated on each rising edge with the inputs of that edge ----
  logic s1 = 0, s2 = 0, prev = 0;
  logic m_armed = 0, m_busy = 0;
  int m_idx = 0, m_started = 0, m_missed = 0;
  logic [SAMP_W-1:0] m_pw = 0, m_ax = 0;
  logic exp_valid = 0;
  pa_record_t exp_rec;
  int n_recs = 0, n_missed_seen = 0;

  always @(posedge clk) if (rst_n) begin
    logic edge_seen, old_busy, old_armed;
    logic [SAMP_W-1:0] pw_c, ax_c;
    // check the record registered at the previous edge
    checks++;
    if (rec_valid !== exp_valid) begin failures++; $display("valid %b exp %b", rec_valid, exp_valid); end
    else if (rec_valid) begin
      checks++; n_recs++;
      if (rec !== exp_rec) begin failures++; $display("rec %h exp %h", rec, exp_rec); end
    end
    checks += 2;
    if (slices_started != 32'(m_started)) begin failures++; $display("started %0d exp %0d", slices_started, m_started); end
    if (trig_missed != 32'(m_missed)) begin failures++; $display("missed %0d exp %0d", trig_missed, m_missed); end

    edge_seen = s2 & ~prev;
    pw_c = pw_valid ? pw_data : m_pw;
    ax_c = ax_valid ? ax_data : m_ax;
    exp_valid = 0;
    old_busy = m_busy; old_armed = m_armed;
    // both rules look at the state before this edge
    if (edge_seen) begin
      if (old_busy || old_armed) m_missed++;
      else if (enable) m_armed = 1;
    end
    if (ph_valid && (old_busy || old_armed)) begin
      exp_valid = 1;
      if (!old_busy) begin m_idx = 0; m_armed = 0; m_started++; end
      exp_rec.first = (m_idx == 0);
      exp_rec.last = (m_idx == int'(slice_len) - 1);
      exp_rec.s = '{valid: ph_ok, phase: ph_phase, amp: ph_amp, power: pw_c, aux: ax_c};
      if (m_idx == int'(slice_len) - 1) begin m_busy = 0; m_idx = 0; end
      else begin m_busy = 1; m_idx++; end
    end
    m_pw = pw_c; m_ax = ax_c;
    prev = s2; s2 = s1; s1 = trig_async;
  end

  // ---- stimulus ----
  int cyc = 0;
  always @(negedge clk) begin
    cyc++;
    ph_valid = (cyc % 4 == 0);
    ph_ok = 1'($urandom_range(0, 1));
    ph_phase = PH_W'($urandom); ph_amp = AMP_W'($urandom);
    pw_valid = (cyc % 4 == 0) ? ($urandom_range(0, 1) == 1) : ($urandom_range(0, 5) == 0);
    ax_valid = ($urandom_range(0, 6) == 0);
    pw_data = SAMP_W'($urandom); ax_data = SAMP_W'($urandom);
  end

  task automatic pulse_trigger(int gap);
    @(negedge clk) trig_async = 1;
    repeat (3) @(negedge clk);
    trig_async = 0;
    repeat (gap) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    pulse_trigger(60);          // full slice, then idle
    pulse_trigger(10);          // slice running ...
    pulse_trigger(60);          // ... so this one is missed
    enable = 0;
    pulse_trigger(60);          // disabled: ignored
    enable = 1;
    slice_len = 23'd1;
    pulse_trigger(20);          // one-record slice
    slice_len = 23'd7;
    for (int i = 0; i < 20; i++) pulse_trigger($urandom_range(2, 40));
    repeat (60) @(negedge clk);
    checks += 2;
    if (m_missed < 2) begin failures++; $display("too few missed triggers"); end
    if (m_started < 5) begin failures++; $display("too few slices"); end
    $display("slices %0d missed %0d records %0d", m_started, m_missed, n_recs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
