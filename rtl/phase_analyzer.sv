// phase_analyzer: the FPGA data path of a cycle-synchronous phase analyzer
// for frequency standards. This is the top module.
//
// The analyzer looks for tiny phase changes that repeat with the operating
// cycle of a clock under test: the switching steps of a fountain clock or the
// AOM pulses of an optical standard. Such changes lie far below the noise of a
// single cycle. They become visible once the phase record of many cycles is
// averaged, with every record aligned to a trigger from the clock. The
// analog side (not part of this RTL) mixes the DUT signal down to f_diff. The
// ADC samples it, together with a power-detector signal and an AUX/status
// signal, at 120 MS/s, on one clock shared with the whole data path.
//
//   phase channel:  cic_decimator (pre_decim) -> iq_detector (DDS at f_diff,
//                   mix, low-pass, CORDIC) -> phase_avg_blank (avg_len,
//                   amplitude blanking)
//   power channel:  cic_decimator (aux_decim, order 1) -> delay_line (aux_delay)
//   AUX channel:    cic_decimator (aux_decim, order 1) -> delay_line (aux_delay)
//   all three    -> slicer (cycle trigger, slice_len) -> ram_writer -> RAM
//
// The output time resolution is pre_decim*avg_len samples for phase and
// aux_decim samples for the other two channels; the host makes them equal,
// for example 8*15 = 120 samples = 1 us. With AUX_CIC_ORDER = 1 the power
// and AUX channels deliver the plain mean over each output interval, the same
// window the phase averaging uses. Their path is then shorter than the phase
// path by the IQ detector's delay: the 44-clock pipeline plus the group
// delays of the phase CIC and the I/Q low-pass. aux_delay makes up for that
// in whole output samples. The host computes the coherent
// average, phase unwrapping and statistics from the slices in RAM.
//
// Interface: one ADC word per channel on every clock with adc_valid high.
// trig_async is the asynchronous cycle trigger. cfg is the host's
// configuration (see pa_pkg) and must be stable while rst_n is high. There is
// a valid/ready write port to the RAM and a set of status counters for the
// host.
//
// The chain of blocks follows the analyzer's block diagram. The number
// formats, the filter types and the control and status registers are this
// design's own.
module phase_analyzer
  import pa_pkg::*;
#(
  parameter int CIC_ORDER = 3,       // phase channel pre-decimation filter
  parameter int AUX_CIC_ORDER = 1,   // power/AUX channels: mean over one output interval
  parameter int ADDR_W    = 25,
  parameter int SLOT_W    = 8,
  parameter int FIFO_AW   = 9,
  parameter int CNT_W     = 32
) (
  input  logic                   clk,            // ADC sample clock, 120 MHz
  input  logic                   rst_n,
  input  pa_cfg_t                cfg,
  input  logic [SLOT_W-1:0]      num_slots,
  input  logic                   enable,         // allow new slices
  // ADC front end
  input  logic                   adc_valid,
  input  logic signed [ADC_W-1:0] adc_phase,     // down-mixed DUT signal at f_diff
  input  logic signed [ADC_W-1:0] adc_power,     // power detector
  input  logic signed [ADC_W-1:0] adc_aux,       // AUX / status
  input  logic                   trig_async,     // cycle-synchronous trigger
  // on-board RAM
  output logic                   mem_valid,
  output logic [ADDR_W-1:0]      mem_addr,
  output logic [MEM_DATA_W-1:0]  mem_data,
  input  logic                   mem_ready,
  // host
  input  logic [CNT_W-1:0]       host_slices_read,
  output logic [CNT_W-1:0]       slices_started,
  output logic [CNT_W-1:0]       slices_done,
  output logic [CNT_W-1:0]       slices_dropped,
  output logic [CNT_W-1:0]       trig_missed,
  output logic                   fifo_overflow,
  output logic                   slicing
);

  // ---- phase channel ----
  logic                     dec_valid;
  logic signed [SAMP_W-1:0] dec_data;

  cic_decimator #(.ORDER(CIC_ORDER)) u_dec_phase (
    .clk, .rst_n, .decim (cfg.pre_decim), .shift (cfg.pre_shift),
    .in_valid (adc_valid), .in_data (adc_phase),
    .out_valid (dec_valid), .out_data (dec_data)
  );

  logic                   iq_valid;
  logic signed [PH_W-1:0] iq_phase;
  logic [AMP_W-1:0]       iq_amp;

  iq_detector u_iq (
    .clk, .rst_n, .ftw (cfg.dds_ftw), .lp_len (cfg.lp_len), .lp_shift (cfg.lp_shift),
    .in_valid (dec_valid), .in_data (dec_data),
    .out_valid (iq_valid), .out_phase (iq_phase), .out_amp (iq_amp)
  );

  logic                   avg_valid, avg_ok;
  logic signed [PH_W-1:0] avg_phase;
  logic [AMP_W-1:0]       avg_amp;

  phase_avg_blank u_avg (
    .clk, .rst_n, .avg_len (cfg.avg_len), .avg_recip (cfg.avg_recip),
    .amp_threshold (cfg.amp_threshold),
    .in_valid (iq_valid), .in_phase (iq_phase), .in_amp (iq_amp),
    .out_valid (avg_valid), .out_ok (avg_ok), .out_phase (avg_phase), .out_amp (avg_amp)
  );

  // ---- power and AUX channels ----
  logic                     pw_dec_valid, ax_dec_valid, pw_valid, ax_valid;
  logic signed [SAMP_W-1:0] pw_dec, ax_dec;
  logic [SAMP_W-1:0]        pw_data, ax_data;

  cic_decimator #(.ORDER(AUX_CIC_ORDER)) u_dec_power (
    .clk, .rst_n, .decim (cfg.aux_decim), .shift (cfg.aux_shift),
    .in_valid (adc_valid), .in_data (adc_power),
    .out_valid (pw_dec_valid), .out_data (pw_dec)
  );

  cic_decimator #(.ORDER(AUX_CIC_ORDER)) u_dec_aux (
    .clk, .rst_n, .decim (cfg.aux_decim), .shift (cfg.aux_shift),
    .in_valid (adc_valid), .in_data (adc_aux),
    .out_valid (ax_dec_valid), .out_data (ax_dec)
  );

  delay_line u_dly_power (
    .clk, .rst_n, .delay (cfg.aux_delay),
    .in_valid (pw_dec_valid), .in_data (pw_dec),
    .out_valid (pw_valid), .out_data (pw_data)
  );

  delay_line u_dly_aux (
    .clk, .rst_n, .delay (cfg.aux_delay),
    .in_valid (ax_dec_valid), .in_data (ax_dec),
    .out_valid (ax_valid), .out_data (ax_data)
  );

  // ---- packaging and storage ----
  logic       rec_valid;
  pa_record_t rec;

  slicer #(.CNT_W(CNT_W)) u_slicer (
    .clk, .rst_n, .enable, .slice_len (cfg.slice_len), .trig_async,
    .ph_valid (avg_valid), .ph_ok (avg_ok), .ph_phase (avg_phase), .ph_amp (avg_amp),
    .pw_valid, .pw_data, .ax_valid, .ax_data,
    .rec_valid, .rec,
    .busy (slicing), .slices_started, .trig_missed
  );

  ram_writer #(
    .ADDR_W(ADDR_W), .SLOT_W(SLOT_W), .FIFO_AW(FIFO_AW), .CNT_W(CNT_W)
  ) u_writer (
    .clk, .rst_n, .slice_len (cfg.slice_len), .num_slots, .host_slices_read,
    .rec_valid, .rec,
    .mem_valid, .mem_addr, .mem_data, .mem_ready,
    .slices_done, .slices_dropped, .fifo_overflow
  );

endmodule
