// pa_pkg: the widths, record types and configuration bundle that the phase
// analyzer's blocks share.
//
// The analyzer samples three analog channels (the down-mixed DUT signal at
// f_diff, a power-detector output and an AUX/status voltage) with one clock
// that is also the ADC sample clock. It digitises at 120 MS/s, which is the
// paper's rate. Every other width below is this design's own choice: a 16-bit
// ADC word, 24-bit filtered samples, and phase as a 24-bit two's-complement
// fraction of one turn, so that -2^23 is -pi and 2^23-1 is just below +pi.
// Because the format wraps modulo 2*pi, phase arithmetic is plain integer
// arithmetic.
package pa_pkg;

  // Sample rate of the ADC and clock rate of the whole data path (paper: 120 MS/s).
  localparam int unsigned SAMPLE_RATE_HZ = 120_000_000;

  localparam int ADC_W   = 16;  // ADC word width (assumed)
  localparam int SAMP_W  = 24;  // filtered/decimated sample width (assumed)
  localparam int PH_W    = 24;  // phase width, fraction of a turn (assumed)
  localparam int AMP_W   = 24;  // amplitude width (assumed)
  localparam int TRIG_SYNC_STAGES = 2;

  // Runtime-configurable widths of the control registers (assumed).
  localparam int DEC_W   = 16;  // decimation factors up to 65535
  localparam int SHIFT_W = 6;   // output right shifts up to 63
  localparam int FTW_W   = 32;  // DDS tuning word width
  localparam int LP_W    = 8;   // log2 of the maximum moving-average length
  localparam int AVG_W   = 16;  // averaging factor up to 65535
  localparam int RECIP_FRAC = 32; // fraction bits of 1/M
  localparam int RECIP_W = RECIP_FRAC + 1;
  localparam int DLY_W   = 6;   // auxiliary delay up to 63 output samples
  localparam int SLICE_W = 23;  // slice length up to 2^23-1 records (~8.4 s at 1 us)

  // One aligned output sample: averaged phase and amplitude of the DUT
  // signal, the blanking flag, and the delayed power and AUX samples.
  typedef struct packed {
    logic              valid;   // 1: phase trustworthy (amplitude above threshold)
    logic [PH_W-1:0]   phase;   // fraction of a turn
    logic [AMP_W-1:0]  amp;
    logic [SAMP_W-1:0] power;
    logic [SAMP_W-1:0] aux;
  } pa_sample_t;

  // A sample once it has been placed in a slice.
  typedef struct packed {
    logic       first;          // first record of a slice
    logic       last;           // last record of a slice
    pa_sample_t s;
  } pa_record_t;

  localparam int RECORD_W = $bits(pa_record_t);
  localparam int MEM_DATA_W = 128;  // on-board RAM word: one record, zero-padded

  // Runtime configuration, written by the host before a measurement.
  typedef struct packed {
    logic [DEC_W-1:0]    pre_decim;     // phase channel: CIC decimation ahead of IQ detection
    logic [SHIFT_W-1:0]  pre_shift;     // phase channel: CIC gain removal (right shift)
    logic [DEC_W-1:0]    aux_decim;     // power/AUX channels: CIC decimation to the output rate
    logic [SHIFT_W-1:0]  aux_shift;     // power/AUX channels: CIC gain removal
    logic [FTW_W-1:0]    dds_ftw;       // DDS step per decimated sample = f_diff/f_dec * 2^32
    logic [LP_W-1:0]     lp_len;        // IQ low-pass length in decimated samples (1..255)
    logic [SHIFT_W-1:0]  lp_shift;      // IQ low-pass gain removal
    logic [AVG_W-1:0]    avg_len;       // phase averaging factor M
    logic [RECIP_W-1:0]  avg_recip;     // round(2^32 / M)
    logic [AMP_W-1:0]    amp_threshold; // blanking threshold on the amplitude
    logic [DLY_W-1:0]    aux_delay;     // delay of power/AUX in output samples
    logic [SLICE_W-1:0]  slice_len;     // records per slice
  } pa_cfg_t;

  // CORDIC micro-rotation angles atan(2^-i), in turns scaled by 2^32,
  // i.e. round(atan(2^-i) / (2*pi) * 2^32).
  function automatic logic [31:0] cordic_atan32(input int i);
    case (i)
      0: return 32'd536870912;
      1: return 32'd316933406;
      2: return 32'd167458907;
      3: return 32'd85004756;
      4: return 32'd42667331;
      5: return 32'd21354465;
      6: return 32'd10679838;
      7: return 32'd5340245;
      8: return 32'd2670163;
      9: return 32'd1335087;
      10: return 32'd667544;
      11: return 32'd333772;
      12: return 32'd166886;
      13: return 32'd83443;
      14: return 32'd41722;
      15: return 32'd20861;
      16: return 32'd10430;
      17: return 32'd5215;
      18: return 32'd2608;
      19: return 32'd1304;
      20: return 32'd652;
      21: return 32'd326;
      22: return 32'd163;
      23: return 32'd81;
      24: return 32'd41;
      25: return 32'd20;
      26: return 32'd10;
      27: return 32'd5;
      28: return 32'd3;
      29: return 32'd1;
      30: return 32'd1;
      31: return 32'd0;
      default: return 32'd0;
    endcase
  endfunction

  // The same angle at a phase width of pw bits (pw <= 32), rounded.
  function automatic logic [31:0] cordic_atan(input int i, input int pw);
    logic [32:0] a;
    a = {1'b0, cordic_atan32(i)};
    if (pw >= 32) return a[31:0];
    a = a + (33'd1 << (31 - pw));
    return 32'(a >> (32 - pw));
  endfunction

  // 1/K of a CORDIC in vectoring mode (K = 1.64676...), scaled by 2^16.
  localparam int unsigned CORDIC_INV_GAIN_Q16 = 39797;

endpackage
