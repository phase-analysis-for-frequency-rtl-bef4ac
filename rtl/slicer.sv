// slicer: the "Slicer" of the analyzer. It cuts the continuous, aligned output
// stream into equal-length packages that start on the DUT's cycle-synchronous
// trigger, which is what makes coherent averaging over many cycles possible.
//
// Three streams enter: the averaged phase stream (phase, amplitude, validity
// flag) and the delayed power and AUX/status streams. The newest power and AUX
// values are held in registers; a value that arrives in the same clock as a
// phase sample is used at once. Each phase sample is joined with them into one
// pa_sample_t. The trigger comes from outside. It passes a two-flop
// synchronizer, and its rising edge arms the slicer. The next phase sample
// then opens a slice: it becomes record 0 (first = 1), and the following
// samples fill records 1 .. slice_len-1 (last = 1 on the final one). Between
// slices nothing is sent. A trigger edge that comes while a slice is still
// being filled means the DUT cycle is shorter than the slice. It is not
// acted on; it is counted in trig_missed, so that every stored package keeps
// the same length.
//
// Timing: records leave one clock after the phase sample they carry. A slice
// starts with the first phase sample at least TRIG_SYNC_STAGES+1 clocks after
// the trigger edge, so it may start up to one output period late.
// `enable` low stops new slices from starting; a slice already open still
// completes.
//
// From the paper: the trigger, fed to a digital input, divides the stream into
// evenly sized packages synchronous with the DUT cycle. The synchronizer, the
// rule for triggers that come too early and the status counters are this
// design's choices.
module slicer
  import pa_pkg::*;
#(
  parameter int LEN_W = pa_pkg::SLICE_W,
  parameter int CNT_W   = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    enable,
  input  logic [LEN_W-1:0]      slice_len,     // >= 1
  input  logic                    trig_async,    // cycle-synchronous trigger
  // averaged phase stream
  input  logic                    ph_valid,
  input  logic                    ph_ok,
  input  logic signed [PH_W-1:0]  ph_phase,
  input  logic [AMP_W-1:0]        ph_amp,
  // delayed power and AUX/status streams
  input  logic                    pw_valid,
  input  logic [SAMP_W-1:0]       pw_data,
  input  logic                    ax_valid,
  input  logic [SAMP_W-1:0]       ax_data,
  // packaged records
  output logic                    rec_valid,
  output pa_record_t              rec,
  // status
  output logic                    busy,
  output logic [CNT_W-1:0]        slices_started,
  output logic [CNT_W-1:0]        trig_missed
);

  logic [TRIG_SYNC_STAGES-1:0] trig_sync;
  logic                        trig_prev, trig_edge, armed;
  logic [SAMP_W-1:0]           pw_hold, ax_hold, pw_cur, ax_cur;
  logic [LEN_W-1:0]          idx;

  assign trig_edge = trig_sync[TRIG_SYNC_STAGES-1] & ~trig_prev;
  assign pw_cur    = pw_valid ? pw_data : pw_hold;
  assign ax_cur    = ax_valid ? ax_data : ax_hold;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trig_sync <= '0;
      trig_prev <= 1'b0;
    end else begin
      trig_sync <= {trig_sync[TRIG_SYNC_STAGES-2:0], trig_async};
      trig_prev <= trig_sync[TRIG_SYNC_STAGES-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pw_hold <= '0; ax_hold <= '0;
      armed <= 1'b0; busy <= 1'b0; idx <= '0;
      rec_valid <= 1'b0; rec <= '0;
      slices_started <= '0; trig_missed <= '0;
    end else begin
      pw_hold   <= pw_cur;
      ax_hold   <= ax_cur;
      rec_valid <= 1'b0;

      if (trig_edge) begin
        if (busy || armed) trig_missed <= trig_missed + CNT_W'(1);
        else if (enable)   armed <= 1'b1;
      end

      if (ph_valid && (busy || armed)) begin
        rec_valid     <= 1'b1;
        rec.first     <= !busy;
        rec.last      <= ((busy ? idx : '0) == slice_len - LEN_W'(1));
        rec.s.valid   <= ph_ok;
        rec.s.phase   <= ph_phase;
        rec.s.amp     <= ph_amp;
        rec.s.power   <= pw_cur;
        rec.s.aux     <= ax_cur;
        if (!busy) begin
          armed          <= 1'b0;
          slices_started <= slices_started + CNT_W'(1);
        end
        if ((busy ? idx : '0) == slice_len - LEN_W'(1)) begin
          busy <= 1'b0;
          idx  <= '0;
        end else begin
          busy <= 1'b1;
          idx  <= (busy ? idx : '0) + LEN_W'(1);
        end
      end
    end
  end

endmodule
