// ram_writer: the "Write to RAM" block. It stores the packages from the slicer
// in the RAM next to the FPGA, where the host picks up finished slices.
//
// The RAM holds a ring of num_slots slots. Each slot has room for slice_len
// records, and slot k starts at word k*slice_len (the address is built by
// adding, with no multiplier). One record goes into one MEM_DATA_W-bit word,
// padded with zeros. The host says how many slices it has read by writing
// host_slices_read, a running count. When a new slice begins and all slots
// still hold unread slices, the whole slice is dropped and counted in
// slices_dropped, so the host never reads a slot that is half overwritten.
// Records wait in a FIFO for the RAM, which may stall the writes by holding
// mem_ready low. If the FIFO is full when a record arrives, the record is lost
// and the sticky flag fifo_overflow is set. slices_done counts slices whose
// last word the RAM has accepted; it tells the host that a slot can be read.
//
// RAM handshake: mem_valid, mem_addr and mem_data hold steady until mem_ready
// is high on a rising clock edge, and one word is written then. Set slice_len
// and num_slots while in reset.
//
// From the paper: packages are written to the RAM attached to the FPGA, and
// the host watches the acquisition and reads finished slices. The ring of
// slots, the drop policy, the FIFO and the handshake are this design's
// choices.
module ram_writer
  import pa_pkg::*;
#(
  parameter int ADDR_W  = 25,   // 2^25 words of 128 bits = 512 MiB
  parameter int LEN_W = pa_pkg::SLICE_W,
  parameter int SLOT_W  = 8,
  parameter int FIFO_AW = 9,
  parameter int CNT_W   = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [LEN_W-1:0]      slice_len,
  input  logic [SLOT_W-1:0]       num_slots,         // >= 1, num_slots*slice_len <= 2^ADDR_W
  input  logic [CNT_W-1:0]        host_slices_read,
  // records from the slicer
  input  logic                    rec_valid,
  input  pa_record_t              rec,
  // RAM write port
  output logic                    mem_valid,
  output logic [ADDR_W-1:0]       mem_addr,
  output logic [MEM_DATA_W-1:0]   mem_data,
  input  logic                    mem_ready,
  // status
  output logic [CNT_W-1:0]        slices_done,
  output logic [CNT_W-1:0]        slices_dropped,
  output logic                    fifo_overflow
);

  typedef struct packed {
    logic              last;
    logic [ADDR_W-1:0] addr;
    pa_record_t        rec;
  } entry_t;

  localparam int EW = $bits(entry_t);

  logic [CNT_W-1:0]  slices_admitted;
  logic [SLOT_W-1:0] slot;
  logic [ADDR_W-1:0] base, addr;
  logic              dropping;
  logic              admit, fifo_full, fifo_empty, push, pop;
  entry_t            wr_e, rd_e;
  logic [FIFO_AW:0]  unused_level;

  // A slice may start if an unread slot is left.
  assign admit = (slices_admitted - host_slices_read) < CNT_W'(num_slots);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slices_admitted <= '0; slices_dropped <= '0;
      slot <= '0; base <= '0; addr <= '0; dropping <= 1'b0;
      fifo_overflow <= 1'b0;
    end else if (rec_valid) begin
      if (rec.first) begin
        if (admit) begin
          dropping        <= 1'b0;
          slices_admitted <= slices_admitted + CNT_W'(1);
          addr            <= base + ADDR_W'(1);
          if (slot == num_slots - SLOT_W'(1)) begin
            slot <= '0;
            base <= '0;
          end else begin
            slot <= slot + SLOT_W'(1);
            base <= base + ADDR_W'(slice_len);
          end
        end else begin
          dropping       <= 1'b1;
          slices_dropped <= slices_dropped + CNT_W'(1);
        end
      end else begin
        addr <= addr + ADDR_W'(1);
      end
      if (push && fifo_full) fifo_overflow <= 1'b1;
    end
  end

  assign push = rec_valid && (rec.first ? admit : !dropping);
  assign wr_e = '{last: rec.last, addr: (rec.first ? base : addr), rec: rec};

  sync_fifo #(.W(EW), .AW(FIFO_AW)) u_fifo (
    .clk, .rst_n,
    .push (push && !fifo_full), .wr_data (wr_e),
    .pop, .rd_data (rd_e),
    .full (fifo_full), .empty (fifo_empty), .level (unused_level)
  );

  assign mem_valid = !fifo_empty;
  assign mem_addr  = rd_e.addr;
  assign mem_data  = MEM_DATA_W'(rd_e.rec);
  assign pop       = mem_valid && mem_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                slices_done <= '0;
    else if (pop && rd_e.last) slices_done <= slices_done + CNT_W'(1);
  end

  // A record must fit in one RAM word.
  if (RECORD_W > MEM_DATA_W) begin : g_width_check
    $error("pa_record_t does not fit in a RAM word");
  end

  // The write request may not change or go away while the RAM stalls it.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
            mem_valid && !mem_ready |=> mem_valid && $stable(mem_addr) && $stable(mem_data));

endmodule
