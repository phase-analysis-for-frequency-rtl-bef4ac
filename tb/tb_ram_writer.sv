// tb_ram_writer: self-checking test of the RAM writer.
//
// Slices of 5 records come from a stand-in slicer, one record every 4 clocks,
// into a ring of 3 slots. The RAM accepts writes at random (mem_ready high
// 75% of the time). A stand-in host reads finished slices after a delay, and
// for a while it stops reading, so that slices must be dropped. The reference
// model decides admission from the host count and places slice k of the
// admitted ones at word (k mod 3)*5 + index. Every RAM write is compared with
// it, in order. The test also checks slices_done and slices_dropped. Last, it
// stalls the RAM long enough to overflow the FIFO and checks the sticky
// fifo_overflow flag.
module tb_ram_writer;
  import pa_pkg::*;
  localparam int ADDR_W = 25, LEN = 5, SLOTS = 3, FIFO_AW = 4;
  logic clk = 0, rst_n = 0;
  logic [SLICE_W-1:0] slice_len = SLICE_W'(LEN);
  logic [7:0] num_slots = 8'(SLOTS);
  logic [31:0] host_slices_read = 0;
  logic rec_valid = 0;
  pa_record_t rec = '0;
  logic mem_valid, mem_ready = 0;
  logic [ADDR_W-1:0] mem_addr;
  logic [MEM_DATA_W-1:0] mem_data;
  logic [31:0] slices_done, slices_dropped;
  logic fifo_overflow;
  int checks = 0, failures = 0;

  ram_writer #(.ADDR_W(ADDR_W), .FIFO_AW(FIFO_AW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { logic [ADDR_W-1:0] addr; logic [MEM_DATA_W-1:0] data; logic last; } wr_t;
  wr_t expq[$];
  int admitted = 0, dropped = 0, done = 0;
  logic stall_phase = 0;

  // RAM side: compare each accepted write with the model.
  always @(posedge clk) if (rst_n && mem_valid && mem_ready && !stall_phase) begin
    wr_t e;
    checks++;
    if (expq.size() == 0) begin failures++; $display("unexpected write %h", mem_addr); end
    else begin
      e = expq.pop_front();
      if (mem_addr !== e.addr || mem_data !== e.data) begin
        failures++;
        if (failures < 10) $display("write %0d/%h exp %0d/%h", mem_addr, mem_data, e.addr, e.data);
      end
      if (e.last) done++;
    end
  end

  always @(negedge clk) if (!stall_phase) mem_ready = ($urandom_range(0, 3) != 0);

  logic host_reads = 1;
  // Host: read a finished slice some clocks after it is reported.
  initial begin
    forever begin
      @(negedge clk);
      if (host_reads && rst_n && slices_done > host_slices_read) begin
        repeat ($urandom_range(5, 30)) @(negedge clk);
        host_slices_read++;
      end
    end
  end

  task automatic send_slice();
    logic take;
    int slot;
    wr_t e;
    take = (admitted - int'(host_slices_read)) < SLOTS;
    slot = admitted % SLOTS;
    if (take) admitted++; else dropped++;
    for (int i = 0; i < LEN; i++) begin
      @(negedge clk);
      rec_valid = 1;
      rec.first = (i == 0); rec.last = (i == LEN - 1);
      rec.s = '{valid: 1'($urandom), phase: PH_W'($urandom), amp: AMP_W'($urandom),
                power: SAMP_W'($urandom), aux: SAMP_W'($urandom)};
      if (take) begin
        e.addr = ADDR_W'(slot * LEN + i); e.data = MEM_DATA_W'(rec); e.last = rec.last;
        expq.push_back(e);
      end
      @(negedge clk) rec_valid = 0;
      repeat (2) @(negedge clk);
    end
    repeat ($urandom_range(0, 10)) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int k = 0; k < 8; k++) send_slice();
    host_reads = 0;                                 // host stalls: ring fills
    for (int k = 0; k < 6; k++) send_slice();
    host_reads = 1;
    for (int k = 0; k < 8; k++) send_slice();
    repeat (400) @(negedge clk);
    checks += 4;
    if (expq.size() != 0) begin failures++; $display("%0d writes missing", expq.size()); end
    if (slices_done != 32'(done)) begin failures++; $display("done %0d exp %0d", slices_done, done); end
    if (slices_dropped != 32'(dropped) || dropped == 0) begin
      failures++; $display("dropped %0d exp %0d", slices_dropped, dropped);
    end
    if (fifo_overflow) begin failures++; $display("unexpected overflow"); end
    // RAM stall: 2^FIFO_AW+2 records while mem_ready is low
    stall_phase = 1; mem_ready = 0;
    host_slices_read = 32'(admitted);
    for (int i = 0; i < (1 << FIFO_AW) + 2; i++) begin
      @(negedge clk);
      rec_valid = 1; rec.first = (i == 0); rec.last = 0;
      @(negedge clk) rec_valid = 0;
    end
    checks++;
    if (!fifo_overflow) begin failures++; $display("overflow not flagged"); end
    $display("admitted %0d dropped %0d done %0d", admitted, dropped, done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
