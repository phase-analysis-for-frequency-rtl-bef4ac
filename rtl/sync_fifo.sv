// sync_fifo: single-clock first-word-fall-through FIFO of DEPTH (a power of
// two) entries of W bits, used by the RAM writer to absorb stalls of the RAM.
//
// It is a circular buffer with read and write pointers that are one bit wider
// than the address, so that full and empty can be told apart. rd_data always
// shows the oldest entry while empty is low. A push while full and a pop while
// empty are ignored; the assertions flag them, since callers must check first.
// The structure is this design's choice; the paper does not describe buffering.
module sync_fifo #(
  parameter int W     = 8,
  parameter int AW    = 4,
  localparam int DEPTH = 1 << AW
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] wr_data,
  input  logic         pop,
  output logic [W-1:0] rd_data,
  output logic         full,
  output logic         empty,
  output logic [AW:0]  level
);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wp, rp;

  assign level   = wp - rp;
  assign full    = (level == (AW+1)'(DEPTH));
  assign empty   = (wp == rp);
  assign rd_data = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (push && !full) mem[wp[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (push && !full) wp <= wp + (AW+1)'(1);
      if (pop && !empty) rp <= rp + (AW+1)'(1);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));

endmodule
