// dram_model: behavioural model of the RAM on the FPGA board, for testbenches
// only. It is not synthesizable and stands in for a memory and controller
// that the analyzer uses but does not design.
//
// It accepts one word per clock through a valid/ready write port. The ready
// signal is random (high with probability READY_PCT percent) unless `stall`
// holds it low. Words are kept in a sparse associative array; `read` returns
// a stored word, or zero for an address never written. `stall_cycles` counts
// clocks in which a write was pending but not accepted.
module dram_model #(
  parameter int ADDR_W = 25,
  parameter int DATA_W = 128,
  parameter int READY_PCT = 80
) (
  input  logic              clk,
  input  logic              stall,
  input  logic              wr_valid,
  input  logic [ADDR_W-1:0] wr_addr,
  input  logic [DATA_W-1:0] wr_data,
  output logic              wr_ready
);
  logic [DATA_W-1:0] mem [logic [ADDR_W-1:0]];
  int writes = 0, stall_cycles = 0;

  initial wr_ready = 1'b0;

  always @(negedge clk) wr_ready = !stall && ($urandom_range(0, 99) < READY_PCT);

  always @(posedge clk) begin
    if (wr_valid && wr_ready) begin
      mem[wr_addr] = wr_data;
      writes++;
    end else if (wr_valid) begin
      stall_cycles++;
    end
  end

  function automatic logic [DATA_W-1:0] read(logic [ADDR_W-1:0] a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction
endmodule
