// tb_delay_line: self-checking test of the auxiliary delay line.
//
// A counting pattern with random gaps in in_valid passes through the line for
// several delays. Each output must equal the input `delay` strobes earlier,
// or zero while fewer than `delay` inputs have been seen. It must come exactly
// one clock after its input, with out_valid high only then.
module tb_delay_line;
  localparam int W = 24, DLY_W = 6;
  logic clk = 0, rst_n = 0;
  logic [DLY_W-1:0] delay;
  logic in_valid, out_valid;
  logic [W-1:0] in_data, out_data;
  int checks = 0, failures = 0;

  delay_line dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [W-1:0] sent[$];

  task automatic run(int d, int n);
    logic [W-1:0] exp_v;
    rst_n = 0; in_valid = 0; in_data = 0; delay = DLY_W'(d); sent.delete();
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (n) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      in_data  = W'($urandom);
      @(posedge clk); #1;
      checks++;
      if (out_valid !== in_valid) begin failures++; $display("valid timing"); end
      if (in_valid) begin
        sent.push_back(in_data);
        exp_v = (sent.size() > d) ? sent[sent.size()-1-d] : '0;
        checks++;
        if (out_data !== exp_v) begin
          failures++;
          if (failures < 10) $display("d=%0d n=%0d out=%h exp=%h", d, sent.size(), out_data, exp_v);
        end
      end
    end
  endtask

  initial begin
    run(0, 300);
    run(1, 300);
    run(5, 400);
    run(63, 600);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
