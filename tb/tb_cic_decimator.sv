// tb_cic_decimator: self-checking test of the CIC filter-and-decimator.
//
// Random 16-bit samples drive the filter, with in_valid dropping now and then.
// The expected output is computed independently as a direct FIR: the
// coefficients are the length-R boxcar convolved with itself ORDER times, and
// they are applied to the stored input history at each decimation point. The
// result is shifted and saturated as in the design. The test checks every
// output value and that exactly one output comes per R accepted inputs, one
// clock after the R-th. It runs twice, with two (decim, shift) settings and a
// reset between them.
module tb_cic_decimator;
  localparam int ORDER = 3;
  localparam int IN_W = 16, OUT_W = 24, DEC_W = 16, SHIFT_W = 6;

  logic clk = 0, rst_n = 0;
  logic [DEC_W-1:0] decim;
  logic [SHIFT_W-1:0] shift;
  logic in_valid;
  logic signed [IN_W-1:0] in_data;
  logic out_valid;
  logic signed [OUT_W-1:0] out_data;

  int checks = 0, failures = 0;

  cic_decimator #(.ORDER(ORDER)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint hist[$];
  longint h[];
  int n_acc, n_out;

  // Coefficients of boxcar^ORDER with length r.
  function automatic void make_coefs(int r);
    longint c[], t[];
    c = new[1]; c[0] = 1;
    for (int s = 0; s < ORDER; s++) begin
      t = new[c.size() + r - 1];
      foreach (t[i]) t[i] = 0;
      foreach (c[i]) for (int j = 0; j < r; j++) t[i+j] += c[i];
      c = t;
    end
    h = c;
  endfunction

  function automatic longint expected();
    longint acc = 0, mx, mn, v;
    int n = hist.size();
    for (int k = 0; k < h.size(); k++)
      if (n - 1 - k >= 0) acc += h[k] * hist[n-1-k];
    v = acc >>> shift;
    mx = (64'sd1 <<< (OUT_W-1)) - 1; mn = -(64'sd1 <<< (OUT_W-1));
    if (v > mx) v = mx;
    if (v < mn) v = mn;
    return v;
  endfunction

  task automatic run(int r, int sh, int n_in, int amp);
    longint exp_v;
    rst_n = 0; in_valid = 0; in_data = 0;
    decim = DEC_W'(r); shift = SHIFT_W'(sh);
    hist.delete(); make_coefs(r);
    n_acc = 0; n_out = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (n_acc < n_in) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 9) != 0);
      in_data  = IN_W'($signed($urandom_range(0, 2*amp)) - amp);
      @(posedge clk);
      #1;
      if (in_valid) begin
        hist.push_back(longint'(in_data));
        n_acc++;
      end
      // outputs registered at this edge belong to the input just accepted
      if (out_valid) begin
        n_out++;
        checks++;
        if (!(in_valid && (n_acc % r == 0))) begin
          failures++;
          $display("out_valid at wrong time: accepted=%0d", n_acc);
        end
        exp_v = expected();
        checks++;
        if (longint'(out_data) != exp_v) begin
          failures++;
          if (failures < 10) $display("mismatch r=%0d out=%0d exp=%0d", r, out_data, exp_v);
        end
      end else if (in_valid && (n_acc % r == 0)) begin
        failures++; checks++;
        $display("missing output at accepted=%0d", n_acc);
      end
    end
    checks++;
    if (n_out != n_in / r) begin failures++; $display("output count %0d", n_out); end
  endtask

  initial begin
    run(5, 0, 2000, 32767);     // gain 125: no shift, saturation hit for big inputs
    run(7, 9, 3000, 32767);     // gain 343, shift by 9
    run(1, 0, 500, 1000);       // no decimation
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
