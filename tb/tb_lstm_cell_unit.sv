// tb_lstm_cell_unit -- self-checking test of the LSTM cell-state update.
// Random gate pre-activations and cell states in Q3.4; the expected c_t and h_t
// are computed in real arithmetic with the hard sigmoid / hard tanh and then
// rounded toward minus infinity and saturated as the hardware does.  A few
// hand-worked cases are checked as well.  Results must appear one cycle later.
module tb_lstm_cell_unit;
  import mensa_pkg::*;
  logic clk = 0, rst_n = 0;
  logic valid_in, valid_out;
  data_t zi, zf, zg, zo, c_prev, c_new, h_new;
  int checks = 0, failures = 0;

  lstm_cell_unit #(.FRAC(4)) dut (.*);
  always #5 clk = ~clk;

  function automatic real hs(real x);
    real v = x / 4.0 + 0.5;
    return v < 0 ? 0.0 : (v > 1 ? 1.0 : v);
  endfunction
  function automatic real ht(real x);
    return x < -1 ? -1.0 : (x > 1 ? 1.0 : x);
  endfunction
  function automatic int q(real x);   // to Q3.4, floor, saturate
    int v = int'($floor(x * 16.0));
    return v > 127 ? 127 : (v < -128 ? -128 : v);
  endfunction
  function automatic real qs(int v);  // hard sigmoid in hardware resolution
    int s = (v >>> 2) + 8;
    return (s < 0 ? 0 : (s > 16 ? 16 : s)) / 16.0;
  endfunction

  task automatic run(data_t i_, data_t f_, data_t g_, data_t o_, data_t c_, int ce, int he);
    @(negedge clk);
    valid_in = 1; zi = i_; zf = f_; zg = g_; zo = o_; c_prev = c_;
    @(negedge clk);
    valid_in = 0;
    checks += 3;
    if (!valid_out) failures++;
    if (c_new != data_t'(ce) || h_new != data_t'(he)) begin
      failures++;
      $display("i=%0d f=%0d g=%0d o=%0d c=%0d: got c=%0d h=%0d exp c=%0d h=%0d",
               i_, f_, g_, o_, c_, c_new, h_new, ce, he);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    valid_in = 0; zi = 0; zf = 0; zg = 0; zo = 0; c_prev = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // hand-worked: all gates saturated open, g = 1.0, c_prev = 1.0 -> c = 2.0, h = 1.0
    run(8'sd64, 8'sd64, 8'sd16, 8'sd64, 8'sd16, 32, 16);
    // forget gate closed, input gate half open (z = 0), g = 0.5 -> c = 0.25, h = 0.5*0.25
    run(8'sd0, -8'sd64, 8'sd8, 8'sd0, 8'sd100, 4, 2);
    for (int it = 0; it < 1000; it++) begin
      data_t a, b, g, o, c;
      int ce, he;
      real cr;
      a = data_t'($urandom); b = data_t'($urandom); g = data_t'($urandom);
      o = data_t'($urandom); c = data_t'($urandom);
      // c_t in units of 1/256 is exact, so floor it in integers
      ce = int'(qs(b) * 16) * int'(c) + int'(qs(a) * 16) * int'(ht(g / 16.0) * 16);
      ce = ce >>> 4;
      ce = ce > 127 ? 127 : (ce < -128 ? -128 : ce);
      cr = ht(ce / 16.0);
      he = q(qs(o) * cr);
      run(a, b, g, o, c, ce, he);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
