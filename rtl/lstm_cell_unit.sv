// lstm_cell_unit -- element-wise LSTM cell-state update.
//
// After the four gate MVMs of an LSTM cell are complete, each hidden element is
// updated as in Fig. 10a of the paper:
//     f = sigmoid(zf), i = sigmoid(zi), g = tanh(zg), o = sigmoid(zo)
//     c_t = f * c_{t-1} + i * g,    h_t = o * tanh(c_t)
// All values are signed 8-bit fixed point with FRAC fractional bits (Q3.4 by
// default).  sigmoid and tanh use the piece-wise linear "hard" forms
//     hsig(x)  = clamp(x/4 + 0.5, 0, 1),   htanh(x) = clamp(x, -1, 1)
// The equations follow the paper; the fixed-point format and the hard
// non-linearities are choices of this design (the paper does not say how the
// accelerator evaluates them).  Inputs are sampled when valid_in=1 and the
// results appear one cycle later with valid_out=1.
module lstm_cell_unit
  import mensa_pkg::*;
#(
  parameter int unsigned FRAC = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  valid_in,
  input  data_t zi,
  input  data_t zf,
  input  data_t zg,
  input  data_t zo,
  input  data_t c_prev,
  output logic  valid_out,
  output data_t c_new,
  output data_t h_new
);

  localparam int ONE = 1 << FRAC;

  function automatic int hsig(data_t x);
    int v;
    v = (int'(x) >>> 2) + ONE / 2;
    if (v < 0)   v = 0;
    if (v > ONE) v = ONE;
    return v;
  endfunction

  function automatic int htanh(int x);
    if (x > ONE)  return ONE;
    if (x < -ONE) return -ONE;
    return x;
  endfunction

  function automatic data_t sat8(int x);
    if (x > 127)  return data_t'(8'sd127);
    if (x < -128) return data_t'(-8'sd128);
    return data_t'(x);
  endfunction

  data_t c_comb, h_comb;

  always_comb begin
    int f, i, g, o, c;
    f = hsig(zf);
    i = hsig(zi);
    g = htanh(int'(zg));
    o = hsig(zo);
    c = (f * int'(c_prev) + i * g) >>> FRAC;
    c_comb = sat8(c);
    h_comb = sat8((o * htanh(int'(c_comb))) >>> FRAC);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_out <= 1'b0;
      c_new     <= '0;
      h_new     <= '0;
    end else begin
      valid_out <= valid_in;
      if (valid_in) begin
        c_new <= c_comb;
        h_new <= h_comb;
      end
    end
  end

endmodule
