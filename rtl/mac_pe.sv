// mac_pe -- multiply-accumulate processing element with a partial-sum register file.
//
// Each cycle with en=1 the PE multiplies a parameter w by an activation a (both
// signed 8-bit) and adds the product to the partial sum held in register-file
// entry sel.  With first=1 the entry is overwritten by the product instead, which
// starts a new output without a separate clear cycle.  ld=1 writes ld_val into
// entry sel (used to start a sum from a precomputed value).  This is the temporal
// reduction of output activations that both Pascal and Pavlov rely on: the
// partial sums never leave the PE until the output is complete.
//
// NACC is the number of partial sums held.  Pascal uses one (one output per PE,
// Fig. 8c of the paper); Pavlov uses K, one per LSTM cell computed concurrently.
// Timing: the register file updates on the rising edge after en/ld; acc reads
// entry rsel combinationally.  Reset clears all entries.  The 32-bit width is a
// choice of this design.
module mac_pe
  import mensa_pkg::*;
#(
  parameter int unsigned NACC = 1,
  localparam int unsigned SW  = (NACC > 1) ? $clog2(NACC) : 1
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            en,
  input  logic                            first,
  input  logic [SW-1:0]                   sel,
  input  data_t                           w,
  input  data_t                           a,
  input  logic                            ld,
  input  acc_t                            ld_val,
  input  logic [SW-1:0]                   rsel,
  output acc_t                            acc
);

  acc_t rf [NACC];
  acc_t prod;

  assign prod = acc_t'(w) * acc_t'(a);
  assign acc  = rf[rsel];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NACC; i++) rf[i] <= '0;
    end else if (ld) begin
      rf[sel] <= ld_val;
    end else if (en) begin
      rf[sel] <= first ? prod : rf[sel] + prod;
    end
  end

endmodule
