// param_fifo -- Pavlov's private per-PE parameter buffer.
//
// Pavlov streams its parameters straight from DRAM; each PE has a small private
// buffer (512 bytes in the paper, Sec. 6.4) that absorbs the stream while the PE
// reuses the current parameter over several LSTM cells.  This is a first-in
// first-out queue of DEPTH signed 8-bit entries: push writes at the tail when not
// full, pop removes the head, head shows the oldest entry combinationally.  Push
// and pop may happen in the same cycle.  The FIFO organisation is a choice of
// this design: the paper gives only the capacity and that the buffer is private.
module param_fifo
  import mensa_pkg::*;
#(
  parameter int unsigned DEPTH = 512,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       push,
  input  data_t      din,
  input  logic       pop,
  output data_t      head,
  output logic       empty,
  output logic       full,
  output logic [AW:0] count
);

  data_t          mem [DEPTH];
  logic [AW-1:0]  wp, rp;
  logic           do_push, do_pop;

  assign empty   = (count == 0);
  assign full    = (count == (AW+1)'(DEPTH));
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign head    = mem[rp];

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  // A pop on an empty queue or a push on a full one is a sequencing error.
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("param_fifo: pop while empty");
  assert property (@(posedge clk) disable iff (!rst_n) !(push && full))
    else $error("param_fifo: push while full");

endmodule
