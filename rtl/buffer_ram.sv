// buffer_ram -- on-chip SRAM buffer (activation or parameter buffer).
//
// A simple two-port memory: one write port with per-byte enables and one read
// port with a registered output (read data appears the cycle after raddr/re).
// WORD_BYTES sets how many bytes one access moves, which is how wide a slice of
// the buffer the PE array can consume per cycle; DEPTH is the number of words.
// Capacity is WORD_BYTES*DEPTH bytes: 256 KB activation / 128 KB parameter for
// Pascal, 128 KB activation for Pavlov, 128 KB + 128 KB for Jacquard (paper,
// Sec. 6).  The port organisation and one-cycle read latency are choices of this
// design; a real chip would use SRAM macros of the same capacity.  Contents are
// not reset.
module buffer_ram #(
  parameter int unsigned WORD_BYTES = 1,
  parameter int unsigned DEPTH      = 1024,
  localparam int unsigned AW        = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [AW-1:0]             waddr,
  input  logic [WORD_BYTES-1:0]     wbe,
  input  logic [8*WORD_BYTES-1:0]   wdata,
  input  logic                      re,
  input  logic [AW-1:0]             raddr,
  output logic [8*WORD_BYTES-1:0]   rdata
);

  logic [8*WORD_BYTES-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int b = 0; b < WORD_BYTES; b++)
        if (wbe[b]) mem[waddr][8*b +: 8] <= wdata[8*b +: 8];
    end
    if (re) rdata <= mem[raddr];
  end

endmodule
