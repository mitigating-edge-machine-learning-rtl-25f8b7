// pascal_accel -- Pascal, the compute-centric Mensa accelerator (Clusters 1 and 2).
//
// Pascal runs layers with high MAC intensity and a small parameter footprint
// (standard and pointwise convolutions), written as the product
//     O[o][p] = sum_k W[o][k] * I[k][p]     (o: output channel, p: pixel, k: reduction)
// Its dataflow (Fig. 8c of the paper) spreads output activations over the PEs:
// PE n owns pixel p = tile*N_PE + n and keeps its partial sum in its own register
// (temporal reduction, no partial-sum traffic).  Every cycle one parameter W[o][k]
// is read from the parameter buffer and multicast to all PEs, while one row of the
// activation buffer delivers a different input activation I[k][p] to each PE.
// After K cycles each PE holds a finished output; the whole row of N_PE outputs is
// requantised and written back to the activation buffer in one cycle.
//
// Sizes from the paper: 32x32 PE array, 256 KB activation buffer, 128 KB
// parameter buffer.  Choices of this design: buffer layouts, command format,
// no overlap between the write-back cycle and the next reduction.
//
// Buffer layouts (addresses in cmd_t, K = cmd.red, Cout = cmd.rows):
//   parameter buffer (byte-wide):          W[o][k] at par_base + o*K + k
//   activation buffer (N_PE bytes/row):    input  row in_base  + tile*K    + k
//                                          output row out_base + tile*Cout + o
//   byte n of a row belongs to PE n.  An output row therefore has the same
//   shape as an input row, so layers chain without reformatting.  Convolutions
//   with a window are handed over with their window already unrolled along k.
// Command: op = OP_MATMUL, rows = Cout, red = K, cols = number of pixel tiles.
//
// Timing: each (tile, output channel) pair takes K + 2 cycles: K reduction
// cycles, one cycle for the last MAC behind the registered buffer read, one
// write-back cycle.  A command therefore takes tiles*Cout*(K+2) cycles from the
// cycle after acceptance to the done pulse, during which busy is high.  The DMA
// ports (used to move activations to and from DRAM) are only served while idle.
module pascal_accel
  import mensa_pkg::*;
#(
  parameter int unsigned PE_ROWS   = 32,
  parameter int unsigned PE_COLS   = 32,
  parameter int unsigned ACT_BYTES = 262144,
  parameter int unsigned PAR_BYTES = 131072,
  localparam int unsigned N_PE     = PE_ROWS * PE_COLS,
  localparam int unsigned ACT_DEPTH = ACT_BYTES / N_PE,
  localparam int unsigned AAW      = (ACT_DEPTH > 1) ? $clog2(ACT_DEPTH) : 1,
  localparam int unsigned PAW      = $clog2(PAR_BYTES)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // command from the runtime scheduler
  input  logic                  cmd_valid,
  input  cmd_t                  cmd,
  output logic                  cmd_ready,
  output logic                  busy,
  output logic                  done,
  // activation-buffer DMA port
  input  logic                  act_dma_we,
  input  logic [AAW-1:0]        act_dma_waddr,
  input  logic [N_PE-1:0]       act_dma_wbe,
  input  logic [8*N_PE-1:0]     act_dma_wdata,
  input  logic                  act_dma_re,
  input  logic [AAW-1:0]        act_dma_raddr,
  output logic [8*N_PE-1:0]     act_dma_rdata,
  // parameter-buffer DMA port
  input  logic                  par_dma_we,
  input  logic [PAW-1:0]        par_dma_waddr,
  input  data_t                 par_dma_wdata
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_LAST, S_WRITE} state_e;
  state_e state;

  cmd_t        c;                 // latched command
  logic [15:0] k, o, t;           // reduction, output-channel and tile counters
  logic [PAW-1:0] par_ptr;        // next parameter address
  logic [AAW-1:0] act_ptr;        // next input row
  logic [AAW-1:0] tile_base;      // first input row of the current tile
  logic [AAW-1:0] out_ptr;        // next output row
  logic        v1, first1;        // MAC stage valid / first product of a sum

  // ---------------- buffers ----------------
  logic               a_we, a_re;
  logic [AAW-1:0]     a_waddr, a_raddr;
  logic [N_PE-1:0]    a_wbe;
  logic [8*N_PE-1:0]  a_wdata, a_rdata;
  logic               p_we, p_re;
  logic [PAW-1:0]     p_waddr, p_raddr;
  logic [7:0]         p_rdata;
  logic [8*N_PE-1:0]  out_row;
  logic               issue;

  buffer_ram #(.WORD_BYTES(N_PE), .DEPTH(ACT_DEPTH)) u_act_buf (
    .clk, .we(a_we), .waddr(a_waddr), .wbe(a_wbe), .wdata(a_wdata),
    .re(a_re), .raddr(a_raddr), .rdata(a_rdata));

  buffer_ram #(.WORD_BYTES(1), .DEPTH(PAR_BYTES)) u_par_buf (
    .clk, .we(p_we), .waddr(p_waddr), .wbe(1'b1), .wdata(p_we ? par_dma_wdata : 8'h00),
    .re(p_re), .raddr(p_raddr), .rdata(p_rdata));

  assign issue   = (state == S_RUN);
  assign a_re    = issue || (state == S_IDLE && act_dma_re);
  assign a_raddr = issue ? act_ptr : act_dma_raddr;
  assign a_we    = (state == S_WRITE) || (state == S_IDLE && act_dma_we);
  assign a_waddr = (state == S_WRITE) ? out_ptr : act_dma_waddr;
  assign a_wbe   = (state == S_WRITE) ? '1 : act_dma_wbe;
  assign a_wdata = (state == S_WRITE) ? out_row : act_dma_wdata;
  assign act_dma_rdata = a_rdata;

  assign p_re    = issue;
  assign p_raddr = par_ptr;
  assign p_we    = (state == S_IDLE) && par_dma_we;
  assign p_waddr = par_dma_waddr;

  // ---------------- PE array ----------------
  for (genvar n = 0; n < N_PE; n++) begin : g_pe
    acc_t acc;
    mac_pe #(.NACC(1)) u_pe (
      .clk, .rst_n,
      .en(v1), .first(first1), .sel('0),
      .w(data_t'(p_rdata)), .a(data_t'(a_rdata[8*n +: 8])),
      .ld(1'b0), .ld_val('0), .rsel('0), .acc(acc));
    assign out_row[8*n +: 8] = requant(acc, c.shift, c.relu);
  end

  // ---------------- control ----------------
  assign cmd_ready = (state == S_IDLE);
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      c         <= '0;
      k         <= '0;
      o         <= '0;
      t         <= '0;
      par_ptr   <= '0;
      act_ptr   <= '0;
      tile_base <= '0;
      out_ptr   <= '0;
      v1        <= 1'b0;
      first1    <= 1'b0;
      done      <= 1'b0;
    end else begin
      done   <= 1'b0;
      v1     <= issue;
      first1 <= issue && (k == 0);
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          c         <= cmd;
          k         <= '0;
          o         <= '0;
          t         <= '0;
          par_ptr   <= PAW'(cmd.par_base);
          act_ptr   <= AAW'(cmd.in_base);
          tile_base <= AAW'(cmd.in_base);
          out_ptr   <= AAW'(cmd.out_base);
          state     <= S_RUN;
        end
        S_RUN: begin
          par_ptr <= par_ptr + 1'b1;
          act_ptr <= act_ptr + 1'b1;
          if (k == c.red - 1) begin
            k     <= '0;
            state <= S_LAST;
          end else begin
            k <= k + 1'b1;
          end
        end
        S_LAST: state <= S_WRITE;
        S_WRITE: begin
          out_ptr <= out_ptr + 1'b1;
          if (o == c.rows - 1) begin
            o <= '0;
            par_ptr   <= PAW'(c.par_base);
            tile_base <= tile_base + AAW'(c.red);
            act_ptr   <= tile_base + AAW'(c.red);
            if (t == c.cols - 1) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              t     <= t + 1'b1;
              state <= S_RUN;
            end
          end else begin
            o       <= o + 1'b1;
            act_ptr <= tile_base;
            state   <= S_RUN;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A command must describe a non-empty layer.
  assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && cmd_ready) |-> (cmd.rows != 0 && cmd.red != 0 && cmd.cols != 0))
    else $error("pascal_accel: empty command");

endmodule
