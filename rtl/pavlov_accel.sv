// pavlov_accel -- Pavlov, the Mensa accelerator for LSTM-like layers (Cluster 3).
//
// Cluster-3 layers are matrix-vector products whose parameters are huge and used
// once, while the activations are small and reused.  Pavlov sits in the logic
// layer of a 3D-stacked memory and streams its parameters in the order they are
// stored, so the stream is purely sequential.  Its dataflow (Fig. 9b and 10b of
// the paper):
//   * output activations are spread over the PEs, PE n computing output row
//     r = tile*N_PE + n and keeping its partial sum locally (temporal reduction);
//   * one input element x_j is read from the activation buffer and broadcast
//     to every PE each cycle;
//   * parameters are spread over the PEs: each stream beat gives PE n the
//     element W[r][j] of its own row, which goes into the PE's private
//     parameter buffer (param_fifo, 512 bytes in the paper);
//   * the optimised dataflow of Fig. 10b keeps W[r][j] in the PE while the
//     same input position j of B different LSTM cells (time steps) is broadcast
//     on consecutive cycles, so each PE holds B partial sums (B <= NACC) and
//     every parameter is fetched from DRAM once for B cells instead of B times.
// Used for an LSTM layer, the host first computes the input MVMs of all cells
// (W_x * x_t for every t, batch B), then, cell by cell, the hidden MVM W_h * h_{t-1}
// with the accumulators started from the stored input-MVM result (init_en), then
// the element-wise cell update (OP_LSTM_CELL) with lstm_cell_unit.
//
// Commands (cmd_t):
//   OP_MATMUL:    rows = R (multiple of N_PE), red = C (vector length),
//                 cols = B (cells in the batch, 1..NACC), init_en, shift, relu.
//                 x[b][j]   at in_base  + b*C + j
//                 y[b][r]   at out_base + b*R + r      (requantised int8)
//                 init[b][r] at aux_base + b*R + r     (int8, scaled up by 2^shift)
//                 parameter stream: for each tile of N_PE rows, for each j, one
//                 beat whose byte n is W[tile*N_PE+n][j].
//   OP_LSTM_CELL: rows = H.  Gate pre-activations i,f,g,o at in_base + {0,1,2,3}*H + n,
//                 c_{t-1} at aux_base + n; writes c_t at out_base + n and
//                 h_t at out_base + H + n.
// Sizes from the paper: 8x8 PEs, 512 B private parameter buffer per PE, 128 KB
// activation buffer.  Choices of this design: the batch size NACC (the paper
// calls it K without giving a value), byte-wide activation buffer access,
// serial write-back and initialisation, buffer layouts, fixed-point formats.
//
// Timing: an OP_MATMUL tile takes (init_en ? B*N_PE : 0) + C*B + 1 + B*N_PE
// cycles when the parameter stream keeps up (the reduction stalls, cycle by
// cycle, while the next parameter has not arrived); OP_LSTM_CELL takes 9
// cycles per element.  done pulses one cycle after the last write.  The
// parameter stream is accepted at any time, also ahead of a command, while the
// private buffers have room (ps_ready).
module pavlov_accel
  import mensa_pkg::*;
#(
  parameter int unsigned PE_ROWS    = 8,
  parameter int unsigned PE_COLS    = 8,
  parameter int unsigned NACC       = 16,
  parameter int unsigned PBUF_BYTES = 512,
  parameter int unsigned ACT_BYTES  = 131072,
  parameter int unsigned FRAC       = 4,
  localparam int unsigned N_PE      = PE_ROWS * PE_COLS,
  localparam int unsigned AW        = $clog2(ACT_BYTES),
  localparam int unsigned SW        = (NACC > 1) ? $clog2(NACC) : 1,
  localparam int unsigned NW        = (N_PE > 1) ? $clog2(N_PE) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                cmd_valid,
  input  cmd_t                cmd,
  output logic                cmd_ready,
  output logic                busy,
  output logic                done,
  // parameter stream from DRAM (one byte per PE per beat)
  input  logic                ps_valid,
  input  logic [8*N_PE-1:0]   ps_data,
  output logic                ps_ready,
  // activation-buffer DMA port
  input  logic                act_dma_we,
  input  logic [AW-1:0]       act_dma_waddr,
  input  data_t               act_dma_wdata,
  input  logic                act_dma_re,
  input  logic [AW-1:0]       act_dma_raddr,
  output data_t               act_dma_rdata,
  // status
  output logic [31:0]         stall_cycles   // reduction cycles lost waiting for parameters
);

  typedef enum logic [3:0] {
    S_IDLE, S_INIT, S_MAC, S_MLAST, S_WB,
    S_CREAD, S_CWAIT, S_CCALC, S_CWR_C, S_CWR_H
  } state_e;
  state_e state;

  cmd_t         c;
  logic [15:0]  j, b, n, tile;
  logic [AW-1:0] xptr, jbase, bptr, rowbase;
  logic [2:0]   phase;

  // ---------------- activation buffer ----------------
  logic          a_we, a_re;
  logic [AW-1:0] a_waddr, a_raddr;
  data_t         a_wdata;
  logic [7:0]    a_rdata;

  buffer_ram #(.WORD_BYTES(1), .DEPTH(ACT_BYTES)) u_act_buf (
    .clk, .we(a_we), .waddr(a_waddr), .wbe(1'b1), .wdata(a_wdata),
    .re(a_re), .raddr(a_raddr), .rdata(a_rdata));

  assign act_dma_rdata = data_t'(a_rdata);

  // ---------------- private parameter buffers and PEs ----------------
  logic   pf_push, pf_pop;
  logic   pf_full0, pf_empty0;
  logic [$clog2(PBUF_BYTES):0] pf_count0;
  logic   mac_en, mac_first, ld_en;
  logic [SW-1:0] mac_sel, ld_sel, rd_sel;
  data_t  bcast;
  acc_t   ld_val;
  logic [NW-1:0] ld_pe;
  acc_t   pe_acc [N_PE];

  assign ps_ready = !pf_full0;
  assign pf_push  = ps_valid && ps_ready;

  for (genvar p = 0; p < N_PE; p++) begin : g_pe
    data_t head;
    logic  empty, full;
    logic [$clog2(PBUF_BYTES):0] count;
    param_fifo #(.DEPTH(PBUF_BYTES)) u_pbuf (
      .clk, .rst_n, .push(pf_push), .din(data_t'(ps_data[8*p +: 8])),
      .pop(pf_pop), .head, .empty, .full, .count);
    mac_pe #(.NACC(NACC)) u_pe (
      .clk, .rst_n, .en(mac_en), .first(mac_first), .sel(ld_en ? ld_sel : mac_sel),
      .w(head), .a(bcast), .ld(ld_en && ld_pe == NW'(p)), .ld_val,
      .rsel(rd_sel), .acc(pe_acc[p]));
    if (p == 0) begin : g_st
      assign pf_full0  = full;
      assign pf_empty0 = empty;
      assign pf_count0 = count;
    end
  end

  // ---------------- cell update unit ----------------
  data_t z [5];                // i, f, g, o, c_prev
  logic  cu_vin, cu_vout;
  data_t cu_c, cu_h;

  lstm_cell_unit #(.FRAC(FRAC)) u_cell (
    .clk, .rst_n, .valid_in(cu_vin),
    .zi(z[0]), .zf(z[1]), .zg(z[2]), .zo(z[3]), .c_prev(z[4]),
    .valid_out(cu_vout), .c_new(cu_c), .h_new(cu_h));

  // ---------------- pipeline registers ----------------
  logic            v1, first1, pop1, ldv1, capv1;
  logic [SW-1:0]   b1;
  logic [NW-1:0]   n1;
  logic [2:0]      cap1;
  logic            have_param, issue_mac, issue_init, issue_cread;

  assign have_param  = (pf_count0 > (pop1 ? 1 : 0));
  assign issue_mac   = (state == S_MAC) && have_param;
  assign issue_init  = (state == S_INIT);
  assign issue_cread = (state == S_CREAD);

  assign mac_en    = v1;
  assign mac_first = first1;
  assign mac_sel   = b1;
  assign pf_pop    = v1 && pop1;
  assign bcast     = data_t'(a_rdata);
  assign ld_en     = ldv1;
  assign ld_sel    = b1;
  assign ld_pe     = n1;
  assign ld_val    = acc_t'(data_t'(a_rdata)) <<< c.shift;
  assign rd_sel    = SW'(b);
  assign cu_vin    = (state == S_CCALC);

  // ---------------- buffer port muxing ----------------
  logic [AW-1:0] cell_raddr;
  always_comb begin
    unique case (phase)
      3'd0:    cell_raddr = AW'(c.in_base) + AW'(n);
      3'd1:    cell_raddr = AW'(c.in_base) + AW'(c.rows) + AW'(n);
      3'd2:    cell_raddr = AW'(c.in_base) + AW'(2 * c.rows) + AW'(n);
      3'd3:    cell_raddr = AW'(c.in_base) + AW'(3 * c.rows) + AW'(n);
      default: cell_raddr = AW'(c.aux_base) + AW'(n);
    endcase
  end

  always_comb begin
    a_re    = 1'b0;
    a_raddr = act_dma_raddr;
    a_we    = 1'b0;
    a_waddr = act_dma_waddr;
    a_wdata = act_dma_wdata;
    unique case (state)
      S_IDLE: begin
        a_re = act_dma_re;
        a_we = act_dma_we;
      end
      S_INIT: begin
        a_re    = 1'b1;
        a_raddr = AW'(c.aux_base) + bptr + AW'(n);
      end
      S_MAC: begin
        a_re    = issue_mac;
        a_raddr = xptr;
      end
      S_WB: begin
        a_we    = 1'b1;
        a_waddr = AW'(c.out_base) + bptr + AW'(n);
        a_wdata = requant(pe_acc[n[NW-1:0]], c.shift, c.relu);
      end
      S_CREAD: begin
        a_re    = 1'b1;
        a_raddr = cell_raddr;
      end
      S_CWR_C: begin
        a_we    = 1'b1;
        a_waddr = AW'(c.out_base) + AW'(n);
        a_wdata = cu_c;
      end
      S_CWR_H: begin
        a_we    = 1'b1;
        a_waddr = AW'(c.out_base) + AW'(c.rows) + AW'(n);
        a_wdata = cu_h;
      end
      default: ;
    endcase
  end

  assign cmd_ready = (state == S_IDLE);
  assign busy      = (state != S_IDLE);

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      c       <= '0;
      j       <= '0;
      b       <= '0;
      n       <= '0;
      tile    <= '0;
      xptr    <= '0;
      jbase   <= '0;
      bptr    <= '0;
      rowbase <= '0;
      phase   <= '0;
      v1      <= 1'b0;
      first1  <= 1'b0;
      pop1    <= 1'b0;
      ldv1    <= 1'b0;
      capv1   <= 1'b0;
      b1      <= '0;
      n1      <= '0;
      cap1    <= '0;
      done    <= 1'b0;
      stall_cycles <= '0;
      for (int i = 0; i < 5; i++) z[i] <= '0;
    end else begin
      done   <= 1'b0;
      // pipeline stage behind the registered buffer read
      v1     <= issue_mac;
      first1 <= issue_mac && (j == 0) && !c.init_en;
      pop1   <= issue_mac && (b == c.cols - 1);
      ldv1   <= issue_init;
      capv1  <= issue_cread;
      cap1   <= phase;
      if (issue_mac)  b1 <= SW'(b);
      if (issue_init) begin
        b1 <= SW'(b);
        n1 <= NW'(n);
      end
      if (capv1) z[cap1] <= data_t'(a_rdata);
      if (state == S_MAC && !have_param) stall_cycles <= stall_cycles + 1;

      unique case (state)
        S_IDLE: if (cmd_valid) begin
          c       <= cmd;
          j       <= '0;
          b       <= '0;
          n       <= '0;
          tile    <= '0;
          phase   <= '0;
          rowbase <= '0;
          bptr    <= '0;
          xptr    <= AW'(cmd.in_base);
          jbase   <= AW'(cmd.in_base);
          if (cmd.op == OP_LSTM_CELL) state <= S_CREAD;
          else                        state <= cmd.init_en ? S_INIT : S_MAC;
        end

        // preload accumulators: entry b of PE n <- init[b][tile*N_PE+n] << shift
        S_INIT: begin
          if (n == 16'(N_PE - 1)) begin
            n <= '0;
            if (b == c.cols - 1) begin
              b     <= '0;
              bptr  <= rowbase;
              state <= S_MAC;
            end else begin
              b    <= b + 1'b1;
              bptr <= bptr + AW'(c.rows);
            end
          end else begin
            n <= n + 1'b1;
          end
        end

        // reduction: for each j, broadcast x[b][j] for every cell b of the batch
        S_MAC: if (issue_mac) begin
          if (b == c.cols - 1) begin
            b <= '0;
            if (j == c.red - 1) begin
              j     <= '0;
              state <= S_MLAST;
            end else begin
              j     <= j + 1'b1;
              jbase <= jbase + 1'b1;
              xptr  <= jbase + 1'b1;
            end
          end else begin
            b    <= b + 1'b1;
            xptr <= xptr + AW'(c.red);
          end
        end

        S_MLAST: begin
          state <= S_WB;
          bptr  <= rowbase;
        end

        // write back: y[b][tile*N_PE+n]
        S_WB: begin
          if (n == 16'(N_PE - 1)) begin
            n <= '0;
            if (b == c.cols - 1) begin
              b <= '0;
              if (32'(tile + 1) * N_PE >= 32'(c.rows)) begin
                state <= S_IDLE;
                done  <= 1'b1;
              end else begin
                tile    <= tile + 1'b1;
                rowbase <= rowbase + AW'(N_PE);
                bptr    <= rowbase + AW'(N_PE);
                xptr    <= AW'(c.in_base);
                jbase   <= AW'(c.in_base);
                state   <= c.init_en ? S_INIT : S_MAC;
              end
            end else begin
              b    <= b + 1'b1;
              bptr <= bptr + AW'(c.rows);
            end
          end else begin
            n <= n + 1'b1;
          end
        end

        // LSTM cell update, one element at a time
        S_CREAD: begin
          if (phase == 3'd4) begin
            phase <= '0;
            state <= S_CWAIT;
          end else begin
            phase <= phase + 1'b1;
          end
        end
        S_CWAIT: state <= S_CCALC;
        S_CCALC: state <= S_CWR_C;
        S_CWR_C: state <= S_CWR_H;
        S_CWR_H: begin
          if (n == c.rows - 1) begin
            n     <= '0;
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            n     <= n + 1'b1;
            state <= S_CREAD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && cmd_ready && cmd.op == OP_MATMUL) |->
      (cmd.cols != 0 && 32'(cmd.cols) <= NACC && cmd.red != 0 && cmd.rows != 0))
    else $error("pavlov_accel: batch size out of range or empty command");
  // the parameter stream must hold its data while it waits
  assert property (@(posedge clk) disable iff (!rst_n)
    (ps_valid && !ps_ready) |=> (ps_valid && $stable(ps_data)))
    else $error("pavlov_accel: parameter stream changed while stalled");

endmodule
