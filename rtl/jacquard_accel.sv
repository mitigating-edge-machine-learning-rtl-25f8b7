// jacquard_accel -- Jacquard, the Mensa accelerator for Cluster 4 and 5 layers.
//
// Clusters 4 and 5 (deep convolutions with many filters, depthwise convolutions)
// have small activation footprints with little reuse, and parameters that are
// reused over only W x H output positions.  Jacquard keeps the parameters
// stationary instead of broadcasting them: each PE holds one parameter of the
// current filter in its register, the input activations of one output pixel are
// spread over the PEs, and all PEs together produce that one output activation
// through a reduction across the array.  The parameters stay in the PEs while
// every one of the P output pixels is computed (reuse factor W x H), so a new
// filter slice is loaded only once per P cycles (paper, Sec. 6.5).
//
// Layer form: O[o][p] = sum_{ch} sum_{n<N_PE} W[o][ch*N_PE+n] * I[ch*N_PE+n][p].
// The reduction dimension (input channels times window) is cut into chunks of
// N_PE; a chunk's partial results for all pixels are kept in a partial-sum
// memory of PSUM_DEPTH entries and the next chunk adds to them, so the parameter
// buffer only ever feeds one filter slice at a time.
//
// Buffer layouts (rows of N_PE bytes, byte n belongs to PE n):
//   parameter buffer: row par_base + o*NCH + ch holds W[o][ch*N_PE .. +N_PE-1]
//   activation buffer: input row in_base + ch*P + p holds I[ch*N_PE ..][p];
//                      output O[o][p] goes to row out_base + (o / N_PE)*P + p,
//                      byte o % N_PE (the same shape as an input chunk).
// Command: op = OP_MATMUL, rows = Cout, red = NCH (chunks), cols = P (pixels,
// at most PSUM_DEPTH).  Unused reduction lanes must hold zero parameters.
//
// Sizes from the paper: 16x16 PEs, 128 KB activation buffer, 128 KB parameter
// buffer.  Choices of this design: the chunked partial-sum memory, the buffer
// layouts, the reduction written as one sum (a synthesis tool builds the adder
// tree), registers between buffer, reduction and accumulation.
//
// Timing: every (o, chunk) pair takes P + 2 cycles (two cycles to load the
// filter slice, then one pixel per cycle); the last result is written two cycles
// after the last pixel is issued and done pulses in that cycle.  Total:
// Cout*NCH*(P+2) + 2 cycles after acceptance.  DMA ports are served while idle.
module jacquard_accel
  import mensa_pkg::*;
#(
  parameter int unsigned PE_ROWS    = 16,
  parameter int unsigned PE_COLS    = 16,
  parameter int unsigned ACT_BYTES  = 131072,
  parameter int unsigned PAR_BYTES  = 131072,
  parameter int unsigned PSUM_DEPTH = 512,
  localparam int unsigned N_PE      = PE_ROWS * PE_COLS,
  localparam int unsigned ACT_DEPTH = ACT_BYTES / N_PE,
  localparam int unsigned PAR_DEPTH = PAR_BYTES / N_PE,
  localparam int unsigned AAW       = $clog2(ACT_DEPTH),
  localparam int unsigned PAW       = $clog2(PAR_DEPTH),
  localparam int unsigned QW        = $clog2(PSUM_DEPTH),
  localparam int unsigned NW        = (N_PE > 1) ? $clog2(N_PE) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                cmd_valid,
  input  cmd_t                cmd,
  output logic                cmd_ready,
  output logic                busy,
  output logic                done,
  // activation-buffer DMA port
  input  logic                act_dma_we,
  input  logic [AAW-1:0]      act_dma_waddr,
  input  logic [N_PE-1:0]     act_dma_wbe,
  input  logic [8*N_PE-1:0]   act_dma_wdata,
  input  logic                act_dma_re,
  input  logic [AAW-1:0]      act_dma_raddr,
  output logic [8*N_PE-1:0]   act_dma_rdata,
  // parameter-buffer DMA port
  input  logic                par_dma_we,
  input  logic [PAW-1:0]      par_dma_waddr,
  input  logic [8*N_PE-1:0]   par_dma_wdata,
  // status
  output logic [31:0]         weight_loads   // filter slices loaded into the PEs
);

  typedef enum logic [2:0] {S_IDLE, S_LDW, S_LDW2, S_PIX, S_DRAIN1, S_DRAIN2} state_e;
  state_e state;

  cmd_t           c;
  logic [15:0]    o, ch, p;
  logic [PAW-1:0] par_ptr;
  logic [AAW-1:0] chbase;      // first input row of the current chunk
  logic [AAW-1:0] out_rowbase; // out_base + (o / N_PE)*P
  logic [NW-1:0]  obyte;       // o % N_PE

  // ---------------- buffers ----------------
  logic               a_we, a_re, p_re, p_we;
  logic [AAW-1:0]     a_waddr, a_raddr;
  logic [N_PE-1:0]    a_wbe;
  logic [8*N_PE-1:0]  a_wdata, a_rdata, p_rdata;
  logic               issue;

  buffer_ram #(.WORD_BYTES(N_PE), .DEPTH(ACT_DEPTH)) u_act_buf (
    .clk, .we(a_we), .waddr(a_waddr), .wbe(a_wbe), .wdata(a_wdata),
    .re(a_re), .raddr(a_raddr), .rdata(a_rdata));

  buffer_ram #(.WORD_BYTES(N_PE), .DEPTH(PAR_DEPTH)) u_par_buf (
    .clk, .we(p_we), .waddr(par_dma_waddr), .wbe('1), .wdata(par_dma_wdata),
    .re(p_re), .raddr(par_ptr), .rdata(p_rdata));

  // ---------------- stationary-parameter PEs and reduction ----------------
  data_t wreg [N_PE];
  acc_t  red_sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < N_PE; n++) wreg[n] <= '0;
    end else if (state == S_LDW2) begin
      for (int n = 0; n < N_PE; n++) wreg[n] <= data_t'(p_rdata[8*n +: 8]);
    end
  end

  always_comb begin
    red_sum = '0;
    for (int n = 0; n < N_PE; n++)
      red_sum = red_sum + acc_t'(wreg[n]) * acc_t'(data_t'(a_rdata[8*n +: 8]));
  end

  // ---------------- pipeline ----------------
  logic           v1, first1, last1, v2, first2, last2;
  logic [QW-1:0]  p1, p2;
  logic [AAW-1:0] orow1, orow2;
  logic [NW-1:0]  ob1, ob2;
  acc_t           sum2, total;
  acc_t           psum [PSUM_DEPTH];

  assign issue = (state == S_PIX);
  assign total = (first2 ? '0 : psum[p2]) + sum2;

  always_ff @(posedge clk) begin
    if (v2 && !last2) psum[p2] <= total;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; first1 <= 1'b0; last1 <= 1'b0; p1 <= '0; orow1 <= '0; ob1 <= '0;
      v2 <= 1'b0; first2 <= 1'b0; last2 <= 1'b0; p2 <= '0; orow2 <= '0; ob2 <= '0;
      sum2 <= '0;
    end else begin
      v1     <= issue;
      first1 <= (ch == 0);
      last1  <= (ch == c.red - 1);
      p1     <= QW'(p);
      orow1  <= out_rowbase + AAW'(p);
      ob1    <= obyte;
      v2     <= v1;
      first2 <= first1;
      last2  <= last1;
      p2     <= p1;
      orow2  <= orow1;
      ob2    <= ob1;
      sum2   <= red_sum;
    end
  end

  // ---------------- buffer port muxing ----------------
  logic out_we;
  assign out_we  = v2 && last2;
  assign a_re    = issue || (state == S_IDLE && act_dma_re);
  assign a_raddr = issue ? chbase + AAW'(p) : act_dma_raddr;
  assign a_we    = out_we || (state == S_IDLE && act_dma_we);
  assign a_waddr = out_we ? orow2 : act_dma_waddr;
  assign a_wbe   = out_we ? (N_PE)'(1) << ob2 : act_dma_wbe;
  assign a_wdata = out_we ? {N_PE{requant(total, c.shift, c.relu)}} : act_dma_wdata;
  assign act_dma_rdata = a_rdata;
  assign p_re    = (state == S_LDW);
  assign p_we    = (state == S_IDLE) && par_dma_we;

  assign cmd_ready = (state == S_IDLE);
  assign busy      = (state != S_IDLE);

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      c            <= '0;
      o            <= '0;
      ch           <= '0;
      p            <= '0;
      par_ptr      <= '0;
      chbase       <= '0;
      out_rowbase  <= '0;
      obyte        <= '0;
      done         <= 1'b0;
      weight_loads <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          c           <= cmd;
          o           <= '0;
          ch          <= '0;
          p           <= '0;
          par_ptr     <= PAW'(cmd.par_base);
          chbase      <= AAW'(cmd.in_base);
          out_rowbase <= AAW'(cmd.out_base);
          obyte       <= '0;
          state       <= S_LDW;
        end
        S_LDW:  state <= S_LDW2;
        S_LDW2: begin
          state        <= S_PIX;
          par_ptr      <= par_ptr + 1'b1;
          weight_loads <= weight_loads + 1;
        end
        S_PIX: begin
          if (p == c.cols - 1) begin
            p <= '0;
            if (ch == c.red - 1) begin
              ch     <= '0;
              chbase <= AAW'(c.in_base);
              if (o == c.rows - 1) begin
                state <= S_DRAIN1;
              end else begin
                o     <= o + 1'b1;
                obyte <= obyte + 1'b1;
                if (obyte == NW'(N_PE - 1)) out_rowbase <= out_rowbase + AAW'(c.cols);
                state <= S_LDW;
              end
            end else begin
              ch     <= ch + 1'b1;
              chbase <= chbase + AAW'(c.cols);
              state  <= S_LDW;
            end
          end else begin
            p <= p + 1'b1;
          end
        end
        S_DRAIN1: state <= S_DRAIN2;
        S_DRAIN2: begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && cmd_ready) |->
      (cmd.rows != 0 && cmd.red != 0 && cmd.cols != 0 && 32'(cmd.cols) <= PSUM_DEPTH))
    else $error("jacquard_accel: empty command or too many pixels");

endmodule
