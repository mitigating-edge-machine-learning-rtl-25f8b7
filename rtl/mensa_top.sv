// mensa_top -- a Mensa system with three heterogeneous edge accelerators.
//
// Mensa replaces one large, one-size-fits-all edge accelerator by several small
// ones, each matched to a cluster of layers, plus a runtime scheduler (host
// software) that maps every layer to one of them.  This top holds the three
// accelerators of the paper's design for Google edge models:
//   Pascal   (on chip, 32x32 PEs)  -- Clusters 1/2, compute-centric convolutions
//   Pavlov   (near memory, 8x8)    -- Cluster 3, LSTM gates and fully connected
//   Jacquard (near memory, 16x16)  -- Clusters 4/5, data-centric convolutions
// Each layer runs completely on one accelerator.  Activations that pass from a
// layer on one accelerator to a layer on another go through DRAM; parameters are
// read-only and always come from DRAM.  The DRAM (HBM stack) and the host are
// outside this module: their side of the data movement is brought out as the
// DMA ports of each accelerator's buffers and Pavlov's parameter stream.
//
// Command port: the scheduler presents a layer descriptor (cmd_t) with
// cmd_valid; cmd.target selects the accelerator and cmd_ready reflects that
// accelerator's readiness, so a command is accepted in a cycle where both are
// high.  busy/done are per accelerator (index = accel_e value).  Accelerators run
// concurrently.  Layer counts per accelerator are kept in layers_done.
// The routing logic is this design's; everything inside the accelerators is
// described in their own files.
module mensa_top
  import mensa_pkg::*;
#(
  parameter int unsigned PAS_ROWS  = 32,
  parameter int unsigned PAS_COLS  = 32,
  parameter int unsigned PAS_ACT   = 262144,
  parameter int unsigned PAS_PAR   = 131072,
  parameter int unsigned PAV_ROWS  = 8,
  parameter int unsigned PAV_COLS  = 8,
  parameter int unsigned PAV_NACC  = 16,
  parameter int unsigned PAV_PBUF  = 512,
  parameter int unsigned PAV_ACT   = 131072,
  parameter int unsigned JAC_ROWS  = 16,
  parameter int unsigned JAC_COLS  = 16,
  parameter int unsigned JAC_ACT   = 131072,
  parameter int unsigned JAC_PAR   = 131072,
  parameter int unsigned JAC_PSUM  = 512,
  localparam int unsigned PAS_N    = PAS_ROWS * PAS_COLS,
  localparam int unsigned PAS_AAW  = (PAS_ACT / PAS_N > 1) ? $clog2(PAS_ACT / PAS_N) : 1,
  localparam int unsigned PAS_PAW  = $clog2(PAS_PAR),
  localparam int unsigned PAV_N    = PAV_ROWS * PAV_COLS,
  localparam int unsigned PAV_AW   = $clog2(PAV_ACT),
  localparam int unsigned JAC_N    = JAC_ROWS * JAC_COLS,
  localparam int unsigned JAC_AAW  = $clog2(JAC_ACT / JAC_N),
  localparam int unsigned JAC_PAW  = $clog2(JAC_PAR / JAC_N)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // runtime scheduler
  input  logic                    cmd_valid,
  input  cmd_t                    cmd,
  output logic                    cmd_ready,
  output logic [2:0]              busy,
  output logic [2:0]              done,
  output logic [15:0]             layers_done [3],
  // Pascal buffers
  input  logic                    pas_act_we,
  input  logic [PAS_AAW-1:0]      pas_act_waddr,
  input  logic [PAS_N-1:0]        pas_act_wbe,
  input  logic [8*PAS_N-1:0]      pas_act_wdata,
  input  logic                    pas_act_re,
  input  logic [PAS_AAW-1:0]      pas_act_raddr,
  output logic [8*PAS_N-1:0]      pas_act_rdata,
  input  logic                    pas_par_we,
  input  logic [PAS_PAW-1:0]      pas_par_waddr,
  input  data_t                   pas_par_wdata,
  // Pavlov parameter stream and activation buffer
  input  logic                    pav_ps_valid,
  input  logic [8*PAV_N-1:0]      pav_ps_data,
  output logic                    pav_ps_ready,
  input  logic                    pav_act_we,
  input  logic [PAV_AW-1:0]       pav_act_waddr,
  input  data_t                   pav_act_wdata,
  input  logic                    pav_act_re,
  input  logic [PAV_AW-1:0]       pav_act_raddr,
  output data_t                   pav_act_rdata,
  output logic [31:0]             pav_stall_cycles,
  // Jacquard buffers
  input  logic                    jac_act_we,
  input  logic [JAC_AAW-1:0]      jac_act_waddr,
  input  logic [JAC_N-1:0]        jac_act_wbe,
  input  logic [8*JAC_N-1:0]      jac_act_wdata,
  input  logic                    jac_act_re,
  input  logic [JAC_AAW-1:0]      jac_act_raddr,
  output logic [8*JAC_N-1:0]      jac_act_rdata,
  input  logic                    jac_par_we,
  input  logic [JAC_PAW-1:0]      jac_par_waddr,
  input  logic [8*JAC_N-1:0]      jac_par_wdata,
  output logic [31:0]             jac_weight_loads
);

  logic [2:0] sel, rdy;

  always_comb begin
    sel = '0;
    if (cmd_valid) sel[cmd.target] = 1'b1;
  end

  assign cmd_ready = (cmd.target == ACC_PASCAL)   ? rdy[0] :
                     (cmd.target == ACC_PAVLOV)   ? rdy[1] :
                     (cmd.target == ACC_JACQUARD) ? rdy[2] : 1'b0;

  pascal_accel #(
    .PE_ROWS(PAS_ROWS), .PE_COLS(PAS_COLS), .ACT_BYTES(PAS_ACT), .PAR_BYTES(PAS_PAR)
  ) u_pascal (
    .clk, .rst_n,
    .cmd_valid(sel[0]), .cmd, .cmd_ready(rdy[0]), .busy(busy[0]), .done(done[0]),
    .act_dma_we(pas_act_we), .act_dma_waddr(pas_act_waddr), .act_dma_wbe(pas_act_wbe),
    .act_dma_wdata(pas_act_wdata), .act_dma_re(pas_act_re), .act_dma_raddr(pas_act_raddr),
    .act_dma_rdata(pas_act_rdata),
    .par_dma_we(pas_par_we), .par_dma_waddr(pas_par_waddr), .par_dma_wdata(pas_par_wdata));

  pavlov_accel #(
    .PE_ROWS(PAV_ROWS), .PE_COLS(PAV_COLS), .NACC(PAV_NACC), .PBUF_BYTES(PAV_PBUF),
    .ACT_BYTES(PAV_ACT)
  ) u_pavlov (
    .clk, .rst_n,
    .cmd_valid(sel[1]), .cmd, .cmd_ready(rdy[1]), .busy(busy[1]), .done(done[1]),
    .ps_valid(pav_ps_valid), .ps_data(pav_ps_data), .ps_ready(pav_ps_ready),
    .act_dma_we(pav_act_we), .act_dma_waddr(pav_act_waddr), .act_dma_wdata(pav_act_wdata),
    .act_dma_re(pav_act_re), .act_dma_raddr(pav_act_raddr), .act_dma_rdata(pav_act_rdata),
    .stall_cycles(pav_stall_cycles));

  jacquard_accel #(
    .PE_ROWS(JAC_ROWS), .PE_COLS(JAC_COLS), .ACT_BYTES(JAC_ACT), .PAR_BYTES(JAC_PAR),
    .PSUM_DEPTH(JAC_PSUM)
  ) u_jacquard (
    .clk, .rst_n,
    .cmd_valid(sel[2]), .cmd, .cmd_ready(rdy[2]), .busy(busy[2]), .done(done[2]),
    .act_dma_we(jac_act_we), .act_dma_waddr(jac_act_waddr), .act_dma_wbe(jac_act_wbe),
    .act_dma_wdata(jac_act_wdata), .act_dma_re(jac_act_re), .act_dma_raddr(jac_act_raddr),
    .act_dma_rdata(jac_act_rdata),
    .par_dma_we(jac_par_we), .par_dma_waddr(jac_par_waddr), .par_dma_wdata(jac_par_wdata),
    .weight_loads(jac_weight_loads));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 3; i++) layers_done[i] <= '0;
    end else begin
      for (int i = 0; i < 3; i++) if (done[i]) layers_done[i] <= layers_done[i] + 1'b1;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid |-> (cmd.target != 2'd3))
    else $error("mensa_top: command for a non-existent accelerator");

endmodule
