// tb_pascal_accel -- self-checking test of the Pascal accelerator.
// Uses the paper's 4-PE toy configuration (2x2 array) and a pointwise layer with
// K = 8 input channels and a 4x4 output (Fig. 7): 4 pixel tiles, Cout = 3.
// Inputs and parameters are loaded through the DMA ports, the layer is run
// twice (plain and with ReLU / another shift), every output byte is compared
// with a reference computed here, and the command latency must equal
// tiles*Cout*(K+2) cycles.
module tb_pascal_accel;
  import mensa_pkg::*;
  localparam int R = 2, C = 2, N = R * C;
  localparam int ACT = N * 128, PAR = 1024;
  localparam int K = 8, COUT = 3, TILES = 4;

  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, busy, done;
  cmd_t cmd;
  logic act_dma_we, act_dma_re, par_dma_we;
  logic [6:0] act_dma_waddr, act_dma_raddr;
  logic [N-1:0] act_dma_wbe;
  logic [8*N-1:0] act_dma_wdata, act_dma_rdata;
  logic [9:0] par_dma_waddr;
  data_t par_dma_wdata;
  int checks = 0, failures = 0;

  pascal_accel #(.PE_ROWS(R), .PE_COLS(C), .ACT_BYTES(ACT), .PAR_BYTES(PAR)) dut (.*);
  always #5 clk = ~clk;

  int I [K][N*TILES];
  int W [COUT][K];

  function automatic int rq(longint a, int sh, bit relu);
    longint s = a >>> sh;
    if (relu && s < 0) s = 0;
    return s > 127 ? 127 : (s < -128 ? -128 : int'(s));
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_layer(int sh, bit relu, int out_base);
    int cyc;
    @(negedge clk);
    cmd = '0;
    cmd.target = ACC_PASCAL; cmd.op = OP_MATMUL;
    cmd.rows = 16'(COUT); cmd.red = 16'(K); cmd.cols = 16'(TILES);
    cmd.in_base = 17'd0; cmd.out_base = 17'(out_base); cmd.par_base = 17'd100;
    cmd.shift = 5'(sh); cmd.relu = relu;
    cmd_valid = 1;
    @(posedge clk);
    checks++;
    if (!cmd_ready) failures++;
    @(negedge clk);
    cmd_valid = 0;
    cyc = 0;
    do begin
      @(posedge clk); #1; cyc++;
    end while (!done);
    checks++;
    if (cyc != TILES * COUT * (K + 2)) begin
      failures++;
      $display("latency %0d cycles, expected %0d", cyc, TILES * COUT * (K + 2));
    end
    // read back every output row: tile t, channel o at out_base + t*COUT + o
    for (int t = 0; t < TILES; t++)
      for (int o = 0; o < COUT; o++) begin
        @(negedge clk);
        act_dma_re = 1; act_dma_raddr = 7'(out_base + t * COUT + o);
        @(posedge clk); #1;
        act_dma_re = 0;
        for (int n = 0; n < N; n++) begin
          longint s = 0;
          int e;
          for (int k = 0; k < K; k++) s += longint'(W[o][k]) * I[k][t*N+n];
          e = rq(s, sh, relu);
          checks++;
          if (data_t'(act_dma_rdata[8*n +: 8]) != data_t'(e)) begin
            failures++;
            if (failures < 10)
              $display("t%0d o%0d pe%0d: got %0d exp %0d", t, o, n,
                       data_t'(act_dma_rdata[8*n +: 8]), e);
          end
        end
      end
  endtask

  initial begin
    cmd_valid = 0; cmd = '0;
    act_dma_we = 0; act_dma_re = 0; act_dma_waddr = 0; act_dma_raddr = 0;
    act_dma_wbe = '0; act_dma_wdata = '0; par_dma_we = 0; par_dma_waddr = 0; par_dma_wdata = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (I[k, p]) I[k][p] = int'(data_t'($urandom));
    foreach (W[o, k]) W[o][k] = int'(data_t'($urandom));
    // input row t*K + k holds I[k][t*N .. t*N+N-1]
    for (int t = 0; t < TILES; t++)
      for (int k = 0; k < K; k++) begin
        @(negedge clk);
        act_dma_we = 1; act_dma_waddr = 7'(t * K + k); act_dma_wbe = '1;
        for (int n = 0; n < N; n++) act_dma_wdata[8*n +: 8] = 8'(I[k][t*N+n]);
      end
    @(negedge clk);
    act_dma_we = 0;
    for (int o = 0; o < COUT; o++)
      for (int k = 0; k < K; k++) begin
        @(negedge clk);
        par_dma_we = 1; par_dma_waddr = 10'(100 + o * K + k); par_dma_wdata = data_t'(W[o][k]);
      end
    @(negedge clk);
    par_dma_we = 0;
    run_layer(6, 1'b0, 64);
    run_layer(9, 1'b1, 96);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
