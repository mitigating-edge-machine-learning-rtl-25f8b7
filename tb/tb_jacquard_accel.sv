// tb_jacquard_accel -- self-checking test of the Jacquard accelerator.
// A 2x2 PE array (4 lanes), a layer with Cout = 6 (more filters than lanes, so
// outputs spill into a second output chunk), a reduction of 3 chunks (12 terms)
// and P = 5 output pixels.  Checks every output, the latency
// Cout*NCH*(P+2)+2, and that each filter slice was loaded into the PEs exactly
// once (parameters stay stationary over all P pixels).
module tb_jacquard_accel;
  import mensa_pkg::*;
  localparam int R = 2, C = 2, N = R * C;
  localparam int ACT = N * 64, PAR = N * 32, PSUM = 16;
  localparam int COUT = 6, NCH = 3, P = 5;

  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, busy, done;
  cmd_t cmd;
  logic act_dma_we, act_dma_re, par_dma_we;
  logic [5:0] act_dma_waddr, act_dma_raddr;
  logic [N-1:0] act_dma_wbe;
  logic [8*N-1:0] act_dma_wdata, act_dma_rdata, par_dma_wdata;
  logic [4:0] par_dma_waddr;
  logic [31:0] weight_loads;
  int checks = 0, failures = 0;

  jacquard_accel #(.PE_ROWS(R), .PE_COLS(C), .ACT_BYTES(ACT), .PAR_BYTES(PAR),
                   .PSUM_DEPTH(PSUM)) dut (.*);
  always #5 clk = ~clk;

  int I [NCH*N][P];
  int W [COUT][NCH*N];

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
    int cyc, loads0;
    loads0 = weight_loads;
    @(negedge clk);
    cmd = '0;
    cmd.target = ACC_JACQUARD; cmd.op = OP_MATMUL;
    cmd.rows = 16'(COUT); cmd.red = 16'(NCH); cmd.cols = 16'(P);
    cmd.in_base = 17'd0; cmd.out_base = 17'(out_base); cmd.par_base = 17'd2;
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
    checks += 2;
    if (cyc != COUT * NCH * (P + 2) + 2) begin
      failures++;
      $display("latency %0d, expected %0d", cyc, COUT * NCH * (P + 2) + 2);
    end
    if (weight_loads - loads0 != COUT * NCH) begin
      failures++;
      $display("weight loads %0d, expected %0d", weight_loads - loads0, COUT * NCH);
    end
    for (int oc = 0; oc < (COUT + N - 1) / N; oc++)
      for (int p = 0; p < P; p++) begin
        @(negedge clk);
        act_dma_re = 1; act_dma_raddr = 6'(out_base + oc * P + p);
        @(posedge clk); #1;
        act_dma_re = 0;
        for (int n = 0; n < N && oc * N + n < COUT; n++) begin
          longint s = 0;
          int e, o;
          o = oc * N + n;
          for (int r = 0; r < NCH * N; r++) s += longint'(W[o][r]) * I[r][p];
          e = rq(s, sh, relu);
          checks++;
          if (data_t'(act_dma_rdata[8*n +: 8]) != data_t'(e)) begin
            failures++;
            if (failures < 10)
              $display("o%0d p%0d: got %0d exp %0d", o, p, data_t'(act_dma_rdata[8*n +: 8]), e);
          end
        end
      end
  endtask

  initial begin
    cmd_valid = 0; cmd = '0;
    act_dma_we = 0; act_dma_re = 0; act_dma_waddr = 0; act_dma_raddr = 0;
    act_dma_wbe = '0; act_dma_wdata = '0; par_dma_we = 0; par_dma_waddr = 0; par_dma_wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (I[r, p]) I[r][p] = int'(data_t'($urandom));
    foreach (W[o, r]) W[o][r] = int'(data_t'($urandom));
    for (int ch = 0; ch < NCH; ch++)
      for (int p = 0; p < P; p++) begin
        @(negedge clk);
        act_dma_we = 1; act_dma_waddr = 6'(ch * P + p); act_dma_wbe = '1;
        for (int n = 0; n < N; n++) act_dma_wdata[8*n +: 8] = 8'(I[ch*N+n][p]);
      end
    @(negedge clk);
    act_dma_we = 0;
    for (int o = 0; o < COUT; o++)
      for (int ch = 0; ch < NCH; ch++) begin
        @(negedge clk);
        par_dma_we = 1; par_dma_waddr = 5'(2 + o * NCH + ch);
        for (int n = 0; n < N; n++) par_dma_wdata[8*n +: 8] = 8'(W[o][ch*N+n]);
      end
    @(negedge clk);
    par_dma_we = 0;
    run_layer(7, 1'b0, 32);
    run_layer(8, 1'b1, 48);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
