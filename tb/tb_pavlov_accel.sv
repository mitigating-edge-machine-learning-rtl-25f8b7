// tb_pavlov_accel -- self-checking test of the Pavlov accelerator.
// A 2x2 PE array (4 lanes), batch of up to 4 cells, 16-entry private buffers.
//  1. MVM, R = 8 rows (2 tiles), C = 6, batch B = 3, parameters pre-streamed:
//     outputs and the exact latency per tile (C*B + 1 + B*N_PE) are checked.
//  2. The same product with init_en (accumulators start from stored values)
//     while the parameter stream arrives with random gaps: outputs checked and
//     the stall counter must have counted the waits.
//  3. OP_LSTM_CELL over H = 8 elements against a reference cell update.
// Each parameter beat is streamed once per tile although it serves B cells,
// which the testbench checks by counting accepted beats.
module tb_pavlov_accel;
  import mensa_pkg::*;
  localparam int R = 2, C = 2, N = R * C, NACC = 4, PBUF = 16, ACT = 4096;
  localparam int ROWS = 8, COLS = 6, B = 3, H = 8;

  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, busy, done;
  cmd_t cmd;
  logic ps_valid, ps_ready;
  logic [8*N-1:0] ps_data;
  logic act_dma_we, act_dma_re;
  logic [11:0] act_dma_waddr, act_dma_raddr;
  data_t act_dma_wdata, act_dma_rdata;
  logic [31:0] stall_cycles;
  int checks = 0, failures = 0;

  pavlov_accel #(.PE_ROWS(R), .PE_COLS(C), .NACC(NACC), .PBUF_BYTES(PBUF),
                 .ACT_BYTES(ACT)) dut (.*);
  always #5 clk = ~clk;

  int W [ROWS][COLS];
  int X [B][COLS];
  int Y0 [B][ROWS];
  logic [8*N-1:0] beats [$];
  int beats_taken = 0;
  bit gaps = 0;

  function automatic int rq(longint a, int sh, bit relu);
    longint s = a >>> sh;
    if (relu && s < 0) s = 0;
    return s > 127 ? 127 : (s < -128 ? -128 : int'(s));
  endfunction

  // parameter stream source (plays the DRAM side)
  // a beat that is offered is held until it is taken
  bit took = 0;
  always @(negedge clk) begin
    if (!(ps_valid && !took)) begin
      ps_valid <= (beats.size() > 0) && (!gaps || ($urandom % 8 == 0));
      ps_data  <= (beats.size() > 0) ? beats[0] : '0;
    end
    took <= 0;
  end
  always @(posedge clk) if (ps_valid && ps_ready) begin
    void'(beats.pop_front());
    beats_taken++;
    took <= 1;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int a, int v);
    @(negedge clk);
    act_dma_we = 1; act_dma_waddr = 12'(a); act_dma_wdata = data_t'(v);
    @(negedge clk);
    act_dma_we = 0;
  endtask

  task automatic rd(int a, output data_t v);
    @(negedge clk);
    act_dma_re = 1; act_dma_raddr = 12'(a);
    @(posedge clk); #1;
    v = act_dma_rdata;
    act_dma_re = 0;
  endtask

  task automatic queue_params();
    for (int t = 0; t < ROWS / N; t++)
      for (int j = 0; j < COLS; j++) begin
        logic [8*N-1:0] bt;
        for (int n = 0; n < N; n++) bt[8*n +: 8] = 8'(W[t*N+n][j]);
        beats.push_back(bt);
      end
  endtask

  task automatic issue(op_e op, int rows, int red, int cols, int inb, int outb, int auxb,
                       int sh, bit relu, bit init, output int cyc);
    @(negedge clk);
    cmd = '0;
    cmd.target = ACC_PAVLOV; cmd.op = op;
    cmd.rows = 16'(rows); cmd.red = 16'(red); cmd.cols = 16'(cols);
    cmd.in_base = 17'(inb); cmd.out_base = 17'(outb); cmd.aux_base = 17'(auxb);
    cmd.shift = 5'(sh); cmd.relu = relu; cmd.init_en = init;
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
  endtask

  initial begin
    int cyc, taken0;
    data_t v;
    cmd_valid = 0; cmd = '0;
    act_dma_we = 0; act_dma_re = 0; act_dma_waddr = 0; act_dma_raddr = 0; act_dma_wdata = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (W[r, j]) W[r][j] = int'(data_t'($urandom));
    foreach (X[b, j]) X[b][j] = int'(data_t'($urandom));
    foreach (Y0[b, r]) Y0[b][r] = int'(data_t'($urandom));
    for (int b = 0; b < B; b++) for (int j = 0; j < COLS; j++) wr(100 + b * COLS + j, X[b][j]);
    for (int b = 0; b < B; b++) for (int r = 0; r < ROWS; r++) wr(300 + b * ROWS + r, Y0[b][r]);

    // ---- 1: plain MVM batch, parameters already waiting in the private buffers
    queue_params();
    repeat (20) @(posedge clk);
    taken0 = beats_taken;
    issue(OP_MATMUL, ROWS, COLS, B, 100, 200, 0, 5, 1'b0, 1'b0, cyc);
    checks++;
    if (cyc != (ROWS / N) * (COLS * B + 1 + B * N)) begin
      failures++;
      $display("latency %0d, expected %0d", cyc, (ROWS / N) * (COLS * B + 1 + B * N));
    end
    checks++;
    if (beats_taken - taken0 != 0 || beats.size() != 0) failures++;   // all taken before start
    for (int b = 0; b < B; b++)
      for (int r = 0; r < ROWS; r++) begin
        longint s;
        s = 0;
        for (int j = 0; j < COLS; j++) s += longint'(W[r][j]) * X[b][j];
        rd(200 + b * ROWS + r, v);
        checks++;
        if (v != data_t'(rq(s, 5, 0))) begin
          failures++;
          if (failures < 10) $display("mvm b%0d r%0d: got %0d exp %0d", b, r, v, rq(s, 5, 0));
        end
      end

    // ---- 2: accumulate onto stored values, stream with gaps
    gaps = 1;
    taken0 = beats_taken;
    fork
      begin repeat (30) @(posedge clk); queue_params(); end
      issue(OP_MATMUL, ROWS, COLS, B, 100, 400, 300, 6, 1'b1, 1'b1, cyc);
    join
    checks += 2;
    if (stall_cycles == 0) begin
      failures++;
      $display("no parameter stall was seen");
    end
    if (beats_taken - taken0 != (ROWS / N) * COLS) begin
      failures++;
      $display("%0d parameter beats streamed, expected %0d", beats_taken - taken0, (ROWS / N) * COLS);
    end
    for (int b = 0; b < B; b++)
      for (int r = 0; r < ROWS; r++) begin
        longint s;
        s = longint'(Y0[b][r]) <<< 6;
        for (int j = 0; j < COLS; j++) s += longint'(W[r][j]) * X[b][j];
        rd(400 + b * ROWS + r, v);
        checks++;
        if (v != data_t'(rq(s, 6, 1))) begin
          failures++;
          if (failures < 10) $display("init b%0d r%0d: got %0d exp %0d", b, r, v, rq(s, 6, 1));
        end
      end

    // ---- 3: LSTM cell update
    begin
      int z [4][H];
      int cp [H];
      foreach (z[g, n]) begin z[g][n] = int'(data_t'($urandom)); wr(500 + g * H + n, z[g][n]); end
      foreach (cp[n]) begin cp[n] = int'(data_t'($urandom)); wr(600 + n, cp[n]); end
      issue(OP_LSTM_CELL, H, 0, 0, 500, 700, 600, 0, 1'b0, 1'b0, cyc);
      checks++;
      if (cyc != 9 * H) begin
        failures++;
        $display("cell latency %0d, expected %0d", cyc, 9 * H);
      end
      for (int n = 0; n < H; n++) begin
        int si, sf, sg, so, ce, he, tc;
        si = (z[0][n] >>> 2) + 8; si = si < 0 ? 0 : (si > 16 ? 16 : si);
        sf = (z[1][n] >>> 2) + 8; sf = sf < 0 ? 0 : (sf > 16 ? 16 : sf);
        so = (z[3][n] >>> 2) + 8; so = so < 0 ? 0 : (so > 16 ? 16 : so);
        sg = z[2][n] > 16 ? 16 : (z[2][n] < -16 ? -16 : z[2][n]);
        ce = (sf * cp[n] + si * sg) >>> 4;
        ce = ce > 127 ? 127 : (ce < -128 ? -128 : ce);
        tc = ce > 16 ? 16 : (ce < -16 ? -16 : ce);
        he = (so * tc) >>> 4;
        rd(700 + n, v);
        checks++;
        if (v != data_t'(ce)) begin failures++; $display("c[%0d] got %0d exp %0d", n, v, ce); end
        rd(700 + H + n, v);
        checks++;
        if (v != data_t'(he)) begin failures++; $display("h[%0d] got %0d exp %0d", n, v, he); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
