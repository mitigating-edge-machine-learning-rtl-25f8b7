// tb_mensa_top -- end-to-end test of the Mensa system on a small recurrent-
// convolutional model, the kind of network that uses all three accelerators:
//   L1  Pascal   : 1x1 convolution, K1 = 4 input channels -> C1 = N_JAC/2 channels, ReLU
//   (DRAM)       : the host reads L1's output and lays it out for Jacquard
//   L2  Jacquard : 1-D convolution with a 4-tap window and stride S over the
//                  pixels, 4*C1 = 2*N_JAC reduction terms (two chunks) and
//                  2*N_JAC output channels (two output chunks; N_JAC at full size)
//   (DRAM)       : L2's outputs at the first T pixels become the LSTM inputs x_t
//   L3  Pavlov   : one LSTM layer, hidden size H = N_PAV, T = 4 time steps:
//                  input MVMs of all T cells in one batch, then per cell the
//                  hidden MVM started from the stored input MVM and the
//                  element-wise cell update
// Every result read back from the accelerators is compared with a reference
// model computed here.  The mechanisms of the design are counted, and one that
// never happened counts as a failure: Pascal layer, Jacquard multi-chunk
// reduction and output spill, Pavlov batched MVM, accumulator initialisation,
// parameter-stream stall, cell update, command back-pressure, ReLU.
// This version runs the same model on the full-size design (32x32, 8x8 and 16x16 PEs,
// all buffers at their default capacity): 1024 pixels, 128 channels into Jacquard,
// 256 Jacquard filters (no output spill at this size), 256 LSTM inputs, hidden size 64.
module tb_mensa_top_full;
  import mensa_pkg::*;
  // the top's default sizes (they must match mensa_top's parameter defaults)
  localparam int PR = 32, PC = 32, PACT = 262144, PPAR = 131072;
  localparam int VR = 8, VC = 8, VNACC = 16, VPBUF = 512, VACT = 131072;
  localparam int JR = 16, JC = 16, JACT = 131072, JPAR = 131072, JPSUM = 512;
  localparam int T1 = 1, S = 8, C2MUL = 1;   // 256x512 parameters fill Jacquard's 128 KB
  localparam int NPAS = PR * PC, NPAV = VR * VC, NJAC = JR * JC;
  localparam int PAS_AAW = (PACT / NPAS > 1) ? $clog2(PACT / NPAS) : 1;
  localparam int PAS_PAW = $clog2(PPAR), PAV_AW = $clog2(VACT);
  localparam int JAC_AAW = $clog2(JACT / NJAC), JAC_PAW = $clog2(JPAR / NJAC);
  // model sizes
  localparam int K1 = 4, P1 = NPAS * T1, C1 = NJAC / 2, KW = 4;
  localparam int R2 = KW * C1, NCH = R2 / NJAC, P2 = (P1 - KW) / S + 1, C2 = C2MUL * NJAC;
  localparam int X = C2, H = NPAV, T = 4, G4 = 4 * H;
  localparam int SH1 = 5, SH2 = 8, SH3 = 7;
  // Pascal buffer rows, Jacquard rows, Pavlov byte addresses
  localparam int L1_OUT = K1 * T1;
  localparam int L2_OUT = NCH * P2;
  localparam int XB = 0, GB = T * X, HC0 = GB + T * G4, ZB = HC0 + 2 * H, CHB = ZB + G4;

  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready;
  cmd_t cmd;
  logic [2:0] busy, done;
  logic [15:0] layers_done [3];
  logic pas_act_we, pas_act_re, pas_par_we;
  logic [PAS_AAW-1:0] pas_act_waddr, pas_act_raddr;
  logic [NPAS-1:0] pas_act_wbe;
  logic [8*NPAS-1:0] pas_act_wdata, pas_act_rdata;
  logic [PAS_PAW-1:0] pas_par_waddr;
  data_t pas_par_wdata;
  logic pav_ps_valid, pav_ps_ready;
  logic [8*NPAV-1:0] pav_ps_data;
  logic pav_act_we, pav_act_re;
  logic [PAV_AW-1:0] pav_act_waddr, pav_act_raddr;
  data_t pav_act_wdata, pav_act_rdata;
  logic [31:0] pav_stall_cycles, jac_weight_loads;
  logic jac_act_we, jac_act_re, jac_par_we;
  logic [JAC_AAW-1:0] jac_act_waddr, jac_act_raddr;
  logic [NJAC-1:0] jac_act_wbe;
  logic [8*NJAC-1:0] jac_act_wdata, jac_act_rdata, jac_par_wdata;
  logic [JAC_PAW-1:0] jac_par_waddr;

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_pascal = 0, n_multichunk = 0, n_spill = 0, n_batch = 0, n_init = 0;
  int n_cell = 0, n_backpressure = 0, n_relu = 0;

  // model tensors
  int I1 [K1][P1], W1 [C1][K1], O1 [C1][P1];
  int W2 [C2][R2], O2 [C2][P2];
  int Wx [G4][X], Wh [G4][H], Gx [T][G4], hs [T+1][H], cs [T+1][H];
  int got;

  function automatic int rq(longint a, int sh, bit relu);
    automatic longint s = a >>> sh;
    if (relu && s < 0) s = 0;
    return s > 127 ? 127 : (s < -128 ? -128 : int'(s));
  endfunction
  function automatic int hsig(int x);
    int v = (x >>> 2) + 8;
    return v < 0 ? 0 : (v > 16 ? 16 : v);
  endfunction
  function automatic int htanh(int x);
    return x > 16 ? 16 : (x < -16 ? -16 : x);
  endfunction
  function automatic int sat8(int x);
    return x > 127 ? 127 : (x < -128 ? -128 : x);
  endfunction
  function automatic int small_w();   // small signed weights keep results in range
    return int'($urandom % 15) - 7;
  endfunction

  // ---- parameter stream from DRAM to Pavlov, with gaps ----
  logic [8*NPAV-1:0] beats [$];
  int n_taken = 0, n_seen = 0;  // beats accepted by Pavlov / seen by the source
  always @(negedge clk) begin
    // offer a new beat when idle or once the held one has been taken
    if (!pav_ps_valid || n_taken != n_seen) begin
      pav_ps_valid <= (beats.size() > 0) && ($urandom % 4 == 0);
      pav_ps_data  <= (beats.size() > 0) ? beats[0] : '0;
    end
    n_seen <= n_taken;
  end
  always @(posedge clk) if (pav_ps_valid && pav_ps_ready) begin
    void'(beats.pop_front());
    n_taken <= n_taken + 1;
  end

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int g, int e);
    checks++;
    if (g != e) begin
      failures++;
      if (failures < 12) $display("%s: got %0d expected %0d", what, g, e);
    end
  endtask

  // present a command; wait until the target accepts it (count back-pressure)
  task automatic send(cmd_t c);
    @(negedge clk);
    cmd = c;
    cmd_valid = 1;
    @(posedge clk);
    while (!cmd_ready) begin
      n_backpressure++;
      @(posedge clk);
    end
    @(negedge clk);
    cmd_valid = 0;
  endtask

  task automatic wait_done(int a);
    int l0 = int'(layers_done[a]);
    while (layers_done[a] == 16'(l0) && busy[a]) @(posedge clk);
    while (busy[a]) @(posedge clk);
    @(posedge clk);
  endtask

  function automatic cmd_t mk(accel_e tgt, op_e op, int rows, int red, int cols, int inb,
                              int outb, int auxb, int parb, int sh, bit relu, bit init);
    cmd_t c = '0;
    c.target = tgt; c.op = op; c.rows = 16'(rows); c.red = 16'(red); c.cols = 16'(cols);
    c.in_base = 17'(inb); c.out_base = 17'(outb); c.aux_base = 17'(auxb);
    c.par_base = 17'(parb); c.shift = 5'(sh); c.relu = relu; c.init_en = init;
    return c;
  endfunction

  task automatic pav_wr(int a, int v);
    @(negedge clk);
    pav_act_we = 1; pav_act_waddr = PAV_AW'(a); pav_act_wdata = data_t'(v);
    @(negedge clk);
    pav_act_we = 0;
  endtask
  task automatic pav_rd(int a, output int v);
    @(negedge clk);
    pav_act_re = 1; pav_act_raddr = PAV_AW'(a);
    @(posedge clk); #1;
    v = int'(pav_act_rdata);
    pav_act_re = 0;
  endtask

  initial begin
    int stall0;
    cmd_valid = 0; cmd = '0;
    pas_act_we = 0; pas_act_re = 0; pas_par_we = 0; pas_act_waddr = 0; pas_act_raddr = 0;
    pas_act_wbe = '0; pas_act_wdata = '0; pas_par_waddr = 0; pas_par_wdata = 0;
    pav_act_we = 0; pav_act_re = 0; pav_act_waddr = 0; pav_act_raddr = 0; pav_act_wdata = 0;
    jac_act_we = 0; jac_act_re = 0; jac_par_we = 0; jac_act_waddr = 0; jac_act_raddr = 0;
    jac_act_wbe = '0; jac_act_wdata = '0; jac_par_waddr = 0; jac_par_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    foreach (I1[k, p]) I1[k][p] = int'(data_t'($urandom));
    foreach (W1[c, k]) W1[c][k] = small_w();
    foreach (W2[o, r]) W2[o][r] = small_w();
    foreach (Wx[r, j]) Wx[r][j] = small_w();
    foreach (Wh[r, j]) Wh[r][j] = small_w();

    // ================= L1 on Pascal =================
    for (int t = 0; t < T1; t++)
      for (int k = 0; k < K1; k++) begin
        @(negedge clk);
        pas_act_we = 1; pas_act_waddr = PAS_AAW'(t * K1 + k); pas_act_wbe = '1;
        for (int n = 0; n < NPAS; n++) pas_act_wdata[8*n +: 8] = 8'(I1[k][t*NPAS+n]);
      end
    for (int c = 0; c < C1; c++)
      for (int k = 0; k < K1; k++) begin
        @(negedge clk);
        pas_act_we = 0;
        pas_par_we = 1; pas_par_waddr = PAS_PAW'(c * K1 + k); pas_par_wdata = data_t'(W1[c][k]);
      end
    @(negedge clk);
    pas_act_we = 0; pas_par_we = 0;
    send(mk(ACC_PASCAL, OP_MATMUL, C1, K1, T1, 0, L1_OUT, 0, 0, SH1, 1'b1, 1'b0));
    n_pascal++; n_relu++;
    wait_done(0);
    for (int t = 0; t < T1; t++)
      for (int c = 0; c < C1; c++) begin
        @(negedge clk);
        pas_act_re = 1; pas_act_raddr = PAS_AAW'(L1_OUT + t * C1 + c);
        @(posedge clk); #1;
        pas_act_re = 0;
        for (int n = 0; n < NPAS; n++) begin
          automatic longint s = 0;
          automatic int p = t * NPAS + n;
          for (int k = 0; k < K1; k++) s += longint'(W1[c][k]) * I1[k][p];
          O1[c][p] = int'(data_t'(pas_act_rdata[8*n +: 8]));   // what DRAM receives
          check("L1", O1[c][p], rq(s, SH1, 1));
        end
      end
    $display("L1 (Pascal) done: %0d outputs checked", checks);

    // ================= L2 on Jacquard =================
    // input chunk ch, pixel q, lane n: reduction index r = ch*NJAC+n = k*C1 + c
    for (int ch = 0; ch < NCH; ch++)
      for (int q = 0; q < P2; q++) begin
        @(negedge clk);
        jac_act_we = 1; jac_act_waddr = JAC_AAW'(ch * P2 + q); jac_act_wbe = '1;
        for (int n = 0; n < NJAC; n++) begin
          automatic int r = ch * NJAC + n;
          jac_act_wdata[8*n +: 8] = 8'(O1[r % C1][q * S + r / C1]);
        end
      end
    for (int o = 0; o < C2; o++)
      for (int ch = 0; ch < NCH; ch++) begin
        @(negedge clk);
        jac_act_we = 0;
        jac_par_we = 1; jac_par_waddr = JAC_PAW'(o * NCH + ch);
        for (int n = 0; n < NJAC; n++) jac_par_wdata[8*n +: 8] = 8'(W2[o][ch*NJAC+n]);
      end
    @(negedge clk);
    jac_act_we = 0; jac_par_we = 0;
    send(mk(ACC_JACQUARD, OP_MATMUL, C2, NCH, P2, 0, L2_OUT, 0, 0, SH2, 1'b0, 1'b0));
    if (NCH > 1) n_multichunk++;
    if (C2 > NJAC) n_spill++;
    wait_done(2);
    check("Jacquard filter-slice loads", int'(jac_weight_loads), C2 * NCH);
    for (int oc = 0; oc < C2 / NJAC; oc++)
      for (int q = 0; q < P2; q++) begin
        @(negedge clk);
        jac_act_re = 1; jac_act_raddr = JAC_AAW'(L2_OUT + oc * P2 + q);
        @(posedge clk); #1;
        jac_act_re = 0;
        for (int n = 0; n < NJAC; n++) begin
          automatic longint s = 0;
          automatic int o = oc * NJAC + n;
          for (int r = 0; r < R2; r++) s += longint'(W2[o][r]) * O1[r % C1][q * S + r / C1];
          O2[o][q] = int'(data_t'(jac_act_rdata[8*n +: 8]));
          check("L2", O2[o][q], rq(s, SH2, 0));
        end
      end
    $display("L2 (Jacquard) done: %0d checks so far", checks);

    // ================= L3 on Pavlov =================
    for (int t = 0; t < T; t++)
      for (int j = 0; j < X; j++) pav_wr(XB + t * X + j, O2[j][t]);
    for (int n = 0; n < 2 * H; n++) pav_wr(HC0 + n, 0);        // c_{-1} = h_{-1} = 0
    // parameter stream: W_x tiles, then W_h tiles once per cell
    for (int tt = 0; tt < G4 / NPAV; tt++)
      for (int j = 0; j < X; j++) begin
        logic [8*NPAV-1:0] b;
        for (int n = 0; n < NPAV; n++) b[8*n +: 8] = 8'(Wx[tt*NPAV+n][j]);
        beats.push_back(b);
      end
    for (int t = 0; t < T; t++)
      for (int tt = 0; tt < G4 / NPAV; tt++)
        for (int j = 0; j < H; j++) begin
          logic [8*NPAV-1:0] b;
          for (int n = 0; n < NPAV; n++) b[8*n +: 8] = 8'(Wh[tt*NPAV+n][j]);
          beats.push_back(b);
        end
    stall0 = int'(pav_stall_cycles);
    // input MVMs of all T cells in one batch (W_x streamed once)
    send(mk(ACC_PAVLOV, OP_MATMUL, G4, X, T, XB, GB, 0, 0, SH3, 1'b0, 1'b0));
    n_batch++;
    // reference
    for (int t = 0; t < T; t++)
      for (int r = 0; r < G4; r++) begin
        automatic longint s = 0;
        for (int j = 0; j < X; j++) s += longint'(Wx[r][j]) * O2[j][t];
        Gx[t][r] = rq(s, SH3, 0);
      end
    for (int n = 0; n < H; n++) begin hs[0][n] = 0; cs[0][n] = 0; end
    for (int t = 0; t < T; t++) begin
      automatic int hin = (t == 0) ? HC0 + H : CHB + (t - 1) * 2 * H + H;
      automatic int cin = (t == 0) ? HC0 : CHB + (t - 1) * 2 * H;
      int z [4*64];
      // hidden MVM, accumulators start from the stored input MVM (sent while
      // Pavlov is still busy: it must wait)
      send(mk(ACC_PAVLOV, OP_MATMUL, G4, H, 1, hin, ZB, GB + t * G4, 0, SH3, 1'b0, 1'b1));
      n_init++;
      send(mk(ACC_PAVLOV, OP_LSTM_CELL, H, 0, 0, ZB, CHB + t * 2 * H, cin, 0, 0, 1'b0, 1'b0));
      n_cell++;
      for (int r = 0; r < G4; r++) begin
        automatic longint s = longint'(Gx[t][r]) <<< SH3;
        for (int j = 0; j < H; j++) s += longint'(Wh[r][j]) * hs[t][j];
        z[r] = rq(s, SH3, 0);
      end
      for (int n = 0; n < H; n++) begin
        int c;
        c = sat8((hsig(z[H + n]) * cs[t][n] + hsig(z[n]) * htanh(z[2*H + n])) >>> 4);
        cs[t+1][n] = c;
        hs[t+1][n] = sat8((hsig(z[3*H + n]) * htanh(c)) >>> 4);
      end
    end
    wait_done(1);
    for (int t = 0; t < T; t++)
      for (int r = 0; r < G4; r++) begin
        pav_rd(GB + t * G4 + r, got);
        check("L3 input MVM", got, Gx[t][r]);
      end
    for (int t = 1; t <= T; t++)
      for (int n = 0; n < H; n++) begin
        pav_rd(CHB + (t - 1) * 2 * H + n, got);
        check("L3 c_t", got, cs[t][n]);
        pav_rd(CHB + (t - 1) * 2 * H + H + n, got);
        check("L3 h_t", got, hs[t][n]);
      end
    if (int'(pav_stall_cycles) > stall0) $display("Pavlov waited %0d cycles for parameters",
                                                 int'(pav_stall_cycles) - stall0);
    check("parameter beats left over", beats.size(), 0);
    check("layers on Pascal", int'(layers_done[0]), 1);
    check("layers on Jacquard", int'(layers_done[2]), 1);
    check("commands on Pavlov", int'(layers_done[1]), 1 + 2 * T);

    // ================= mechanisms =================
    $display("mechanisms: pascal=%0d multichunk=%0d spill=%0d batch=%0d init=%0d stall=%0d cell=%0d backpressure=%0d relu=%0d",
             n_pascal, n_multichunk, n_spill, n_batch, n_init,
             int'(pav_stall_cycles) - stall0, n_cell, n_backpressure, n_relu);
    checks += 9;
    if (n_pascal == 0)     begin failures++; $display("no Pascal layer"); end
    if (n_multichunk == 0) begin failures++; $display("no multi-chunk reduction"); end
    if (n_spill == 0 && C2MUL > 1) begin failures++; $display("no output spill"); end
    if (n_batch == 0)      begin failures++; $display("no batched MVM"); end
    if (n_init == 0)       begin failures++; $display("no accumulator initialisation"); end
    if (int'(pav_stall_cycles) == stall0) begin failures++; $display("no parameter stall"); end
    if (n_cell == 0)       begin failures++; $display("no cell update"); end
    if (n_backpressure == 0) begin failures++; $display("no command back-pressure"); end
    if (n_relu == 0)       begin failures++; $display("no ReLU layer"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  mensa_top dut (.*);
endmodule
