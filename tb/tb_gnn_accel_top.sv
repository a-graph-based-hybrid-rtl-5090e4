// tb_gnn_accel_top: end-to-end test of the accelerator with every parameter at
// its default (I = J = 2, NT = 16, NU = 2, NR = 4, NRF = 6, hidden widths 512
// and 256, 4 x 4 array). The testbench draws random channel features and a
// random weight set, lays them out in the behavioural off-chip memory (weight
// stream: per FC layer, per tile of 4 output neurons, one bias beat then the
// weights k-major), runs two inferences (the second with memory stalls
// switched on and new inputs), and compares every output byte with a
// fixed-point model of the GNN written directly from the network equations in
// this file. It also counts how often each mechanism of the design occurred
// (weight-wait stalls, loader waits on a full double buffer, both ping-pong
// banks, second row tiles, mean node, aggregation steps, ReLU clipping, read
// grant stalls) and fails if one never did, and checks that the cycle count is
// at least the number of weight beats that must cross the 64-bit bus and at
// most the largest latency reported for the reference FPGA implementation
// (658,873 cycles at a 10 ns clock).
module tb_gnn_accel_top;
  import gnn_pkg::*;

  localparam int I = 2, J = 2, NT = 16, NU = 2, NR = 4, NRF = 6, H1 = 512, H = 256, C = 4;
  localparam int IJ = I + J, K = I + J + 1;
  localparam addr_t IN_BASE = 32'h100, W_BASE = 32'h400, OUT_BASE = 32'h3F000;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic stall_en = 0;
  logic rd_req, rd_gnt, rd_rvalid, wr_req, wr_gnt;
  addr_t rd_addr, wr_addr;
  beat_t rd_rdata, wr_data;
  logic [31:0] perf_cycles, perf_wstall;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  gnn_accel_top dut (
    .clk, .rst_n, .start, .in_base(IN_BASE), .w_base(W_BASE), .out_base(OUT_BASE),
    .busy, .done,
    .mem_rd_req(rd_req), .mem_rd_addr(rd_addr), .mem_rd_gnt(rd_gnt),
    .mem_rd_rvalid(rd_rvalid), .mem_rd_rdata(rd_rdata),
    .mem_wr_req(wr_req), .mem_wr_addr(wr_addr), .mem_wr_data(wr_data), .mem_wr_gnt(wr_gnt),
    .perf_cycles, .perf_wstall
  );

  offchip_mem_model #(.WORDS(1 << 18), .LAT(4)) u_mem (
    .clk, .stall_en, .rd_req, .rd_addr, .rd_gnt, .rd_rvalid, .rd_rdata,
    .wr_req, .wr_addr, .wr_data, .wr_gnt
  );

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- network ----------------
  // stream order: 0,1 communication MLP; 2,3 sensing MLP; 4..7 graph conv 1
  // (neighbour MLP, combination MLP); 8..11 graph conv 2; 12 w layer; 13 F layer
  data_t Wt [14][512][512];
  data_t Bs [14][512];
  int    ldin [14], ldout [14];

  function automatic int relu_q(longint acc, data_t b, bit relu);
    longint s, q;
    s = acc + longint'(b) * 16;
    q = (s >= 0) ? s / 16 : -((-s + 15) / 16);
    if (q > 127) q = 127;
    if (q < -128) q = -128;
    if (relu && q < 0) q = 0;
    return int'(q);
  endfunction

  int Xc [I][2*NT*NU];
  int Xs [J][2*NT*NR];
  int Z  [K][512];
  int T1 [K][512];
  int T2 [K][512];
  int OUTW [IJ][2*NRF];
  int OUTF [NT*NRF];

  // one FC layer on rows [lo, lo+cnt) of src into dst
  task automatic fc(input int l, input int lo, input int cnt, ref int src [K][512],
                    ref int dst [K][512], input bit relu);
    for (int r = lo; r < lo + cnt; r++)
      for (int n = 0; n < ldout[l]; n++) begin
        longint acc = 0;
        for (int k = 0; k < ldin[l]; k++) acc += longint'(src[r][k]) * longint'(Wt[l][k][n]);
        dst[r][n] = relu_q(acc, Bs[l][n], relu);
      end
  endtask

  task automatic reference();
    int A [K][512];
    int G [K][512];
    for (int r = 0; r < K; r++) for (int d = 0; d < 512; d++) A[r][d] = 0;
    for (int i = 0; i < I; i++) for (int d = 0; d < 2*NT*NU; d++) A[i][d] = Xc[i][d];
    for (int j = 0; j < J; j++) for (int d = 0; d < 2*NT*NR; d++) A[I+j][d] = Xs[j][d];
    fc(0, 0, I, A, T1, 1); fc(1, 0, I, T1, Z, 1);
    fc(2, I, J, A, T1, 1); fc(3, I, J, T1, Z, 1);
    for (int d = 0; d < H; d++) begin
      int s = 0;
      for (int r = 0; r < IJ; r++) s += Z[r][d];
      Z[IJ][d] = (s < 0) ? -((-s) / IJ) : s / IJ;
    end
    for (int g = 0; g < 2; g++) begin
      int b = 4 + 4*g;
      fc(b, 0, K, Z, T1, 1); fc(b+1, 0, K, T1, T2, 1);
      for (int d = 0; d < H; d++)
        for (int r = 0; r < K; r++) begin
          int m = -1000, s;
          for (int q = 0; q < K; q++) if (q != r && T2[q][d] > m) m = T2[q][d];
          s = Z[r][d] + m;
          G[r][d] = (s > 127) ? 127 : (s < -128) ? -128 : s;
        end
      fc(b+2, 0, K, G, T1, 1); fc(b+3, 0, K, T1, Z, 1);
    end
    fc(12, 0, IJ, Z, T1, 0);
    for (int r = 0; r < IJ; r++) for (int n = 0; n < 2*NRF; n++) OUTW[r][n] = T1[r][n];
    fc(13, IJ, 1, Z, T2, 0);
    for (int n = 0; n < NT*NRF; n++) OUTF[n] = T2[IJ][n];
  endtask

  // ---------------- memory image ----------------
  int unsigned wbeats;
  task automatic put_byte(input addr_t base, input int unsigned idx, input int v);
    u_mem.mem[base + idx / 8][8*(idx % 8) +: 8] = 8'(v);
  endtask

  task automatic make_weights();
    int unsigned pos;
    addr_t a;
    for (int l = 0; l < 14; l++) begin
      ldin[l]  = (l == 0) ? 2*NT*NU : (l == 2) ? 2*NT*NR : (l == 1 || l == 3) ? H1 : H;
      ldout[l] = (l == 0 || l == 2) ? H1 : (l == 12) ? 2*NRF : (l == 13) ? NT*NRF : H;
      for (int k = 0; k < ldin[l]; k++)
        for (int n = 0; n < ldout[l]; n++) Wt[l][k][n] = data_t'($signed($urandom % 9) - 4);
      for (int n = 0; n < ldout[l]; n++) Bs[l][n] = data_t'($signed($urandom % 33) - 16);
    end
    a = W_BASE;
    for (int l = 0; l < 14; l++)
      for (int t = 0; t < (ldout[l] + C - 1) / C; t++) begin
        u_mem.mem[a] = '0;
        for (int c = 0; c < C; c++) if (t*C + c < ldout[l]) u_mem.mem[a][8*c +: 8] = Bs[l][t*C + c];
        a++;
        pos = 0;
        for (int k = 0; k < ldin[l]; k++)
          for (int c = 0; c < C; c++) begin
            if (pos % 8 == 0) u_mem.mem[a + pos / 8] = '0;
            put_byte(a, pos, (t*C + c < ldout[l]) ? int'(Wt[l][k][t*C + c]) : 0);
            pos++;
          end
        a += (pos + 7) / 8;
      end
    wbeats = a - W_BASE;
  endtask

  task automatic make_inputs();
    int unsigned a = 0;
    for (int i = 0; i < I; i++) begin
      for (int d = 0; d < 2*NT*NU; d++) begin
        Xc[i][d] = $signed($urandom % 128) - 64;
        put_byte(IN_BASE, a*8 + d, Xc[i][d]);
      end
      a += (2*NT*NU + 7) / 8;
    end
    for (int j = 0; j < J; j++) begin
      for (int d = 0; d < 2*NT*NR; d++) begin
        Xs[j][d] = $signed($urandom % 128) - 64;
        put_byte(IN_BASE, a*8 + d, Xs[j][d]);
      end
      a += (2*NT*NR + 7) / 8;
    end
  endtask

  task automatic compare();
    int unsigned a = 0;
    for (int r = 0; r < IJ; r++) begin
      for (int n = 0; n < 2*NRF; n++)
        check(int'($signed(u_mem.mem[OUT_BASE + a + n/8][8*(n%8) +: 8])) == OUTW[r][n],
              $sformatf("w row %0d elem %0d: %0d vs %0d", r, n,
                        $signed(u_mem.mem[OUT_BASE + a + n/8][8*(n%8) +: 8]), OUTW[r][n]));
      a += (2*NRF + 7) / 8;
    end
    for (int n = 0; n < NT*NRF; n++)
      check(int'($signed(u_mem.mem[OUT_BASE + a + n/8][8*(n%8) +: 8])) == OUTF[n],
            $sformatf("F elem %0d: %0d vs %0d", n, $signed(u_mem.mem[OUT_BASE + a + n/8][8*(n%8) +: 8]), OUTF[n]));
  endtask

  // ---------------- mechanism counters ----------------
  // state encodings of weight_loader (S_WAIT) and control_unit (S_FEED, S_STORE, S_VEC)
  localparam int ST_WL_WAIT = 2, ST_FEED = 6, ST_STORE = 8, ST_VEC = 9;
  int n_wait_full = 0, n_bank1 = 0, n_bank0 = 0, n_rowtile2 = 0, n_mean = 0, n_agg = 0, n_relu_clip = 0;
  always @(posedge clk) if (rst_n) begin
    if (int'(dut.u_wl.state) == ST_WL_WAIT && !dut.u_wl.wr_ready) n_wait_full++;
    if (dut.dw_commit && dut.u_dbuf.wsel) n_bank1++;
    if (dut.dw_commit && !dut.u_dbuf.wsel) n_bank0++;
    if (int'(dut.u_ctrl.state) == ST_FEED && dut.u_ctrl.k == 0 &&
        dut.u_ctrl.row_base != dut.u_ctrl.layer.row_lo) n_rowtile2++;
    if (int'(dut.u_ctrl.state) == ST_VEC && dut.u_ctrl.layer.op == OP_MEAN) n_mean++;
    if (int'(dut.u_ctrl.state) == ST_VEC && dut.u_ctrl.layer.op == OP_AGG) n_agg++;
    if (int'(dut.u_ctrl.state) == ST_STORE && dut.relu_en)
      for (int r = 0; r < 4; r++) if (dut.col_add[r] < 0) n_relu_clip++;
  end

  task automatic run_one(input int run);
    int cyc = 0;
    make_inputs();
    reference();
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); cyc++; end
    $display("run %0d: %0d cycles (perf %0d), weight-wait stall cycles %0d, weight beats %0d",
             run, cyc, perf_cycles, perf_wstall, wbeats);
    check(perf_cycles >= wbeats, "cannot be faster than the weight stream");
    // the reference FPGA implementation reports 432,638 to 658,873 cycles per
    // inference over its evaluated configurations; this design must not be slower
    check(perf_cycles <= 658873, $sformatf("latency %0d above the reported 658,873 cycles", perf_cycles));
    compare();
    repeat (3) @(negedge clk);
    check(!busy, "idle after done");
  endtask

  initial begin
    for (int i = 0; i < (1 << 18); i++) u_mem.mem[i] = '0;
    make_weights();
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    run_one(0);
    stall_en = 1;
    run_one(1);
    $display("mechanisms: loader-waits-full %0d, bank0 %0d, bank1 %0d, second-row-tiles %0d, mean %0d, agg %0d, relu-clips %0d, grant stalls %0d, wstall %0d",
             n_wait_full, n_bank0, n_bank1, n_rowtile2, n_mean, n_agg, n_relu_clip, u_mem.stall_count, perf_wstall);
    check(n_wait_full > 0, "loader waited on a full double buffer");
    check(n_bank0 > 0 && n_bank1 > 0, "both ping-pong banks used");
    check(n_rowtile2 > 0, "row tiling happened");
    check(n_mean == 2 * H, "mean node computed once per feature per run");
    check(n_agg == 2 * 2 * H, "aggregation steps");
    check(n_relu_clip > 0, "ReLU clipped");
    check(u_mem.stall_count > 0, "read grant stalls");
    check(perf_wstall > 0, "weight-wait stalls");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
