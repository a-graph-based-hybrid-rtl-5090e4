// gnn_workload_run: one complete inference of the accelerator at a given
// network size, for the workload sweeps (numbers of users and targets, user
// antennas, BS antennas). It is the end-to-end check of tb_gnn_accel_top made
// into a parameterised module: it instantiates gnn_accel_top and a behavioural
// off-chip memory with the same sizes, writes random channel features and a
// random weight stream in the accelerator's layouts, computes the expected
// w and F rows with a fixed-point model of the GNN written from the network
// equations, runs one inference with `stall_en` controlling random read-grant
// stalls, and compares every output byte. It also counts the second row tiles
// (graph rows beyond the 4-row array) and checks that count against the
// closed-form number. The shared clock comes in on `clk`; `finished` rises
// when the run and its checks are over, with `checks` and `failures` final.
module gnn_workload_run
  import gnn_pkg::*;
#(
  parameter string NAME = "workload",
  parameter int    I    = 2,
  parameter int    J    = 2,
  parameter int    NT   = 16,
  parameter int    NU   = 2,
  parameter int    NR   = 4,
  parameter int    NRF  = 6
) (
  input  logic clk,
  input  logic stall_en,
  output int   checks,
  output int   failures,
  output logic finished
);
  localparam int H1 = 512, H = 256, C = 4;
  localparam int IJ = I + J, K = I + J + 1;
  localparam addr_t IN_BASE = 32'h100, W_BASE = 32'h400, OUT_BASE = 32'h3F000;

  logic rst_n = 0, start = 0, busy, done;
  logic rd_req, rd_gnt, rd_rvalid, wr_req, wr_gnt;
  addr_t rd_addr, wr_addr;
  beat_t rd_rdata, wr_data;
  logic [31:0] perf_cycles, perf_wstall;

  gnn_accel_top #(
    .I(I), .J(J), .NT(NT), .NU(NU), .NR(NR), .NRF(NRF), .HID1(H1), .HID(H), .SA_R(4), .SA_C(C)
  ) dut (
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

  int n_rowtile2 = 0;
  localparam int ST_FEED = 6;
  always @(posedge clk) if (rst_n)
    if (int'(dut.u_ctrl.state) == ST_FEED && dut.u_ctrl.k == 0 &&
        dut.u_ctrl.row_base != dut.u_ctrl.layer.row_lo) n_rowtile2++;

  task automatic run_one(input int run);
    int cyc = 0;
    make_inputs();
    reference();
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); cyc++; end
    check(perf_cycles >= wbeats, "cannot be faster than the weight stream");
    // the reference FPGA implementation reports 432,638 to 658,873 cycles per
    // inference over its evaluated configurations; this design must not be slower
    check(perf_cycles <= 658873, $sformatf("latency %0d above the reported 658,873 cycles", perf_cycles));
    compare();
    repeat (3) @(negedge clk);
    check(!busy, "idle after done");
  endtask

  initial begin
    finished = 0;
    checks   = 0;
    failures = 0;
    for (int i = 0; i < (1 << 18); i++) u_mem.mem[i] = '0;
    make_weights();
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    run_one(0);
    check(n_rowtile2 == ((K > 4) ? 4 * 2 * ((H + C - 1) / C) : 0) +
                        ((I > 4) ? 2 * ((H1 + C - 1) / C) : 0) + ((J > 4) ? 2 * ((H1 + C - 1) / C) : 0) +
                        ((IJ > 4) ? (2*NRF + C - 1) / C : 0),
          $sformatf("second row tiles: %0d", n_rowtile2));
    $display("%s: I=%0d J=%0d NT=%0d NU=%0d NR=%0d NRF=%0d, %0d cycles, %0d checks, %0d failures",
             NAME, I, J, NT, NU, NR, NRF, perf_cycles, checks, failures);
    finished = 1;
  end
endmodule
