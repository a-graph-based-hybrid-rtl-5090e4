// gnn_accel_top: GNN inference accelerator for the hybrid beamformer of one
// base station. Given the channel features of I users and J targets it runs the
// per-BS GNN (input MLPs, mean node, two graph-convolution layers, two output
// FC layers) and writes the digital beamformer vectors w (2*NRF values per user
// or target) and the analog beamformer F (NT*NRF values) to off-chip memory.
// Structure (accelerator block diagram): a control unit FSM; a memory side
// made of the weight loader and the ping-pong weight double buffer; and a
// computation engine made of an SA_R x SA_C systolic array, the ADD (bias and
// requantisation), ReLU, aggregation, combination and mean units, and the
// intermediate (feature) result buffer that keeps every layer's output on chip.
// Off-chip memory is external: it is reached through one 64-bit read port
// (request/grant, in-order responses) shared by the input load and the weight
// loader, and one 64-bit write port for the results. All addresses count
// 64-bit beats. Pulse `start` with the three base addresses stable; `done`
// pulses when the last result beat has been accepted. Layer sizes default to
// the paper's network (NT = 16 antennas, NRF = 6 RF chains, I = J = 2, NU = 2,
// NR = 4, hidden widths 512 and 256); data are 8-bit fixed point.
module gnn_accel_top
  import gnn_pkg::*;
#(
  parameter int unsigned I    = 2,
  parameter int unsigned J    = 2,
  parameter int unsigned NT   = 16,
  parameter int unsigned NU   = 2,
  parameter int unsigned NR   = 4,
  parameter int unsigned NRF  = 6,
  parameter int unsigned HID1 = 512,
  parameter int unsigned HID  = 256,
  parameter int unsigned SA_R = 4,
  parameter int unsigned SA_C = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  addr_t       in_base,
  input  addr_t       w_base,
  input  addr_t       out_base,
  output logic        busy,
  output logic        done,
  // off-chip memory read port
  output logic        mem_rd_req,
  output addr_t       mem_rd_addr,
  input  logic        mem_rd_gnt,
  input  logic        mem_rd_rvalid,
  input  beat_t       mem_rd_rdata,
  // off-chip memory write port
  output logic        mem_wr_req,
  output addr_t       mem_wr_addr,
  output beat_t       mem_wr_data,
  input  logic        mem_wr_gnt,
  // performance counters
  output logic [31:0] perf_cycles,
  output logic [31:0] perf_wstall
);

  localparam int unsigned ROWS = I + J + 1;
  localparam int unsigned DEPTH_IN = (2*NT*NU > 2*NT*NR) ? 2*NT*NU : 2*NT*NR;
  localparam int unsigned DEPTH_A  = (HID1 > HID) ? HID1 : HID;
  localparam int unsigned DEPTH_B  = (DEPTH_A > DEPTH_IN) ? DEPTH_A : DEPTH_IN;
  localparam int unsigned DEPTH    = (DEPTH_B > NT*NRF) ? DEPTH_B : NT*NRF;
  localparam int unsigned CW       = $clog2(SA_C+1);

  // ---------------- control unit ----------------
  logic            c_rd_own, c_rd_req;
  addr_t           c_rd_addr;
  logic            wl_start, wl_done;
  dim_t            wb_rd_k;
  logic            wb_release, wb_ready;
  bank_t           rd0_bank, rd1_bank, wr_bank;
  dim_t            rd0_idx, rd1_idx, wr_idx;
  data_t           rd0_data [ROWS];
  data_t           rd1_data [ROWS];
  logic            fb_wr_en;
  logic [ROWS-1:0] fb_wr_mask;
  data_t           fb_wr_data [ROWS];
  data_t           sa_a [SA_R];
  logic            sa_valid, sa_first, sa_last, sa_done;
  logic [CW-1:0]   st_col;
  logic            relu_en;
  data_t           post_data [SA_R];
  logic [ROWS-1:0] row_mask;
  row_t            mean_lo, mean_cnt;
  data_t           mean_data;
  data_t           agg_data [ROWS];

  control_unit #(
    .I(I), .J(J), .NT(NT), .NU(NU), .NR(NR), .NRF(NRF), .HID1(HID1), .HID(HID),
    .SA_R(SA_R), .SA_C(SA_C), .ROWS(ROWS)
  ) u_ctrl (
    .clk, .rst_n, .start, .in_base, .out_base, .busy, .done,
    .rd_own(c_rd_own), .rd_req(c_rd_req), .rd_addr(c_rd_addr),
    .rd_gnt(mem_rd_gnt), .rd_rvalid(mem_rd_rvalid), .rd_rdata(mem_rd_rdata),
    .wr_req(mem_wr_req), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data), .wr_gnt(mem_wr_gnt),
    .wl_start, .wb_rd_k, .wb_release, .wb_ready,
    .fb_rd0_bank(rd0_bank), .fb_rd0_idx(rd0_idx), .fb_rd0_data(rd0_data),
    .fb_rd1_bank(rd1_bank), .fb_rd1_idx(rd1_idx),
    .fb_wr_en, .fb_wr_bank(wr_bank), .fb_wr_idx(wr_idx), .fb_wr_mask, .fb_wr_data,
    .sa_a, .sa_valid, .sa_first, .sa_last, .sa_done,
    .st_col, .relu_en, .post_data,
    .row_mask, .mean_lo, .mean_cnt, .mean_data, .agg_data,
    .perf_cycles, .perf_wstall
  );

  // ---------------- memory side ----------------
  logic  l_rd_req;
  addr_t l_rd_addr;
  logic  dw_en, dw_commit;
  dim_t  dw_beat;
  beat_t dw_data;
  logic  wb_ready_fill;

  weight_loader #(
    .I(I), .J(J), .NT(NT), .NU(NU), .NR(NR), .NRF(NRF), .HID1(HID1), .HID(HID), .COLS(SA_C)
  ) u_wl (
    .clk, .rst_n, .start(wl_start), .w_base, .done(wl_done),
    .rd_req(l_rd_req), .rd_addr(l_rd_addr),
    .rd_gnt(mem_rd_gnt && !c_rd_own),
    .rd_rvalid(mem_rd_rvalid && !c_rd_own), .rd_rdata(mem_rd_rdata),
    .wr_en(dw_en), .wr_beat(dw_beat), .wr_data(dw_data), .wr_commit(dw_commit),
    .wr_ready(wb_ready_fill)
  );

  // the input load owns the read port until the weight loader is started
  assign mem_rd_req  = c_rd_own ? c_rd_req  : l_rd_req;
  assign mem_rd_addr = c_rd_own ? c_rd_addr : l_rd_addr;

  data_t w_row  [SA_C];
  data_t w_bias [SA_C];

  weight_dbuf #(.COLS(SA_C), .DEPTH(DEPTH)) u_dbuf (
    .clk, .rst_n,
    .wr_en(dw_en), .wr_beat(dw_beat), .wr_data(dw_data), .wr_commit(dw_commit),
    .wr_ready(wb_ready_fill),
    .rd_k(wb_rd_k), .rd_w(w_row), .rd_bias(w_bias), .rd_release(wb_release),
    .rd_ready(wb_ready)
  );

  // ---------------- computation engine ----------------
  feature_buffer #(.ROWS(ROWS), .DEPTH(DEPTH)) u_fbuf (
    .clk,
    .rd0_bank(rd0_bank), .rd0_idx(rd0_idx), .rd0_data(rd0_data),
    .rd1_bank(rd1_bank), .rd1_idx(rd1_idx), .rd1_data(rd1_data),
    .wr_en(fb_wr_en), .wr_bank(wr_bank), .wr_idx(wr_idx), .wr_mask(fb_wr_mask),
    .wr_data(fb_wr_data)
  );

  acc_t sa_acc [SA_R][SA_C];

  systolic_array #(.ROWS(SA_R), .COLS(SA_C)) u_sa (
    .clk, .rst_n,
    .a_in(sa_a), .w_in(w_row), .valid_in(sa_valid), .first_in(sa_first),
    .last_in(sa_last), .acc(sa_acc), .done(sa_done)
  );

  // one array column at a time through ADD and ReLU
  acc_t  col_acc [SA_R];
  data_t col_add [SA_R];
  data_t col_bias;
  always_comb begin
    for (int r = 0; r < SA_R; r++)
      col_acc[r] = (int'(st_col) < SA_C) ? sa_acc[r][int'(st_col)] : '0;
    col_bias = (int'(st_col) < SA_C) ? w_bias[int'(st_col)] : '0;
  end

  add_unit  #(.LANES(SA_R)) u_add  (.acc(col_acc), .bias(col_bias), .y(col_add));
  relu_unit #(.LANES(SA_R)) u_relu (.en(relu_en), .x(col_add), .y(post_data));

  data_t agg_g [ROWS];
  aggregation_unit #(.ROWS(ROWS)) u_agg  (.x(rd0_data), .mask(row_mask), .g(agg_g));
  combination_unit #(.ROWS(ROWS)) u_comb (.z(rd1_data), .g(agg_g), .c(agg_data));
  mean_unit        #(.ROWS(ROWS)) u_mean (.x(rd0_data), .row_lo(mean_lo), .row_cnt(mean_cnt), .y(mean_data));


  // every weight tile has been streamed in by the time the results are out
  assert property (@(posedge clk) disable iff (!rst_n) done |-> wl_done)
    else $error("accelerator finished before the weight loader");

endmodule
