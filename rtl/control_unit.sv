// control_unit: the finite state machine that sequences one GNN inference.
// It runs three phases, as the accelerator's computation flow describes:
//  1. Input load: the channel feature rows (users: 2*NT*NU bytes each, targets:
//     2*NT*NR bytes each, each row padded to whole beats) are read from
//     off-chip memory starting at `in_base` and written into bank A of the
//     feature buffer. Then the weight loader is started.
//  2. Layers: the layer program (layer_rom) is executed. An FC layer is tiled
//     into SA_C output neurons (one weight tile of the double buffer) by SA_R
//     graph rows; for each tile the controller waits for the weights (counted
//     in `perf_wstall`), streams din activation columns and weight rows into
//     the systolic array, waits for its `done`, and writes the SA_C columns
//     back through the ADD and ReLU stages, one column per cycle. A weight tile
//     is reused for all row tiles before it is released. MEAN and AGG steps
//     take one feature index per cycle through the mean or aggregation and
//     combination units.
//  3. Write-back: the beamformer outputs (rows 0 .. I+J-1 of bank A, 2*NRF
//     bytes each; row I+J of bank C, NT*NRF bytes) are written to off-chip
//     memory from `out_base`, each row padded to whole beats.
// `start` is a one-cycle pulse accepted when idle; `busy` is high from then
// until `done`, which pulses for one cycle at the end. The datapath units sit
// outside this module; it drives their operand selects and collects their
// results. That an FSM sequences computation and memory addresses is the
// paper's; the states, phases and interfaces are this design's choice.
module control_unit
  import gnn_pkg::*;
#(
  parameter int unsigned I     = 2,
  parameter int unsigned J     = 2,
  parameter int unsigned NT    = 16,
  parameter int unsigned NU    = 2,
  parameter int unsigned NR    = 4,
  parameter int unsigned NRF   = 6,
  parameter int unsigned HID1  = 512,
  parameter int unsigned HID   = 256,
  parameter int unsigned SA_R  = 4,
  parameter int unsigned SA_C  = 4,
  parameter int unsigned ROWS  = I + J + 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  addr_t           in_base,
  input  addr_t           out_base,
  output logic            busy,
  output logic            done,
  // off-chip memory: read port (used only while loading inputs, `rd_own`)
  output logic            rd_own,
  output logic            rd_req,
  output addr_t           rd_addr,
  input  logic            rd_gnt,
  input  logic            rd_rvalid,
  input  beat_t           rd_rdata,
  // off-chip memory: write port
  output logic            wr_req,
  output addr_t           wr_addr,
  output beat_t           wr_data,
  input  logic            wr_gnt,
  // weight loader and double buffer
  output logic            wl_start,
  output dim_t            wb_rd_k,
  output logic            wb_release,
  input  logic            wb_ready,
  // feature buffer
  output bank_t           fb_rd0_bank,
  output dim_t            fb_rd0_idx,
  input  data_t           fb_rd0_data [ROWS],
  output bank_t           fb_rd1_bank,
  output dim_t            fb_rd1_idx,
  output logic            fb_wr_en,
  output bank_t           fb_wr_bank,
  output dim_t            fb_wr_idx,
  output logic [ROWS-1:0] fb_wr_mask,
  output data_t           fb_wr_data [ROWS],
  // systolic array
  output data_t           sa_a [SA_R],
  output logic            sa_valid,
  output logic            sa_first,
  output logic            sa_last,
  input  logic            sa_done,
  // ADD + ReLU stage on one array column
  output logic [$clog2(SA_C+1)-1:0] st_col,
  output logic            relu_en,
  input  data_t           post_data [SA_R],
  // vector units
  output logic [ROWS-1:0] row_mask,
  output row_t            mean_lo,
  output row_t            mean_cnt,
  input  data_t           mean_data,
  input  data_t           agg_data [ROWS],
  // performance counters
  output logic [31:0]     perf_cycles,
  output logic [31:0]     perf_wstall
);

  localparam bank_t BA = 2'd0, BC = 2'd2;
  localparam int unsigned IJ = I + J;
  localparam int unsigned RIW = (ROWS > 1) ? $clog2(ROWS) : 1;  // row index width

  typedef enum logic [3:0] {
    S_IDLE, S_LD_REQ, S_LD_WAIT, S_LD_WR, S_FETCH, S_WAITW, S_FEED, S_DRAIN,
    S_STORE, S_VEC, S_WB_RD, S_WB_REQ, S_DONE
  } state_e;

  state_e     state;
  logic [4:0] pc;
  layer_t     layer;
  addr_t      addr;
  beat_t      beat;
  row_t       row;       // input-load / write-back row
  dim_t       bidx;      // beat index within a row
  logic [3:0] byte_i;    // byte index within a beat
  dim_t       k;         // feature index (FC input, vector op, ...)
  dim_t       col_base;  // first output neuron of the weight tile
  row_t       row_base;  // first graph row of the row tile
  logic [$clog2(SA_C+1)-1:0] c;

  layer_rom #(.I(I), .J(J), .NT(NT), .NU(NU), .NR(NR), .NRF(NRF), .HID1(HID1), .HID(HID))
    u_rom (.idx(pc), .layer(layer));

  // bytes of an input row / an output row
  function automatic int unsigned in_len(input row_t r);
    return (int'(r) < I) ? 2*NT*NU : 2*NT*NR;
  endfunction
  function automatic int unsigned out_len(input row_t r);
    return (int'(r) < IJ) ? 2*NRF : NT*NRF;
  endfunction

  // rows covered by the current operation, and by the current row tile
  logic [ROWS-1:0] layer_rows, tile_rows;
  always_comb begin
    for (int q = 0; q < ROWS; q++) begin
      layer_rows[q] = (q >= int'(layer.row_lo)) && (q < int'(layer.row_lo) + int'(layer.row_cnt));
      tile_rows[q]  = layer_rows[q] && (q >= int'(row_base)) && (q < int'(row_base) + SA_R);
    end
  end

  logic tile_last_row, tile_last_col;
  assign tile_last_row = int'(row_base) + SA_R >= int'(layer.row_lo) + int'(layer.row_cnt);
  assign tile_last_col = int'(col_base) + SA_C >= int'(layer.dout);

  always_comb begin
    // defaults
    rd_own      = (state == S_LD_REQ) || (state == S_LD_WAIT) || (state == S_LD_WR);
    rd_req      = (state == S_LD_REQ);
    rd_addr     = addr;
    wr_req      = (state == S_WB_REQ);
    wr_addr     = addr;
    wr_data     = beat;
    wb_rd_k     = k;
    wb_release  = 1'b0;
    fb_rd0_bank = layer.src;
    fb_rd0_idx  = k;
    fb_rd1_bank = layer.src2;
    fb_rd1_idx  = k;
    fb_wr_en    = 1'b0;
    fb_wr_bank  = layer.dst;
    fb_wr_idx   = k;
    fb_wr_mask  = '0;
    for (int q = 0; q < ROWS; q++) fb_wr_data[q] = '0;
    for (int r = 0; r < SA_R; r++) sa_a[r] = '0;
    sa_valid    = 1'b0;
    sa_first    = 1'b0;
    sa_last     = 1'b0;
    st_col      = c;
    relu_en     = layer.relu;
    row_mask    = layer_rows;
    mean_lo     = layer.row_lo;
    mean_cnt    = layer.row_cnt;

    case (state)
      S_LD_WR: begin
        // byte `byte_i` of the beat goes to feature bidx*BUS_B+byte_i of row `row`, bank A
        fb_wr_bank = BA;
        fb_wr_idx  = dim_t'(int'(bidx) * BUS_B + int'(byte_i));
        fb_wr_en   = int'(fb_wr_idx) < in_len(row);
        fb_wr_mask = ROWS'(1) << row;
        for (int q = 0; q < ROWS; q++) fb_wr_data[q] = beat[8*byte_i +: 8];
      end
      S_FEED: begin
        for (int r = 0; r < SA_R; r++)
          if (int'(row_base) + r < ROWS && tile_rows[int'(row_base) + r])
            sa_a[r] = fb_rd0_data[int'(row_base) + r];
        sa_valid = 1'b1;
        sa_first = (k == 0);
        sa_last  = (k == layer.din - 1);
      end
      S_STORE: begin
        fb_wr_idx = dim_t'(col_base + dim_t'(c));
        fb_wr_en  = fb_wr_idx < layer.dout;
        fb_wr_mask = tile_rows;
        for (int q = 0; q < ROWS; q++)
          if (q >= int'(row_base) && q < int'(row_base) + SA_R)
            fb_wr_data[q] = post_data[q - int'(row_base)];
        wb_release = (int'(c) == SA_C - 1) && tile_last_row;
      end
      S_VEC: begin
        fb_wr_en = 1'b1;
        if (layer.op == OP_MEAN) begin
          fb_wr_mask = ROWS'(1) << layer.dst_row;
          for (int q = 0; q < ROWS; q++) fb_wr_data[q] = mean_data;
        end else begin
          fb_wr_mask = layer_rows;
          for (int q = 0; q < ROWS; q++) fb_wr_data[q] = agg_data[q];
        end
      end
      S_WB_RD: begin
        fb_rd0_bank = (int'(row) < IJ) ? BA : BC;
        fb_rd0_idx  = dim_t'(int'(bidx) * BUS_B + int'(byte_i));
      end
      default: ;
    endcase
  end

  assign busy = (state != S_IDLE) && (state != S_DONE);
  assign done = (state == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      pc          <= '0;
      addr        <= '0;
      beat        <= '0;
      row         <= '0;
      bidx        <= '0;
      byte_i      <= '0;
      k           <= '0;
      col_base    <= '0;
      row_base    <= '0;
      c           <= '0;
      wl_start    <= 1'b0;
      perf_cycles <= '0;
      perf_wstall <= '0;
    end else begin
      wl_start <= 1'b0;
      if (busy) perf_cycles <= perf_cycles + 1;
      case (state)
        S_IDLE, S_DONE: begin
          state <= S_IDLE;
          if (start) begin
            addr        <= in_base;
            row         <= '0;
            bidx        <= '0;
            perf_cycles <= '0;
            perf_wstall <= '0;
            state       <= S_LD_REQ;
          end
        end
        // ---------------- input load ----------------
        S_LD_REQ: if (rd_gnt) begin
          addr  <= addr + 1'b1;
          state <= S_LD_WAIT;
        end
        S_LD_WAIT: if (rd_rvalid) begin
          beat   <= rd_rdata;
          byte_i <= '0;
          state  <= S_LD_WR;
        end
        S_LD_WR: begin
          byte_i <= byte_i + 1'b1;
          if (int'(byte_i) == BUS_B - 1) begin
            if ((int'(bidx) + 1) * BUS_B >= in_len(row)) begin
              bidx <= '0;
              if (int'(row) == IJ - 1) begin
                pc       <= '0;
                wl_start <= 1'b1;
                state    <= S_FETCH;
              end else begin
                row   <= row + 1'b1;
                state <= S_LD_REQ;
              end
            end else begin
              bidx  <= bidx + 1'b1;
              state <= S_LD_REQ;
            end
          end
        end
        // ---------------- layer program ----------------
        S_FETCH: begin
          k <= '0;
          case (layer.op)
            OP_FC: begin
              col_base <= '0;
              row_base <= layer.row_lo;
              state    <= S_WAITW;
            end
            OP_MEAN, OP_AGG: state <= S_VEC;
            default: begin
              addr   <= out_base;
              row    <= '0;
              bidx   <= '0;
              byte_i <= '0;
              beat   <= '0;
              state  <= S_WB_RD;
            end
          endcase
        end
        S_WAITW: begin
          if (wb_ready) begin
            k     <= '0;
            state <= S_FEED;
          end else begin
            perf_wstall <= perf_wstall + 1;
          end
        end
        S_FEED: begin
          k <= k + 1'b1;
          if (k == layer.din - 1) state <= S_DRAIN;
        end
        S_DRAIN: if (sa_done) begin
          c     <= '0;
          state <= S_STORE;
        end
        S_STORE: begin
          c <= c + 1'b1;
          if (int'(c) == SA_C - 1) begin
            c <= '0;
            k <= '0;
            if (!tile_last_row) begin
              row_base <= row_base + row_t'(SA_R);
              state    <= S_FEED;
            end else begin
              row_base <= layer.row_lo;
              if (!tile_last_col) begin
                col_base <= col_base + dim_t'(SA_C);
                state    <= S_WAITW;
              end else begin
                pc    <= pc + 1'b1;
                state <= S_FETCH;
              end
            end
          end
        end
        S_VEC: begin
          k <= k + 1'b1;
          if (k == layer.din - 1) begin
            pc    <= pc + 1'b1;
            state <= S_FETCH;
          end
        end
        // ---------------- write-back ----------------
        S_WB_RD: begin
          if (int'(fb_rd0_idx) < out_len(row))
            beat[8*byte_i +: 8] <= fb_rd0_data[row[RIW-1:0]];
          else
            beat[8*byte_i +: 8] <= '0;
          byte_i <= byte_i + 1'b1;
          if (int'(byte_i) == BUS_B - 1) state <= S_WB_REQ;
        end
        S_WB_REQ: if (wr_gnt) begin
          addr   <= addr + 1'b1;
          byte_i <= '0;
          state  <= S_WB_RD;
          if ((int'(bidx) + 1) * BUS_B >= out_len(row)) begin
            bidx <= '0;
            if (int'(row) == IJ) state <= S_DONE;
            else                 row   <= row + 1'b1;
          end else begin
            bidx <= bidx + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the weight tile must stay in the double buffer until its last row tile is stored
  assert property (@(posedge clk) disable iff (!rst_n) (state == S_FEED) |-> wb_ready)
    else $error("control_unit: feeding the array without a weight tile");

endmodule
