// systolic_array: ROWS x COLS grid of processing elements (pe) computing one
// output tile of a fully connected layer, Y[r][c] = sum_k A[r][k] * W[k][c].
//
// Each cycle the caller presents one column of activations (a_in[r] = A[r][k],
// one graph row per array row) and one row of weights (w_in[c] = W[k][c], one
// output neuron per array column), for k = 0 .. K-1 back to back, with `first`
// on k = 0 and `last` on k = K-1. Row r is delayed by r cycles and column c by c
// cycles at the array edge, so that A[r][k] and W[k][c] meet in PE (r,c) at
// cycle k + r + c. Results stay in the PEs (output stationary) and are read in
// parallel from `acc` when `done` pulses, ROWS + COLS - 2 cycles after the
// clock edge that takes the `last` input. A new tile may follow back to back: its `first` flag restarts
// each accumulator as it passes. The 4 x 4 default is the grid drawn in the
// accelerator's block diagram; the dataflow is this design's choice.
module systolic_array
  import gnn_pkg::*;
#(
  parameter int unsigned ROWS = 4,
  parameter int unsigned COLS = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  data_t a_in  [ROWS],
  input  data_t w_in  [COLS],
  input  logic  valid_in,
  input  logic  first_in,
  input  logic  last_in,
  output acc_t  acc   [ROWS][COLS],
  output logic  done
);

  // edge skew: row r sees its inputs r cycles late, column c sees them c cycles late
  data_t a_skew [ROWS];
  logic  v_skew [ROWS];
  logic  f_skew [ROWS];
  logic  l_skew [ROWS];
  data_t w_skew [COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_rskew
    if (r == 0) begin : g_direct
      assign a_skew[r] = a_in[r];
      assign v_skew[r] = valid_in;
      assign f_skew[r] = first_in;
      assign l_skew[r] = last_in;
    end else begin : g_delay
      data_t a_d [r];
      logic  v_d [r];
      logic  f_d [r];
      logic  l_d [r];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < r; i++) begin
            a_d[i] <= '0; v_d[i] <= 1'b0; f_d[i] <= 1'b0; l_d[i] <= 1'b0;
          end
        end else begin
          a_d[0] <= a_in[r]; v_d[0] <= valid_in; f_d[0] <= first_in; l_d[0] <= last_in;
          for (int i = 1; i < r; i++) begin
            a_d[i] <= a_d[i-1]; v_d[i] <= v_d[i-1]; f_d[i] <= f_d[i-1]; l_d[i] <= l_d[i-1];
          end
        end
      end
      assign a_skew[r] = a_d[r-1];
      assign v_skew[r] = v_d[r-1];
      assign f_skew[r] = f_d[r-1];
      assign l_skew[r] = l_d[r-1];
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_cskew
    if (c == 0) begin : g_direct
      assign w_skew[c] = w_in[c];
    end else begin : g_delay
      data_t w_d [c];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < c; i++) w_d[i] <= '0;
        end else begin
          w_d[0] <= w_in[c];
          for (int i = 1; i < c; i++) w_d[i] <= w_d[i-1];
        end
      end
      assign w_skew[c] = w_d[c-1];
    end
  end

  // PE grid; index COLS / ROWS of the link arrays is the (unused) far edge
  data_t a_link [ROWS][COLS+1];
  logic  v_link [ROWS][COLS+1];
  logic  f_link [ROWS][COLS+1];
  logic  l_link [ROWS][COLS+1];
  data_t w_link [ROWS+1][COLS];
  logic  pe_done [ROWS][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    assign a_link[r][0] = a_skew[r];
    assign v_link[r][0] = v_skew[r];
    assign f_link[r][0] = f_skew[r];
    assign l_link[r][0] = l_skew[r];
    for (genvar c = 0; c < COLS; c++) begin : g_col
      if (r == 0) begin : g_top
        assign w_link[0][c] = w_skew[c];
      end
      pe u_pe (
        .clk       (clk),
        .rst_n     (rst_n),
        .a_in      (a_link[r][c]),
        .w_in      (w_link[r][c]),
        .valid_in  (v_link[r][c]),
        .first_in  (f_link[r][c]),
        .last_in   (l_link[r][c]),
        .a_out     (a_link[r][c+1]),
        .w_out     (w_link[r+1][c]),
        .valid_out (v_link[r][c+1]),
        .first_out (f_link[r][c+1]),
        .last_out  (l_link[r][c+1]),
        .acc       (acc[r][c]),
        .done      (pe_done[r][c])
      );
    end
  end

  // the bottom-right PE is the last to finish a tile
  assign done = pe_done[ROWS-1][COLS-1];

endmodule
