// pe: one processing element of the output-stationary systolic array.
//
// Each cycle the PE takes an activation from its left neighbour and a weight
// from its upper neighbour, multiplies them and adds the product to its own
// accumulator; it then forwards the activation to the right and the weight
// downwards through one register each, so data moves through the grid in the
// synchronised, pipelined way the accelerator's computation engine describes.
// Three flags travel with the activation: `valid` (a real operand pair),
// `first` (start a new dot product: the accumulator is loaded, not added to)
// and `last` (the final pair of the dot product). `done` pulses for one cycle
// after the PE has absorbed its `last` pair; `acc` then holds the result.
// Latency: one cycle from input to forwarded output. The output-stationary
// dataflow and the flag scheme are this design's choice; the paper only says
// that each PE forms partial products, accumulates and passes data on.
module pe
  import gnn_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  data_t a_in,
  input  data_t w_in,
  input  logic  valid_in,
  input  logic  first_in,
  input  logic  last_in,
  output data_t a_out,
  output data_t w_out,
  output logic  valid_out,
  output logic  first_out,
  output logic  last_out,
  output acc_t  acc,
  output logic  done
);

  acc_t prod;
  assign prod = acc_t'(a_in) * acc_t'(w_in);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out     <= '0;
      w_out     <= '0;
      valid_out <= 1'b0;
      first_out <= 1'b0;
      last_out  <= 1'b0;
      acc       <= '0;
      done      <= 1'b0;
    end else begin
      a_out     <= a_in;
      w_out     <= w_in;
      valid_out <= valid_in;
      first_out <= first_in & valid_in;
      last_out  <= last_in & valid_in;
      done      <= valid_in & last_in;
      if (valid_in) acc <= first_in ? prod : acc + prod;
    end
  end

endmodule
