// tb_gnn_workloads: the network sizes swept in the reference evaluation, each
// run end to end on an accelerator elaborated for that size. The sweeps vary
// the number of users I (1, 2, 3) with J = 2 targets, the number of targets
// J (1, 2, 3) with I = 2 users, the user antennas NU (1, 2, 4), and the BS
// antenna count NT = 8 that the reference setup text also names; every other
// size stays at its default. The default point itself is covered by the
// full-size testbench. Each instance of gnn_workload_run builds its own
// accelerator and memory, runs one inference (half of them with random read
// grant stalls) and compares all outputs with a fixed-point model; I = 3 and
// J = 3 give 6-row graphs, so their full-graph layers need a second tile of
// the 4-row array. The testbench waits for all of them and adds up the checks.
module tb_gnn_workloads;
  localparam int NRUN = 7;

  logic clk = 0;
  always #5 clk = ~clk;

  int   checks [NRUN];
  int   failures [NRUN];
  logic finished [NRUN];

  gnn_workload_run #(.NAME("users I=1"),   .I(1), .J(2)) u_i1 (.clk, .stall_en(1'b0), .checks(checks[0]), .failures(failures[0]), .finished(finished[0]));
  gnn_workload_run #(.NAME("users I=3"),   .I(3), .J(2)) u_i3 (.clk, .stall_en(1'b1), .checks(checks[1]), .failures(failures[1]), .finished(finished[1]));
  gnn_workload_run #(.NAME("targets J=1"), .I(2), .J(1)) u_j1 (.clk, .stall_en(1'b0), .checks(checks[2]), .failures(failures[2]), .finished(finished[2]));
  gnn_workload_run #(.NAME("targets J=3"), .I(2), .J(3)) u_j3 (.clk, .stall_en(1'b1), .checks(checks[3]), .failures(failures[3]), .finished(finished[3]));
  gnn_workload_run #(.NAME("user antennas NU=1"), .NU(1)) u_nu1 (.clk, .stall_en(1'b0), .checks(checks[4]), .failures(failures[4]), .finished(finished[4]));
  gnn_workload_run #(.NAME("user antennas NU=4"), .NU(4)) u_nu4 (.clk, .stall_en(1'b1), .checks(checks[5]), .failures(failures[5]), .finished(finished[5]));
  gnn_workload_run #(.NAME("BS antennas NT=8"),   .NT(8)) u_nt8 (.clk, .stall_en(1'b0), .checks(checks[6]), .failures(failures[6]), .finished(finished[6]));

  int total_checks, total_failures;

  initial begin
    #20000000;
    total_checks = 0;
    total_failures = 1;
    for (int n = 0; n < NRUN; n++) begin
      total_checks += checks[n];
      total_failures += failures[n];
    end
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", total_checks, total_failures);
    $finish;
  end

  initial begin
    bit all_done;
    do begin
      @(negedge clk);
      all_done = 1;
      for (int n = 0; n < NRUN; n++) if (finished[n] !== 1'b1) all_done = 0;
    end while (!all_done);
    total_checks = 0;
    total_failures = 0;
    for (int n = 0; n < NRUN; n++) begin
      total_checks += checks[n];
      total_failures += failures[n];
      if (checks[n] == 0) total_failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", total_checks, total_failures);
    $finish;
  end
endmodule
