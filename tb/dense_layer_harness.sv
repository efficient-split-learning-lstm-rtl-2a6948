// dense_layer_harness: drives and checks one dense_layer configuration.
//
// Loads random pruned weights (70 % zeros), then sends NVEC random input
// vectors. The first vector is sent with out_ready high and the latency is
// checked (taken N_IN+4 edges after acceptance); the rest use random gaps and
// random back-pressure. Outputs are compared with lstm_ref_pkg::dense.
module dense_layer_harness
  import lstm_pkg::*;
  import lstm_ref_pkg::*;
#(
  parameter int N_IN  = 5,
  parameter int N_OUT = 10,
  parameter bit RELU  = 1'b1,
  parameter int NVEC  = 40
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output bit   finished
);

  localparam int ROWS = N_IN + 1;

  logic       rst_n, clear;
  logic       in_valid, in_ready, out_valid, out_ready;
  data_t      in_data [N_IN];
  data_t      out_data [N_OUT];
  logic       w_we;
  logic [5:0] w_row;
  logic [7:0] w_lane;
  data_t      w_data;

  dense_layer #(.N_IN(N_IN), .N_OUT(N_OUT), .RELU(RELU)) dut (.*);

  int w[], x[], y[];
  int exp_q[$];
  longint cyc, acc_cycle;
  bit lat_check, bp;
  logic took, ov_q;
  int n_neg;   // ReLU clamps seen

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    took <= rst_n && in_valid && in_ready;
    if (rst_n && in_valid && in_ready) acc_cycle <= cyc;
    ov_q <= out_valid;
    if (rst_n && out_valid && out_ready)
      for (int o = 0; o < N_OUT; o++) begin
        int e;
        e = exp_q.pop_front();
        checks++;
        if (int'(out_data[o]) != e) begin
          failures++;
          $display("FAIL dense_layer %0dx%0d out %0d: got %0d exp %0d", N_IN, N_OUT, o, out_data[o], e);
        end
      end
    if (rst_n && lat_check && out_valid && !ov_q) begin
      checks++;
      if (cyc - acc_cycle != longint'(N_IN + 4)) begin
        failures++;
        $display("FAIL dense_layer latency %0d exp %0d", cyc - acc_cycle, N_IN + 4);
      end
    end
  end

  always @(negedge clk) out_ready = bp ? ($urandom_range(2) != 0) : 1'b1;

  initial begin
    checks = 0; failures = 0; finished = 0; cyc = 0; n_neg = 0;
    rst_n = 0; clear = 0; in_valid = 0; w_we = 0; bp = 0; lat_check = 0;
    took = 0; ov_q = 0; out_ready = 1;
    w_row = '0; w_lane = '0; w_data = '0;
    foreach (in_data[i]) in_data[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    rand_weights(ROWS * N_OUT, 70, w);
    for (int r = 0; r < ROWS; r++)
      for (int l = 0; l < N_OUT; l++) begin
        w_we = 1; w_row = 6'(r); w_lane = 8'(l); w_data = data_t'(w[r * N_OUT + l]);
        @(negedge clk);
      end
    w_we = 0;
    for (int v = 0; v < NVEC; v++) begin
      lat_check = (v == 0);
      bp        = (v != 0);
      x = new[N_IN];
      foreach (x[i]) x[i] = int'($urandom_range(127)) - 64;
      dense(N_IN, N_OUT, RELU, w, x, y);
      foreach (y[o]) exp_q.push_back(y[o]);
      // count how often the unclamped sum was negative (ReLU active)
      dense(N_IN, N_OUT, 1'b0, w, x, y);
      foreach (y[o]) if (y[o] < 0) n_neg++;
      if (v > 0) repeat ($urandom_range(2)) @(negedge clk);
      for (int i = 0; i < N_IN; i++) in_data[i] = data_t'(x[i]);
      in_valid = 1;
      do @(negedge clk); while (!took);
      in_valid = 0;
      if (v == 0) while (exp_q.size() != 0) @(negedge clk);
    end
    while (exp_q.size() != 0) @(negedge clk);
    if (RELU) begin
      checks++;
      if (n_neg == 0) begin
        failures++;
        $display("FAIL dense_layer: ReLU clamp never exercised");
      end
    end
    repeat (3) @(negedge clk);
    finished = 1;
  end

endmodule
