// lstm_layer_harness: drives and checks one lstm_layer configuration.
//
// Loads random pruned weights (70 % zeros) through the weight port, then runs
// NSEQ sequences of SEQ_LEN random input vectors. Sequence 0 runs with
// out_ready held high and checks the latency from input acceptance to
// out_valid (N_IN+N_H+4 clocks). Later sequences use random input gaps and
// random out_ready back-pressure. Before the last sequence a sequence is
// aborted half way with `clear`, which must leave h and c at zero. Every
// output vector is compared with lstm_ref_pkg.
module lstm_layer_harness
  import lstm_pkg::*;
  import lstm_ref_pkg::*;
#(
  parameter int N_IN       = 1,
  parameter int N_H        = 10,
  parameter int SEQ_LEN    = 15,
  parameter bit RETURN_SEQ = 1'b1,
  parameter int NSEQ       = 4
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output bit   finished
);

  localparam int K     = N_IN + N_H;
  localparam int LANES = 4 * N_H;

  logic       rst_n, clear;
  logic       in_valid, in_ready, out_valid, out_ready;
  data_t      in_data [N_IN];
  data_t      out_data [N_H];
  logic       w_we;
  logic [5:0] w_row;
  logic [7:0] w_lane;
  data_t      w_data;

  lstm_layer #(.N_IN(N_IN), .N_H(N_H), .SEQ_LEN(SEQ_LEN), .RETURN_SEQ(RETURN_SEQ)) dut (.*);

  int w[];
  int xs[];
  int hs[];
  int exp_q[$];          // expected output values, flattened
  longint acc_cycle;     // cycle of the last accepted input
  longint cyc;
  bit  lat_check;        // checking latency in this sequence
  bit  ignore_out;       // outputs of an aborted sequence are not checked
  logic ov_q;

  always @(posedge clk) cyc <= cyc + 1;

  // monitor: compare every output vector taken
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready && !ignore_out) begin
      for (int j = 0; j < N_H; j++) begin
        int e;
        e = exp_q.pop_front();
        checks++;
        if (int'(out_data[j]) != e) begin
          failures++;
          $display("FAIL lstm_layer N_IN=%0d N_H=%0d unit %0d: got %0d exp %0d",
                   N_IN, N_H, j, out_data[j], e);
        end
      end
    end
    ov_q <= out_valid;
    if (rst_n && lat_check && out_valid && !ov_q) begin
      checks++;
      if (cyc - acc_cycle != longint'(K + 5)) begin
        failures++;
        $display("FAIL lstm_layer latency %0d exp %0d", cyc - acc_cycle, K + 5);
      end
    end
  end

  // handshake seen at the last rising edge (read by the driver at the
  // falling edge, so driver and design never race)
  logic took;
  always @(posedge clk) begin
    took <= rst_n && in_valid && in_ready;
    if (rst_n && in_valid && in_ready) acc_cycle <= cyc;
  end

  // random back-pressure except during the latency sequence
  bit bp;
  always @(negedge clk) out_ready = bp ? ($urandom_range(3) != 0) : 1'b1;

  task automatic run_seq(input int s, input int abort_at);
    xs = new[SEQ_LEN * N_IN];
    foreach (xs[i]) xs[i] = int'($urandom_range(64)) - 24;
    ignore_out = (abort_at >= 0);
    if (abort_at < 0) begin
      lstm_seq(N_IN, N_H, SEQ_LEN, w, xs, hs);
      for (int t = 0; t < SEQ_LEN; t++)
        if (RETURN_SEQ || t == SEQ_LEN - 1)
          for (int j = 0; j < N_H; j++) exp_q.push_back(hs[t * N_H + j]);
    end
    for (int t = 0; t < SEQ_LEN; t++) begin
      if (abort_at == t) begin
        @(negedge clk);
        clear = 1'b1;
        @(negedge clk);
        clear = 1'b0;
        exp_q.delete();
        ignore_out = 0;
        return;
      end
      if (s > 0) repeat ($urandom_range(2)) @(negedge clk);
      for (int i = 0; i < N_IN; i++) in_data[i] = data_t'(xs[t * N_IN + i]);
      in_valid = 1'b1;
      do @(negedge clk); while (!took);
      in_valid = 1'b0;
    end
    while (exp_q.size() != 0) @(negedge clk);
  endtask

  initial begin
    checks = 0; failures = 0; finished = 0; cyc = 0;
    rst_n = 0; clear = 0; in_valid = 0; w_we = 0; bp = 0; lat_check = 0;
    ignore_out = 0; ov_q = 0; took = 0; out_ready = 1;
    w_row = '0; w_lane = '0; w_data = '0;
    foreach (in_data[i]) in_data[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // load weights
    rand_weights((K + 1) * LANES, 70, w);
    for (int r = 0; r <= K; r++)
      for (int l = 0; l < LANES; l++) begin
        w_we = 1; w_row = 6'(r); w_lane = 8'(l); w_data = data_t'(w[r * LANES + l]);
        @(negedge clk);
      end
    w_we = 0;
    @(negedge clk);
    // sequence 0: latency check, no back-pressure
    lat_check = 1;
    run_seq(0, -1);
    lat_check = 0;
    bp = 1;
    for (int s = 1; s < NSEQ; s++) begin
      if (s == NSEQ - 1) run_seq(s, SEQ_LEN / 2);   // aborted sequence
      run_seq(s, -1);
    end
    repeat (5) @(negedge clk);
    finished = 1;
  end

endmodule
