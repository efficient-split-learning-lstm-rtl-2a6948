// accel_harness: drives and checks one lstm_accel build (one SPLIT value).
//
// Loads random pruned weights (70 % zeros) into every layer of the build
// through the {layer,row,lane} weight port, then runs NSEQ sequences of 15
// random samples. The expected result stream comes from lstm_ref_pkg: layer 1
// for Split-B (150 values), layers 1-2 for Split-A (5), all four layers for
// LSTM-DO-S (1). Every element and its last flag is checked.
// Sequence 0 is sent back to back with m_ready high, and the clocks from the
// first accepted sample to the last result taken are compared with EXP_LAT.
// Later sequences have random gaps and random m_ready back-pressure.
module accel_harness
  import lstm_pkg::*;
  import lstm_ref_pkg::*;
#(
  parameter split_e SPLIT   = SPLIT_FULL,
  parameter int     EXP_LAT = 340,
  parameter int     NSEQ    = 3
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output bit   finished,
  output int   latency
);

  logic   rst_n, clear;
  logic   s_valid, s_ready, m_valid, m_ready, m_last;
  data_t  s_data, m_data, w_data;
  logic   w_we;
  waddr_t w_addr;

  lstm_accel #(.SPLIT(SPLIT)) dut (.*);

  int w1[], w2[], w3[], w4[];
  int xs[], h1s[], h2s[], v[], y1[], y2[];
  int exp_q[$];
  bit last_q[$];
  longint cyc, t_first;
  logic took;
  bit bp;

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    took <= rst_n && s_valid && s_ready;
    if (rst_n && s_valid && s_ready && t_first < 0) t_first <= cyc;
    if (rst_n && m_valid && m_ready) begin
      int e;
      bit l;
      e = exp_q.pop_front();
      l = last_q.pop_front();
      checks++;
      if (int'(m_data) != e || m_last != l) begin
        failures++;
        $display("FAIL accel split=%0d: got %0d/%0b exp %0d/%0b", SPLIT, m_data, m_last, e, l);
      end
      if (m_last && latency < 0) latency <= int'(cyc - t_first);
    end
  end

  always @(negedge clk) m_ready = bp ? ($urandom_range(3) != 0) : 1'b1;

  task automatic load(input logic [1:0] layer, input int rows, input int lanes, input int w[]);
    for (int r = 0; r < rows; r++)
      for (int l = 0; l < lanes; l++) begin
        w_we = 1; w_addr = '{layer: layer, row: 6'(r), lane: 8'(l)};
        w_data = data_t'(w[r * lanes + l]);
        @(negedge clk);
      end
    w_we = 0;
  endtask

  initial begin
    checks = 0; failures = 0; finished = 0; cyc = 0; latency = -1; t_first = -1;
    rst_n = 0; clear = 0; s_valid = 0; s_data = 0; w_we = 0; w_addr = '0; w_data = 0;
    took = 0; bp = 0; m_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    rand_weights((1 + H1 + 1) * 4 * H1, 70, w1);
    rand_weights((H1 + H2 + 1) * 4 * H2, 70, w2);
    rand_weights((H2 + 1) * D1, 40, w3);     // the small FC layers are pruned less,
    rand_weights((D1 + 1) * D2, 0, w4);      // so the prediction depends on the input
    load(LAYER_LSTM1, 1 + H1 + 1, 4 * H1, w1);
    if (SPLIT != SPLIT_B) load(LAYER_LSTM2, H1 + H2 + 1, 4 * H2, w2);
    if (SPLIT == SPLIT_FULL) begin
      load(LAYER_FC1, H2 + 1, D1, w3);
      load(LAYER_FC2, D1 + 1, D2, w4);
    end
    for (int s = 0; s < NSEQ; s++) begin
      bp = (s != 0);
      xs = new[N_STEPS];
      foreach (xs[i]) xs[i] = int'($urandom_range(40));   // 0 .. 1.25
      lstm_seq(1, H1, N_STEPS, w1, xs, h1s);
      if (SPLIT == SPLIT_B) v = h1s;
      else begin
        lstm_seq(H1, H2, N_STEPS, w2, h1s, h2s);
        v = new[H2];
        foreach (v[j]) v[j] = h2s[(N_STEPS - 1) * H2 + j];
        if (SPLIT == SPLIT_FULL) begin
          dense(H2, D1, 1'b1, w3, v, y1);
          dense(D1, D2, 1'b0, w4, y1, y2);
          v = y2;
        end
      end
      foreach (v[i]) begin
        exp_q.push_back(v[i]);
        last_q.push_back(i == v.size() - 1);
      end
      for (int t = 0; t < N_STEPS; t++) begin
        if (s > 0) repeat ($urandom_range(3)) @(negedge clk);
        s_data = data_t'(xs[t]); s_valid = 1;
        do @(negedge clk); while (!took);
        s_valid = 0;
      end
      while (exp_q.size() != 0) @(negedge clk);
      if (s == 0) begin
        checks++;
        if (latency != EXP_LAT) begin
          failures++;
          $display("FAIL accel split=%0d latency %0d exp %0d", SPLIT, latency, EXP_LAT);
        end
      end
    end
    repeat (3) @(negedge clk);
    finished = 1;
  end

endmodule
