// lstm_accel: the LSTM inference core ("LSTM hardware") of the edge device.
//
// It runs the edge part f_E of the split student network on a sequence of
// N_STEPS input samples and returns the intermediate representation z (or,
// unsplit, the prediction). The layers present are chosen at build time by
// SPLIT, matching the three configurations evaluated in the paper:
//   SPLIT_FULL (LSTM-DO-S)  LSTM(10, whole sequence) -> LSTM(5, last step)
//                           -> FC(10, ReLU) -> FC(1)      1 output value
//   SPLIT_A                 LSTM(10) -> LSTM(5)           5 output values
//   SPLIT_B                 LSTM(10)                     15 x 10 = 150 values
// Layers run as a pipeline: while the second LSTM works on timestep t, the
// first can already work on t+1.
//
// Interface: samples enter on an 8-bit valid/ready stream (s_*), one per
// timestep. Results leave on an 8-bit valid/ready stream (m_*), element by
// element (for SPLIT_B timestep by timestep, unit 0 first); m_last marks the
// final element of a sequence's result. Weights are loaded one 8-bit word at a
// time through w_* with address {layer, row, lane} (lstm_pkg::waddr_t); the
// row/lane layout of each layer is described in lstm_layer and dense_layer.
// `clear` empties the pipeline and zeroes the recurrent state; weights stay.
//
// Timing with the result taken at once: the first LSTM needs 17 clocks per
// step, the second 20, so the second sets the pace. From the first sample
// accepted to the last result value taken, a sequence takes 340 clocks for
// SPLIT_FULL (roughly 17 + 15*20 for the LSTMs, then 9 and 14 for the dense
// layers), 321 for SPLIT_A and 264 for SPLIT_B (the last h is ready at
// 14*17 + 16 = 254, then its 10 values leave one per clock). The paper's hls4ml cores report 226, 228 and 283 clocks at 80 MHz.
module lstm_accel
  import lstm_pkg::*;
#(
  parameter split_e SPLIT = SPLIT_FULL
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clear,
  // input sample stream
  input  logic   s_valid,
  output logic   s_ready,
  input  data_t  s_data,
  // result stream
  output logic   m_valid,
  input  logic   m_ready,
  output data_t  m_data,
  output logic   m_last,
  // weight load
  input  logic   w_we,
  input  waddr_t w_addr,
  input  data_t  w_data
);

  localparam int NV     = (SPLIT == SPLIT_B) ? H1 : (SPLIT == SPLIT_A) ? H2 : D2;
  localparam int NVEC   = (SPLIT == SPLIT_B) ? N_STEPS : 1;  // vectors per sequence
  localparam int EW     = (NV > 1) ? $clog2(NV) : 1;
  localparam int VW     = $clog2(NVEC + 1);

  // per-layer write enables
  logic [3:0] we_l;
  always_comb
    for (int i = 0; i < 4; i++) we_l[i] = w_we && (w_addr.layer == 2'(i));

  // ---------------------------------------------------------------
  // layer 1: LSTM, 1 input feature, H1 units, whole sequence out
  // ---------------------------------------------------------------
  data_t l1_in [N_FEAT];
  logic  l1_ov, l1_or;
  data_t l1_out [H1];
  assign l1_in[0] = s_data;

  lstm_layer #(.N_IN(N_FEAT), .N_H(H1), .SEQ_LEN(N_STEPS), .RETURN_SEQ(1'b1)) u_lstm1 (
    .clk, .rst_n, .clear,
    .in_valid (s_valid), .in_ready (s_ready), .in_data (l1_in),
    .out_valid(l1_ov),   .out_ready(l1_or),   .out_data(l1_out),
    .w_we (we_l[LAYER_LSTM1]), .w_row(w_addr.row), .w_lane(w_addr.lane), .w_data
  );

  // final vector before serialisation
  logic  v_valid, v_ready;
  data_t v_data [NV];

  if (SPLIT == SPLIT_B) begin : g_split_b
    assign v_valid = l1_ov;
    assign l1_or   = v_ready;
    assign v_data  = l1_out;
  end else begin : g_lstm2
    logic  l2_ov, l2_or;
    data_t l2_out [H2];

    lstm_layer #(.N_IN(H1), .N_H(H2), .SEQ_LEN(N_STEPS), .RETURN_SEQ(1'b0)) u_lstm2 (
      .clk, .rst_n, .clear,
      .in_valid (l1_ov), .in_ready (l1_or), .in_data (l1_out),
      .out_valid(l2_ov), .out_ready(l2_or), .out_data(l2_out),
      .w_we (we_l[LAYER_LSTM2]), .w_row(w_addr.row), .w_lane(w_addr.lane), .w_data
    );

    if (SPLIT == SPLIT_A) begin : g_split_a
      assign v_valid = l2_ov;
      assign l2_or   = v_ready;
      assign v_data  = l2_out;
    end else begin : g_full
      logic  f1_ov, f1_or;
      data_t f1_out [D1];

      dense_layer #(.N_IN(H2), .N_OUT(D1), .RELU(1'b1)) u_fc1 (
        .clk, .rst_n, .clear,
        .in_valid (l2_ov), .in_ready (l2_or), .in_data (l2_out),
        .out_valid(f1_ov), .out_ready(f1_or), .out_data(f1_out),
        .w_we (we_l[LAYER_FC1]), .w_row(w_addr.row), .w_lane(w_addr.lane), .w_data
      );

      dense_layer #(.N_IN(D1), .N_OUT(D2), .RELU(1'b0)) u_fc2 (
        .clk, .rst_n, .clear,
        .in_valid (f1_ov),   .in_ready (f1_or),   .in_data (f1_out),
        .out_valid(v_valid), .out_ready(v_ready), .out_data(v_data),
        .w_we (we_l[LAYER_FC2]), .w_row(w_addr.row), .w_lane(w_addr.lane), .w_data
      );
    end
  end

  // ---------------------------------------------------------------
  // serialiser: vector -> 8-bit elements
  // ---------------------------------------------------------------
  data_t         sv [NV];
  logic          s_busy;
  logic [EW-1:0] elem;
  logic [VW-1:0] vec;

  assign v_ready = !s_busy;
  assign m_valid = s_busy;
  assign m_data  = sv[elem];
  assign m_last  = (elem == EW'(NV - 1)) && (vec == VW'(NVEC - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_busy <= 1'b0;
      elem   <= '0;
      vec    <= '0;
      for (int e = 0; e < NV; e++) sv[e] <= '0;
    end else if (clear) begin
      s_busy <= 1'b0;
      elem   <= '0;
      vec    <= '0;
    end else if (!s_busy) begin
      if (v_valid) begin
        sv     <= v_data;
        s_busy <= 1'b1;
        elem   <= '0;
      end
    end else if (m_ready) begin
      if (elem == EW'(NV - 1)) begin
        s_busy <= 1'b0;
        elem   <= '0;
        vec    <= (vec == VW'(NVEC - 1)) ? '0 : vec + 1'b1;
      end else begin
        elem <= elem + 1'b1;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n || clear)
                   m_valid && !m_ready |=> m_valid && $stable(m_data))
    else $error("lstm_accel: result changed before it was taken");

endmodule
