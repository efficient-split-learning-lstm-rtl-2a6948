// lstm_layer: one LSTM layer that processes a sequence one timestep at a time.
//
// For each timestep t the layer takes the input vector x_t (N_IN values) and
// computes, for every unit j,
//   i = sigmoid(Wi x_t + Ui h + bi)      f = sigmoid(Wf x_t + Uf h + bf)
//   g = tanh   (Wg x_t + Ug h + bg)      o = sigmoid(Wo x_t + Uo h + bo)
//   c <= f*c + i*g                       h <= o * tanh(c)
// with the Keras gate order i, f, g(cell), o. These are the standard LSTM
// equations; the paper names the layer type and sizes but not how the
// hardware computes it, so the schedule below is this design's own.
//
// Datapath: 4*N_H multiply-accumulate lanes, one per (gate, unit); lane
// number = gate*N_H + unit. The operand vector z = [x_t, h] is latched when
// the input is accepted, then weight_mem streams one row per clock, row k
// holding every lane's weight for operand z[k] and row N_IN+N_H the biases.
// After the last product the gate activations are registered (one clock), then
// c and h are updated (one clock).
//
// Interface: valid/ready stream in (one vector per timestep) and out. With
// RETURN_SEQ = 1 every timestep's h is sent out; with RETURN_SEQ = 0 only the
// last timestep's h is. After SEQ_LEN timesteps h and c return to zero, ready
// for the next sequence. `clear` does the same at any time and aborts the
// sequence. Weights are written through the w_* port (row, lane, value).
//
// Timing: if x_t is accepted at clock edge n, h_t can be taken at edge
// n+N_IN+N_H+5 and the next x_t at edge n+N_IN+N_H+6 (n+N_IN+N_H+5 when the
// step sends nothing out), plus any clocks out_ready is held low. First
// layer: 17 clocks per step; second layer: 20.
module lstm_layer
  import lstm_pkg::*;
#(
  parameter int N_IN       = 1,
  parameter int N_H        = 10,
  parameter int SEQ_LEN    = 15,
  parameter bit RETURN_SEQ = 1'b1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clear,
  // input stream: x_t
  input  logic       in_valid,
  output logic       in_ready,
  input  data_t      in_data  [N_IN],
  // output stream: h_t
  output logic       out_valid,
  input  logic       out_ready,
  output data_t      out_data [N_H],
  // weight load port
  input  logic       w_we,
  input  logic [5:0] w_row,
  input  logic [7:0] w_lane,
  input  data_t      w_data
);

  localparam int K     = N_IN + N_H;     // operands per lane
  localparam int ROWS  = K + 1;          // + bias row
  localparam int LANES = 4 * N_H;
  localparam int RW    = $clog2(ROWS);
  localparam int TW    = $clog2(SEQ_LEN + 1);

  typedef enum logic [2:0] {S_IDLE, S_MAC, S_LAST, S_ACT, S_UPD, S_OUT} state_e;
  state_e state;

  data_t          z     [K];
  data_t          h     [N_H];
  data_t          c     [N_H];
  acc_t           acc   [LANES];
  data_t          gi    [N_H];
  data_t          gf    [N_H];
  data_t          gg    [N_H];
  data_t          go    [N_H];
  logic [RW-1:0]  step;          // read row counter
  logic           rd_en;
  logic [RW-1:0]  rd_row;
  logic           rd_v_q;        // a row arrives this clock
  logic [RW-1:0]  rd_step_q;     // which step it was issued for
  logic [TW-1:0]  t;             // timestep within the sequence
  data_t          wrow_data [LANES];

  // ------------------------------------------------------------------
  // weight store
  // ------------------------------------------------------------------
  weight_mem #(.ROWS(ROWS), .LANES(LANES)) u_wmem (
    .clk    (clk),
    .we     (w_we),
    .wrow   (w_row),
    .wlane  (w_lane),
    .wdata  (w_data),
    .rd_en  (rd_en),
    .rd_row (6'(rd_row)),
    .rd_data(wrow_data)
  );

  // step 0 reads the bias row, step s >= 1 reads operand row s-1
  assign rd_en    = (state == S_MAC);
  assign rd_row   = (step == '0) ? RW'(K) : RW'(step - 1'b1);
  assign in_ready = (state == S_IDLE);
  assign out_valid = (state == S_OUT);

  // ------------------------------------------------------------------
  // cell update, combinational from registered gates
  // ------------------------------------------------------------------
  data_t c_new [N_H];
  data_t h_new [N_H];
  always_comb begin
    for (int j = 0; j < N_H; j++) begin
      logic signed [31:0] cf;
      logic signed [31:0] hf;
      cf       = 32'(gf[j]) * 32'(c[j]) + 32'(gi[j]) * 32'(gg[j]);
      c_new[j] = sat8(cf >>> FRAC);
      hf       = 32'(go[j]) * 32'(tanh_q(acc_t'(c_new[j]) <<< FRAC));
      h_new[j] = sat8(hf >>> FRAC);
    end
  end

  // ------------------------------------------------------------------
  // multiply-accumulate lanes
  // ------------------------------------------------------------------
  always_ff @(posedge clk) begin
    if (rd_v_q) begin
      for (int l = 0; l < LANES; l++) begin
        if (rd_step_q == '0)
          acc[l] <= acc_t'(wrow_data[l]) <<< FRAC;
        else
          acc[l] <= acc[l] + acc_t'(wrow_data[l]) * acc_t'(z[rd_step_q - 1'b1]);
      end
    end
  end

  // ------------------------------------------------------------------
  // control
  // ------------------------------------------------------------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      step      <= '0;
      rd_v_q    <= 1'b0;
      rd_step_q <= '0;
      t         <= '0;
      for (int j = 0; j < N_H; j++) begin
        h[j] <= '0; c[j] <= '0; out_data[j] <= '0;
        gi[j] <= '0; gf[j] <= '0; gg[j] <= '0; go[j] <= '0;
      end
      for (int k = 0; k < K; k++) z[k] <= '0;
    end else if (clear) begin
      state  <= S_IDLE;
      step   <= '0;
      rd_v_q <= 1'b0;
      t      <= '0;
      for (int j = 0; j < N_H; j++) begin
        h[j] <= '0; c[j] <= '0;
      end
    end else begin
      rd_v_q    <= rd_en;
      rd_step_q <= step;
      case (state)
        S_IDLE: if (in_valid) begin
          for (int k = 0; k < N_IN; k++) z[k] <= in_data[k];
          for (int j = 0; j < N_H; j++)  z[N_IN + j] <= h[j];
          step  <= '0;
          state <= S_MAC;
        end
        S_MAC: begin
          step <= step + 1'b1;
          if (step == RW'(K)) state <= S_LAST;
        end
        S_LAST: state <= S_ACT;          // last row's product lands now
        S_ACT: begin
          for (int j = 0; j < N_H; j++) begin
            gi[j] <= sigmoid_q(acc[j]);
            gf[j] <= sigmoid_q(acc[N_H + j]);
            gg[j] <= tanh_q   (acc[2*N_H + j]);
            go[j] <= sigmoid_q(acc[3*N_H + j]);
          end
          state <= S_UPD;
        end
        S_UPD: begin
          if (t == TW'(SEQ_LEN - 1)) begin
            t <= '0;
            for (int j = 0; j < N_H; j++) begin
              h[j] <= '0; c[j] <= '0;
            end
          end else begin
            t <= t + 1'b1;
            for (int j = 0; j < N_H; j++) begin
              h[j] <= h_new[j]; c[j] <= c_new[j];
            end
          end
          if (RETURN_SEQ || t == TW'(SEQ_LEN - 1)) begin
            for (int j = 0; j < N_H; j++) out_data[j] <= h_new[j];
            state <= S_OUT;
          end else begin
            state <= S_IDLE;
          end
        end
        S_OUT: if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // A result once offered stays offered until it is taken.
  assert property (@(posedge clk) disable iff (!rst_n || clear)
                   out_valid && !out_ready |=> out_valid)
    else $error("lstm_layer: out_valid dropped before out_ready");

endmodule
