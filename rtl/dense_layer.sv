// dense_layer: fully connected (FC) layer, y = act(W x + b).
//
// N_OUT multiply-accumulate lanes, one per output unit. When an input vector
// is accepted it is latched; weight_mem then streams the bias row and one
// weight row per input (row k holds every output's weight for x[k]), one row
// per clock. The accumulator is narrowed to 8 bits (truncate, saturate) and,
// with RELU = 1, negative results are set to zero.
//
// The student network ends in two FC layers (10 units, then 1 unit); the
// paper does not give their activations. This design uses ReLU on the hidden
// FC layer and none on the output layer, the usual choice for a regression
// head.
//
// Interface: valid/ready vector stream in and out; w_* writes one weight.
// Timing: if x is accepted at clock edge n, y can be taken at edge n+N_IN+4
// and the next x at n+N_IN+5, plus any clocks out_ready is held low.
module dense_layer
  import lstm_pkg::*;
#(
  parameter int N_IN  = 5,
  parameter int N_OUT = 10,
  parameter bit RELU  = 1'b1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clear,
  input  logic       in_valid,
  output logic       in_ready,
  input  data_t      in_data  [N_IN],
  output logic       out_valid,
  input  logic       out_ready,
  output data_t      out_data [N_OUT],
  input  logic       w_we,
  input  logic [5:0] w_row,
  input  logic [7:0] w_lane,
  input  data_t      w_data
);

  localparam int ROWS = N_IN + 1;
  localparam int RW   = $clog2(ROWS);

  typedef enum logic [2:0] {S_IDLE, S_MAC, S_LAST, S_ACT, S_OUT} state_e;
  state_e state;

  data_t         x    [N_IN];
  acc_t          acc  [N_OUT];
  logic [RW-1:0] step;
  logic          rd_en;
  logic [RW-1:0] rd_row;
  logic          rd_v_q;
  logic [RW-1:0] rd_step_q;
  data_t         wrow_data [N_OUT];

  weight_mem #(.ROWS(ROWS), .LANES(N_OUT)) u_wmem (
    .clk    (clk),
    .we     (w_we),
    .wrow   (w_row),
    .wlane  (w_lane),
    .wdata  (w_data),
    .rd_en  (rd_en),
    .rd_row (6'(rd_row)),
    .rd_data(wrow_data)
  );

  assign rd_en     = (state == S_MAC);
  assign rd_row    = (step == '0) ? RW'(N_IN) : RW'(step - 1'b1);
  assign in_ready  = (state == S_IDLE);
  assign out_valid = (state == S_OUT);

  always_ff @(posedge clk) begin
    if (rd_v_q) begin
      for (int l = 0; l < N_OUT; l++) begin
        if (rd_step_q == '0)
          acc[l] <= acc_t'(wrow_data[l]) <<< FRAC;
        else
          acc[l] <= acc[l] + acc_t'(wrow_data[l]) * acc_t'(x[rd_step_q - 1'b1]);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      step      <= '0;
      rd_v_q    <= 1'b0;
      rd_step_q <= '0;
      for (int k = 0; k < N_IN; k++)  x[k] <= '0;
      for (int l = 0; l < N_OUT; l++) out_data[l] <= '0;
    end else if (clear) begin
      state  <= S_IDLE;
      step   <= '0;
      rd_v_q <= 1'b0;
    end else begin
      rd_v_q    <= rd_en;
      rd_step_q <= step;
      case (state)
        S_IDLE: if (in_valid) begin
          for (int k = 0; k < N_IN; k++) x[k] <= in_data[k];
          step  <= '0;
          state <= S_MAC;
        end
        S_MAC: begin
          step <= step + 1'b1;
          if (step == RW'(N_IN)) state <= S_LAST;
        end
        S_LAST: state <= S_ACT;
        S_ACT: begin
          for (int l = 0; l < N_OUT; l++) begin
            data_t y;
            y = sat8(32'(acc[l] >>> FRAC));
            out_data[l] <= (RELU && y < 0) ? data_t'(0) : y;
          end
          state <= S_OUT;
        end
        S_OUT: if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n || clear)
                   out_valid && !out_ready |=> out_valid)
    else $error("dense_layer: out_valid dropped before out_ready");

endmodule
