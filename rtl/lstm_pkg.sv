// lstm_pkg: number formats, network sizes and fixed-point helpers shared by the
// LSTM accelerator and its communication block.
//
// Every stored value (input sample, weight, bias, gate, hidden state h, cell
// state c, dense output) is an 8-bit signed fixed-point number with 5
// fraction bits (range -4 .. +3.96875, step 1/32). The 8-bit width follows the
// 8-bit post-quantization of the student network; the split into 3 integer
// and 5 fraction bits is this design's choice. Products and sums are kept in a
// 24-bit accumulator with 10 fraction bits. Narrowing back to 8 bits truncates
// toward minus infinity and saturates.
//
// The LSTM gate nonlinearities are the piecewise-linear "PLAN" sigmoid
// (segments at |x| = 1, 2.375 and 5, slopes 1/4, 1/8, 1/32) and
// tanh(x) = 2*sigmoid(2x) - 1 built from it. Both functions below return the
// exact floor of 32 * f(x), so they can be checked against a real-valued model.
//
// Network sizes (LSTM-DO-S student network): 15 input steps of one feature,
// LSTM of 10 units returning the whole sequence, LSTM of 5 units returning its
// last state, dense layer of 10 units, dense layer of 1 unit: 871 parameters.
package lstm_pkg;

  localparam int DW       = 8;   // data / weight width
  localparam int FRAC     = 5;   // fraction bits of data_t
  localparam int AW       = 24;  // accumulator width
  localparam int AFRAC    = 2 * FRAC;

  typedef logic signed [DW-1:0] data_t;
  typedef logic signed [AW-1:0] acc_t;

  // Student network shape
  localparam int N_STEPS  = 15;  // input size: last 15 dissolved-oxygen samples
  localparam int N_FEAT   = 1;   // one feature per step
  localparam int H1       = 10;  // units of the first LSTM layer
  localparam int H2       = 5;   // units of the second LSTM layer
  localparam int D1       = 10;  // units of the first dense layer
  localparam int D2       = 1;   // units of the output dense layer

  // Where the network is cut between the FPGA and the server.
  typedef enum logic [1:0] {
    SPLIT_FULL = 2'd0,  // LSTM-DO-S: all four layers on the FPGA, 1 output
    SPLIT_A    = 2'd1,  // two stacked LSTM layers, 5 outputs
    SPLIT_B    = 2'd2   // first LSTM layer only, 15 x 10 = 150 outputs
  } split_e;

  // Layer numbers used in the weight-load address
  localparam logic [1:0] LAYER_LSTM1 = 2'd0;
  localparam logic [1:0] LAYER_LSTM2 = 2'd1;
  localparam logic [1:0] LAYER_FC1   = 2'd2;
  localparam logic [1:0] LAYER_FC2   = 2'd3;

  // Weight-load address: {layer[1:0], row[5:0], lane[7:0]}
  typedef struct packed {
    logic [1:0] layer;
    logic [5:0] row;
    logic [7:0] lane;
  } waddr_t;

  // Number of outputs the accelerator produces for one input sequence.
  function automatic int unsigned n_outputs(split_e split);
    case (split)
      SPLIT_B: return N_STEPS * H1;
      SPLIT_A: return H2;
      default: return D2;
    endcase
  endfunction

  // Saturate a wide value to data_t.
  function automatic data_t sat8(input logic signed [31:0] v);
    if (v > 32'sd127)       return data_t'(8'sd127);
    else if (v < -32'sd128) return data_t'(-8'sd128);
    else                    return data_t'(v[DW-1:0]);
  endfunction

  // 32768 * plan_sigmoid(a / 1024) for a >= 0 (a has 10 fraction bits).
  // Exact: no bits are dropped.
  function automatic logic [31:0] plan_pos_q15(input logic [31:0] a);
    if (a >= 32'd5120)      return 32'd32768;                  // |x| >= 5
    else if (a >= 32'd2432) return a + 32'd27648;              // x/32 + 0.84375
    else if (a >= 32'd1024) return (a << 2) + 32'd20480;       // x/8  + 0.625
    else                    return (a << 3) + 32'd16384;       // x/4  + 0.5
  endfunction

  // floor(32 * sigmoid(x)), x = acc / 1024
  function automatic data_t sigmoid_q(input acc_t x);
    logic [31:0] a, p;
    logic signed [31:0] x32;
    x32 = 32'(x);
    a   = (x32 < 0) ? 32'(-x32) : 32'(x32);
    p   = plan_pos_q15(a);
    if (x32 < 0) p = 32'd32768 - p;
    return data_t'(p >> 10);
  endfunction

  // floor(32 * tanh(x)), tanh(x) = 2*sigmoid(2x) - 1, x = acc / 1024
  function automatic data_t tanh_q(input acc_t x);
    logic [31:0] a;
    logic signed [31:0] x32, t;
    x32 = 32'(x);
    a   = (x32 < 0) ? 32'(-x32) : 32'(x32);
    t   = $signed(plan_pos_q15(a << 1) << 1) - 32'sd32768;
    if (x32 < 0) t = -t;
    return data_t'(t >>> 10);
  endfunction

endpackage
