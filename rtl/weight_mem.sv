// weight_mem: on-chip weight and bias store of one layer.
//
// The memory holds ROWS rows of LANES 8-bit words. Row k holds, for every
// processing lane of the layer, the weight that multiplies operand k; the last
// row holds the lanes' biases. One row is read per clock, so all lanes of a
// layer get their weight for the same operand in the same cycle.
//
// Write port: one word per clock (we, wrow, wlane, wdata), used to load the
// trained, quantized parameters. Read port: synchronous; rd_data shows row
// rd_row one clock after rd_en. Keeping the parameters in on-chip memory
// follows the paper; making the store writable at run time, instead of fixing
// the trained values at synthesis, is this design's choice, so one bitstream
// can run any trained set. Writes to a row or lane past the end are dropped;
// reading a row past the end leaves rd_data unchanged.
module weight_mem
  import lstm_pkg::*;
#(
  parameter int ROWS  = 12,
  parameter int LANES = 40
) (
  input  logic                      clk,
  // write port
  input  logic                      we,
  input  logic [5:0]                wrow,
  input  logic [7:0]                wlane,
  input  data_t                     wdata,
  // read port
  input  logic                      rd_en,
  input  logic [5:0]                rd_row,
  output data_t                     rd_data [LANES]
);

  localparam int RB = (ROWS  > 1) ? $clog2(ROWS)  : 1;
  localparam int LB = (LANES > 1) ? $clog2(LANES) : 1;

  data_t mem [ROWS][LANES];

  always_ff @(posedge clk) begin
    if (we && 32'(wrow) < ROWS && 32'(wlane) < LANES) mem[RB'(wrow)][LB'(wlane)] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (rd_en && 32'(rd_row) < ROWS) rd_data <= mem[RB'(rd_row)];
  end

endmodule
