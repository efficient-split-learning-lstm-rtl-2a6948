// tb_lstm_accel: runs the three builds of the accelerator side by side
// (LSTM-DO-S, Split-A, Split-B) and checks results, last flags and the
// sequence latency of each (see accel_harness). Expected latencies follow
// from the per-layer timings: layer 1 takes x_t at clock 17t and its h_t is
// ready 16 clocks later; layer 2 takes h_t at 16+20t; the dense layers add
// 9 and 14 clocks; the serialiser adds one clock per element.
//   Split-B   : 16 + 17*14 + 10          = 264
//   Split-A   : 16 + 20*14 + 20 + 5      = 321
//   LSTM-DO-S : 16 + 20*14 + 20 + 9 + 14 + 1 = 340
module tb_lstm_accel;
  import lstm_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  int c[3], f[3], lat[3];
  bit d[3];

  accel_harness #(.SPLIT(SPLIT_FULL), .EXP_LAT(340)) hf (.clk, .checks(c[0]), .failures(f[0]), .finished(d[0]), .latency(lat[0]));
  accel_harness #(.SPLIT(SPLIT_A),    .EXP_LAT(321)) ha (.clk, .checks(c[1]), .failures(f[1]), .finished(d[1]), .latency(lat[1]));
  accel_harness #(.SPLIT(SPLIT_B),    .EXP_LAT(264)) hb (.clk, .checks(c[2]), .failures(f[2]), .finished(d[2]), .latency(lat[2]));

  initial begin
    fork
      begin
        wait (d[0] && d[1] && d[2]);
        $display("latency clocks: LSTM-DO-S %0d, Split-A %0d, Split-B %0d", lat[0], lat[1], lat[2]);
        $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2], f[0] + f[1] + f[2]);
      end
      begin
        repeat (100000) @(posedge clk);
        $display("FAIL watchdog");
        $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2], f[0] + f[1] + f[2] + 1);
      end
    join_any
    $finish;
  end
endmodule
