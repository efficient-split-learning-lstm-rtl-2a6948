// tb_lstm_layer: checks lstm_layer in both configurations of the student
// network: the first layer (1 input, 10 units, whole sequence out) and the
// second (10 inputs, 5 units, last step out). Each runs in its own harness;
// see lstm_layer_harness for what is checked.
module tb_lstm_layer;
  logic clk = 0;
  always #5 clk = ~clk;

  int c1, f1, c2, f2;
  bit d1, d2;

  lstm_layer_harness #(.N_IN(1),  .N_H(10), .SEQ_LEN(15), .RETURN_SEQ(1'b1)) h1 (
    .clk, .checks(c1), .failures(f1), .finished(d1));
  lstm_layer_harness #(.N_IN(10), .N_H(5),  .SEQ_LEN(15), .RETURN_SEQ(1'b0)) h2 (
    .clk, .checks(c2), .failures(f2), .finished(d2));

  initial begin
    fork
      begin
        wait (d1 && d2);
        $display("TB_RESULT checks=%0d failures=%0d", c1 + c2, f1 + f2);
      end
      begin
        repeat (200000) @(posedge clk);
        $display("FAIL watchdog");
        $display("TB_RESULT checks=%0d failures=%0d", c1 + c2, f1 + f2 + 1);
      end
    join_any
    $finish;
  end
endmodule
