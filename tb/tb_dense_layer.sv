// tb_dense_layer: checks dense_layer in both FC configurations of the student
// network: 5 -> 10 with ReLU and 10 -> 1 without activation.
module tb_dense_layer;
  logic clk = 0;
  always #5 clk = ~clk;

  int c1, f1, c2, f2;
  bit d1, d2;

  dense_layer_harness #(.N_IN(5),  .N_OUT(10), .RELU(1'b1)) h1 (.clk, .checks(c1), .failures(f1), .finished(d1));
  dense_layer_harness #(.N_IN(10), .N_OUT(1),  .RELU(1'b0)) h2 (.clk, .checks(c2), .failures(f2), .finished(d2));

  initial begin
    fork
      begin
        wait (d1 && d2);
        $display("TB_RESULT checks=%0d failures=%0d", c1 + c2, f1 + f2);
      end
      begin
        repeat (100000) @(posedge clk);
        $display("FAIL watchdog");
        $display("TB_RESULT checks=%0d failures=%0d", c1 + c2, f1 + f2 + 1);
      end
    join_any
    $finish;
  end
endmodule
