// tb_sync_fifo: random push/pop traffic on a 9-bit x 16 sync_fifo against a
// queue model: checks dout, count, full and empty every clock, that pushes
// while full and pops while empty are ignored, and that flush empties it.
module tb_sync_fifo;
  localparam int W = 9, D = 16;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, flush, push, pop, full, empty;
  logic [W-1:0] din, dout;
  logic [$clog2(D+1)-1:0] count;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  logic [W-1:0] q[$];
  int checks = 0, failures = 0, n_full = 0, n_empty_pop = 0;

  initial begin
    rst_n = 0; flush = 0; push = 0; pop = 0; din = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      // compare state before this clock's operation
      checks++;
      if (int'(count) != q.size() || full != (q.size() == D) || empty != (q.size() == 0) ||
          (q.size() != 0 && dout != q[0])) begin
        failures++;
        $display("FAIL fifo i=%0d count %0d exp %0d", i, count, q.size());
      end
      if (i == 2000) begin
        flush = 1; push = 0; pop = 0;
        @(negedge clk);
        flush = 0;
        q.delete();
        continue;
      end
      // bias toward filling in the first half, draining in the second
      push = ($urandom_range(99) < ((i / 250) % 2 == 0 ? 80 : 30));
      pop  = ($urandom_range(99) < ((i / 250) % 2 == 0 ? 30 : 80));
      din  = W'($urandom);
      if (push && q.size() == D) n_full++;
      if (pop && q.size() == 0) n_empty_pop++;
      // model update (applies at the coming edge)
      begin
        logic [W-1:0] front;
        bit do_pop, do_push;
        do_pop  = pop && q.size() != 0;
        do_push = push && q.size() != D;
        if (do_pop) front = q.pop_front();
        if (do_push) q.push_back(din);
      end
    end
    checks++;
    if (n_full == 0 || n_empty_pop == 0) begin
      failures++;
      $display("FAIL fifo: full (%0d) or empty-pop (%0d) never exercised", n_full, n_empty_pop);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
