// tb_weight_mem: fills a 12 x 40 weight_mem with random bytes through the
// write port, reads every row back and compares all lanes one clock after
// the read request. Also checks that writes past the last row or lane are
// dropped (they must not alias onto stored words) and that rd_data holds
// when rd_en is low.
module tb_weight_mem;
  import lstm_pkg::*;

  localparam int ROWS = 12, LANES = 40;

  logic       clk = 0;
  always #5 clk = ~clk;

  logic       we, rd_en;
  logic [5:0] wrow, rd_row;
  logic [7:0] wlane;
  data_t      wdata;
  data_t      rd_data [LANES];

  weight_mem #(.ROWS(ROWS), .LANES(LANES)) dut (.*);

  int model [ROWS][LANES];
  int checks = 0, failures = 0;

  task automatic check_row(input int r);
    @(negedge clk);
    rd_en = 1; rd_row = 6'(r);
    @(negedge clk);
    rd_en = 0;
    for (int l = 0; l < LANES; l++) begin
      checks++;
      if (int'(rd_data[l]) != model[r][l]) begin
        failures++;
        $display("FAIL row %0d lane %0d got %0d exp %0d", r, l, rd_data[l], model[r][l]);
      end
    end
  endtask

  initial begin
    we = 0; rd_en = 0; wrow = 0; rd_row = 0; wlane = 0; wdata = 0;
    for (int r = 0; r < ROWS; r++)
      for (int l = 0; l < LANES; l++) begin
        @(negedge clk);
        model[r][l] = int'($urandom_range(255)) - 128;
        we = 1; wrow = 6'(r); wlane = 8'(l); wdata = data_t'(model[r][l]);
      end
    // out-of-range writes: row 12..15 and lanes 40..63 alias onto low
    // addresses if the range check is missing
    for (int r = ROWS; r < 16; r++) begin
      @(negedge clk); we = 1; wrow = 6'(r); wlane = 8'(r); wdata = data_t'(8'h55);
    end
    for (int l = LANES; l < 64; l++) begin
      @(negedge clk); we = 1; wrow = 6'(l % ROWS); wlane = 8'(l); wdata = data_t'(8'h55);
    end
    @(negedge clk); we = 0;
    for (int r = 0; r < ROWS; r++) check_row(r);
    // rd_data holds while rd_en is low
    check_row(3);
    rd_row = 6'(7);
    repeat (3) @(negedge clk);
    for (int l = 0; l < LANES; l++) begin
      checks++;
      if (int'(rd_data[l]) != model[3][l]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
