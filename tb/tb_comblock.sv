// tb_comblock: checks the communication block over its AXI4-Lite port, with
// a small accelerator model in place of lstm_accel: the model takes input
// samples (with random s_ready stalls) and, for every 4 samples, returns the
// samples plus one, the 4th marked last.
// Checked: write/read handshakes, WADDR readback, the weight-port strobe with
// its address and data, STATUS flags and FIFO counts, that samples wait in
// the input FIFO until START, the OUT_DATA values and last bit, busy/done,
// the CYCLES latency counter against a count kept here, a second run on the
// samples left over, writes without byte 0 enabled, 64 random weight writes,
// the sticky input overflow flag, and CLEAR.
module tb_comblock;
  import lstm_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  logic [7:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  logic        arvalid, arready, rvalid, rready;
  logic        acc_clear, s_valid, s_ready, m_valid, m_ready, m_last, w_we;
  data_t       s_data, m_data, w_data;
  waddr_t      w_addr;

  comblock dut (
    .clk, .rst_n,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .acc_clear, .s_valid, .s_ready, .s_data, .m_valid, .m_ready, .m_data, .m_last,
    .w_we, .w_addr, .w_data
  );

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // ---------------- AXI4-Lite master ----------------
  logic aw_took, b_took, ar_took, r_took;
  logic [31:0] r_cap;
  always @(posedge clk) begin
    aw_took <= awvalid && awready;
    b_took  <= bvalid && bready;
    ar_took <= arvalid && arready;
    r_took  <= rvalid && rready;
    if (rvalid && rready) r_cap <= rdata;
  end

  logic [3:0] wstrb_mask = 4'hF;

  task automatic axi_write(input logic [7:0] a, input logic [31:0] d);
    awaddr = a; wdata = d; wstrb = wstrb_mask; awvalid = 1; wvalid = 1;
    do @(negedge clk); while (!aw_took);
    awvalid = 0; wvalid = 0;
    while (!b_took) @(negedge clk);
  endtask

  task automatic axi_read(input logic [7:0] a, output logic [31:0] d);
    araddr = a; arvalid = 1;
    do @(negedge clk); while (!ar_took);
    arvalid = 0;
    while (!r_took) @(negedge clk);
    d = r_cap;
  endtask

  // ---------------- accelerator model ----------------
  int   n_in_taken = 0;
  logic stall;
  data_t m_data_r;
  logic  m_last_r;
  always @(negedge clk) stall = ($urandom_range(3) == 0);
  assign s_ready = rst_n && !stall && !m_valid;
  assign m_data  = m_data_r;
  assign m_last  = m_last_r;
  always @(posedge clk) begin
    if (acc_clear) begin
      m_valid <= 0;
    end else if (s_valid && s_ready) begin
      m_valid  <= 1;
      m_data_r <= data_t'(int'(s_data) + 1);
      m_last_r <= (n_in_taken % 4 == 3);
      n_in_taken++;
    end else if (m_valid && m_ready) begin
      m_valid <= 0;
    end
  end

  // weight strobes seen
  int w_seen = 0;
  waddr_t w_addr_seen;
  data_t  w_data_seen;
  always @(posedge clk) if (w_we) begin
    w_seen++; w_addr_seen <= w_addr; w_data_seen <= w_data;
  end

  // latency counted here
  int run_cycles;
  bit running;
  always @(posedge clk) begin
    if (running) run_cycles++;
  end

  logic [31:0] d;
  initial begin
    rst_n = 0; awvalid = 0; wvalid = 0; arvalid = 0; bready = 1; rready = 1;
    awaddr = 0; araddr = 0; wdata = 0; wstrb = 0; m_valid = 0; running = 0; run_cycles = 0;
    m_data_r = 0; m_last_r = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // weight path
    axi_write(8'h10, 32'h0000_8305);   // layer 2, row 3, lane 5
    axi_read (8'h10, d);
    check(d == 32'h0000_8305, "WADDR readback");
    axi_write(8'h14, 32'h0000_00A7);
    @(negedge clk);
    check(w_seen == 1 && w_addr_seen == waddr_t'(16'h8305) && w_data_seen == data_t'(8'hA7),
          "weight strobe address/data");

    // status after reset
    axi_read(8'h04, d);
    check(d[3] == 1 && d[5] == 1 && d[1:0] == 0, "STATUS idle: in/out empty, not busy/done");

    // two groups of 4 samples; nothing moves before START
    for (int i = 0; i < 8; i++) axi_write(8'h08, 32'(10 * i));
    repeat (5) @(negedge clk);
    check(n_in_taken == 0, "samples wait for START");
    axi_read(8'h04, d);
    check(d[15:8] == 8, "STATUS in-FIFO count = 8");
    running = 1; run_cycles = 0;
    axi_write(8'h00, 32'h1);
    // poll until done
    do axi_read(8'h04, d); while (d[1] == 0);
    running = 0;
    check(d[0] == 0, "busy low when done");
    axi_read(8'h18, d);
    // counted from the START write's handshake edge; the poll adds slack
    check(d > 0 && int'(d) <= run_cycles, $sformatf("CYCLES %0d within %0d", d, run_cycles));
    // the run ends at the first last-marked element: 4 results in the FIFO
    axi_read(8'h04, d);
    check(d[31:16] == 4 && n_in_taken == 4, $sformatf("out FIFO holds 4 results (%0d)", d[31:16]));
    for (int i = 0; i < 4; i++) begin
      axi_read(8'h0C, d);
      check(d[7:0] == 8'(10 * i + 1), $sformatf("OUT_DATA %0d = %0d", i, d[7:0]));
      check(d[8] == (i == 3), "last bit");
    end

    // second run: the 4 samples left in the input FIFO
    axi_read(8'h04, d);
    check(d[15:8] == 4 && d[1] == 1, "4 samples left, done still set");
    axi_write(8'h00, 32'h1);
    do axi_read(8'h04, d); while (d[1] == 0);
    check(d[31:16] == 4 && d[3] == 1 && n_in_taken == 8, "second run took the rest");
    for (int i = 4; i < 8; i++) begin
      axi_read(8'h0C, d);
      check(d[7:0] == 8'(10 * i + 1) && d[8] == (i == 7), $sformatf("second run OUT_DATA %0d", i));
    end

    // a write whose byte 0 is not enabled does nothing
    wstrb_mask = 4'hE;
    axi_write(8'h08, 32'h55);
    axi_write(8'h14, 32'h55);
    wstrb_mask = 4'hF;
    axi_read(8'h04, d);
    check(d[3] == 1 && w_seen == 1, "write without byte 0 ignored");

    // many weight writes: every strobe carries the address and data written
    for (int k = 0; k < 64; k++) begin
      logic [15:0] a;
      logic [7:0]  v;
      a = 16'($urandom);
      v = 8'($urandom);
      axi_write(8'h10, {16'($urandom), a});   // upper bits are not part of WADDR
      axi_read(8'h10, d);
      check(d == {16'd0, a}, "WADDR readback (random)");
      axi_write(8'h14, {24'($urandom), v});
      @(negedge clk);
      check(w_seen == k + 2 && w_addr_seen == waddr_t'(a) && w_data_seen == data_t'(v),
            $sformatf("weight strobe %0d", k));
    end

    // overflow: fill the 16-deep input FIFO past full (run stopped)
    axi_write(8'h00, 32'h2);   // CLEAR
    for (int i = 0; i < 17; i++) axi_write(8'h08, 32'(i));
    axi_read(8'h04, d);
    check(d[2] == 1 && d[6] == 1, "in FIFO full and overflow flag");
    axi_write(8'h00, 32'h2);   // CLEAR
    axi_read(8'h04, d);
    check(d[6] == 0 && d[3] == 1 && d[5] == 1 && d[15:8] == 0, "CLEAR empties FIFOs and flag");
    axi_read(8'h0C, d);
    check(d == 0, "OUT_DATA reads 0 when empty");

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
