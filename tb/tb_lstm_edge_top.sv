// tb_lstm_edge_top: end-to-end test of the edge node at its default build
// (LSTM-DO-S, all four layers), driven the way the soft-core processor
// drives it: over AXI4-Lite only.
//
// 1. Writes all 871 weights and biases (random; 70 % zeros in the LSTM
//    layers as after pruning, fewer in the small FC layers so that the
//    prediction depends on the input) through WADDR/WDATA.
// 2. For each of NSEQ sequences: writes 15 samples to IN_DATA, writes START,
//    polls STATUS until done, reads CYCLES and OUT_DATA, and compares the
//    prediction, and the intermediate vector z passed from the second LSTM
//    to the FC layers, with lstm_ref_pkg. CYCLES must be 341: one clock from START
//    to the first sample entering the core, then the 340-clock sequence
//    latency of the core.
// 3. Aborts one run half way with CLEAR and checks that the next run is
//    still exact (recurrent state and FIFOs were cleared).
// 4. Overflows the input FIFO once and checks the sticky flag.
// Mechanisms counted, each must occur: START, CLEAR abort, busy polls,
// input stalls (sample waiting while the core is busy), both LSTM layers
// working at once, input overflow.
module tb_lstm_edge_top;
  import lstm_pkg::*;
  import lstm_ref_pkg::*;

  localparam int NSEQ = 6;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  logic [7:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  logic        arvalid, arready, rvalid, rready;

  lstm_edge_top dut (
    .clk, .rst_n,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready)
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

  task automatic axi_write(input logic [7:0] a, input logic [31:0] d);
    awaddr = a; wdata = d; wstrb = 4'hF; awvalid = 1; wvalid = 1;
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

  // ---------------- mechanism counters ----------------
  int n_start = 0, n_clear = 0, n_busy_polls = 0, n_stall = 0, n_overlap = 0, n_ovf = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.g_pe[0].u_accel.s_valid && !dut.g_pe[0].u_accel.s_ready) n_stall++;
    if (dut.g_pe[0].u_accel.u_lstm1.state != dut.g_pe[0].u_accel.u_lstm1.S_IDLE &&
        dut.g_pe[0].u_accel.g_lstm2.u_lstm2.state != dut.g_pe[0].u_accel.g_lstm2.u_lstm2.S_IDLE) n_overlap++;
  end

  int w1[], w2[], w3[], w4[];

  // the intermediate vector handed from the second LSTM to the FC layers,
  // captured inside the core so it can be checked as well
  int z_got[H2];
  always @(posedge clk)
    if (dut.g_pe[0].u_accel.g_lstm2.u_lstm2.out_valid && dut.g_pe[0].u_accel.g_lstm2.u_lstm2.out_ready)
      for (int j = 0; j < H2; j++) z_got[j] = int'(dut.g_pe[0].u_accel.g_lstm2.u_lstm2.out_data[j]);

  task automatic load(input logic [1:0] layer, input int rows, input int lanes, input int w[]);
    for (int r = 0; r < rows; r++)
      for (int l = 0; l < lanes; l++) begin
        axi_write(8'h10, 32'({layer, 6'(r), 8'(l)}));
        axi_write(8'h14, 32'(w[r * lanes + l]) & 32'hFF);
      end
  endtask

  int z_exp[];   // expected intermediate vector (second LSTM's last h)

  function automatic int predict(input int xs[]);
    int h1s[], h2s[], v[], y1[], y2[];
    lstm_seq(1, H1, N_STEPS, w1, xs, h1s);
    lstm_seq(H1, H2, N_STEPS, w2, h1s, h2s);
    v = new[H2];
    foreach (v[j]) v[j] = h2s[(N_STEPS - 1) * H2 + j];
    z_exp = v;
    dense(H2, D1, 1'b1, w3, v, y1);
    dense(D1, D2, 1'b0, w4, y1, y2);
    return y2[0];
  endfunction

  logic [31:0] d;
  int xs[];
  int e;
  int n_params;

  initial begin
    rst_n = 0; awvalid = 0; wvalid = 0; arvalid = 0; bready = 1; rready = 1;
    awaddr = 0; araddr = 0; wdata = 0; wstrb = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    rand_weights((1 + H1 + 1) * 4 * H1, 70, w1);
    rand_weights((H1 + H2 + 1) * 4 * H2, 70, w2);
    rand_weights((H2 + 1) * D1, 40, w3);     // the small FC layers are pruned less,
    rand_weights((D1 + 1) * D2, 0, w4);      // so the prediction depends on the input
    n_params = w1.size() + w2.size() + w3.size() + w4.size();
    check(n_params == 871, $sformatf("parameter count %0d = 871", n_params));
    load(LAYER_LSTM1, 1 + H1 + 1, 4 * H1, w1);
    load(LAYER_LSTM2, H1 + H2 + 1, 4 * H2, w2);
    load(LAYER_FC1, H2 + 1, D1, w3);
    load(LAYER_FC2, D1 + 1, D2, w4);

    for (int s = 0; s < NSEQ; s++) begin
      xs = new[N_STEPS];
      // alternate low and high input levels so the predictions differ
      foreach (xs[i]) xs[i] = (s % 2 == 0) ? int'($urandom_range(40)) - 128
                                           : int'($urandom_range(40)) + 80;
      e = predict(xs);
      foreach (xs[i]) axi_write(8'h08, 32'(xs[i]));
      axi_write(8'h00, 32'h1);
      n_start++;
      if (s == 1) begin
        // abort half way, then run the same sequence again
        repeat (150) @(negedge clk);
        axi_write(8'h00, 32'h2);
        n_clear++;
        axi_read(8'h04, d);
        check(d[1:0] == 2'b00 && d[3] && d[5], "CLEAR stops the run and empties FIFOs");
        foreach (xs[i]) axi_write(8'h08, 32'(xs[i]));
        axi_write(8'h00, 32'h1);
        n_start++;
      end
      do begin
        axi_read(8'h04, d);
        if (d[0]) n_busy_polls++;
      end while (!d[1]);
      axi_read(8'h18, d);
      check(d == 341, $sformatf("CYCLES %0d = 341", d));
      axi_read(8'h04, d);
      check(d[31:16] == 1, "one result in the output FIFO");
      axi_read(8'h0C, d);
      check(d[8] == 1 && int'($signed(d[7:0])) == e,
            $sformatf("prediction %0d (last %0b) exp %0d", $signed(d[7:0]), d[8], e));
      for (int j = 0; j < H2; j++)
        check(z_got[j] == z_exp[j], $sformatf("intermediate z[%0d] %0d exp %0d", j, z_got[j], z_exp[j]));
      $display("sequence %0d: z = %0d %0d %0d %0d %0d, prediction %0d (units of 1/32)",
               s, z_exp[0], z_exp[1], z_exp[2], z_exp[3], z_exp[4], e);
    end

    // input overflow
    for (int i = 0; i < 17; i++) axi_write(8'h08, 32'(i));
    axi_read(8'h04, d);
    if (d[6]) n_ovf++;
    check(d[6] && d[2], "input overflow flagged");
    axi_write(8'h00, 32'h2);
    n_clear++;

    check(n_start > 0,      "mechanism: START");
    check(n_clear > 0,      "mechanism: CLEAR");
    check(n_busy_polls > 0, "mechanism: busy polling");
    check(n_stall > 0,      "mechanism: input stall while the core is busy");
    check(n_overlap > 0,    "mechanism: both LSTM layers working at once");
    check(n_ovf > 0,        "mechanism: input overflow");
    $display("mechanisms: start %0d clear %0d busy-polls %0d stalls %0d overlap %0d overflow %0d",
             n_start, n_clear, n_busy_polls, n_stall, n_overlap, n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
