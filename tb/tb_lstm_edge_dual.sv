// tb_lstm_edge_dual: two Split-B processing elements in one edge node,
// running in parallel on two measurement channels.
//
// Builds lstm_edge_top with SPLIT = SPLIT_B (first LSTM layer only, 150
// output values) and N_PE = 2, and drives it over AXI4-Lite only:
// 1. Loads different random weights (70 % zeros) into element 0 (registers
//    at 0x00) and element 1 (registers at 0x20).
// 2. Per round: writes a different 15-sample sequence into each element,
//    starts both, polls both until done, reads CYCLES (must be 265 for each:
//    one clock from START, then the 264-clock Split-B latency of the core)
//    and all 150 values of each, comparing every value and the last flag
//    with lstm_ref_pkg.
// 3. Reads and writes an address that names no element (0x48) and checks it
//    reads 0 and disturbs neither element.
// Mechanisms counted, each must occur: both elements computing in the same
// clock, element 1 used, an address that names no element.
module tb_lstm_edge_dual;
  import lstm_pkg::*;
  import lstm_ref_pkg::*;

  localparam int NROUND = 3;
  localparam int NZ     = N_STEPS * H1;   // 150 values per sequence

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  logic [7:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  logic        arvalid, arready, rvalid, rready;

  lstm_edge_top #(.SPLIT(SPLIT_B), .N_PE(2)) dut (
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
  int n_parallel = 0, n_pe1 = 0, n_unmapped = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.g_pe[0].u_accel.u_lstm1.state != dut.g_pe[0].u_accel.u_lstm1.S_IDLE &&
        dut.g_pe[1].u_accel.u_lstm1.state != dut.g_pe[1].u_accel.u_lstm1.S_IDLE) n_parallel++;
    if (dut.g_pe[1].u_accel.m_valid && dut.g_pe[1].u_accel.m_ready) n_pe1++;
  end

  int w[2][];

  task automatic load(input int pe, input int rows, input int lanes, input int wt[]);
    logic [7:0] base;
    base = 8'(32 * pe);
    for (int r = 0; r < rows; r++)
      for (int l = 0; l < lanes; l++) begin
        axi_write(base + 8'h10, 32'({LAYER_LSTM1, 6'(r), 8'(l)}));
        axi_write(base + 8'h14, 32'(wt[r * lanes + l]) & 32'hFF);
      end
  endtask

  logic [31:0] d;
  int xs[2][];
  int hs[2][];

  initial begin
    rst_n = 0; awvalid = 0; wvalid = 0; arvalid = 0; bready = 1; rready = 1;
    awaddr = 0; araddr = 0; wdata = 0; wstrb = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    for (int p = 0; p < 2; p++) begin
      rand_weights((1 + H1 + 1) * 4 * H1, 70, w[p]);
      load(p, 1 + H1 + 1, 4 * H1, w[p]);
    end

    for (int rnd = 0; rnd < NROUND; rnd++) begin
      for (int p = 0; p < 2; p++) begin
        xs[p] = new[N_STEPS];
        foreach (xs[p][i]) xs[p][i] = int'($urandom_range(255)) - 128;
        lstm_seq(1, H1, N_STEPS, w[p], xs[p], hs[p]);
        foreach (xs[p][i]) axi_write(8'(32 * p) + 8'h08, 32'(xs[p][i]));
      end
      axi_write(8'h00, 32'h1);           // START element 0
      axi_write(8'h20, 32'h1);           // START element 1
      for (int p = 0; p < 2; p++) begin
        do axi_read(8'(32 * p) + 8'h04, d); while (!d[1]);
        axi_read(8'(32 * p) + 8'h18, d);
        check(d == 265, $sformatf("element %0d CYCLES %0d = 265", p, d));
        axi_read(8'(32 * p) + 8'h04, d);
        check(32'(d[31:16]) == NZ, $sformatf("element %0d holds %0d values", p, d[31:16]));
        for (int k = 0; k < NZ; k++) begin
          axi_read(8'(32 * p) + 8'h0C, d);
          check(int'($signed(d[7:0])) == hs[p][k] && d[8] == (k == NZ - 1),
                $sformatf("element %0d value %0d: got %0d last %0b, exp %0d",
                          p, k, $signed(d[7:0]), d[8], hs[p][k]));
        end
      end
      // an address that names no element: read 0, write ignored
      axi_write(8'h48, 32'h1);
      axi_read(8'h48, d);
      n_unmapped++;
      check(d == 0, "unmapped address reads 0");
      for (int p = 0; p < 2; p++) begin
        axi_read(8'(32 * p) + 8'h04, d);
        check(d[0] == 0 && d[31:16] == 0, $sformatf("element %0d idle after unmapped write", p));
      end
    end

    check(n_parallel > 0, "mechanism: both elements computing at once");
    check(n_pe1 > 0,      "mechanism: element 1 produced results");
    check(n_unmapped > 0, "mechanism: unmapped address");
    $display("mechanisms: parallel clocks %0d, element-1 values %0d, unmapped accesses %0d",
             n_parallel, n_pe1, n_unmapped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
