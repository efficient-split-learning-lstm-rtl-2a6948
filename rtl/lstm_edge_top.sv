// lstm_edge_top: FPGA part of the split-inference edge node.
//
// The design runs the edge half of a split LSTM network that forecasts the
// next dissolved-oxygen reading of a river from the last 15 daily readings.
// A soft-core processor (outside this module) writes the trained weights and
// an input sequence over AXI4-Lite, starts the run and reads back the
// intermediate representation z (or the full prediction when the network is
// not split), which it then sends to the server that runs the rest.
//
// Contents: N_PE processing elements, each a comblock (AXI4-Lite registers
// and FIFOs) feeding its own lstm_accel (the LSTM layers chosen by SPLIT).
// The paper counts how many such elements fit on its FPGA: one for the whole
// student network and for Split-A, two for Split-B, which then run in
// parallel on different measurement channels. N_PE = 1 (default) is the
// single-element build; with N_PE > 1 address bits 7:5 pick the element
// (element p's registers start at byte 32*p) and the elements run
// independently. Addresses whose bits 7:5 name no element go to element 0,
// which ignores them (reads return 0). The routing allows one outstanding
// write and one outstanding read, like each comblock.
//
// The processor, its program memory, the UART and the vendor reset and
// interconnect cores are not part of this module; the processor connects to
// the s_axi_* port. Write and read responses are always OKAY, so bresp and
// rresp are constant outputs.
//
// Parameters: SPLIT selects LSTM-DO-S (SPLIT_FULL, default), Split-A or
// Split-B; N_PE the number of elements (1..8); IN_DEPTH / OUT_DEPTH size the
// comblock FIFOs.
// Timing: 80 MHz target clock; see lstm_accel for per-step latencies. The
// routing adds no clock.
module lstm_edge_top
  import lstm_pkg::*;
#(
  parameter split_e SPLIT     = SPLIT_FULL,
  parameter int     N_PE      = 1,
  parameter int     IN_DEPTH  = 16,
  parameter int     OUT_DEPTH = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  s_axi_awaddr,
  input  logic        s_axi_awvalid,
  output logic        s_axi_awready,
  input  logic [31:0] s_axi_wdata,
  input  logic [3:0]  s_axi_wstrb,
  input  logic        s_axi_wvalid,
  output logic        s_axi_wready,
  output logic [1:0]  s_axi_bresp,
  output logic        s_axi_bvalid,
  input  logic        s_axi_bready,
  input  logic [7:0]  s_axi_araddr,
  input  logic        s_axi_arvalid,
  output logic        s_axi_arready,
  output logic [31:0] s_axi_rdata,
  output logic [1:0]  s_axi_rresp,
  output logic        s_axi_rvalid,
  input  logic        s_axi_rready
);

  // ------------------------------------------------------------------
  // AXI4-Lite routing to the processing elements
  // ------------------------------------------------------------------
  logic [N_PE-1:0] awready_p, wready_p, bvalid_p, arready_p, rvalid_p;
  logic [31:0]     rdata_p [N_PE];
  logic [1:0]      bresp_p [N_PE];
  logic [1:0]      rresp_p [N_PE];
  logic            any_b, any_r;
  logic [2:0]      wsel, rsel;
  logic [7:0]      awaddr_p, araddr_p;

  // element number from address bits 7:5; none -> element 0, full address
  always_comb begin
    wsel     = s_axi_awaddr[7:5];
    awaddr_p = {3'b000, s_axi_awaddr[4:0]};
    if (32'(wsel) >= N_PE) begin
      wsel     = 3'd0;
      awaddr_p = s_axi_awaddr;
    end
    rsel     = s_axi_araddr[7:5];
    araddr_p = {3'b000, s_axi_araddr[4:0]};
    if (32'(rsel) >= N_PE) begin
      rsel     = 3'd0;
      araddr_p = s_axi_araddr;
    end
  end

  assign any_b         = |bvalid_p;
  assign any_r         = |rvalid_p;
  assign s_axi_awready = |awready_p;
  assign s_axi_wready  = |wready_p;
  assign s_axi_bvalid  = any_b;
  assign s_axi_arready = &arready_p;   // no element holds read data
  assign s_axi_rvalid  = any_r;

  // responses: at most one element holds one of each kind
  always_comb begin
    s_axi_rdata = '0;
    s_axi_rresp = '0;
    s_axi_bresp = '0;
    for (int p = 0; p < N_PE; p++) begin
      if (rvalid_p[p]) s_axi_rdata = s_axi_rdata | rdata_p[p];
      if (rvalid_p[p]) s_axi_rresp = s_axi_rresp | rresp_p[p];
      if (bvalid_p[p]) s_axi_bresp = s_axi_bresp | bresp_p[p];
    end
  end

  for (genvar p = 0; p < N_PE; p++) begin : g_pe
    logic   acc_clear;
    logic   s_valid, s_ready, m_valid, m_ready, m_last;
    data_t  s_data, m_data, w_data;
    logic   w_we;
    waddr_t w_addr;
    logic   aw_sel, ar_sel;

    // a new request goes only to the chosen element, and only when no
    // response of any element is still waiting
    assign aw_sel = (32'(wsel) == p) && !any_b;
    assign ar_sel = (32'(rsel) == p) && !any_r;

    comblock #(.ADDR_W(8), .IN_DEPTH(IN_DEPTH), .OUT_DEPTH(OUT_DEPTH)) u_comblock (
      .clk, .rst_n,
      .s_axi_awaddr(awaddr_p), .s_axi_awvalid(s_axi_awvalid && aw_sel),
      .s_axi_awready(awready_p[p]),
      .s_axi_wdata, .s_axi_wstrb, .s_axi_wvalid(s_axi_wvalid && aw_sel),
      .s_axi_wready(wready_p[p]),
      .s_axi_bresp(bresp_p[p]), .s_axi_bvalid(bvalid_p[p]), .s_axi_bready,
      .s_axi_araddr(araddr_p), .s_axi_arvalid(s_axi_arvalid && ar_sel),
      .s_axi_arready(arready_p[p]),
      .s_axi_rdata(rdata_p[p]), .s_axi_rresp(rresp_p[p]), .s_axi_rvalid(rvalid_p[p]),
      .s_axi_rready,
      .acc_clear,
      .s_valid, .s_ready, .s_data,
      .m_valid, .m_ready, .m_data, .m_last,
      .w_we, .w_addr, .w_data
    );

    lstm_accel #(.SPLIT(SPLIT)) u_accel (
      .clk, .rst_n, .clear(acc_clear),
      .s_valid, .s_ready, .s_data,
      .m_valid, .m_ready, .m_data, .m_last,
      .w_we, .w_addr, .w_data
    );
  end

  initial assert (N_PE >= 1 && N_PE <= 8) else $error("lstm_edge_top: N_PE must be 1..8");

endmodule
