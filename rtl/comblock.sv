// comblock: communication block between the soft-core processor and the LSTM
// accelerator.
//
// The processor side is an AXI4-Lite slave (32-bit data, one outstanding
// transaction per direction, OKAY responses). The accelerator side is a
// sample stream out (s_*), a result stream in (m_*), a weight write port and
// a clear strobe. Input samples and results pass through FIFOs, so the
// processor can write a whole input sequence before starting, and read the
// results after the accelerator has finished.
//
// Register map (byte offsets):
//   0x00 CTRL     W  bit0 START: let the input FIFO drain into the accelerator
//                    bit1 CLEAR: empty both FIFOs, clear the accelerator state
//   0x04 STATUS   R  bit0 busy, bit1 done, bit2 in FIFO full, bit3 in FIFO
//                    empty, bit4 out FIFO full, bit5 out FIFO empty,
//                    bit6 input overflow (write to a full FIFO, sticky until
//                    CLEAR), bits 15:8 words in the in FIFO, bits 31:16
//                    words in the out FIFO
//   0x08 IN_DATA  W  bits 7:0 pushed into the input FIFO
//   0x0C OUT_DATA R  pops the output FIFO: bits 7:0 value (two's complement),
//                    bit 8 = last element of a result; reads 0 when empty
//   0x10 WADDR    RW bits 15:0 weight address {layer, row, lane}
//   0x14 WDATA    W  bits 7:0 written to the weight at WADDR
//   0x18 CYCLES   R  clocks from START until the last result entered the
//                    output FIFO (the accelerator latency)
//
// A run: START sets busy; it ends (busy low, done high) when the element
// marked last enters the output FIFO. The paper describes this block only as
// the link that carries control, data, the input stream and the output stream
// (its name is ComBlock); the register map, FIFO depths and the cycle counter
// are this design's choices.
//
// Outputs that carry no state of their own: bresp and rresp are always OKAY
// (every address can be accessed), and w_data is the low byte of the AXI write
// data passed straight through, qualified by the w_we strobe.
module comblock
  import lstm_pkg::*;
#(
  parameter int ADDR_W   = 8,
  parameter int IN_DEPTH = 16,   // holds one 15-sample sequence
  parameter int OUT_DEPTH = 256  // holds the 150 values of the largest split
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave
  input  logic [ADDR_W-1:0] s_axi_awaddr,
  input  logic              s_axi_awvalid,
  output logic              s_axi_awready,
  input  logic [31:0]       s_axi_wdata,
  input  logic [3:0]        s_axi_wstrb,
  input  logic              s_axi_wvalid,
  output logic              s_axi_wready,
  output logic [1:0]        s_axi_bresp,
  output logic              s_axi_bvalid,
  input  logic              s_axi_bready,
  input  logic [ADDR_W-1:0] s_axi_araddr,
  input  logic              s_axi_arvalid,
  output logic              s_axi_arready,
  output logic [31:0]       s_axi_rdata,
  output logic [1:0]        s_axi_rresp,
  output logic              s_axi_rvalid,
  input  logic              s_axi_rready,
  // accelerator side
  output logic              acc_clear,
  output logic              s_valid,
  input  logic              s_ready,
  output data_t             s_data,
  input  logic              m_valid,
  output logic              m_ready,
  input  data_t             m_data,
  input  logic              m_last,
  output logic              w_we,
  output waddr_t            w_addr,
  output data_t             w_data
);

  localparam logic [ADDR_W-1:0] A_CTRL   = ADDR_W'(8'h00);
  localparam logic [ADDR_W-1:0] A_STATUS = ADDR_W'(8'h04);
  localparam logic [ADDR_W-1:0] A_IN     = ADDR_W'(8'h08);
  localparam logic [ADDR_W-1:0] A_OUT    = ADDR_W'(8'h0C);
  localparam logic [ADDR_W-1:0] A_WADDR  = ADDR_W'(8'h10);
  localparam logic [ADDR_W-1:0] A_WDATA  = ADDR_W'(8'h14);
  localparam logic [ADDR_W-1:0] A_CYCLES = ADDR_W'(8'h18);

  localparam int OCW = $clog2(OUT_DEPTH + 1);
  localparam int ICW = $clog2(IN_DEPTH + 1);

  // ------------------------------------------------------------------
  // AXI4-Lite write channel
  // ------------------------------------------------------------------
  logic wr_fire;
  assign s_axi_awready = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid;
  assign s_axi_wready  = s_axi_awready;
  assign wr_fire       = s_axi_awready;
  assign s_axi_bresp   = 2'b00;

  logic [ADDR_W-1:0] wa;
  assign wa = {s_axi_awaddr[ADDR_W-1:2], 2'b00};

  // ------------------------------------------------------------------
  // AXI4-Lite read channel
  // ------------------------------------------------------------------
  logic rd_fire;
  logic [ADDR_W-1:0] ra;
  assign s_axi_arready = !s_axi_rvalid;
  assign rd_fire       = s_axi_arvalid && s_axi_arready;
  assign s_axi_rresp   = 2'b00;
  assign ra = {s_axi_araddr[ADDR_W-1:2], 2'b00};

  // ------------------------------------------------------------------
  // FIFOs
  // ------------------------------------------------------------------
  logic           start, clear;
  logic           run, busy, done, ovf;
  logic [31:0]    cycles;
  logic [7:0]     in_dout;
  logic           in_full, in_empty;
  logic [ICW-1:0] in_count;
  logic [8:0]     out_dout;
  logic           out_full, out_empty;
  logic [OCW-1:0] out_count;
  logic           in_push, out_pop;

  assign start   = wr_fire && wa == A_CTRL && s_axi_wstrb[0] && s_axi_wdata[0];
  assign clear   = wr_fire && wa == A_CTRL && s_axi_wstrb[0] && s_axi_wdata[1];
  assign in_push = wr_fire && wa == A_IN && s_axi_wstrb[0];
  assign out_pop = rd_fire && ra == A_OUT;

  sync_fifo #(.WIDTH(8), .DEPTH(IN_DEPTH)) u_in_fifo (
    .clk, .rst_n, .flush(clear),
    .push(in_push), .din(s_axi_wdata[7:0]),
    .pop(s_valid && s_ready), .dout(in_dout),
    .full(in_full), .empty(in_empty), .count(in_count)
  );

  sync_fifo #(.WIDTH(9), .DEPTH(OUT_DEPTH)) u_out_fifo (
    .clk, .rst_n, .flush(clear),
    .push(m_valid && m_ready), .din({m_last, m_data}),
    .pop(out_pop), .dout(out_dout),
    .full(out_full), .empty(out_empty), .count(out_count)
  );

  assign acc_clear = clear;
  assign s_valid   = run && !in_empty;
  assign s_data    = data_t'(in_dout);
  assign m_ready   = !out_full;

  // ------------------------------------------------------------------
  // weight port
  // ------------------------------------------------------------------
  assign w_we   = wr_fire && wa == A_WDATA && s_axi_wstrb[0];
  assign w_data = data_t'(s_axi_wdata[7:0]);

  // ------------------------------------------------------------------
  // registers
  // ------------------------------------------------------------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_axi_bvalid <= 1'b0;
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
      w_addr       <= '0;
      run          <= 1'b0;
      busy         <= 1'b0;
      done         <= 1'b0;
      ovf          <= 1'b0;
      cycles       <= '0;
    end else begin
      // write response
      if (wr_fire)                          s_axi_bvalid <= 1'b1;
      else if (s_axi_bready)                s_axi_bvalid <= 1'b0;
      if (wr_fire && wa == A_WADDR)         w_addr <= waddr_t'(s_axi_wdata[15:0]);
      if (in_push && in_full)               ovf <= 1'b1;

      // run control
      if (clear) begin
        run  <= 1'b0;
        busy <= 1'b0;
        done <= 1'b0;
        ovf  <= 1'b0;
      end else if (start) begin
        run    <= 1'b1;
        busy   <= 1'b1;
        done   <= 1'b0;
        cycles <= '0;
      end else if (busy) begin
        cycles <= cycles + 1'b1;
        if (m_valid && m_ready && m_last) begin
          run  <= 1'b0;
          busy <= 1'b0;
          done <= 1'b1;
        end
      end

      // read data
      if (rd_fire) begin
        s_axi_rvalid <= 1'b1;
        unique case (ra)
          A_STATUS: s_axi_rdata <= {16'(out_count), 8'(in_count), 1'b0, ovf, out_empty, out_full,
                                    in_empty, in_full, done, busy};
          A_OUT:    s_axi_rdata <= out_empty ? 32'd0 : {23'd0, out_dout};
          A_WADDR:  s_axi_rdata <= {16'd0, w_addr};
          A_CYCLES: s_axi_rdata <= cycles;
          default:  s_axi_rdata <= 32'd0;
        endcase
      end else if (s_axi_rready) begin
        s_axi_rvalid <= 1'b0;
      end
    end
  end

  // AXI rules: a response, once raised, is held until accepted.
  assert property (@(posedge clk) disable iff (!rst_n)
                   s_axi_bvalid && !s_axi_bready |=> s_axi_bvalid)
    else $error("comblock: bvalid dropped before bready");
  assert property (@(posedge clk) disable iff (!rst_n)
                   s_axi_rvalid && !s_axi_rready |=> s_axi_rvalid && $stable(s_axi_rdata))
    else $error("comblock: read data changed before rready");

endmodule
