// rfsoc_testbed_pl: programmable-logic part of the RFSoC millimetre-wave
// OFDM testbed.
//
// The testbed runs the OFDM physical layer (frame generation, root-raised-
// cosine pulse shaping and interpolation by 10, and on receive matched
// filtering, packet detection, synchronisation, equalisation and QPSK
// demapping) as software on the processor. The logic here only moves samples
// between processor memory and the converters of the RF data converter, whose
// hard tiles then interpolate/decimate by 16 and mix to and from the 3.8 GHz
// intermediate frequency:
//
//   transmit: DMA (MM2S) stream --> axis_fifo --> DAC stream
//   receive:  ADC I stream -+
//                           +--> packet_generator --> DMA I (S2MM) stream
//   ADC Q stream -----------+                      --> DMA Q (S2MM) stream
//
// The DMAs, the AXI interconnect and the RF data converter are vendor IP and
// stay outside: their streams and the packet generator's AXI4-Lite control
// port are brought out as ports. Everything runs on one clock, one complex
// sample per cycle (307.2 MHz for the testbed's 307.2 MSPS); the single clock
// and the stream widths are this design's choice.
//
// Transmit beats are one complex sample, I in bits 15:0 and Q in bits 31:16,
// already scaled by software to the DAC's full 16-bit range. Latency: one cycle
// from the DMA stream to the DAC stream through an empty FIFO, one cycle from
// the ADC streams to the receive DMA streams.
module rfsoc_testbed_pl
  import testbed_pkg::*;
#(
  parameter int unsigned TX_FIFO_DEPTH = 1024,
  parameter int unsigned PKT_LEN_W     = 32,
  localparam int unsigned TX_W         = 2 * SAMPLE_W,
  localparam int unsigned LVL_W        = $clog2(TX_FIFO_DEPTH) + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // transmit DMA (MM2S) stream
  input  logic [TX_W-1:0]      s_axis_mm2s_tdata,
  input  logic                 s_axis_mm2s_tlast,
  input  logic                 s_axis_mm2s_tvalid,
  output logic                 s_axis_mm2s_tready,
  // DAC stream of the RF data converter
  output logic [TX_W-1:0]      m_axis_dac_tdata,
  output logic                 m_axis_dac_tvalid,
  input  logic                 m_axis_dac_tready,
  output logic [LVL_W-1:0]     tx_fifo_level,
  // ADC streams of the RF data converter (I and Q)
  input  logic [SAMPLE_W-1:0]  s_axis_adc_i_tdata,
  input  logic                 s_axis_adc_i_tvalid,
  output logic                 s_axis_adc_i_tready,
  input  logic [SAMPLE_W-1:0]  s_axis_adc_q_tdata,
  input  logic                 s_axis_adc_q_tvalid,
  output logic                 s_axis_adc_q_tready,
  // receive DMA (S2MM) streams, I and Q
  output logic [SAMPLE_W-1:0]  m_axis_s2mm_i_tdata,
  output logic                 m_axis_s2mm_i_tlast,
  output logic                 m_axis_s2mm_i_tvalid,
  input  logic                 m_axis_s2mm_i_tready,
  output logic [SAMPLE_W-1:0]  m_axis_s2mm_q_tdata,
  output logic                 m_axis_s2mm_q_tlast,
  output logic                 m_axis_s2mm_q_tvalid,
  input  logic                 m_axis_s2mm_q_tready,
  // packet generator control (AXI4-Lite, from the interconnect)
  input  logic [PG_ADDR_W-1:0] s_axil_awaddr,
  input  logic                 s_axil_awvalid,
  output logic                 s_axil_awready,
  input  logic [31:0]          s_axil_wdata,
  input  logic [3:0]           s_axil_wstrb,
  input  logic                 s_axil_wvalid,
  output logic                 s_axil_wready,
  output logic [1:0]           s_axil_bresp,
  output logic                 s_axil_bvalid,
  input  logic                 s_axil_bready,
  input  logic [PG_ADDR_W-1:0] s_axil_araddr,
  input  logic                 s_axil_arvalid,
  output logic                 s_axil_arready,
  output logic [31:0]          s_axil_rdata,
  output logic [1:0]           s_axil_rresp,
  output logic                 s_axil_rvalid,
  input  logic                 s_axil_rready,
  // receive status
  output logic                 rx_busy,
  output logic                 rx_done
);

  // ---------------- transmit path ----------------
  // The DAC stream has no TLAST: the frame is sent back to back, cyclically.
  logic tx_tlast_unused;

  axis_fifo #(
    .DATA_W (TX_W),
    .DEPTH  (TX_FIFO_DEPTH)
  ) u_tx_fifo (
    .clk      (clk),
    .rst_n    (rst_n),
    .s_tdata  (s_axis_mm2s_tdata),
    .s_tlast  (s_axis_mm2s_tlast),
    .s_tvalid (s_axis_mm2s_tvalid),
    .s_tready (s_axis_mm2s_tready),
    .m_tdata  (m_axis_dac_tdata),
    .m_tlast  (tx_tlast_unused),
    .m_tvalid (m_axis_dac_tvalid),
    .m_tready (m_axis_dac_tready),
    .level    (tx_fifo_level)
  );

  // ---------------- receive path ----------------
  packet_generator #(
    .SW    (SAMPLE_W),
    .LEN_W (PKT_LEN_W)
  ) u_packet_generator (
    .clk            (clk),
    .rst_n          (rst_n),
    .adc_i_tdata    (s_axis_adc_i_tdata),
    .adc_i_tvalid   (s_axis_adc_i_tvalid),
    .adc_i_tready   (s_axis_adc_i_tready),
    .adc_q_tdata    (s_axis_adc_q_tdata),
    .adc_q_tvalid   (s_axis_adc_q_tvalid),
    .adc_q_tready   (s_axis_adc_q_tready),
    .m_i_tdata      (m_axis_s2mm_i_tdata),
    .m_i_tlast      (m_axis_s2mm_i_tlast),
    .m_i_tvalid     (m_axis_s2mm_i_tvalid),
    .m_i_tready     (m_axis_s2mm_i_tready),
    .m_q_tdata      (m_axis_s2mm_q_tdata),
    .m_q_tlast      (m_axis_s2mm_q_tlast),
    .m_q_tvalid     (m_axis_s2mm_q_tvalid),
    .m_q_tready     (m_axis_s2mm_q_tready),
    .s_axil_awaddr  (s_axil_awaddr),
    .s_axil_awvalid (s_axil_awvalid),
    .s_axil_awready (s_axil_awready),
    .s_axil_wdata   (s_axil_wdata),
    .s_axil_wstrb   (s_axil_wstrb),
    .s_axil_wvalid  (s_axil_wvalid),
    .s_axil_wready  (s_axil_wready),
    .s_axil_bresp   (s_axil_bresp),
    .s_axil_bvalid  (s_axil_bvalid),
    .s_axil_bready  (s_axil_bready),
    .s_axil_araddr  (s_axil_araddr),
    .s_axil_arvalid (s_axil_arvalid),
    .s_axil_arready (s_axil_arready),
    .s_axil_rdata   (s_axil_rdata),
    .s_axil_rresp   (s_axil_rresp),
    .s_axil_rvalid  (s_axil_rvalid),
    .s_axil_rready  (s_axil_rready),
    .busy           (rx_busy),
    .done           (rx_done)
  );

endmodule
