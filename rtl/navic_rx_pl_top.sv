// navic_rx_pl_top: programmable-logic part of the two-channel NavIC receiver.
//
// The receiver is a passive bistatic radar: one RF input sees the direct
// signal (DS) of a NavIC satellite, the other the signal reflected by a ground
// target (GRS). The two RF data converters of one tile (ADC 0 for DS, ADC 1
// for GRS) sample at 2.4576 GHz, mix down with an NCO at 1.176 GHz and
// decimate by 40, delivering 16-bit baseband I and Q streams at 61.44 MHz.
// This block turns those four streams into two aligned 1 ms packets, one per
// channel, and hands them to two DMA cores that write them into processor
// memory, where decimation, PRN correlation and delay-Doppler processing run
// in software.
//
// Contents: pktgen_regs (AXI4-Lite control from the processor) and
// packet_generator (capture control, one buffered AXI4-Stream channel per
// DMA). The converters, the DMA cores and the AXI interconnect are vendor IP
// and sit outside: their signals are this block's ports.
//
// Clocking: one clock, the converters' 61.44 MHz stream clock, drives
// everything including the AXI4-Lite port. Reset is active low, synchronous.
//
// Use: write PKT_LEN (reset value 61,440 = 1 ms), write START to CTRL, let the
// DMAs collect one packet per channel, poll STATUS for done and the overflow
// flags. With free-running converters and DMAs a capture takes pkt_len cycles.
//
// The structure (two converters on one tile, a packet generator, two DMA
// cores, AXI-Lite control) follows the paper's receiver; the single clock
// domain, the register map and the buffering are this design's choices.
module navic_rx_pl_top
  import navic_pkg::*;
#(
  parameter int unsigned      FIFO_DEPTH    = 1024,
  parameter logic [LEN_W-1:0] PKT_LEN_RESET = LEN_W'(PKT_LEN_1MS)
) (
  input  logic                clk,
  input  logic                rst_n,
  // AXI4-Lite slave from the processor
  input  logic [3:0]          s_axil_awaddr,
  input  logic                s_axil_awvalid,
  output logic                s_axil_awready,
  input  logic [31:0]         s_axil_wdata,
  input  logic [3:0]          s_axil_wstrb,
  input  logic                s_axil_wvalid,
  output logic                s_axil_wready,
  output logic [1:0]          s_axil_bresp,
  output logic                s_axil_bvalid,
  input  logic                s_axil_bready,
  input  logic [3:0]          s_axil_araddr,
  input  logic                s_axil_arvalid,
  output logic                s_axil_arready,
  output logic [31:0]         s_axil_rdata,
  output logic [1:0]          s_axil_rresp,
  output logic                s_axil_rvalid,
  input  logic                s_axil_rready,
  // ADC 0 (DS) I and Q streams
  input  logic [SAMPLE_W-1:0] adc_ds_i_tdata,
  input  logic                adc_ds_i_tvalid,
  input  logic [SAMPLE_W-1:0] adc_ds_q_tdata,
  input  logic                adc_ds_q_tvalid,
  // ADC 1 (GRS) I and Q streams
  input  logic [SAMPLE_W-1:0] adc_grs_i_tdata,
  input  logic                adc_grs_i_tvalid,
  input  logic [SAMPLE_W-1:0] adc_grs_q_tdata,
  input  logic                adc_grs_q_tvalid,
  // DS packet stream to DMA 0
  output logic [31:0]         m_axis_ds_tdata,
  output logic                m_axis_ds_tvalid,
  input  logic                m_axis_ds_tready,
  output logic                m_axis_ds_tlast,
  // GRS packet stream to DMA 1
  output logic [31:0]         m_axis_grs_tdata,
  output logic                m_axis_grs_tvalid,
  input  logic                m_axis_grs_tready,
  output logic                m_axis_grs_tlast
);
  logic             start_pulse, clear_pulse;
  logic [LEN_W-1:0] pkt_len;
  pg_status_t       status;

  pktgen_regs #(.PKT_LEN_RESET(PKT_LEN_RESET)) u_regs (
    .clk, .rst_n,
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready,
    .s_axil_wdata, .s_axil_wstrb, .s_axil_wvalid, .s_axil_wready,
    .s_axil_bresp, .s_axil_bvalid, .s_axil_bready,
    .s_axil_araddr, .s_axil_arvalid, .s_axil_arready,
    .s_axil_rdata, .s_axil_rresp, .s_axil_rvalid, .s_axil_rready,
    .start_pulse, .clear_pulse, .pkt_len, .status
  );

  packet_generator #(.FIFO_DEPTH(FIFO_DEPTH)) u_pktgen (
    .clk, .rst_n,
    .start(start_pulse), .clear(clear_pulse), .pkt_len, .status,
    .adc_ds_i_tdata, .adc_ds_i_tvalid, .adc_ds_q_tdata, .adc_ds_q_tvalid,
    .adc_grs_i_tdata, .adc_grs_i_tvalid, .adc_grs_q_tdata, .adc_grs_q_tvalid,
    .m_axis_ds_tdata, .m_axis_ds_tvalid, .m_axis_ds_tready, .m_axis_ds_tlast,
    .m_axis_grs_tdata, .m_axis_grs_tvalid, .m_axis_grs_tready, .m_axis_grs_tlast
  );

endmodule
