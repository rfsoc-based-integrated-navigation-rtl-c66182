// packet_generator: groups the DS and GRS converter samples into packets.
//
// The two RF data converters deliver the direct signal (DS) and the
// ground-reflected signal (GRS) as separate 16-bit I and Q streams at one
// sample per clock (61.44 MHz). On a start pulse the generator captures the
// next PKT_LEN samples of both channels (by default 61,440, i.e. 1 ms) and
// sends each channel's samples as one AXI4-Stream packet, closed by tlast, to
// that channel's DMA core. The processor then has two 1 ms records that begin
// at the same converter sample, which is what the delay measurement between
// the DS and GRS delay-Doppler maps relies on.
//
// How it works: a small controller (IDLE -> CAPTURE -> FLUSH) counts samples.
// A sample is taken only in a cycle where all four converter streams are
// valid, and it is taken on both channels at once, so the two packets stay
// aligned sample for sample. After the last take the controller waits until
// both channels have handed their whole packet to the DMA, then sets done and
// counts one more packet pair. A start while busy, or with a length of zero,
// is ignored. CLEAR resets the sticky done and overflow flags.
//
// Timing: the first take is in the first cycle after the start pulse in which
// all streams are valid; with the converters and both DMAs running freely the
// capture lasts exactly pkt_len cycles and each stream carries one sample per
// cycle, the first beat one cycle after its take.
//
// From the paper: the two synchronised channels, 16-bit I/Q at one sample per
// cycle, 61.44 MHz, 1 ms packets, one DMA per channel. This design's choices:
// the start/length control, the trigger on all-valid, the buffering and
// overflow handling (in pkt_channel) and the 32-bit {Q, I} word.
module packet_generator
  import navic_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 1024
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // control from the register file
  input  logic                 start,
  input  logic                 clear,
  input  logic [LEN_W-1:0]     pkt_len,
  output pg_status_t           status,
  // DS converter (ADC 0) I and Q streams
  input  logic [SAMPLE_W-1:0]  adc_ds_i_tdata,
  input  logic                 adc_ds_i_tvalid,
  input  logic [SAMPLE_W-1:0]  adc_ds_q_tdata,
  input  logic                 adc_ds_q_tvalid,
  // GRS converter (ADC 1) I and Q streams
  input  logic [SAMPLE_W-1:0]  adc_grs_i_tdata,
  input  logic                 adc_grs_i_tvalid,
  input  logic [SAMPLE_W-1:0]  adc_grs_q_tdata,
  input  logic                 adc_grs_q_tvalid,
  // DS packet stream to its DMA core
  output logic [31:0]          m_axis_ds_tdata,
  output logic                 m_axis_ds_tvalid,
  input  logic                 m_axis_ds_tready,
  output logic                 m_axis_ds_tlast,
  // GRS packet stream to its DMA core
  output logic [31:0]          m_axis_grs_tdata,
  output logic                 m_axis_grs_tvalid,
  input  logic                 m_axis_grs_tready,
  output logic                 m_axis_grs_tlast
);
  typedef enum logic [1:0] {S_IDLE, S_CAPTURE, S_FLUSH} state_e;

  state_e               state;
  logic [LEN_W-1:0]     len_q, cnt;
  logic                 all_valid, take, last;
  logic                 ovf_ds_ev, ovf_grs_ev, idle_ds, idle_grs;
  logic                 done_q, ovf_ds_q, ovf_grs_q;
  logic [PKT_CNT_W-1:0] pkt_count_q;
  iq_t                  ds_sample, grs_sample;

  assign all_valid  = adc_ds_i_tvalid && adc_ds_q_tvalid && adc_grs_i_tvalid && adc_grs_q_tvalid;
  assign take       = (state == S_CAPTURE) && all_valid;
  assign last       = (cnt == len_q - 1'b1);
  assign ds_sample  = '{q: adc_ds_q_tdata,  i: adc_ds_i_tdata};
  assign grs_sample = '{q: adc_grs_q_tdata, i: adc_grs_i_tdata};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      len_q       <= '0;
      cnt         <= '0;
      done_q      <= 1'b0;
      pkt_count_q <= '0;
    end else begin
      if (clear) done_q <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start && pkt_len != '0) begin
            len_q  <= pkt_len;
            cnt    <= '0;
            done_q <= 1'b0;
            state  <= S_CAPTURE;
          end
        end
        S_CAPTURE: begin
          if (take) begin
            cnt <= cnt + 1'b1;
            if (last) state <= S_FLUSH;
          end
        end
        S_FLUSH: begin
          if (idle_ds && idle_grs) begin
            done_q      <= 1'b1;
            pkt_count_q <= pkt_count_q + 1'b1;
            state       <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Sticky overflow flags; an event in the same cycle as CLEAR wins.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ovf_ds_q  <= 1'b0;
      ovf_grs_q <= 1'b0;
    end else begin
      ovf_ds_q  <= ovf_ds_ev  || (ovf_ds_q  && !clear);
      ovf_grs_q <= ovf_grs_ev || (ovf_grs_q && !clear);
    end
  end

  pkt_channel #(.FIFO_DEPTH(FIFO_DEPTH)) u_ds (
    .clk, .rst_n,
    .take, .last, .sample(ds_sample),
    .m_axis_tdata (m_axis_ds_tdata),
    .m_axis_tvalid(m_axis_ds_tvalid),
    .m_axis_tready(m_axis_ds_tready),
    .m_axis_tlast (m_axis_ds_tlast),
    .ovf_event(ovf_ds_ev),
    .idle(idle_ds)
  );

  pkt_channel #(.FIFO_DEPTH(FIFO_DEPTH)) u_grs (
    .clk, .rst_n,
    .take, .last, .sample(grs_sample),
    .m_axis_tdata (m_axis_grs_tdata),
    .m_axis_tvalid(m_axis_grs_tvalid),
    .m_axis_tready(m_axis_grs_tready),
    .m_axis_tlast (m_axis_grs_tlast),
    .ovf_event(ovf_grs_ev),
    .idle(idle_grs)
  );

  assign status = '{busy:      (state != S_IDLE),
                    done:      done_q,
                    ovf_ds:    ovf_ds_q,
                    ovf_grs:   ovf_grs_q,
                    pkt_count: pkt_count_q};

  // The converter presents I and Q of one channel together.
  a_ds_iq_together:  assert property (@(posedge clk) disable iff (!rst_n) adc_ds_i_tvalid  == adc_ds_q_tvalid);
  a_grs_iq_together: assert property (@(posedge clk) disable iff (!rst_n) adc_grs_i_tvalid == adc_grs_q_tvalid);
  // The sample counter never reaches the packet length while capturing.
  a_capture_bounded: assert property (@(posedge clk) disable iff (!rst_n) (state == S_CAPTURE) |-> cnt < len_q);

endmodule
