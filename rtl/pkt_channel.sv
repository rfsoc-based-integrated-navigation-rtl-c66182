// pkt_channel: one output channel (DS or GRS) of the packet generator.
//
// Each cycle the controller says whether to take the converter's current
// sample (take) and whether that sample closes the packet (last). A taken
// sample is written, with its last flag, into a sample_fifo; the FIFO's head is
// presented as an AXI4-Stream master (tdata = {Q, I}, tlast on the final
// sample of the packet) towards the DMA core.
//
// The converter cannot be stalled, so if the DMA holds tready low for longer
// than the buffer covers, a sample that finds the buffer full is dropped and
// ovf_event pulses for one cycle. The final sample of a packet is never
// dropped: if it finds the buffer full it waits in a one-word holding register
// and enters the buffer as soon as a word leaves, so the DMA always sees tlast
// and the packet always closes. idle is high when nothing of the packet is left
// inside the channel.
//
// Timing: a sample taken in cycle t is on tdata in cycle t+1 at the earliest;
// with tready high the channel moves one sample per clock.
//
// The buffering, the drop policy and the holding register are this design's
// choices; the paper only says that the packet generator groups 1 ms of
// samples and sends each channel's packet to its own DMA core.
module pkt_channel
  import navic_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  // from the controller
  input  logic        take,
  input  logic        last,
  input  iq_t         sample,
  // AXI4-Stream master to the DMA core
  output logic [31:0] m_axis_tdata,
  output logic        m_axis_tvalid,
  input  logic        m_axis_tready,
  output logic        m_axis_tlast,
  // status
  output logic        ovf_event,
  output logic        idle
);
  localparam int unsigned W = $bits(iq_t) + 1;

  logic         full, empty, push, pop;
  logic [W-1:0] wr_word, rd_word;
  logic         hold_valid;
  iq_t          hold_data;

  sample_fifo #(.WIDTH(W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .push, .wr_data(wr_word),
    .pop,  .rd_data(rd_word),
    .full, .empty
  );

  // The holding register only fills after the final take of a packet, so it
  // and a fresh take never compete for the buffer's write port.
  always_comb begin
    push    = 1'b0;
    wr_word = {last, sample};
    if (hold_valid) begin
      push    = !full;
      wr_word = {1'b1, hold_data};
    end else if (take) begin
      push    = !full;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      hold_valid <= 1'b0;
      hold_data  <= '0;
    end else if (hold_valid) begin
      if (!full) hold_valid <= 1'b0;
    end else if (take && last && full) begin
      hold_valid <= 1'b1;
      hold_data  <= sample;
    end
  end

  assign ovf_event     = take && full && !last;
  assign pop           = m_axis_tvalid && m_axis_tready;
  assign m_axis_tvalid = !empty;
  assign m_axis_tdata  = rd_word[W-2:0];
  assign m_axis_tlast  = rd_word[W-1];
  assign idle          = empty && !hold_valid;

  // AXI4-Stream rule: once valid, a beat stays valid and unchanged until taken.
  a_axis_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_axis_tvalid && !m_axis_tready |=> m_axis_tvalid && $stable(m_axis_tdata) && $stable(m_axis_tlast));
  // No new sample arrives while the final one is still held back.
  a_no_take_while_hold: assert property (@(posedge clk) disable iff (!rst_n) !(take && hold_valid));

endmodule
