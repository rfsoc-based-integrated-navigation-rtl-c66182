// navic_pkg: types and constants shared by the NavIC two-channel receiver logic.
//
// The receiver digitises two RF inputs, the direct signal (DS) from the
// satellite and the ground-reflected signal (GRS) from the target. Each RF data
// converter delivers baseband I and Q at 61.44 MHz, 16 bits each, one sample
// per clock. The programmable logic groups 1 ms of those samples (61,440 per
// channel) into one packet per channel for the processor, which forms the
// delay-Doppler maps in software.
//
// The sample rate, sample width and the 1 ms packet follow the paper. The
// packing of one complex sample into a 32-bit word (I in bits 15:0, Q in bits
// 31:16) and the register map below are this design's choices.
package navic_pkg;

  // Baseband sample rate after the converter's decimation by 40 (2.4576 GS/s / 40).
  localparam int unsigned FS_HZ        = 61_440_000;
  // Width of one I or Q sample from the converter.
  localparam int unsigned SAMPLE_W     = 16;
  // Samples in one 1 ms packet at FS_HZ.
  localparam int unsigned PKT_LEN_1MS  = FS_HZ / 1000;
  // Width of the packet length / sample counters (up to 16.7 M samples, 273 ms).
  localparam int unsigned LEN_W        = 24;
  // Width of the completed-packet counter.
  localparam int unsigned PKT_CNT_W    = 16;

  // One complex baseband sample as carried on the 32-bit packet stream.
  typedef struct packed {
    logic signed [SAMPLE_W-1:0] q;
    logic signed [SAMPLE_W-1:0] i;
  } iq_t;

  // Status reported by the packet generator to the register file.
  typedef struct packed {
    logic                 busy;     // a capture is armed, running or draining
    logic                 done;     // sticky: a packet pair has been fully delivered
    logic                 ovf_ds;   // sticky: a DS sample was lost because its buffer was full
    logic                 ovf_grs;  // sticky: a GRS sample was lost because its buffer was full
    logic [PKT_CNT_W-1:0] pkt_count;// packet pairs delivered since reset
  } pg_status_t;

  // AXI4-Lite register map (byte addresses).
  typedef enum logic [3:0] {
    REG_CTRL      = 4'h0,  // W: bit0 START, bit1 CLEAR (both self-clearing)
    REG_STATUS    = 4'h4,  // R: bit0 busy, bit1 done, bit2 ovf_ds, bit3 ovf_grs
    REG_PKT_LEN   = 4'h8,  // RW: samples per packet, LEN_W bits
    REG_PKT_COUNT = 4'hC   // R: packet pairs delivered
  } reg_addr_e;

  // AXI response code used by the register file.
  localparam logic [1:0] RESP_OKAY   = 2'b00;

endpackage
