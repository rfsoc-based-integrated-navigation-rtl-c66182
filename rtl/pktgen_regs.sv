// pktgen_regs: AXI4-Lite register file of the packet generator.
//
// The processor controls the packet generator through four 32-bit registers:
//   0x0 CTRL      write: bit0 START, bit1 CLEAR. Each written 1 becomes a
//                 one-cycle pulse; reading returns 0.
//   0x4 STATUS    read:  bit0 busy, bit1 done, bit2 DS overflow, bit3 GRS overflow.
//   0x8 PKT_LEN   read/write: samples per packet (low LEN_W bits, reset
//                 value PKT_LEN_RESET = 61,440, i.e. 1 ms at 61.44 MHz).
//   0xC PKT_COUNT read:  packet pairs delivered since reset.
// Address bits 1:0 are ignored, so the 16-byte window holds exactly these
// four registers. Writes to read-only registers are ignored; every access
// answers OKAY.
//
// How it works: the write address and write data channels are accepted
// independently and held until both have arrived; the write then takes effect
// and a response is raised on B, which is kept until the master takes it. A
// read address is accepted when no read response is pending, and the data
// appear on R in the next cycle. Byte strobes are honoured on PKT_LEN; CTRL
// acts on byte 0 only.
//
// The paper shows an AXI-Lite link from the processor to the packet generator
// but gives no register map; the map, the reset value of one 1 ms packet and
// the response rules are this design's choices.
module pktgen_regs
  import navic_pkg::*;
#(
  parameter logic [LEN_W-1:0] PKT_LEN_RESET = LEN_W'(PKT_LEN_1MS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave
  input  logic [3:0]        s_axil_awaddr,
  input  logic              s_axil_awvalid,
  output logic              s_axil_awready,
  input  logic [31:0]       s_axil_wdata,
  input  logic [3:0]        s_axil_wstrb,
  input  logic              s_axil_wvalid,
  output logic              s_axil_wready,
  output logic [1:0]        s_axil_bresp,
  output logic              s_axil_bvalid,
  input  logic              s_axil_bready,
  input  logic [3:0]        s_axil_araddr,
  input  logic              s_axil_arvalid,
  output logic              s_axil_arready,
  output logic [31:0]       s_axil_rdata,
  output logic [1:0]        s_axil_rresp,
  output logic              s_axil_rvalid,
  input  logic              s_axil_rready,
  // to and from the packet generator
  output logic              start_pulse,
  output logic              clear_pulse,
  output logic [LEN_W-1:0]  pkt_len,
  input  pg_status_t        status
);
  logic        aw_held, w_held;
  logic [3:0]  awaddr_q;
  logic [31:0] wdata_q;
  logic [3:0]  wstrb_q;
  logic        do_write, do_read;
  logic [31:0] len_word;

  assign s_axil_awready = !aw_held && !s_axil_bvalid;
  assign s_axil_wready  = !w_held  && !s_axil_bvalid;
  assign do_write       = aw_held && w_held && !s_axil_bvalid;
  assign s_axil_arready = !s_axil_rvalid;
  assign do_read        = s_axil_arvalid && s_axil_arready;

  // PKT_LEN after applying the write strobes.
  always_comb begin
    len_word = 32'(pkt_len);
    for (int b = 0; b < 4; b++)
      if (wstrb_q[b]) len_word[8*b +: 8] = wdata_q[8*b +: 8];
  end

  // Write path.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      aw_held       <= 1'b0;
      w_held        <= 1'b0;
      awaddr_q      <= '0;
      wdata_q       <= '0;
      wstrb_q       <= '0;
      s_axil_bvalid <= 1'b0;
      s_axil_bresp  <= RESP_OKAY;
      start_pulse   <= 1'b0;
      clear_pulse   <= 1'b0;
      pkt_len       <= PKT_LEN_RESET;
    end else begin
      start_pulse <= 1'b0;
      clear_pulse <= 1'b0;
      if (s_axil_awvalid && s_axil_awready) begin
        aw_held  <= 1'b1;
        awaddr_q <= s_axil_awaddr;
      end
      if (s_axil_wvalid && s_axil_wready) begin
        w_held  <= 1'b1;
        wdata_q <= s_axil_wdata;
        wstrb_q <= s_axil_wstrb;
      end
      if (do_write) begin
        aw_held       <= 1'b0;
        w_held        <= 1'b0;
        s_axil_bvalid <= 1'b1;
        s_axil_bresp  <= RESP_OKAY;
        case ({awaddr_q[3:2], 2'b00})
          REG_CTRL: begin
            start_pulse <= wstrb_q[0] && wdata_q[0];
            clear_pulse <= wstrb_q[0] && wdata_q[1];
          end
          REG_PKT_LEN:                 pkt_len <= len_word[LEN_W-1:0];
          default:                     ;  // STATUS and PKT_COUNT are read-only
        endcase
      end else if (s_axil_bvalid && s_axil_bready) begin
        s_axil_bvalid <= 1'b0;
      end
    end
  end

  // Read path.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_axil_rvalid <= 1'b0;
      s_axil_rdata  <= '0;
      s_axil_rresp  <= RESP_OKAY;
    end else if (do_read) begin
      s_axil_rvalid <= 1'b1;
      s_axil_rresp  <= RESP_OKAY;
      case ({s_axil_araddr[3:2], 2'b00})
        REG_CTRL:      s_axil_rdata <= '0;
        REG_STATUS:    s_axil_rdata <= {28'd0, status.ovf_grs, status.ovf_ds, status.done, status.busy};
        REG_PKT_LEN:   s_axil_rdata <= 32'(pkt_len);
        default:       s_axil_rdata <= 32'(status.pkt_count);  // REG_PKT_COUNT
      endcase
    end else if (s_axil_rvalid && s_axil_rready) begin
      s_axil_rvalid <= 1'b0;
    end
  end

  // AXI rule: a raised response stays until it is taken.
  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axil_bvalid && !s_axil_bready |=> s_axil_bvalid && $stable(s_axil_bresp));
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axil_rvalid && !s_axil_rready |=> s_axil_rvalid && $stable(s_axil_rdata));

endmodule
