// packet_generator: receive-path packet generator.
//
// The ADC tiles of the RF data converter deliver the down-converted, decimated
// baseband as two real sample streams, I and Q, at one sample per cycle each
// (307.2 MSPS in the testbed). The processor cannot take an endless stream, so
// it asks this block for a given number of samples; the block then forwards
// exactly that many consecutive I/Q sample pairs to two receive DMAs, one
// stream per component, at the ADC rate, and marks the last sample of the
// packet with TLAST so that each DMA transfer ends there. This function is
// what the testbed description gives; the control interface, the register map
// and the overrun handling below are this design's own.
//
// Control (AXI4-Lite slave, 32-bit data, addresses in testbed_pkg):
//   0x0 CTRL    write bit 0 = 1 to start a packet (ignored while busy)
//   0x4 PKT_LEN samples per packet; a start with PKT_LEN = 0 completes at once
//   0x8 STATUS  bit 0 busy, bit 1 done (cleared by the next start),
//               bit 2 overrun (a sample pair was lost during this packet)
//   0xC DROPS   sample pairs lost during the current or last packet
// Timing: the first pair captured is the first one that arrives with both
// ADC valids high in the cycle after the CTRL write is answered. Each
// output has one register stage, so a pair leaves one cycle after it
// arrives. The ADC streams cannot be stalled (adc_*_tready is always high):
// if either DMA is not ready when a new pair arrives while its output register
// still holds a beat, the new pair is dropped and counted, and the packet
// still ends after PKT_LEN forwarded pairs. busy falls when both last beats
// have been accepted.
module packet_generator
  import testbed_pkg::*;
#(
  parameter int unsigned SW    = SAMPLE_W,  // bits per I or Q sample
  parameter int unsigned LEN_W = 32         // width of the PKT_LEN register
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // ADC sample streams from the RF data converter
  input  logic [SW-1:0]        adc_i_tdata,
  input  logic                 adc_i_tvalid,
  output logic                 adc_i_tready,
  input  logic [SW-1:0]        adc_q_tdata,
  input  logic                 adc_q_tvalid,
  output logic                 adc_q_tready,
  // streams to the two receive DMAs (S2MM)
  output logic [SW-1:0]        m_i_tdata,
  output logic                 m_i_tlast,
  output logic                 m_i_tvalid,
  input  logic                 m_i_tready,
  output logic [SW-1:0]        m_q_tdata,
  output logic                 m_q_tlast,
  output logic                 m_q_tvalid,
  input  logic                 m_q_tready,
  // AXI4-Lite control slave
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
  // status, also visible in STATUS
  output logic                 busy,
  output logic                 done
);

  // ------------------------------------------------------------------
  // Registers
  // ------------------------------------------------------------------
  logic [LEN_W-1:0] pkt_len;
  logic [LEN_W-1:0] remaining;    // pairs still to forward
  logic [31:0]      drops;
  logic             overrun;
  logic             start;        // one-cycle pulse from a CTRL write

  // ------------------------------------------------------------------
  // AXI4-Lite slave: a write is taken when address and data are both
  // offered and no response is pending; a read likewise.
  // ------------------------------------------------------------------
  logic wr_take, rd_take;
  assign wr_take        = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
  assign s_axil_awready = wr_take;
  assign s_axil_wready  = wr_take;
  assign rd_take        = s_axil_arvalid && !s_axil_rvalid;
  assign s_axil_arready = rd_take;
  assign s_axil_bresp   = AXI_RESP_OKAY;
  assign s_axil_rresp   = AXI_RESP_OKAY;

  function automatic logic [31:0] apply_strb(logic [31:0] old, logic [31:0] nw,
                                             logic [3:0] strb);
    logic [31:0] r;
    for (int b = 0; b < 4; b++) r[8*b +: 8] = strb[b] ? nw[8*b +: 8] : old[8*b +: 8];
    return r;
  endfunction

  logic [31:0] pkt_len_32, status_word;
  assign pkt_len_32 = 32'(pkt_len);
  always_comb begin
    status_word                = '0;
    status_word[PG_ST_BUSY]    = busy;
    status_word[PG_ST_DONE]    = done;
    status_word[PG_ST_OVERRUN] = overrun;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_axil_bvalid <= 1'b0;
      s_axil_rvalid <= 1'b0;
      s_axil_rdata  <= '0;
      pkt_len       <= '0;
      start         <= 1'b0;
    end else begin
      start <= 1'b0;
      if (wr_take) begin
        s_axil_bvalid <= 1'b1;
        unique case (s_axil_awaddr)
          PG_REG_CTRL:    start   <= s_axil_wstrb[0] && s_axil_wdata[0];
          PG_REG_PKT_LEN: pkt_len <= LEN_W'(apply_strb(pkt_len_32, s_axil_wdata, s_axil_wstrb));
          default: ;
        endcase
      end else if (s_axil_bready) begin
        s_axil_bvalid <= 1'b0;
      end
      if (rd_take) begin
        s_axil_rvalid <= 1'b1;
        unique case (s_axil_araddr)
          PG_REG_CTRL:    s_axil_rdata <= '0;
          PG_REG_PKT_LEN: s_axil_rdata <= pkt_len_32;
          PG_REG_STATUS:  s_axil_rdata <= status_word;
          PG_REG_DROPS:   s_axil_rdata <= drops;
          default:        s_axil_rdata <= '0;
        endcase
      end else if (s_axil_rready) begin
        s_axil_rvalid <= 1'b0;
      end
    end
  end

  // ------------------------------------------------------------------
  // Capture
  // ------------------------------------------------------------------
  assign adc_i_tready = 1'b1;
  assign adc_q_tready = 1'b1;

  logic pair_in;     // an I/Q pair arrives this cycle
  logic capturing;   // pairs still to be taken
  logic out_free;    // both output registers can take a new beat
  logic load;        // forward the arriving pair
  logic drop;        // lose the arriving pair
  logic last_in;     // the pair being loaded is the packet's last

  assign pair_in   = adc_i_tvalid && adc_q_tvalid;
  assign capturing = busy && (remaining != '0);
  assign out_free  = (!m_i_tvalid || m_i_tready) && (!m_q_tvalid || m_q_tready);
  assign load      = capturing && pair_in && out_free;
  assign drop      = capturing && pair_in && !out_free;
  assign last_in   = (remaining == LEN_W'(1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      done       <= 1'b0;
      overrun    <= 1'b0;
      drops      <= '0;
      remaining  <= '0;
      m_i_tvalid <= 1'b0;
      m_q_tvalid <= 1'b0;
      m_i_tlast  <= 1'b0;
      m_q_tlast  <= 1'b0;
      m_i_tdata  <= '0;
      m_q_tdata  <= '0;
    end else begin
      // output registers empty as their beats are accepted
      if (m_i_tvalid && m_i_tready) m_i_tvalid <= 1'b0;
      if (m_q_tvalid && m_q_tready) m_q_tvalid <= 1'b0;

      if (start && !busy) begin
        overrun   <= 1'b0;
        drops     <= '0;
        remaining <= pkt_len;
        busy      <= (pkt_len != '0);
        done      <= (pkt_len == '0);
      end else begin
        if (load) begin
          m_i_tdata  <= adc_i_tdata;
          m_q_tdata  <= adc_q_tdata;
          m_i_tlast  <= last_in;
          m_q_tlast  <= last_in;
          m_i_tvalid <= 1'b1;
          m_q_tvalid <= 1'b1;
          remaining  <= remaining - 1'b1;
        end
        if (drop) begin
          overrun <= 1'b1;
          drops   <= drops + 1'b1;
        end
        // the packet is over when nothing is left to take and both
        // output registers are, or are becoming, empty
        if (busy && remaining == '0 && out_free) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // ------------------------------------------------------------------
  // Protocol checks
  // ------------------------------------------------------------------
  // The two ADC streams of one converter tile run in lock step.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    adc_i_tvalid == adc_q_tvalid);
  // An offered output beat stays until taken.
  a_i_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_i_tvalid && !m_i_tready |=> m_i_tvalid && $stable({m_i_tlast, m_i_tdata}));
  a_q_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_q_tvalid && !m_q_tready |=> m_q_tvalid && $stable({m_q_tlast, m_q_tdata}));
  // AXI4-Lite responses stay until taken.
  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axil_bvalid && !s_axil_bready |=> s_axil_bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axil_rvalid && !s_axil_rready |=> s_axil_rvalid && $stable(s_axil_rdata));

endmodule
