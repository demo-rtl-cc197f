// axis_fifo: AXI4-Stream FIFO of the transmit path.
//
// In the testbed the transmit DMA reads the pre-computed, upsampled OFDM frame
// from processor memory and streams it to the DAC of the RF data converter;
// this FIFO sits between the two and absorbs the burstiness of the DMA so that
// the DAC, which takes one complex sample per cycle, is fed evenly. The block
// diagram of the testbed names the FIFO; its depth, width and clocking are not
// given, so this design uses a single-clock FIFO, 1024 entries of one 32-bit
// complex sample (I in bits 15:0, Q in bits 31:16) plus TLAST.
//
// It is first-word-fall-through: m_tdata/m_tlast show the oldest entry while
// m_tvalid is high. A write and a read can happen in the same cycle, so a
// continuous stream passes at one beat per cycle with a latency of one cycle
// from s_tvalid to m_tvalid. s_tready is low only when all DEPTH entries are
// full. level reports the number of stored entries. Reset is synchronous,
// active low, and empties the FIFO.
module axis_fifo #(
  parameter int unsigned DATA_W = 32,
  parameter int unsigned DEPTH  = 1024,     // power of two
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // write side (from the DMA MM2S stream)
  input  logic [DATA_W-1:0] s_tdata,
  input  logic              s_tlast,
  input  logic              s_tvalid,
  output logic              s_tready,
  // read side (towards the DAC stream)
  output logic [DATA_W-1:0] m_tdata,
  output logic              m_tlast,
  output logic              m_tvalid,
  input  logic              m_tready,
  output logic [AW:0]       level
);

  logic [DATA_W:0] mem [DEPTH];   // {tlast, tdata}
  logic [AW:0]     wr_ptr, rd_ptr;  // one extra bit tells full from empty

  logic push, pop;
  assign level    = wr_ptr - rd_ptr;
  assign s_tready = (level != (AW+1)'(DEPTH));
  assign m_tvalid = (wr_ptr != rd_ptr);
  assign push     = s_tvalid && s_tready;
  assign pop      = m_tvalid && m_tready;

  assign {m_tlast, m_tdata} = mem[rd_ptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr[AW-1:0]] <= {s_tlast, s_tdata};
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
    end else begin
      if (push) wr_ptr <= wr_ptr + 1'b1;
      if (pop)  rd_ptr <= rd_ptr + 1'b1;
    end
  end

  // AXI4-Stream rule: once offered, a beat stays offered and unchanged
  // until it is taken.
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      m_tvalid && !m_tready |=> m_tvalid && $stable({m_tlast, m_tdata});
  endproperty
  a_hold: assert property (p_hold);

  initial begin
    assert (DEPTH >= 2 && (DEPTH & (DEPTH - 1)) == 0)
      else $error("axis_fifo: DEPTH must be a power of two");
  end

endmodule
