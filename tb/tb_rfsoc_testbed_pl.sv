// tb_rfsoc_testbed_pl: end-to-end loopback test of the programmable logic,
// at the default parameters.
//
// The testbench plays the processor, the DMAs and the converters:
//  - it builds one OFDM-structured frame of 480 complex samples (a 16-sample
//    short training symbol repeated 10 times; a 64-sample long training
//    symbol twice behind a 32-sample cyclic prefix; two data symbols of 64
//    QPSK samples behind a 16-sample cyclic prefix). To keep the test free of
//    an FFT the data are QPSK points placed directly in time, one
//    bit pair per sample; the frame is upsampled by 10 with a zero-order
//    hold, giving 4800 samples scaled to the 16-bit DAC range;
//  - a transmit DMA model streams that frame cyclically into the transmit
//    FIFO, with TLAST on each frame's last sample;
//  - a DAC model accepts beats, stalling now and then; each accepted sample
//    comes back, after a fixed delay, on the I and Q ADC streams (a perfect
//    loopback channel);
//  - over AXI4-Lite the processor asks the packet generator for two frames'
//    worth of samples (9600) and two receive DMA models collect the I and Q
//    streams;
//  - the processor then detects the frame with a delayed autocorrelation of
//    the short preamble (lag 160 = one upsampled short symbol, normalised,
//    threshold 0.75), refines the timing by cross-correlating with the known
//    long preamble, demaps the data samples and counts bit errors.
// A second capture with stalling receive DMAs must report an overrun.
// Checks: captured length and TLAST, captured samples equal to the samples
// sent, detected frame start equal to the true one, zero bit errors, the
// overrun report, and that each mechanism (FIFO full back-pressure, DAC
// stall, frame TLAST from the DMA, receive overrun, packet TLAST, preamble
// detection) occurred at least once.
module tb_rfsoc_testbed_pl;
  import testbed_pkg::*;

  localparam int unsigned N      = TX_FRAME_SAMPLES;   // 4800
  localparam int unsigned CAPLEN = 2 * N;
  localparam int unsigned LOOP_DELAY = 7;
  localparam int unsigned LAG    = STS_LEN * INTERP;   // 160
  localparam int          AMP    = 8000;

  logic clk = 1'b0;
  logic rst_n;
  logic [31:0] s_axis_mm2s_tdata, m_axis_dac_tdata;
  logic s_axis_mm2s_tlast, s_axis_mm2s_tvalid, s_axis_mm2s_tready;
  logic m_axis_dac_tvalid, m_axis_dac_tready;
  logic [10:0] tx_fifo_level;
  logic [15:0] s_axis_adc_i_tdata, s_axis_adc_q_tdata;
  logic s_axis_adc_i_tvalid, s_axis_adc_i_tready, s_axis_adc_q_tvalid, s_axis_adc_q_tready;
  logic [15:0] m_axis_s2mm_i_tdata, m_axis_s2mm_q_tdata;
  logic m_axis_s2mm_i_tlast, m_axis_s2mm_i_tvalid, m_axis_s2mm_i_tready;
  logic m_axis_s2mm_q_tlast, m_axis_s2mm_q_tvalid, m_axis_s2mm_q_tready;
  logic [PG_ADDR_W-1:0] s_axil_awaddr, s_axil_araddr;
  logic s_axil_awvalid, s_axil_awready, s_axil_wvalid, s_axil_wready;
  logic [31:0] s_axil_wdata, s_axil_rdata;
  logic [3:0] s_axil_wstrb;
  logic [1:0] s_axil_bresp, s_axil_rresp;
  logic s_axil_bvalid, s_axil_bready, s_axil_arvalid, s_axil_arready;
  logic s_axil_rvalid, s_axil_rready;
  logic rx_busy, rx_done;

  rfsoc_testbed_pl dut (.*);

  always #1.627 clk = ~clk;   // about 307.2 MHz

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ---------------- frame ----------------
  int fi [FRAME_LEN], fq [FRAME_LEN];          // baseband frame
  logic [1:0] bits [DATA_SYMBOLS*DATA_SYM_LEN];
  int ti [N], tq [N];                          // upsampled frame

  function automatic int qp(input bit b);
    return b ? -AMP : AMP;
  endfunction

  task automatic build_frame();
    int sts_i [STS_LEN], sts_q [STS_LEN], lts_i [LTS_LEN], lts_q [LTS_LEN];
    int d_i [DATA_SYM_LEN], d_q [DATA_SYM_LEN];
    int p;
    for (int k = 0; k < STS_LEN; k++) begin
      sts_i[k] = qp(1'($urandom)); sts_q[k] = qp(1'($urandom));
    end
    for (int k = 0; k < LTS_LEN; k++) begin
      lts_i[k] = qp(1'($urandom)); lts_q[k] = qp(1'($urandom));
    end
    p = 0;
    for (int r = 0; r < STS_REPEAT; r++)
      for (int k = 0; k < STS_LEN; k++) begin fi[p] = sts_i[k]; fq[p] = sts_q[k]; p++; end
    for (int k = LTS_LEN - LTS_CP_LEN; k < LTS_LEN; k++) begin fi[p] = lts_i[k]; fq[p] = lts_q[k]; p++; end
    for (int r = 0; r < 2; r++)
      for (int k = 0; k < LTS_LEN; k++) begin fi[p] = lts_i[k]; fq[p] = lts_q[k]; p++; end
    for (int s = 0; s < DATA_SYMBOLS; s++) begin
      for (int k = 0; k < DATA_SYM_LEN; k++) begin
        bits[s*DATA_SYM_LEN + k] = 2'($urandom);
        d_i[k] = qp(bits[s*DATA_SYM_LEN + k][1]);
        d_q[k] = qp(bits[s*DATA_SYM_LEN + k][0]);
      end
      for (int k = DATA_SYM_LEN - DATA_CP_LEN; k < DATA_SYM_LEN; k++) begin fi[p] = d_i[k]; fq[p] = d_q[k]; p++; end
      for (int k = 0; k < DATA_SYM_LEN; k++) begin fi[p] = d_i[k]; fq[p] = d_q[k]; p++; end
    end
    if (p != FRAME_LEN) $fatal(1, "frame length %0d", p);
    for (int n = 0; n < N; n++) begin ti[n] = fi[n / INTERP]; tq[n] = fq[n / INTERP]; end
  endtask

  // ---------------- mechanism counters ----------------
  int n_fifo_full = 0, n_dac_stall = 0, n_dma_tlast = 0, n_rx_tlast = 0;
  int n_overrun = 0, n_detect = 0;

  // ---------------- transmit DMA model (cyclic) ----------------
  bit tx_run = 0;
  int tx_pos = 0;
  always @(negedge clk) begin
    if (!rst_n) begin
      s_axis_mm2s_tvalid <= 1'b0;
    end else if (!(s_axis_mm2s_tvalid && !s_axis_mm2s_tready)) begin
      // bursts with short gaps, faster on average than the DAC takes samples
      s_axis_mm2s_tvalid <= tx_run && (($urandom % 16) != 0);
      s_axis_mm2s_tdata  <= {16'(tq[tx_pos]), 16'(ti[tx_pos])};
      s_axis_mm2s_tlast  <= (tx_pos == N - 1);
    end
  end
  always @(posedge clk) if (rst_n) begin
    if (s_axis_mm2s_tvalid && s_axis_mm2s_tready) begin
      if (s_axis_mm2s_tlast) n_dma_tlast++;
      check(s_axis_mm2s_tlast == (tx_pos == N - 1), "DMA tlast position");
      tx_pos = (tx_pos + 1) % N;
    end
    if (s_axis_mm2s_tvalid && !s_axis_mm2s_tready) n_fifo_full++;
  end

  // ---------------- DAC model and loopback channel ----------------
  // each accepted DAC beat reappears LOOP_DELAY cycles later on the ADC streams
  logic [32:0] line [LOOP_DELAY];
  int dac_pos = 0;               // frame position of the next DAC sample
  int line_pos [LOOP_DELAY];
  int adc_pos;                   // frame position of the ADC pair on the bus
  always @(negedge clk) m_axis_dac_tready <= rst_n && (($urandom % 8) != 0);
  always @(posedge clk) begin
    if (!rst_n) begin
      for (int d = 0; d < LOOP_DELAY; d++) line[d] <= '0;
    end else begin
      if (m_axis_dac_tvalid && !m_axis_dac_tready) n_dac_stall++;
      for (int d = LOOP_DELAY - 1; d > 0; d--) begin
        line[d] <= line[d-1]; line_pos[d] <= line_pos[d-1];
      end
      line[0]     <= {m_axis_dac_tvalid && m_axis_dac_tready, m_axis_dac_tdata};
      line_pos[0] <= dac_pos;
      if (m_axis_dac_tvalid && m_axis_dac_tready) begin
        check(m_axis_dac_tdata == {16'(tq[dac_pos]), 16'(ti[dac_pos])}, "DAC sample order");
        dac_pos = (dac_pos + 1) % N;
      end
    end
  end
  assign s_axis_adc_i_tvalid = line[LOOP_DELAY-1][32];
  assign s_axis_adc_q_tvalid = line[LOOP_DELAY-1][32];
  assign s_axis_adc_i_tdata  = line[LOOP_DELAY-1][15:0];
  assign s_axis_adc_q_tdata  = line[LOOP_DELAY-1][31:16];
  assign adc_pos             = line_pos[LOOP_DELAY-1];

  // ---------------- receive DMA models ----------------
  int unsigned rx_rdy_pct = 100;
  always @(negedge clk) begin
    m_axis_s2mm_i_tready <= ($urandom % 100) < rx_rdy_pct;
    m_axis_s2mm_q_tready <= ($urandom % 100) < rx_rdy_pct;
  end
  int ci [$], cq [$];
  bit li [$], lq [$];
  always @(posedge clk) begin
    if (m_axis_s2mm_i_tvalid && m_axis_s2mm_i_tready) begin
      ci.push_back(int'($signed(m_axis_s2mm_i_tdata))); li.push_back(m_axis_s2mm_i_tlast);
      if (m_axis_s2mm_i_tlast) n_rx_tlast++;
    end
    if (m_axis_s2mm_q_tvalid && m_axis_s2mm_q_tready) begin
      cq.push_back(int'($signed(m_axis_s2mm_q_tdata))); lq.push_back(m_axis_s2mm_q_tlast);
    end
  end

  // ground truth: frame position of the first captured pair
  longint cyc = 0;
  longint start_take_cyc = -1;
  int first_pos;
  bit first_set;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (s_axil_awvalid && s_axil_awready && s_axil_awaddr == PG_REG_CTRL && !rx_busy) begin
      start_take_cyc = cyc; first_set = 1'b0;
    end
    if (start_take_cyc >= 0 && cyc >= start_take_cyc + 2 && !first_set && s_axis_adc_i_tvalid) begin
      first_pos = adc_pos; first_set = 1'b1;
    end
  end

  // ---------------- AXI4-Lite master (processor) ----------------
  task automatic axil_write(input logic [PG_ADDR_W-1:0] a, input logic [31:0] d);
    @(negedge clk);
    s_axil_awaddr = a; s_axil_awvalid = 1'b1; s_axil_wdata = d; s_axil_wstrb = 4'hF;
    s_axil_wvalid = 1'b1;
    do @(posedge clk); while (!s_axil_awready);
    @(negedge clk) s_axil_awvalid = 1'b0; s_axil_wvalid = 1'b0;
    while (!s_axil_bvalid) @(negedge clk);
    s_axil_bready = 1'b1;
    @(negedge clk) s_axil_bready = 1'b0;
  endtask

  task automatic axil_read(input logic [PG_ADDR_W-1:0] a, output logic [31:0] d);
    @(negedge clk);
    s_axil_araddr = a; s_axil_arvalid = 1'b1;
    do @(posedge clk); while (!s_axil_arready);
    @(negedge clk) s_axil_arvalid = 1'b0;
    while (!s_axil_rvalid) @(negedge clk);
    d = s_axil_rdata;
    s_axil_rready = 1'b1;
    @(negedge clk) s_axil_rready = 1'b0;
  endtask

  task automatic capture(input int len, output logic [31:0] st);
    ci.delete(); cq.delete(); li.delete(); lq.delete();
    axil_write(PG_REG_PKT_LEN, len);
    axil_write(PG_REG_CTRL, 1);
    do axil_read(PG_REG_STATUS, st); while (st[PG_ST_BUSY]);
    repeat (4) @(negedge clk);
  endtask

  // ---------------- receiver processing ----------------
  // normalised delayed autocorrelation over one short-preamble window
  function automatic real sc_metric(input int n);
    real pr = 0, pim = 0, e = 0;
    for (int k = 0; k < 8 * LAG; k++) begin
      real ai = ci[n+k], aq = cq[n+k], bi = ci[n+k+LAG], bq = cq[n+k+LAG];
      pr  += ai * bi + aq * bq;
      pim += aq * bi - ai * bq;
      e   += bi * bi + bq * bq;
    end
    return (e == 0) ? 0.0 : (pr * pr + pim * pim) / (e * e);
  endfunction

  // cross-correlation with the known long preamble (upsampled, 1600 samples)
  function automatic real lts_xcorr(input int n);
    real pr = 0, pim = 0;
    for (int k = 0; k < 2 * LTS_LEN * INTERP; k += INTERP) begin
      int p = STS_LEN * STS_REPEAT * INTERP + LTS_CP_LEN * INTERP + k;
      real ai = ci[n+k], aq = cq[n+k];
      pr  += ai * ti[p] + aq * tq[p];
      pim += aq * ti[p] - ai * tq[p];
    end
    return pr * pr + pim * pim;
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] st, rd;
  int det, best, truth, bit_err, nbits, ok_samples;
  real m, bm, x;
  initial begin
    rst_n = 1'b0;
    s_axil_awvalid = 0; s_axil_wvalid = 0; s_axil_bready = 0; s_axil_arvalid = 0;
    s_axil_rready = 0; s_axil_awaddr = '0; s_axil_araddr = '0; s_axil_wdata = '0;
    s_axil_wstrb = '0;
    build_frame();
    repeat (5) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    tx_run = 1;
    repeat (3000) @(negedge clk);          // let the cyclic transmission settle

    // ---- capture 1: two frames' worth, receive DMAs always ready ----
    capture(CAPLEN, st);
    check(st[PG_ST_DONE] && !st[PG_ST_OVERRUN], "capture 1 done without overrun");
    check(ci.size() == CAPLEN && cq.size() == CAPLEN, $sformatf("capture length %0d", ci.size()));
    for (int j = 0; j < ci.size() && j < cq.size(); j++)
      check(li[j] == (j == CAPLEN - 1) && lq[j] == (j == CAPLEN - 1), "packet tlast");
    // captured samples equal the transmitted ones, starting at first_pos
    ok_samples = 0;
    for (int j = 0; j < ci.size(); j++) begin
      int p;
      p = (first_pos + j) % N;
      if (ci[j] == ti[p] && cq[j] == tq[p]) ok_samples++;
    end
    check(ok_samples == CAPLEN, $sformatf("%0d of %0d samples intact", ok_samples, CAPLEN));
    truth = (N - first_pos) % N;             // captured index of frame sample 0

    // coarse detection: first index where the metric crosses 0.75
    det = -1;
    for (int n = 0; n + 9 * LAG < CAPLEN - N; n += 8) begin
      m = sc_metric(n);
      if (m > 0.75) begin det = n; break; end
    end
    if (det < 0 && truth == 0) det = 0;
    if (det >= 0) n_detect++;
    check(det >= 0, "preamble detected");
    // the first crossing lies at most one short preamble before the true start
    check(det >= 0 && det <= truth + 8 && det + STS_LEN * STS_REPEAT * INTERP >= truth,
          $sformatf("coarse start %0d vs true %0d", det, truth));
    // fine timing from the long preamble
    bm = -1; best = -1;
    for (int n = (det > 400 ? det - 400 : 0); n <= det + 2400 && n + 2 * LTS_LEN * INTERP <= CAPLEN; n++) begin
      x = lts_xcorr(n);
      if (x > bm) begin bm = x; best = n; end
    end
    best = best - (STS_LEN * STS_REPEAT + LTS_CP_LEN) * INTERP;
    check(best == truth, $sformatf("frame start %0d vs true %0d", best, truth));

    // demap the data samples (centre of each held sample) and count bit errors
    bit_err = 0; nbits = 0;
    for (int s = 0; s < DATA_SYMBOLS; s++)
      for (int k = 0; k < DATA_SYM_LEN; k++) begin
        int p;
        logic [1:0] b;
        p = best + ((STS_LEN * STS_REPEAT + LTS_CP_LEN + 2 * LTS_LEN) +
                        s * (DATA_CP_LEN + DATA_SYM_LEN) + DATA_CP_LEN + k) * INTERP + INTERP / 2;
        if (p < 0 || p >= CAPLEN) begin bit_err += 2; nbits += 2; continue; end
        b = {ci[p] < 0, cq[p] < 0};
        bit_err += int'(b[1] != bits[s*DATA_SYM_LEN+k][1]) + int'(b[0] != bits[s*DATA_SYM_LEN+k][0]);
        nbits += 2;
      end
    check(nbits == 256 && bit_err == 0, $sformatf("BER %0d/%0d", bit_err, nbits));
    $display("frame at %0d, detected at %0d, bit errors %0d of %0d", best, det, bit_err, nbits);

    // ---- capture 2: receive DMAs stall, samples are lost ----
    rx_rdy_pct = 50;
    capture(1000, st);
    rx_rdy_pct = 100;
    repeat (4) @(negedge clk);
    axil_read(PG_REG_DROPS, rd);
    if (st[PG_ST_OVERRUN]) n_overrun++;
    check(st[PG_ST_OVERRUN] && rd != 0, "overrun reported");
    check(ci.size() == 1000 && li.size() == 1000 && li[999] && lq[999], "overrun packet length");

    // every mechanism happened
    check(n_fifo_full > 0, "FIFO full back-pressure seen");
    check(n_dac_stall > 0, "DAC stall seen");
    check(n_dma_tlast > 0, "DMA frame tlast seen");
    check(n_rx_tlast >= 2, "packet tlast seen");
    check(n_overrun > 0, "overrun seen");
    check(n_detect > 0, "preamble detection seen");
    $display("fifo_full=%0d dac_stall=%0d dma_tlast=%0d rx_tlast=%0d overrun=%0d detect=%0d drops=%0d",
             n_fifo_full, n_dac_stall, n_dma_tlast, n_rx_tlast, n_overrun, n_detect, rd);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
