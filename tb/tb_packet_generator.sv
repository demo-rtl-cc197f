// tb_packet_generator: self-checking testbench of the receive packet generator.
//
// The ADC streams carry a running pair index k (I = k, Q = k XOR 16'h5A5A),
// so every forwarded beat says which ADC pair it was. Checks:
//  - register read-back (PKT_LEN with byte strobes, STATUS, DROPS);
//  - a packet with the ADC valid every cycle and both DMAs ready: exactly
//    PKT_LEN consecutive pairs, starting with the first pair that arrives two
//    clock edges after the CTRL write is taken, TLAST only on the last beat,
//    one beat per cycle (the packet spans PKT_LEN cycles on the outputs);
//  - a frame-sized packet (4800 pairs) with gaps in the ADC stream;
//  - a packet with both DMAs stalling at random and independently: the I and
//    Q outputs stay paired, indices strictly increase, and DROPS equals the
//    number of pairs skipped, with the overrun bit set;
//  - a start written while busy is ignored; PKT_LEN = 0 completes at once.
module tb_packet_generator;
  import testbed_pkg::*;

  localparam int unsigned SW = 16;

  logic clk = 1'b0;
  logic rst_n;
  logic [SW-1:0] adc_i_tdata, adc_q_tdata, m_i_tdata, m_q_tdata;
  logic adc_i_tvalid, adc_q_tvalid, adc_i_tready, adc_q_tready;
  logic m_i_tlast, m_i_tvalid, m_i_tready, m_q_tlast, m_q_tvalid, m_q_tready;
  logic [PG_ADDR_W-1:0] s_axil_awaddr, s_axil_araddr;
  logic s_axil_awvalid, s_axil_awready, s_axil_wvalid, s_axil_wready;
  logic [31:0] s_axil_wdata, s_axil_rdata;
  logic [3:0] s_axil_wstrb;
  logic [1:0] s_axil_bresp, s_axil_rresp;
  logic s_axil_bvalid, s_axil_bready, s_axil_arvalid, s_axil_arready;
  logic s_axil_rvalid, s_axil_rready;
  logic busy, done;

  packet_generator dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ---------------- ADC source ----------------
  int unsigned adc_gap_pct = 0;   // chance of an idle cycle
  logic [SW-1:0] k = '0;          // next pair index
  always @(negedge clk) begin
    logic v;
    v = rst_n && (($urandom % 100) >= adc_gap_pct);
    adc_i_tvalid <= v; adc_q_tvalid <= v;
    adc_i_tdata  <= k; adc_q_tdata  <= k ^ 16'h5A5A;
  end
  always @(posedge clk) if (adc_i_tvalid) k <= k + 1'b1;

  // ---------------- DMA sinks ----------------
  int unsigned rdy_pct = 100;
  always @(negedge clk) begin
    m_i_tready <= ($urandom % 100) < rdy_pct;
    m_q_tready <= ($urandom % 100) < rdy_pct;
  end

  logic [SW:0] qi [$], qq [$];    // {tlast, data} accepted on each side
  longint cyc = 0;
  longint first_out_cyc, last_out_cyc;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (m_i_tvalid && m_i_tready) begin
      if (qi.size() == 0) first_out_cyc = cyc;
      last_out_cyc = cyc;
      qi.push_back({m_i_tlast, m_i_tdata});
    end
    if (m_q_tvalid && m_q_tready) qq.push_back({m_q_tlast, m_q_tdata});
  end

  // index of the first pair that can be captured after a start
  longint start_take_cyc = -1;
  logic [SW-1:0] exp_first;
  bit exp_first_set;
  always @(posedge clk) begin
    if (s_axil_awvalid && s_axil_awready && s_axil_awaddr == PG_REG_CTRL && s_axil_wdata[0] && !busy) begin
      start_take_cyc = cyc;
      exp_first_set  = 1'b0;
    end
    if (start_take_cyc >= 0 && cyc >= start_take_cyc + 2 && !exp_first_set && adc_i_tvalid) begin
      exp_first     = adc_i_tdata;
      exp_first_set = 1'b1;
    end
  end

  // ---------------- AXI4-Lite master ----------------
  task automatic axil_write(input logic [PG_ADDR_W-1:0] a, input logic [31:0] d,
                            input logic [3:0] strb = 4'hF);
    @(negedge clk);
    s_axil_awaddr = a; s_axil_awvalid = 1'b1;
    s_axil_wdata = d; s_axil_wstrb = strb; s_axil_wvalid = 1'b1;
    do @(posedge clk); while (!s_axil_awready);
    @(negedge clk) s_axil_awvalid = 1'b0; s_axil_wvalid = 1'b0;
    while (!s_axil_bvalid) @(negedge clk);
    check(s_axil_bresp == AXI_RESP_OKAY, "bresp");
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

  task automatic wait_done();
    logic [31:0] st;
    do axil_read(PG_REG_STATUS, st); while (st[PG_ST_BUSY]);
    check(st[PG_ST_DONE], "STATUS.done after packet");
  endtask

  // check a finished packet of n pairs; returns the pairs skipped
  task automatic check_packet(input int n, input bit contiguous, output int skipped);
    logic [SW:0] bi, bq;
    logic [SW-1:0] prev;
    skipped = 0;
    check(qi.size() == n && qq.size() == n, $sformatf("packet length %0d/%0d vs %0d", qi.size(), qq.size(), n));
    for (int j = 0; j < n && j < qi.size() && j < qq.size(); j++) begin
      bi = qi[j]; bq = qq[j];
      check(bq[SW-1:0] == (bi[SW-1:0] ^ 16'h5A5A), "I/Q stay paired");
      check(bi[SW] == (j == n - 1) && bq[SW] == (j == n - 1), "tlast on last beat only");
      if (j == 0) check(bi[SW-1:0] == exp_first, "first captured pair");
      else begin
        if (contiguous) check(bi[SW-1:0] == prev + 1'b1, "consecutive pairs");
        else check(bi[SW-1:0] != prev && (bi[SW-1:0] - prev) < 16'h8000, "increasing pairs");
        skipped += int'(16'(bi[SW-1:0] - prev)) - 1;
      end
      prev = bi[SW-1:0];
    end
    qi.delete(); qq.delete();
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] rd;
  int skipped, total_drops;
  initial begin
    rst_n = 1'b0;
    s_axil_awvalid = 0; s_axil_wvalid = 0; s_axil_bready = 0; s_axil_arvalid = 0;
    s_axil_rready = 0; s_axil_awaddr = '0; s_axil_araddr = '0; s_axil_wdata = '0;
    s_axil_wstrb = '0;
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    check(adc_i_tready && adc_q_tready, "ADC streams never stalled");

    // register read-back
    axil_read(PG_REG_STATUS, rd);
    check(rd == 32'd0, "STATUS idle after reset");
    axil_write(PG_REG_PKT_LEN, 32'h1234_5678);
    axil_write(PG_REG_PKT_LEN, 32'h0000_AB00, 4'b0010);
    axil_read(PG_REG_PKT_LEN, rd);
    check(rd == 32'h1234_AB78, "PKT_LEN with byte strobes");

    // 1) continuous ADC, DMAs always ready: one beat per cycle
    adc_gap_pct = 0; rdy_pct = 100;
    axil_write(PG_REG_PKT_LEN, 100);
    axil_write(PG_REG_CTRL, 1);
    wait_done();
    check(last_out_cyc - first_out_cyc == 99, "100 beats in 100 cycles");
    check_packet(100, 1'b1, skipped);
    axil_read(PG_REG_DROPS, rd);
    check(rd == 0, "no drops");

    // 2) one upsampled frame, ADC stream with gaps; start while busy ignored
    adc_gap_pct = 30;
    axil_write(PG_REG_PKT_LEN, TX_FRAME_SAMPLES);
    axil_write(PG_REG_CTRL, 1);
    repeat (50) @(negedge clk);
    check(busy, "busy during capture");
    axil_write(PG_REG_CTRL, 1);          // ignored
    wait_done();
    check_packet(TX_FRAME_SAMPLES, 1'b1, skipped);
    axil_read(PG_REG_STATUS, rd);
    check(!rd[PG_ST_OVERRUN], "no overrun with ready DMAs");

    // 3) DMAs stall: pairs are dropped and counted
    adc_gap_pct = 0; rdy_pct = 60;
    axil_write(PG_REG_PKT_LEN, 300);
    axil_write(PG_REG_CTRL, 1);
    wait_done();
    rdy_pct = 100;
    repeat (3) @(negedge clk);
    check_packet(300, 1'b0, skipped);
    axil_read(PG_REG_DROPS, rd);
    total_drops = int'(rd);
    check(total_drops == skipped && skipped > 0, $sformatf("DROPS %0d vs skipped %0d", total_drops, skipped));
    axil_read(PG_REG_STATUS, rd);
    check(rd[PG_ST_OVERRUN] && rd[PG_ST_DONE] && !rd[PG_ST_BUSY], "overrun flagged");

    // 4) next packet clears the overrun state
    axil_write(PG_REG_PKT_LEN, 16);
    axil_write(PG_REG_CTRL, 1);
    wait_done();
    check_packet(16, 1'b1, skipped);
    axil_read(PG_REG_STATUS, rd);
    check(!rd[PG_ST_OVERRUN], "overrun cleared by start");
    axil_read(PG_REG_DROPS, rd);
    check(rd == 0, "drops cleared by start");

    // 5) PKT_LEN = 0
    axil_write(PG_REG_PKT_LEN, 0);
    axil_write(PG_REG_CTRL, 1);
    wait_done();
    repeat (5) @(negedge clk);
    check(qi.size() == 0 && qq.size() == 0, "empty packet sends nothing");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
