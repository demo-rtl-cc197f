// tb_axis_fifo: self-checking testbench of the transmit FIFO.
//
// A queue models the FIFO. Stimulus is applied on the falling clock edge and
// the handshakes are evaluated on the rising edge. Phases: (1) fill the FIFO
// with the reader stalled until s_tready drops, checking that it drops after
// exactly DEPTH beats; (2) drain it and check order, data and TLAST; (3) check
// the one-cycle latency through the empty FIFO; (4) random valid/ready traffic
// with the level, ready and valid flags checked against the model every cycle.
module tb_axis_fifo;
  localparam int unsigned DATA_W = 32;
  localparam int unsigned DEPTH  = 1024;
  localparam int unsigned AW     = $clog2(DEPTH);

  logic clk = 1'b0;
  logic rst_n;
  logic [DATA_W-1:0] s_tdata, m_tdata;
  logic s_tlast, s_tvalid, s_tready, m_tlast, m_tvalid, m_tready;
  logic [AW:0] level;

  int checks = 0, failures = 0;
  int full_seen = 0;
  logic [DATA_W:0] model [$];

  axis_fifo dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // scoreboard on every rising edge
  always @(posedge clk) if (rst_n) begin
    check(level == ($bits(level))'(model.size()), "level");
    check(s_tready == (model.size() < DEPTH), "s_tready");
    check(m_tvalid == (model.size() != 0), "m_tvalid");
    if (model.size() == DEPTH) full_seen++;
    if (m_tvalid && m_tready) begin
      logic [DATA_W:0] exp;
      exp = model.pop_front();
      check({m_tlast, m_tdata} == exp, "data/tlast");
    end
    if (s_tvalid && s_tready) model.push_back({s_tlast, s_tdata});
  end

  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int pushed;
  initial begin
    rst_n = 1'b0; s_tvalid = 1'b0; s_tdata = '0; s_tlast = 1'b0; m_tready = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // (1) fill with the reader stalled
    pushed = 0;
    while (1) begin
      @(negedge clk);
      if (!s_tready) break;
      s_tvalid = 1'b1; s_tdata = $urandom; s_tlast = (pushed % 7 == 6);
      @(posedge clk);
      if (s_tready) pushed++;
    end
    s_tvalid = 1'b0;
    check(pushed == DEPTH, "full after DEPTH beats");

    // (2) drain
    m_tready = 1'b1;
    while (m_tvalid || model.size() != 0) @(negedge clk);
    m_tready = 1'b0;

    // (3) latency: a beat written into the empty FIFO is offered one cycle later
    @(negedge clk) s_tvalid = 1'b1; s_tdata = 32'hCAFE_0001; s_tlast = 1'b1;
    @(negedge clk) s_tvalid = 1'b0;
    check(m_tvalid && m_tdata == 32'hCAFE_0001 && m_tlast, "one-cycle latency");
    m_tready = 1'b1;
    @(negedge clk) m_tready = 1'b0;

    // (4) random traffic
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      if (!(s_tvalid && !s_tready)) begin   // keep an offered beat unchanged
        s_tvalid = ($urandom % 4) != 0;
        s_tdata  = $urandom;
        s_tlast  = ($urandom % 16) == 0;
      end
      // long reader stalls now and then so the FIFO fills up again
      m_tready = (n % 4000 < 1500) ? 1'b0 : (($urandom % 3) != 0);
    end
    @(negedge clk) s_tvalid = 1'b0; m_tready = 1'b1;
    repeat (DEPTH + 10) @(negedge clk);
    check(model.size() == 0 && !m_tvalid, "drained at end");
    check(full_seen > 1, "FIFO was full more than once");

    $display("full cycles seen: %0d", full_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
