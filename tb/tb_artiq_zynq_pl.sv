// tb_artiq_zynq_pl: end-to-end testbench of the PL design at its default
// parameters.
//
// Behavioural PS memories sit on the ACP, HP0 and HP1 ports and a behavioural
// RTIO core on the event interface. The testbench plays the kernel CPU
// (records + evento changes) and the firmware (DMA and analyzer control) and
// runs, in order:
//   1. kernel-CPU submissions on rising and falling evento edges, one late;
//   2. a 64-event DMA playback with the analyzer running: the event interval
//      must stay at or below 4 cycles (32 ns at 125 MHz);
//   3. DMA playback and kernel submissions at the same time (arbitration),
//      with a second evento change while a transaction runs;
//   4. a 200-event DMA playback into a stalling analyzer port (the analyzer holds the
//      initiators, nothing is lost);
//   5. a DMA playback with a late event (underflow stop).
// It then checks that every event the RTIO core took is in the analyzer ring
// buffer, in order, and that the buffer wrapped. Each mechanism is counted
// and one that never happened is a failure.
module tb_artiq_zynq_pl;
  import artiq_pkg::*;

  localparam logic [31:0] KI_BASE  = 32'h0000_0100;
  localparam logic [31:0] DMA_BASE = 32'h0000_2000;
  localparam logic [31:0] ANA_BASE = 32'h0000_4000;
  localparam int unsigned ANA_BUF  = 96;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  logic        evento = 1'b0;
  logic        ki_busy;
  logic [31:0] ki_n_events;
  axi_m2s_t    acp_m2s, hp0_m2s, hp1_m2s, hp1_m2s_g;
  axi_s2m_t    acp_s2m, hp0_s2m, hp1_s2m, hp1_s2m_g;
  logic        dma_start = 1'b0;
  logic [23:0] dma_n_events = '0;
  logic        dma_busy, dma_underflow;
  logic [CHAN_W-1:0] dma_err_channel;
  logic [TS_W-1:0]   dma_err_timestamp;
  logic [23:0] dma_events_done;
  logic        ana_enable = 1'b0, ana_clear = 1'b0;
  logic [23:0] ana_wr_ptr;
  logic        ana_wrapped, ana_busy, ana_holding;
  logic [31:0] ana_n_stored;
  logic        rtio_valid, rtio_ready;
  rtio_event_t rtio_event;
  cri_status_t rtio_status;
  logic [63:0] now;
  logic        g1 = 1'b1;   // HP1 write-channel gate

  artiq_zynq_pl dut (
    .clk, .rst_n,
    .evento, .ki_base(KI_BASE), .ki_busy, .ki_n_events, .acp_o(acp_m2s), .acp_i(acp_s2m),
    .dma_start, .dma_base(DMA_BASE), .dma_n_events, .dma_busy, .dma_underflow,
    .dma_err_channel, .dma_err_timestamp, .dma_events_done, .hp0_o(hp0_m2s), .hp0_i(hp0_s2m),
    .ana_enable, .ana_clear, .ana_base(ANA_BASE), .ana_buf_events(24'(ANA_BUF)),
    .ana_wr_ptr, .ana_wrapped, .ana_n_stored, .ana_busy, .ana_holding,
    .hp1_o(hp1_m2s), .hp1_i(hp1_s2m_g),
    .rtio_valid, .rtio_event, .rtio_ready, .rtio_status);

  axi_mem_model #(.WORDS(1024), .LAT(8),  .BLAT(4)) u_acp (.clk, .rst_n, .m_i(acp_m2s), .s_o(acp_s2m));
  axi_mem_model #(.WORDS(2048), .LAT(12), .BLAT(6)) u_hp0 (.clk, .rst_n, .m_i(hp0_m2s), .s_o(hp0_s2m));
  axi_mem_model #(.WORDS(4096), .LAT(12), .BLAT(6)) u_hp1 (.clk, .rst_n, .m_i(hp1_m2s_g), .s_o(hp1_s2m));
  rtio_core_model u_core (.clk, .rst_n, .valid(rtio_valid), .ev(rtio_event), .ready(rtio_ready),
                          .status(rtio_status), .now);

  always_comb begin
    hp1_m2s_g          = hp1_m2s;
    hp1_m2s_g.aw_valid = hp1_m2s.aw_valid && g1;
    hp1_m2s_g.w_valid  = hp1_m2s.w_valid && g1;
    hp1_s2m_g          = hp1_s2m;
    hp1_s2m_g.aw_ready = hp1_s2m.aw_ready && g1;
    hp1_s2m_g.w_ready  = hp1_s2m.w_ready && g1;
  end

  int checks = 0, failures = 0;
  // mechanism counters
  int m_evento_rise = 0, m_evento_fall = 0, m_ki_pending = 0, m_ki_underflow = 0;
  int m_dma_play = 0, m_dma_stop = 0, m_conflict = 0, m_hold = 0, m_wrap = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (ana_holding) m_hold++;
  end

  function automatic rtio_event_t dma_event(int run, int i);
    rtio_event_t e;
    e.timestamp = 64'd50_000_000 * 64'(run + 1) + 64'(i) * 32;
    e.channel   = 24'h000010 + 24'(i % 4);
    e.address   = 8'h00;
    e.data      = 32'(i & 1);              // TTL high / low
    return e;
  endfunction

  function automatic rtio_event_t ki_event(int i);
    rtio_event_t e;
    e.timestamp = 64'd900_000_000 + 64'(i) * 1000;
    e.channel   = 24'h000020;
    e.address   = 8'h01;
    e.data      = 32'hBEEF_0000 + 32'(i);
    return e;
  endfunction

  task automatic ki_record(rtio_event_t e);
    u_acp.mem[KI_BASE / 8]     = e.timestamp;
    u_acp.mem[KI_BASE / 8 + 1] = event_word1(e);
    u_acp.mem[KI_BASE / 8 + 2] = 64'd0;
  endtask

  // kernel CPU: write the record, sev, poll the status word
  task automatic ki_submit(rtio_event_t e, output logic [63:0] status);
    ki_record(e);
    @(posedge clk); #1;
    if (evento) m_evento_fall++; else m_evento_rise++;
    evento = ~evento;
    status = '0;
    for (int k = 0; k < 500 && !status[ST_DONE_BIT]; k++) begin
      @(posedge clk); #1;
      status = u_acp.mem[KI_BASE / 8 + 2];
    end
    while (ki_busy) begin @(posedge clk); #1; end
  endtask

  task automatic dma_load(int run, int n, int late);
    for (int i = 0; i < n; i++) begin
      rtio_event_t e = dma_event(run, i);
      if (i == late) e.timestamp = 64'd5;
      u_hp0.mem[DMA_BASE / 8 + 2 * i]     = e.timestamp;
      u_hp0.mem[DMA_BASE / 8 + 2 * i + 1] = event_word1(e);
    end
  endtask

  task automatic dma_go(int n);
    @(posedge clk); #1;
    dma_n_events = 24'(n);
    dma_start = 1'b1;
    @(posedge clk); #1;
    dma_start = 1'b0;
  endtask

  task automatic dma_wait();
    while (dma_busy) begin @(posedge clk); #1; end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] st;
    int l0, max_gap, ok, n_ki_ok, total, first;
    rtio_event_t late;
    repeat (4) @(posedge clk);
    #1 rst_n = 1'b1;
    ana_enable = 1'b1;
    repeat (4) @(posedge clk);

    // ---- 1. kernel CPU submissions
    for (int i = 0; i < 3; i++) begin
      automatic rtio_event_t e = ki_event(i);
      if (i == 2) e.timestamp = 64'd0;
      l0 = int'(u_core.n_log);
      ki_submit(e, st);
      check(int'(u_core.n_log) == l0 + 1 && u_core.log_ev[l0] == e, $sformatf("kernel event %0d delivered", i));
      check(st[ST_DONE_BIT] && st[ST_UNDERFLOW_BIT] == (i == 2), $sformatf("kernel event %0d status %0h", i, st));
      if (st[ST_UNDERFLOW_BIT]) m_ki_underflow++;
    end

    // ---- 2. DMA at full rate with the analyzer running
    dma_load(0, 64, -1);
    l0 = int'(u_core.n_log);
    dma_go(64);
    dma_wait();
    m_dma_play++;
    ok = (int'(u_core.n_log) == l0 + 64);
    max_gap = 0;
    for (int i = 0; i < 64 && ok; i++) begin
      if (u_core.log_ev[l0 + i] != dma_event(0, i)) ok = 0;
      if (i > 0 && int'(u_core.log_cyc[l0 + i] - u_core.log_cyc[l0 + i - 1]) > max_gap)
        max_gap = int'(u_core.log_cyc[l0 + i] - u_core.log_cyc[l0 + i - 1]);
    end
    check(ok == 1, "DMA sequence delivered");
    check(max_gap <= 4, $sformatf("DMA event interval up to %0d cycles with the analyzer on, want <= 4 (32 ns)", max_gap));
    $display("DMA: 64 events in %0d cycles, largest interval %0d cycles",
             int'(u_core.log_cyc[l0 + 63] - u_core.log_cyc[l0]) + 1, max_gap);

    // ---- 3. DMA and kernel CPU together
    dma_load(1, 64, -1);
    l0 = int'(u_core.n_log);
    n_ki_ok = 0;
    fork
      begin dma_go(64); dma_wait(); m_dma_play++; end
      begin
        for (int i = 3; i < 6; i++) begin
          ki_submit(ki_event(i), st);
          if (st[ST_DONE_BIT] && !st[ST_UNDERFLOW_BIT]) n_ki_ok++;
        end
        // a second evento change while a transaction runs
        ki_record(ki_event(6));
        @(posedge clk); #1 evento = ~evento;
        repeat (3) @(posedge clk);
        if (ki_busy) m_ki_pending++;
        #1 evento = ~evento;
        repeat (100) @(posedge clk);
      end
    join
    check(n_ki_ok == 3, "kernel submissions during DMA succeed");
    check(int'(u_core.n_log) == l0 + 64 + 5, $sformatf("%0d events during concurrent phase, want 69", int'(u_core.n_log) - l0));
    ok = 1; first = 0;
    for (int j = l0; j < int'(u_core.n_log); j++)
      if (u_core.log_ev[j].channel != 24'h20) begin
        if (u_core.log_ev[j] != dma_event(1, first)) ok = 0;
        first++;
      end else if (first > 0 && first < 64) begin
        m_conflict++;    // a kernel event served in the middle of the DMA stream
      end
    check(ok == 1 && first == 64, "DMA order kept while interleaved");

    // ---- 4. analyzer back-pressure
    dma_load(2, 200, -1);
    l0 = int'(u_core.n_log);
    fork
      begin dma_go(200); dma_wait(); m_dma_play++; end
      begin
        while (!dma_busy) @(posedge clk);
        while (dma_busy) begin @(posedge clk); #1 g1 = ($urandom % 8) == 0; end
        g1 = 1'b1;
      end
    join
    ok = (int'(u_core.n_log) == l0 + 200);
    for (int i = 0; i < 200 && ok; i++) if (u_core.log_ev[l0 + i] != dma_event(2, i)) ok = 0;
    check(ok == 1, "DMA complete under analyzer back-pressure");

    // ---- 5. underflow stops DMA
    dma_load(3, 32, 20);
    l0 = int'(u_core.n_log);
    dma_go(32);
    dma_wait();
    if (dma_underflow) m_dma_stop++;
    late = dma_event(3, 20);
    check(dma_underflow && dma_err_channel == late.channel && dma_err_timestamp == 64'd5, "DMA underflow reported");
    check(int'(u_core.n_log) == l0 + 21, "DMA stopped at the late event");

    // ---- analyzer content against what the RTIO core took
    while (ana_busy) begin @(posedge clk); #1; end
    total = int'(u_core.n_log);
    if (ana_wrapped) m_wrap++;
    check(ana_n_stored == 32'(total), $sformatf("analyzer stored %0d of %0d events", ana_n_stored, total));
    check(ana_wr_ptr == 24'(total % int'(ANA_BUF)), "analyzer write pointer");
    ok = 1;
    for (int j = total - int'(ANA_BUF); j < total; j++) begin
      automatic int s = j % int'(ANA_BUF);
      if (u_hp1.mem[ANA_BASE / 8 + 2 * s] != u_core.log_ev[j].timestamp ||
          u_hp1.mem[ANA_BASE / 8 + 2 * s + 1] != event_word1(u_core.log_ev[j])) ok = 0;
    end
    check(ok == 1, "analyzer ring holds the last events in order");

    // ---- every mechanism happened
    $display("mechanisms: evento_rise=%0d evento_fall=%0d ki_pending=%0d ki_underflow=%0d dma_play=%0d dma_stop=%0d conflict=%0d hold=%0d wrap=%0d",
             m_evento_rise, m_evento_fall, m_ki_pending, m_ki_underflow, m_dma_play, m_dma_stop, m_conflict, m_hold, m_wrap);
    check(m_evento_rise > 0, "mechanism: evento rising edge");
    check(m_evento_fall > 0, "mechanism: evento falling edge");
    check(m_ki_pending > 0, "mechanism: evento change during a transaction");
    check(m_ki_underflow > 0, "mechanism: kernel underflow status");
    check(m_dma_play > 0, "mechanism: DMA playback");
    check(m_dma_stop > 0, "mechanism: DMA underflow stop");
    check(m_conflict > 0, "mechanism: arbitration between initiators");
    check(m_hold > 0, "mechanism: analyzer holds initiators");
    check(m_wrap > 0, "mechanism: analyzer ring wrap");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
