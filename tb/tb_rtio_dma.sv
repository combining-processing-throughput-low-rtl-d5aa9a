// tb_rtio_dma: self-checking testbench of the RTIO DMA playback engine.
//
// A sequence of events is written into the behavioural memory, placed so that
// it straddles a 4 KiB page. The testbench checks that every event reaches the
// RTIO core in order and unchanged, that no AXI burst is longer than 16 beats
// or crosses a page, that playback can be repeated, that with an always-ready
// RTIO core an event leaves at most every 4 cycles (32 ns at 125 MHz) and on
// average every 2 cycles, that RTIO back-pressure loses nothing, and that an
// underflow stops playback, drains the read channel and reports the event.
module tb_rtio_dma;
  import artiq_pkg::*;

  localparam logic [31:0] BASE = 32'h0000_0FC0;   // 4 events before a page edge
  localparam int unsigned N    = 40;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  logic        start = 1'b0;
  logic [23:0] n_events = 24'(N);
  logic        busy, underflow;
  logic [CHAN_W-1:0] err_channel;
  logic [TS_W-1:0]   err_timestamp;
  logic [23:0] events_done;
  axi_m2s_t    hp_m2s;
  axi_s2m_t    hp_s2m;
  logic        cri_valid, cri_ready, core_ready;
  rtio_event_t cri_event;
  cri_status_t cri_status;
  logic [63:0] now;
  logic        gate = 1'b1;

  rtio_dma dut (
    .clk, .rst_n, .start, .base_addr(BASE), .n_events, .busy, .underflow,
    .err_channel, .err_timestamp, .events_done,
    .hp_o(hp_m2s), .hp_i(hp_s2m),
    .cri_valid, .cri_event, .cri_ready, .cri_status);
  axi_mem_model #(.WORDS(2048), .LAT(8), .BLAT(4)) u_mem (
    .clk, .rst_n, .m_i(hp_m2s), .s_o(hp_s2m));
  rtio_core_model u_core (
    .clk, .rst_n, .valid(cri_valid && gate), .ev(cri_event), .ready(core_ready),
    .status(cri_status), .now);
  assign cri_ready = core_ready && gate;

  int checks = 0, failures = 0;
  int bad_bursts = 0, n_bursts = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic rtio_event_t ref_event(int i, int run);
    rtio_event_t e;
    e.timestamp = 64'd10_000_000 + 64'(run) * 64'd1_000_000 + 64'(i) * 32;
    e.channel   = 24'(i % 5);
    e.address   = 8'(i);
    e.data      = 32'(i * 7 + run);
    return e;
  endfunction

  task automatic load(int run, int late);
    for (int i = 0; i < int'(N); i++) begin
      rtio_event_t e = ref_event(i, run);
      if (i == late) e.timestamp = 64'd0;
      u_mem.mem[BASE / 8 + 2 * i]     = e.timestamp;
      u_mem.mem[BASE / 8 + 2 * i + 1] = event_word1(e);
    end
  endtask

  task automatic play();
    @(posedge clk); #1 start = 1'b1;
    @(posedge clk); #1 start = 1'b0;
    while (busy) begin @(posedge clk); #1; end
  endtask

  // AXI read-address monitor
  always @(posedge clk) if (rst_n && hp_m2s.ar_valid && hp_s2m.ar_ready) begin
    n_bursts++;
    if ((32'(hp_m2s.ar.addr[11:0]) + ((32'(hp_m2s.ar.len) + 1) << 3)) > 32'h1000) bad_bursts++;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int base_log, max_gap, ok;
    repeat (4) @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (4) @(posedge clk);

    // two plain playbacks of two different sequences, RTIO always ready
    for (int run = 0; run < 2; run++) begin
      load(run, -1);
      base_log = int'(u_core.n_log);
      play();
      check(int'(u_core.n_log) - base_log == int'(N), $sformatf("run %0d: %0d events played", run, int'(u_core.n_log) - base_log));
      ok = 1; max_gap = 0;
      for (int i = 0; i < int'(N); i++) begin
        if (u_core.log_ev[base_log + i] != ref_event(i, run)) ok = 0;
        if (i > 0 && int'(u_core.log_cyc[base_log + i] - u_core.log_cyc[base_log + i - 1]) > max_gap)
          max_gap = int'(u_core.log_cyc[base_log + i] - u_core.log_cyc[base_log + i - 1]);
      end
      check(ok == 1, $sformatf("run %0d: events in order and unchanged", run));
      check(max_gap <= 4, $sformatf("run %0d: largest interval %0d cycles, want <= 4 (32 ns)", run, max_gap));
      check(int'(u_core.log_cyc[base_log + N - 1] - u_core.log_cyc[base_log]) <= 2 * (int'(N) - 1) + 4,
            "average interval of 2 cycles");
      check(!underflow && events_done == 24'(N), "no underflow, all events counted");
    end
    check(bad_bursts == 0 && n_bursts > 0, $sformatf("%0d bursts, %0d cross a 4 KiB page", n_bursts, bad_bursts));

    // RTIO back-pressure
    load(2, -1);
    base_log = int'(u_core.n_log);
    fork
      play();
      begin
        while (!busy) @(posedge clk);
        while (busy) begin @(posedge clk); #1 gate = ($urandom % 3) != 0; end
        gate = 1'b1;
      end
    join
    ok = (int'(u_core.n_log) - base_log == int'(N));
    for (int i = 0; i < int'(N) && ok; i++) if (u_core.log_ev[base_log + i] != ref_event(i, 2)) ok = 0;
    check(ok == 1, "back-pressure: all events in order");

    // underflow at event 13 stops the playback
    load(3, 13);
    base_log = int'(u_core.n_log);
    play();
    check(underflow, "underflow reported");
    check(int'(u_core.n_log) - base_log == 14, $sformatf("playback stopped after the late event (%0d played)", int'(u_core.n_log) - base_log));
    check(err_channel == ref_event(13, 3).channel && err_timestamp == 64'd0, "underflow event reported");
    check(u_mem.rq.size() == 0 && !busy, "read channel drained");
    repeat (30) @(posedge clk);
    check(int'(u_core.n_log) - base_log == 14, "nothing after the stop");

    // and a following playback works again
    load(4, -1);
    base_log = int'(u_core.n_log);
    play();
    check(!underflow && int'(u_core.n_log) - base_log == int'(N), "playback after an underflow");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
