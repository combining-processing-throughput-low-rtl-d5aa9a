// tb_rtio_analyzer: self-checking testbench of the RTIO analyzer.
//
// The testbench feeds events into the analyzer's tap as an RTIO core would
// accept them (only while `ready` is high) and reads the ring buffer back from
// the behavioural memory. It checks: with a fast memory and one event every 2
// cycles (DMA rate) the analyzer never holds the initiators; with a stalling
// memory it does hold them and still loses nothing; after 130 events in a
// 20-entry buffer every slot holds the latest event of its index modulo 20,
// `wrapped` is set and the pointer is 10; no burst crosses a 4 KiB page or the
// buffer end; `clear` restarts at slot 0.
module tb_rtio_analyzer;
  import artiq_pkg::*;

  localparam logic [31:0] BASE = 32'h0000_3F00;    // 16 entries before a page edge
  localparam int unsigned BUF  = 20;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  logic        enable = 1'b1, clear = 1'b0;
  logic [23:0] wr_ptr;
  logic        wrapped, busy, ready;
  logic [31:0] n_stored;
  logic        ev_fire = 1'b0;
  rtio_event_t ev = '0;
  axi_m2s_t    m2s, m2s_g;
  axi_s2m_t    s2m, s2m_g;
  logic        g = 1'b1;                 // memory write-channel gate

  rtio_analyzer dut (
    .clk, .rst_n, .enable, .clear, .base_addr(BASE), .buf_events(24'(BUF)),
    .wr_ptr, .wrapped, .n_stored, .busy, .ev_fire, .ev, .ready,
    .hp_o(m2s), .hp_i(s2m_g));
  axi_mem_model #(.WORDS(4096), .LAT(8), .BLAT(6)) u_mem (
    .clk, .rst_n, .m_i(m2s_g), .s_o(s2m));

  always_comb begin
    m2s_g          = m2s;
    m2s_g.aw_valid = m2s.aw_valid && g;
    m2s_g.w_valid  = m2s.w_valid && g;
    s2m_g          = s2m;
    s2m_g.aw_ready = s2m.aw_ready && g;
    s2m_g.w_ready  = s2m.w_ready && g;
  end

  int checks = 0, failures = 0;
  int held = 0, bad_bursts = 0, n_sent = 0;
  bit sending_done = 1'b0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic rtio_event_t ref_event(int i);
    rtio_event_t e;
    e.timestamp = 64'h0000_0100_0000_0000 + 64'(i) * 24;
    e.channel   = 24'(i * 3);
    e.address   = 8'(255 - i);
    e.data      = 32'hC0DE_0000 + 32'(i);
    return e;
  endfunction

  // offer event i every `gap` cycles; it is taken only while ready is high
  task automatic send(int i, int gap);
    @(posedge clk); #1;
    ev = ref_event(i);
    ev_fire = 1'b1;
    while (!ready) begin
      ev_fire = 1'b0;
      held++;
      @(posedge clk); #1;
      ev_fire = 1'b1;
    end
    @(posedge clk); #1;
    ev_fire = 1'b0;
    n_sent++;
    repeat (gap - 2) @(posedge clk);
  endtask

  task automatic drain();
    while (busy) begin @(posedge clk); #1; end
  endtask

  always @(posedge clk) if (rst_n && m2s_g.aw_valid && s2m.aw_ready) begin
    if ((32'(m2s.aw.addr[11:0]) + ((32'(m2s.aw.len) + 1) << 3)) > 32'h1000) bad_bursts++;
    if (m2s.aw.addr + ((32'(m2s.aw.len) + 1) << 3) > BASE + BUF * 16) bad_bursts++;
  end

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ok, latest;
    repeat (4) @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (4) @(posedge clk);

    // 30 events at DMA rate, fast memory: never held
    for (int i = 0; i < 30; i++) send(i, 2);
    check(held == 0, $sformatf("no hold at one event per 2 cycles (%0d held cycles)", held));
    // 100 events back to back with a memory that stalls: held, nothing lost
    fork
      begin
        for (int i = 30; i < 130; i++) send(i, 1);
        sending_done = 1'b1;
      end
      begin
        while (!sending_done) begin @(posedge clk); #1 g = ($urandom % 4) == 0; end
        g = 1'b1;
      end
    join
    g = 1'b1;
    drain();
    check(held > 0, $sformatf("initiators held while the FIFO is full (%0d cycles)", held));
    check(n_stored == 32'd130, $sformatf("%0d events stored, want 130", n_stored));
    check(wrapped, "ring buffer wrapped");
    check(wr_ptr == 24'd10, $sformatf("write pointer %0d, want 10", wr_ptr));
    ok = 1;
    for (int s = 0; s < int'(BUF); s++) begin
      latest = (s < 10) ? 120 + s : 100 + s;
      if (u_mem.mem[BASE / 8 + 2 * s] != ref_event(latest).timestamp ||
          u_mem.mem[BASE / 8 + 2 * s + 1] != event_word1(ref_event(latest))) ok = 0;
    end
    check(ok == 1, "buffer holds the latest 20 events in ring order");
    check(bad_bursts == 0, $sformatf("%0d bursts cross a page or the buffer end", bad_bursts));

    // disabled: nothing captured
    enable = 1'b0;
    send(99, 2);
    repeat (20) @(posedge clk);
    check(n_stored == 32'd130, "nothing captured while disabled");

    // clear restarts at slot 0
    #1 enable = 1'b1; clear = 1'b1;
    @(posedge clk); #1 clear = 1'b0;
    check(wr_ptr == 24'd0 && !wrapped, "clear resets the pointer");
    for (int i = 100; i < 105; i++) send(i, 3);
    drain();
    ok = 1;
    for (int s = 0; s < 5; s++)
      if (u_mem.mem[BASE / 8 + 2 * s] != ref_event(100 + s).timestamp) ok = 0;
    check(ok == 1 && wr_ptr == 24'd5, "entries after clear");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
