// tb_acpki: self-checking testbench of the ACPKI kernel initiator.
//
// A behavioural PS memory and RTIO core surround the block. The testbench
// plays the kernel CPU: it writes an event record into memory, changes the
// evento level and polls the status word. It checks the event the RTIO core
// received field by field, the status bits (done, and underflow for an event
// in the past), the cycle count from the evento change to the status write and
// to the end of the transaction (LAT + 6 and LAT + BLAT + 6 cycles, from the
// AXI timing of the model), that both a rising and a falling evento edge start
// a transaction, that a second change during a transaction is served, and the
// sustained interval when the CPU submits back to back.
module tb_acpki;
  import artiq_pkg::*;

  localparam int unsigned LAT  = 8;
  localparam int unsigned BLAT = 4;
  localparam logic [31:0] BASE = 32'h0000_1000;
  localparam int unsigned WI   = BASE / 8;

  logic clk = 1'b0, rst_n = 1'b0, evento = 1'b0;
  always #4 clk = ~clk;

  axi_m2s_t    acp_m2s;
  axi_s2m_t    acp_s2m;
  logic        cri_valid, cri_ready, busy;
  rtio_event_t cri_event;
  cri_status_t cri_status;
  logic [63:0] now;
  logic [31:0] n_events;

  acpki dut (
    .clk, .rst_n, .evento, .base_addr(BASE),
    .acp_o(acp_m2s), .acp_i(acp_s2m),
    .cri_valid, .cri_event, .cri_ready, .cri_status,
    .busy, .n_events
  );
  axi_mem_model #(.WORDS(1024), .LAT(LAT), .BLAT(BLAT)) u_mem (
    .clk, .rst_n, .m_i(acp_m2s), .s_o(acp_s2m));
  rtio_core_model u_core (
    .clk, .rst_n, .valid(cri_valid), .ev(cri_event), .ready(cri_ready),
    .status(cri_status), .now);

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic put_record(rtio_event_t e);
    u_mem.mem[WI]     = e.timestamp;
    u_mem.mem[WI + 1] = {e.address, e.channel, e.data};
    u_mem.mem[WI + 2] = 64'd0;
  endtask

  // One kernel-CPU submission; returns cycles to status write and to idle.
  task automatic submit(rtio_event_t e, output int t_status, output int t_idle);
    int k;
    put_record(e);
    @(posedge clk); #1;
    evento = ~evento;
    k = 0; t_status = -1; t_idle = -1;
    while ((t_status < 0 || t_idle < 0) && k < 200) begin
      @(posedge clk); #1;
      k++;
      if (t_status < 0 && u_mem.mem[WI + 2][ST_DONE_BIT]) t_status = k;
      if (t_status >= 0 && t_idle < 0 && !busy) t_idle = k;
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rtio_event_t e;
    int ts, ti, n0;
    repeat (4) @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (4) @(posedge clk);

    // four submissions, alternating evento edges, one of them late
    for (int i = 0; i < 4; i++) begin
      e.timestamp = (i == 2) ? 64'd0 : 64'd1_000_000 + 64'(i) * 100;
      e.channel   = 24'h000100 + 24'(i);
      e.address   = 8'(i * 3);
      e.data      = 32'hA5A5_0000 | 32'(i);
      submit(e, ts, ti);
      check(u_core.n_log == i + 1, $sformatf("event %0d reached the RTIO core", i));
      check(u_core.log_ev[i] == e, $sformatf("event %0d fields", i));
      check(ts == int'(LAT) + 6, $sformatf("event %0d status after %0d cycles, want %0d", i, ts, LAT + 6));
      check(ti == int'(LAT + BLAT) + 6, $sformatf("event %0d idle after %0d cycles, want %0d", i, ti, LAT + BLAT + 6));
      check(u_mem.mem[WI + 2][ST_UNDERFLOW_BIT] == (i == 2), $sformatf("event %0d underflow bit", i));
      check(n_events == 32'(i + 1), "event counter");
    end

    // a second evento change while the first transaction runs is not lost
    n0 = int'(u_core.n_log);
    e.timestamp = 64'd5_000_000; e.channel = 24'h42; e.address = 8'h1; e.data = 32'h1;
    put_record(e);
    @(posedge clk); #1 evento = ~evento;
    repeat (5) @(posedge clk);
    #1 evento = ~evento;
    repeat (80) @(posedge clk);
    check(int'(u_core.n_log) == n0 + 2, "change during a transaction is served afterwards");
    check(!busy, "idle after the queued transaction");

    // sustained submission: the CPU submits the next event as soon as it
    // sees `done`; the PL-side interval must fit the 47 cycles (376 ns at
    // 125 MHz) measured end to end on the real system
    n0 = int'(u_core.n_log);
    for (int i = 0; i < 20; i++) begin
      e.timestamp = 64'd9_000_000 + 64'(i); e.channel = 24'h7; e.address = 8'h0; e.data = 32'(i);
      put_record(e);
      @(posedge clk); #1 evento = ~evento;
      while (!u_mem.mem[WI + 2][ST_DONE_BIT]) begin @(posedge clk); #1; end
    end
    check(int'(u_core.n_log) == n0 + 20, "sustained: 20 events submitted");
    begin
      int span;
      span = int'(u_core.log_cyc[n0 + 19] - u_core.log_cyc[n0]);
      $display("sustained ACPKI interval: %0d cycles per event", span / 19);
      check(span <= 19 * 47, $sformatf("sustained interval %0d cycles per event, want <= 47", span / 19));
    end

    // no change, no transaction
    repeat (50) @(posedge clk);
    check(int'(u_core.n_log) == n0 + 20 && !busy, "no spurious transaction");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
