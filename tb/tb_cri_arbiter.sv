// tb_cri_arbiter: self-checking testbench of the RTIO initiator arbiter.
//
// Two initiator processes (standing in for the kernel initiator and the DMA)
// each submit a list of events under the valid/ready rule, while the RTIO
// core model stalls at random and `hold` (analyzer full) is raised at random.
// The testbench checks that every event of each initiator reaches the core
// once and in order, that each initiator receives the underflow verdict of its
// own event, that nothing is presented while `hold` is high, and that with
// both initiators busy and the core always ready the grants alternate.
module tb_cri_arbiter;
  import artiq_pkg::*;

  localparam int unsigned M = 40;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  logic [1:0]  req_valid = '0;
  rtio_event_t req_event [2];
  logic [1:0]  req_ready;
  cri_status_t req_status;
  logic        out_valid, out_ready, core_ready, fire, fire_src;
  rtio_event_t out_event;
  cri_status_t out_status;
  logic        hold = 1'b0, gate = 1'b1;
  logic [63:0] now;

  cri_arbiter dut (
    .clk, .rst_n, .hold, .req_valid, .req_event, .req_ready, .req_status,
    .out_valid, .out_event, .out_ready, .out_status, .fire, .fire_src);
  rtio_core_model u_core (
    .clk, .rst_n, .valid(out_valid && gate), .ev(out_event), .ready(core_ready),
    .status(out_status), .now);
  assign out_ready = core_ready && gate;

  int checks = 0, failures = 0;
  int bad_status = 0, shown_in_hold = 0, alternations = 0, same = 0;
  logic last_src;
  bit   have_last = 1'b0, random_phase = 1'b1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic rtio_event_t ref_event(int src, int i);
    rtio_event_t e;
    // every 7th event of initiator 1 is late
    e.timestamp = (src == 1 && i % 7 == 3) ? 64'd0 : 64'd1_000_000_000 + 64'(i);
    e.channel   = 24'(src);
    e.address   = 8'(i);
    e.data      = 32'(src * 1000 + i);
    return e;
  endfunction

  // Signals are changed 1 time unit after a clock edge and sampled 2 units
  // after it, so that every process sees settled values.
  task automatic initiator(int src, int first, int count);
    for (int i = first; i < first + count; i++) begin
      req_event[src] = ref_event(src, i);
      req_valid[src] = 1'b1;
      #1;
      while (!req_ready[src]) begin @(posedge clk); #2; end
      if (req_status.underflow != (ref_event(src, i).timestamp == 0)) bad_status++;
      @(posedge clk); #1;
      req_valid[src] = 1'b0;
      if (random_phase && ($urandom % 2) == 0) begin @(posedge clk); #1; end
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (hold && out_valid) shown_in_hold++;
    if (fire && !random_phase) begin
      if (have_last) begin
        if (fire_src != last_src) alternations++; else same++;
      end
      last_src  = fire_src;
      have_last = 1'b1;
    end
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ok, k0, k1;
    req_event[0] = '0; req_event[1] = '0;
    repeat (4) @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (4) @(posedge clk);
    #1;

    // random stalls and holds
    fork
      initiator(0, 0, int'(M));
      initiator(1, 0, int'(M));
      begin
        repeat (400) begin
          @(posedge clk); #1;
          gate = ($urandom % 3) != 0;
          hold = ($urandom % 5) == 0;
        end
      end
    join
    gate = 1'b1; hold = 1'b0;
    check(u_core.n_log == 2 * M, $sformatf("%0d events reached the core, want %0d", u_core.n_log, 2 * M));
    ok = 1; k0 = 0; k1 = 0;
    for (int j = 0; j < int'(u_core.n_log); j++) begin
      if (u_core.log_ev[j].channel == 0) begin
        if (u_core.log_ev[j] != ref_event(0, k0)) ok = 0;
        k0++;
      end else begin
        if (u_core.log_ev[j] != ref_event(1, k1)) ok = 0;
        k1++;
      end
    end
    check(ok == 1 && k0 == int'(M) && k1 == int'(M), "each initiator's events in order");
    check(bad_status == 0, $sformatf("%0d wrong underflow verdicts", bad_status));
    check(shown_in_hold == 0, "nothing presented while held");
    check(u_core.n_underflow > 0, "underflows were exercised");

    // both initiators back to back, core always ready: grants alternate
    random_phase = 1'b0;
    fork
      initiator(0, 100, 20);
      initiator(1, 100, 20);
    join
    check(alternations >= 30 && same <= 2, $sformatf("round robin: %0d alternations, %0d repeats", alternations, same));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
