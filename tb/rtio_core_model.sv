// rtio_core_model: behavioural model (not synthesizable) of the event input of
// an ARTIQ RTIO core, for simulation only.
//
// The core keeps a time counter `now` in nanoseconds that advances by
// NS_PER_CYCLE every clock cycle (8 ns at a 125 MHz RTIO clock). It accepts an
// event in a cycle where valid and ready are high. ready is low on a
// pseudo-random STALL percent of cycles, which models a busy output FIFO. An
// event whose timestamp is earlier than `now` is reported as an underflow in
// the same cycle. Every accepted event is appended to `log_ev` together with
// the cycle it was taken in (`log_cyc`), for the testbench to check.
module rtio_core_model
  import artiq_pkg::*;
#(
  parameter int unsigned STALL        = 0,
  parameter int unsigned NS_PER_CYCLE = 8,
  parameter int unsigned LOG_DEPTH    = 4096
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        valid,
  input  rtio_event_t ev,
  output logic        ready,
  output cri_status_t status,
  output logic [63:0] now
);

  rtio_event_t     log_ev  [LOG_DEPTH];
  longint unsigned log_cyc [LOG_DEPTH];
  int unsigned     n_log;
  int unsigned     n_underflow;
  longint unsigned cyc;

  assign status.underflow = ev.timestamp < now;

  always @(posedge clk) begin
    if (!rst_n) begin
      now         <= '0;
      ready       <= 1'b0;
      n_log       = 0;
      n_underflow = 0;
      cyc         = 0;
    end else begin
      cyc++;
      now   <= now + 64'(NS_PER_CYCLE);
      ready <= (($urandom % 100) >= STALL);
      if (valid && ready) begin
        if (n_log < LOG_DEPTH) begin
          log_ev[n_log]  = ev;
          log_cyc[n_log] = cyc;
        end
        n_log++;
        if (status.underflow) n_underflow++;
      end
    end
  end

endmodule
