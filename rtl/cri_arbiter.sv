// cri_arbiter: merges the event streams of several RTIO initiators (here the
// ACPKI kernel initiator and the DMA engine) onto the one RTIO core interface,
// and lets the RTIO analyzer see, and if need be hold, every accepted event.
//
// Each initiator presents an event with `req_valid` and keeps it until
// `req_ready`. The arbiter grants one initiator per cycle in round-robin order
// (the initiator after the last one served has priority). Once a granted event
// is presented and not taken, the grant is kept, so the RTIO core sees a stable
// event. The core's verdict `out_status` goes back to all initiators; only
// the one whose `req_ready` is high uses it. While `hold` is high (the
// analyzer FIFO is full) nothing is presented, so no event reaches the RTIO
// core without being recorded. `fire` marks the cycle an event is taken.
//
// The paper says only that events from both the kernel CPU and the DMA reach
// the RTIO core and the analyzer; the arbitration policy is this design's
// choice. The path from inputs to outputs is purely combinational.
module cri_arbiter
  import artiq_pkg::*;
#(
  parameter int unsigned N = 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  hold,
  // initiators
  input  logic        [N-1:0]   req_valid,
  input  rtio_event_t           req_event [N],
  output logic        [N-1:0]   req_ready,
  output cri_status_t           req_status,
  // RTIO core
  output logic                  out_valid,
  output rtio_event_t           out_event,
  input  logic                  out_ready,
  input  cri_status_t           out_status,
  output logic                  fire,
  output logic [$clog2(N)-1:0]  fire_src
);

  localparam int unsigned SW = $clog2(N);

  logic [SW-1:0] prio;       // first initiator to consider
  logic [SW-1:0] lock_src;
  logic          locked;
  logic [SW-1:0] gnt;
  logic          any;

  // first valid request at or after `prio`, in circular order
  function automatic logic [SW:0] rr_pick(logic [N-1:0] v, logic [SW-1:0] p);
    logic [2*N-1:0] dbl;
    logic [SW:0]    pick;
    dbl  = {v, v} >> p;
    pick = '0;                              // bit SW = found
    for (int k = int'(N) - 1; k >= 0; k--)
      if (dbl[k]) pick = {1'b1, SW'((int'(p) + k) % int'(N))};
    return pick;
  endfunction

  logic [SW:0] pick;
  assign pick = rr_pick(req_valid, prio);
  assign gnt  = locked ? lock_src : pick[SW-1:0];
  assign any  = locked || pick[SW];

  assign out_valid  = any && !hold;
  assign out_event  = req_event[gnt];
  assign fire       = out_valid && out_ready;
  assign fire_src   = gnt;
  assign req_status = out_status;

  always_comb begin
    req_ready = '0;
    req_ready[gnt] = fire;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prio     <= '0;
      locked   <= 1'b0;
      lock_src <= '0;
    end else begin
      locked   <= out_valid && !out_ready;
      lock_src <= gnt;
      if (fire) prio <= (gnt == SW'(N - 1)) ? '0 : gnt + 1'b1;
    end
  end

  property p_out_hold;
    @(posedge clk) disable iff (!rst_n) out_valid && !out_ready && !hold |=> hold || (out_valid && $stable(out_event));
  endproperty
  a_out_hold: assert property (p_out_hold);

  property p_one_ready;
    @(posedge clk) disable iff (!rst_n) $onehot0(req_ready);
  endproperty
  a_one_ready: assert property (p_one_ready);

endmodule
