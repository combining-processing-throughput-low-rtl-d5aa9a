// rtio_analyzer: RTIO analyzer. It records every event that the RTIO core
// accepts, whichever initiator (kernel CPU or DMA) submitted it, into a ring
// buffer in DDR memory, from where software later turns it into a waveform
// file for debugging.
//
// Each accepted event (`ev_fire` high) is pushed into a FIFO of FIFO_DEPTH
// entries. A writer drains the FIFO over a 64-bit AXI HP port: it issues one
// INCR write burst for up to MAX_BURST_EVENTS events (two beats per event:
// timestamp, then {address, channel, data}, the same image as a DMA record),
// streams the beats, and moves on without waiting for the write response; up
// to MAX_OUTSTANDING responses may be pending. A burst never runs past the end
// of the buffer or across a 4 KiB page. The buffer holds `buf_events` events
// from `base_addr` (4 KiB aligned); when the write pointer reaches its end it
// wraps to the start and `wrapped` is set, so the buffer always holds the most
// recent events. `clear` (while idle) restarts at the beginning.
//
// So that no event is lost, `ready` goes low while the FIFO is full; the
// arbiter then holds every initiator (the analyzer stores all events, as in
// the paper). Following the paper: capture of all events from both initiators
// into central memory over an AXI HP port, with sequential bursts. This
// design's choices: the entry format, ring-buffer control, back-pressure rather
// than dropping events, and all sizes.
//
// Timing: an event is in the FIFO the cycle after it is accepted; the writer
// needs 2 + 2n cycles per burst of n events when the port does not stall, a
// little over 2 cycles per event (2.25 at n = 8), which keeps up with DMA
// playback well inside the 4-cycle (32 ns) interval the paper reports.
module rtio_analyzer
  import artiq_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH       = 64,
  parameter int unsigned MAX_BURST_EVENTS = 8,
  parameter int unsigned MAX_OUTSTANDING  = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // control
  input  logic                  enable,
  input  logic                  clear,
  input  logic [AXI_ADDR_W-1:0] base_addr,
  input  logic [23:0]           buf_events,
  output logic [23:0]           wr_ptr,        // next entry to be written
  output logic                  wrapped,
  output logic [31:0]           n_stored,      // events written to memory
  output logic                  busy,
  // event tap on the RTIO core interface
  input  logic                  ev_fire,
  input  rtio_event_t           ev,
  output logic                  ready,
  // AXI HP master (write only)
  output axi_m2s_t              hp_o,
  input  axi_s2m_t              hp_i
);

  localparam int unsigned CW    = $clog2(FIFO_DEPTH) + 1;
  localparam int unsigned OUT_W = $clog2(MAX_OUTSTANDING + 1);

  // ---- FIFO
  logic              f_push, f_pop, f_full, f_empty;
  logic [CW-1:0]     f_count;
  rtio_event_t       f_head;

  assign f_push = enable && ev_fire;
  assign ready  = !enable || !f_full;

  sync_fifo #(.WIDTH($bits(rtio_event_t)), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .push(f_push), .wdata(ev), .pop(f_pop), .rdata(f_head),
    .full(f_full), .empty(f_empty), .count(f_count));

  // ---- writer
  typedef enum logic [1:0] {W_IDLE, W_ADDR, W_DATA} wstate_t;
  wstate_t wstate;

  logic [OUT_W-1:0]      b_pending;
  logic [4:0]            beats_left;     // beats of the current burst still to send
  logic                  beat_odd;
  logic [23:0]           n_burst;
  logic [AXI_ADDR_W-1:0] wr_addr;

  // events in the next burst
  always_comb begin
    logic [23:0] to_end, to_page;
    to_end  = buf_events - wr_ptr;
    to_page = 24'((24'h1000 - 24'(wr_addr[11:0])) >> 4);
    n_burst = 24'(f_count);
    if (n_burst > 24'(MAX_BURST_EVENTS)) n_burst = 24'(MAX_BURST_EVENTS);
    if (n_burst > to_end)                n_burst = to_end;
    if (n_burst > to_page)               n_burst = to_page;
  end
  assign wr_addr = base_addr + AXI_ADDR_W'({wr_ptr, 4'b0000});

  logic aw_fire, w_fire, b_fire;
  assign aw_fire = hp_o.aw_valid && hp_i.aw_ready;
  assign w_fire  = hp_o.w_valid && hp_i.w_ready;
  assign b_fire  = hp_i.b_valid && hp_o.b_ready;
  assign f_pop   = w_fire && beat_odd;

  logic [3:0] aw_len;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) aw_len <= '0;
    else if (wstate == W_IDLE) aw_len <= 4'((32'(n_burst) << 1) - 1);
  end

  always_comb begin
    hp_o          = '0;
    hp_o.aw_valid = (wstate == W_ADDR);
    hp_o.aw       = axi_incr(wr_addr, 1, 4'b0011, 5'b00000);
    hp_o.aw.len   = aw_len;
    hp_o.w_valid  = (wstate == W_DATA);
    hp_o.w.data   = beat_odd ? event_word1(f_head) : f_head.timestamp;
    hp_o.w.strb   = '1;
    hp_o.w.last   = (beats_left == 5'd1);
    hp_o.b_ready  = 1'b1;
  end

  assign busy = !f_empty || (wstate != W_IDLE) || (b_pending != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wstate     <= W_IDLE;
      b_pending  <= '0;
      beats_left <= '0;
      beat_odd   <= 1'b0;
      wr_ptr     <= '0;
      wrapped    <= 1'b0;
      n_stored   <= '0;
    end else begin
      b_pending <= b_pending + OUT_W'(aw_fire) - OUT_W'(b_fire);
      if (f_pop) n_stored <= n_stored + 1;

      unique case (wstate)
        W_IDLE:
          if (clear) begin
            wr_ptr  <= '0;
            wrapped <= 1'b0;
          end else if (n_burst != 0 && b_pending < OUT_W'(MAX_OUTSTANDING)) begin
            beats_left <= 5'(n_burst << 1);
            wstate     <= W_ADDR;
          end
        W_ADDR:
          if (aw_fire) begin
            beat_odd <= 1'b0;
            if (wr_ptr + 24'(beats_left >> 1) >= buf_events) begin
              wr_ptr  <= '0;
              wrapped <= 1'b1;
            end else begin
              wr_ptr <= wr_ptr + 24'(beats_left >> 1);
            end
            wstate <= W_DATA;
          end
        W_DATA:
          if (w_fire) begin
            beat_odd   <= !beat_odd;
            beats_left <= beats_left - 1'b1;
            if (beats_left == 5'd1) wstate <= W_IDLE;
          end
        default: wstate <= W_IDLE;
      endcase
    end
  end

  property p_aw_hold;
    @(posedge clk) disable iff (!rst_n) hp_o.aw_valid && !hp_i.aw_ready |=> hp_o.aw_valid && $stable(hp_o.aw);
  endproperty
  a_aw_hold: assert property (p_aw_hold);

  // a beat is never sent for an event that is not in the FIFO
  property p_w_has_data;
    @(posedge clk) disable iff (!rst_n) hp_o.w_valid |-> !f_empty;
  endproperty
  a_w_has_data: assert property (p_w_has_data);

endmodule
