// rtio_dma: RTIO DMA playback engine. It replays a pre-recorded sequence of
// RTIO events from DDR memory into the RTIO core, faster than the kernel CPU
// could submit them.
//
// The sequence is an array of N events, 16 bytes each (word 0 timestamp,
// word 1 {address, channel, data}, see artiq_pkg), starting at `base_addr`.
// A pulse on `start` plays it once; playing it again is another `start`.
// The engine reads the array over a 64-bit AXI HP port with INCR bursts of up
// to MAX_BURST beats, keeping up to MAX_OUTSTANDING bursts in flight so that
// the memory latency is hidden, and never lets a burst cross a 4 KiB boundary.
// Read beats are paired into events and handed to the RTIO core interface;
// back-pressure from the RTIO core stalls the AXI read channel (r_ready low).
// If the RTIO core reports an underflow, playback stops: no further bursts are
// issued, the data still in flight is drained and discarded, and `underflow`
// stays set, with the offending event's channel and timestamp, until the next
// `start`.
//
// Following the paper: sequential, pipelined bulk reads over an AXI HP port
// and gateware playback of a stored event sequence. This design's choices:
// the record format, the start/length control interface, the burst and
// outstanding limits, and stop-on-underflow.
//
// Timing: with the RTIO core always ready, one event leaves every 2 cycles
// (two 64-bit beats per event) once the first burst has arrived; `busy` falls
// the cycle after the last event is taken.
module rtio_dma
  import artiq_pkg::*;
#(
  parameter int unsigned MAX_BURST       = 16,   // beats per AXI3 burst
  parameter int unsigned MAX_OUTSTANDING = 4     // read bursts in flight
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // control, from the comms/kernel CPU configuration registers
  input  logic                  start,
  input  logic [AXI_ADDR_W-1:0] base_addr,      // 16-byte aligned
  input  logic [23:0]           n_events,
  output logic                  busy,
  output logic                  underflow,
  output logic [CHAN_W-1:0]     err_channel,
  output logic [TS_W-1:0]       err_timestamp,
  output logic [23:0]           events_done,
  // AXI HP master (read only)
  output axi_m2s_t              hp_o,
  input  axi_s2m_t              hp_i,
  // RTIO core interface
  output logic                  cri_valid,
  output rtio_event_t           cri_event,
  input  logic                  cri_ready,
  input  cri_status_t           cri_status
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_t;
  state_t state;

  localparam int unsigned OUT_W = $clog2(MAX_OUTSTANDING + 1);

  logic [AXI_ADDR_W-1:0] ar_addr;
  logic [24:0]           beats_to_req;   // beats not yet requested
  logic [OUT_W-1:0]      outstanding;
  logic                  have_w0;
  logic [63:0]           word0;
  logic                  out_valid;
  rtio_event_t           out_event;
  logic [23:0]           n_q;

  // ---- burst length: remaining beats, capped by MAX_BURST and the 4 KiB page
  logic [9:0]  beats_to_page;
  logic [24:0] burst_beats;
  always_comb begin
    beats_to_page = 10'((13'h1000 - {1'b0, ar_addr[11:0]}) >> 3);
    burst_beats   = beats_to_req;
    if (burst_beats > 25'(MAX_BURST))     burst_beats = 25'(MAX_BURST);
    if (burst_beats > 25'(beats_to_page)) burst_beats = 25'(beats_to_page);
  end

  logic ar_fire, r_fire, r_last_fire, cri_fire;
  assign ar_fire     = hp_o.ar_valid && hp_i.ar_ready;
  assign r_fire      = hp_i.r_valid && hp_o.r_ready;
  assign r_last_fire = r_fire && hp_i.r.last;
  assign cri_fire    = cri_valid && cri_ready;

  always_comb begin
    hp_o          = '0;
    hp_o.ar_valid = (state == S_RUN) && (beats_to_req != 0) && (outstanding < OUT_W'(MAX_OUTSTANDING));
    hp_o.ar       = axi_incr(ar_addr, int'(burst_beats), 4'b0011, 5'b00000);
    unique case (state)
      S_RUN:   hp_o.r_ready = !have_w0 || !out_valid || cri_ready;
      S_DRAIN: hp_o.r_ready = 1'b1;
      default: hp_o.r_ready = 1'b0;
    endcase
  end

  assign cri_valid = out_valid && (state == S_RUN);
  assign cri_event = out_event;
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      ar_addr       <= '0;
      beats_to_req  <= '0;
      outstanding   <= '0;
      have_w0       <= 1'b0;
      word0         <= '0;
      out_valid     <= 1'b0;
      out_event     <= '0;
      n_q           <= '0;
      underflow     <= 1'b0;
      err_channel   <= '0;
      err_timestamp <= '0;
      events_done   <= '0;
    end else begin
      // bursts in flight
      outstanding <= outstanding + OUT_W'(ar_fire) - OUT_W'(r_last_fire);
      if (ar_fire) begin
        ar_addr      <= ar_addr + AXI_ADDR_W'(burst_beats << 3);
        beats_to_req <= beats_to_req - burst_beats;
      end

      unique case (state)
        S_IDLE:
          if (start) begin
            ar_addr      <= base_addr;
            beats_to_req <= {n_events, 1'b0};
            n_q          <= n_events;
            events_done  <= '0;
            underflow    <= 1'b0;
            have_w0      <= 1'b0;
            out_valid    <= 1'b0;
            if (n_events != 0) state <= S_RUN;
          end
        S_RUN: begin
          if (cri_fire) begin
            out_valid   <= 1'b0;
            events_done <= events_done + 1;
            if (cri_status.underflow) begin
              underflow     <= 1'b1;
              err_channel   <= cri_event.channel;
              err_timestamp <= cri_event.timestamp;
              state         <= S_DRAIN;
            end else if (events_done + 1 == n_q) begin
              state <= S_IDLE;
            end
          end
          if (r_fire) begin
            if (!have_w0) begin
              word0   <= hp_i.r.data;
              have_w0 <= 1'b1;
            end else begin
              out_event <= event_from_words(word0, hp_i.r.data);
              out_valid <= 1'b1;
              have_w0   <= 1'b0;
            end
          end
          if (cri_fire && cri_status.underflow) begin
            beats_to_req <= '0;
            out_valid    <= 1'b0;
          end
        end
        S_DRAIN: begin
          beats_to_req <= '0;
          out_valid    <= 1'b0;
          have_w0      <= 1'b0;
          if (outstanding == 0 || (outstanding == 1 && r_last_fire)) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  property p_cri_hold;
    @(posedge clk) disable iff (!rst_n) cri_valid && !cri_ready |=> cri_valid && $stable(cri_event);
  endproperty
  a_cri_hold: assert property (p_cri_hold);

  property p_no_overrun;
    @(posedge clk) disable iff (!rst_n) outstanding <= OUT_W'(MAX_OUTSTANDING);
  endproperty
  a_no_overrun: assert property (p_no_overrun);

endmodule
