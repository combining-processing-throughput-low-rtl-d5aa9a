// acpki: RTIO kernel initiator driven by the CPU's event flag over the AXI ACP
// port of a Zynq-7000.
//
// The kernel CPU does not write the event into PL registers (each AXI GP
// access costs tens of CPU cycles). Instead it writes a 24-byte record into
// its own cacheable memory and executes `sev`, which changes the level of the
// PS evento line. This block watches that level; on every change it
//   1. reads the event (two 64-bit words at BASE+0 and BASE+8) with one
//      2-beat coherent read burst on the ACP port,
//   2. hands the event to the RTIO core interface and waits until it is taken,
//   3. writes the status word (bit 0 done, bit 1 underflow) to BASE+16 with a
//      1-beat coherent write, and waits for the write response.
// The CPU polls BASE+16 in its cache; because the ACP is cache coherent the
// write-back lands in the CPU's cache without a costly invalidation.
//
// Following the paper: evento level changes (not pulses) trigger a
// transaction; the record is fetched and the status written back over the same
// ACP port. This design's choices: the record layout and status encoding
// above; `base_addr` is a static configuration input; evento is taken as
// already synchronised to `clk` (the PS carries it across clock domains); a
// level change seen while a transaction is in flight is remembered once and
// served right after it; ARCACHE/AWCACHE = 4'b1111 and AxUSER[0] = 1 mark the
// accesses coherent.
//
// Timing: the read address is presented the cycle after the change is seen.
// With a memory whose first read beat arrives L cycles after the address
// handshake and whose write response comes B cycles after the data, and an
// RTIO core that accepts at once, the status word is written L + 6 cycles and
// the block is idle again L + B + 6 cycles after the evento change.
module acpki
  import artiq_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  evento,       // PS event flag, in the clk domain
  input  logic [AXI_ADDR_W-1:0] base_addr,    // address of the event record
  // AXI ACP master
  output axi_m2s_t              acp_o,
  input  axi_s2m_t              acp_i,
  // RTIO core interface (CRI)
  output logic                  cri_valid,
  output rtio_event_t           cri_event,
  input  logic                  cri_ready,
  input  cri_status_t           cri_status,
  // observation
  output logic                  busy,
  output logic [31:0]           n_events      // events submitted since reset
);

  localparam logic [3:0] ACP_CACHE = 4'b1111;
  localparam logic [4:0] ACP_USER  = 5'b00001;

  typedef enum logic [2:0] {S_IDLE, S_AR, S_R, S_SUBMIT, S_WRITE, S_B} state_t;
  state_t state;

  logic        evento_q, primed, pending;
  logic        change;
  logic [63:0] word0;
  rtio_event_t ev_q;
  logic        underflow_q;
  logic        aw_done, w_done;

  assign change = primed && (evento != evento_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      evento_q    <= 1'b0;
      primed      <= 1'b0;
      pending     <= 1'b0;
      word0       <= '0;
      ev_q        <= '0;
      underflow_q <= 1'b0;
      aw_done     <= 1'b0;
      w_done      <= 1'b0;
      n_events    <= '0;
    end else begin
      evento_q <= evento;
      primed   <= 1'b1;
      if (change && state != S_IDLE) pending <= 1'b1;

      unique case (state)
        S_IDLE:
          if (change || pending) begin
            pending <= 1'b0;
            state   <= S_AR;
          end
        S_AR:
          if (acp_i.ar_ready) state <= S_R;
        S_R:
          if (acp_i.r_valid) begin
            if (acp_i.r.last) begin
              ev_q  <= event_from_words(word0, acp_i.r.data);
              state <= S_SUBMIT;
            end else begin
              word0 <= acp_i.r.data;
            end
          end
        S_SUBMIT:
          if (cri_ready) begin
            underflow_q <= cri_status.underflow;
            n_events    <= n_events + 1;
            aw_done     <= 1'b0;
            w_done      <= 1'b0;
            state       <= S_WRITE;
          end
        S_WRITE: begin
          if (acp_i.aw_ready) aw_done <= 1'b1;
          if (acp_i.w_ready)  w_done  <= 1'b1;
          if ((aw_done || acp_i.aw_ready) && (w_done || acp_i.w_ready)) state <= S_B;
        end
        S_B:
          if (acp_i.b_valid) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  logic [63:0] status_word;
  always_comb begin
    status_word                   = '0;
    status_word[ST_DONE_BIT]      = 1'b1;
    status_word[ST_UNDERFLOW_BIT] = underflow_q;
  end

  always_comb begin
    acp_o          = '0;
    acp_o.ar_valid = (state == S_AR);
    acp_o.ar       = axi_incr(base_addr, EVENT_WORDS, ACP_CACHE, ACP_USER);
    acp_o.r_ready  = (state == S_R);
    acp_o.aw_valid = (state == S_WRITE) && !aw_done;
    acp_o.aw       = axi_incr(base_addr + AXI_ADDR_W'(EVENT_BYTES), 1, ACP_CACHE, ACP_USER);
    acp_o.w_valid  = (state == S_WRITE) && !w_done;
    acp_o.w.data   = status_word;
    acp_o.w.strb   = '1;
    acp_o.w.last   = 1'b1;
    acp_o.b_ready  = (state == S_B);
  end

  assign cri_valid = (state == S_SUBMIT);
  assign cri_event = ev_q;
  assign busy      = (state != S_IDLE);

  // A presented event must stay until it is taken.
  property p_cri_hold;
    @(posedge clk) disable iff (!rst_n) cri_valid && !cri_ready |=> cri_valid && $stable(cri_event);
  endproperty
  a_cri_hold: assert property (p_cri_hold);

  property p_ar_hold;
    @(posedge clk) disable iff (!rst_n) acp_o.ar_valid && !acp_i.ar_ready |=> acp_o.ar_valid;
  endproperty
  a_ar_hold: assert property (p_ar_hold);

endmodule
