// artiq_pkg: types and constants shared by the programmable-logic side of a
// Zynq-7000 ARTIQ core device.
//
// Three things are defined here.
//  * The RTIO event (rtio_event_t) that every initiator hands to the RTIO core:
//    a 64-bit timestamp, a channel number, a register address on that channel
//    and a data word. The widths are this design's choice (24-bit channel,
//    8-bit address, 32-bit data); a TTL event fits in it.
//  * The in-memory form of one event, two 64-bit words, used alike by the
//    ACPKI event record, by recorded DMA sequences and by analyzer entries:
//      word 0 = timestamp[63:0]
//      word 1 = {address[7:0], channel[23:0], data[31:0]}
//  * Packed structs for one 64-bit AXI3 master port (the Zynq ACP and HP
//    ports are AXI3, 64 bits wide). axi_m2s_t carries everything the PL master
//    drives, axi_s2m_t everything the PS slave drives.
// The RTIO interface (CRI) is a valid/ready handshake: an event is taken in a
// cycle where valid and ready are both high, and the core's verdict on that
// event (cri_status_t) is valid in that same cycle.
package artiq_pkg;

  // ------------------------------------------------------------------ RTIO
  localparam int unsigned TS_W   = 64;
  localparam int unsigned CHAN_W = 24;
  localparam int unsigned ADDR_W = 8;
  localparam int unsigned DATA_W = 32;

  typedef struct packed {
    logic [TS_W-1:0]   timestamp;
    logic [CHAN_W-1:0] channel;
    logic [ADDR_W-1:0] address;
    logic [DATA_W-1:0] data;
  } rtio_event_t;

  // Verdict of the RTIO core on one accepted event.
  typedef struct packed {
    logic underflow;   // timestamp already in the past when submitted
  } cri_status_t;

  // Status word written back by the ACPKI: bit 0 = done, bit 1 = underflow.
  localparam int unsigned ST_DONE_BIT      = 0;
  localparam int unsigned ST_UNDERFLOW_BIT = 1;

  // ------------------------------------------------------------------ memory image of an event
  localparam int unsigned EVENT_WORDS = 2;     // 64-bit words per event
  localparam int unsigned EVENT_BYTES = 16;

  function automatic logic [63:0] event_word1(rtio_event_t e);
    return {e.address, e.channel, e.data};
  endfunction

  function automatic rtio_event_t event_from_words(logic [63:0] w0, logic [63:0] w1);
    rtio_event_t e;
    e.timestamp = w0;
    e.address   = w1[63:56];
    e.channel   = w1[55:32];
    e.data      = w1[31:0];
    return e;
  endfunction

  // ------------------------------------------------------------------ AXI3, 64-bit
  localparam int unsigned AXI_ID_W   = 3;
  localparam int unsigned AXI_ADDR_W = 32;
  localparam int unsigned AXI_DATA_W = 64;

  localparam logic [1:0] AXI_BURST_INCR = 2'b01;
  localparam logic [2:0] AXI_SIZE_8B    = 3'd3;
  localparam logic [1:0] AXI_RESP_OKAY  = 2'b00;

  typedef struct packed {
    logic [AXI_ID_W-1:0]   id;
    logic [AXI_ADDR_W-1:0] addr;
    logic [3:0]            len;     // beats - 1 (AXI3: up to 16 beats)
    logic [2:0]            size;
    logic [1:0]            burst;
    logic [3:0]            cache;
    logic [4:0]            user;    // ACP: bit 0 requests a coherent access
  } axi_ax_t;

  typedef struct packed {
    logic [AXI_ID_W-1:0]     id;
    logic [AXI_DATA_W-1:0]   data;
    logic [AXI_DATA_W/8-1:0] strb;
    logic                    last;
  } axi_w_t;

  typedef struct packed {
    logic [AXI_ID_W-1:0]   id;
    logic [AXI_DATA_W-1:0] data;
    logic [1:0]            resp;
    logic                  last;
  } axi_r_t;

  typedef struct packed {
    logic [AXI_ID_W-1:0] id;
    logic [1:0]          resp;
  } axi_b_t;

  typedef struct packed {
    logic    ar_valid;
    axi_ax_t ar;
    logic    r_ready;
    logic    aw_valid;
    axi_ax_t aw;
    logic    w_valid;
    axi_w_t  w;
    logic    b_ready;
  } axi_m2s_t;

  typedef struct packed {
    logic   ar_ready;
    logic   r_valid;
    axi_r_t r;
    logic   aw_ready;
    logic   w_ready;
    logic   b_valid;
    axi_b_t b;
  } axi_s2m_t;

  // An address channel request for an INCR burst of 64-bit beats.
  function automatic axi_ax_t axi_incr(logic [AXI_ADDR_W-1:0] addr, int unsigned beats,
                                       logic [3:0] cache, logic [4:0] user);
    axi_ax_t a;
    a.id    = '0;
    a.addr  = addr;
    a.len   = 4'(beats - 1);
    a.size  = AXI_SIZE_8B;
    a.burst = AXI_BURST_INCR;
    a.cache = cache;
    a.user  = user;
    return a;
  endfunction

endpackage
