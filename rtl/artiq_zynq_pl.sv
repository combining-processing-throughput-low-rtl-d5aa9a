// artiq_zynq_pl: programmable-logic (PL) side of an ARTIQ core device built on
// a Zynq-7000, between the hard processing system (PS) and the RTIO core.
//
// Two initiators submit RTIO events:
//  * acpki       - the kernel CPU's path. The CPU writes an event record to
//                  its memory and executes `sev`; the PL sees the evento level
//                  change, fetches the record over the cache-coherent ACP port,
//                  submits it and writes the status back over ACP.
//  * rtio_dma    - replays recorded event sequences from DDR over AXI HP0.
// cri_arbiter merges them onto the single RTIO core interface (`rtio_*`
// ports; the RTIO core itself is outside this design) and rtio_analyzer
// records every accepted event into a DDR ring buffer over AXI HP1. While the
// analyzer's FIFO is full the arbiter presents nothing, so the analyzer sees
// all events.
//
// All ports are plain signals or packed structs from artiq_pkg. The AXI ports
// are masters towards the PS slave ports. The control inputs (base addresses,
// lengths, start/enable) and status outputs are meant to be driven from
// configuration registers of the PS; how those registers are reached is not
// part of this design. Everything runs in one clock domain, `clk` (the RTIO
// clock, 125 MHz assumed), with an active-low asynchronous reset.
//
// Following the paper: the kernel CPU path over evento and ACP, DMA and
// analyzer on AXI HP ports, and an analyzer that sees the events of both
// initiators. This design's choices: one HP port each for DMA and analyzer,
// round-robin sharing of the RTIO interface, and control through plain ports.
module artiq_zynq_pl
  import artiq_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  // ---- kernel CPU event flag and ACP port
  input  logic                  evento,
  input  logic [AXI_ADDR_W-1:0] ki_base,
  output logic                  ki_busy,
  output logic [31:0]           ki_n_events,
  output axi_m2s_t              acp_o,
  input  axi_s2m_t              acp_i,
  // ---- DMA control and AXI HP0
  input  logic                  dma_start,
  input  logic [AXI_ADDR_W-1:0] dma_base,
  input  logic [23:0]           dma_n_events,
  output logic                  dma_busy,
  output logic                  dma_underflow,
  output logic [CHAN_W-1:0]     dma_err_channel,
  output logic [TS_W-1:0]       dma_err_timestamp,
  output logic [23:0]           dma_events_done,
  output axi_m2s_t              hp0_o,
  input  axi_s2m_t              hp0_i,
  // ---- analyzer control and AXI HP1
  input  logic                  ana_enable,
  input  logic                  ana_clear,
  input  logic [AXI_ADDR_W-1:0] ana_base,
  input  logic [23:0]           ana_buf_events,
  output logic [23:0]           ana_wr_ptr,
  output logic                  ana_wrapped,
  output logic [31:0]           ana_n_stored,
  output logic                  ana_busy,
  output logic                  ana_holding,   // analyzer full, initiators held
  output axi_m2s_t              hp1_o,
  input  axi_s2m_t              hp1_i,
  // ---- RTIO core interface
  output logic                  rtio_valid,
  output rtio_event_t           rtio_event,
  input  logic                  rtio_ready,
  input  cri_status_t           rtio_status
);

  localparam int unsigned N_INIT = 2;   // 0 = kernel initiator, 1 = DMA

  logic        [N_INIT-1:0] req_valid, req_ready;
  rtio_event_t              req_event [N_INIT];
  cri_status_t              req_status;
  logic                     fire, ana_ready;

  assign ana_holding = !ana_ready;

  acpki u_acpki (
    .clk, .rst_n, .evento, .base_addr(ki_base),
    .acp_o, .acp_i,
    .cri_valid(req_valid[0]), .cri_event(req_event[0]),
    .cri_ready(req_ready[0]), .cri_status(req_status),
    .busy(ki_busy), .n_events(ki_n_events));

  rtio_dma u_dma (
    .clk, .rst_n, .start(dma_start), .base_addr(dma_base), .n_events(dma_n_events),
    .busy(dma_busy), .underflow(dma_underflow), .err_channel(dma_err_channel),
    .err_timestamp(dma_err_timestamp), .events_done(dma_events_done),
    .hp_o(hp0_o), .hp_i(hp0_i),
    .cri_valid(req_valid[1]), .cri_event(req_event[1]),
    .cri_ready(req_ready[1]), .cri_status(req_status));

  cri_arbiter #(.N(N_INIT)) u_arb (
    .clk, .rst_n, .hold(ana_holding),
    .req_valid, .req_event, .req_ready, .req_status,
    .out_valid(rtio_valid), .out_event(rtio_event),
    .out_ready(rtio_ready), .out_status(rtio_status),
    .fire, .fire_src());

  rtio_analyzer u_ana (
    .clk, .rst_n, .enable(ana_enable), .clear(ana_clear),
    .base_addr(ana_base), .buf_events(ana_buf_events),
    .wr_ptr(ana_wr_ptr), .wrapped(ana_wrapped), .n_stored(ana_n_stored), .busy(ana_busy),
    .ev_fire(fire), .ev(rtio_event), .ready(ana_ready),
    .hp_o(hp1_o), .hp_i(hp1_i));

endmodule
