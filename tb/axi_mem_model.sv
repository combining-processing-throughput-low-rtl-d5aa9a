// axi_mem_model: behavioural model (not synthesizable) of a Zynq PS AXI slave
// port in front of DDR memory, for simulation only.
//
// It holds WORDS 64-bit words, addressed by byte address / 8 modulo WORDS.
// Reads: up to 4 read bursts may be outstanding; the first beat of a burst is
// returned LAT cycles after its address handshake, then one beat per cycle
// while r_ready is high. Writes: write bursts are queued, W beats are stored in
// order, and the write response comes BLAT cycles after the last beat. With
// STALL > 0 the model drops ar_ready/aw_ready/w_ready on a pseudo-random
// STALL percent of cycles to exercise back-pressure. All outputs are
// registered. Counters n_rbeats / n_wbeats count transferred beats.
module axi_mem_model
  import artiq_pkg::*;
#(
  parameter int unsigned WORDS = 8192,
  parameter int unsigned LAT   = 8,
  parameter int unsigned BLAT  = 4,
  parameter int unsigned STALL = 0
) (
  input  logic     clk,
  input  logic     rst_n,
  input  axi_m2s_t m_i,
  output axi_s2m_t s_o
);

  typedef struct {
    logic [AXI_ADDR_W-1:0] addr;
    int unsigned           beats;
    longint unsigned       t;
  } burst_t;

  logic [63:0]     mem [WORDS];
  burst_t          rq[$];
  burst_t          wq[$];
  longint unsigned bq[$];
  longint unsigned cyc;
  int unsigned     rbeat, wbeat;
  int unsigned     n_rbeats, n_wbeats;

  function automatic int unsigned widx(logic [AXI_ADDR_W-1:0] a, int unsigned beat);
    return ((int'(a) >> 3) + beat) % WORDS;
  endfunction

  always @(posedge clk) begin
    if (!rst_n) begin
      s_o      <= '0;
      cyc      = 0;
      rbeat    = 0;
      wbeat    = 0;
      n_rbeats = 0;
      n_wbeats = 0;
      rq.delete();
      wq.delete();
      bq.delete();
    end else begin
      cyc++;
      // ---- handshakes seen at this edge
      if (m_i.ar_valid && s_o.ar_ready) begin
        burst_t b;
        b.addr = m_i.ar.addr; b.beats = int'(m_i.ar.len) + 1; b.t = cyc + longint'(LAT);
        rq.push_back(b);
      end
      if (s_o.r_valid && m_i.r_ready) begin
        n_rbeats++;
        rbeat++;
        if (rbeat == rq[0].beats) begin
          void'(rq.pop_front());
          rbeat = 0;
        end
      end
      if (m_i.aw_valid && s_o.aw_ready) begin
        burst_t b;
        b.addr = m_i.aw.addr; b.beats = int'(m_i.aw.len) + 1; b.t = 0;
        wq.push_back(b);
      end
      if (m_i.w_valid && s_o.w_ready) begin
        // the W beat may arrive in the same cycle as, or before, its AW
        if (wq.size() == 0) begin
          $error("axi_mem_model: W beat without a write address");
        end else begin
          mem[widx(wq[0].addr, wbeat)] = m_i.w.data;
          n_wbeats++;
          wbeat++;
          if (wbeat == wq[0].beats) begin
            void'(wq.pop_front());
            wbeat = 0;
            bq.push_back(cyc + longint'(BLAT));
          end
        end
      end
      if (s_o.b_valid && m_i.b_ready) void'(bq.pop_front());

      // ---- outputs for the next cycle
      s_o.ar_ready <= (rq.size() < 4) && (($urandom % 100) >= STALL);
      s_o.aw_ready <= (wq.size() < 4) && (($urandom % 100) >= STALL);
      // accept W only once its address is known
      s_o.w_ready  <= (wq.size() > 0) && (($urandom % 100) >= STALL);
      if (rq.size() > 0 && cyc + 1 >= rq[0].t) begin
        s_o.r_valid   <= 1'b1;
        s_o.r.data    <= mem[widx(rq[0].addr, rbeat)];
        s_o.r.last    <= (rbeat + 1 == rq[0].beats);
        s_o.r.resp    <= AXI_RESP_OKAY;
        s_o.r.id      <= '0;
      end else begin
        s_o.r_valid   <= 1'b0;
      end
      s_o.b_valid <= (bq.size() > 0) && (cyc + 1 >= bq[0]);
      s_o.b       <= '0;
    end
  end

endmodule
