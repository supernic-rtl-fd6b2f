// egress: transmit side of the SuperNIC.
//
// Three kinds of descriptors end their life here: packets whose NT DAG is
// finished (from the scheduler), packets that needed no NT (straight from the
// parser) and packets the SoftCores send. A round-robin arbiter picks one
// descriptor at a time. A descriptor marked `drop` (e.g. by a firewall NT)
// only frees its packet-store slot. Otherwise the packet's beats are read
// back from its slot and streamed to the MAC; in the first beat the header
// fields are rewritten from the descriptor, so changes made by NTs (NAT,
// load balancer, KV-cache reply, NACK) reach the wire. A descriptor marked
// `reply` goes back to its sender: MAC addresses, IP addresses and ports are
// swapped. The slot is freed with the last beat. Beat count = ceil(len/64),
// at least 1 and at most a slot. Throughput: one beat per cycle while the
// MAC is ready, also across packets (the next descriptor is taken while the
// last beat of the current one is read), so even single-beat packets leave
// back to back; the store's one-cycle read latency is hidden by reading a
// beat only when the previous one is leaving. Interfaces: valid/ready.
module egress
  import snic_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [2:0]        in_valid,
  output logic [2:0]        in_ready,
  input  desc_t             in_d [3],
  // packet store
  output logic              ps_rd_en,
  output logic [SLOT_W-1:0] ps_rd_slot,
  output logic [BEAT_W-1:0] ps_rd_beat,
  input  logic [DATA_W-1:0] ps_rd_data,
  output logic              ps_free_en,
  output logic [SLOT_W-1:0] ps_free_slot,
  // to MAC
  output logic              tx_valid,
  input  logic              tx_ready,
  output logic [DATA_W-1:0] tx_data,
  output logic              tx_last,
  // statistics
  output logic [31:0]       n_sent,
  output logic [31:0]       n_dropped
);
  // read side: the packet whose beats are being read from the store
  logic        busy;
  desc_t       cur;
  logic [BEAT_W:0] nbeats, next_beat;
  // output side: the beat read last cycle, with the descriptor it belongs to
  logic        out_v, out_first, out_last;
  desc_t       out_d;

  wire out_fire = out_v && tx_ready;
  wire can_rd   = busy && (!out_v || tx_ready);
  wire rd_last  = can_rd && (next_beat + 1'b1 == nbeats);
  // the next descriptor is taken while the last beat of the current one is read
  wire free_rd  = !busy || rd_last;

  logic [2:0] gnt;
  logic [1:0] gidx;
  desc_t pick;
  assign pick = in_d[gidx];
  // a dropped packet needs the free port, which the last output beat may be using
  wire drop_blk = pick.drop && out_fire && out_last;
  wire take     = free_rd && (in_valid != 0) && !drop_blk;
  rr_arb #(.N(3)) u_arb (.clk, .rst_n, .req(in_valid), .advance(take), .grant(gnt), .grant_idx(gidx));
  assign in_ready = gnt & {3{take}};

  assign ps_rd_en   = can_rd;
  assign ps_rd_slot = cur.slot;
  assign ps_rd_beat = next_beat[BEAT_W-1:0];

  assign tx_valid = out_v;
  function automatic logic [DATA_W-1:0] patch(input logic [DATA_W-1:0] b, input desc_t d);
    logic [DATA_W-1:0] r;
    r = b;
    if (d.reply) begin
      r[0 +: 48]  = b[48 +: 48];
      r[48 +: 48] = b[0 +: 48];
      r = put32(r, OFF_SIP, d.dip);
      r = put32(r, OFF_DIP, d.sip);
      r = put16(r, OFF_SPORT, d.dport);
      r = put16(r, OFF_DPORT, d.sport);
    end else begin
      r = put32(r, OFF_SIP, d.sip);
      r = put32(r, OFF_DIP, d.dip);
      r = put16(r, OFF_SPORT, d.sport);
      r = put16(r, OFF_DPORT, d.dport);
    end
    r[8*OFF_OP +: 8] = d.op;
    r = put32(r, OFF_KEY, d.key);
    r = put32(r, OFF_VAL, d.val);
    r = put32(r, OFF_SEQ, d.seq);
    return r;
  endfunction

  assign tx_data  = out_first ? patch(ps_rd_data, out_d) : ps_rd_data;
  assign tx_last  = out_v && out_last;

  assign ps_free_en   = (take && pick.drop) || (out_fire && out_last);
  assign ps_free_slot = (take && pick.drop) ? pick.slot : out_d.slot;

  logic [LEN_W-1:0] nb;   // beats of the picked packet
  assign nb = (pick.len + 14'd63) >> 6;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      cur       <= '0;
      nbeats    <= '0;
      next_beat <= '0;
      out_v     <= 1'b0;
      out_first <= 1'b0;
      out_last  <= 1'b0;
      out_d     <= '0;
      n_sent    <= '0;
      n_dropped <= '0;
    end else begin
      if (out_fire) out_v <= 1'b0;
      if (can_rd) begin
        out_v     <= 1'b1;
        out_first <= (next_beat == 0);
        out_last  <= rd_last;
        out_d     <= cur;
        next_beat <= next_beat + 1'b1;
        if (rd_last) busy <= 1'b0;
      end
      if (take) begin
        if (pick.drop) begin
          n_dropped <= n_dropped + 1;
        end else begin
          busy      <= 1'b1;
          cur       <= pick;
          nbeats    <= (nb == 0) ? 1 : (int'(nb) > SLOT_BEATS) ? (BEAT_W+1)'(SLOT_BEATS) : nb[BEAT_W:0];
          next_beat <= '0;
        end
      end
      if (out_fire && out_last) n_sent <= n_sent + 1;
    end
  end
endmodule
