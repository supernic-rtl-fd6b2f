// parser_mat: ingress parser, Match-and-Action Table and admission control.
//
// Every received packet arrives from the MAC as a stream of 64-byte beats
// (no back-pressure: a MAC cannot stall). On the first beat the parser reads
// the header fields into a descriptor and looks the packet's DAG UID up in
// the MAT, a small fully associative table written by the SoftCores. A hit
// yields the route and the owning user:
//   RT_SCHED - the packet needs NT processing; its descriptor goes to the
//              central scheduler (the common case);
//   RT_TX    - no NT processing; the descriptor goes straight to egress
//              (the red path of the board diagram);
//   RT_CTRL  - a control-plane message for the SoftCores (orange path).
// A miss is treated as "no NT information" and sent to TX as user 0.
// Packets for the scheduler are checked against their user's token bucket
// in the rate limiter; a refused packet is dropped before any payload is
// written, so throttled traffic costs neither packet-store space nor
// scheduler work. A packet is also dropped when no packet-store slot or no
// room in its output queue is left (counted in drop_nobuf unless the rate
// limiter refused it already). Admitted beats are written to the
// packet-store slot; after the last beat the descriptor is queued on its
// route (8-entry queues). Beats beyond a slot's size are not stored.
// Config: T_MAT, addr = entry, data = {valid[63], route[49:48],
// user[42:40], uid[15:0]}. The header layout is this design's (see snic_pkg).
module parser_mat
  import snic_pkg::*;
#(
  parameter int MAT_ENTRIES = 16,
  parameter int QDEPTH      = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_wr_t           cfg,
  // from MAC
  input  logic              rx_valid,
  input  logic [DATA_W-1:0] rx_data,
  input  logic              rx_last,
  // rate limiter
  output logic [USER_W-1:0] rl_user,
  output logic [LEN_W-1:0]  rl_len,
  input  logic              rl_ok,
  output logic              rl_take,
  output logic              rl_refuse,
  // packet store
  input  logic              ps_alloc_valid,
  input  logic [SLOT_W-1:0] ps_alloc_slot,
  output logic              ps_alloc_take,
  output logic              ps_wr_en,
  output logic [SLOT_W-1:0] ps_wr_slot,
  output logic [BEAT_W-1:0] ps_wr_beat,
  output logic [DATA_W-1:0] ps_wr_data,
  // descriptor outputs
  output logic              sched_valid,
  input  logic              sched_ready,
  output desc_t             sched_desc,
  output logic              tx_valid,
  input  logic              tx_ready,
  output desc_t             tx_desc,
  output logic              ctrl_valid,
  input  logic              ctrl_ready,
  output desc_t             ctrl_desc,
  // statistics
  output logic [31:0]       drop_nobuf,
  output logic [31:0]       pkts_in
);
  typedef struct packed {
    logic              valid;
    route_e            route;
    logic [USER_W-1:0] user;
    logic [15:0]       uid;
  } mat_t;

  mat_t mat [MAT_ENTRIES];

  // ---------------------------------------------------------------- parse
  desc_t  pd;
  route_e p_route;
  always_comb begin
    logic [15:0] uid;
    uid        = get16(rx_data, OFF_UID);
    pd         = '0;
    pd.slot    = ps_alloc_slot;
    pd.uid     = uid[UID_W-1:0];
    pd.len     = LEN_W'(get16(rx_data, OFF_IPLEN) + 16'd14);
    pd.sip     = get32(rx_data, OFF_SIP);
    pd.dip     = get32(rx_data, OFF_DIP);
    pd.sport   = get16(rx_data, OFF_SPORT);
    pd.dport   = get16(rx_data, OFF_DPORT);
    pd.op      = rx_data[8*OFF_OP +: 8];
    pd.key     = get32(rx_data, OFF_KEY);
    pd.val     = get32(rx_data, OFF_VAL);
    pd.seq     = get32(rx_data, OFF_SEQ);
    p_route    = RT_TX;
    for (int i = 0; i < MAT_ENTRIES; i++) begin
      if (mat[i].valid && mat[i].uid == uid) begin
        p_route = mat[i].route;
        pd.user = mat[i].user;
      end
    end
  end

  // ------------------------------------------------------- output queues
  logic [2:0] q_in_valid, q_in_ready, q_out_valid, q_out_ready;
  desc_t      q_out [3];
  logic [$clog2(QDEPTH+1)-1:0] q_cnt [3];
  desc_t      push_desc;
  route_e     push_route;
  logic       push_en;

  for (genvar q = 0; q < 3; q++) begin : g_q
    sync_fifo #(.T(desc_t), .DEPTH(QDEPTH)) u_q (
      .clk, .rst_n,
      .in_valid(q_in_valid[q]), .in_ready(q_in_ready[q]), .in_data(push_desc),
      .out_valid(q_out_valid[q]), .out_ready(q_out_ready[q]), .out_data(q_out[q]),
      .count(q_cnt[q])
    );
    assign q_in_valid[q] = push_en && (int'(push_route) == q);
  end

  assign sched_valid = q_out_valid[RT_SCHED];
  assign sched_desc  = q_out[RT_SCHED];
  assign q_out_ready[RT_SCHED] = sched_ready;
  assign tx_valid    = q_out_valid[RT_TX];
  assign tx_desc     = q_out[RT_TX];
  assign q_out_ready[RT_TX] = tx_ready;
  assign ctrl_valid  = q_out_valid[RT_CTRL];
  assign ctrl_desc   = q_out[RT_CTRL];
  assign q_out_ready[RT_CTRL] = ctrl_ready;

  // ------------------------------------------------------ ingress control
  typedef enum logic [1:0] {S_FIRST, S_BODY, S_DROP} st_e;
  st_e         st;
  desc_t       cur;
  route_e      cur_route;
  logic [BEAT_W:0] beat;

  // a queue has room for this packet (one entry may still be in flight)
  logic room;
  assign room = (int'(q_cnt[p_route]) < QDEPTH - 1);

  logic first, admit;
  assign first     = rx_valid && (st == S_FIRST);
  assign rl_user   = pd.user;
  assign rl_len    = pd.len;
  assign admit     = first && ps_alloc_valid && room && ((p_route != RT_SCHED) || rl_ok);
  assign rl_take   = admit && (p_route == RT_SCHED);
  assign rl_refuse = first && (p_route == RT_SCHED) && !rl_ok;
  assign ps_alloc_take = admit;

  assign ps_wr_en   = admit || (rx_valid && st == S_BODY && int'(beat) < SLOT_BEATS);
  assign ps_wr_slot = admit ? ps_alloc_slot : cur.slot;
  assign ps_wr_beat = admit ? '0 : beat[BEAT_W-1:0];
  assign ps_wr_data = rx_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= S_FIRST;
      cur        <= '0;
      cur_route  <= RT_TX;
      beat       <= '0;
      push_en    <= 1'b0;
      push_desc  <= '0;
      push_route <= RT_TX;
      drop_nobuf <= '0;
      pkts_in    <= '0;
      for (int i = 0; i < MAT_ENTRIES; i++) mat[i] <= '0;
    end else begin
      push_en <= 1'b0;
      if (cfg.valid && cfg.tgt == T_MAT && int'(cfg.addr) < MAT_ENTRIES)
        mat[cfg.addr[$clog2(MAT_ENTRIES)-1:0]] <= '{valid: cfg.data[63], route: route_e'(cfg.data[49:48]),
                                              user: cfg.data[40 +: USER_W], uid: cfg.data[15:0]};
      if (rx_valid) begin
        case (st)
          S_FIRST: begin
            pkts_in <= pkts_in + 1;
            if (admit) begin
              if (rx_last) begin
                push_en    <= 1'b1;
                push_desc  <= pd;
                push_route <= p_route;
              end else begin
                st        <= S_BODY;
                cur       <= pd;
                cur_route <= p_route;
                beat      <= 1;
              end
            end else begin
              if ((!ps_alloc_valid || !room) && !rl_refuse) drop_nobuf <= drop_nobuf + 1;
              if (!rx_last) st <= S_DROP;
            end
          end
          S_BODY: begin
            if (int'(beat) < SLOT_BEATS) beat <= beat + 1'b1;
            if (rx_last) begin
              st         <= S_FIRST;
              push_en    <= 1'b1;
              push_desc  <= cur;
              push_route <= cur_route;
            end
          end
          default: if (rx_last) st <= S_FIRST;
        endcase
      end
    end
  end
endmodule
