// central_scheduler: the SuperNIC's packet scheduler for NT DAGs.
//
// Packet headers (descriptors) reach the scheduler from the parser (new
// packets) and from the regions (a chain finished, or a header came back
// early from an NT without credit). The scheduler walks each packet through
// its DAG, which the control plane stored per DAG UID as a list of stages;
// a stage is a set of parallel branches, each naming a chain class (a chain
// layout, launched in one or more regions) and the NTs of that chain to run
// (the others are skipped).
//
// Decision path (the flow chart of the paper's scheduler figure):
//   returned, chain done -> if the stage is parallel, the sync buffer holds
//                           it back until all branches are in ("need to
//                           wait"); then "need more NT?" -> next stage, or
//                           to TX when the DAG is done or a branch dropped it;
//   new packet           -> stage 0, or TX when the UID has no DAG;
//   stage to start       -> "NT parallel?" -> one header copy per branch
//                           (DAG parallelism), join opened in the sync
//                           buffer; each copy goes to the next instance
//                           region of its class, round-robin (instance
//                           parallelism);
//   early return         -> retry the same region from the NT it stopped at.
// Dispatch ("acquire credits", "choose NT region"): the credit store reserves
// one credit on every NT the copy must run in that region if all have one,
// otherwise on the prefix up to the first NT without one (the packet then
// comes back there). A copy whose first NT has no credit, or whose region is
// paused for a context switch, is parked in the header store (a FIFO) and
// retried; new packets and parked ones take turns, returns go first.
// The control plane's intended-load monitor counts, per user and chain
// class, every copy the scheduler wants to send, before credits are looked
// at, so the load a user would place on an NT is seen even when it is
// throttled.
//
// Timing: one header decision per cycle; a new header reaches the region
// port one cycle after it is accepted (the paper's scheduler has a fixed
// 16-cycle delay; this one stays well inside it). A parallel stage of N
// branches issues its copies on N consecutive cycles.
// Config: T_DAGLEN (addr uid, data stages), T_STAGE (addr uid*MAX_STAGES +
// stage, data = stage_t), T_CLASS (addr class, data = region mask),
// T_MON_CLR (clear monitor). Table formats are this design's.
module central_scheduler
  import snic_pkg::*;
#(
  parameter int PEND_DEPTH = 1024,
  parameter int TXQ_DEPTH  = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  cfg_wr_t  cfg,
  // new packets
  input  logic     in_valid,
  output logic     in_ready,
  input  desc_t    in_d,
  // returning headers
  input  logic     ret_valid,
  output logic     ret_ready,
  input  ret_msg_t ret_m,
  // to the regions
  output logic     out_valid,
  input  logic     out_ready,
  output reg_msg_t out_m,
  // finished packets
  output logic     tx_valid,
  input  logic     tx_ready,
  output desc_t    tx_d,
  // credits and context switch
  input  logic [NUM_NT-1:0]      credit_ret,
  input  logic [NUM_REGIONS-1:0] region_pause,
  // intended-load monitor read port
  input  logic [USER_W-1:0]  mon_user,
  input  logic [CLASS_W-1:0] mon_cls,
  output logic [31:0]        mon_count,
  // event counters
  output logic [31:0] n_full_rsv,
  output logic [31:0] n_part_rsv,
  output logic [31:0] n_early_ret,
  output logic [31:0] n_fork,
  output logic [31:0] n_join_wait,
  output logic [31:0] n_parked,
  output logic [31:0] n_pause_hold,
  output logic [31:0] n_done
);
  typedef struct packed {
    desc_t                d;
    logic [REG_W-1:0]     region;
    logic [CHAIN_LEN-1:0] run;
  } work_t;

  // ------------------------------------------------------------- tables
  logic [STAGE_W-1:0]     dag_len   [NUM_UIDS];
  stage_t                 stage_tbl [NUM_UIDS * MAX_STAGES];
  logic [NUM_REGIONS-1:0] class_tbl [NUM_CLASSES];
  logic [REG_W-1:0]       rr_ptr    [NUM_CLASSES];
  logic [31:0]            mon       [NUM_USERS * NUM_CLASSES];

  assign mon_count = mon[int'(mon_user) * NUM_CLASSES + int'(mon_cls)];

  function automatic stage_t stage_of(input logic [UID_W-1:0] uid, input logic [STAGE_W-1:0] s);
    return stage_tbl[int'(uid) * MAX_STAGES + int'(s[$clog2(MAX_STAGES)-1:0])];
  endfunction

  // ------------------------------------------------------- header store
  logic  pend_in_valid, pend_in_ready, pend_valid, pend_pop;
  work_t pend_in, pend_head;
  logic [$clog2(PEND_DEPTH+1)-1:0] pend_cnt;
  sync_fifo #(.T(work_t), .DEPTH(PEND_DEPTH)) u_pend (
    .clk, .rst_n,
    .in_valid(pend_in_valid), .in_ready(pend_in_ready), .in_data(pend_in),
    .out_valid(pend_valid), .out_ready(pend_pop), .out_data(pend_head), .count(pend_cnt)
  );

  // ------------------------------------------------------------ TX queue
  logic  txq_in_valid, txq_in_ready;
  desc_t txq_in;
  sync_fifo #(.T(desc_t), .DEPTH(TXQ_DEPTH)) u_txq (
    .clk, .rst_n,
    .in_valid(txq_in_valid), .in_ready(txq_in_ready), .in_data(txq_in),
    .out_valid(tx_valid), .out_ready(tx_ready), .out_data(tx_d), .count()
  );

  // ------------------------------------------------------- sync buffer
  logic              sb_fork, sb_arr, sb_arr_commit, sb_last, sb_drop;
  logic [SLOT_W-1:0] sb_fork_tag;
  logic [BR_W:0]     sb_fork_n;
  sync_buffer u_sync (
    .clk, .rst_n,
    .fork_en(sb_fork), .fork_tag(sb_fork_tag), .fork_n(sb_fork_n),
    .arr_en(sb_arr_commit), .arr_tag(ret_m.d.slot), .arr_drop(ret_m.d.drop),
    .arr_last(sb_last), .arr_drop_any(sb_drop), .open_joins()
  );

  // ------------------------------------------------------ credit store
  logic                 d_valid;
  work_t                d_w;
  logic [CHAIN_LEN-1:0] grant;
  logic                 acq_full, d_send;
  credit_store u_cred (
    .clk, .rst_n, .cfg,
    .acq_region(d_w.region), .acq_need(d_w.run), .acq_grant(grant), .acq_full,
    .acq_commit(d_send), .ret(credit_ret), .credits()
  );

  // ------------------------------------------------- dispatch register D
  logic first_ok, can_go, d_park, d_leave, d_free;
  always_comb begin
    first_ok = 1'b0;
    for (int p = CHAIN_LEN - 1; p >= 0; p--)
      if (d_w.run[p]) first_ok = grant[p];
  end
  assign can_go  = d_valid && first_ok && !region_pause[d_w.region];
  assign d_send  = can_go && out_ready;
  assign d_park  = d_valid && !can_go && pend_in_ready;
  assign d_leave = d_send || d_park;
  assign d_free  = !d_valid || d_leave;

  assign out_valid = can_go;
  assign out_m     = '{d: d_w.d, region: d_w.region, run: d_w.run, rsv: grant};
  assign pend_in_valid = d_park;
  assign pend_in       = d_w;

  // -------------------------------------------------- fork register F
  logic          f_valid;
  desc_t         f_d;
  stage_t        f_st;
  logic [BR_W:0] f_idx;
  logic          f_emit;
  assign f_emit = f_valid && d_free;

  // ------------------------------------------------- stage A: classify
  typedef enum logic [1:0] {SRC_NONE, SRC_RET, SRC_NEW, SRC_PEND} src_e;
  typedef enum logic [2:0] {A_TX, A_ABSORB, A_FORK, A_DISP} act_e;

  src_e   src;
  act_e   act;
  logic   pref_pend;
  work_t  a_w;        // item for D (A_DISP) or fork base
  stage_t a_st;       // stage to start (A_FORK / A_DISP from expansion)
  logic   a_expand;   // A_DISP came from a stage start (counted by monitor)
  desc_t  a_txd;
  logic   new_ok;

  assign new_ok = in_valid && (int'(pend_cnt) < PEND_DEPTH / 2);

  always_comb begin
    if (ret_valid)                                src = SRC_RET;
    else if (pend_valid && (pref_pend || !new_ok)) src = SRC_PEND;
    else if (new_ok)                              src = SRC_NEW;
    else                                          src = SRC_NONE;
  end

  always_comb begin
    desc_t              d;
    logic               start;      // a stage has to be started
    logic [STAGE_W-1:0] s;
    stage_t             cur;
    act      = A_ABSORB;
    a_w      = '0;
    a_st     = '0;
    a_expand = 1'b0;
    a_txd    = '0;
    start    = 1'b0;
    s        = '0;
    sb_arr   = 1'b0;
    d        = '0;
    cur      = '0;
    case (src)
      SRC_RET: begin
        d = ret_m.d;
        if (!ret_m.done) begin
          act      = A_DISP;
          a_w      = '{d: d, region: ret_m.region, run: ret_m.run};
        end else begin
          cur = stage_of(d.uid, d.stage);
          if (cur.nbr > 1) begin
            sb_arr = 1'b1;
            d.drop = sb_drop;
          end
          if (cur.nbr > 1 && !sb_last) begin
            act = A_ABSORB;
          end else begin
            s = d.stage + 1'b1;
            if (s >= dag_len[d.uid] || d.drop) begin
              act   = A_TX;
              a_txd = d;
            end else begin
              start = 1'b1;
            end
          end
        end
      end
      SRC_NEW: begin
        d       = in_d;
        d.stage = '0;
        d.branch = '0;
        if (dag_len[d.uid] == 0) begin
          act   = A_TX;
          a_txd = d;
        end else begin
          start = 1'b1;
          s     = '0;
        end
      end
      SRC_PEND: begin
        act = A_DISP;
        a_w = pend_head;
      end
      default: ;
    endcase
    if (start) begin
      d.stage  = s;
      d.branch = '0;
      a_st     = stage_of(d.uid, s);
      a_w.d    = d;
      a_w.run  = a_st.br[0].run;
      if (a_st.nbr > 1) act = A_FORK;
      else begin
        act      = A_DISP;
        a_expand = 1'b1;
      end
    end
  end

  logic a_go;
  always_comb begin
    case (act)
      A_TX:     a_go = txq_in_ready;
      A_ABSORB: a_go = 1'b1;
      A_FORK:   a_go = !f_valid;
      default:  a_go = d_free && !f_emit;
    endcase
    if (src == SRC_NONE) a_go = 1'b0;
  end

  // the sync buffer counts an arrival only when the return is consumed
  assign sb_arr_commit = sb_arr && ret_ready;

  assign ret_ready = (src == SRC_RET) && a_go;
  assign in_ready  = (src == SRC_NEW) && a_go;
  assign pend_pop  = (src == SRC_PEND) && a_go;
  assign txq_in_valid = (src != SRC_NONE) && a_go && (act == A_TX);
  assign txq_in       = a_txd;
  assign sb_fork      = (src != SRC_NONE) && a_go && (act == A_FORK);
  assign sb_fork_tag  = a_w.d.slot;
  assign sb_fork_n    = a_st.nbr;

  // ------------------------------------------- region choice for D input
  logic               d_load, d_load_expand;
  work_t              d_next;
  logic [CLASS_W-1:0] ch_cls;
  logic               ch_use;
  logic [REG_W-1:0]   ch_region;

  always_comb begin
    d_load        = 1'b0;
    d_load_expand = 1'b0;
    d_next        = '0;
    ch_cls        = '0;
    ch_use        = 1'b0;
    if (f_emit) begin
      d_load        = 1'b1;
      d_load_expand = 1'b1;
      d_next.d      = f_d;
      d_next.d.branch = f_idx[BR_W-1:0];
      d_next.run    = f_st.br[f_idx[BR_W-1:0]].run;
      ch_cls        = f_st.br[f_idx[BR_W-1:0]].cls;
      ch_use        = 1'b1;
    end else if ((src != SRC_NONE) && a_go && act == A_DISP) begin
      d_load        = 1'b1;
      d_load_expand = a_expand;
      d_next        = a_w;
      ch_cls        = a_st.br[0].cls;
      ch_use        = a_expand;
    end
  end

  // next instance region of the class after the last one used
  logic [NUM_REGIONS-1:0] ch_mask;
  assign ch_mask = class_tbl[ch_cls];
  always_comb begin
    ch_region = '0;
    for (int k = NUM_REGIONS; k >= 1; k--)
      if (ch_mask[(int'(rr_ptr[ch_cls]) + k) % NUM_REGIONS])
        ch_region = REG_W'((int'(rr_ptr[ch_cls]) + k) % NUM_REGIONS);
  end

  // ---------------------------------------------------------- registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_valid   <= 1'b0;
      d_w       <= '0;
      f_valid   <= 1'b0;
      f_d       <= '0;
      f_st      <= '0;
      f_idx     <= '0;
      pref_pend <= 1'b0;
      for (int i = 0; i < NUM_UIDS; i++) dag_len[i] <= '0;
      for (int i = 0; i < NUM_UIDS * MAX_STAGES; i++) stage_tbl[i] <= '0;
      for (int i = 0; i < NUM_CLASSES; i++) begin
        class_tbl[i] <= '0;
        rr_ptr[i]    <= REG_W'(NUM_REGIONS - 1);
      end
      for (int i = 0; i < NUM_USERS * NUM_CLASSES; i++) mon[i] <= '0;
      n_full_rsv <= '0; n_part_rsv <= '0; n_early_ret <= '0; n_fork <= '0;
      n_join_wait <= '0; n_parked <= '0; n_pause_hold <= '0; n_done <= '0;
    end else begin
      // D
      if (d_load) begin
        d_valid <= 1'b1;
        d_w     <= d_next;
        if (ch_use) begin
          d_w.region     <= ch_region;
          rr_ptr[ch_cls] <= ch_region;
        end
      end else if (d_leave) begin
        d_valid <= 1'b0;
      end
      if (d_load_expand)
        mon[int'(d_next.d.user) * NUM_CLASSES + int'(ch_cls)] <=
          mon[int'(d_next.d.user) * NUM_CLASSES + int'(ch_cls)] + 1;

      // F
      if (f_emit) begin
        if (f_idx + 1'b1 >= f_st.nbr) f_valid <= 1'b0;
        f_idx <= f_idx + 1'b1;
      end
      if (sb_fork) begin
        f_valid <= 1'b1;
        f_d     <= a_w.d;
        f_st    <= a_st;
        f_idx   <= '0;
      end

      if (src == SRC_PEND && a_go) pref_pend <= 1'b0;
      else if (src == SRC_NEW && a_go) pref_pend <= 1'b1;

      // statistics
      if (d_send && acq_full)  n_full_rsv <= n_full_rsv + 1;
      if (d_send && !acq_full) n_part_rsv <= n_part_rsv + 1;
      if (ret_valid && ret_ready && !ret_m.done) n_early_ret <= n_early_ret + 1;
      if (sb_fork) n_fork <= n_fork + 1;
      if (ret_ready && act == A_ABSORB) n_join_wait <= n_join_wait + 1;
      if (d_park) n_parked <= n_parked + 1;
      if (d_park && first_ok && region_pause[d_w.region]) n_pause_hold <= n_pause_hold + 1;
      if (txq_in_valid) n_done <= n_done + 1;

      // configuration
      if (cfg.valid) begin
        case (cfg.tgt)
          T_DAGLEN: if (int'(cfg.addr) < NUM_UIDS) dag_len[cfg.addr[UID_W-1:0]] <= cfg.data[STAGE_W-1:0];
          T_STAGE:  if (int'(cfg.addr) < NUM_UIDS * MAX_STAGES)
                      stage_tbl[cfg.addr[UID_W+$clog2(MAX_STAGES)-1:0]] <= cfg.data[$bits(stage_t)-1:0];
          T_CLASS:  if (int'(cfg.addr) < NUM_CLASSES) class_tbl[cfg.addr[CLASS_W-1:0]] <= cfg.data[NUM_REGIONS-1:0];
          T_MON_CLR: for (int i = 0; i < NUM_USERS * NUM_CLASSES; i++) mon[i] <= '0;
          default: ;
        endcase
      end
    end
  end

endmodule
