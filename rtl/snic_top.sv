// snic_top: the SuperNIC data plane.
//
// A multi-tenant SmartNIC that runs users' network tasks (NTs) as hardware.
// Packets from the MAC are parsed; the Match-and-Action Table decides
// whether a packet needs NT processing, goes straight out, or is a control
// message for the SoftCores. Admitted packets are throttled per user by the
// rate limiter, which is how every user's fair share is enforced. Payloads
// wait in the packet store; only descriptors are scheduled. The central
// scheduler walks each descriptor through the NT DAG of its UID: it
// reserves credits on a whole NT chain where it can, forks copies to
// parallel chains (DAG parallelism), spreads packets over the instances of a
// chain (instance parallelism) and joins the copies in its sync buffer. One
// crossbar port per NT region connects the scheduler to the regions; inside a
// region, headers walk the NT chain, skipping NTs their DAG does not use.
// Finished packets are reassembled by the egress and sent to the MAC.
// The NTs' virtual memory unit translates NT memory requests for the
// on-board DRAM.
//
// Outside this design and brought out as ports: the MAC/PHY (rx_*/tx_*
// 512-bit beat streams), the SoftCores (configuration writes `cfg`, control
// packets `sc_*`, region stop for context switches, monitor and statistics
// reads) and the DDR controller (`mem_*`). NT memory requests enter at
// `vm_req_*`. The NT kinds in each region are chosen by KINDS (the
// partial-reconfiguration bitstreams of the prototype).
module snic_top
  import snic_pkg::*;
#(
  parameter board_kinds_t KINDS     = default_kinds(),
  parameter int           DUMMY_LAT = 10
) (
  input  logic              clk,
  input  logic              rst_n,
  // MAC receive / transmit
  input  logic              rx_valid,
  input  logic [DATA_W-1:0] rx_data,
  input  logic              rx_last,
  output logic              tx_valid,
  input  logic              tx_ready,
  output logic [DATA_W-1:0] tx_data,
  output logic              tx_last,
  // SoftCores
  input  cfg_wr_t           cfg,
  output logic              sc_rx_valid,
  input  logic              sc_rx_ready,
  output desc_t             sc_rx_desc,
  input  logic              sc_tx_valid,
  output logic              sc_tx_ready,
  input  desc_t             sc_tx_desc,
  input  logic [NUM_REGIONS-1:0] region_stop,
  output logic [NUM_REGIONS-1:0] region_idle,
  input  logic [USER_W-1:0]  mon_user,
  input  logic [CLASS_W-1:0] mon_cls,
  output logic [31:0]        mon_count,
  output logic [31:0]        nt_load [NUM_NT],
  output stats_t             stats,
  // NT virtual memory interface and on-board memory
  output logic               vm_ready,
  input  logic               vm_req_valid,
  input  logic [NT_W-1:0]    vm_req_as,
  input  logic [31:0]        vm_req_va,
  input  logic               vm_req_write,
  output logic               mem_valid,
  output logic               mem_fault,
  output logic [33:0]        mem_pa,
  output logic               mem_write
);
  // ------------------------------------------------------------ ingress
  logic [USER_W-1:0] rl_user;
  logic [LEN_W-1:0]  rl_len;
  logic              rl_ok, rl_take, rl_refuse;
  logic [31:0]       rl_refused [NUM_USERS];

  logic              ps_alloc_valid, ps_alloc_take;
  logic [SLOT_W-1:0] ps_alloc_slot;
  logic              ps_wr_en;
  logic [SLOT_W-1:0] ps_wr_slot;
  logic [BEAT_W-1:0] ps_wr_beat;
  logic [DATA_W-1:0] ps_wr_data;
  logic              ps_rd_en, ps_free_en;
  logic [SLOT_W-1:0] ps_rd_slot, ps_free_slot;
  logic [BEAT_W-1:0] ps_rd_beat;
  logic [DATA_W-1:0] ps_rd_data;
  logic [SLOT_W:0]   ps_used;

  logic  new_valid, new_ready, byp_valid, byp_ready;
  desc_t new_d, byp_d;
  logic [31:0] drop_nobuf, pkts_in;

  parser_mat u_parser (
    .clk, .rst_n, .cfg,
    .rx_valid, .rx_data, .rx_last,
    .rl_user, .rl_len, .rl_ok, .rl_take, .rl_refuse,
    .ps_alloc_valid, .ps_alloc_slot, .ps_alloc_take,
    .ps_wr_en, .ps_wr_slot, .ps_wr_beat, .ps_wr_data,
    .sched_valid(new_valid), .sched_ready(new_ready), .sched_desc(new_d),
    .tx_valid(byp_valid), .tx_ready(byp_ready), .tx_desc(byp_d),
    .ctrl_valid(sc_rx_valid), .ctrl_ready(sc_rx_ready), .ctrl_desc(sc_rx_desc),
    .drop_nobuf, .pkts_in
  );

  rate_limiter u_rl (
    .clk, .rst_n, .cfg,
    .chk_user(rl_user), .chk_len(rl_len), .chk_ok(rl_ok),
    .chk_take(rl_take), .chk_refuse(rl_refuse), .refused(rl_refused)
  );

  packet_store u_ps (
    .clk, .rst_n,
    .alloc_valid(ps_alloc_valid), .alloc_slot(ps_alloc_slot), .alloc_take(ps_alloc_take),
    .free_en(ps_free_en), .free_slot(ps_free_slot),
    .wr_en(ps_wr_en), .wr_slot(ps_wr_slot), .wr_beat(ps_wr_beat), .wr_data(ps_wr_data),
    .rd_en(ps_rd_en), .rd_slot(ps_rd_slot), .rd_beat(ps_rd_beat), .rd_data(ps_rd_data),
    .used(ps_used)
  );

  // ---------------------------------------------------------- scheduler
  logic     to_valid, to_ready, back_valid, back_ready;
  reg_msg_t to_m;
  ret_msg_t back_m;
  logic     done_valid, done_ready;
  desc_t    done_d;
  logic [NUM_NT-1:0] credit_ret;
  logic [31:0] n_full, n_part, n_early, n_fork, n_join, n_park, n_hold, n_done;

  central_scheduler u_sched (
    .clk, .rst_n, .cfg,
    .in_valid(new_valid), .in_ready(new_ready), .in_d(new_d),
    .ret_valid(back_valid), .ret_ready(back_ready), .ret_m(back_m),
    .out_valid(to_valid), .out_ready(to_ready), .out_m(to_m),
    .tx_valid(done_valid), .tx_ready(done_ready), .tx_d(done_d),
    .credit_ret, .region_pause(region_stop),
    .mon_user, .mon_cls, .mon_count,
    .n_full_rsv(n_full), .n_part_rsv(n_part), .n_early_ret(n_early), .n_fork(n_fork),
    .n_join_wait(n_join), .n_parked(n_park), .n_pause_hold(n_hold), .n_done(n_done)
  );

  // ----------------------------------------------------------- crossbar
  logic     [NUM_REGIONS-1:0] g_valid, g_ready, b_valid, b_ready;
  reg_msg_t g_m;
  ret_msg_t b_m [NUM_REGIONS];

  region_xbar u_xbar (
    .clk, .rst_n,
    .s_valid(to_valid), .s_ready(to_ready), .s_m(to_m),
    .r_valid(back_valid), .r_ready(back_ready), .r_m(back_m),
    .g_valid, .g_ready, .g_m, .b_valid, .b_ready, .b_m
  );

  // ------------------------------------------------------------ regions
  for (genvar r = 0; r < NUM_REGIONS; r++) begin : g_region
    logic [31:0] load [CHAIN_LEN];
    nt_region #(.REGION(r), .KINDS(KINDS[r]), .DUMMY_LAT(DUMMY_LAT)) u_region (
      .clk, .rst_n, .cfg, .stop(region_stop[r]),
      .in_valid(g_valid[r]), .in_ready(g_ready[r]), .in_m(g_m),
      .out_valid(b_valid[r]), .out_ready(b_ready[r]), .out_m(b_m[r]),
      .idle(region_idle[r]),
      .credit_ret(credit_ret[r*CHAIN_LEN +: CHAIN_LEN]),
      .load
    );
    for (genvar p = 0; p < CHAIN_LEN; p++) begin : g_load
      assign nt_load[r*CHAIN_LEN + p] = load[p];
    end
  end

  // ------------------------------------------------------------- egress
  logic  [2:0] eg_valid, eg_ready;
  desc_t       eg_d [3];
  logic [31:0] n_sent, n_dropped;
  assign eg_valid = {sc_tx_valid, byp_valid, done_valid};
  assign eg_d[0]  = done_d;
  assign eg_d[1]  = byp_d;
  assign eg_d[2]  = sc_tx_desc;
  assign done_ready  = eg_ready[0];
  assign byp_ready   = eg_ready[1];
  assign sc_tx_ready = eg_ready[2];

  egress u_egress (
    .clk, .rst_n,
    .in_valid(eg_valid), .in_ready(eg_ready), .in_d(eg_d),
    .ps_rd_en, .ps_rd_slot, .ps_rd_beat, .ps_rd_data,
    .ps_free_en, .ps_free_slot,
    .tx_valid, .tx_ready, .tx_data, .tx_last,
    .n_sent, .n_dropped
  );

  // ----------------------------------------------------- virtual memory
  logic [33:0] pa;
  vmem u_vmem (
    .clk, .rst_n, .cfg,
    .req_valid(vm_req_valid), .req_as(vm_req_as), .req_va(vm_req_va), .req_write(vm_req_write),
    .ready(vm_ready), .resp_valid(mem_valid), .resp_fault(mem_fault), .resp_pa(pa),
    .resp_write(mem_write), .n_alloc(), .n_fault()
  );
  assign mem_pa = pa;

  // --------------------------------------------------------- statistics
  always_comb begin
    logic [31:0] refused;
    refused = '0;
    for (int u = 0; u < NUM_USERS; u++) refused = refused + rl_refused[u];
    stats = '{pkts_in: pkts_in, drop_nobuf: drop_nobuf, rl_refused: refused,
              full_rsv: n_full, part_rsv: n_part, early_ret: n_early, forks: n_fork,
              join_wait: n_join, parked: n_park, pause_hold: n_hold, sched_done: n_done,
              sent: n_sent, dropped: n_dropped, ps_used: 32'(ps_used)};
  end
endmodule
