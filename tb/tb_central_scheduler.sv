// tb_central_scheduler: self-checking test of the NT-DAG scheduler.
//
// The eight NT regions are modelled: a region executes the NTs of a message
// that hold a reserved credit, returns each credit when done (one pulse per
// NT per cycle), and sends the header back either after the chain
// (done = 1) or at the first needed NT without a reservation (early return,
// done = 0). Region latency is random (20-60 cycles), so credits run out
// and headers come back out of order. Four DAGs are loaded: a 5-NT chain
// over a class with two instance regions, a three-stage DAG with a
// three-branch parallel stage, a DAG starting with a two-branch parallel
// stage, and a UID with no DAG (straight to TX). Now and then a region
// marks a packet dropped. One region is paused for a while (context
// switch).
// Checks: each packet leaves on TX exactly once; unless dropped, every NT
// of every branch of every stage ran exactly once, in a region of the
// branch's class, in stage order; no NT ever holds more than its 8 credits;
// no header goes to a paused region; a new header reaches the region port
// within the paper's 16-cycle scheduling delay; the monitor counts the
// intended load per user and class; every mechanism (full and partial
// reservation, early return, fork, join wait, parking, pause hold)
// happened.
module tb_central_scheduler;
  import snic_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  cfg_wr_t cfg;
  logic in_valid, in_ready, ret_valid, ret_ready, out_valid, out_ready, tx_valid, tx_ready;
  desc_t in_d, tx_d;
  ret_msg_t ret_m;
  reg_msg_t out_m;
  logic [NUM_NT-1:0] credit_ret;
  logic [NUM_REGIONS-1:0] region_pause;
  logic [USER_W-1:0] mon_user;
  logic [CLASS_W-1:0] mon_cls;
  logic [31:0] mon_count, n_full_rsv, n_part_rsv, n_early_ret, n_fork, n_join_wait, n_parked,
               n_pause_hold, n_done;

  central_scheduler dut (.*);

  initial begin
    #8000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------------------------------------------------- DAG tables
  int dlen [8];
  int nbr [8][MAX_STAGES];
  int bcls [8][MAX_STAGES][MAX_PAR];
  int brun [8][MAX_STAGES][MAX_PAR];
  int cmask [NUM_CLASSES];

  task automatic wr(input cfg_tgt_e t, input int a, input logic [63:0] d);
    cfg = '{valid: 1'b1, tgt: t, addr: 16'(a), data: d};
    @(negedge clk);
    cfg = '0;
  endtask

  task automatic load_tables();
    for (int u = 0; u < 8; u++) begin
      dlen[u] = 0;
      for (int s = 0; s < MAX_STAGES; s++) nbr[u][s] = 0;
    end
    cmask[0] = 8'b00000011; cmask[1] = 8'b00000100; cmask[2] = 8'b00111000; cmask[3] = 8'b11000000;
    // uid 1: one 5-NT chain
    dlen[1] = 1; nbr[1][0] = 1; bcls[1][0][0] = 0; brun[1][0][0] = 7'b0011111;
    // uid 2: chain, 3-way parallel stage, chain
    dlen[2] = 3;
    nbr[2][0] = 1; bcls[2][0][0] = 1; brun[2][0][0] = 7'b0000011;
    nbr[2][1] = 3; bcls[2][1][0] = 2; brun[2][1][0] = 7'b0000101;
                   bcls[2][1][1] = 3; brun[2][1][1] = 7'b0001111;
                   bcls[2][1][2] = 2; brun[2][1][2] = 7'b1000000;
    nbr[2][2] = 1; bcls[2][2][0] = 1; brun[2][2][0] = 7'b1110000;
    // uid 4: 2-way parallel stage, then a 7-NT chain
    dlen[4] = 2;
    nbr[4][0] = 2; bcls[4][0][0] = 0; brun[4][0][0] = 7'b0000001;
                   bcls[4][0][1] = 3; brun[4][0][1] = 7'b0000011;
    nbr[4][1] = 1; bcls[4][1][0] = 2; brun[4][1][0] = 7'b1111111;
    for (int c = 0; c < 4; c++) wr(T_CLASS, c, 64'(cmask[c]));
    for (int u = 0; u < 8; u++) begin
      wr(T_DAGLEN, u, 64'(dlen[u]));
      for (int s = 0; s < dlen[u]; s++) begin
        stage_t st;
        st = '0;
        st.nbr = (BR_W + 1)'(nbr[u][s]);
        for (int b = 0; b < nbr[u][s]; b++) begin
          st.br[b].cls = CLASS_W'(bcls[u][s][b]);
          st.br[b].run = CHAIN_LEN'(brun[u][s][b]);
        end
        wr(T_STAGE, u * MAX_STAGES + s, 64'(st));
      end
    end
  endtask

  // ------------------------------------------------------- region model
  typedef struct {
    ret_msg_t             m;
    longint               t;
    logic [CHAIN_LEN-1:0] ex;   // NTs executed: their credits come back with the header
  } pend_t;
  pend_t  rq [$];
  int     held [NUM_NT];
  int     cr_pend [NUM_NT];
  int     ran [PS_SLOTS][MAX_STAGES][MAX_PAR][CHAIN_LEN];
  int     cur_stage [PS_SLOTS];
  bit     busy_slot [PS_SLOTS];
  int     uid_of [PS_SLOTS];
  longint cyc = 0;
  int     n_tx = 0, n_in = 0, n_dropped = 0, n_paused_sent = 0;
  bit     pausing = 0;
  int     paused_r = 2;

  always @(posedge clk) cyc <= cyc + 1;

  // credit pulses
  always @(negedge clk) begin
    for (int i = 0; i < NUM_NT; i++) begin
      credit_ret[i] = 1'b0;
      if (cr_pend[i] > 0 && $urandom_range(0, 1) == 0) begin
        credit_ret[i] = 1'b1; cr_pend[i]--;
      end
    end
  end

  bit acc_in = 0;
  always @(posedge clk) if (rst_n) begin
    acc_in = in_valid && in_ready;
    for (int i = 0; i < NUM_NT; i++) if (credit_ret[i]) held[i]--;
    // header sent to a region
    if (out_valid && out_ready) begin
      int r, s, b, slot, u;
      ret_msg_t rm;
      bit early;
      r = int'(out_m.region); s = int'(out_m.d.stage); b = int'(out_m.d.branch);
      slot = int'(out_m.d.slot); u = uid_of[slot];
      check(!region_pause[r], "no header to a paused region");
      check(s == cur_stage[slot], "stages in order");
      check(s < dlen[u] && b < nbr[u][s], "valid stage and branch");
      check(cmask[bcls[u][s][b]][r], "region belongs to the branch's class");
      check((out_m.rsv & ~out_m.run) == 0, "reservations only on NTs to run");
      rm = '{d: out_m.d, region: out_m.region, done: 1'b1, run: '0};
      early = 0;
      for (int p = 0; p < CHAIN_LEN; p++)
        if (!early && out_m.run[p]) begin
          if (out_m.rsv[p]) begin
            held[r * CHAIN_LEN + p]++;
            check(held[r * CHAIN_LEN + p] <= INIT_CREDITS, "an NT never holds more than its credits");
            check(brun[u][s][b][p], "NT belongs to the branch");
            ran[slot][s][b][p]++;
          end else begin
            early = 1;
            rm.done = 1'b0;
            rm.run = out_m.run & ~((CHAIN_LEN'(1) << p) - 1);
          end
        end
      if (rm.done && $urandom_range(0, 40) == 0) rm.d.drop = 1'b1;
      rq.push_back('{m: rm, t: cyc + $urandom_range(50, 150), ex: out_m.rsv & (early ? (~rm.run) : '1)});
    end
    if (ret_valid && ret_ready) begin
      pend_t e;
      e = rq.pop_front();
      for (int p = 0; p < CHAIN_LEN; p++) if (e.ex[p]) cr_pend[int'(e.m.region) * CHAIN_LEN + p]++;
    end
    // finished packets
    if (tx_valid && tx_ready) begin
      int slot, u;
      slot = int'(tx_d.slot); u = uid_of[slot];
      check(busy_slot[slot], "packet leaves once");
      busy_slot[slot] = 0;
      n_tx++;
      if (tx_d.drop) n_dropped++;
      else
        for (int s = 0; s < dlen[u]; s++)
          for (int b = 0; b < nbr[u][s]; b++)
            for (int p = 0; p < CHAIN_LEN; p++)
              check(ran[slot][s][b][p] == (brun[u][s][b][p] ? 1 : 0),
                    $sformatf("uid %0d stage %0d branch %0d NT %0d ran once", u, s, b, p));
    end
  end

  // stage tracking: the stage of a slot advances when a copy of the next stage is sent
  always @(posedge clk) if (rst_n && out_valid && out_ready)
    if (int'(out_m.d.stage) == cur_stage[int'(out_m.d.slot)] + 1) cur_stage[int'(out_m.d.slot)]++;

  assign ret_valid = rq.size() > 0 && rq[0].t <= cyc;
  assign ret_m     = rq.size() > 0 ? rq[0].m : '0;

  // ------------------------------------------------------------ stimulus
  task automatic new_pkt(input int slot, input int u);
    in_d = '0;
    in_d.slot = SLOT_W'(slot); in_d.uid = UID_W'(u); in_d.user = USER_W'(u); in_d.len = 14'd200;
    uid_of[slot] = u; cur_stage[slot] = 0; busy_slot[slot] = 1;
    for (int s = 0; s < MAX_STAGES; s++)
      for (int b = 0; b < MAX_PAR; b++)
        for (int p = 0; p < CHAIN_LEN; p++) ran[slot][s][b][p] = 0;
    in_valid = 1;
  endtask

  int free_slots [$];
  initial begin
    int nsent, lat;
    cfg = '0; in_valid = 0; in_d = '0; out_ready = 1; tx_ready = 1; region_pause = '0;
    mon_user = '0; mon_cls = '0;
    for (int i = 0; i < NUM_NT; i++) begin held[i] = 0; cr_pend[i] = 0; end
    for (int i = 0; i < PS_SLOTS; i++) begin busy_slot[i] = 0; free_slots.push_back(i); end
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    load_tables();
    // scheduling delay of one isolated new header
    new_pkt(free_slots.pop_front(), 1);
    lat = 0;
    @(negedge clk); in_valid = 0;
    check(acc_in, "new header accepted at once"); acc_in = 0;
    while (!out_valid && lat < 100) begin @(negedge clk); lat++; end
    check(lat <= 16, $sformatf("scheduling delay %0d cycles", lat));
    nsent = 1;
    // traffic
    for (int c = 0; c < 60000 && nsent < 3000; c++) begin
      if (c == 2000) begin pausing = 1; region_pause[paused_r] = 1; end
      if (c == 2600) begin pausing = 0; region_pause[paused_r] = 0; end
      out_ready = ($urandom_range(0, 5) != 0);
      tx_ready = ($urandom_range(0, 3) != 0);
      if (acc_in) begin in_valid = 0; acc_in = 0; nsent++; end
      if (!in_valid) begin
        // recycle slots of finished packets
        for (int i = 0; i < PS_SLOTS; i++)
          if (!busy_slot[i] && !(i inside {free_slots})) free_slots.push_back(i);
        if (free_slots.size() > 0 && $urandom_range(0, 1) == 0) begin
          int pick, u;
          pick = $urandom_range(0, 9);
          u = (pick < 4) ? 1 : (pick < 7) ? 2 : (pick < 9) ? 4 : 3;
          new_pkt(free_slots.pop_front(), u);
        end
      end
      @(negedge clk);
    end
    in_valid = 0; out_ready = 1; tx_ready = 1;
    for (int w = 0; w < 30000 && n_tx < nsent; w++) @(negedge clk);
    $display("drained at %0d", cyc);
    for (int i = 0; i < PS_SLOTS; i++) if (busy_slot[i]) $display("busy slot %0d uid %0d stage %0d", i, uid_of[i], cur_stage[i]);
    repeat (200) @(negedge clk);
    check(nsent == 3000, "all packets accepted");
    check(n_tx == nsent, $sformatf("every packet finished (%0d of %0d)", n_tx, nsent));
    for (int i = 0; i < NUM_NT; i++) check(held[i] == 0, "all credits back");
    check(n_done == 32'(n_tx), "done counter");
    check(n_full_rsv > 0, "full chain reservations");
    check(n_part_rsv > 0, "partial reservations");
    check(n_early_ret > 0, "early returns");
    check(n_fork > 0, "forks");
    check(n_join_wait > 0, "join waits");
    check(n_parked > 0, "parking in the header store");
    check(n_pause_hold > 0, "holds for a paused region");
    check(n_dropped > 0, "dropped packets");
    mon_user = 1; mon_cls = 0; #1;
    check(mon_count >= 32'(nsent / 4), "intended load of user 1 on class 0 monitored");
    mon_user = 3; mon_cls = 0; #1;
    check(mon_count == 0, "user 3 (no DAG) places no load");
    $display("events: full %0d part %0d early %0d fork %0d join %0d park %0d pause %0d",
             n_full_rsv, n_part_rsv, n_early_ret, n_fork, n_join_wait, n_parked, n_pause_hold);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
