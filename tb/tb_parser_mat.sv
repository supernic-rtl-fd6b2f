// tb_parser_mat: self-checking test of the ingress parser and MAT.
//
// A MAC model sends packets of random length (one 64-byte beat per cycle,
// no gaps, no back-pressure) whose UIDs hit MAT entries for the three routes
// (scheduler, straight to TX, SoftCore control) or miss. The rate limiter
// and packet store are modelled: the limiter refuses at random, the store
// runs out of slots at random. The test checks that every admitted packet's
// descriptor (header fields, length, user, slot) appears on the queue of its
// route, that its beats were written to its slot (at most one slot's worth),
// that refused packets are dropped without taking a slot, and that every
// packet is either delivered, refused or counted as dropped for lack of
// buffer. In the first phase, with everything ready, packets at full line
// rate (a beat every cycle) must all be admitted.
module tb_parser_mat;
  import snic_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  cfg_wr_t cfg;
  logic rx_valid, rx_last;
  logic [DATA_W-1:0] rx_data;
  logic [USER_W-1:0] rl_user;
  logic [LEN_W-1:0] rl_len;
  logic rl_ok, rl_take, rl_refuse;
  logic ps_alloc_valid, ps_alloc_take, ps_wr_en;
  logic [SLOT_W-1:0] ps_alloc_slot, ps_wr_slot;
  logic [BEAT_W-1:0] ps_wr_beat;
  logic [DATA_W-1:0] ps_wr_data;
  logic sched_valid, sched_ready, tx_valid, tx_ready, ctrl_valid, ctrl_ready;
  desc_t sched_desc, tx_desc, ctrl_desc;
  logic [31:0] drop_nobuf, pkts_in;

  parser_mat dut (.*);

  initial begin
    #4000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // packet-store model: slots handed out round robin
  int slot_ctr = 0;
  assign ps_alloc_slot = SLOT_W'(slot_ctr % PS_SLOTS);
  always @(posedge clk) if (ps_alloc_take) slot_ctr <= slot_ctr + 1;

  // expected results keyed by slot
  desc_t  exp_d [int];
  int     exp_q [int];
  int     exp_beats [int];
  int     exp_n [int];
  int     cur_n;
  int     written [int];
  int     n_refused = 0, n_taken = 0, n_out = 0;
  desc_t  cur_pkt;
  int     cur_route, cur_beats;

  function automatic int route_of(input logic [15:0] uid, output logic [USER_W-1:0] user);
    user = '0;
    case (uid)
      16'd10: begin user = 2; return int'(RT_SCHED); end
      16'd11: begin user = 3; return int'(RT_TX); end
      16'd12: begin user = 1; return int'(RT_CTRL); end
      default: return int'(RT_TX);
    endcase
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (rl_refuse) n_refused++;
    if (ps_alloc_take) begin
      int s;
      s = int'(ps_alloc_slot);
      check(rx_valid, "slot taken on a first beat");
      exp_d[s] = cur_pkt; exp_d[s].slot = ps_alloc_slot;
      exp_q[s] = cur_route; exp_n[s] = cur_n; exp_beats[s] = cur_beats; written[s] = 0;
      n_taken++;
      check(!(cur_route == int'(RT_SCHED) && !rl_ok), "refused packet takes no slot");
    end
    if (ps_wr_en) begin
      int s;
      s = int'(ps_wr_slot);
      check(exp_d.exists(s), "write to an allocated slot");
      check(int'(ps_wr_beat) == written[s], "beats written in order");
      check(ps_wr_beat == 0 || ps_wr_data[DATA_W-1 -: 32] == {16'(exp_n[s]), 16'(ps_wr_beat)}, "payload data");
      written[s]++;
    end
    if (sched_valid && sched_ready) check_out(sched_desc, int'(RT_SCHED));
    if (tx_valid && tx_ready) check_out(tx_desc, int'(RT_TX));
    if (ctrl_valid && ctrl_ready) check_out(ctrl_desc, int'(RT_CTRL));
  end

  task automatic check_out(input desc_t d, input int q);
    int s;
    s = int'(d.slot);
    check(exp_d.exists(s) && d == exp_d[s], "descriptor fields");
    check(exp_q.exists(s) && exp_q[s] == q, "queue of the route");
    check(written[s] == ((exp_beats[s] > SLOT_BEATS) ? SLOT_BEATS : exp_beats[s]), "all beats stored");
    exp_d.delete(s); n_out++;
  endtask

  task automatic send_pkt(input int n);
    logic [15:0] uid;
    int len, nb;
    logic [DATA_W-1:0] b;
    logic [USER_W-1:0] user;
    case ($urandom_range(0, 4))
      0: uid = 16'd10; 1: uid = 16'd11; 2: uid = 16'd12; 3: uid = 16'd10;
      default: uid = 16'($urandom_range(13, 300));
    endcase
    len = ($urandom_range(0, 9) == 0) ? $urandom_range(2100, 2600) : $urandom_range(60, 1500);
    nb = (len + 63) / 64;
    b = '0;
    for (int i = 0; i < 16; i++) b[32*i +: 32] = $urandom;
    b = put16(b, OFF_IPLEN, 16'(len - 14));
    b = put16(b, OFF_UID, uid);
    cur_route = route_of(uid, user);
    cur_pkt = '0;
    cur_pkt.uid = uid[UID_W-1:0]; cur_pkt.user = user; cur_pkt.len = LEN_W'(len);
    cur_pkt.sip = get32(b, OFF_SIP); cur_pkt.dip = get32(b, OFF_DIP);
    cur_pkt.sport = get16(b, OFF_SPORT); cur_pkt.dport = get16(b, OFF_DPORT);
    cur_pkt.op = b[8*OFF_OP +: 8]; cur_pkt.key = get32(b, OFF_KEY);
    cur_pkt.val = get32(b, OFF_VAL); cur_pkt.seq = get32(b, OFF_SEQ);
    cur_beats = nb; cur_n = n;
    for (int k = 0; k < nb; k++) begin
      rx_valid = 1; rx_last = (k == nb - 1);
      if (k == 0) rx_data = b;
      else begin
        rx_data = '0;
        rx_data[DATA_W-1 -: 32] = {16'(n), 16'(k)};
      end
      @(negedge clk);
    end
    rx_valid = 0;
  endtask

  initial begin
    cfg = '0; rx_valid = 0; rx_last = 0; rx_data = '0;
    rl_ok = 1; ps_alloc_valid = 1; sched_ready = 1; tx_ready = 1; ctrl_ready = 1;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    cfg = '{valid: 1, tgt: T_MAT, addr: 16'd0, data: {1'b1, 13'd0, 2'(RT_SCHED), 5'd0, 3'd2, 24'd0, 16'd10}}; @(negedge clk);
    cfg = '{valid: 1, tgt: T_MAT, addr: 16'd1, data: {1'b1, 13'd0, 2'(RT_TX),    5'd0, 3'd3, 24'd0, 16'd11}}; @(negedge clk);
    cfg = '{valid: 1, tgt: T_MAT, addr: 16'd2, data: {1'b1, 13'd0, 2'(RT_CTRL),  5'd0, 3'd1, 24'd0, 16'd12}}; @(negedge clk);
    cfg = '0;
    // phase 1: line rate, everything ready -> nothing dropped
    for (int n = 0; n < 300; n++) send_pkt(n);
    repeat (5) @(negedge clk);
    check(n_taken == 300 && drop_nobuf == 0 && n_refused == 0, "line rate: every packet admitted");
    // phase 2: random refusals, stalls and buffer exhaustion
    fork
      begin
        for (int n = 300; n < 2300; n++) send_pkt(n);
      end
      begin
        for (int c = 0; c < 200000; c++) begin
          rl_ok = ($urandom_range(0, 3) != 0);
          ps_alloc_valid = ($urandom_range(0, 7) != 0);
          sched_ready = ($urandom_range(0, 2) != 0);
          tx_ready = ($urandom_range(0, 2) != 0);
          ctrl_ready = ($urandom_range(0, 4) == 0);
          @(negedge clk);
          if (pkts_in == 2300) break;
        end
      end
    join
    rl_ok = 1; ps_alloc_valid = 1; sched_ready = 1; tx_ready = 1; ctrl_ready = 1;
    repeat (30) @(negedge clk);
    check(pkts_in == 2300, "packets counted");
    check(n_out == n_taken, $sformatf("admitted packets delivered (%0d of %0d)", n_out, n_taken));
    check(n_taken + n_refused + int'(drop_nobuf) == 2300, "every packet accounted for");
    check(n_refused > 0 && drop_nobuf > 0, "refusals and buffer drops exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
