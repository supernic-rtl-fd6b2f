// tb_snic_top: end-to-end test of the SuperNIC data plane at full size.
//
// The top is instantiated with its default parameters (the board layout
// of snic_pkg: region 0 holds the chain NAT-FW-KV-FW-LB plus two dummy
// NTs, region 1 a go-back-N receiver and a KV cache, regions 2-7 dummy
// NTs of 10 cycles). The test plays the MAC, the SoftCores and an NT memory
// client and programs every table through the configuration bus:
//   uid 1  (user 1) VPC chain in region 0, NTs 5 and 6 skipped;
//   uid 2  (user 2) go-back-N then KV cache in region 1;
//   uid 3  (user 3) two parallel chains (7 NTs over regions 2/3, 3 NTs over
//          regions 4/5), joined, then a chain with skipped NTs (regions 6/7);
//   uid 4  no NT: straight to TX;   uid 5  control packet for the SoftCores;
//   uid 6  (user 4) one dummy NT, rate limited to 1 byte per cycle.
// Region 2 NT 3 gets a single credit so that reservations stop short.
// Traffic: a warm-up with isolated packets measures the latency of the
// no-NT path and of a one-NT DAG, which must stay within the paper's
// 196 ns (49 cycles at 250 MHz) on top of the NT's own time; a burst of
// back-to-back no-NT packets must all leave (line rate); then mixed random
// traffic while region 6 is stopped for a context switch for a while.
// Every packet leaving on TX is matched to what was sent (by an id kept in
// the payload) and checked: NAT rewrite, firewall drop, load-balancer
// backend choice, KV-cache hits answered back to the client, go-back-N
// NACKs returned to the sender, and that every packet is accounted for.
// Each mechanism is counted and the test fails if any never happened.
module tb_snic_top;
  import snic_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic rx_valid, rx_last, tx_valid, tx_ready, tx_last;
  logic [DATA_W-1:0] rx_data, tx_data;
  cfg_wr_t cfg;
  logic sc_rx_valid, sc_rx_ready, sc_tx_valid, sc_tx_ready;
  desc_t sc_rx_desc, sc_tx_desc;
  logic [NUM_REGIONS-1:0] region_stop, region_idle;
  logic [USER_W-1:0] mon_user;
  logic [CLASS_W-1:0] mon_cls;
  logic [31:0] mon_count;
  logic [31:0] nt_load [NUM_NT];
  stats_t stats;
  logic vm_ready, vm_req_valid, vm_req_write, mem_valid, mem_fault, mem_write;
  logic [NT_W-1:0] vm_req_as;
  logic [31:0] vm_req_va;
  logic [33:0] mem_pa;

  snic_top dut (.*);

  initial begin
    #20000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ------------------------------------------------------------ config
  task automatic wr(input cfg_tgt_e t, input int a, input logic [63:0] d);
    cfg = '{valid: 1'b1, tgt: t, addr: 16'(a), data: d};
    @(negedge clk);
    cfg = '0;
  endtask

  task automatic mat(input int e, input int uid, input route_e r, input int user);
    logic [63:0] d;
    d = '0; d[63] = 1'b1; d[49:48] = r; d[40 +: USER_W] = USER_W'(user); d[15:0] = 16'(uid);
    wr(T_MAT, e, d);
  endtask

  task automatic stage(input int uid, input int s, input int n, input int c0, input int r0,
                       input int c1, input int r1);
    stage_t st;
    st = '0; st.nbr = (BR_W + 1)'(n);
    st.br[0].cls = CLASS_W'(c0); st.br[0].run = CHAIN_LEN'(r0);
    st.br[1].cls = CLASS_W'(c1); st.br[1].run = CHAIN_LEN'(r1);
    wr(T_STAGE, uid * MAX_STAGES + s, 64'(st));
  endtask

  localparam logic [31:0] NAT_IN  = 32'h0a000001, NAT_OUT = 32'hcb007101;
  localparam logic [31:0] VIP     = 32'h0a0000fe;
  localparam logic [31:0] BE0 = 32'h0a000010, BE1 = 32'h0a000011;
  localparam logic [31:0] BAD_NET = 32'h0a090000;

  task automatic configure();
    mat(0, 1, RT_SCHED, 1); mat(1, 2, RT_SCHED, 2); mat(2, 3, RT_SCHED, 3);
    mat(3, 4, RT_TX, 0);    mat(4, 5, RT_CTRL, 0);  mat(5, 6, RT_SCHED, 4);
    // classes: 0 = region 0, 1 = region 1, 2 = regions 2/3, 3 = regions 4/5, 4 = regions 6/7, 5 = region 7
    wr(T_CLASS, 0, 64'h01); wr(T_CLASS, 1, 64'h02); wr(T_CLASS, 2, 64'h0c);
    wr(T_CLASS, 3, 64'h30); wr(T_CLASS, 4, 64'hc0); wr(T_CLASS, 5, 64'h80);
    wr(T_DAGLEN, 1, 1); stage(1, 0, 1, 0, 7'b0011111, 0, 0);
    wr(T_DAGLEN, 2, 1); stage(2, 0, 1, 1, 7'b0000011, 0, 0);
    wr(T_DAGLEN, 3, 2); stage(3, 0, 2, 2, 7'b1111111, 3, 7'b0000111);
                        stage(3, 1, 1, 4, 7'b0101010, 0, 0);
    wr(T_DAGLEN, 6, 1); stage(6, 0, 1, 5, 7'b0000001, 0, 0);
    wr(T_CREDIT, 2 * CHAIN_LEN + 3, 1);
    // NAT (NT 0): inside 10.0.0.1:1000 <-> outside 203.0.113.1:40000
    wr(T_NT, {6'd0, 10'd0}, {1'b1, 15'd0, 16'd1000, NAT_IN});
    wr(T_NT, {6'd0, 10'd1}, {16'd0, 16'd40000, NAT_OUT});
    // firewall (NT 1): deny 10.9.0.0/16, any port
    wr(T_NT, {6'd1, 10'd0}, {1'b1, 15'd0, 10'd0, 6'd16, BAD_NET});
    // load balancer (NT 4): VIP over two backends
    wr(T_NT, {6'd4, 10'd0}, {24'd0, 8'd2, VIP});
    wr(T_NT, {6'd4, 10'd1}, {32'd0, BE0});
    wr(T_NT, {6'd4, 10'd2}, {32'd0, BE1});
  endtask

  // ------------------------------------------------------------ packets
  typedef struct {
    int          uid;
    logic [31:0] sip, dip;
    logic [15:0] sport, dport;
    logic [7:0]  op;
    logic [31:0] key, val, seq;
    int          beats;
    longint      t_sent;
  } pkt_t;
  pkt_t sent [int];
  int   next_id = 0;

  localparam int OFF_ID = 60;

  task automatic send(input int uid, input logic [31:0] sip, input logic [31:0] dip,
                      input logic [15:0] sport, input logic [7:0] op, input logic [31:0] key,
                      input logic [31:0] val, input logic [31:0] seq, input int beats);
    logic [DATA_W-1:0] b;
    pkt_t p;
    int id;
    id = next_id++;
    b = '0;
    b[0 +: 48] = 48'h02_00_00_00_00_01; b[48 +: 48] = 48'h02_00_00_00_00_02;
    b = put16(b, OFF_IPLEN, 16'(beats * 64 - 14 - 8));
    b = put32(b, OFF_SIP, sip); b = put32(b, OFF_DIP, dip);
    b = put16(b, OFF_SPORT, sport); b = put16(b, OFF_DPORT, 16'd7777);
    b = put16(b, OFF_UID, 16'(uid));
    b[8*OFF_OP +: 8] = op;
    b = put32(b, OFF_KEY, key); b = put32(b, OFF_VAL, val); b = put32(b, OFF_SEQ, seq);
    b = put32(b, OFF_ID, 32'(id));
    p = '{uid: uid, sip: sip, dip: dip, sport: sport, dport: 16'd7777, op: op, key: key, val: val,
          seq: seq, beats: beats, t_sent: cyc};
    sent[id] = p;
    for (int k = 0; k < beats; k++) begin
      rx_valid = 1; rx_last = (k == beats - 1);
      rx_data = (k == 0) ? b : {16{32'(id * 100 + k)}};
      @(negedge clk);
    end
    rx_valid = 0; rx_last = 0;
  endtask

  // ----------------------------------------------------------- TX side
  int got_uid [8];
  int n_tx = 0, n_nat = 0, n_lb = 0, n_kv_hit = 0, n_nack = 0, n_sc = 0, n_bypass = 0;
  int beat = 0, cur_id = -1;
  longint lat_last = 0;
  // go-back-N: expected sequence per flow, mirrored here
  int gbn_exp [8];
  bit kv_set [int][int];   // key -> values ever written

  always @(posedge clk) if (rst_n && tx_valid && tx_ready) begin
    if (beat == 0) begin
      int id;
      pkt_t p;
      id = int'(get32(tx_data, OFF_ID));
      cur_id = id;
      check(sent.exists(id), "TX packet was sent");
      if (sent.exists(id)) begin
        p = sent[id];
        lat_last = cyc - p.t_sent;
        got_uid[p.uid]++;
        n_tx++;
        case (p.uid)
          1: begin
            check(p.sip[31:16] != BAD_NET[31:16], "firewall lets no denied packet through");
            if (p.sip == NAT_IN && p.sport == 16'd1000 && tx_data[8*OFF_OP +: 8] != OP_GET_RESP) begin
              check(get32(tx_data, OFF_SIP) == NAT_OUT && get16(tx_data, OFF_SPORT) == 16'd40000, "NAT rewrite");
              n_nat++;
            end
            if (p.dip == VIP) begin
              check(get32(tx_data, OFF_DIP) == BE0 || get32(tx_data, OFF_DIP) == BE1, "load balancer backend");
              n_lb++;
            end
            if (p.op == OP_GET && tx_data[8*OFF_OP +: 8] == OP_GET_RESP) begin
              check(kv_set.exists(int'(p.key)) && kv_set[int'(p.key)].exists(int'(get32(tx_data, OFF_VAL))),
                    "KV hit carries a value written for that key");
              check(get32(tx_data, OFF_DIP) == p.sip || get32(tx_data, OFF_DIP) == NAT_OUT,
                    "KV reply goes back to the client");
              n_kv_hit++;
            end
          end
          2: if (tx_data[8*OFF_OP +: 8] == OP_NACK) begin
               check(get32(tx_data, OFF_DIP) == p.sip, "NACK goes back to the sender");
               n_nack++;
             end
          4: n_bypass++;
          5: begin
               check(get32(tx_data, OFF_DIP) == p.sip, "SoftCore reply");
               n_sc++;
             end
          default: ;
        endcase
      end
    end else if (cur_id >= 0) check(tx_data[31:0] == 32'(cur_id * 100 + beat), "payload beat");
    if (tx_last) begin
      if (sent.exists(cur_id)) check(beat == sent[cur_id].beats - 1, "packet length");
      beat = 0;
    end else beat++;
  end

  // SoftCore model: answer every control packet by sending it back
  desc_t sc_q [$];
  always @(posedge clk) if (rst_n) begin
    if (sc_tx_valid && sc_tx_ready) void'(sc_q.pop_front());
    if (sc_rx_valid && sc_rx_ready) begin
      desc_t d;
      d = sc_rx_desc; d.reply = 1'b1;
      sc_q.push_back(d);
    end
  end
  assign sc_tx_valid = sc_q.size() > 0;
  assign sc_tx_desc  = sc_q.size() > 0 ? sc_q[0] : '0;

  // -------------------------------------------------------------- main
  int n_fw_sent = 0, n_rl_sent = 0, expect_tx;
  initial begin
    int lat0, lat1;
    rx_valid = 0; rx_last = 0; rx_data = '0; tx_ready = 1; cfg = '0;
    sc_rx_ready = 1; region_stop = '0; mon_user = '0; mon_cls = '0;
    vm_req_valid = 0; vm_req_as = '0; vm_req_va = '0; vm_req_write = 0;
    for (int f = 0; f < 8; f++) gbn_exp[f] = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    configure();

    // isolated packets: latency of the no-NT path and of a one-NT DAG
    send(4, 32'h0b000001, 32'h0b000002, 16'd1, 8'd0, 0, 0, 0, 1);
    while (got_uid[4] < 1) @(negedge clk);
    lat0 = int'(lat_last);
    check(lat0 <= 49, $sformatf("no-NT path latency %0d cycles (196 ns = 49)", lat0));
    send(6, 32'h0b000001, 32'h0b000002, 16'd1, 8'd0, 0, 0, 0, 1);
    while (got_uid[6] < 1) @(negedge clk);
    lat1 = int'(lat_last);
    check(lat1 <= 49 + 10, $sformatf("one-NT DAG latency %0d cycles (196 ns + NT)", lat1));
    $display("latency: no NT %0d cycles, one 10-cycle NT %0d cycles", lat0, lat1);

    // line rate: 200 minimum-size no-NT packets, one every 2 cycles
    for (int n = 0; n < 200; n++) begin
      send(4, 32'h0b000001, 32'h0b000002, 16'(n), 8'd0, 0, 0, 0, 1);
      @(negedge clk);
    end
    repeat (100) @(negedge clk);
    check(got_uid[4] == 201 && stats.drop_nobuf == 0, "line rate without loss");

    // rate limit user 4 to 1 byte per cycle, burst 256 bytes
    wr(T_RL, 4, {1'b1, 31'd256, 32'd256});

    // mixed traffic
    for (int n = 0; n < 3000; n++) begin
      int k;
      if (n == 1000) region_stop[6] = 1'b1;
      if (n == 1400) region_stop[6] = 1'b0;
      tx_ready = ($urandom_range(0, 9) != 0);
      k = $urandom_range(0, 99);
      if (k < 25) begin
        // VPC chain: NAT, firewall, KV, LB
        int j;
        j = $urandom_range(0, 5);
        case (j)
          0: send(1, NAT_IN, 32'h08080808, 16'd1000, 8'd0, 0, 0, 0, $urandom_range(1, 3));
          1: begin send(1, BAD_NET | 32'($urandom_range(1, 9999)), 32'h08080808, 16'd5, 8'd0, 0, 0, 0, 1); n_fw_sent++; end
          2: send(1, 32'h0c000001 + 32'($urandom_range(0, 999)), VIP, 16'($urandom), 8'd0, 0, 0, 0, 2);
          3: begin
               int key, v;
               key = $urandom_range(1, 8); v = $urandom;
               send(1, 32'h0c000009, 32'h0d000001, 16'd7, OP_SET, 32'(key), 32'(v), 0, 1);
               kv_set[key][v] = 1'b1;
             end
          default: send(1, 32'h0c000009, 32'h0d000001, 16'd7, OP_GET, 32'($urandom_range(1, 12)), 0, 0, 1);
        endcase
      end else if (k < 45) begin
        int f;
        f = $urandom_range(0, 7);
        // mostly in order, sometimes a gap (loss)
        if ($urandom_range(0, 9) == 0) gbn_exp[f] += 2; else gbn_exp[f] += 1;
        send(2, 32'h0e000001 + 32'(f), 32'h0e0000ff, 16'(f), 8'd0, 0, 0, 32'(gbn_exp[f] - 1), 1);
      end else if (k < 70) send(3, 32'h0f000001, 32'h0f000002, 16'(n), 8'd0, 0, 0, 0, $urandom_range(1, 4));
      else if (k < 80) send(4, 32'h0b000001, 32'h0b000002, 16'(n), 8'd0, 0, 0, 0, $urandom_range(1, 2));
      else if (k < 85) send(5, 32'h0a0a0a0a, 32'h0a0a0a01, 16'(n), 8'd0, 0, 0, 0, 1);
      else begin send(6, 32'h0b000005, 32'h0b000006, 16'(n), 8'd0, 0, 0, 0, 4); n_rl_sent++; end
      if ($urandom_range(0, 3) == 0) repeat ($urandom_range(1, 20)) @(negedge clk);
    end
    tx_ready = 1;
    for (int w = 0; w < 200000; w++) begin
      @(negedge clk);
      if (n_tx + int'(stats.dropped) + int'(stats.rl_refused) + int'(stats.drop_nobuf) == next_id) break;
    end
    repeat (100) @(negedge clk);

    // NT memory: wait for the page-table sweep, then translate
    while (!vm_ready) @(negedge clk);
    vm_req_valid = 1; vm_req_as = 6'd8; vm_req_va = 32'h0020_0040; vm_req_write = 1;
    @(negedge clk); vm_req_valid = 0;
    check(mem_valid && !mem_fault && mem_pa[20:0] == 21'h40, "NT memory access translated");
    vm_req_valid = 1; vm_req_va = 32'h4000_0000; @(negedge clk); vm_req_valid = 0;
    check(mem_valid && mem_fault, "access beyond 1 GB faults");

    // accounting and mechanisms
    $display("pkts %0d tx %0d dropped %0d refused %0d nobuf %0d", next_id, n_tx, stats.dropped,
             stats.rl_refused, stats.drop_nobuf);
    $display("full %0d part %0d early %0d fork %0d join %0d park %0d pause %0d nat %0d lb %0d kv %0d nack %0d sc %0d",
             stats.full_rsv, stats.part_rsv, stats.early_ret, stats.forks, stats.join_wait, stats.parked,
             stats.pause_hold, n_nat, n_lb, n_kv_hit, n_nack, n_sc);
    check(int'(stats.pkts_in) == next_id, "parser saw every packet");
    check(n_tx + int'(stats.dropped) + int'(stats.rl_refused) + int'(stats.drop_nobuf) == next_id,
          "every packet sent, dropped or refused");
    check(int'(stats.dropped) <= n_fw_sent, "only firewall-denied packets dropped by NTs");
    check(stats.ps_used == 0, "every packet-store slot freed");
    check(stats.full_rsv > 0, "mechanism: full chain reservation");
    check(stats.part_rsv > 0, "mechanism: partial reservation");
    check(stats.early_ret > 0, "mechanism: early return to the scheduler");
    check(stats.forks > 0, "mechanism: fork (DAG parallelism)");
    check(stats.join_wait > 0, "mechanism: join in the sync buffer");
    check(stats.parked > 0, "mechanism: header parked");
    check(stats.pause_hold > 0, "mechanism: context-switch hold");
    check(stats.rl_refused > 0, "mechanism: rate-limit drop");
    check(stats.dropped > 0, "mechanism: NT drop");
    check(n_bypass > 0, "mechanism: no-NT bypass");
    check(n_sc > 0, "mechanism: control path to and from the SoftCores");
    check(n_nat > 0, "mechanism: NAT");
    check(n_lb > 0, "mechanism: load balancer");
    check(n_kv_hit > 0, "mechanism: KV hit");
    check(n_nack > 0, "mechanism: go-back-N NACK");
    check(nt_load[5] == 0 && nt_load[6] == 0 && nt_load[0] > 0, "mechanism: skipped NTs do no work");
    check(nt_load[2 * CHAIN_LEN] > 0 && nt_load[3 * CHAIN_LEN] > 0, "instance parallelism over two regions");
    mon_user = 3; mon_cls = 2; #1;
    check(mon_count > 0, "intended load monitored");
    check(&region_idle, "all regions idle at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
