// tb_egress: self-checking test of the transmit side.
//
// Three sources (scheduler, no-NT bypass, SoftCore) offer random
// descriptors; a model packet store answers reads one cycle later with a
// pattern derived from slot and beat. For each sent packet the test checks
// the number of beats (ceil(len/64)), that the first beat carries the
// descriptor's header fields (swapped for replies) while later beats are
// the stored payload, that tx_last marks the last beat, and that every
// slot is freed exactly once, dropped packets without being sent. With the
// MAC always ready, the beats of one packet must leave on consecutive
// cycles (one 64-byte beat per cycle: 128 Gb/s at 250 MHz).
module tb_egress;
  import snic_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic [2:0] in_valid, in_ready;
  desc_t in_d [3];
  logic ps_rd_en, ps_free_en, tx_valid, tx_ready, tx_last;
  logic [SLOT_W-1:0] ps_rd_slot, ps_free_slot;
  logic [BEAT_W-1:0] ps_rd_beat;
  logic [DATA_W-1:0] ps_rd_data, tx_data;
  logic [31:0] n_sent, n_dropped;

  egress dut (.*);

  function automatic logic [DATA_W-1:0] pat(input int slot, input int beat);
    logic [DATA_W-1:0] v;
    for (int i = 0; i < DATA_W / 32; i++) v[32*i +: 32] = 32'(slot * 7919 + beat * 104729 + i * 31);
    return v;
  endfunction

  always @(posedge clk) if (ps_rd_en) ps_rd_data <= pat(int'(ps_rd_slot), int'(ps_rd_beat));

  initial begin
    #4000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  desc_t sentq [$];
  bit freed [PS_SLOTS];
  int nfreed = 0, ndrop = 0, nsent = 0, beat = 0, bubbles = 0;
  bit in_pkt = 0, always_ready = 1;
  int next_slot = 0;
  bit acc [3];

  always @(posedge clk) if (rst_n) begin
    if (ps_free_en) begin
      check(!freed[ps_free_slot], $sformatf("slot %0d freed once t=%0t", ps_free_slot, $time));
      freed[ps_free_slot] = 1; nfreed++;
    end
    for (int k = 0; k < 3; k++) acc[k] = in_valid[k] && in_ready[k];
    for (int k = 0; k < 3; k++)
      if (in_valid[k] && in_ready[k]) begin
        if (in_d[k].drop) ndrop++; else sentq.push_back(in_d[k]);
      end
    if (always_ready && in_pkt && !tx_valid) bubbles++;
    if (tx_valid && tx_ready) begin
      desc_t d;
      int nb;
      d = sentq[0];
      nb = (int'(d.len) + 63) / 64;
      if (beat == 0) begin
        check(get32(tx_data, OFF_SIP) == (d.reply ? d.dip : d.sip), "source address from descriptor");
        check(get16(tx_data, OFF_DPORT) == (d.reply ? d.sport : d.dport), "destination port from descriptor");
        check(get32(tx_data, OFF_SEQ) == d.seq && get32(tx_data, OFF_VAL) == d.val, "application fields");
        check(tx_data[511:8*57] == pat(int'(d.slot), 0) >> (8*57), "rest of first beat kept");
      end else check(tx_data == pat(int'(d.slot), beat), "payload beat");
      check(tx_last == (beat == nb - 1), "tx_last on the last beat");
      in_pkt = !tx_last;
      if (tx_last) begin void'(sentq.pop_front()); beat = 0; nsent++; end
      else beat++;
    end
  end

  int offered = 0;
  initial begin
    in_valid = '0; tx_ready = 1;
    for (int k = 0; k < 3; k++) in_d[k] = '0;
    for (int i = 0; i < PS_SLOTS; i++) freed[i] = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    for (int n = 0; n < 20000 && (next_slot < PS_SLOTS || in_valid != 0); n++) begin
      if (n == 3000) always_ready = 0;
      for (int k = 0; k < 3; k++)
        if (!in_valid[k] && next_slot < PS_SLOTS && $urandom_range(0, 7) == 0) begin
          in_valid[k] = 1;
          in_d[k] = '0;
          in_d[k].slot = SLOT_W'(next_slot++);
          in_d[k].len  = LEN_W'($urandom_range(60, 1500));
          in_d[k].drop = ($urandom_range(0, 5) == 0);
          in_d[k].reply = ($urandom_range(0, 3) == 0);
          in_d[k].sip = $urandom; in_d[k].dip = $urandom;
          in_d[k].sport = 16'($urandom); in_d[k].dport = 16'($urandom);
          in_d[k].seq = $urandom; in_d[k].val = $urandom;
        end
      tx_ready = always_ready || ($urandom_range(0, 2) != 0);
      @(posedge clk); #1;
      for (int k = 0; k < 3; k++) if (acc[k]) in_valid[k] = 0;
      @(negedge clk);
    end
    tx_ready = 1;
    repeat (2000) @(negedge clk);
    check(next_slot == PS_SLOTS, "all descriptors offered");
    check(nfreed == PS_SLOTS, $sformatf("every slot freed (%0d)", nfreed));
    check(n_sent == 32'(nsent) && n_dropped == 32'(ndrop) && nsent + ndrop == PS_SLOTS, "counters");
    check(bubbles == 0, $sformatf("one beat per cycle (%0d bubbles)", bubbles));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
