// tb_nt_region: self-checking test of one NT region.
//
// A region of seven dummy NTs (2-cycle latency) receives header messages
// with random run masks (which NTs the packet's DAG uses; the others are
// skipped) and random reservation masks. A message whose needed NTs all hold
// a reserved credit must come back with done = 1 after the whole chain; one
// that meets a needed NT without a reservation must come back from that
// position with done = 0 and exactly the NTs from there on still to run.
// Every executed NT must return one credit. An isolated fully reserved
// packet must cross the seven NTs in at most 7 x (latency + 1) + 3 cycles.
// Stopping the region (context switch) must hold new headers in the FIFO,
// let the ones inside finish and raise `idle`.
module tb_nt_region;
  import snic_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  cfg_wr_t cfg;
  logic stop, in_valid, in_ready, out_valid, out_ready, idle;
  reg_msg_t in_m;
  ret_msg_t out_m;
  logic [CHAIN_LEN-1:0] credit_ret;
  logic [31:0] load [CHAIN_LEN];
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  nt_region #(.REGION(3), .DUMMY_LAT(2)) dut (.*);

  initial begin
    #4000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  ret_msg_t exp_m [int];
  longint   t_in [int];
  int exp_cred = 0, got_cred = 0, got = 0, n_done = 0, n_early = 0;

  function automatic ret_msg_t expect_of(input reg_msg_t m);
    ret_msg_t r;
    r = '{d: m.d, region: m.region, done: 1'b1, run: '0};
    for (int p = 0; p < CHAIN_LEN; p++)
      if (m.run[p] && !m.rsv[p]) begin
        r.done = 1'b0;
        r.run = m.run & ~((CHAIN_LEN'(1) << p) - 1);
        return r;
      end
    return r;
  endfunction

  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < CHAIN_LEN; p++) got_cred += int'(credit_ret[p]);
    if (in_valid && in_ready) begin
      ret_msg_t e;
      e = expect_of(in_m);
      exp_m[int'(in_m.d.seq)] = e; t_in[int'(in_m.d.seq)] = cyc;
      for (int p = 0; p < CHAIN_LEN; p++)
        if (in_m.run[p] && in_m.rsv[p] && (e.done || (e.run[p] == 0))) exp_cred++;
    end
    if (out_valid && out_ready) begin
      int k;
      k = int'(out_m.d.seq);
      check(exp_m.exists(k) && out_m == exp_m[k], "returned message");
      if (out_m.done) n_done++; else n_early++;
      exp_m.delete(k);
      got++;
    end
  end

  initial begin
    cfg = '0; stop = 0; in_valid = 0; in_m = '0; out_ready = 1;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    // isolated full chain: latency bound
    for (int n = 0; n < 5; n++) begin
      longint t0;
      in_valid = 1; in_m = '0; in_m.d.seq = 32'(n); in_m.region = 3; in_m.run = '1; in_m.rsv = '1;
      @(negedge clk); in_valid = 0; t0 = cyc;
      while (!(out_valid && out_ready)) @(negedge clk);
      check(cyc - t0 <= 7 * 3 + 3, $sformatf("chain latency %0d", cyc - t0));
      @(negedge clk);
    end
    // random traffic
    for (int n = 5; n < 3000; n++) begin
      in_valid = ($urandom_range(0, 1) == 0);
      in_m = '0; in_m.d.seq = 32'(n); in_m.region = 3;
      in_m.run = CHAIN_LEN'($urandom);
      in_m.rsv = ($urandom_range(0, 1) == 0) ? in_m.run : (CHAIN_LEN'($urandom) & in_m.run);
      out_ready = ($urandom_range(0, 4) != 0);
      #1;
      if (!(in_valid && in_ready)) n--;
      @(negedge clk);
    end
    in_valid = 0; out_ready = 1;
    repeat (100) @(negedge clk);
    check(got == 3000, "every header returned");
    check(got_cred == exp_cred, $sformatf("credits returned %0d expected %0d", got_cred, exp_cred));
    check(n_done > 0 && n_early > 0, "full traversals and early returns both seen");
    check(idle, "idle when empty");
    // context switch: stop, send, nothing comes out
    stop = 1;
    for (int n = 3000; n < 3005; n++) begin
      in_valid = 1; in_m = '0; in_m.d.seq = 32'(n); in_m.region = 3; in_m.run = '1; in_m.rsv = '1;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (50) @(negedge clk);
    check(got == 3000 && !idle, "stopped region holds its headers");
    stop = 0;
    repeat (100) @(negedge clk);
    check(got == 3005 && idle, "headers released after restart");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
