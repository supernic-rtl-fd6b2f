// tb_region_xbar: self-checking test of the scheduler <-> region crossbar.
//
// Eight model regions with random readiness receive messages the scheduler
// side sends to random regions; each message must reach exactly the region
// named in it, in order, with no cycle added. All eight regions return
// messages at once and with random back-pressure; the merged return port
// must deliver every one, keep each region's order, and serve the regions
// fairly: with all eight always requesting, each is granted every eighth
// cycle (round robin).
module tb_region_xbar;
  import snic_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  localparam int N = NUM_REGIONS;
  logic s_valid, s_ready, r_valid, r_ready;
  reg_msg_t s_m, g_m;
  ret_msg_t r_m;
  logic [N-1:0] g_valid, g_ready, b_valid, b_ready;
  ret_msg_t b_m [N];

  region_xbar dut (.*);

  initial begin
    #4000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int fwd_q [N][$];
  int bseq [N];
  int bexp [N];
  int got_b = 0, got_f = 0;
  int last_grant [N];
  longint cyc = 0;
  bit fair_phase = 0;
  int sat = 0;
  int n_rr = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n) begin
    sat <= (&b_valid && r_ready) ? sat + 1 : 0;
    for (int r = 0; r < N; r++)
      if (g_valid[r] && g_ready[r]) begin
        check(int'(g_m.region) == r, "delivered to the named region");
        check(fwd_q[r].size() > 0 && int'(g_m.d.seq) == fwd_q[r][0], "forward order");
        void'(fwd_q[r].pop_front()); got_f++;
      end
    check($countones(g_valid) <= 1, "one region addressed at a time");
    if (r_valid && r_ready) begin
      int r;
      r = int'(r_m.region);
      check(b_valid[r] && b_ready[r], "return taken from its region");
      check(int'(r_m.d.seq) == bexp[r], "return order per region");
      bexp[r]++; got_b++;
      if (fair_phase && sat > N) begin check(cyc - last_grant[r] == N, "round robin"); n_rr++; end
      last_grant[r] = int'(cyc);
    end
  end

  // region models: return stream per region
  for (genvar r = 0; r < N; r++) begin : g_reg
    always @(posedge clk or negedge rst_n)
      if (!rst_n) begin
        b_valid[r] <= 0; bseq[r] = 0; b_m[r] <= '0;
      end else begin
        if (b_valid[r] && b_ready[r]) b_valid[r] <= 0;
        if ((!b_valid[r] || b_ready[r]) && (fair_phase || $urandom_range(0, 2) == 0) && bseq[r] < 600) begin
          b_valid[r] <= 1;
          b_m[r] <= '{d: '{seq: 32'(bseq[r]), default: '0}, region: REG_W'(r), done: 1'b1, run: '0};
          bseq[r] = bseq[r] + 1;
        end
      end
  end

  initial begin
    s_valid = 0; s_m = '0; r_ready = 1; g_ready = '1;
    for (int r = 0; r < N; r++) begin bexp[r] = 0; last_grant[r] = -1; end
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    for (int n = 0; n < 4000; n++) begin
      int r;
      r = $urandom_range(0, N - 1);
      s_valid = ($urandom_range(0, 3) != 0);
      s_m = '0; s_m.region = REG_W'(r); s_m.d.seq = 32'(n);
      g_ready = N'($urandom);
      r_ready = ($urandom_range(0, 3) != 0);
      #1;
      if (s_valid && s_ready) fwd_q[r].push_back(n);
      @(negedge clk);
    end
    s_valid = 0; r_ready = 1;
    repeat (20) @(negedge clk);
    check(got_f > 1000, "forward traffic delivered");
    for (int r = 0; r < N; r++) check(fwd_q[r].size() == 0, "no message lost forward");
    // fairness: all regions saturate the return port
    for (int r = 0; r < N; r++) last_grant[r] = -1;
    fair_phase = 1;
    repeat (3000) @(negedge clk);
    check(n_rr > 100, "round robin observed under saturation");
    check(got_b == N * 600, $sformatf("all returns delivered (%0d)", got_b));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
