// tb_nt_firewall: self-checking test of the firewall NT.
//
// Installs deny rules (a /24 for any port, a /16 for port 22 and a /32 for
// port 80) and checks that matching packets are marked dropped and all
// others pass unchanged.
// Descriptors are offered at random times and the output is stalled at
// random; a reference model computes the expected descriptor at the cycle
// the input is accepted, the scoreboard checks order and contents, and,
// while the output is ready, that each descriptor takes exactly one cycle
// (the task's single register stage).
module tb_nt_firewall;
  import snic_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  cfg_wr_t cfg;
  logic in_valid, in_ready, out_valid, out_ready;
  desc_t in_d, out_d;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  nt_firewall #(.NT_ID(3)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_d, .out_valid, .out_ready, .out_d, .cfg);

  initial begin
    #4000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [31:0] pre [3] = '{32'h0a010200, 32'hc0a80000, 32'h08080808};
  int          ml  [3] = '{24, 16, 32};
  int          dp  [3] = '{0, 22, 80};
  int          ndrop = 0;

  function automatic desc_t model(input desc_t d);
    desc_t r;
    r = d;
    for (int i = 0; i < 3; i++)
      if ((d.sip >> (32 - ml[i])) == (pre[i] >> (32 - ml[i])) && (dp[i] == 0 || d.dport == 16'(dp[i])))
        r.drop = 1'b1;
    return r;
  endfunction

  function automatic desc_t rnd_desc(input int n);
    desc_t d;
    int i, f;
    d = '0;
    i = 0; f = 0;
    d.slot = SLOT_W'(n);
    case ($urandom_range(0, 3))
      0: d.sip = 32'h0a010200 | 32'($urandom_range(0, 255));
      1: d.sip = 32'hc0a80000 | 32'($urandom_range(0, 65535));
      2: d.sip = 32'h08080808;
      default: d.sip = $urandom;
    endcase
    d.dport = ($urandom_range(0, 1) == 0) ? 16'(dp[$urandom_range(0, 2)]) : 16'($urandom_range(1, 1000));
    d.sport = 16'($urandom);
    return d;
  endfunction

  task automatic wr(input logic [15:0] a, input logic [63:0] v);
    cfg = '{valid: 1'b1, tgt: T_NT, addr: a, data: v};
    @(negedge clk);
    cfg = '0;
  endtask

  desc_t  exp_q [$];
  longint t_q [$];
  int     got = 0;
  bit     stalled = 0;
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin exp_q.push_back(model(in_d)); t_q.push_back(cyc); end
    if (out_valid && out_ready) begin
      desc_t e;
      longint t;
      e = exp_q.pop_front(); t = t_q.pop_front();
      check(out_d == e, $sformatf("output %0d matches model", got));
      if (!stalled) check(cyc - t == 1, "one-cycle latency");
      got++;
    end
    if (!out_ready && out_valid) stalled <= 1;
  end

  int sent = 0;
  initial begin
    cfg = '0; in_valid = 0; in_d = '0; out_ready = 1;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    for (int i = 0; i < 3; i++)
      wr({6'd3, 10'(i)}, {1'b1, 15'(dp[i]), 10'd0, 6'(ml[i]), pre[i]});
    wr({6'd4, 10'd5}, {1'b1, 15'd0, 10'd0, 6'd0, 32'd0});   // other NT: must be ignored
    // phase 1: streaming, output always ready
    for (int n = 0; n < 200; n++) begin
      in_valid = 1; in_d = rnd_desc(n);
      @(negedge clk);
    end
    in_valid = 0; repeat (4) @(negedge clk);
    check(got == 200, "streamed at one descriptor per cycle");
    // phase 2: random valid / ready
    for (int n = 200; n < 3000; n++) begin
      in_valid = ($urandom_range(0, 3) != 0);
      in_d = rnd_desc(n);
      out_ready = ($urandom_range(0, 2) != 0);
      #1;
      if (in_valid && in_ready) sent++;
      else n--;
      @(negedge clk);
    end
    in_valid = 0; out_ready = 1;
    repeat (10) @(negedge clk);
    check(got == 3000, "every descriptor delivered");
    begin
      desc_t d;
      d = '0; d.sip = 32'h0a010277; d.dport = 16'd9; check(model(d).drop, "model sanity: /24 denies");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
