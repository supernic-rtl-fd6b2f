// tb_nt_lb: self-checking test of the load-balancer NT.
//
// Configures a VIP with three backends and checks that packets to the VIP
// are rewritten to the backend selected by the flow hash (so one flow
// always reaches one server), that other packets pass unchanged, and that
// all backends receive traffic.
// Descriptors are offered at random times and the output is stalled at
// random; a reference model computes the expected descriptor at the cycle
// the input is accepted, the scoreboard checks order and contents, and,
// while the output is ready, that each descriptor takes exactly one cycle
// (the task's single register stage).
module tb_nt_lb;
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

  nt_lb #(.NT_ID(9)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_d, .out_valid, .out_ready, .out_d, .cfg);

  initial begin
    #4000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  localparam logic [31:0] VIP = 32'h0a0000fe;
  logic [31:0] be [3] = '{32'h0a000010, 32'h0a000011, 32'h0a000012};
  int used [3] = '{0, 0, 0};

  function automatic desc_t model(input desc_t d);
    desc_t r;
    logic [15:0] h;
    int b;
    r = d;
    h = d.sip[31:16] ^ d.sip[15:0] ^ d.sport;
    b = int'(h[7:0] ^ h[15:8]) % 3;
    if (d.dip == VIP) begin r.dip = be[b]; used[b]++; end
    return r;
  endfunction

  function automatic desc_t rnd_desc(input int n);
    desc_t d;
    int i, f;
    d = '0;
    i = 0; f = 0;
    d.slot = SLOT_W'(n);
    d.sip = $urandom; d.sport = 16'($urandom); d.dport = 16'd80;
    d.dip = ($urandom_range(0, 2) != 0) ? VIP : $urandom;
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
    wr({6'd9, 10'd0}, {24'd0, 8'd3, VIP});
    for (int b = 0; b < 3; b++) wr({6'd9, 10'(b + 1)}, {32'd0, be[b]});
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
    for (int b = 0; b < 3; b++) check(used[b] > 0, "every backend used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
