// tb_nt_nat: self-checking test of the NAT NT.
//
// Installs four translations and sends a mix of inside-to-outside packets
// (source rewritten), outside-to-inside packets (destination rewritten) and
// unrelated packets (unchanged).
// Descriptors are offered at random times and the output is stalled at
// random; a reference model computes the expected descriptor at the cycle
// the input is accepted, the scoreboard checks order and contents, and,
// while the output is ready, that each descriptor takes exactly one cycle
// (the task's single register stage).
module tb_nt_nat;
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

  nt_nat #(.NT_ID(5)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_d, .out_valid, .out_ready, .out_d, .cfg);

  initial begin
    #4000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [31:0] iip [4], oip [4];
  logic [15:0] ipt [4], opt [4];

  function automatic desc_t model(input desc_t d);
    desc_t r;
    r = d;
    for (int i = 0; i < 4; i++) begin
      if (d.sip == iip[i] && d.sport == ipt[i]) begin r.sip = oip[i]; r.sport = opt[i]; end
      if (d.dip == oip[i] && d.dport == opt[i]) begin r.dip = iip[i]; r.dport = ipt[i]; end
    end
    return r;
  endfunction

  function automatic desc_t rnd_desc(input int n);
    desc_t d;
    int i, f;
    d = '0;
    i = 0; f = 0;
    d.slot = SLOT_W'(n);
    i = $urandom_range(0, 3);
    d.sip = $urandom; d.dip = $urandom; d.sport = 16'($urandom); d.dport = 16'($urandom);
    case ($urandom_range(0, 2))
      0: begin d.sip = iip[i]; d.sport = ipt[i]; end
      1: begin d.dip = oip[i]; d.dport = opt[i]; end
      default: ;
    endcase
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
    for (int i = 0; i < 4; i++) begin
      iip[i] = 32'h0a000001 + 32'(i); ipt[i] = 16'(1000 + i);
      oip[i] = 32'hcb007101;          opt[i] = 16'(40000 + i);
      wr({6'd5, 10'(2 * i)},     {1'b1, 15'd0, ipt[i], iip[i]});
      wr({6'd5, 10'(2 * i + 1)}, {16'd0, opt[i], oip[i]});
    end
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

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
