// tb_nt_gbn: self-checking test of the go-back-N receiver NT.
//
// Sends, on 8 flows, sequence numbers that are mostly in order with random
// losses and duplicates (retransmissions), and checks against a per-flow
// model that in-order packets pass and advance the expected number and all
// others come back as NACKs carrying the expected number.
// Descriptors are offered at random times and the output is stalled at
// random; a reference model computes the expected descriptor at the cycle
// the input is accepted, the scoreboard checks order and contents, and,
// while the output is ready, that each descriptor takes exactly one cycle
// (the task's single register stage).
module tb_nt_gbn;
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

  logic [31:0] nacks;
  nt_gbn dut (.clk, .rst_n, .in_valid, .in_ready, .in_d, .out_valid, .out_ready, .out_d, .nacks);

  initial begin
    #4000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int exp_m [8];
  int nxt [8];
  int nn = 0;

  function automatic desc_t model(input desc_t d);
    desc_t r;
    int f;
    r = d; f = int'(d.sport) % 8;
    if (int'(d.seq) == exp_m[f]) exp_m[f]++;
    else begin r.op = OP_NACK; r.seq = 32'(exp_m[f]); r.reply = 1'b1; nn++; end
    return r;
  endfunction

  function automatic desc_t rnd_desc(input int n);
    desc_t d;
    int i, f;
    d = '0;
    i = 0; f = 0;
    d.slot = SLOT_W'(n);
    f = $urandom_range(0, 7);
    d.sport = 16'(f + 8 * $urandom_range(0, 100));
    case ($urandom_range(0, 9))
      0: nxt[f] = nxt[f] + 1;                              // a loss
      1: nxt[f] = (nxt[f] > 3) ? nxt[f] - 3 : 0;           // go back
      default: ;
    endcase
    d.seq = 32'(nxt[f]);
    nxt[f]++;
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
    for (int f = 0; f < 8; f++) begin exp_m[f] = 0; nxt[f] = 0; end
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
    check(nacks == 32'(nn) && nn > 0, "NACK counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
