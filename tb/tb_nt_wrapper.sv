// tb_nt_wrapper: self-checking test of the NT shell.
//
// A wrapper at chain position 2 around a 3-cycle dummy NT receives random
// messages whose run/rsv bits make them skip the NT, execute it, or leave
// the chain (no credit reserved). The test checks that skipped messages
// come out unchanged after one register, executed ones come out with their
// run/rsv bits for this position cleared and a credit-return pulse, exiting
// ones appear on the exit port with done = 0 and the remaining run mask,
// and that the load and skip counters match. Executed packets must take the
// NT latency plus nothing when the output is free.
module tb_nt_wrapper;
  import snic_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  localparam int POS = 2;
  logic in_valid, in_ready, out_valid, out_ready, exit_valid, exit_ready;
  reg_msg_t in_m, out_m;
  ret_msg_t exit_m;
  logic nt_in_valid, nt_in_ready, nt_out_valid, nt_out_ready;
  desc_t nt_in_d, nt_out_d;
  logic credit_ret;
  logic [31:0] load, skipped;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  nt_wrapper #(.POS(POS)) dut (.*);
  dummy_nt #(.LATENCY(3)) u_nt (.clk, .rst_n, .in_valid(nt_in_valid), .in_ready(nt_in_ready), .in_d(nt_in_d),
                                .out_valid(nt_out_valid), .out_ready(nt_out_ready), .out_d(nt_out_d));

  initial begin
    #4000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  reg_msg_t q_run [$], q_skip [$];
  ret_msg_t q_exit [$];
  longint   t_run [$];
  int n_run = 0, n_skip = 0, n_exit = 0, n_cr = 0, got = 0;
  bit free_out = 1;

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      if (!in_m.run[POS]) begin q_skip.push_back(in_m); n_skip++; end
      else if (in_m.rsv[POS]) begin
        reg_msg_t e;
        e = in_m; e.run[POS] = 0; e.rsv[POS] = 0;
        q_run.push_back(e); t_run.push_back(cyc); n_run++;
      end else begin
        q_exit.push_back('{d: in_m.d, region: in_m.region, done: 1'b0, run: in_m.run}); n_exit++;
      end
    end
    if (credit_ret) n_cr++;
    if (out_valid && out_ready) begin
      got++;
      if (q_run.size() > 0 && out_m == q_run[0]) begin
        longint t;
        void'(q_run.pop_front()); t = t_run.pop_front();
        if (free_out) check(cyc - t == 3, "NT latency only");
        check(credit_ret, "credit returned with the executed packet");
      end else if (q_skip.size() > 0 && out_m == q_skip[0]) begin
        void'(q_skip.pop_front());
        check(!credit_ret || nt_out_valid, "no credit for a skip");
      end else check(0, "output is the next executed or skipped message");
    end
    if (exit_valid && exit_ready) begin
      check(q_exit.size() > 0 && exit_m == q_exit[0], "exit message");
      void'(q_exit.pop_front());
      got++;
    end
  end

  initial begin
    in_valid = 0; in_m = '0; out_ready = 1; exit_ready = 1;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    // only executed packets, output free: latency check
    for (int n = 0; n < 50; n++) begin
      in_valid = 1; in_m = '0; in_m.d.seq = 32'(n); in_m.run = 7'b1111111; in_m.rsv = 7'b0000111;
      @(negedge clk);
    end
    in_valid = 0; repeat (10) @(negedge clk);
    free_out = 0;
    for (int n = 50; n < 4000; n++) begin
      in_valid = ($urandom_range(0, 2) != 0);
      in_m = '0; in_m.d.seq = 32'(n); in_m.d.sip = $urandom; in_m.region = REG_W'($urandom);
      in_m.run = CHAIN_LEN'($urandom); in_m.rsv = CHAIN_LEN'($urandom) & in_m.run;
      out_ready = ($urandom_range(0, 3) != 0); exit_ready = ($urandom_range(0, 3) != 0);
      #1;
      if (!(in_valid && in_ready)) n--;
      @(negedge clk);
    end
    in_valid = 0; out_ready = 1; exit_ready = 1;
    repeat (20) @(negedge clk);
    check(got == 4000, $sformatf("all %0d messages delivered (%0d)", 4000, got));
    check(load == 32'(n_run) && n_cr == n_run, "load counter and credit returns");
    check(skipped == 32'(n_skip), "skip counter");
    check(n_run > 0 && n_skip > 0 && n_exit > 0, "all three cases exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
