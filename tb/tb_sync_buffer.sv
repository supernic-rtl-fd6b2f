// tb_sync_buffer: self-checking test of the join counters.
//
// Opens joins of 2..4 branches on random tags, delivers the branch results
// in random order with random drop flags and checks that only the last
// arrival of each join is reported as last, that the drop flags of all
// branches are ORed into it, and that the count of open joins follows a
// reference model. `arr_last` is combinational, so a join costs no cycle.
module tb_sync_buffer;
  import snic_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic fork_en, arr_en, arr_drop, arr_last, arr_drop_any;
  logic [SLOT_W-1:0] fork_tag, arr_tag;
  logic [BR_W:0] fork_n;
  logic [$clog2(PS_SLOTS+1)-1:0] open_joins;
  int left [PS_SLOTS];
  bit dropm [PS_SLOTS];
  int open_m;

  sync_buffer dut (.*);

  initial begin
    #2000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    fork_en = 0; arr_en = 0; arr_drop = 0; fork_tag = '0; arr_tag = '0; fork_n = '0;
    for (int i = 0; i < PS_SLOTS; i++) begin left[i] = 0; dropm[i] = 0; end
    open_m = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    // directed: 3 branches, middle one dropped
    fork_en = 1; fork_tag = 7; fork_n = 3; @(negedge clk); fork_en = 0;
    check(open_joins == 1, "one open join");
    arr_tag = 7; arr_drop = 0; #1; check(!arr_last, "first of three is not last");
    arr_en = 1; @(negedge clk);
    arr_drop = 1; #1; check(!arr_last && arr_drop_any, "second of three, dropped");
    @(negedge clk);
    arr_drop = 0; #1; check(arr_last && arr_drop_any, "third is last and carries the drop");
    @(negedge clk); arr_en = 0;
    check(open_joins == 0, "join closed");
    // arr_last is a peek: without arr_en nothing changes
    fork_en = 1; fork_tag = 9; fork_n = 2; @(negedge clk); fork_en = 0;
    arr_tag = 9; repeat (3) @(negedge clk); #1;
    check(!arr_last && open_joins == 1, "peek does not consume");
    arr_en = 1; @(negedge clk); #1; check(arr_last, "second of two is last"); @(negedge clk); arr_en = 0;
    // random
    for (int n = 0; n < 20000; n++) begin
      int t, cand;
      fork_en = 0; arr_en = 0;
      t = $urandom_range(0, PS_SLOTS - 1);
      cand = $urandom_range(0, PS_SLOTS - 1);
      if (left[t] == 0 && $urandom_range(0, 1) == 0) begin
        fork_en = 1; fork_tag = SLOT_W'(t); fork_n = (BR_W + 1)'($urandom_range(2, MAX_PAR));
      end
      if (left[cand] > 0 && !(fork_en && t == cand)) begin
        arr_en = 1; arr_tag = SLOT_W'(cand); arr_drop = ($urandom_range(0, 3) == 0);
      end
      #1;
      if (arr_en) begin
        check(arr_last == (left[cand] == 1), "last flag");
        check(arr_drop_any == (dropm[cand] | arr_drop), "drop OR");
        left[cand]--; dropm[cand] |= arr_drop;
        if (left[cand] == 0) begin dropm[cand] = 0; open_m--; end
      end
      if (fork_en) begin left[t] = fork_n; dropm[t] = 0; open_m++; end
      @(negedge clk);
      check(open_joins == open_m, "open joins");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
