// tb_rate_limiter: self-checking test of the per-user token buckets.
//
// User 1 is limited to 4 bytes per cycle (8 Gb/s at 250 MHz, the first
// user's demand in the paper's allocation example) with a 1500-byte burst,
// user 2 to 1.5 bytes per cycle (a fractional rate). Both offer far more
// than their rate; over 4000 cycles each must get burst + rate x cycles
// bytes within one packet. An unconfigured user must always be admitted,
// and refusals must be counted per user.
module tb_rate_limiter;
  import snic_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  cfg_wr_t cfg;
  logic [USER_W-1:0] chk_user;
  logic [LEN_W-1:0] chk_len;
  logic chk_ok, chk_take, chk_refuse;
  logic [31:0] refused [NUM_USERS];

  rate_limiter dut (.*);

  initial begin
    #2000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  longint got [NUM_USERS];
  int nref [NUM_USERS];

  initial begin
    cfg = '0; chk_user = '0; chk_len = '0; chk_take = 0; chk_refuse = 0;
    for (int u = 0; u < NUM_USERS; u++) begin got[u] = 0; nref[u] = 0; end
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    cfg = '{valid: 1, tgt: T_RL, addr: 16'd1, data: {1'b1, 31'd1500, 32'd1024}}; @(negedge clk);
    cfg = '{valid: 1, tgt: T_RL, addr: 16'd2, data: {1'b1, 31'd1500, 32'd384}}; @(negedge clk);
    cfg = '0;
    for (int c = 0; c < 4000; c++) begin
      int u;
      u = $urandom_range(0, 2);
      chk_user = USER_W'(u);
      chk_len = LEN_W'($urandom_range(64, 256));
      #1;
      chk_take = chk_ok; chk_refuse = !chk_ok;
      if (chk_ok) got[u] += chk_len; else nref[u]++;
      @(negedge clk);
      chk_take = 0; chk_refuse = 0;
    end
    check(got[1] >= 1500 + 4 * 4000 - 256 && got[1] <= 1500 + 4 * 4000,
          $sformatf("user 1 got %0d bytes, expected ~%0d", got[1], 1500 + 4 * 4000));
    check(got[2] >= 1500 + 6000 - 256 && got[2] <= 1500 + 6000,
          $sformatf("user 2 got %0d bytes, expected ~%0d", got[2], 1500 + 6000));
    check(nref[0] == 0, "unlimited user never refused");
    for (int u = 0; u < 3; u++) check(refused[u] == 32'(nref[u]), "refusals counted");
    // disable user 1 again
    cfg = '{valid: 1, tgt: T_RL, addr: 16'd1, data: 64'd0}; @(negedge clk); cfg = '0;
    chk_user = 1; chk_len = 14'd9000; #1; check(chk_ok, "disabled limiter admits all");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
