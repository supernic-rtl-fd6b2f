// tb_credit_store: self-checking test of the per-NT credit counters.
//
// Checks the reset value (8 credits, the paper's largest setting), a full
// chain reservation, a partial (prefix) reservation stopping at the first
// needed NT without a credit, skipped NTs needing no credit, the config
// overwrite, and, against a reference model, random interleavings of
// commits and credit returns. The grant is combinational (0 cycles), which
// is what lets the scheduler decide within its fixed delay.
module tb_credit_store;
  import snic_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  cfg_wr_t cfg;
  logic [REG_W-1:0] acq_region;
  logic [CHAIN_LEN-1:0] acq_need, acq_grant;
  logic acq_full, acq_commit;
  logic [NUM_NT-1:0] ret;
  logic [CRED_W-1:0] credits [NUM_NT];
  int model [NUM_NT];

  credit_store dut (.*);

  initial begin
    #200000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cfg = '0; acq_region = '0; acq_need = '0; acq_commit = 0; ret = '0;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    for (int i = 0; i < NUM_NT; i++) begin check(credits[i] == 8, "reset credits"); model[i] = 8; end
    // full reservation
    acq_region = 2; acq_need = 7'b0010111; #1;
    check(acq_full && acq_grant == 7'b0010111, "full reservation");
    acq_commit = 1; @(negedge clk); acq_commit = 0;
    check(credits[14] == 7 && credits[15] == 7 && credits[16] == 7 && credits[17] == 8 && credits[18] == 7,
          "commit takes one credit per granted NT");
    // partial reservation: position 2 has none
    cfg = '{valid: 1, tgt: T_CREDIT, addr: 16'd16, data: 64'd0}; @(negedge clk); cfg = '0;
    check(credits[16] == 0, "config overwrite");
    acq_need = 7'b0010111; #1;
    check(!acq_full && acq_grant == 7'b0000011, "prefix reservation stops at first NT without credit");
    acq_need = 7'b0010011; #1;
    check(acq_full && acq_grant == 7'b0010011, "skipped NT needs no credit");
    cfg = '{valid: 1, tgt: T_CREDIT, addr: 16'd16, data: 64'd7}; @(negedge clk); cfg = '0;
    for (int i = 0; i < NUM_NT; i++) model[i] = credits[i];
    // random commits and returns
    for (int n = 0; n < 3000; n++) begin
      logic [CHAIN_LEN-1:0] exp;
      bit ok;
      acq_region = REG_W'($urandom_range(0, NUM_REGIONS - 1));
      acq_need   = CHAIN_LEN'($urandom);
      acq_commit = ($urandom_range(0, 2) != 0);
      for (int i = 0; i < NUM_NT; i++) ret[i] = ($urandom_range(0, 5) == 0) && model[i] < 200;
      #1;
      exp = '0; ok = 1;
      for (int p = 0; p < CHAIN_LEN; p++)
        if (acq_need[p]) begin
          if (ok && model[acq_region * CHAIN_LEN + p] > 0) exp[p] = 1; else ok = 0;
        end
      check(acq_grant == exp && acq_full == ok, "grant matches model");
      for (int i = 0; i < NUM_NT; i++)
        model[i] += int'(ret[i]) - ((acq_commit && i / CHAIN_LEN == acq_region && exp[i % CHAIN_LEN]) ? 1 : 0);
      @(negedge clk);
      for (int i = 0; i < NUM_NT; i++) check(credits[i] == model[i], "counter matches model");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
