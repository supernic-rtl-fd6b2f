// tb_dummy_nt: self-checking test of the dummy NT.
//
// The dummy NTs of the evaluation take a fixed time per packet (10 or 50
// cycles) at 64 Gb/s. With the output always ready, every descriptor must
// leave exactly LATENCY cycles after it entered and a new one can enter
// every cycle (initiation interval 1). With a randomly stalling output the
// order and contents must be kept and no packet may leave early. Both
// LATENCY values of the paper are tested.
module tb_dummy_nt;
  import snic_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic iv [2], ir [2], ov [2], ordy [2];
  desc_t id [2], od [2];
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  dummy_nt #(.LATENCY(10)) u10 (.clk, .rst_n, .in_valid(iv[0]), .in_ready(ir[0]), .in_d(id[0]),
                                .out_valid(ov[0]), .out_ready(ordy[0]), .out_d(od[0]));
  dummy_nt #(.LATENCY(50), .DEPTH(64)) u50 (.clk, .rst_n, .in_valid(iv[1]), .in_ready(ir[1]), .in_d(id[1]),
                                .out_valid(ov[1]), .out_ready(ordy[1]), .out_d(od[1]));

  initial begin
    #2000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  for (genvar k = 0; k < 2; k++) begin : g_drv
    localparam int LAT = k == 0 ? 10 : 50;
    longint tin [$];
    int     sent = 0, got = 0;
    bit     stall_phase = 0;
    bit     done = 0;
    bit     acc = 0;
    always @(posedge clk) if (rst_n) begin
      acc <= iv[k] && ir[k];
      if (iv[k] && ir[k]) begin tin.push_back(cyc); sent++; end
      if (ov[k] && ordy[k]) begin
        longint t;
        t = tin.pop_front();
        check(od[k].seq == 32'(got), "order and contents kept");
        if (!stall_phase) check(cyc - t == LAT, $sformatf("latency %0d expected %0d", cyc - t, LAT));
        else check(cyc - t >= LAT, "never early");
        got++;
      end
    end
    initial begin
      iv[k] = 0; id[k] = '0; ordy[k] = 1;
      wait (rst_n); @(negedge clk);
      // phase 1: back to back, output ready: II = 1
      for (int n = 0; n < 200; n++) begin
        iv[k] = 1; id[k].seq = 32'(n);
        @(negedge clk);
        check(acc, "accepts one descriptor per cycle");
      end
      iv[k] = 0;
      repeat (LAT + 5) @(negedge clk);
      check(got == 200, "all delivered in phase 1");
      stall_phase = 1;
      for (int n = 200; n < 1200; n++) begin
        iv[k] = ($urandom_range(0, 3) != 0); id[k].seq = 32'(n);
        ordy[k] = ($urandom_range(0, 2) != 0);
        @(negedge clk);
        if (!acc) n--;
        else ordy[k] = ($urandom_range(0, 2) != 0);
      end
      iv[k] = 0; ordy[k] = 1;
      repeat (200) @(negedge clk);
      check(got == 1200, "all delivered with stalls");
      done = 1;
    end
  end

  initial begin
    wait (g_drv[0].done && g_drv[1].done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (3) @(posedge clk); rst_n = 1; end
endmodule
