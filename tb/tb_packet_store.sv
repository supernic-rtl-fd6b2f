// tb_packet_store: self-checking test of the payload buffer.
//
// Allocates every slot (each must be unique, and allocation must stop when
// the store is full), writes random beats, reads them back with the
// one-cycle BRAM read latency, frees slots in random order and checks that
// freed slots are reused and that the occupancy counter is right.
module tb_packet_store;
  import snic_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic alloc_valid, alloc_take, free_en, wr_en, rd_en;
  logic [SLOT_W-1:0] alloc_slot, free_slot, wr_slot, rd_slot;
  logic [BEAT_W-1:0] wr_beat, rd_beat;
  logic [DATA_W-1:0] wr_data, rd_data;
  logic [SLOT_W:0] used;

  packet_store dut (.*);

  bit inuse [PS_SLOTS];
  int held [$];
  logic [DATA_W-1:0] ref_beat [PS_SLOTS][4];

  function automatic logic [DATA_W-1:0] rnd();
    logic [DATA_W-1:0] v;
    for (int i = 0; i < DATA_W / 32; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    #4000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic take_one();
    int s;
    check(alloc_valid, "slot available");
    s = alloc_slot;
    check(!inuse[s], "allocated slot is free");
    inuse[s] = 1; held.push_back(s);
    alloc_take = 1; wr_en = 1; wr_slot = alloc_slot;
    for (int b = 0; b < 4; b++) begin
      wr_beat = BEAT_W'(b); wr_data = rnd(); ref_beat[s][b] = wr_data;
      @(negedge clk); alloc_take = 0;
    end
    wr_en = 0;
  endtask

  task automatic read_check(input int s);
    for (int b = 0; b < 4; b++) begin
      rd_en = 1; rd_slot = SLOT_W'(s); rd_beat = BEAT_W'(b);
      @(negedge clk); rd_en = 0;
      check(rd_data == ref_beat[s][b], "read data one cycle after request");
    end
  endtask

  initial begin
    alloc_take = 0; free_en = 0; wr_en = 0; rd_en = 0;
    free_slot = '0; wr_slot = '0; rd_slot = '0; wr_beat = '0; rd_beat = '0; wr_data = '0;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    check(used == 0 && alloc_valid, "empty after reset");
    for (int n = 0; n < PS_SLOTS; n++) take_one();
    check(used == PS_SLOTS, "all slots used");
    check(!alloc_valid, "no slot when full");
    for (int n = 0; n < 100; n++) read_check(held[$urandom_range(0, held.size() - 1)]);
    // random free / allocate
    for (int n = 0; n < 3000; n++) begin
      if (held.size() > 0 && ($urandom_range(0, 1) == 0 || !alloc_valid)) begin
        int i, s;
        i = $urandom_range(0, held.size() - 1); s = held[i];
        read_check(s);
        held.delete(i); inuse[s] = 0;
        free_en = 1; free_slot = SLOT_W'(s); @(negedge clk); free_en = 0;
      end else if (alloc_valid) take_one();
      check(int'(used) == held.size(), "occupancy");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
