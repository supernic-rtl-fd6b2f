// tb_vmem: self-checking test of the NT virtual memory unit.
//
// Runs a small instance (4 address spaces, 40 physical pages) so that
// memory exhaustion is reachable. Waits for the table-clearing sweep
// (4 x 512 cycles), then issues random reads and writes over part of each
// 1 GB space and checks, against a model of the page tables: the answer
// comes exactly one cycle after the request; the first touch of a page
// allocates a physical page on demand and later accesses reuse it; no two
// mapped pages share a physical page; the page offset is kept; addresses
// beyond 1 GB fault; a per-space quota stops allocation; writes to a page
// the control plane mapped read-only fault; unmapped pages are recycled;
// exhausting physical memory faults.
module tb_vmem;
  import snic_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  localparam int NAS = 4, NPP = 40, PPN_W = $clog2(NPP), PA_BITS = PPN_W + 21;
  cfg_wr_t cfg;
  logic req_valid, req_write, ready, resp_valid, resp_fault, resp_write;
  logic [1:0] req_as;
  logic [31:0] req_va;
  logic [PA_BITS-1:0] resp_pa;
  logic [31:0] n_alloc, n_fault;

  vmem #(.NUM_AS(NAS), .PHYS_PAGES(NPP)) dut (.*);

  initial begin
    #4000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int  map [NAS][512];   // -1 = unmapped
  bit  ro  [NAS][512];
  int  owner [NPP];      // -1 = free
  int  quota [NAS];
  int  owned [NAS];
  int  nfree;
  int  faults = 0, allocs = 0;

  task automatic access(input int a, input logic [31:0] va, input bit w);
    int vpn;
    bit exp_fault;
    req_valid = 1; req_as = 2'(a); req_va = va; req_write = w;
    @(negedge clk);
    req_valid = 0;
    check(resp_valid, "response one cycle after the request");
    vpn = int'(va[29:21]);
    exp_fault = 0;
    if (va >= 32'h4000_0000) exp_fault = 1;
    else if (map[a][vpn] < 0) begin
      if (owned[a] >= quota[a] || nfree == 0) exp_fault = 1;
      else begin
        check(!resp_fault, "on-demand allocation");
        map[a][vpn] = int'(resp_pa[PA_BITS-1:21]);
        check(map[a][vpn] < NPP && owner[map[a][vpn]] < 0, "fresh physical page");
        owner[map[a][vpn]] = a * 512 + vpn;
        owned[a]++; nfree--; allocs++;
      end
    end else if (w && ro[a][vpn]) exp_fault = 1;
    else check(int'(resp_pa[PA_BITS-1:21]) == map[a][vpn], "translation reuses the mapped page");
    check(resp_fault == exp_fault, $sformatf("fault flag as=%0d va=%h w=%0d", a, va, w));
    if (!resp_fault) check(resp_pa[20:0] == va[20:0], "page offset kept");
    if (exp_fault) faults++;
  endtask

  task automatic wr(input cfg_tgt_e t, input logic [15:0] a, input logic [63:0] d);
    cfg = '{valid: 1'b1, tgt: t, addr: a, data: d};
    @(negedge clk);
    cfg = '0;
  endtask

  initial begin
    cfg = '0; req_valid = 0; req_as = '0; req_va = '0; req_write = 0;
    for (int a = 0; a < NAS; a++) begin
      quota[a] = 65535; owned[a] = 0;
      for (int v = 0; v < 512; v++) begin map[a][v] = -1; ro[a][v] = 0; end
    end
    for (int p = 0; p < NPP; p++) owner[p] = -1;
    nfree = NPP;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    check(!ready, "busy clearing the table after reset");
    repeat (NAS * 512) @(negedge clk);
    check(ready, "ready after the sweep");
    // quota of space 1: 3 pages
    wr(T_VM_QUOTA, 16'd1, 64'd3); quota[1] = 3;
    // a read-only page mapped by the control plane in space 2, vpn 5 -> ppn 39
    wr(T_VM_PTE, 16'(2 * 512 + 5), {1'b1, 1'b0, 62'd39}); map[2][5] = 39; ro[2][5] = 1; owner[39] = 2 * 512 + 5;
    nfree--;   // ppn 39 is only reached by the bump counter at the very end
    access(2, {2'b00, 9'd5, 21'h1234}, 0);
    access(2, {2'b00, 9'd5, 21'h1234}, 1);
    access(0, 32'h4000_0000, 0);
    for (int n = 0; n < 400; n++) begin
      int a, v;
      a = $urandom_range(0, NAS - 1);
      v = $urandom_range(0, 11);
      access(a, {2'b00, 9'(v), 21'($urandom)}, $urandom_range(0, 1));
      if (n % 50 == 49) begin
        // unmap a random mapped page of space 0
        for (int u = 0; u < 12; u++)
          if (map[0][u] >= 0 && !ro[0][u]) begin
            wr(T_VM_UNMAP, 16'(u), 64'd0);
            owner[map[0][u]] = -1; map[0][u] = -1; owned[0]--; nfree++;
            break;
          end
      end
    end
    // the control plane takes its read-only mapping back (page 39 returns to the pool)
    wr(T_VM_PTE, 16'(2 * 512 + 5), 64'd0); map[2][5] = -1; ro[2][5] = 0; owner[39] = -1; nfree++;
    // exhaust physical memory from space 3
    for (int v = 100; v < 100 + NPP; v++) access(3, {2'b00, 9'(v), 21'd0}, 0);
    @(negedge clk);
    check(n_alloc == 32'(allocs) && n_fault == 32'(faults), "counters");
    check(owned[1] == 3, "quota reached");
    check(nfree == 0, "memory exhausted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
