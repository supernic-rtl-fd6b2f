// vmem: the SuperNIC's virtual memory system for NTs.
//
// Each NT slot (region x chain position) has its own virtual address space
// of 1 GB, mapped onto the 10 GB on-board memory in 2 MB huge pages by a
// flat, single-level page table: 512 entries per address space, 8 bytes
// each, i.e. 4 KB per space, as the paper sizes it. An entry holds {valid,
// writable, physical page number}. A request (space, virtual address, write)
// is translated in one cycle: the response carries the physical address or a
// fault. Faults: an address beyond 1 GB, or a write to a read-only page.
// Pages are allocated on demand: the first access to an unmapped page takes
// a physical page from the free list (never-used pages from a bump counter,
// released ones from a FIFO) and maps it read-write; the access then
// proceeds. The number of pages a space may own is capped by a quota that the
// control plane derives from the user's share of on-board memory (space
// sharing); an allocation beyond it, or with memory exhausted, faults.
// Config: T_VM_PTE (addr = space*512 + vpn, data = {valid[63],
// writable[62], ppn}), T_VM_QUOTA (addr = space, data = pages),
// T_VM_UNMAP (addr = space*512 + vpn: unmap and free the page).
// The quota is unlimited after reset. After reset the table is cleared
// by a sweep of NUM_AS*512 cycles; `ready` is low until then. The physical request goes to the
// DDR controller, which is outside this design.
module vmem
  import snic_pkg::*;
#(
  parameter int NUM_AS     = NUM_NT,
  parameter int VA_BITS    = 30,      // 1 GB
  parameter int PAGE_BITS  = 21,      // 2 MB
  parameter int PHYS_PAGES = 5120,    // 10 GB
  parameter int AS_W       = $clog2(NUM_AS),
  parameter int PPN_W      = $clog2(PHYS_PAGES),
  parameter int PA_BITS    = PPN_W + PAGE_BITS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  cfg_wr_t            cfg,
  input  logic               req_valid,
  input  logic [AS_W-1:0]    req_as,
  input  logic [31:0]        req_va,
  input  logic               req_write,
  output logic               ready,
  output logic               resp_valid,
  output logic               resp_fault,
  output logic [PA_BITS-1:0] resp_pa,
  output logic               resp_write,
  output logic [31:0]        n_alloc,
  output logic [31:0]        n_fault
);
  localparam int VPN_W = VA_BITS - PAGE_BITS;   // 9
  localparam int PTES  = 1 << VPN_W;            // 512

  typedef struct packed {
    logic             valid;
    logic             wr;
    logic [PPN_W-1:0] ppn;
  } pte_t;

  pte_t        pt    [NUM_AS * PTES];
  logic [15:0] quota [NUM_AS];
  logic [15:0] owned [NUM_AS];

  // free list
  logic [PPN_W:0]   bump;
  logic             fl_valid, fl_pop, fl_push;
  logic [PPN_W-1:0] fl_head, fl_in;
  sync_fifo #(.T(logic [PPN_W-1:0]), .DEPTH(PHYS_PAGES)) u_free (
    .clk, .rst_n,
    .in_valid(fl_push), .in_ready(), .in_data(fl_in),
    .out_valid(fl_valid), .out_ready(fl_pop), .out_data(fl_head), .count()
  );
  wire              page_avail = fl_valid || (int'(bump) < PHYS_PAGES);
  wire [PPN_W-1:0]  new_ppn    = fl_valid ? fl_head : bump[PPN_W-1:0];

  // after reset the table is swept clear, one entry per cycle; requests
  // wait for `ready`
  logic                init_busy;
  logic [AS_W+VPN_W:0] init_idx;
  assign ready = !init_busy;

  logic [VPN_W-1:0] vpn;
  int               idx;
  pte_t             e;
  logic             oob, need_alloc, can_alloc;
  assign vpn        = req_va[PAGE_BITS +: VPN_W];
  assign idx        = int'(req_as) * PTES + int'(vpn);
  assign e          = pt[idx];
  assign oob        = (req_va >> VA_BITS) != 0;
  assign need_alloc = req_valid && ready && !oob && !e.valid;
  assign can_alloc  = page_avail && (owned[req_as] < quota[req_as]);

  wire do_alloc = need_alloc && can_alloc;
  assign fl_pop = do_alloc && fl_valid;

  // unmap from the control plane
  wire  unmap     = cfg.valid && cfg.tgt == T_VM_UNMAP && int'(cfg.addr) < NUM_AS * PTES;
  pte_t unmap_e;
  assign unmap_e  = pt[int'(cfg.addr)];
  assign fl_push  = unmap && unmap_e.valid;
  assign fl_in    = unmap_e.ppn;

  always_ff @(posedge clk) begin
    if (init_busy) pt[int'(init_idx)] <= '0;
    if (do_alloc) pt[idx] <= '{valid: 1'b1, wr: 1'b1, ppn: new_ppn};
    if (cfg.valid && cfg.tgt == T_VM_PTE && int'(cfg.addr) < NUM_AS * PTES)
      pt[int'(cfg.addr)] <= '{valid: cfg.data[63], wr: cfg.data[62], ppn: cfg.data[PPN_W-1:0]};
    if (unmap) pt[int'(cfg.addr)] <= '0;
  end


  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bump       <= '0;
      init_busy  <= 1'b1;
      init_idx   <= '0;
      resp_valid <= 1'b0;
      resp_fault <= 1'b0;
      resp_pa    <= '0;
      resp_write <= 1'b0;
      n_alloc    <= '0;
      n_fault    <= '0;
      for (int i = 0; i < NUM_AS; i++) begin
        quota[i] <= 16'hffff;
        owned[i] <= '0;
      end
    end else begin
      if (init_busy) begin
        init_idx <= init_idx + 1'b1;
        if (int'(init_idx) == NUM_AS * PTES - 1) init_busy <= 1'b0;
      end
      resp_valid <= req_valid && ready;
      resp_write <= req_write;
      if (req_valid && ready) begin
        if (oob || (!e.valid && !can_alloc) || (e.valid && req_write && !e.wr)) begin
          resp_fault <= 1'b1;
          resp_pa    <= '0;
          n_fault    <= n_fault + 1;
        end else begin
          resp_fault <= 1'b0;
          resp_pa    <= {(e.valid ? e.ppn : new_ppn), req_va[PAGE_BITS-1:0]};
        end
      end
      if (do_alloc) begin
        n_alloc        <= n_alloc + 1;
        owned[req_as]  <= owned[req_as] + 1'b1;
        if (!fl_valid) bump <= bump + 1'b1;
      end
      if (cfg.valid && cfg.tgt == T_VM_QUOTA && int'(cfg.addr) < NUM_AS)
        quota[cfg.addr[AS_W-1:0]] <= cfg.data[15:0];
      if (fl_push) owned[int'(cfg.addr) / PTES] <= owned[int'(cfg.addr) / PTES] - 1'b1;
    end
  end
endmodule
