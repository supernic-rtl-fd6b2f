// credit_store: per-NT credit counters of the central scheduler.
//
// Every NT slot (region r, chain position p) owns a counter of free input
// buffer entries, its credits. For a packet that must run the NTs marked in
// `acq_need` of region `acq_region`, the store computes `acq_grant`: walking
// the chain from its head, each needed NT with a free credit is reserved
// until the first needed NT that has none. If all needed NTs have credits the
// whole chain is reserved and the packet will traverse it without coming back
// to the scheduler (the reservation scheme of the paper). Otherwise only the
// prefix is reserved and the packet comes back at the first unreserved NT
// (the PANIC-style fallback the paper keeps). `acq_full` flags the first case.
// The grant is combinational; the counters are decremented when `acq_commit`
// is high. `ret` holds one credit-return pulse per NT slot (an NT finished a
// packet); returns and a commit in the same cycle are both applied.
// Counters reset to INIT_CREDITS (8, the largest value evaluated in the
// paper); the SoftCores can overwrite any counter through the config bus
// (T_CREDIT, addr = NT slot index), e.g. when a region is relaunched.
module credit_store
  import snic_pkg::*;
#(
  parameter int INIT = INIT_CREDITS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  cfg_wr_t              cfg,
  input  logic [REG_W-1:0]     acq_region,
  input  logic [CHAIN_LEN-1:0] acq_need,
  output logic [CHAIN_LEN-1:0] acq_grant,
  output logic                 acq_full,
  input  logic                 acq_commit,
  input  logic [NUM_NT-1:0]    ret,
  output logic [CRED_W-1:0]    credits [NUM_NT]
);
  logic [CRED_W-1:0] cnt [NUM_NT];
  assign credits = cnt;

  always_comb begin
    logic ok;
    ok        = 1'b1;
    acq_grant = '0;
    for (int p = 0; p < CHAIN_LEN; p++) begin
      if (acq_need[p]) begin
        if (ok && cnt[int'(acq_region) * CHAIN_LEN + p] != '0) acq_grant[p] = 1'b1;
        else ok = 1'b0;
      end
    end
    acq_full = ok;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_NT; i++) cnt[i] <= CRED_W'(INIT);
    end else begin
      for (int i = 0; i < NUM_NT; i++) begin
        if (cfg.valid && cfg.tgt == T_CREDIT && int'(cfg.addr) == i)
          cnt[i] <= cfg.data[CRED_W-1:0];
        else
          cnt[i] <= cnt[i] + CRED_W'(ret[i])
                  - CRED_W'(acq_commit && (int'(acq_region) == i / CHAIN_LEN) && acq_grant[i % CHAIN_LEN]);
      end
    end
  end
endmodule
