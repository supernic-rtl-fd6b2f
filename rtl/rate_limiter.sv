// rate_limiter: per-user ingress token buckets ("RL" next to the parser).
//
// The SuperNIC enforces every user's share of all resources by throttling
// only that user's ingress bandwidth: NT throughput, packet-store space and
// egress bandwidth all scale with it. The allocation itself (DRF space
// sharing, then DRFQ time sharing on the monitored load) is computed by the
// control plane and written here as a rate per user.
//
// Each user has a bucket of byte tokens in 24.8 fixed point. Every cycle the
// bucket gains `rate` (bytes per cycle x 256) up to `burst` bytes. A packet
// of `chk_len` bytes from user `chk_user` is admitted (`chk_ok`,
// combinational) when the bucket holds at least `chk_len` bytes; with
// `chk_take` the tokens are removed. A refused packet is counted in
// `refused[user]`. A user whose limiter is disabled is always admitted; all
// are disabled after reset. Config: T_RL, addr = user,
// data = {enable, burst[30:0] bytes, rate[31:0]}.
module rate_limiter
  import snic_pkg::*;
#(
  parameter int USERS = NUM_USERS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_wr_t           cfg,
  input  logic [USER_W-1:0] chk_user,
  input  logic [LEN_W-1:0]  chk_len,
  output logic              chk_ok,
  input  logic              chk_take,
  input  logic              chk_refuse,
  output logic [31:0]       refused [USERS]
);
  logic        en    [USERS];
  logic [31:0] rate  [USERS];
  logic [38:0] burst [USERS];   // x256
  logic [38:0] tok   [USERS];   // x256

  assign chk_ok = !en[chk_user] || (tok[chk_user] >= {17'd0, chk_len, 8'd0});

  // next bucket level: refill, charge an admitted packet, clamp to the burst
  logic [39:0] tok_add [USERS];
  logic [38:0] tok_nx  [USERS];
  always_comb begin
    for (int u = 0; u < USERS; u++) begin
      tok_add[u] = {1'b0, tok[u]} + {8'd0, rate[u]}
                 - ((chk_take && int'(chk_user) == u && en[u]) ? {18'd0, chk_len, 8'd0} : 40'd0);
      tok_nx[u]  = (tok_add[u] > {1'b0, burst[u]}) ? burst[u] : tok_add[u][38:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int u = 0; u < USERS; u++) begin
        en[u] <= 1'b0; rate[u] <= '0; burst[u] <= '0; tok[u] <= '0; refused[u] <= '0;
      end
    end else begin
      for (int u = 0; u < USERS; u++) begin
        tok[u] <= tok_nx[u];
        if (chk_refuse && int'(chk_user) == u) refused[u] <= refused[u] + 1;
        if (cfg.valid && cfg.tgt == T_RL && int'(cfg.addr) == u) begin
          en[u]    <= cfg.data[63];
          burst[u] <= {cfg.data[62:32], 8'd0};
          rate[u]  <= cfg.data[31:0];
          tok[u]   <= {cfg.data[62:32], 8'd0};
        end
      end
    end
  end
endmodule
