// nt_firewall: firewall network task (header only).
//
// Holds RULES deny rules, each {valid, source prefix, prefix mask, destination
// port (0 = any port)}. A packet whose source address matches a rule's prefix
// and whose destination port matches is marked for dropping (desc.drop); the
// egress then discards it and frees its buffer. Everything else passes
// unchanged. The paper names a firewall NT without describing it; the rule
// format and first-match-denies behaviour are this design's choice.
// One register stage, valid/ready on both sides. Config: T_NT,
// addr = {NT_ID[5:0], rule[9:0]},
// data = {valid[63], dport[62:48], mask_len[37:32], prefix[31:0]}; the rule
// compares the low 15 bits of the destination port.
module nt_firewall
  import snic_pkg::*;
#(
  parameter int RULES = 8,
  parameter int NT_ID = 0
) (
  input  logic    clk,
  input  logic    rst_n,
  input  cfg_wr_t cfg,
  input  logic    in_valid,
  output logic    in_ready,
  input  desc_t   in_d,
  output logic    out_valid,
  input  logic    out_ready,
  output desc_t   out_d
);
  typedef struct packed {
    logic        valid;
    logic [14:0] dport;
    logic [5:0]  mlen;
    logic [31:0] prefix;
  } rule_t;
  rule_t rules [RULES];

  function automatic logic [31:0] pmask(input logic [5:0] n);
    return (n == 0) ? 32'd0 : ~(32'hffff_ffff >> n);
  endfunction

  logic deny;
  always_comb begin
    deny = 1'b0;
    for (int i = 0; i < RULES; i++)
      if (rules[i].valid && ((in_d.sip & pmask(rules[i].mlen)) == (rules[i].prefix & pmask(rules[i].mlen)))
          && (rules[i].dport == '0 || rules[i].dport == in_d.dport[14:0]))
        deny = 1'b1;
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_d     <= '0;
      for (int i = 0; i < RULES; i++) rules[i] <= '0;
    end else begin
      if (in_ready) begin
        out_valid <= in_valid;
        if (in_valid) begin
          out_d      <= in_d;
          out_d.drop <= in_d.drop | deny;
        end
      end
      if (cfg.valid && cfg.tgt == T_NT && int'(cfg.addr[15:10]) == NT_ID && int'(cfg.addr[9:0]) < RULES)
        rules[cfg.addr[$clog2(RULES)-1:0]] <= '{valid: cfg.data[63], dport: cfg.data[62:48], mlen: cfg.data[37:32],
                                  prefix: cfg.data[31:0]};
    end
  end
endmodule
