// snic_pkg: types and constants shared by the SuperNIC data plane.
//
// The SuperNIC splits every packet into a payload, kept in the packet store,
// and a descriptor ("header"), which travels through the central scheduler,
// the crossbar and the NT regions. This package defines that descriptor, the
// two messages exchanged with the NT regions (scheduler -> region and
// region -> scheduler), the entries of the DAG table and the single
// configuration write bus through which the control-plane SoftCores program
// every table.
//
// Sizes that follow the paper: a chain of up to 7 NTs per region (chains of 2
// to 7 NTs are evaluated as one chain), 8 initial credits per NT (largest
// setting evaluated), a 1 GB virtual space per NT in 2 MB pages over 10 GB of
// on-board memory, a 16-cycle scheduling delay. Sizes that are this design's
// choice: 512-bit datapath (100 Gb/s at 250 MHz needs 400), 8 regions,
// 8 users, 64 DAG UIDs, 4 stages per DAG, 4 parallel branches per stage,
// 16 chain classes, and the header layout below (Ethernet/IPv4/UDP followed
// by a small SuperNIC shim carrying the DAG UID and application fields).
package snic_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int DATA_W      = 512;
  localparam int NUM_REGIONS = 8;
  localparam int CHAIN_LEN   = 7;
  localparam int NUM_NT      = NUM_REGIONS * CHAIN_LEN;
  localparam int NUM_USERS   = 8;
  localparam int NUM_UIDS    = 64;
  localparam int MAX_STAGES  = 4;
  localparam int MAX_PAR     = 4;
  localparam int NUM_CLASSES = 16;
  localparam int PS_SLOTS    = 445;   // ~891 KB of BRAM in 2 KB slots
  localparam int SLOT_BEATS  = 32;    // 32 x 64 B = 2 KB per slot
  localparam int INIT_CREDITS = 8;

  localparam int REG_W   = $clog2(NUM_REGIONS);
  localparam int NT_W    = $clog2(NUM_NT);
  localparam int USER_W  = $clog2(NUM_USERS);
  localparam int UID_W   = $clog2(NUM_UIDS);
  localparam int STAGE_W = $clog2(MAX_STAGES) + 1;
  localparam int BR_W    = $clog2(MAX_PAR);
  localparam int CLASS_W = $clog2(NUM_CLASSES);
  localparam int SLOT_W  = $clog2(PS_SLOTS);
  localparam int BEAT_W  = $clog2(SLOT_BEATS);
  localparam int LEN_W   = 14;
  localparam int CRED_W  = 8;

  // --------------------------------------------------- header byte offsets
  // Big-endian fields inside the first 64-byte beat; byte i is data[8*i +: 8].
  localparam int OFF_IPLEN = 16;   // IPv4 total length
  localparam int OFF_SIP   = 26;
  localparam int OFF_DIP   = 30;
  localparam int OFF_SPORT = 34;
  localparam int OFF_DPORT = 36;
  localparam int OFF_UID   = 42;   // SuperNIC shim: DAG UID (16 bit)
  localparam int OFF_OP    = 44;   // application opcode (8 bit)
  localparam int OFF_KEY   = 45;   // application key (32 bit)
  localparam int OFF_VAL   = 49;   // application value (32 bit)
  localparam int OFF_SEQ   = 53;   // transport sequence number (32 bit)

  // application opcodes used by the example NTs
  localparam logic [7:0] OP_GET      = 8'd1;
  localparam logic [7:0] OP_SET      = 8'd2;
  localparam logic [7:0] OP_GET_RESP = 8'd3;
  localparam logic [7:0] OP_NACK     = 8'd4;

  // ------------------------------------------------------------ descriptor
  typedef struct packed {
    logic [SLOT_W-1:0]  slot;     // packet-store slot; also the packet's tag
    logic [UID_W-1:0]   uid;      // DAG UID
    logic [USER_W-1:0]  user;
    logic [LEN_W-1:0]   len;      // bytes
    logic [STAGE_W-1:0] stage;    // DAG stage being executed
    logic [BR_W-1:0]    branch;   // parallel branch of that stage
    logic               drop;     // an NT asked to discard the packet
    logic               reply;    // an NT turned the packet back to its sender
    logic [31:0]        sip;
    logic [31:0]        dip;
    logic [15:0]        sport;
    logic [15:0]        dport;
    logic [7:0]         op;
    logic [31:0]        key;
    logic [31:0]        val;
    logic [31:0]        seq;
  } desc_t;

  // scheduler -> region
  typedef struct packed {
    desc_t                d;
    logic [REG_W-1:0]     region;
    logic [CHAIN_LEN-1:0] run;    // NTs of the chain still to execute (0 = skip)
    logic [CHAIN_LEN-1:0] rsv;    // NTs holding a credit reserved for this packet
  } reg_msg_t;

  // region -> scheduler
  typedef struct packed {
    desc_t                d;
    logic [REG_W-1:0]     region;
    logic                 done;   // whole chain executed
    logic [CHAIN_LEN-1:0] run;    // NTs left (early return at an NT with no credit)
  } ret_msg_t;

  // one branch of a DAG stage: a chain class and which of its NTs to run
  typedef struct packed {
    logic [CLASS_W-1:0]   cls;
    logic [CHAIN_LEN-1:0] run;
  } branch_t;

  typedef struct packed {
    logic [BR_W:0]              nbr;   // 1..MAX_PAR branches
    branch_t [MAX_PAR-1:0]      br;
  } stage_t;

  typedef enum logic [1:0] {RT_SCHED, RT_TX, RT_CTRL} route_e;

  typedef enum logic [2:0] {NT_DUMMY, NT_FW, NT_NAT, NT_LB, NT_KV, NT_GBN} nt_kind_e;

  // ------------------------------------------------------ configuration bus
  typedef enum logic [3:0] {
    T_MAT, T_RL, T_CREDIT, T_DAGLEN, T_STAGE, T_CLASS, T_NT, T_VM_PTE, T_VM_QUOTA, T_VM_UNMAP, T_MON_CLR
  } cfg_tgt_e;

  typedef struct packed {
    logic        valid;
    cfg_tgt_e    tgt;
    logic [15:0] addr;
    logic [63:0] data;
  } cfg_wr_t;

  // NT kinds loaded in the regions: one chain per region
  typedef nt_kind_e [CHAIN_LEN-1:0] chain_kinds_t;
  typedef chain_kinds_t [NUM_REGIONS-1:0] board_kinds_t;

  // Default board: region 0 holds the paper's VPC chain NAT-FW-KV-FW-LB
  // (its AES position is a dummy NT, see the README), region 1 the
  // transport and KV cache used with a disaggregated-memory server, the
  // others dummy NTs for the DAG micro-benchmarks.
  function automatic board_kinds_t default_kinds();
    board_kinds_t k;
    for (int r = 0; r < NUM_REGIONS; r++)
      for (int p = 0; p < CHAIN_LEN; p++) k[r][p] = NT_DUMMY;
    k[0][0] = NT_NAT; k[0][1] = NT_FW; k[0][2] = NT_KV; k[0][3] = NT_FW; k[0][4] = NT_LB;
    k[1][0] = NT_GBN; k[1][1] = NT_KV;
    return k;
  endfunction

  // event counters of the whole data plane
  typedef struct packed {
    logic [31:0] pkts_in;      // packets seen by the parser
    logic [31:0] drop_nobuf;   // dropped: no packet-store slot / queue room
    logic [31:0] rl_refused;   // dropped by the rate limiter (all users)
    logic [31:0] full_rsv;     // copies sent with the whole chain reserved
    logic [31:0] part_rsv;     // copies sent with only a prefix reserved
    logic [31:0] early_ret;    // headers back from an NT without credit
    logic [31:0] forks;        // parallel stages started
    logic [31:0] join_wait;    // branch results held in the sync buffer
    logic [31:0] parked;       // copies parked in the header store
    logic [31:0] pause_hold;   // copies parked because their region was stopped
    logic [31:0] sched_done;   // packets whose DAG finished
    logic [31:0] sent;         // packets sent to the MAC
    logic [31:0] dropped;      // packets discarded at egress (NT drop)
    logic [31:0] ps_used;      // packet-store slots in use
  } stats_t;

  // ------------------------------------------------------------ helpers
  function automatic logic [31:0] get32(input logic [DATA_W-1:0] b, input int off);
    return {b[8*off +: 8], b[8*(off+1) +: 8], b[8*(off+2) +: 8], b[8*(off+3) +: 8]};
  endfunction

  function automatic logic [15:0] get16(input logic [DATA_W-1:0] b, input int off);
    return {b[8*off +: 8], b[8*(off+1) +: 8]};
  endfunction

  function automatic logic [DATA_W-1:0] put32(input logic [DATA_W-1:0] b, input int off,
                                              input logic [31:0] v);
    logic [DATA_W-1:0] r;
    r = b;
    r[8*off +: 8]     = v[31:24];
    r[8*(off+1) +: 8] = v[23:16];
    r[8*(off+2) +: 8] = v[15:8];
    r[8*(off+3) +: 8] = v[7:0];
    return r;
  endfunction

  function automatic logic [DATA_W-1:0] put16(input logic [DATA_W-1:0] b, input int off,
                                              input logic [15:0] v);
    logic [DATA_W-1:0] r;
    r = b;
    r[8*off +: 8]     = v[15:8];
    r[8*(off+1) +: 8] = v[7:0];
    return r;
  endfunction

endpackage
