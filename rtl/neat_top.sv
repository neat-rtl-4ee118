// neat_top: an NCORES-core Neat cache hierarchy.
//
// One private cache with its Neat controller per core (neat_l1), the
// interconnect (neat_noc) and the shared LLC with its per-core write
// signatures and wbReceived counters (neat_llc). There is no directory and no
// path from one core's cache to another's.
//
// Interface. Per core c: a request channel core_req_valid_i[c] /
// core_req_ready_o[c] / core_req_i[c] carrying loads, stores (8-byte words
// with byte enables), acquires and releases; a one-cycle response pulse
// core_rsp_valid_o[c] with load data core_rsp_rdata_o[c]; and the controller's
// state core_state_o[c] (NE, SI or CM). The cores themselves are outside this
// block. The main-memory port mem_* is the LLC's. init_done_o rises when the
// LLC has finished clearing its tags after reset; requests may be issued
// before that and simply wait.
//
// Event counters for the protocol's mechanisms are brought out as pulse
// vectors (one bit per core) so that a testbench or a performance monitor can
// count them.
//
// Default sizes follow the paper's evaluation: 32 cores, 32 KB 8-way private
// caches with a 4-cycle hit, a 64 MB 32-way LLC with a 50-cycle hit, 64-byte
// lines and 1008-bit write signatures. The paper's private L2 is not built;
// each core has one private level.
module neat_top
  import neat_pkg::*;
#(
  parameter int NCORES         = 32,
  parameter int L1_SIZE_BYTES  = 32768,
  parameter int L1_WAYS        = 8,
  parameter int L1_HIT_LATENCY = 4,
  parameter int RB_ENTRIES     = 8,
  parameter int LLC_SIZE_BYTES = 67108864,
  parameter int LLC_WAYS       = 32,
  parameter int LLC_LATENCY    = 50
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic        init_done_o,
  // cores
  input  logic        core_req_valid_i [NCORES],
  output logic        core_req_ready_o [NCORES],
  input  core_req_t   core_req_i       [NCORES],
  output logic        core_rsp_valid_o [NCORES],
  output logic [63:0] core_rsp_rdata_o [NCORES],
  output core_state_e core_state_o     [NCORES],
  // main memory
  output logic        mem_req_valid_o,
  input  logic        mem_req_ready_i,
  output logic        mem_req_we_o,
  output laddr_t      mem_req_laddr_o,
  output line_t       mem_req_data_o,
  input  logic        mem_rsp_valid_i,
  input  line_t       mem_rsp_data_i,
  // mechanism events, one bit per core
  output logic [NCORES-1:0] ev_to_pi_o,
  output logic [NCORES-1:0] ev_si_keep_o,
  output logic [NCORES-1:0] ev_pi_merge_o,
  output logic [NCORES-1:0] ev_pi_hit_o,
  output logic [NCORES-1:0] ev_evict_wb_o,
  output logic [NCORES-1:0] ev_evict_clean_o,
  output logic [NCORES-1:0] ev_rb_stall_o,
  output logic [NCORES-1:0] ev_commit_wb_o,
  // LLC events
  output logic        ev_llc_hit_o,
  output logic        ev_llc_miss_o,
  output logic        ev_llc_putallack_o,
  output logic        ev_llc_early_done_o
);

  logic     l1_req_valid [NCORES];
  logic     l1_req_ready [NCORES];
  req_msg_t l1_req       [NCORES];
  logic     l1_rsp_valid [NCORES];
  logic     l1_rsp_ready [NCORES];
  rsp_msg_t l1_rsp       [NCORES];

  for (genvar c = 0; c < NCORES; c++) begin : g_core
    neat_l1 #(
      .SIZE_BYTES  (L1_SIZE_BYTES),
      .WAYS        (L1_WAYS),
      .HIT_LATENCY (L1_HIT_LATENCY),
      .RB_ENTRIES  (RB_ENTRIES),
      .CORE_ID     (8'(c))
    ) u_l1 (
      .clk, .rst_n,
      .core_req_valid_i (core_req_valid_i[c]),
      .core_req_ready_o (core_req_ready_o[c]),
      .core_req_i       (core_req_i[c]),
      .core_rsp_valid_o (core_rsp_valid_o[c]),
      .core_rsp_rdata_o (core_rsp_rdata_o[c]),
      .core_state_o     (core_state_o[c]),
      .net_req_valid_o  (l1_req_valid[c]),
      .net_req_ready_i  (l1_req_ready[c]),
      .net_req_o        (l1_req[c]),
      .net_rsp_valid_i  (l1_rsp_valid[c]),
      .net_rsp_ready_o  (l1_rsp_ready[c]),
      .net_rsp_i        (l1_rsp[c]),
      .ev_to_pi_o       (ev_to_pi_o[c]),
      .ev_si_keep_o     (ev_si_keep_o[c]),
      .ev_pi_merge_o    (ev_pi_merge_o[c]),
      .ev_pi_hit_o      (ev_pi_hit_o[c]),
      .ev_evict_wb_o    (ev_evict_wb_o[c]),
      .ev_evict_clean_o (ev_evict_clean_o[c]),
      .ev_rb_stall_o    (ev_rb_stall_o[c]),
      .ev_commit_wb_o   (ev_commit_wb_o[c])
    );
  end

  logic     llc_req_valid, llc_req_ready, llc_rsp_valid, llc_rsp_ready;
  req_msg_t llc_req;
  rsp_msg_t llc_rsp;

  neat_noc #(.NCORES(NCORES)) u_noc (
    .clk, .rst_n,
    .req_valid_i     (l1_req_valid),
    .req_ready_o     (l1_req_ready),
    .req_i           (l1_req),
    .llc_req_valid_o (llc_req_valid),
    .llc_req_ready_i (llc_req_ready),
    .llc_req_o       (llc_req),
    .llc_rsp_valid_i (llc_rsp_valid),
    .llc_rsp_ready_o (llc_rsp_ready),
    .llc_rsp_i       (llc_rsp),
    .rsp_valid_o     (l1_rsp_valid),
    .rsp_ready_i     (l1_rsp_ready),
    .rsp_o           (l1_rsp)
  );

  neat_llc #(
    .NCORES     (NCORES),
    .SIZE_BYTES (LLC_SIZE_BYTES),
    .WAYS       (LLC_WAYS),
    .LATENCY    (LLC_LATENCY)
  ) u_llc (
    .clk, .rst_n,
    .init_done_o     (init_done_o),
    .in_valid_i      (llc_req_valid),
    .in_ready_o      (llc_req_ready),
    .in_msg_i        (llc_req),
    .out_valid_o     (llc_rsp_valid),
    .out_ready_i     (llc_rsp_ready),
    .out_msg_o       (llc_rsp),
    .mem_req_valid_o (mem_req_valid_o),
    .mem_req_ready_i (mem_req_ready_i),
    .mem_req_we_o    (mem_req_we_o),
    .mem_req_laddr_o (mem_req_laddr_o),
    .mem_req_data_o  (mem_req_data_o),
    .mem_rsp_valid_i (mem_rsp_valid_i),
    .mem_rsp_data_i  (mem_rsp_data_i),
    .ev_hit_o        (ev_llc_hit_o),
    .ev_miss_o       (ev_llc_miss_o),
    .ev_putallack_o  (ev_llc_putallack_o),
    .ev_early_done_o (ev_llc_early_done_o)
  );

endmodule
