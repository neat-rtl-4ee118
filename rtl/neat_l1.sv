// neat_l1: private cache and its Neat controller (one per core).
//
// What it does. The cache holds lines in one of three states: I (invalid),
// V (valid) and PI (partially invalid), plus one write bit per byte that marks
// the bytes this core has written since its last release. Loads and stores
// hit in V lines; in a PI line a store hits and a load hits only if every byte
// it reads is dirty (written by this core). A load of any clean byte of a PI
// line fetches the line from the LLC and merges it under the dirty bytes,
// turning the line V. Misses fetch the line with GetLine. Evicting a clean
// line is silent; evicting a dirty line sends, right after the GetLine for the
// new line, a write-back of its dirty bytes with CNT = 1 and records it in the
// request buffer until its PutAck. A GetLine for a line that is still in the
// request buffer waits until that line's PutAck has arrived.
//
// Synchronization. An acquire sends GetWrSig, waits for this core's write
// signature, then walks every line: a V line whose address may be in the
// signature becomes PI, other lines are kept as they are (write bits are not
// touched). A release walks every line and writes back the dirty bytes of each
// dirty line with CNT = 0, clearing its write bits. Both end with a data-less
// write-back (MSG_WB_DONE) that carries the number of write-backs sent, and
// complete once PutAllAck has arrived and the request buffer is empty.
//
// Interface. Core side: one request at a time (valid/ready), a word access
// of 8 bytes with byte enables, or an acquire or release; core_rsp_valid_o
// pulses once per request, carrying load data. Network side: one request
// channel (valid/ready, payload held until accepted) and one response channel
// that is always accepted.
//
// Timing. A load or store hit answers HIT_LATENCY cycles after the cycle in
// which the request was accepted (default 4, as in the paper's evaluation).
// The SI and CM walks visit one line per cycle (a write-back waits for the
// network). Misses take as long as the LLC does.
//
// The src field of every outgoing message is the constant CORE_ID, so those
// output bits are constant by design.
//
// From the paper: the three line states, per-byte write bits, the per-line
// and core-wide transitions of the full protocol (PI state and write
// signatures), silent clean evictions, CNT = 1 eviction write-backs, bulk
// write-backs closed by a count, 32 KB 8-way 64 B lines. This design's own
// choices: a blocking cache with one miss at a time, round-robin replacement
// that prefers an invalid way, 8-byte core accesses, one line visited per
// cycle by the walks, and waiting for PutAllAck and all PutAcks in both SI and
// CM. Only a single private level is built (the paper's evaluation adds an L2).
module neat_l1
  import neat_pkg::*;
#(
  parameter int          SIZE_BYTES  = 32768,
  parameter int          WAYS        = 8,
  parameter int          HIT_LATENCY = 4,
  parameter int          RB_ENTRIES  = 8,
  parameter logic [7:0]  CORE_ID     = 8'd0
) (
  input  logic        clk,
  input  logic        rst_n,
  // core side
  input  logic        core_req_valid_i,
  output logic        core_req_ready_o,
  input  core_req_t   core_req_i,
  output logic        core_rsp_valid_o,
  output logic [63:0] core_rsp_rdata_o,
  output core_state_e core_state_o,
  // network side
  output logic        net_req_valid_o,
  input  logic        net_req_ready_i,
  output req_msg_t    net_req_o,
  input  logic        net_rsp_valid_i,
  output logic        net_rsp_ready_o,
  input  rsp_msg_t    net_rsp_i,
  // event pulses (for statistics and tests)
  output logic        ev_to_pi_o,       // V line partially invalidated
  output logic        ev_si_keep_o,     // V line kept V: not in signature
  output logic        ev_pi_merge_o,    // PI line refilled under dirty bytes
  output logic        ev_pi_hit_o,      // access hit in a PI line
  output logic        ev_evict_wb_o,    // dirty eviction write-back sent
  output logic        ev_evict_clean_o, // silent clean eviction
  output logic        ev_rb_stall_o,    // miss waits on a pending write-back
  output logic        ev_commit_wb_o    // bulk write-back at a release
);

  localparam int LINES  = SIZE_BYTES / LINE_BYTES;
  localparam int SETS   = LINES / WAYS;
  localparam int IDX_W  = $clog2(SETS);
  localparam int WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int LIN_W  = $clog2(LINES);
  localparam int TAG_W  = LADDR_W - IDX_W;
  localparam int WORDS  = LINE_BYTES / WORD_BYTES;

  if (HIT_LATENCY < 2) begin : g_bad_lat
    $error("neat_l1: HIT_LATENCY must be at least 2");
  end
  if (SETS * WAYS * LINE_BYTES != SIZE_BYTES || (1 << IDX_W) != SETS) begin : g_bad_geo
    $error("neat_l1: size must be a power-of-two number of sets");
  end

  typedef enum logic [3:0] {
    S_IDLE, S_LOOKUP, S_EVICT, S_GET, S_FILL, S_RESP,
    S_SIG_REQ, S_SIG_WAIT, S_SI_WALK, S_CM_WALK, S_DONE, S_WAIT_ACK
  } fsm_e;

  // ---------------------------------------------------------------- arrays
  line_t             data_q [LINES];
  wbits_t            wb_q   [LINES];
  logic [TAG_W-1:0]  tag_q  [LINES];
  line_state_e       st_q   [LINES];
  logic [WAY_W-1:0]  rr_q   [SETS];

  // ------------------------------------------------------------- registers
  fsm_e              fsm_q;
  core_req_t         req_q;
  logic [15:0]       lat_q;
  logic [LIN_W:0]    walk_q;
  cnt_t              wbcnt_q;
  logic              allack_q;
  logic              acq_q;       // current sync op is an acquire
  sig_t              sig_q;
  logic [LIN_W-1:0]  miss_idx_q;
  logic              merge_q;     // outstanding GetLine refills a PI line
  logic              evict_q;     // dirty victim to write back after GetLine
  logic              fbuf_vld_q;  // fill data arrived while in S_EVICT
  line_t             fbuf_q;
  logic [63:0]       rdata_q;

  // ------------------------------------------------------ request decoding
  logic [IDX_W-1:0]  r_set;
  logic [TAG_W-1:0]  r_tag;
  laddr_t            r_laddr;
  logic [WORD_W-1:0] r_word;
  wbits_t            r_mask;
  line_t             r_wline;
  line_t             r_bmask;

  assign r_laddr = req_q.addr[ADDR_W-1:OFF_W];
  assign r_set   = r_laddr[IDX_W-1:0];
  assign r_tag   = r_laddr[LADDR_W-1:IDX_W];
  assign r_word  = req_q.addr[OFF_W-1:$clog2(WORD_BYTES)];
  assign r_mask  = word_mask(r_word, req_q.be);
  assign r_wline = {WORDS{req_q.wdata}};

  function automatic line_t expand(input wbits_t m);
    line_t e;
    for (int b = 0; b < LINE_BYTES; b++) e[b*8 +: 8] = {8{m[b]}};
    return e;
  endfunction

  assign r_bmask = expand(r_mask);

  // ---------------------------------------------------------------- lookup
  logic [WAYS-1:0]   hit_vec, inv_vec;
  logic [WAY_W-1:0]  hit_way, inv_way, vic_way;
  logic              hit_any, inv_any, hit_ok;
  logic [LIN_W-1:0]  hidx, vidx;
  line_state_e       hst;

  always_comb begin
    hit_way = '0;
    inv_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      hit_vec[w] = (st_q[{r_set, WAY_W'(w)}] != LS_I) &&
                   (tag_q[{r_set, WAY_W'(w)}] == r_tag);
      inv_vec[w] = (st_q[{r_set, WAY_W'(w)}] == LS_I);
    end
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (hit_vec[w]) hit_way = WAY_W'(w);
      if (inv_vec[w]) inv_way = WAY_W'(w);
    end
    hit_any = |hit_vec;
    inv_any = |inv_vec;
    vic_way = inv_any ? inv_way : rr_q[r_set];
    hidx    = {r_set, hit_way};
    vidx    = {r_set, vic_way};
    hst     = st_q[hidx];
    if (req_q.op == OP_STORE) hit_ok = hit_any;
    else hit_ok = hit_any && (hst == LS_V || (r_mask & ~wb_q[hidx]) == '0);
  end

  // ------------------------------------------------------------ walk line
  logic [LIN_W-1:0] widx;
  laddr_t           w_laddr;
  logic             w_last;
  assign widx    = walk_q[LIN_W-1:0];
  assign w_laddr = {tag_q[widx], widx[LIN_W-1:WAY_W]};
  assign w_last  = (walk_q == (LIN_W+1)'(LINES - 1));

  laddr_t m_laddr;   // line being evicted (S_EVICT)
  assign m_laddr = {tag_q[miss_idx_q], miss_idx_q[LIN_W-1:WAY_W]};

  // -------------------------------------------------------- request buffer
  logic rb_alloc, rb_match, rb_full, rb_empty, rb_free;
  neat_reqbuf #(.ENTRIES(RB_ENTRIES)) u_rb (
    .clk, .rst_n,
    .alloc_i        (rb_alloc),
    .alloc_laddr_i  (m_laddr),
    .free_i         (rb_free),
    .free_laddr_i   (net_rsp_i.laddr),
    .lookup_laddr_i (r_laddr),
    .match_o        (rb_match),
    .full_o         (rb_full),
    .empty_o        (rb_empty)
  );

  assign net_rsp_ready_o = 1'b1;
  assign rb_free = net_rsp_valid_i && net_rsp_i.typ == RSP_PUTACK;

  logic got_allack;
  assign got_allack = allack_q ||
                      (net_rsp_valid_i && net_rsp_i.typ == RSP_PUTALLACK);

  // ------------------------------------------------- outputs (combinational)
  always_comb begin
    net_req_valid_o   = 1'b0;
    net_req_o         = '0;
    net_req_o.src     = CORE_ID;
    core_req_ready_o  = (fsm_q == S_IDLE);
    core_rsp_valid_o  = 1'b0;
    core_rsp_rdata_o  = rdata_q;
    rb_alloc          = 1'b0;
    ev_rb_stall_o     = 1'b0;
    ev_commit_wb_o    = 1'b0;
    unique case (fsm_q)
      S_EVICT: begin
        net_req_valid_o = !rb_full;
        net_req_o.typ   = MSG_WB;
        net_req_o.laddr = m_laddr;
        net_req_o.cnt   = cnt_t'(1);
        net_req_o.wbs   = wb_q[miss_idx_q];
        net_req_o.data  = data_q[miss_idx_q];
        rb_alloc        = !rb_full && net_req_ready_i;
      end
      S_GET: begin
        net_req_valid_o = !rb_match && !(evict_q && rb_full);
        ev_rb_stall_o   = rb_match;
        net_req_o.typ   = MSG_GETLINE;
        net_req_o.laddr = r_laddr;
      end
      S_SIG_REQ: begin
        net_req_valid_o = 1'b1;
        net_req_o.typ   = MSG_GETWRSIG;
      end
      S_CM_WALK: begin
        net_req_valid_o = (st_q[widx] != LS_I) && (wb_q[widx] != '0);
        ev_commit_wb_o  = net_req_valid_o && net_req_ready_i;
        net_req_o.typ   = MSG_WB;
        net_req_o.laddr = w_laddr;
        net_req_o.cnt   = '0;
        net_req_o.wbs   = wb_q[widx];
        net_req_o.data  = data_q[widx];
      end
      S_DONE: begin
        net_req_valid_o = 1'b1;
        net_req_o.typ   = MSG_WB_DONE;
        net_req_o.cnt   = wbcnt_q;
      end
      S_RESP:     core_rsp_valid_o = (lat_q >= 16'(HIT_LATENCY));
      S_WAIT_ACK: core_rsp_valid_o = got_allack && rb_empty;
      default: ;
    endcase
  end

  always_comb begin
    unique case (fsm_q)
      S_SIG_REQ, S_SIG_WAIT, S_SI_WALK: core_state_o = CS_SI;
      S_CM_WALK:                        core_state_o = CS_CM;
      S_DONE, S_WAIT_ACK:               core_state_o = acq_q ? CS_SI : CS_CM;
      default:                          core_state_o = CS_NE;
    endcase
  end

  line_t fill_data;
  assign fill_data = fbuf_vld_q ? fbuf_q : net_rsp_i.data;

  // ------------------------------------------------------------ main FSM
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      fsm_q    <= S_IDLE;
      lat_q    <= '0;
      walk_q   <= '0;
      wbcnt_q  <= '0;
      allack_q <= 1'b0;
      acq_q    <= 1'b0;
      merge_q  <= 1'b0;
      evict_q  <= 1'b0;
      fbuf_vld_q <= 1'b0;
      fbuf_q   <= '0;
      rdata_q  <= '0;
      miss_idx_q <= '0;
      req_q    <= '0;
      sig_q    <= '0;
      for (int i = 0; i < LINES; i++) begin
        st_q[i] <= LS_I;
        wb_q[i] <= '0;
      end
      for (int s = 0; s < SETS; s++) rr_q[s] <= '0;
      ev_to_pi_o       <= 1'b0;
      ev_si_keep_o     <= 1'b0;
      ev_pi_merge_o    <= 1'b0;
      ev_pi_hit_o      <= 1'b0;
      ev_evict_wb_o    <= 1'b0;
      ev_evict_clean_o <= 1'b0;
    end else begin
      ev_to_pi_o       <= 1'b0;
      ev_si_keep_o     <= 1'b0;
      ev_pi_merge_o    <= 1'b0;
      ev_pi_hit_o      <= 1'b0;
      ev_evict_wb_o    <= 1'b0;
      ev_evict_clean_o <= 1'b0;
      if (lat_q != '1) lat_q <= lat_q + 16'd1;
      if (net_rsp_valid_i && net_rsp_i.typ == RSP_PUTALLACK) allack_q <= 1'b1;

      unique case (fsm_q)
        S_IDLE: if (core_req_valid_i) begin
          req_q <= core_req_i;
          lat_q <= 16'd1;
          unique case (core_req_i.op)
            OP_LOAD, OP_STORE: fsm_q <= S_LOOKUP;
            OP_ACQUIRE: begin
              acq_q    <= 1'b1;
              allack_q <= 1'b0;
              wbcnt_q  <= '0;
              fsm_q    <= S_SIG_REQ;
            end
            default: begin   // OP_RELEASE
              acq_q    <= 1'b0;
              allack_q <= 1'b0;
              wbcnt_q  <= '0;
              walk_q   <= '0;
              fsm_q    <= S_CM_WALK;
            end
          endcase
        end

        S_LOOKUP: begin
          if (hit_ok) begin
            if (hst == LS_PI) ev_pi_hit_o <= 1'b1;
            if (req_q.op == OP_STORE) begin
              data_q[hidx] <= (data_q[hidx] & ~r_bmask) | (r_wline & r_bmask);
              wb_q[hidx]   <= wb_q[hidx] | r_mask;
            end else begin
              rdata_q <= data_q[hidx][r_word*64 +: 64];
            end
            fsm_q <= S_RESP;
          end else if (hit_any) begin
            // load of clean bytes of a PI line: refetch and merge
            miss_idx_q <= hidx;
            merge_q    <= 1'b1;
            fsm_q      <= S_GET;
          end else begin
            miss_idx_q <= vidx;
            merge_q    <= 1'b0;
            if (!inv_any) rr_q[r_set] <= rr_q[r_set] + WAY_W'(1);
            if (st_q[vidx] != LS_I && wb_q[vidx] != '0) begin
              evict_q <= 1'b1;
              fsm_q   <= S_GET;
            end else begin
              if (st_q[vidx] != LS_I) ev_evict_clean_o <= 1'b1;
              st_q[vidx] <= LS_I;
              fsm_q      <= S_GET;
            end
          end
        end

        S_EVICT: begin
          if (net_rsp_valid_i && net_rsp_i.typ == RSP_DATA) begin
            fbuf_q     <= net_rsp_i.data;
            fbuf_vld_q <= 1'b1;
          end
          if (!rb_full && net_req_ready_i) begin
            st_q[miss_idx_q] <= LS_I;
            wb_q[miss_idx_q] <= '0;
            ev_evict_wb_o    <= 1'b1;
            evict_q          <= 1'b0;
            fsm_q            <= S_FILL;
          end
        end

        S_GET: if (net_req_valid_o && net_req_ready_i) fsm_q <= evict_q ? S_EVICT : S_FILL;

        S_FILL: if (fbuf_vld_q || (net_rsp_valid_i && net_rsp_i.typ == RSP_DATA)) begin
          fbuf_vld_q <= 1'b0;
          if (merge_q) begin
            data_q[miss_idx_q] <= (data_q[miss_idx_q] & expand(wb_q[miss_idx_q])) |
                                  (fill_data & ~expand(wb_q[miss_idx_q]));
            ev_pi_merge_o <= 1'b1;
          end else begin
            data_q[miss_idx_q] <= fill_data;
            wb_q[miss_idx_q]   <= '0;
            tag_q[miss_idx_q]  <= r_tag;
          end
          st_q[miss_idx_q] <= LS_V;
          fsm_q            <= S_LOOKUP;
        end

        S_RESP: if (lat_q >= 16'(HIT_LATENCY)) fsm_q <= S_IDLE;

        S_SIG_REQ: if (net_req_ready_i) fsm_q <= S_SIG_WAIT;

        S_SIG_WAIT: if (net_rsp_valid_i && net_rsp_i.typ == RSP_WRSIG) begin
          sig_q  <= net_rsp_i.sig;
          walk_q <= '0;
          fsm_q  <= S_SI_WALK;
        end

        S_SI_WALK: begin
          if (st_q[widx] == LS_V) begin
            if (sig_test(sig_q, w_laddr)) begin
              st_q[widx] <= LS_PI;
              ev_to_pi_o <= 1'b1;
            end else begin
              ev_si_keep_o <= 1'b1;
            end
          end
          walk_q <= walk_q + 1'b1;
          if (w_last) fsm_q <= S_DONE;
        end

        S_CM_WALK: begin
          if (st_q[widx] != LS_I && wb_q[widx] != '0) begin
            if (net_req_ready_i) begin
              wb_q[widx] <= '0;
              wbcnt_q    <= wbcnt_q + cnt_t'(1);
              walk_q     <= walk_q + 1'b1;
              if (w_last) fsm_q <= S_DONE;
            end
          end else begin
            walk_q <= walk_q + 1'b1;
            if (w_last) fsm_q <= S_DONE;
          end
        end

        S_DONE: if (net_req_ready_i) fsm_q <= S_WAIT_ACK;

        S_WAIT_ACK: if (got_allack && rb_empty) fsm_q <= S_IDLE;

        default: fsm_q <= S_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------ assertions
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    net_req_valid_o && !net_req_ready_i |=> net_req_valid_o && $stable(net_req_o));
  a_data_expected: assert property (@(posedge clk) disable iff (!rst_n)
    net_rsp_valid_i && net_rsp_i.typ == RSP_DATA |->
      (fsm_q == S_FILL && !fbuf_vld_q) || fsm_q == S_EVICT);
  a_sig_expected: assert property (@(posedge clk) disable iff (!rst_n)
    net_rsp_valid_i && net_rsp_i.typ == RSP_WRSIG |-> fsm_q == S_SIG_WAIT);
  a_rsp_for_me: assert property (@(posedge clk) disable iff (!rst_n)
    net_rsp_valid_i |-> net_rsp_i.dst == CORE_ID);

endmodule
