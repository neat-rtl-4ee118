// neat_llc: shared last-level cache with the Neat LLC controller.
//
// What it does. The LLC serves the private caches' messages one at a time:
//   GetLine       -> reply Data with the whole line.
//   write-back    -> merge the bytes marked by the write bits into the line and
//                    add the line to the write signature of every core other
//                    than the writer. CNT = 1 (eviction): reply PutAck.
//                    CNT = 0 (bulk, at a release): count it in the writer's
//                    wbReceived counter.
//   WB_DONE(CNT)  -> the data-less message that closes a bulk write-back: once
//                    wbReceived equals CNT, reply PutAllAck and reset the
//                    counter. If write-backs are still in flight (a network
//                    that reorders), the expected count is kept and PutAllAck
//                    is sent when the last write-back arrives.
//   GetWrSig      -> reply with the requester's write signature and clear it.
// The LLC keeps no per-line coherence state: no directory, no sharer lists,
// no owner, and it need not include the private caches.
//
// How it works. A set-associative array (tags, valid and dirty bits per way,
// 64-byte lines) is backed by main memory through a simple request/response
// port. A miss writes back a dirty victim, reads the line from memory and then
// serves the message. After reset a sweep clears the valid bits, one set per
// cycle; the LLC accepts nothing until it is done.
//
// Interface. in_* is the request channel from the interconnect (valid/ready);
// out_* the response channel (valid/ready, dst field selects the core);
// mem_* the main-memory port (one outstanding request; read data returns on
// mem_rsp_valid_i).
//
// Timing. Each response leaves LATENCY cycles (default 50, the paper's LLC hit
// latency) after the request was accepted; on a miss, LATENCY cycles after the
// line arrived from memory. A hit occupies
// the controller for 3 cycles, so requests are accepted at up to one every 3
// cycles.
//
// From the paper: the message set and the LLC transitions of the full
// protocol, per-core wbReceived counters, per-core write signatures, 64 MB
// 32-way 64 B lines, 50-cycle hit latency. This design's own: the array
// organisation, victim choice (an invalid way, else a free-running counter),
// write-allocate with fetch on a write-back miss, and the memory port.
module neat_llc
  import neat_pkg::*;
#(
  parameter int NCORES      = 32,
  parameter int SIZE_BYTES  = 67108864,
  parameter int WAYS        = 32,
  parameter int LATENCY     = 50,
  parameter int DELAY_DEPTH = 64
) (
  input  logic     clk,
  input  logic     rst_n,
  output logic     init_done_o,
  // from the private caches
  input  logic     in_valid_i,
  output logic     in_ready_o,
  input  req_msg_t in_msg_i,
  // to the private caches
  output logic     out_valid_o,
  input  logic     out_ready_i,
  output rsp_msg_t out_msg_o,
  // main memory
  output logic     mem_req_valid_o,
  input  logic     mem_req_ready_i,
  output logic     mem_req_we_o,
  output laddr_t   mem_req_laddr_o,
  output line_t    mem_req_data_o,
  input  logic     mem_rsp_valid_i,
  input  line_t    mem_rsp_data_i,
  // event pulses
  output logic     ev_hit_o,
  output logic     ev_miss_o,
  output logic     ev_putallack_o,
  output logic     ev_early_done_o   // WB_DONE arrived before all write-backs
);

  localparam int LINES  = SIZE_BYTES / LINE_BYTES;
  localparam int SETS   = LINES / WAYS;
  localparam int IDX_W  = $clog2(SETS);
  localparam int WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int LIN_W  = $clog2(LINES);
  localparam int TAG_W  = LADDR_W - IDX_W;
  localparam int CID_W  = (NCORES > 1) ? $clog2(NCORES) : 1;

  if (SETS * WAYS * LINE_BYTES != SIZE_BYTES || (1 << IDX_W) != SETS) begin : g_bad_geo
    $error("neat_llc: size must be a power-of-two number of sets");
  end

  typedef enum logic [2:0] {
    S_INIT, S_IDLE, S_LOOKUP, S_MEM_WB, S_MEM_RD, S_MEM_WAIT, S_ACT
  } fsm_e;

  // ---------------------------------------------------------------- arrays
  line_t             data_q  [LINES];
  logic [TAG_W-1:0]  tag_q   [LINES];
  logic [WAYS-1:0]   vld_q   [SETS];
  logic [WAYS-1:0]   dirty_q [SETS];

  // ------------------------------------------------------------- registers
  fsm_e              fsm_q;
  logic [IDX_W:0]    init_q;
  req_msg_t          m_q;
  logic [31:0]       now_q, ts_q;
  logic [LIN_W-1:0]  idx_q;
  logic [WAY_W-1:0]  vctr_q;
  cnt_t              wbr_q  [NCORES];   // wbReceived
  cnt_t              exp_q  [NCORES];   // count carried by an early WB_DONE
  logic [NCORES-1:0] pend_q;

  // ---------------------------------------------------------- write sigs
  logic     sig_ins, sig_clr;
  sig_t     sig_rd;
  neat_wrsig #(.NCORES(NCORES)) u_wrsig (
    .clk, .rst_n,
    .ins_i       (sig_ins),
    .ins_src_i   (m_q.src),
    .ins_laddr_i (m_q.laddr),
    .rd_core_i   (in_msg_i.src),
    .rd_sig_o    (sig_rd),
    .clr_i       (sig_clr)
  );

  // -------------------------------------------------------- response queue
  logic      dly_push, dly_full;
  rsp_msg_t  dly_msg;
  logic [31:0] dly_ts;
  neat_rsp_delay #(.LATENCY(LATENCY), .DEPTH(DELAY_DEPTH)) u_dly (
    .clk, .rst_n,
    .push_i      (dly_push),
    .push_msg_i  (dly_msg),
    .push_ts_i   (dly_ts),
    .full_o      (dly_full),
    .now_i       (now_q),
    .out_valid_o (out_valid_o),
    .out_ready_i (out_ready_i),
    .out_msg_o   (out_msg_o)
  );

  // ---------------------------------------------------------------- lookup
  logic [IDX_W-1:0]  m_set;
  logic [TAG_W-1:0]  m_tag;
  logic [WAYS-1:0]   hit_vec;
  logic [WAY_W-1:0]  hit_way, inv_way, vic_way;
  logic              hit_any, inv_any;
  assign m_set = m_q.laddr[IDX_W-1:0];
  assign m_tag = m_q.laddr[LADDR_W-1:IDX_W];

  always_comb begin
    hit_way = '0;
    inv_way = '0;
    for (int w = 0; w < WAYS; w++)
      hit_vec[w] = vld_q[m_set][w] && (tag_q[{m_set, WAY_W'(w)}] == m_tag);
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (hit_vec[w])          hit_way = WAY_W'(w);
      if (!vld_q[m_set][w])    inv_way = WAY_W'(w);
    end
    hit_any = |hit_vec;
    inv_any = ~&vld_q[m_set];
    vic_way = inv_any ? inv_way : vctr_q;
  end

  logic [WAY_W-1:0] idx_way;
  assign idx_way = idx_q[WAY_W-1:0];

  function automatic line_t expand(input wbits_t m);
    line_t e;
    for (int b = 0; b < LINE_BYTES; b++) e[b*8 +: 8] = {8{m[b]}};
    return e;
  endfunction

  // Whether a bulk write-back now completes the requester's count.
  logic [CID_W-1:0] in_cid, m_cid;
  assign in_cid = CID_W'(in_msg_i.src);
  assign m_cid  = CID_W'(m_q.src);

  logic act_wb_bulk, act_allack;
  assign act_wb_bulk = (fsm_q == S_ACT) && m_q.typ == MSG_WB && m_q.cnt == '0;
  assign act_allack  = act_wb_bulk && pend_q[m_cid] &&
                       (wbr_q[m_cid] + cnt_t'(1) == exp_q[m_cid]);

  logic accept;
  assign in_ready_o = (fsm_q == S_IDLE) && !dly_full;
  assign accept     = in_valid_i && in_ready_o;
  assign init_done_o = (fsm_q != S_INIT);

  // ------------------------------------------------- outputs (combinational)
  always_comb begin
    dly_push        = 1'b0;
    dly_msg         = '0;
    dly_ts          = ts_q;
    sig_ins         = 1'b0;
    sig_clr         = 1'b0;
    mem_req_valid_o = 1'b0;
    mem_req_we_o    = 1'b0;
    mem_req_laddr_o = m_q.laddr;
    mem_req_data_o  = data_q[idx_q];
    ev_putallack_o  = 1'b0;
    unique case (fsm_q)
      S_IDLE: if (accept) begin
        dly_ts      = now_q;
        dly_msg.dst = in_msg_i.src;
        if (in_msg_i.typ == MSG_GETWRSIG) begin
          dly_push    = 1'b1;
          dly_msg.typ = RSP_WRSIG;
          dly_msg.sig = sig_rd;
          sig_clr     = 1'b1;
        end else if (in_msg_i.typ == MSG_WB_DONE &&
                     wbr_q[in_cid] == in_msg_i.cnt) begin
          dly_push       = 1'b1;
          dly_msg.typ    = RSP_PUTALLACK;
          ev_putallack_o = 1'b1;
        end
      end
      S_MEM_WB: begin
        mem_req_valid_o = 1'b1;
        mem_req_we_o    = 1'b1;
        mem_req_laddr_o = {tag_q[idx_q], m_set};
      end
      S_MEM_RD: mem_req_valid_o = 1'b1;
      S_ACT: begin
        dly_msg.dst   = m_q.src;
        dly_msg.laddr = m_q.laddr;
        if (m_q.typ == MSG_GETLINE) begin
          dly_push     = 1'b1;
          dly_msg.typ  = RSP_DATA;
          dly_msg.data = data_q[idx_q];
        end else begin
          sig_ins = 1'b1;
          if (m_q.cnt == cnt_t'(1)) begin
            dly_push    = 1'b1;
            dly_msg.typ = RSP_PUTACK;
          end else if (act_allack) begin
            dly_push       = 1'b1;
            dly_msg.typ    = RSP_PUTALLACK;
            ev_putallack_o = 1'b1;
          end
        end
      end
      default: ;
    endcase
  end

  // ------------------------------------------------------------ main FSM
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      fsm_q     <= S_INIT;
      init_q    <= '0;
      now_q     <= '0;
      ts_q      <= '0;
      vctr_q    <= '0;
      idx_q     <= '0;
      m_q       <= '0;
      pend_q    <= '0;
      for (int c = 0; c < NCORES; c++) begin
        wbr_q[c] <= '0;
        exp_q[c] <= '0;
      end
      ev_hit_o        <= 1'b0;
      ev_miss_o       <= 1'b0;
      ev_early_done_o <= 1'b0;
    end else begin
      now_q           <= now_q + 32'd1;
      vctr_q          <= vctr_q + WAY_W'(1);
      ev_hit_o        <= 1'b0;
      ev_miss_o       <= 1'b0;
      ev_early_done_o <= 1'b0;
      unique case (fsm_q)
        S_INIT: begin
          vld_q[init_q[IDX_W-1:0]]   <= '0;
          dirty_q[init_q[IDX_W-1:0]] <= '0;
          init_q <= init_q + 1'b1;
          if (init_q == (IDX_W+1)'(SETS - 1)) fsm_q <= S_IDLE;
        end

        S_IDLE: if (accept) begin
          m_q  <= in_msg_i;
          ts_q <= now_q;
          unique case (in_msg_i.typ)
            MSG_GETWRSIG: ;
            MSG_WB_DONE: begin
              if (wbr_q[in_cid] == in_msg_i.cnt) begin
                wbr_q[in_cid]  <= '0;
              end else begin
                pend_q[in_cid] <= 1'b1;
                exp_q[in_cid]  <= in_msg_i.cnt;
                ev_early_done_o <= 1'b1;
              end
            end
            default: fsm_q <= S_LOOKUP;
          endcase
        end

        S_LOOKUP: begin
          if (hit_any) begin
            idx_q    <= {m_set, hit_way};
            ev_hit_o <= 1'b1;
            fsm_q    <= S_ACT;
          end else begin
            idx_q     <= {m_set, vic_way};
            ev_miss_o <= 1'b1;
            if (vld_q[m_set][vic_way] && dirty_q[m_set][vic_way]) fsm_q <= S_MEM_WB;
            else fsm_q <= S_MEM_RD;
          end
        end

        S_MEM_WB: if (mem_req_ready_i) begin
          dirty_q[m_set][idx_way] <= 1'b0;
          fsm_q <= S_MEM_RD;
        end

        S_MEM_RD: if (mem_req_ready_i) begin
          vld_q[m_set][idx_way] <= 1'b0;
          fsm_q <= S_MEM_WAIT;
        end

        S_MEM_WAIT: if (mem_rsp_valid_i) begin
          data_q[idx_q]           <= mem_rsp_data_i;
          tag_q[idx_q]            <= m_tag;
          vld_q[m_set][idx_way]   <= 1'b1;
          dirty_q[m_set][idx_way] <= 1'b0;
          ts_q  <= now_q;   // the line is accessed again once filled
          fsm_q <= S_ACT;
        end

        S_ACT: begin
          if (m_q.typ == MSG_WB) begin
            data_q[idx_q] <= (data_q[idx_q] & ~expand(m_q.wbs)) |
                             (m_q.data & expand(m_q.wbs));
            dirty_q[m_set][idx_way] <= 1'b1;
            if (m_q.cnt == '0) begin
              if (act_allack) begin
                wbr_q[m_cid]  <= '0;
                pend_q[m_cid] <= 1'b0;
              end else begin
                wbr_q[m_cid] <= wbr_q[m_cid] + cnt_t'(1);
              end
            end
          end
          fsm_q <= S_IDLE;
        end

        default: fsm_q <= S_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------ assertions
  a_mem_stable: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req_valid_o && !mem_req_ready_i |=> mem_req_valid_o && $stable(mem_req_laddr_o));
  a_src_range: assert property (@(posedge clk) disable iff (!rst_n)
    accept |-> in_msg_i.src < core_id_t'(NCORES));

endmodule
