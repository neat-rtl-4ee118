// tb_neat_l1: self-checking test of one private cache and its Neat controller.
// The testbench plays the LLC: it answers GetLine with data from its own
// line memory, applies write-backs to it byte by byte, answers PutAck,
// PutAllAck and GetWrSig after programmable delays. Checks cover: load miss
// and hit, the 4-cycle hit latency, store write bits, the commit walk at a
// release (one write-back per dirty line with exactly the written bytes,
// CNT=0, closed by WB_DONE with the count), self-invalidation with a write
// signature (listed line -> PI, others stay valid), PI hits on dirty bytes,
// PI refetch merging LLC data under the core's dirty bytes, silent clean
// eviction, dirty eviction with CNT=1, the stall of a miss on a line whose
// write-back is pending, and synchronization waiting for outstanding PutAcks.
module tb_neat_l1;
  import neat_pkg::*;
  localparam int HL = 4;
  localparam logic [7:0] ME = 8'd3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic cq_valid, cq_ready, cr_valid;
  core_req_t cq;
  logic [63:0] cr_data;
  core_state_e cstate;
  logic nq_valid, nq_ready, nr_valid, nr_ready;
  req_msg_t nq;
  rsp_msg_t nr;
  logic e_pi, e_keep, e_merge, e_pihit, e_ewb, e_eclean, e_stall, e_cwb;
  int checks = 0, failures = 0;

  neat_l1 #(.SIZE_BYTES(1024), .WAYS(2), .HIT_LATENCY(HL), .RB_ENTRIES(2), .CORE_ID(ME)) dut (
    .clk, .rst_n,
    .core_req_valid_i(cq_valid), .core_req_ready_o(cq_ready), .core_req_i(cq),
    .core_rsp_valid_o(cr_valid), .core_rsp_rdata_o(cr_data), .core_state_o(cstate),
    .net_req_valid_o(nq_valid), .net_req_ready_i(nq_ready), .net_req_o(nq),
    .net_rsp_valid_i(nr_valid), .net_rsp_ready_o(nr_ready), .net_rsp_i(nr),
    .ev_to_pi_o(e_pi), .ev_si_keep_o(e_keep), .ev_pi_merge_o(e_merge), .ev_pi_hit_o(e_pihit),
    .ev_evict_wb_o(e_ewb), .ev_evict_clean_o(e_eclean), .ev_rb_stall_o(e_stall),
    .ev_commit_wb_o(e_cwb));

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  // ------------------------------------------------------------ LLC model
  line_t llc [laddr_t];
  function automatic line_t llc_line(laddr_t a);
    line_t l;
    if (llc.exists(a)) return llc[a];
    for (int w = 0; w < 8; w++) l[w*64 +: 64] = {38'(a), 26'(w)} ^ 64'h0123_4567_89AB_CDEF;
    return l;
  endfunction

  sig_t  tb_sig;
  int    data_delay = 10, putack_delay = 5, allack_delay = 5;
  req_msg_t log_q[$];      // every message accepted from the cache
  int       log_t[$];
  rsp_msg_t due_m[$];
  int       due_t[$];
  int       putack_deliver_cyc = 0;
  int       wbs_cnt0 = 0;

  function automatic void schedule(rsp_msg_t m, int at);
    int i = 0;
    while (i < due_t.size() && due_t[i] <= at) i++;
    due_m.insert(i, m);
    due_t.insert(i, at);
  endfunction

  always @(posedge clk) begin
    if (rst_n && nq_valid && nq_ready) begin
      automatic rsp_msg_t r = '0;
      log_q.push_back(nq); log_t.push_back(cyc);
      chk(nq.src == ME, "source id");
      r.dst = ME; r.laddr = nq.laddr;
      case (nq.typ)
        MSG_GETLINE: begin r.typ = RSP_DATA; r.data = llc_line(nq.laddr); schedule(r, cyc + data_delay); end
        MSG_WB: begin
          automatic line_t l = llc_line(nq.laddr);
          for (int b = 0; b < 64; b++) if (nq.wbs[b]) l[b*8 +: 8] = nq.data[b*8 +: 8];
          llc[nq.laddr] = l;
          if (nq.cnt == 1) begin r.typ = RSP_PUTACK; schedule(r, cyc + putack_delay); end
          else wbs_cnt0++;
        end
        MSG_WB_DONE: begin
          chk(int'(nq.cnt) == wbs_cnt0, $sformatf("WB_DONE count %0d == %0d", nq.cnt, wbs_cnt0));
          wbs_cnt0 = 0;
          r.typ = RSP_PUTALLACK; schedule(r, cyc + allack_delay);
        end
        default: begin r.typ = RSP_WRSIG; r.sig = tb_sig; schedule(r, cyc + 3); end
      endcase
    end
  end

  // deliver due responses, one per cycle
  always @(negedge clk) begin
    nr_valid <= 1'b0;
    if (due_t.size() > 0 && due_t[0] <= cyc) begin
      nr_valid <= 1'b1;
      nr <= due_m[0];
      if (due_m[0].typ == RSP_PUTACK) putack_deliver_cyc = cyc;
      void'(due_m.pop_front()); void'(due_t.pop_front());
    end
  end
  always @(posedge clk) nq_ready <= ($urandom_range(0, 3) != 0);

  // ------------------------------------------------------------ events
  int n_pi = 0, n_keep = 0, n_merge = 0, n_pihit = 0, n_ewb = 0, n_eclean = 0, n_stall = 0, n_cwb = 0;
  always @(posedge clk) if (rst_n) begin
    n_pi += e_pi; n_keep += e_keep; n_merge += e_merge; n_pihit += e_pihit;
    n_ewb += e_ewb; n_eclean += e_eclean; n_stall += e_stall; n_cwb += e_cwb;
  end

  // ------------------------------------------------------------ core side
  int lat;
  logic [63:0] rd;
  int acc_cyc, rsp_cyc, rsp_cnt = 0;
  logic [63:0] rsp_data;
  always @(posedge clk) if (rst_n) begin
    if (cq_valid && cq_ready) acc_cyc = cyc;
    if (cr_valid) begin rsp_cnt++; rsp_cyc = cyc; rsp_data = cr_data; end
  end
  task automatic op(core_op_e o, logic [31:0] addr, logic [63:0] wd = '0, logic [7:0] be = 8'hFF);
    int n, guard = 0;
    @(negedge clk);
    n = rsp_cnt;
    cq_valid = 1; cq = '{op: o, addr: addr, wdata: wd, be: be};
    while (!cq_ready) @(negedge clk);
    @(posedge clk); #1 cq_valid = 0;
    while (rsp_cnt == n && guard < 5000) begin @(posedge clk); #1; guard++; end
    chk(rsp_cnt == n + 1, $sformatf("core response op=%0d addr=%h", o, addr));
    lat = rsp_cyc - acc_cyc;
    rd = rsp_data;
  endtask

  function automatic logic [63:0] word_of(line_t l, logic [31:0] addr);
    return l[addr[5:3]*64 +: 64];
  endfunction
  function automatic int count_typ(req_type_e t, int from);
    int n = 0;
    for (int i = from; i < log_q.size(); i++) if (log_q[i].typ == t) n++;
    return n;
  endfunction

  localparam logic [31:0] A  = 32'h0000_1000;  // set 0
  localparam logic [31:0] B  = 32'h0000_2040;  // set 1
  localparam logic [31:0] E1 = 32'h0000_4080;  // set 2
  localparam logic [31:0] E2 = 32'h0000_4280;  // set 2
  localparam logic [31:0] E3 = 32'h0000_4480;  // set 2
  function automatic laddr_t la(logic [31:0] a); return a[31:6]; endfunction

  int n0, tcm;
  logic seen_cm, seen_si;
  always @(posedge clk) if (rst_n) begin
    if (cstate == CS_CM) seen_cm = 1;
    if (cstate == CS_SI) seen_si = 1;
  end

  initial begin
    cq_valid = 0; cq = '0; tb_sig = '0; seen_cm = 0; seen_si = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1. load miss then hit
    n0 = log_q.size();
    op(OP_LOAD, A + 8);
    chk(rd == word_of(llc_line(la(A)), A + 8), "load miss data");
    chk(count_typ(MSG_GETLINE, n0) == 1 && log_q[n0].laddr == la(A), "GetLine sent for miss");
    chk(lat > HL, "miss slower than hit");
    n0 = log_q.size();
    op(OP_LOAD, A + 16);
    chk(rd == word_of(llc_line(la(A)), A + 16), "load hit data");
    chk(lat == HL, $sformatf("load hit latency %0d == %0d", lat, HL));
    chk(log_q.size() == n0, "hit sends nothing");
    // 2. store hit with byte enables
    op(OP_STORE, A, 64'hDEAD_BEEF_0BAD_F00D, 8'h0F);
    chk(lat == HL, "store hit latency");
    op(OP_LOAD, A);
    chk(rd == {word_of(llc_line(la(A)), A)[63:32], 32'h0BAD_F00D}, "store merged into line");
    chk(dut.wb_q[{3'd0, 1'b0}] == 64'h0F || dut.wb_q[{3'd0, 1'b1}] == 64'h0F, "write bits set");
    // 3. release: commit dirty bytes
    n0 = log_q.size();
    seen_cm = 0;
    op(OP_RELEASE, 0);
    chk(seen_cm, "core in CM during release");
    chk(count_typ(MSG_WB, n0) == 1, "one bulk write-back");
    chk(log_q[n0].typ == MSG_WB && log_q[n0].cnt == 0 && log_q[n0].wbs == 64'h0F &&
        log_q[n0].laddr == la(A), "bulk write-back carries only dirty bytes, CNT=0");
    chk(log_q[log_q.size()-1].typ == MSG_WB_DONE && log_q[log_q.size()-1].cnt == 1, "WB_DONE(1)");
    chk(word_of(llc[la(A)], A)[31:0] == 32'h0BAD_F00D, "LLC got the committed bytes");
    // 4. release with nothing dirty
    n0 = log_q.size();
    op(OP_RELEASE, 0);
    chk(log_q.size() == n0 + 1 && log_q[n0].typ == MSG_WB_DONE && log_q[n0].cnt == 0, "empty commit sends WB_DONE(0)");
    // 5. acquire with A in the signature, B valid but not in it
    op(OP_LOAD, B);
    op(OP_STORE, A + 16, 64'h1111_2222_3333_4444, 8'hFF);        // dirty word 2 of A
    begin  // another core updates words 2 and 3 of A in the LLC
      automatic line_t l = llc_line(la(A));
      l[2*64 +: 64] = 64'hAAAA_AAAA_AAAA_AAAA;
      l[3*64 +: 64] = 64'hBBBB_BBBB_BBBB_BBBB;
      llc[la(A)] = l;
    end
    tb_sig = '0;
    tb_sig[sig_hash0(la(A))] = 1'b1; tb_sig[sig_hash1(la(A))] = 1'b1;
    n0 = log_q.size();
    seen_si = 0;
    op(OP_ACQUIRE, 0);
    chk(seen_si, "core in SI during acquire");
    chk(log_q[n0].typ == MSG_GETWRSIG, "acquire fetches write signature");
    chk(count_typ(MSG_WB, n0) == 0, "no write-backs during self-invalidation");
    chk(n_pi == 1, "A partially invalidated");
    chk(n_keep >= 1, "B kept valid");
    // PI: read of dirty bytes hits
    n0 = log_q.size();
    op(OP_LOAD, A + 16);
    chk(rd == 64'h1111_2222_3333_4444 && lat == HL && log_q.size() == n0, "PI hit on dirty bytes");
    chk(n_pihit == 1, "PI hit counted");
    // B not in signature: still a hit
    op(OP_LOAD, B);
    chk(lat == HL && log_q.size() == n0, "line outside signature stays valid");
    // PI: read of clean bytes refetches and merges
    op(OP_LOAD, A + 24);
    chk(rd == 64'hBBBB_BBBB_BBBB_BBBB, "PI refetch returns new LLC data");
    chk(count_typ(MSG_GETLINE, n0) == 1, "PI clean read sends GetLine");
    chk(n_merge == 1, "PI merge counted");
    op(OP_LOAD, A + 16);
    chk(rd == 64'h1111_2222_3333_4444, "merge keeps own dirty bytes");
    op(OP_LOAD, A);
    chk(rd[31:0] == 32'h0BAD_F00D, "merge brings committed bytes back");
    // 6. evictions in set 2 (2 ways): clean silent, dirty CNT=1
    op(OP_LOAD, E1);
    op(OP_LOAD, E2);
    n0 = log_q.size();
    op(OP_LOAD, E3);                         // evicts a clean line
    chk(count_typ(MSG_WB, n0) == 0 && n_eclean == 1, "clean eviction is silent");
    op(OP_STORE, E3 + 8, 64'h7777_0000_7777_0000, 8'hF0);
    op(OP_STORE, E1 + 8, 64'h5555_5555_5555_5555, 8'h01);
    putack_delay = 80;
    n0 = log_q.size();
    op(OP_LOAD, E2);                          // evicts dirty E3
    chk(count_typ(MSG_WB, n0) == 1 && log_q.size() == n0 + 2 &&
        log_q[n0].typ == MSG_GETLINE && log_q[n0].laddr == la(E2) &&
        log_q[n0+1].typ == MSG_WB && log_q[n0+1].cnt == 1 && log_q[n0+1].laddr == la(E3) &&
        log_q[n0+1].wbs == (64'hF0 << 8), "GetLine, then dirty eviction write-back CNT=1 with write bits");
    chk(n_ewb == 1, "dirty eviction counted");
    // miss on E3 must wait for the PutAck of its write-back
    n0 = log_q.size();
    op(OP_LOAD, E3 + 8);
    chk(rd == ((64'h7777_0000_7777_0000 & 64'hFFFF_FFFF_0000_0000) | (word_of(llc_line(la(E3)), E3 + 8) & 64'h0000_0000_FFFF_FFFF)),
        $sformatf("reload after eviction sees own write %h", rd));
    chk(n_stall > 0, "miss stalled on pending write-back");
    for (int i = n0; i < log_q.size(); i++)
      if (log_q[i].typ == MSG_GETLINE)
        chk(log_t[i] >= putack_deliver_cyc, $sformatf("GetLine only after PutAck %0d %0d", log_t[i], putack_deliver_cyc));
    // 7. release waits for an outstanding PutAck
    op(OP_STORE, E2, 64'h1, 8'h01);
    n0 = n_ewb;
    op(OP_LOAD, E1);                          // evicts dirty E2
    chk(n_ewb == n0 + 1, "second dirty eviction");
    tcm = cyc;
    op(OP_RELEASE, 0);
    chk(cyc >= putack_deliver_cyc && putack_deliver_cyc > tcm, "release completes after PutAck");
    chk(n_cwb >= 1, "commit write-backs counted");
    putack_delay = 5;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
