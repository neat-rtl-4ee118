// tb_neat_top: end-to-end test of the Neat hierarchy (4 cores, small caches so
// that evictions are frequent) with the behavioural main memory.
//
// Workload. A data-race-free program in rounds. In the write phase of each
// round every core acquires, then mixes stores and loads over a shared
// 64-line region, writing only the bytes it owns in that round (byte k of
// every word belongs to core (k + round) mod 4, so all cores write different
// bytes of the same lines: false sharing), and releases. After a barrier, in
// the read phase every core acquires and loads random whole words, each of
// which must equal the byte-level reference memory. Each write phase also
// runs a short directed sequence per core (store X, then load two other lines
// of X's cache set, then load X) that makes a dirty eviction followed by a
// quick re-miss on the evicted line. In write phases a core checks its own
// bytes against the reference (its own stores must be visible at once).
// A directed PI sequence uses private-cache set 7, which random accesses
// avoid: core c reads line P(c) in every read phase, core c-1 writes one byte
// of P(c) in every write phase, so at c's next acquire P(c) turns PI; c then
// stores to it, reads those bytes back (PI hit) and reads the whole word
// (refetch and merge). Only core c touches P(c) during a read phase.
//
// Mechanisms counted (each must occur at least once, otherwise it is counted
// as a failure): V->PI at acquire, lines kept at acquire, PI load merge, PI
// hit (a store, or a load of dirty bytes only), dirty eviction write-back, silent clean eviction,
// GetLine stalled on a pending write-back, bulk commit write-back, LLC hit,
// LLC miss, PutAllAck, main-memory read and write. The only mechanism not
// counted is a WB_DONE that overtakes its write-backs at the LLC: this
// interconnect keeps each core's messages in order, so it cannot occur here
// (the LLC unit test covers it). Timing: the smallest load/store latency seen
// must equal the 4-cycle L1 hit latency.
module tb_neat_top;
  import neat_pkg::*;
  localparam int N      = 4;
  localparam int ROUNDS = 8;
  localparam int OPS    = 24;
  localparam int REGION = 64;            // lines
  localparam logic [31:0] BASE = 32'h0001_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic        req_v [N], req_r [N], rsp_v [N];
  core_req_t   req   [N];
  logic [63:0] rdata [N];
  core_state_e cst   [N];
  logic        init_done;
  logic mreq_v, mreq_r, mreq_we, mrsp_v;
  laddr_t mreq_a;
  line_t mreq_d, mrsp_d;
  logic [N-1:0] e_topi, e_keep, e_merge, e_pihit, e_ewb, e_eclean, e_stall, e_cwb;
  logic e_lhit, e_lmiss, e_paa, e_early;

  neat_top #(
    .NCORES(N), .L1_SIZE_BYTES(1024), .L1_WAYS(2), .L1_HIT_LATENCY(4), .RB_ENTRIES(2),
    .LLC_SIZE_BYTES(2048), .LLC_WAYS(4), .LLC_LATENCY(50)
  ) dut (
    .clk, .rst_n, .init_done_o(init_done),
    .core_req_valid_i(req_v), .core_req_ready_o(req_r), .core_req_i(req),
    .core_rsp_valid_o(rsp_v), .core_rsp_rdata_o(rdata), .core_state_o(cst),
    .mem_req_valid_o(mreq_v), .mem_req_ready_i(mreq_r), .mem_req_we_o(mreq_we),
    .mem_req_laddr_o(mreq_a), .mem_req_data_o(mreq_d),
    .mem_rsp_valid_i(mrsp_v), .mem_rsp_data_i(mrsp_d),
    .ev_to_pi_o(e_topi), .ev_si_keep_o(e_keep), .ev_pi_merge_o(e_merge),
    .ev_pi_hit_o(e_pihit), .ev_evict_wb_o(e_ewb), .ev_evict_clean_o(e_eclean),
    .ev_rb_stall_o(e_stall), .ev_commit_wb_o(e_cwb),
    .ev_llc_hit_o(e_lhit), .ev_llc_miss_o(e_lmiss), .ev_llc_putallack_o(e_paa),
    .ev_llc_early_done_o(e_early));

  neat_mem_model #(.LATENCY(120)) u_mem (.clk, .rst_n, .req_valid_i(mreq_v),
    .req_ready_o(mreq_r), .req_we_i(mreq_we), .req_laddr_i(mreq_a), .req_data_i(mreq_d),
    .rsp_valid_o(mrsp_v), .rsp_data_o(mrsp_d));

  int checks = 0, failures = 0;
  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 20) $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  // ------------------------------------------------------------ reference
  logic [7:0] ref_b [int];
  function automatic logic [7:0] init_byte(logic [31:0] a);
    logic [25:0] la = a[31:6];
    logic [31:0] w  = {la[23:0], 8'(a[5:2])} ^ 32'h5A00_0000;
    return w[a[1:0]*8 +: 8];
  endfunction
  function automatic logic [7:0] ref_rd(logic [31:0] a);
    return ref_b.exists(a) ? ref_b[a] : init_byte(a);
  endfunction

  // ------------------------------------------------------------ events
  int n_topi = 0, n_keep = 0, n_merge = 0, n_pihit = 0, n_ewb = 0, n_eclean = 0;
  int n_stall = 0, n_cwb = 0, n_lhit = 0, n_lmiss = 0, n_paa = 0, n_early = 0;
  int rsp_cnt [N];
  logic [63:0] rsp_dat [N];
  int          rsp_cyc [N];
  initial for (int c = 0; c < N; c++) rsp_cnt[c] = 0;
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < N; c++) begin
      n_topi   += int'(e_topi[c]);
      n_keep   += int'(e_keep[c]);
      n_merge  += int'(e_merge[c]);
      n_pihit  += int'(e_pihit[c]);
      n_ewb    += int'(e_ewb[c]);
      n_eclean += int'(e_eclean[c]);
      n_stall  += int'(e_stall[c]);
      n_cwb    += int'(e_cwb[c]);
      if (rsp_v[c]) begin rsp_cnt[c]++; rsp_dat[c] = rdata[c]; rsp_cyc[c] = cyc; end
    end
    n_lhit  += int'(e_lhit);
    n_lmiss += int'(e_lmiss);
    n_paa   += int'(e_paa);
    n_early += int'(e_early);
  end

  // ------------------------------------------------------------ core drivers
  // One driver process per core; each has its own copy of the driver tasks.
  int min_lat = 1000000;
  int arrive  = 0;                        // barrier arrivals
  int ndone   = 0;
  logic go = 1'b0;

  function automatic logic [7:0] own_mask(int c, int r);
    logic [7:0] m = '0;
    for (int k = 0; k < 8; k++) if ((k + r) % N == c) m[k] = 1'b1;
    return m;
  endfunction

  function automatic logic [31:0] waddr(int line, int word);
    return BASE + 32'(line * 64 + word * 8);
  endfunction

  // Random accesses avoid private-cache set 7; that set holds the lines of
  // the directed PI sequence, P(c) = line 7 + 8c, so they are not evicted.
  function automatic int rand_line();
    return $urandom_range(REGION / 8 - 1) * 8 + $urandom_range(6);
  endfunction
  function automatic int pline(int c);
    return 7 + 8 * c;
  endfunction

  for (genvar g = 0; g < N; g++) begin : g_drv
    localparam int C = g;

    task automatic core_op(input core_op_e o, input logic [31:0] a,
                           input logic [63:0] wd, input logic [7:0] be,
                           output logic [63:0] rd);
      int n, t0;
      @(negedge clk);
      req_v[C] = 1'b1;
      req[C]   = '{op: o, addr: a, wdata: wd, be: be};
      n = rsp_cnt[C];
      do @(posedge clk); while (!req_r[C]);
      t0 = cyc;
      @(negedge clk);
      req_v[C] = 1'b0;
      wait (rsp_cnt[C] > n);
      if (o == OP_LOAD || o == OP_STORE) if (rsp_cyc[C] - t0 < min_lat) min_lat = rsp_cyc[C] - t0;
      rd = rsp_dat[C];
    endtask

    task automatic store_own(int r, logic [31:0] a);
      logic [63:0] d = {$urandom, $urandom};
      logic [63:0] rd;
      logic [7:0]  m = own_mask(C, r);
      for (int k = 0; k < 8; k++) if (m[k]) ref_b[a + k] = d[k*8 +: 8];
      core_op(OP_STORE, a, d, m, rd);
    endtask

    task automatic load_check(logic [31:0] a, logic [7:0] m, string what);
      logic [63:0] rd;
      logic ok = 1'b1;
      core_op(OP_LOAD, a, '0, m, rd);
      for (int k = 0; k < 8; k++) if (m[k] && rd[k*8 +: 8] !== ref_rd(a + k)) ok = 1'b0;
      chk(ok, $sformatf("%s: core %0d addr %h got %h", what, C, a, rd));
    endtask

    task automatic write_phase(int r);
      logic [63:0] rd;
      logic [31:0] a;
      int x;
      core_op(OP_ACQUIRE, 0, '0, '0, rd);
      chk(cst[C] == CS_NE, "back in NE after acquire");
      for (int i = 0; i < OPS; i++) begin
        a = waddr(rand_line(), $urandom_range(7));
        case ($urandom_range(3))
          0, 1: begin
            store_own(r, a);
            if ($urandom_range(1) == 0) load_check(a, own_mask(C, r), "own store visible");
          end
          2: load_check(a, own_mask(C, r), "own bytes");
          default: load_check(a, 8'h01 << ((C + N - r % N) % N), "one own byte");
        endcase
      end
      // dirty eviction then quick re-miss on the evicted line
      x = $urandom_range(6) + 8 * C;
      a = waddr(x, $urandom_range(7));
      store_own(r, a);
      load_check(waddr((x + 16) % REGION, 0), own_mask(C, r), "conflict line 1");
      load_check(waddr((x + 32) % REGION, 0), own_mask(C, r), "conflict line 2");
      load_check(a, own_mask(C, r), "re-miss after dirty eviction");
      // the next core's PI line gets one of this core's bytes
      store_own(r, waddr(pline((C + 1) % N), 0));
      core_op(OP_RELEASE, 0, '0, '0, rd);
      chk(cst[C] == CS_NE, "back in NE after release");
    endtask

    task automatic read_phase(int r);
      logic [63:0] rd;
      core_op(OP_ACQUIRE, 0, '0, '0, rd);
      // P(C) was written by the previous core since C last read it, so the
      // acquire has made it PI: store own bytes (PI store), read them back
      // (PI hit), then read the whole word (refetch and merge). Only core C
      // touches P(C) in this phase.
      store_own(r, waddr(pline(C), 0));
      load_check(waddr(pline(C), 0), own_mask(C, r), "own bytes of PI line");
      load_check(waddr(pline(C), 0), 8'hFF, "PI line merged");
      for (int i = 0; i < OPS; i++)
        load_check(waddr(rand_line(), $urandom_range(7)), 8'hFF, "read after acquire");
    endtask

    initial begin
      int k = 0;
      wait (go);
      for (int r = 0; r < ROUNDS; r++) begin
        write_phase(r);
        arrive++; k++;
        wait (arrive >= k * N);
        read_phase(r);
        arrive++; k++;
        wait (arrive >= k * N);
      end
      ndone++;
    end
  end

  // ------------------------------------------------------------ main
  initial begin
    for (int c = 0; c < N; c++) begin req_v[c] = 1'b0; req[c] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (init_done);
    go = 1'b1;
    wait (ndone == N);
    chk(min_lat == 4, $sformatf("L1 hit latency %0d cycles", min_lat));
    chk(n_topi > 0,   "mechanism: V->PI at acquire");
    chk(n_keep > 0,   "mechanism: line kept at acquire");
    chk(n_merge > 0,  "mechanism: PI load refetch and merge");
    chk(n_pihit > 0,  "mechanism: PI hit");
    chk(n_ewb > 0,    "mechanism: dirty eviction write-back");
    chk(n_eclean > 0, "mechanism: silent clean eviction");
    chk(n_stall > 0,  "mechanism: GetLine stalled on pending write-back");
    chk(n_cwb > 0,    "mechanism: bulk commit write-back");
    chk(n_lhit > 0,   "mechanism: LLC hit");
    chk(n_lmiss > 0,  "mechanism: LLC miss");
    chk(n_paa >= 2 * ROUNDS * N, "mechanism: one PutAllAck per acquire/release");
    chk(u_mem.nreads > 0,  "mechanism: memory read");
    chk(u_mem.nwrites > 0, "mechanism: memory write-back from LLC");
    $display("events: to_pi=%0d keep=%0d merge=%0d pi_hit=%0d evict_wb=%0d evict_clean=%0d stall=%0d commit_wb=%0d llc_hit=%0d llc_miss=%0d putallack=%0d early=%0d mem_rd=%0d mem_wr=%0d",
             n_topi, n_keep, n_merge, n_pihit, n_ewb, n_eclean, n_stall, n_cwb,
             n_lhit, n_lmiss, n_paa, n_early, u_mem.nreads, u_mem.nwrites);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20_000_000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
