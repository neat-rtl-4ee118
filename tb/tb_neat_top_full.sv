// tb_neat_top_full: the Neat hierarchy at its default size (32 cores, 32 KB
// 8-way private caches, 64 MB 32-way LLC with a 50-cycle hit, 120-cycle
// memory) taken through one complete synchronized hand-off.
//
// Sequence: wait for the LLC's tag sweep after reset; core 7 loads a word
// (LLC miss, from memory) and then loads it again (L1 hit, must take exactly
// the 4-cycle hit latency); core 3 also reads the word, so it holds a V copy;
// core 7 stores two bytes and releases (one bulk write-back and a
// PutAllAck); core 3 acquires, which must turn its copy PI, then loads the
// word, which must refetch and merge and return core 7's bytes; core 31 loads
// the word with no acquire and gets it from the LLC (an LLC hit, answered in
// no less than the 50-cycle LLC latency). Checks data, latencies, state and the
// mechanism events.
module tb_neat_top_full;
  import neat_pkg::*;
  localparam int N = 32;

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

  neat_top dut (
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
    if (!c) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  int n_topi = 0, n_merge = 0, n_cwb = 0, n_lhit = 0, n_lmiss = 0, n_paa = 0;
  int rsp_cnt [N];
  int rsp_cyc [N];
  logic [63:0] rsp_dat [N];
  initial for (int c = 0; c < N; c++) rsp_cnt[c] = 0;
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < N; c++) begin
      n_topi  += int'(e_topi[c]);
      n_merge += int'(e_merge[c]);
      n_cwb   += int'(e_cwb[c]);
      if (rsp_v[c]) begin rsp_cnt[c]++; rsp_dat[c] = rdata[c]; rsp_cyc[c] = cyc; end
    end
    n_lhit  += int'(e_lhit);
    n_lmiss += int'(e_lmiss);
    n_paa   += int'(e_paa);
  end

  // One request on core c; returns load data and the latency in cycles.
  task automatic core_op(input int c, input core_op_e o, input logic [31:0] a,
                         input logic [63:0] wd, input logic [7:0] be,
                         output logic [63:0] rd, output int lat);
    int n, t0;
    @(negedge clk);
    req_v[c] = 1'b1;
    req[c]   = '{op: o, addr: a, wdata: wd, be: be};
    n = rsp_cnt[c];
    do @(posedge clk); while (!req_r[c]);
    t0 = cyc;
    @(negedge clk);
    req_v[c] = 1'b0;
    wait (rsp_cnt[c] > n);
    lat = rsp_cyc[c] - t0;
    rd  = rsp_dat[c];
  endtask

  function automatic logic [63:0] init_word(logic [31:0] a);
    logic [25:0] la = a[31:6];
    logic [63:0] w;
    for (int h = 0; h < 2; h++)
      w[h*32 +: 32] = {la[23:0], 8'(a[5:3] * 2 + 3'(h))} ^ 32'h5A00_0000;
    return w;
  endfunction

  localparam logic [31:0] A = 32'h0012_3448;
  logic [63:0] rd, exp_w;
  int lat;
  initial begin
    for (int c = 0; c < N; c++) begin req_v[c] = 1'b0; req[c] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (init_done);
    chk(cyc >= 32768, $sformatf("LLC tag sweep took %0d cycles", cyc));
    exp_w = init_word(A);

    core_op(7, OP_LOAD, A, '0, 8'hFF, rd, lat);
    chk(rd == exp_w, $sformatf("first load %h", rd));
    chk(lat >= 50 + 120, $sformatf("miss to memory took %0d cycles", lat));
    core_op(7, OP_LOAD, A, '0, 8'hFF, rd, lat);
    chk(rd == exp_w && lat == 4, $sformatf("L1 hit %h in %0d cycles", rd, lat));
    core_op(3, OP_LOAD, A, '0, 8'hFF, rd, lat);
    chk(rd == exp_w && lat >= 50, $sformatf("core 3 first load (%0d cycles)", lat));

    core_op(7, OP_STORE, A, 64'h0000_BEEF_0000_0000, 8'b0011_0000, rd, lat);
    chk(lat == 4, "store hit latency");
    exp_w[47:32] = 16'hBEEF;
    core_op(7, OP_RELEASE, 0, '0, '0, rd, lat);
    chk(n_cwb == 1 && n_paa == 1, $sformatf("release: %0d write-backs, %0d PutAllAck", n_cwb, n_paa));
    $display("release on core 7 took %0d cycles", lat);

    core_op(3, OP_ACQUIRE, 0, '0, '0, rd, lat);
    chk(n_topi == 1, "acquire on core 3 turns its copy PI");
    chk(cst[3] == CS_NE, "core 3 back in NE");
    $display("acquire on core 3 took %0d cycles", lat);
    core_op(3, OP_LOAD, A, '0, 8'hFF, rd, lat);
    chk(rd == exp_w, $sformatf("core 3 sees core 7's bytes: %h", rd));
    chk(n_merge == 1, "PI line refetched and merged");

    core_op(31, OP_LOAD, A, '0, 8'hFF, rd, lat);
    chk(rd == exp_w && lat >= 50, $sformatf("core 31 load %h (%0d cycles)", rd, lat));
    chk(n_lmiss == 1 && n_lhit >= 3, $sformatf("LLC: %0d misses, %0d hits", n_lmiss, n_lhit));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5_000_000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
