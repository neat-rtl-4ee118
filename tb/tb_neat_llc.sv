// tb_neat_llc: self-checking test of the LLC and its Neat controller, with
// the behavioural main memory behind it.
// Covers: GetLine miss and hit (hit answers exactly LATENCY cycles after
// acceptance), eviction write-back (CNT=1) answered by PutAck and merged by
// write bits, write-signature update for all cores but the writer and
// clear-on-read, a bulk commit closed by WB_DONE(CNT) answered by one
// PutAllAck, a WB_DONE that arrives before its write-backs, an empty commit,
// and LLC victim write-back to memory and refetch. Expected data come from a
// byte-level reference memory kept by the testbench.
module tb_neat_llc;
  import neat_pkg::*;
  localparam int N = 4;
  localparam int LAT = 50;
  localparam int WAYS = 4;
  localparam int SETS = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready, init_done;
  req_msg_t in_msg;
  rsp_msg_t out_msg;
  logic mreq_v, mreq_r, mreq_we, mrsp_v;
  laddr_t mreq_a;
  line_t mreq_d, mrsp_d;
  logic ev_hit, ev_miss, ev_paa, ev_early;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  neat_llc #(.NCORES(N), .SIZE_BYTES(SETS * WAYS * 64), .WAYS(WAYS), .LATENCY(LAT)) dut (
    .clk, .rst_n, .init_done_o(init_done),
    .in_valid_i(in_valid), .in_ready_o(in_ready), .in_msg_i(in_msg),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_msg_o(out_msg),
    .mem_req_valid_o(mreq_v), .mem_req_ready_i(mreq_r), .mem_req_we_o(mreq_we),
    .mem_req_laddr_o(mreq_a), .mem_req_data_o(mreq_d),
    .mem_rsp_valid_i(mrsp_v), .mem_rsp_data_i(mrsp_d),
    .ev_hit_o(ev_hit), .ev_miss_o(ev_miss), .ev_putallack_o(ev_paa), .ev_early_done_o(ev_early));

  neat_mem_model #(.LATENCY(120)) u_mem (.clk, .rst_n, .req_valid_i(mreq_v), .req_ready_o(mreq_r),
    .req_we_i(mreq_we), .req_laddr_i(mreq_a), .req_data_i(mreq_d),
    .rsp_valid_o(mrsp_v), .rsp_data_o(mrsp_d));

  // ---------------------------------------------------------- reference
  line_t ref_mem [laddr_t];
  function automatic line_t ref_init(laddr_t a);
    line_t l;
    for (int w = 0; w < 16; w++) l[w*32 +: 32] = {a[23:0], 8'(w)} ^ 32'h5A00_0000;
    return l;
  endfunction
  function automatic line_t ref_line(laddr_t a);
    return ref_mem.exists(a) ? ref_mem[a] : ref_init(a);
  endfunction
  task automatic ref_write(laddr_t a, wbits_t m, line_t d);
    line_t l = ref_line(a);
    for (int b = 0; b < 64; b++) if (m[b]) l[b*8 +: 8] = d[b*8 +: 8];
    ref_mem[a] = l;
  endtask

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  // ---------------------------------------------------------- responses
  rsp_msg_t rq[$];
  int       rq_t[$];
  int       nhit = 0, nmiss = 0, npaa = 0, nearly = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin rq.push_back(out_msg); rq_t.push_back(cyc); end
    if (ev_hit) nhit++;
    if (ev_miss) nmiss++;
    if (ev_paa) npaa++;
    if (ev_early) nearly++;
  end

  int acc_cyc;
  task automatic send(req_type_e t, int src, laddr_t a, int cnt = 0,
                      wbits_t m = '0, line_t d = '0);
    @(negedge clk);
    in_valid = 1;
    in_msg = '0; in_msg.typ = t; in_msg.src = core_id_t'(src); in_msg.laddr = a;
    in_msg.cnt = cnt_t'(cnt); in_msg.wbs = m; in_msg.data = d;
    while (!in_ready) @(negedge clk);
    acc_cyc = cyc;
    @(posedge clk); #1;
    in_valid = 0;
  endtask

  task automatic get_rsp(output rsp_msg_t r, output int t);
    int guard = 0;
    while (rq.size() == 0 && guard < 2000) begin @(posedge clk); #1; guard++; end
    if (rq.size() == 0) begin chk(0, "response missing"); r = '0; t = 0; end
    else begin r = rq.pop_front(); t = rq_t.pop_front(); end
  endtask

  task automatic expect_none(int cycles);
    repeat (cycles) @(posedge clk);
    #1 chk(rq.size() == 0, "no unexpected response");
  endtask

  rsp_msg_t r;
  int t, a0;
  line_t d;
  laddr_t A = 26'h00_1235, B = 26'h00_0400, C = 26'h00_0501, D = 26'h00_0602;

  initial begin
    in_valid = 0; in_msg = '0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (init_done);
    chk(init_done, "init sweep finished");

    // 1. GetLine miss
    send(MSG_GETLINE, 0, A); a0 = acc_cyc;
    get_rsp(r, t);
    chk(r.typ == RSP_DATA && r.dst == 0 && r.data == ref_line(A), "GetLine miss data");
    chk(t - a0 >= LAT + 120, "miss takes memory latency");
    // 2. GetLine hit: exactly LAT cycles
    send(MSG_GETLINE, 1, A); a0 = acc_cyc;
    get_rsp(r, t);
    chk(r.typ == RSP_DATA && r.dst == 1 && r.data == ref_line(A), "GetLine hit data");
    chk(t - a0 == LAT, $sformatf("hit latency %0d == %0d", t - a0, LAT));
    // 3. eviction write-back CNT=1 -> PutAck, merged bytes
    d = {16{32'hCAFE_0000}};
    send(MSG_WB, 0, A, 1, 64'h0000_0000_0000_F00F, d);
    ref_write(A, 64'h0000_0000_0000_F00F, d);
    get_rsp(r, t);
    chk(r.typ == RSP_PUTACK && r.dst == 0 && r.laddr == A, "PutAck for CNT=1");
    send(MSG_GETLINE, 2, A);
    get_rsp(r, t);
    chk(r.data == ref_line(A), "write-back merged by write bits");
    // 4. write signatures: core 1 sees A, core 0 (the writer) does not
    send(MSG_GETWRSIG, 1, '0);
    get_rsp(r, t);
    chk(r.typ == RSP_WRSIG && r.dst == 1 && sig_test(r.sig, A), "other core's signature holds A");
    send(MSG_GETWRSIG, 0, '0);
    get_rsp(r, t);
    chk(r.typ == RSP_WRSIG && r.sig == '0, "writer's signature empty");
    send(MSG_GETWRSIG, 1, '0);
    get_rsp(r, t);
    chk(r.sig == '0, "signature cleared by GetWrSig");
    // 5. bulk commit: 3 write-backs CNT=0 then WB_DONE(3)
    send(MSG_WB, 3, B, 0, 64'hFF, {16{32'h1111_1111}});  ref_write(B, 64'hFF, {16{32'h1111_1111}});
    send(MSG_WB, 3, C, 0, 64'hF0, {16{32'h2222_2222}});  ref_write(C, 64'hF0, {16{32'h2222_2222}});
    send(MSG_WB, 3, D, 0, {64{1'b1}}, {16{32'h3333_3333}}); ref_write(D, {64{1'b1}}, {16{32'h3333_3333}});
    expect_none(LAT + 150);
    send(MSG_WB_DONE, 3, '0, 3);
    get_rsp(r, t);
    chk(r.typ == RSP_PUTALLACK && r.dst == 3, "PutAllAck after bulk commit");
    expect_none(LAT + 5);
    // 6. WB_DONE before its write-backs (reordering network)
    send(MSG_WB_DONE, 2, '0, 2);
    expect_none(LAT + 5);
    send(MSG_WB, 2, B, 0, 64'hFF00, {16{32'h4444_4444}}); ref_write(B, 64'hFF00, {16{32'h4444_4444}});
    expect_none(LAT + 5);
    send(MSG_WB, 2, C, 0, 64'h1, {16{32'h5555_5555}}); ref_write(C, 64'h1, {16{32'h5555_5555}});
    get_rsp(r, t);
    chk(r.typ == RSP_PUTALLACK && r.dst == 2, "PutAllAck after early WB_DONE");
    chk(nearly == 1, "early WB_DONE seen");
    // 7. empty commit
    send(MSG_WB_DONE, 1, '0, 0);
    get_rsp(r, t);
    chk(r.typ == RSP_PUTALLACK && r.dst == 1, "PutAllAck for empty commit");
    // signatures of core 0 now hold B, C, D (written by 3 and 2)
    send(MSG_GETWRSIG, 0, '0);
    get_rsp(r, t);
    chk(sig_test(r.sig, B) && sig_test(r.sig, C) && sig_test(r.sig, D), "signature holds B, C, D");
    // 8. conflict misses in one set: LLC victim written to memory and refetched
    for (int k = 0; k < WAYS + 2; k++) begin
      automatic laddr_t e = laddr_t'(32'h2000 + k * SETS);
      send(MSG_WB, 1, e, 1, 64'hFFFF, {16{32'(k) + 32'hABC0_0000}});
      ref_write(e, 64'hFFFF, {16{32'(k) + 32'hABC0_0000}});
      get_rsp(r, t);
      chk(r.typ == RSP_PUTACK, "PutAck in conflict set");
    end
    for (int k = 0; k < WAYS + 2; k++) begin
      automatic laddr_t e = laddr_t'(32'h2000 + k * SETS);
      send(MSG_GETLINE, 0, e);
      get_rsp(r, t);
      chk(r.data == ref_line(e), $sformatf("refetch after LLC eviction %0d", k));
    end
    foreach (ref_mem[a]) begin
      send(MSG_GETLINE, 3, a);
      get_rsp(r, t);
      chk(r.data == ref_line(a), $sformatf("final content of %h", a));
    end
    chk(u_mem.nwrites > 0, "dirty LLC victims written to memory");
    chk(nhit > 0 && nmiss > 0 && npaa == 3, "event counts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
