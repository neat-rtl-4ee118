// tb_neat_wrsig: self-checking test of the per-core write signatures.
// Inserts lines written by one core and checks that every other core's
// signature holds exactly the expected bits (computed here with a separate
// implementation of the two hash formulas), that the writer's own signature
// is untouched, and that reading-and-clearing empties only that core's one.
module tb_neat_wrsig;
  import neat_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ins, clr;
  core_id_t ins_src, rd_core;
  laddr_t ins_a;
  sig_t rd_sig;
  int checks = 0, failures = 0;

  neat_wrsig #(.NCORES(N)) dut (.clk, .rst_n, .ins_i(ins), .ins_src_i(ins_src),
    .ins_laddr_i(ins_a), .rd_core_i(rd_core), .rd_sig_o(rd_sig), .clr_i(clr));

  bit [SIG_BITS-1:0] model [N];

  // Reference hashes written independently of the package functions.
  function automatic int ref_h0(laddr_t a);
    longint unsigned v = a;
    return int'(v % 1008);
  endfunction
  function automatic int ref_h1(laddr_t a);
    longint unsigned r = 0, v;
    for (int i = 0; i < 26; i++) if (a[i]) r |= (64'd1 << (25 - i));
    v = r ^ ((longint'(a) >> 7) & 64'h3ff_ffff) ^ ((longint'(a) << 3) & 64'h3ff_ffff);
    return int'(v % 1008);
  endfunction

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic compare_all();
    for (int c = 0; c < N; c++) begin
      rd_core = core_id_t'(c); #1;
      chk(rd_sig == model[c], $sformatf("signature of core %0d", c));
    end
  endtask

  initial begin
    ins = 0; clr = 0; ins_src = '0; rd_core = '0; ins_a = '0;
    for (int c = 0; c < N; c++) model[c] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    compare_all();
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      if ($urandom_range(0, 4) == 0) begin
        rd_core = core_id_t'($urandom_range(0, N - 1));
        clr = 1; ins = 0;
        model[rd_core] = '0;
      end else begin
        ins = 1; clr = 0;
        ins_src = core_id_t'($urandom_range(0, N - 1));
        ins_a = laddr_t'($urandom());
        for (int c = 0; c < N; c++)
          if (c != int'(ins_src)) begin
            model[c][ref_h0(ins_a)] = 1'b1;
            model[c][ref_h1(ins_a)] = 1'b1;
          end
      end
      @(posedge clk); #1;
      ins = 0; clr = 0;
      compare_all();
    end
    // a line written by core 2 must test positive for others, not for core 2
    @(negedge clk);
    ins = 1; ins_src = 2; ins_a = 26'h12_3456;
    @(posedge clk); #1; ins = 0;
    rd_core = 0; #1; chk(sig_test(rd_sig, 26'h12_3456), "inserted line found in core 0");
    rd_core = 2; #1; chk(rd_sig[ref_h0(26'h12_3456)] == model[2][ref_h0(26'h12_3456)],
                         "writer's own signature not updated");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
