// tb_neat_reqbuf: self-checking test of the request buffer.
// Fills it, checks full/empty/match against a list kept by the testbench,
// frees entries out of order, then runs random alloc/free traffic.
module tb_neat_reqbuf;
  import neat_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #50 clk = ~clk;
  logic alloc, free_, match, full, empty;
  laddr_t alloc_a, free_a, look_a;
  int checks = 0, failures = 0;

  neat_reqbuf #(.ENTRIES(N)) dut (.clk, .rst_n, .alloc_i(alloc), .alloc_laddr_i(alloc_a),
    .free_i(free_), .free_laddr_i(free_a), .lookup_laddr_i(look_a),
    .match_o(match), .full_o(full), .empty_o(empty));

  laddr_t model[$];

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic in_model(laddr_t a);
    foreach (model[i]) if (model[i] == a) return 1;
    return 0;
  endfunction

  task automatic step();
    @(posedge clk); #1;
    alloc = 0; free_ = 0;
  endtask

  task automatic check_state();
    chk(full == (model.size() == N), "full flag");
    chk(empty == (model.size() == 0), "empty flag");
    foreach (model[i]) begin
      look_a = model[i]; #1;
      chk(match, $sformatf("match for %h", model[i]));
    end
    look_a = 26'h3ff_ffff; #1;
    chk(!match, "no match for absent line");
    // freed (or never used) addresses must not match
    for (int k = 0; k < 61 + N; k++) begin
      automatic laddr_t a = (k < 61) ? laddr_t'(k) : laddr_t'(100 + 7 * (k - 61));
      if (!in_model(a)) begin
        look_a = a; #1;
        chk(!match, $sformatf("no match for freed line %h", a));
      end
    end
  endtask

  initial begin
    alloc = 0; free_ = 0; alloc_a = '0; free_a = '0; look_a = '0;
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    check_state();
    for (int i = 0; i < N; i++) begin
      alloc = 1; alloc_a = laddr_t'(100 + 7 * i);
      model.push_back(alloc_a);
      step();
      check_state();
    end
    // free in a scrambled order
    for (int i = 0; i < N; i++) begin
      automatic int k = (i * 3) % N;
      automatic laddr_t a = laddr_t'(100 + 7 * k);
      free_ = 1; free_a = a;
      foreach (model[j]) if (model[j] == a) begin model.delete(j); break; end
      step();
      check_state();
    end
    // random traffic
    for (int t = 0; t < 400; t++) begin
      if (model.size() > 0 && ($urandom_range(0, 1) == 1 || model.size() == N)) begin
        automatic int j = $urandom_range(0, model.size() - 1);
        free_ = 1; free_a = model[j];
        model.delete(j);
      end else begin
        laddr_t a;
        do a = laddr_t'($urandom_range(0, 60)); while (in_model(a));
        alloc = 1; alloc_a = a;
        model.push_back(a);
      end
      step();
      check_state();
    end
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
