// tb_neat_noc: self-checking test of the core<->LLC interconnect.
// Every core posts a stream of tagged requests; the LLC side accepts them
// with random back-pressure. Checks: every request arrives exactly once and
// intact, each core's requests arrive in order, a stalled grant is held, all
// cores are served round-robin when all are busy (no core waits more than
// NCORES grants), and responses reach exactly the core named in dst.
module tb_neat_noc;
  import neat_pkg::*;
  localparam int N = 4;
  localparam int PER_CORE = 50;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     req_valid [N];
  logic     req_ready [N];
  req_msg_t req       [N];
  logic     llc_req_valid, llc_req_ready;
  req_msg_t llc_req;
  logic     llc_rsp_valid, llc_rsp_ready;
  rsp_msg_t llc_rsp;
  logic     rsp_valid [N];
  logic     rsp_ready [N];
  rsp_msg_t rsp       [N];
  int checks = 0, failures = 0;

  neat_noc #(.NCORES(N)) dut (.clk, .rst_n,
    .req_valid_i(req_valid), .req_ready_o(req_ready), .req_i(req),
    .llc_req_valid_o(llc_req_valid), .llc_req_ready_i(llc_req_ready), .llc_req_o(llc_req),
    .llc_rsp_valid_i(llc_rsp_valid), .llc_rsp_ready_o(llc_rsp_ready), .llc_rsp_i(llc_rsp),
    .rsp_valid_o(rsp_valid), .rsp_ready_i(rsp_ready), .rsp_o(rsp));

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  int sent [N];
  int next_exp [N];
  int since_served [N];
  int total_rx = 0;
  logic     prev_stall;
  req_msg_t prev_msg;

  // Core-side producers: hold valid until ready.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int c = 0; c < N; c++) begin
        sent[c] <= 0;
        req_valid[c] <= 1'b0;
      end
    end else begin
      for (int c = 0; c < N; c++) begin
        if (req_valid[c] && req_ready[c]) begin
          sent[c] <= sent[c] + 1;
          req_valid[c] <= (sent[c] + 1 < PER_CORE);
          req[c].laddr <= laddr_t'(c * 1000 + sent[c] + 1);
          req[c].data  <= line_t'($urandom());
        end else if (!req_valid[c] && sent[c] == 0) begin
          req_valid[c] <= 1'b1;
          req[c] <= '0;
          req[c].src <= core_id_t'(c);
          req[c].typ <= MSG_WB;
          req[c].laddr <= laddr_t'(c * 1000);
        end
      end
    end
  end

  // LLC side: random ready; check arrivals.
  always_ff @(posedge clk) begin
    if (rst_n) begin
      llc_req_ready <= ($urandom_range(0, 3) != 0);
      if (prev_stall) begin
        checks++;
        if (!(llc_req_valid && llc_req == prev_msg)) begin
          failures++; $display("FAIL: stalled request changed");
        end
      end
      prev_stall <= llc_req_valid && !llc_req_ready;
      prev_msg   <= llc_req;
      if (llc_req_valid && llc_req_ready) begin
        automatic int c = int'(llc_req.src);
        checks++;
        if (llc_req.laddr != laddr_t'(c * 1000 + next_exp[c])) begin
          failures++;
          $display("FAIL: core %0d got %0d expected %0d", c, llc_req.laddr, c * 1000 + next_exp[c]);
        end
        next_exp[c] <= next_exp[c] + 1;
        total_rx <= total_rx + 1;
        for (int k = 0; k < N; k++) begin
          if (k == c) since_served[k] <= 0;
          else if (req_valid[k]) begin
            since_served[k] <= since_served[k] + 1;
            checks++;
            if (since_served[k] + 1 >= N) begin
              failures++; $display("FAIL: core %0d starved", k);
            end
          end
        end
      end
    end else begin
      llc_req_ready <= 1'b0;
      prev_stall <= 1'b0;
      for (int c = 0; c < N; c++) begin next_exp[c] <= 0; since_served[c] <= 0; end
    end
  end

  initial begin
    llc_rsp_valid = 0; llc_rsp = '0;
    for (int c = 0; c < N; c++) rsp_ready[c] = 1'b1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (total_rx == N * PER_CORE);
    @(posedge clk);
    // responses: route to dst only, ready comes from the destination
    for (int d = 0; d < N; d++) begin
      @(negedge clk);
      llc_rsp_valid = 1; llc_rsp = '0; llc_rsp.dst = core_id_t'(d);
      llc_rsp.laddr = laddr_t'(77 + d); llc_rsp.typ = RSP_PUTACK;
      for (int c = 0; c < N; c++) rsp_ready[c] = (c != d);
      #1;
      for (int c = 0; c < N; c++) begin
        chk(rsp_valid[c] == (c == d), $sformatf("rsp valid core %0d for dst %0d", c, d));
        if (c == d) chk(rsp[c].laddr == laddr_t'(77 + d), "rsp payload");
      end
      chk(llc_rsp_ready == 1'b0, "ready taken from destination (low)");
      rsp_ready[d] = 1'b1; #1;
      chk(llc_rsp_ready == 1'b1, "ready taken from destination (high)");
    end
    llc_rsp_valid = 0;
    for (int c = 0; c < N; c++) chk(next_exp[c] == PER_CORE, "all requests delivered");
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
