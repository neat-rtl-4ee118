// neat_mem_model: behavioural model of off-chip main memory (not synthesizable
// logic; for simulation only).
//
// Serves one line-sized request at a time from the LLC's memory port. A read
// returns its data LATENCY cycles after the request is accepted (default 120,
// the memory latency of the paper's evaluation); a write is absorbed at once.
// Lines never written read as init_line(laddr), a pattern testbenches can
// compute on their own: each 32-bit word w of line a holds {a[23:0], w[7:0]}
// xor 32'h5A00_0000.
module neat_mem_model
  import neat_pkg::*;
#(
  parameter int LATENCY = 120
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   req_valid_i,
  output logic   req_ready_o,
  input  logic   req_we_i,
  input  laddr_t req_laddr_i,
  input  line_t  req_data_i,
  output logic   rsp_valid_o,
  output line_t  rsp_data_o
);

  line_t mem [laddr_t];
  int    wait_q;
  logic  busy_q;
  laddr_t addr_q;
  int    nreads, nwrites;

  function automatic line_t init_line(input laddr_t a);
    line_t l;
    for (int w = 0; w < LINE_BITS / 32; w++)
      l[w*32 +: 32] = {a[23:0], 8'(w)} ^ 32'h5A00_0000;
    return l;
  endfunction

  assign req_ready_o = !busy_q;

  always @(posedge clk) begin
    if (!rst_n) begin
      busy_q      <= 1'b0;
      rsp_valid_o <= 1'b0;
      wait_q      <= 0;
      nreads      <= 0;
      nwrites     <= 0;
    end else begin
      rsp_valid_o <= 1'b0;
      if (req_valid_i && req_ready_o) begin
        if (req_we_i) begin
          mem[req_laddr_i] = req_data_i;
          nwrites <= nwrites + 1;
        end else begin
          busy_q <= 1'b1;
          addr_q <= req_laddr_i;
          wait_q <= LATENCY - 1;
          nreads <= nreads + 1;
        end
      end
      if (busy_q) begin
        if (wait_q <= 1) begin
          busy_q      <= 1'b0;
          rsp_valid_o <= 1'b1;
          rsp_data_o  <= mem.exists(addr_q) ? mem[addr_q] : init_line(addr_q);
        end else begin
          wait_q <= wait_q - 1;
        end
      end
    end
  end

endmodule
