// neat_rsp_delay: response queue that gives the LLC its access latency.
//
// Every response the LLC produces is pushed here together with the cycle in
// which the LLC accepted the request that caused it. The head of the queue is
// offered to the network once LATENCY cycles have passed since that cycle, so
// a hit answers exactly LATENCY cycles after acceptance while the LLC itself
// can accept a new request every few cycles. Responses leave in push order;
// since requests are accepted in order, their release times are in order too.
//
// Interface: push_i/push_msg_i/push_ts_i write an entry (full_o must be low);
// now_i is a free-running cycle counter; out_valid_o/out_ready_i/out_msg_o is
// a valid/ready output whose payload is held until accepted.
//
// The 50-cycle LLC hit latency is the paper's evaluation parameter; modelling
// it as a delay queue of DEPTH entries is this design's own choice.
module neat_rsp_delay
  import neat_pkg::*;
#(
  parameter int LATENCY = 50,
  parameter int DEPTH   = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        push_i,
  input  rsp_msg_t    push_msg_i,
  input  logic [31:0] push_ts_i,
  output logic        full_o,
  input  logic [31:0] now_i,
  output logic        out_valid_o,
  input  logic        out_ready_i,
  output rsp_msg_t    out_msg_o
);

  localparam int PTR_W = $clog2(DEPTH);

  rsp_msg_t          msg_q [DEPTH];
  logic [31:0]       ts_q  [DEPTH];
  logic [PTR_W-1:0]  rd_q, wr_q;
  logic [PTR_W:0]    cnt_q;

  logic pop;
  assign full_o      = (cnt_q == (PTR_W+1)'(DEPTH));
  assign out_msg_o   = msg_q[rd_q];
  assign out_valid_o = (cnt_q != '0) && ((now_i - ts_q[rd_q]) >= 32'(LATENCY));
  assign pop         = out_valid_o && out_ready_i;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push_i) begin
        msg_q[wr_q] <= push_msg_i;
        ts_q[wr_q]  <= push_ts_i;
        wr_q        <= (wr_q == PTR_W'(DEPTH - 1)) ? '0 : wr_q + 1'b1;
      end
      if (pop) rd_q <= (rd_q == PTR_W'(DEPTH - 1)) ? '0 : rd_q + 1'b1;
      cnt_q <= cnt_q + (PTR_W+1)'(push_i) - (PTR_W+1)'(pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  push_i |-> !full_o);
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 out_valid_o && !out_ready_i |=> out_valid_o && $stable(out_msg_o));

endmodule
