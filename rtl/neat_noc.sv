// neat_noc: interconnect between the private caches and the LLC.
//
// Neat needs no core-to-core communication: every message goes from a
// private cache to the LLC or back. The request side is a round-robin
// arbiter that picks one of the cores' pending messages per cycle and hands it
// to the LLC; the response side routes each LLC response to the core named in
// its dst field. A granted request that the LLC does not accept keeps its
// grant until accepted, so the payload seen by the LLC is stable.
//
// Interface: per-core arrays req_valid_i/req_ready_o/req_i and
// rsp_valid_o/rsp_ready_i/rsp_o; one LLC-side request channel (llc_req_*)
// and response channel (llc_rsp_*). All channels are valid/ready.
//
// The response payload is the same wire bundle for every core (only the valid
// bit is steered), so a synthesis report lists rsp_o as outputs driven
// straight from an input; that is intended.
//
// Timing: combinational in both directions (no added cycles). One message of
// up to a full line moves per cycle in each direction, which at the paper's
// 1.6 GHz clock is about 100 GB/s, the paper's on-chip bandwidth. The paper
// allows an out-of-order network; this one keeps each core's messages in
// order, which is one of the orders the protocol must accept. Flit-level
// serialization (16-byte flits) is not modelled.
module neat_noc
  import neat_pkg::*;
#(
  parameter int NCORES = 32
) (
  input  logic     clk,
  input  logic     rst_n,
  // cores -> LLC
  input  logic     req_valid_i [NCORES],
  output logic     req_ready_o [NCORES],
  input  req_msg_t req_i       [NCORES],
  output logic     llc_req_valid_o,
  input  logic     llc_req_ready_i,
  output req_msg_t llc_req_o,
  // LLC -> cores
  input  logic     llc_rsp_valid_i,
  output logic     llc_rsp_ready_o,
  input  rsp_msg_t llc_rsp_i,
  output logic     rsp_valid_o [NCORES],
  input  logic     rsp_ready_i [NCORES],
  output rsp_msg_t rsp_o       [NCORES]
);

  localparam int CID_W = (NCORES > 1) ? $clog2(NCORES) : 1;

  logic [CID_W-1:0] last_q;     // last granted core (round-robin pointer)
  logic [CID_W-1:0] lock_id_q;
  logic             lock_q;     // a grant is held until accepted
  logic [CID_W-1:0] gnt;
  logic             gnt_any;

  // Round-robin: first requesting core after the last granted one.
  logic [CID_W-1:0] cand;
  always_comb begin
    gnt     = '0;
    gnt_any = 1'b0;
    cand    = '0;
    if (lock_q) begin
      gnt     = lock_id_q;
      gnt_any = 1'b1;
    end else begin
      for (int k = NCORES; k >= 1; k--) begin
        cand = CID_W'((int'(last_q) + k) % NCORES);
        if (req_valid_i[cand]) begin
          gnt     = cand;
          gnt_any = 1'b1;
        end
      end
    end
  end

  assign llc_req_valid_o = gnt_any;
  assign llc_req_o       = req_i[gnt];

  always_comb begin
    for (int c = 0; c < NCORES; c++)
      req_ready_o[c] = gnt_any && (gnt == CID_W'(c)) && llc_req_ready_i;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      last_q    <= CID_W'(NCORES - 1);
      lock_q    <= 1'b0;
      lock_id_q <= '0;
    end else if (gnt_any) begin
      last_q    <= gnt;
      lock_q    <= !llc_req_ready_i;
      lock_id_q <= gnt;
    end
  end

  // Responses: route by destination.
  logic [CID_W-1:0] dst;
  assign dst = CID_W'(llc_rsp_i.dst);
  always_comb begin
    for (int c = 0; c < NCORES; c++) begin
      rsp_valid_o[c] = llc_rsp_valid_i && (dst == CID_W'(c));
      rsp_o[c]       = llc_rsp_i;
    end
  end
  assign llc_rsp_ready_o = rsp_ready_i[dst];

  a_lock_holds: assert property (@(posedge clk) disable iff (!rst_n)
    llc_req_valid_o && !llc_req_ready_i |=> llc_req_valid_o && gnt == $past(gnt));
  a_dst_range: assert property (@(posedge clk) disable iff (!rst_n)
    llc_rsp_valid_i |-> llc_rsp_i.dst < core_id_t'(NCORES));

endmodule
