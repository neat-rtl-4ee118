// neat_reqbuf: request buffer of a private cache controller.
//
// Tracks the eviction write-backs (CNT = 1) that a private cache has sent to
// the LLC and whose PutAck has not yet come back. The cache may go on
// executing while write-backs are outstanding, except that a miss to a line
// whose write-back is still pending must wait (the dependency rule), and a
// synchronization operation must not finish while any entry is in use.
//
// Each entry holds a valid bit and a line address. alloc_i writes the address
// into the lowest free entry in the same cycle (the caller must check full_o);
// free_i clears the entry whose address matches free_laddr_i (the PutAck
// carries the line address). match_o is a combinational lookup of
// lookup_laddr_i. Both alloc and free take effect at the next clock edge.
//
// The paper describes the buffer's role (it may be an explicit buffer or the
// MSHRs); the entry count (8), the lowest-free allocation and the address
// carried by PutAck are choices of this design.
module neat_reqbuf
  import neat_pkg::*;
#(
  parameter int ENTRIES = 8
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   alloc_i,
  input  laddr_t alloc_laddr_i,
  input  logic   free_i,
  input  laddr_t free_laddr_i,
  input  laddr_t lookup_laddr_i,
  output logic   match_o,
  output logic   full_o,
  output logic   empty_o
);

  logic   [ENTRIES-1:0] vld_q;
  laddr_t               addr_q [ENTRIES];

  logic [ENTRIES-1:0] free_hit;
  logic [ENTRIES-1:0] lookup_hit;
  logic [ENTRIES-1:0] alloc_sel;

  always_comb begin
    alloc_sel = '0;
    for (int i = ENTRIES - 1; i >= 0; i--)
      if (!vld_q[i]) alloc_sel = ENTRIES'(1) << i;
    for (int i = 0; i < ENTRIES; i++) begin
      free_hit[i]   = vld_q[i] && (addr_q[i] == free_laddr_i);
      lookup_hit[i] = vld_q[i] && (addr_q[i] == lookup_laddr_i);
    end
  end

  assign match_o = |lookup_hit;
  assign full_o  = &vld_q;
  assign empty_o = ~|vld_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      vld_q <= '0;
    end else begin
      for (int i = 0; i < ENTRIES; i++) begin
        if (alloc_i && alloc_sel[i]) begin
          vld_q[i]  <= 1'b1;
          addr_q[i] <= alloc_laddr_i;
        end else if (free_i && free_hit[i]) begin
          vld_q[i] <= 1'b0;
        end
      end
    end
  end

  // A PutAck must match an outstanding write-back; allocation needs room.
  a_free_known: assert property (@(posedge clk) disable iff (!rst_n)
                                 free_i |-> |free_hit);
  a_alloc_room: assert property (@(posedge clk) disable iff (!rst_n)
                                 alloc_i |-> !full_o);

endmodule
