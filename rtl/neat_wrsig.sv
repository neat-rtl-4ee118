// neat_wrsig: per-core write signatures kept beside the LLC.
//
// Core c's write signature over-approximates the set of lines that some other
// core has written back to the LLC since c last fetched its signature. Each
// signature is a SIG_BITS-wide Bloom filter with one-bit entries.
//
// Insert: when ins_i is high, the line ins_laddr_i, written back by core
// ins_src_i, is added to the signature of every core except ins_src_i, by
// setting the bits at the two hash positions (neat_pkg::sig_hash0/1).
// Fetch: rd_sig_o shows, combinationally, the signature of core rd_core_i;
// clr_i clears that signature at the next edge (the LLC clears it as it
// services GetWrSig). Insert and clear of the same core in one cycle are not
// allowed (the LLC serves one message at a time).
//
// The per-core signatures, their 1008-bit size and the insert/clear rules
// follow the paper; the number of hashes and the hash formulas are this
// design's own choice.
module neat_wrsig
  import neat_pkg::*;
#(
  parameter int NCORES = 32
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     ins_i,
  input  core_id_t ins_src_i,
  input  laddr_t   ins_laddr_i,
  input  core_id_t rd_core_i,
  output sig_t     rd_sig_o,
  input  logic     clr_i
);

  localparam int IDX_W = (NCORES > 1) ? $clog2(NCORES) : 1;

  sig_t sig_q [NCORES];

  logic [SIG_IDX_W-1:0] h0, h1;
  assign h0 = sig_hash0(ins_laddr_i);
  assign h1 = sig_hash1(ins_laddr_i);

  assign rd_sig_o = sig_q[IDX_W'(rd_core_i)];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int c = 0; c < NCORES; c++) sig_q[c] <= '0;
    end else begin
      for (int c = 0; c < NCORES; c++) begin
        if (clr_i && rd_core_i == core_id_t'(c)) begin
          sig_q[c] <= '0;
        end else if (ins_i && ins_src_i != core_id_t'(c)) begin
          sig_q[c][h0] <= 1'b1;
          sig_q[c][h1] <= 1'b1;
        end
      end
    end
  end

  a_no_clr_ins_same: assert property (@(posedge clk) disable iff (!rst_n)
                                      !(clr_i && ins_i));
  a_core_in_range: assert property (@(posedge clk) disable iff (!rst_n)
                                    (clr_i -> rd_core_i < core_id_t'(NCORES)) &&
                                    (ins_i -> ins_src_i < core_id_t'(NCORES)));

endmodule
