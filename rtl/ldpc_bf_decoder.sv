// ldpc_bf_decoder: plane-level hard-decision LDPC decoder placed between a page buffer and a
// MAC group.
//
// The paper places a hard-decision LDPC decoder in each plane and leaves soft-decision decoding
// to the controller firmware, but gives no code. This design uses a column-weight-2 LDPC code
// (a cycle code): there are 13 parity checks, numbered 0..12, and every codeword bit belongs to
// exactly two of them, like an edge joining two nodes of a complete graph.
//   * bits 0..65  are data bits: bit d is the d-th pair (i,j), 1 <= i < j <= 12, in
//                 lexicographic order; data bits 64 and 65 are padding and must be 0,
//   * bits 66..77 are parity bits: bit 65+j joins checks 0 and j (j = 1..12), so p_j is the
//                 XOR of the data bits that touch check j.
// Decoding is one round of bit flipping: when exactly two checks fail, the single bit that
// joins them is flipped. This corrects any single-bit error in the 78-bit codeword. Two errors
// on bits with no common check fail four checks and are reported, not corrected; two errors
// that share a check look like one error and are miscorrected (the code's minimum distance is
// 3, as with any cycle code on a complete graph). The syndrome is then checked again;
// a non-zero syndrome (or non-zero padding) raises out_fail, which asks the controller for
// soft-decision decoding.
// Timing: one register stage; out_* follow in_* by one clock. TAG_W bits of side information
// travel with each word.
module ldpc_bf_decoder
  import ndsearch_pkg::*;
#(
  parameter int TAG_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [CW_W-1:0]   in_cw,
  input  logic [TAG_W-1:0]  in_tag,
  output logic              out_valid,
  output logic [DATA_W-1:0] out_data,
  output logic              out_corrected,
  output logic              out_fail,
  output logic [TAG_W-1:0]  out_tag
);
  localparam int NCHK = LDPC_NCHK;

  logic [NCHK-1:0] syn, syn2;
  logic [CW_W-1:0] flip, fixed_cw;
  logic            two_fail;

  // A single bit error fails exactly its two checks. Any other pattern is left alone so that
  // the recheck below reports it instead of miscorrecting it.
  assign two_fail = ($countones(syn) == 2);

  for (genvar c = 0; c < NCHK; c++) begin : g_chk
    localparam logic [CW_W-1:0] MASK = LDPC_CHK[c];
    assign syn[c]  = ^(in_cw & MASK);
    assign syn2[c] = ^(fixed_cw & MASK);
  end

  for (genvar b = 0; b < CW_W; b++) begin : g_bit
    localparam logic [NCHK-1:0] BM = LDPC_BIT[b];
    assign flip[b] = two_fail && ((syn & BM) == BM);
  end

  assign fixed_cw = in_cw ^ flip;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid     <= 1'b0;
      out_data      <= '0;
      out_corrected <= 1'b0;
      out_fail      <= 1'b0;
      out_tag       <= '0;
    end else begin
      out_valid     <= in_valid;
      out_data      <= fixed_cw[DATA_W-1:0];
      out_corrected <= in_valid && (flip != '0);
      out_fail      <= in_valid && ((syn2 != '0) || (fixed_cw[65:64] != 2'b00));
      out_tag       <= in_tag;
    end
  end
endmodule
