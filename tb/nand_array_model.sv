// nand_array_model: behavioural model of NP NAND planes with their page buffers, for
// simulation of the whole SearSSD.
//
// Same behaviour as nand_plane_model, for many planes in one module (one loop instead of one
// instance per plane, which keeps the simulation model small). Plane p: a sense (sense_req[p]
// with sense_row[p]) loads its page buffer after T_R cycles and pulses sense_done[p]. Lane
// 2p+l returns the LDPC codeword of word rd_col[2p+l] of the loaded page one cycle after
// rd_req[2p+l]; the data is flash_word(row, col), encoded with the cycle code. Per plane, every
// (ERR_EVERY + p % 7)-th read carries one flipped bit, and on planes with p % 4 == 0 every
// ERR2_EVERY-th read carries two flipped bits on disjoint checks. n_single/n_double count them.
// The NAND array is not part of the design: its sense time and error pattern are this model's own
// choices, not figures from the paper.
module nand_array_model
  import ndsearch_pkg::*;
  import ndsearch_tb_pkg::*;
#(
  parameter int NP         = 512,
  parameter int T_R        = 20,
  parameter int ERR_EVERY  = 29,
  parameter int ERR2_EVERY = 71
) (
  input  logic             clk,
  input  logic             sense_req  [NP],
  input  row_addr_t        sense_row  [NP],
  output logic             sense_done [NP],
  input  logic             rd_req     [2*NP],
  input  logic [COL_W-1:0] rd_col     [2*NP],
  output logic             rd_vld     [2*NP],
  output logic [CW_W-1:0]  rd_cw      [2*NP]
);
  row_addr_t pb_row   [NP];
  int        busy_cnt [NP];
  int        nreads   [NP];
  int        n_single = 0, n_double = 0;

  initial begin
    for (int p = 0; p < NP; p++) begin
      sense_done[p] = 1'b0; pb_row[p] = '0; busy_cnt[p] = 0; nreads[p] = 0;
    end
    for (int l = 0; l < 2 * NP; l++) begin rd_vld[l] = 1'b0; rd_cw[l] = '0; end
  end

  always @(posedge clk) begin
    for (int p = 0; p < NP; p++) begin
      sense_done[p] <= 1'b0;
      if (sense_req[p]) begin
        pb_row[p]   <= sense_row[p];
        busy_cnt[p] <= T_R;
      end else if (busy_cnt[p] > 0) begin
        busy_cnt[p] <= busy_cnt[p] - 1;
        if (busy_cnt[p] == 1) sense_done[p] <= 1'b1;
      end
    end
    for (int l = 0; l < 2 * NP; l++) begin
      rd_vld[l] <= rd_req[l];
      if (rd_req[l]) begin
        logic [CW_W-1:0] cw;
        int p, n;
        p = l / 2;
        cw = ldpc_encode(flash_word(pb_row[p], int'(rd_col[l])));
        nreads[p] = nreads[p] + 1;
        n = nreads[p];
        if (ERR2_EVERY > 0 && p % 4 == 0 && n % ERR2_EVERY == 0) begin
          cw[0]  = ~cw[0];
          cw[65] = ~cw[65];
          n_double++;
        end else if (ERR_EVERY > 0 && n % (ERR_EVERY + p % 7) == 0) begin
          cw[n % CW_W] = ~cw[n % CW_W];
          n_single++;
        end
        rd_cw[l] <= cw;
      end
    end
  end
endmodule
