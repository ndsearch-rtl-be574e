// nand_plane_model: behavioural model of one NAND plane with its page buffer, for simulation.
//
// Not synthesizable logic: it stands in for the flash array. A page sense (sense_req with
// sense_row) loads the page buffer after T_R cycles and pulses sense_done. Each lane returns the
// LDPC codeword of word rd_col of the loaded page one cycle after rd_req. The data of a word is
// flash_word(row, col) from ndsearch_tb_pkg, encoded with the cycle code. Every ERR_EVERY-th read
// carries one flipped bit (correctable); every ERR2_EVERY-th read carries two flipped bits on
// disjoint checks (detected as a decoder failure). 0 disables either.
// The NAND plane is not part of the design: its sense time and error pattern are this model's own
// choices, not figures from the paper.
module nand_plane_model
  import ndsearch_pkg::*;
  import ndsearch_tb_pkg::*;
#(
  parameter int T_R        = 20,
  parameter int ERR_EVERY  = 0,
  parameter int ERR2_EVERY = 0
) (
  input  logic             clk,
  input  logic             sense_req,
  input  row_addr_t        sense_row,
  output logic             sense_done,
  input  logic             rd_req [2],
  input  logic [COL_W-1:0] rd_col [2],
  output logic             rd_vld [2],
  output logic [CW_W-1:0]  rd_cw  [2]
);
  row_addr_t pb_row;
  int        busy_cnt = 0;
  int        nreads = 0;
  int        n_single = 0, n_double = 0;

  initial begin
    sense_done = 1'b0;
    pb_row = '0;
    for (int l = 0; l < 2; l++) begin rd_vld[l] = 1'b0; rd_cw[l] = '0; end
  end

  always @(posedge clk) begin
    sense_done <= 1'b0;
    if (sense_req) begin
      pb_row   <= sense_row;
      busy_cnt <= T_R;
    end else if (busy_cnt > 0) begin
      busy_cnt <= busy_cnt - 1;
      if (busy_cnt == 1) sense_done <= 1'b1;
    end
    for (int l = 0; l < 2; l++) begin
      rd_vld[l] <= rd_req[l];
      if (rd_req[l]) begin
        logic [CW_W-1:0] cw;
        cw = ldpc_encode(flash_word(pb_row, int'(rd_col[l])));
        nreads++;
        if (ERR2_EVERY > 0 && nreads % ERR2_EVERY == 0) begin
          cw[0] = ~cw[0];     // pair (1,2)
          cw[65] = ~cw[65];   // pair (11,12)
          n_double++;
        end else if (ERR_EVERY > 0 && nreads % ERR_EVERY == 0) begin
          cw[nreads % CW_W] = ~cw[nreads % CW_W];
          n_single++;
        end
        rd_cw[l] <= cw;
      end
    end
  end
endmodule
