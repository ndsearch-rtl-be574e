// pref_unit: Pref Unit of the Vgenerator, the hardware side of speculative searching.
//
// For each query of the batch it takes the first-order neighbours N_id of the current entry
// vertex (the query's run in the NBR buffer), fetches each one's neighbour list through the
// offset and neighbour arrays, and counts how often every second-order neighbour appears. As the
// paper asks, the ones with the most connections to the first-order neighbours are kept: the
// PREF_K highest counts (ties to the older entry), skipping vertices that are already first-order
// neighbours. Their LUN IDs are fetched and the entries are sent to the Allocator as speculative
// work (spec = 1). The entries the Allocator accepted are recorded in the query's row of the Pref
// buffer together with the iteration number, so the next iteration can skip the distances that
// were already computed.
// Sizes are this design's choices: at most R_MAX first-order neighbours per query are used, the
// counting table has CAND entries (new vertices are dropped when it is full), PREF_K picks.
// stop (the non-speculative searching has ended) stops the unit after any DRAM read in flight;
// queries it did not finish keep an old iteration number and count as not prefetched.
// The counters fcnt/scnt and indices fi/si are one bit wider than the array index so they can
// hold the full count; they index an array only while below its size, so the top bit dropped in
// the index is always zero (lint reports this as a width truncation).
// Interface: start pulse with nb_cnt and iter; nb_addr/nb_data read the NBR buffer
// (combinational); dr_* DRAM read port; out_* (valid/ready) entries; row_* writes a Pref row.
module pref_unit
  import ndsearch_pkg::*;
#(
  parameter int R_MAX  = 32,
  parameter int CAND   = 32,
  parameter int PREF_K = 8,
  parameter int NB_AW  = 17
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               stop,
  input  logic [7:0]         iter,
  input  logic [NB_AW:0]     nb_cnt,
  input  logic [31:0]        ofs_base,
  input  logic [31:0]        nbr_base,
  input  logic [31:0]        lun_base,
  output logic [NB_AW-1:0]   nb_addr,
  input  nbr_entry_t         nb_data,
  output logic               dr_req_valid,
  output logic [31:0]        dr_req_addr,
  input  logic               dr_req_ready,
  input  logic               dr_resp_valid,
  input  logic [31:0]        dr_resp_data,
  output logic               out_valid,
  output nbr_entry_t         out_entry,
  input  logic               out_ready,
  output logic               row_wr,
  output logic [QID_W-1:0]   row_qid,
  output logic [VID_W-1:0]   row_nid   [PREF_K],
  output logic [PREF_K-1:0]  row_valid,
  output logic [7:0]         row_gen,
  output logic               busy
);
  typedef enum logic [3:0] {S_IDLE, S_LOAD, S_OFS0, S_OFS1, S_NBR, S_SEL, S_LUN, S_EMIT,
                            S_ROW} pstate_e;
  pstate_e st;

  logic [NB_AW:0]        idx;
  logic [QID_W-1:0]      qid;
  logic [VID_W-1:0]      fl  [R_MAX];
  logic [$clog2(R_MAX+1)-1:0] fcnt, fi;
  logic [VID_W-1:0]      cid [CAND];
  logic [7:0]            ccnt [CAND];
  logic                  cval [CAND];
  logic                  ctaken [CAND];
  logic [VID_W-1:0]      sel [PREF_K];
  logic [LUNID_W-1:0]    sel_lid [PREF_K];
  logic [$clog2(PREF_K+1)-1:0] scnt, si;
  logic [31:0]           k, kend;
  logic                  waiting;     // DRAM read outstanding
  logic                  aborted;
  logic [PREF_K-1:0]     acc_mask;

  assign nb_addr = NB_AW'(idx);
  assign busy    = (st != S_IDLE);

  // DRAM request address by state
  always_comb begin
    dr_req_valid = !waiting && !aborted &&
                   (st == S_OFS0 || st == S_OFS1 || (st == S_NBR && k < kend) || st == S_LUN);
    unique case (st)
      S_OFS0:  dr_req_addr = ofs_base + fl[fi];
      S_OFS1:  dr_req_addr = ofs_base + fl[fi] + 1;
      S_NBR:   dr_req_addr = nbr_base + k;
      default: dr_req_addr = lun_base + sel[si];
    endcase
  end

  // is the returned vertex a first-order neighbour? / in the table? / free slot?
  logic in_first, in_tab, has_free;
  logic [$clog2(CAND)-1:0] tab_i, free_i;
  always_comb begin
    in_first = 1'b0;
    for (int i = 0; i < R_MAX; i++)
      if (i < int'(fcnt) && fl[i] == dr_resp_data) in_first = 1'b1;
    in_tab = 1'b0; tab_i = '0; has_free = 1'b0; free_i = '0;
    for (int i = CAND - 1; i >= 0; i--) begin
      if (cval[i] && cid[i] == dr_resp_data) begin in_tab = 1'b1; tab_i = $clog2(CAND)'(i); end
      if (!cval[i]) begin has_free = 1'b1; free_i = $clog2(CAND)'(i); end
    end
  end

  // best remaining candidate
  logic                    best_ok;
  logic [$clog2(CAND)-1:0] best_i;
  always_comb begin
    best_ok = 1'b0; best_i = '0;
    for (int i = 0; i < CAND; i++)
      if (cval[i] && !ctaken[i] && (!best_ok || ccnt[i] > ccnt[best_i])) begin
        best_ok = 1'b1; best_i = $clog2(CAND)'(i);
      end
  end

  assign out_valid       = (st == S_EMIT) && !aborted && (si < scnt);
  assign out_entry.qid   = qid;
  assign out_entry.nid   = sel[si];
  assign out_entry.lid   = sel_lid[si];
  assign out_entry.spec  = 1'b1;

  assign row_wr    = (st == S_ROW);
  assign row_qid   = qid;
  assign row_nid   = sel;
  assign row_valid = acc_mask;
  assign row_gen   = iter;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; idx <= '0; qid <= '0; fcnt <= '0; fi <= '0; scnt <= '0; si <= '0;
      k <= '0; kend <= '0; waiting <= 1'b0; aborted <= 1'b0; acc_mask <= '0;
      for (int i = 0; i < R_MAX; i++) fl[i] <= '0;
      for (int i = 0; i < CAND; i++) begin
        cid[i] <= '0; ccnt[i] <= '0; cval[i] <= 1'b0; ctaken[i] <= 1'b0;
      end
      for (int i = 0; i < PREF_K; i++) begin sel[i] <= '0; sel_lid[i] <= '0; end
    end else begin
      if (stop && st != S_IDLE) aborted <= 1'b1;
      if (dr_req_valid && dr_req_ready) waiting <= 1'b1;
      if (dr_resp_valid) waiting <= 1'b0;
      // stop once nothing is in flight
      if ((aborted || stop) && st != S_IDLE && !(waiting && !dr_resp_valid) &&
          !(dr_req_valid && dr_req_ready)) begin
        st <= S_IDLE;
      end else begin
        unique case (st)
          S_IDLE: begin
            aborted <= 1'b0;
            if (start) begin idx <= '0; st <= S_LOAD; fcnt <= '0; end
          end
          // collect the query's run of first-order neighbours
          S_LOAD: begin
            if (idx >= nb_cnt) begin
              if (fcnt != 0) st <= S_OFS0;
              else st <= S_IDLE;
            end else if (fcnt == 0 || nb_data.qid == qid) begin
              if (fcnt == 0) qid <= nb_data.qid;
              if (int'(fcnt) < R_MAX) begin
                fl[fcnt] <= nb_data.nid;
                fcnt     <= fcnt + 1'b1;
              end
              idx <= idx + 1'b1;
            end else begin
              st <= S_OFS0;
            end
            fi <= '0;
            for (int i = 0; i < CAND; i++) begin cval[i] <= 1'b0; ctaken[i] <= 1'b0; end
          end
          S_OFS0: if (dr_resp_valid) begin k    <= dr_resp_data; st <= S_OFS1; end
          S_OFS1: if (dr_resp_valid) begin kend <= dr_resp_data; st <= S_NBR;  end
          S_NBR: begin
            if (k >= kend && !waiting) begin
              if (fi == fcnt - 1'b1) begin
                st <= S_SEL; scnt <= '0;
              end else begin
                fi <= fi + 1'b1; st <= S_OFS0;
              end
            end else if (dr_resp_valid) begin
              k <= k + 1;
              if (!in_first) begin
                if (in_tab) begin
                  if (ccnt[tab_i] != 8'hFF) ccnt[tab_i] <= ccnt[tab_i] + 1'b1;
                end else if (has_free) begin
                  cval[free_i] <= 1'b1; cid[free_i] <= dr_resp_data; ccnt[free_i] <= 8'd1;
                end
              end
            end
          end
          S_SEL: begin
            if (best_ok && int'(scnt) < PREF_K) begin
              sel[scnt]      <= cid[best_i];
              ctaken[best_i] <= 1'b1;
              scnt           <= scnt + 1'b1;
            end else begin
              si <= '0;
              st <= (scnt == 0) ? S_ROW : S_LUN;
              acc_mask <= '0;
            end
          end
          S_LUN: if (dr_resp_valid) begin
            sel_lid[si] <= LUNID_W'(dr_resp_data);
            if (si == scnt - 1'b1) begin si <= '0; st <= S_EMIT; end
            else si <= si + 1'b1;
          end
          S_EMIT: begin
            if (si >= scnt) st <= S_ROW;
            else if (out_ready) begin
              acc_mask[si] <= 1'b1;
              si <= si + 1'b1;
            end
          end
          S_ROW: begin
            fcnt <= '0;
            st   <= S_LOAD;
          end
          default: st <= S_IDLE;
        endcase
      end
    end
  end
endmodule
