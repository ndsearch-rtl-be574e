// allocator: batch-wise dynamic allocation of (query, candidate) pairs to LUN accelerators.
//
// Dispatcher: takes the (Q_id, N_id, L_id) entries the Vgenerator produces and appends each to
// the partition of the Alloc Buffer that belongs to its LUN, so all work for one LUN collects in
// one place. The Alloc Buffer (6 MB, as in the paper) is split evenly into one circular
// partition per LUN; a full partition holds the Dispatcher back.
// Alloc CTR: visits the partitions round robin and drains one at a time. For each entry it
//   1. sends the query's feature vector to the LUN's query queue the first time that query
//      appears in the partition run (the vector is read from the Vgenerator's query buffer; the
//      Alloc Buffer keeps only the query index). Query-queue slots are handed out in order; when
//      the LUN's queue is full (overflow) it waits until the LUN has gone idle and starts over.
//   2. reads the vertex's block from the BLK array in DRAM and forms the physical address. LUN
//      and block come from the LUN/BLK arrays (they change when the FTL refreshes a block); plane,
//      page and column follow from the vertex index through the static mapping: a page of plane
//      0 is filled first, then the same page of plane 1, then the next LUN, and after the last
//      LUN the next page.
//   3. sets pageLocBit when the next task of the same partition names the same page (one-entry
//      look-ahead), and sends the <Search Page> task to the channel's Flash CTR.
// Interface: in_* (valid/ready) from the Vgenerator; qr_* reads its query buffer
// (combinational); dr_* is a DRAM read port (one request outstanding, answered any cycles later);
// out_* (valid/ready) goes to Flash CTR out_ch. lun_busy comes back from the LUNs. idle is high
// when nothing is buffered or in progress.
module allocator
  import ndsearch_pkg::*;
#(
  parameter longint ALLOC_BYTES = 6 * 1024 * 1024
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [31:0]        blk_base,
  input  dist_e              dtype,
  input  logic [2:0]         fv_dim,
  input  logic [3:0]         fv_prec,
  // from the Vgenerator
  input  logic               in_valid,
  input  nbr_entry_t         in_entry,
  output logic               in_ready,
  output logic [QID_W-1:0]   qr_qid,
  output logic [WIDX_W-1:0]  qr_widx,
  input  logic [DATA_W-1:0]  qr_data,
  // DRAM read port (BLK array)
  output logic               dr_req_valid,
  output logic [31:0]        dr_req_addr,
  input  logic               dr_req_ready,
  input  logic               dr_resp_valid,
  input  logic [31:0]        dr_resp_data,
  // to the Flash CTRs
  output logic               out_valid,
  output logic [$clog2(N_CH)-1:0] out_ch,
  output ch_msg_t            out_msg,
  input  logic               out_ready,
  input  logic               lun_busy [N_LUN],
  output logic               idle
);
  typedef struct packed {
    logic [QID_W-1:0] qid;
    logic [VID_W-1:0] nid;
    logic             spec;
  } aent_t;

  localparam int PD    = int'(ALLOC_BYTES * 64'd8 / 64'($bits(aent_t)) / 64'(N_LUN));  // entries per partition
  localparam int PAW   = $clog2(PD);
  localparam int PCW   = $clog2(PD + 1);
  localparam int QQ_WORDS = 24576 / (DATA_W / 8);

  aent_t          abuf [N_LUN * PD];
  logic [PAW-1:0] wp [N_LUN], rp [N_LUN];
  logic [PCW-1:0] cnt [N_LUN];

  // ---------------------------------------------------------------- Dispatcher
  logic disp_push;
  assign in_ready  = (int'(cnt[in_entry.lid]) < PD);
  assign disp_push = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (disp_push)
      abuf[int'(in_entry.lid) * PD + int'(wp[in_entry.lid])] <= '{qid: in_entry.qid, nid: in_entry.nid,
                                                                 spec: in_entry.spec};
  end

  // ---------------------------------------------------------------- Alloc CTR
  typedef enum logic [3:0] {A_PICK, A_QCHK, A_FLUSH, A_OVF, A_QSEND, A_BLKREQ, A_BLKWAIT,
                            A_EMIT} astate_e;
  astate_e             st;
  logic [LUNID_W-1:0]  cur;
  logic                cur_valid;
  logic                pop;
  aent_t               ent;
  logic [QID_W-1:0]    last_qid [N_LUN];
  logic                lq_valid [N_LUN];
  logic [QSLOT_W-1:0]  lq_slot  [N_LUN];
  logic [QSLOT_W:0]    slot_cnt [N_LUN];
  logic [WIDX_W:0]     widx;
  logic [1:0]          idle_cnt;
  task_t               pend, newt, newt_q;
  logic                pend_valid;
  logic                emit_flush;     // A_EMIT came from a flush (no new task behind it)

  assign ent = abuf[int'(cur) * PD + int'(rp[cur])];

  // next non-empty partition, round robin from cur+1
  logic [LUNID_W-1:0] nxt;
  logic               any;
  logic [N_LUN-1:0]   nevec, nerot;
  logic [LUNID_W-1:0] nfirst;
  always_comb begin
    for (int l = 0; l < N_LUN; l++) nevec[l] = (cnt[l] != 0);
    // rotate so that bit 0 is partition cur+1
    nerot  = (nevec >> (int'(cur) + 1)) | (nevec << (N_LUN - int'(cur) - 1));
    nfirst = '0;
    for (int i = N_LUN - 1; i >= 0; i--) if (nerot[i]) nfirst = LUNID_W'(i);
    any = |nevec;
    nxt = cur + 1'b1 + nfirst;
  end

  // number of query slots of the current vector size
  logic [QSLOT_W:0] nslots;
  assign nslots = (QSLOT_W+1)'(QQ_WORDS >> fv_dim);

  // physical address of the entry's vertex (static mapping)
  logic [3:0]       vpp_sh;
  logic [VID_W-1:0] pnum, qnum;
  always_comb begin
    vpp_sh = 4'(COL_W) - 4'(fv_dim);
    pnum   = ent.nid >> vpp_sh;
    qnum   = pnum >> 1;
    newt                  = '0;
    newt.ins.dtype        = dtype;
    newt.ins.row.lun      = {1'b0, cur};
    newt.ins.row.plane    = pnum[0];
    newt.ins.row.block    = dr_resp_data[BLK_W-1:0];
    newt.ins.row.page     = qnum[LUNID_W +: PAGE_W];
    newt.ins.fv_dim       = fv_dim;
    newt.ins.fv_prec      = fv_prec;
    newt.ins.page_loc     = 1'b0;
    newt.col              = COL_W'((ent.nid & ((VID_W'(1) << vpp_sh) - 1'b1)) << fv_dim);
    newt.qslot            = lq_slot[cur];
    newt.qid              = ent.qid;
    newt.vid              = ent.nid;
    newt.spec             = ent.spec;
  end

  assign pop = (st == A_BLKWAIT) && dr_resp_valid;

  assign dr_req_valid = (st == A_BLKREQ);
  assign dr_req_addr  = blk_base + ent.nid;

  assign qr_qid  = ent.qid;
  assign qr_widx = WIDX_W'(widx);

  // output message
  always_comb begin
    out_valid = 1'b0;
    out_msg   = '0;
    out_ch    = cur[LUNID_W-1 -: $clog2(N_CH)];
    if (st == A_QSEND) begin
      out_valid              = 1'b1;
      out_msg.llun           = cur[LLUN_W-1:0];
      out_msg.msg.is_task    = 1'b0;
      out_msg.msg.qw.qslot   = slot_cnt[cur][QSLOT_W-1:0];
      out_msg.msg.qw.fv_dim  = fv_dim;
      out_msg.msg.qw.widx    = WIDX_W'(widx);
      out_msg.msg.qw.data    = qr_data;
    end else if (st == A_EMIT) begin
      out_valid              = 1'b1;
      out_ch                 = pend.ins.row.lun[LUNID_W-1 -: $clog2(N_CH)];
      out_msg.llun           = pend.ins.row.lun[LLUN_W-1:0];
      out_msg.msg.is_task    = 1'b1;
      out_msg.msg.tsk        = pend;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= A_PICK;
      cur        <= '0;
      cur_valid  <= 1'b0;
      widx       <= '0;
      idle_cnt   <= '0;
      pend       <= '0;
      newt_q     <= '0;
      pend_valid <= 1'b0;
      emit_flush <= 1'b0;
      for (int l = 0; l < N_LUN; l++) begin
        wp[l] <= '0; rp[l] <= '0; cnt[l] <= '0;
        last_qid[l] <= '0; lq_valid[l] <= 1'b0; lq_slot[l] <= '0; slot_cnt[l] <= '0;
      end
    end else begin
      // buffer pointers
      if (disp_push)
        wp[in_entry.lid] <= (int'(wp[in_entry.lid]) == PD - 1) ? '0 : wp[in_entry.lid] + 1'b1;
      if (pop)
        rp[cur] <= (int'(rp[cur]) == PD - 1) ? '0 : rp[cur] + 1'b1;
      for (int l = 0; l < N_LUN; l++)
        cnt[l] <= cnt[l] + PCW'(disp_push && in_entry.lid == LUNID_W'(l))
                         - PCW'(pop && cur == LUNID_W'(l));

      unique case (st)
        A_PICK: begin
          if (cur_valid && cnt[cur] != 0) st <= A_QCHK;
          else if (pend_valid) begin
            emit_flush <= 1'b1;
            st         <= A_EMIT;
          end else if (any) begin
            cur       <= nxt;
            cur_valid <= 1'b1;
            // a new run over this partition: every query is sent again
            lq_valid[nxt] <= 1'b0;
          end
        end
        A_QCHK: begin
          if (lq_valid[cur] && last_qid[cur] == ent.qid) st <= A_BLKREQ;
          else if (slot_cnt[cur] >= nslots) begin
            if (pend_valid) begin
              emit_flush <= 1'b1;
              st         <= A_EMIT;
            end else begin
              idle_cnt <= '0;
              st       <= A_OVF;
            end
          end else begin
            widx <= '0;
            st   <= A_QSEND;
          end
        end
        A_OVF: begin
          idle_cnt <= lun_busy[cur] ? 2'd0 : idle_cnt + 1'b1;
          if (idle_cnt == 2'd2) begin
            slot_cnt[cur] <= '0;
            st            <= A_QCHK;
          end
        end
        A_QSEND: if (out_ready) begin
          if (widx == ((WIDX_W+1)'(1) << fv_dim) - 1'b1) begin
            lq_valid[cur] <= 1'b1;
            last_qid[cur] <= ent.qid;
            lq_slot[cur]  <= slot_cnt[cur][QSLOT_W-1:0];
            slot_cnt[cur] <= slot_cnt[cur] + 1'b1;
            st            <= A_BLKREQ;
          end
          widx <= widx + 1'b1;
        end
        A_BLKREQ: if (dr_req_ready) st <= A_BLKWAIT;
        A_BLKWAIT: if (dr_resp_valid) begin
          if (!pend_valid) begin
            pend       <= newt;
            pend_valid <= 1'b1;
            st         <= A_PICK;
          end else begin
            // emit the older task with its look-ahead bit; the new one waits behind it
            pend.ins.page_loc <= (pend.ins.row == newt.ins.row);
            newt_q            <= newt;
            emit_flush        <= 1'b0;
            st                <= A_EMIT;
          end
        end
        A_EMIT: if (out_ready) begin
          if (emit_flush) begin
            pend_valid <= 1'b0;
            st         <= A_PICK;
          end else begin
            pend <= newt_q;
            st   <= A_PICK;
          end
        end
        default: st <= A_PICK;
      endcase
    end
  end


  assign idle = (st == A_PICK) && !any && !pend_valid && !(cur_valid && cnt[cur] != 0);
endmodule
