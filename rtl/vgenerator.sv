// vgenerator: Vgenerator of the SearSSD, the graph-traversal side of one search iteration.
//
// Vgen Buffer (2 MB in the paper) with three portions: Query (feature vectors of the batch,
// written by the controller), NBR (the (Q_id, N_id, L_id) entries of this iteration) and Pref
// (per query, the prefetched second-order neighbours of the last iteration).
// Fetch (Allocating stage), four units joined by small FIFOs, as in the paper's three-stage
// pipeline behind the QP Reader:
//   QP Reader   reads each query's entry vertex from the query property table in DRAM (a word of
//               all ones marks a query that has finished and is skipped);
//   OFS Fetcher reads offset[v] and offset[v+1] (the neighbour list is [offset[v], offset[v+1]));
//   NBR Fetcher reads the neighbour IDs;
//   LUN Fetcher reads each neighbour's LUN ID and writes the entry into the NBR buffer.
// Vgen CTR then hands the NBR entries to the Allocator. An entry whose neighbour was already
// searched speculatively in the previous iteration (it is in that query's Pref row, the row is
// from the previous iteration and the Allocator accepted it) is dropped: its distance is already
// known. With spec_en set, the Pref Unit then runs the speculative Allocating stage for the next
// iteration until it finishes or spec_stop arrives.
// Interface: start begins an iteration; alloc_done rises when all non-speculative entries have
// been handed over (ns_count of them, spec_hits dropped) and done when the iteration's work,
// speculative part included, is over. qw_* writes and qr_* reads (combinational) the query
// buffer at word (qid << fv_dim) + widx. dr_* is the DRAM read port (32-bit words, in-order
// answers). out_* (valid/ready) feeds the Allocator. The sizes of the portions (1 MB query,
// 512 KB NBR, Pref rows of PREF_K entries) are this design's split of the 2 MB.
module vgenerator
  import ndsearch_pkg::*;
#(
  parameter int QBUF_BYTES = 1024 * 1024,
  parameter int NBR_BYTES  = 512 * 1024,
  parameter int N_QMAX     = 2048,
  parameter int PREF_K     = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [31:0]        qpt_base,
  input  logic [31:0]        ofs_base,
  input  logic [31:0]        nbr_base,
  input  logic [31:0]        lun_base,
  input  logic [QID_W:0]     n_query,
  input  logic [2:0]         fv_dim,
  input  logic               start,
  input  logic               spec_en,
  input  logic               spec_stop,
  output logic               alloc_done,
  output logic               done,
  output logic [31:0]        ns_count,
  output logic [31:0]        spec_count,
  output logic [31:0]        spec_hits,
  // query buffer
  input  logic               qw_en,
  input  logic [QID_W-1:0]   qw_qid,
  input  logic [WIDX_W-1:0]  qw_widx,
  input  logic [DATA_W-1:0]  qw_data,
  input  logic [QID_W-1:0]   qr_qid,
  input  logic [WIDX_W-1:0]  qr_widx,
  output logic [DATA_W-1:0]  qr_data,
  // DRAM
  output logic               dr_req_valid,
  output logic [31:0]        dr_req_addr,
  input  logic               dr_req_ready,
  input  logic               dr_resp_valid,
  input  logic [31:0]        dr_resp_data,
  // to the Allocator
  output logic               out_valid,
  output nbr_entry_t         out_entry,
  input  logic               out_ready
);
  localparam int QBUF_WORDS = QBUF_BYTES / (DATA_W / 8);
  localparam int QAW        = $clog2(QBUF_WORDS);
  localparam int NB_DEPTH   = NBR_BYTES * 8 / $bits(nbr_entry_t);
  localparam int NB_AW      = $clog2(NB_DEPTH);

  // ------------------------------------------------------------ Vgen Buffer
  logic [DATA_W-1:0] qbuf [QBUF_WORDS];
  always_ff @(posedge clk) begin
    if (qw_en) qbuf[QAW'((32'(qw_qid) << fv_dim) + 32'(qw_widx))] <= qw_data;
  end
  assign qr_data = qbuf[QAW'((32'(qr_qid) << fv_dim) + 32'(qr_widx))];

  nbr_entry_t        nbuf [NB_DEPTH];
  logic [NB_AW:0]    nb_cnt;

  typedef struct packed {
    logic [7:0]                    gen;
    logic [PREF_K-1:0]             valid;
    logic [PREF_K-1:0][VID_W-1:0]  nid;
  } pref_row_t;
  pref_row_t pbuf [N_QMAX];
  logic      prow_ok [N_QMAX];   // row written since reset

  // ------------------------------------------------------------ DRAM bus
  localparam int NREQ = 5;   // 0 Pref Unit, 1 QP Reader, 2 OFS, 3 NBR, 4 LUN Fetcher
  logic        a_valid [NREQ], a_ready [NREQ], a_rvalid [NREQ];
  logic [31:0] a_addr  [NREQ];
  logic [31:0] a_rdata;
  dram_rd_arbiter #(.N(NREQ)) u_arb (
    .clk, .rst_n,
    .req_valid(a_valid), .req_addr(a_addr), .req_ready(a_ready),
    .resp_valid(a_rvalid), .resp_data(a_rdata),
    .m_req_valid(dr_req_valid), .m_req_addr(dr_req_addr), .m_req_ready(dr_req_ready),
    .m_resp_valid(dr_resp_valid), .m_resp_data(dr_resp_data));

  // ------------------------------------------------------------ Vgen CTR state
  typedef enum logic [2:0] {V_IDLE, V_FETCH, V_DISP, V_PREF, V_DONE} vstate_e;
  vstate_e    vst;
  logic [7:0] iter;

  // ------------------------------------------------------------ QP Reader
  typedef struct packed { logic [QID_W-1:0] q; logic [VID_W-1:0] v; } qv_t;
  typedef struct packed { logic [QID_W-1:0] q; logic [31:0] s; logic [31:0] e; } qse_t;
  typedef struct packed { logic [QID_W-1:0] q; logic [VID_W-1:0] n; } qn_t;

  logic [QID_W:0] qp_i;
  logic           qp_wait, qp_run;
  qv_t            f1_w, f1_r, f1_r2;
  logic           f1_push, f1_pop, f1_full, f1_empty;
  logic [2:0]     f1_cnt;

  assign a_valid[1] = qp_run && !qp_wait && (qp_i < n_query) && !f1_full;
  assign a_addr[1]  = qpt_base + 32'(qp_i);
  assign f1_push    = a_rvalid[1] && (a_rdata != '1);
  assign f1_w       = '{q: QID_W'(qp_i), v: a_rdata};

  sync_fifo #(.T(qv_t), .DEPTH(4)) u_f1 (
    .clk, .rst_n, .push(f1_push), .wdata(f1_w), .pop(f1_pop), .rdata(f1_r), .rdata2(f1_r2),
    .full(f1_full), .empty(f1_empty), .count(f1_cnt));

  // ------------------------------------------------------------ OFS Fetcher
  typedef enum logic [1:0] {O_IDLE, O_S, O_E} ostate_e;
  ostate_e    ost;
  logic       o_wait;
  qse_t       o_cur, f2_r, f2_r2;
  logic       f2_push, f2_pop, f2_full, f2_empty;
  logic [2:0] f2_cnt;

  assign f1_pop     = (ost == O_IDLE) && !f1_empty;
  assign a_valid[2] = (ost != O_IDLE) && !o_wait && !f2_full;
  assign a_addr[2]  = ofs_base + o_cur.s + ((ost == O_E) ? 32'd1 : 32'd0);
  assign f2_push    = (ost == O_E) && a_rvalid[2];

  sync_fifo #(.T(qse_t), .DEPTH(4)) u_f2 (
    .clk, .rst_n, .push(f2_push), .wdata('{q: o_cur.q, s: o_cur.e, e: a_rdata}), .pop(f2_pop),
    .rdata(f2_r), .rdata2(f2_r2), .full(f2_full), .empty(f2_empty), .count(f2_cnt));

  // ------------------------------------------------------------ NBR Fetcher
  logic       n_busy, n_wait;
  qse_t       n_cur;
  qn_t        f3_r, f3_r2;
  logic       f3_push, f3_pop, f3_full, f3_empty;
  logic [2:0] f3_cnt;

  assign f2_pop     = !n_busy && !f2_empty;
  assign a_valid[3] = n_busy && !n_wait && (n_cur.s < n_cur.e) && !f3_full;
  assign a_addr[3]  = nbr_base + n_cur.s;
  assign f3_push    = a_rvalid[3];

  sync_fifo #(.T(qn_t), .DEPTH(4)) u_f3 (
    .clk, .rst_n, .push(f3_push), .wdata('{q: n_cur.q, n: a_rdata}), .pop(f3_pop),
    .rdata(f3_r), .rdata2(f3_r2), .full(f3_full), .empty(f3_empty), .count(f3_cnt));

  // ------------------------------------------------------------ LUN Fetcher
  logic l_busy, l_wait;
  qn_t  l_cur;
  assign f3_pop     = !l_busy && !f3_empty;
  assign a_valid[4] = l_busy && !l_wait && (int'(nb_cnt) < NB_DEPTH);
  assign a_addr[4]  = lun_base + l_cur.n;

  logic fetch_idle;
  assign fetch_idle = (qp_i >= n_query) && !qp_wait && f1_empty && (ost == O_IDLE) &&
                      f2_empty && !n_busy && f3_empty && !l_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      qp_i <= '0; qp_wait <= 1'b0; qp_run <= 1'b0;
      ost <= O_IDLE; o_wait <= 1'b0; o_cur <= '0;
      n_busy <= 1'b0; n_wait <= 1'b0; n_cur <= '0;
      l_busy <= 1'b0; l_wait <= 1'b0; l_cur <= '0;
    end else begin
      // QP Reader
      if ((vst == V_IDLE || vst == V_DONE) && start) begin qp_i <= '0; qp_run <= 1'b1; end
      if (a_valid[1] && a_ready[1]) qp_wait <= 1'b1;
      if (a_rvalid[1]) begin qp_wait <= 1'b0; qp_i <= qp_i + 1'b1; end
      if (qp_run && qp_i >= n_query && !qp_wait) qp_run <= 1'b0;
      // OFS Fetcher
      if (a_valid[2] && a_ready[2]) o_wait <= 1'b1;
      unique case (ost)
        O_IDLE: if (!f1_empty) begin
          o_cur <= '{q: f1_r.q, s: f1_r.v, e: '0};
          ost   <= O_S;
        end
        O_S: if (a_rvalid[2]) begin o_wait <= 1'b0; o_cur.e <= a_rdata; ost <= O_E; end
        O_E: if (a_rvalid[2]) begin o_wait <= 1'b0; ost <= O_IDLE; end
        default: ost <= O_IDLE;
      endcase
      // NBR Fetcher (f2 holds {q, start, end})
      if (!n_busy && !f2_empty) begin n_cur <= f2_r; n_busy <= 1'b1; end
      if (a_valid[3] && a_ready[3]) n_wait <= 1'b1;
      if (a_rvalid[3]) begin n_wait <= 1'b0; n_cur.s <= n_cur.s + 1; end
      if (n_busy && !n_wait && n_cur.s >= n_cur.e) n_busy <= 1'b0;
      // LUN Fetcher
      if (!l_busy && !f3_empty) begin l_cur <= f3_r; l_busy <= 1'b1; end
      if (a_valid[4] && a_ready[4]) l_wait <= 1'b1;
      if (a_rvalid[4]) begin l_wait <= 1'b0; l_busy <= 1'b0; end
    end
  end

  always_ff @(posedge clk) begin
    if (a_rvalid[4])
      nbuf[NB_AW'(nb_cnt)] <= '{qid: l_cur.q, nid: l_cur.n, lid: LUNID_W'(a_rdata), spec: 1'b0};
  end

  // ------------------------------------------------------------ Pref Unit
  logic               pu_start, pu_row_wr, pu_busy, pu_out_valid;
  logic [NB_AW-1:0]   pu_nb_addr;
  nbr_entry_t         pu_entry;
  logic [QID_W-1:0]   pu_row_qid;
  logic [VID_W-1:0]   pu_row_nid [PREF_K];
  logic [PREF_K-1:0]  pu_row_valid;
  logic [7:0]         pu_row_gen;

  pref_unit #(.PREF_K(PREF_K), .NB_AW(NB_AW)) u_pref (
    .clk, .rst_n, .start(pu_start), .stop(spec_stop), .iter(iter), .nb_cnt(nb_cnt),
    .ofs_base, .nbr_base, .lun_base,
    .nb_addr(pu_nb_addr), .nb_data(nbuf[pu_nb_addr]),
    .dr_req_valid(a_valid[0]), .dr_req_addr(a_addr[0]), .dr_req_ready(a_ready[0]),
    .dr_resp_valid(a_rvalid[0]), .dr_resp_data(a_rdata),
    .out_valid(pu_out_valid), .out_entry(pu_entry), .out_ready(out_ready && vst == V_PREF),
    .row_wr(pu_row_wr), .row_qid(pu_row_qid), .row_nid(pu_row_nid), .row_valid(pu_row_valid),
    .row_gen(pu_row_gen), .busy(pu_busy));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_QMAX; i++) prow_ok[i] <= 1'b0;
    end else if (pu_row_wr) begin
      prow_ok[pu_row_qid] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (pu_row_wr) begin
      pbuf[pu_row_qid].gen   <= pu_row_gen;
      pbuf[pu_row_qid].valid <= pu_row_valid;
      for (int i = 0; i < PREF_K; i++) pbuf[pu_row_qid].nid[i] <= pu_row_nid[i];
    end
  end

  // ------------------------------------------------------------ Vgen CTR
  logic [NB_AW:0] d_idx;
  nbr_entry_t     d_ent;
  pref_row_t      d_row;
  logic           d_hit;
  logic           pref_prev;     // the previous iteration ran the Pref Unit

  assign d_ent = nbuf[NB_AW'(d_idx)];
  assign d_row = pbuf[d_ent.qid];
  always_comb begin
    d_hit = 1'b0;
    if (pref_prev && prow_ok[d_ent.qid] && d_row.gen == iter - 8'd1)
      for (int i = 0; i < PREF_K; i++)
        if (d_row.valid[i] && d_row.nid[i] == d_ent.nid) d_hit = 1'b1;
  end

  always_comb begin
    out_valid = 1'b0;
    out_entry = d_ent;
    if (vst == V_DISP && d_idx < nb_cnt && !d_hit) out_valid = 1'b1;
    else if (vst == V_PREF) begin
      out_valid = pu_out_valid;
      out_entry = pu_entry;
    end
  end

  assign pu_start   = (vst == V_DISP) && (d_idx >= nb_cnt) && spec_en;
  assign alloc_done = (vst == V_PREF) || (vst == V_DONE);
  assign done       = (vst == V_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vst <= V_IDLE; iter <= '0; nb_cnt <= '0; d_idx <= '0; pref_prev <= 1'b0;
      ns_count <= '0; spec_count <= '0; spec_hits <= '0;
    end else begin
      if (a_rvalid[4]) nb_cnt <= nb_cnt + 1'b1;
      unique case (vst)
        V_IDLE, V_DONE: if (start) begin
          vst <= V_FETCH; nb_cnt <= '0; d_idx <= '0;
          iter <= iter + 1'b1;
          ns_count <= '0; spec_count <= '0; spec_hits <= '0;
        end
        V_FETCH: if (fetch_idle && !qp_run) vst <= V_DISP;
        V_DISP: begin
          if (d_idx < nb_cnt) begin
            if (d_hit) begin
              spec_hits <= spec_hits + 1; d_idx <= d_idx + 1'b1;
            end else if (out_ready) begin
              ns_count <= ns_count + 1; d_idx <= d_idx + 1'b1;
            end
          end else begin
            pref_prev <= spec_en;
            vst       <= spec_en ? V_PREF : V_DONE;
          end
        end
        V_PREF: begin
          if (out_valid && out_ready) spec_count <= spec_count + 1;
          if (!pu_busy && !pu_start) vst <= V_DONE;
        end
        default: vst <= V_IDLE;
      endcase
    end
  end
endmodule
