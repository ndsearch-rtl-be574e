// lun_acc: LUN-level accelerator (one LUN = two planes of a flash chip).
//
// Holds the query queue (query feature vectors of the queries allocated to this LUN), the Vaddr
// queue (candidate tasks, kept as one FIFO per plane so that the planes work independently), the
// Acc CTR, the switch that routes query words to the MACs, and per plane two LDPC decoders, one
// MAC group of two MACs and one output buffer (O Buffer). Structure and buffer sizes
// (24 KB query queue, 3 KB Vaddr queue, 1 KB O Buffer per MAC group) follow the paper; the
// scheduling rules below are this design's reading of it.
//
// Acc CTR, per plane:
//   * A task whose pageLocBit is set is paired with the next task of the same plane when both name
//     the same page: the page is sensed once and the two MACs compute the two distances side by
//     side from two column streams of the page buffer.
//   * If the page buffer already holds the task's page, sensing is skipped (page-buffer hit).
//   * Otherwise the page is sensed. The LUN's array runs one sense at a time; when both planes
//     need a sense for the same page number it issues them together as one multi-plane operation.
//     To find such chances a plane holds its sense while the other plane is still streaming and
//     its next task also misses on the same page number (the wait ends with that stream), or for
//     one cycle while the other, empty plane is receiving a task for the same page number.
//   * The vector is read one 78-bit codeword per cycle per lane, decoded, and fed to the MAC
//     together with the matching query word from the query queue. The result
//     {qid, vid, distance, spec, ecc_fail} is written into the plane's O Buffer.
// Interface: cmd_* carries query words and tasks from the channel bus (valid/ready); ob_* reads
// an O Buffer back (ob_sel picks the plane, ob_pop removes the head shown on ob_data); busy is high
// while any task is queued or running. The NAND ports: sense_req/sense_row start a page read into
// the page buffer and sense_done reports its end; rd_req/rd_col ask for one codeword of the page
// buffer on a lane, answered in order by rd_vld/rd_cw any number of cycles later.
// Index [2*plane + lane] on the lane arrays.
// Lint notes: the O Buffer FIFOs' full/empty flags are not used (ob_count carries the fill level
// and the Acc CTR holds results back by count); multi_plane is an observation point that marks a
// multi-plane sense; the decoders' corrected flags are not needed because only failures travel on.
module lun_acc
  import ndsearch_pkg::*;
#(
  parameter int QQ_BYTES    = 24576,
  parameter int VADDR_BYTES = 3072,
  parameter int OBUF_BYTES  = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  // channel bus
  input  logic              cmd_valid,
  input  lun_msg_t          cmd,
  output logic              cmd_ready,
  output logic              busy,
  // output-buffer read back
  input  logic              ob_sel,
  input  logic              ob_pop,
  output result_t           ob_data,
  output logic [7:0]        ob_count [PLANES_PER_LUN],
  // NAND planes
  output logic              sense_req  [PLANES_PER_LUN],
  output row_addr_t         sense_row  [PLANES_PER_LUN],
  input  logic              sense_done [PLANES_PER_LUN],
  output logic              rd_req     [2*PLANES_PER_LUN],
  output logic [COL_W-1:0]  rd_col     [2*PLANES_PER_LUN],
  input  logic              rd_vld     [2*PLANES_PER_LUN],
  input  logic [CW_W-1:0]   rd_cw      [2*PLANES_PER_LUN]
);
  localparam int NP          = PLANES_PER_LUN;
  localparam int QQ_WORDS    = QQ_BYTES / (DATA_W / 8);
  localparam int QQ_AW       = $clog2(QQ_WORDS);
  localparam int VQ_DEPTH    = (VADDR_BYTES * 8 / $bits(task_t)) / NP;
  localparam int OB_DEPTH    = OBUF_BYTES * 8 / $bits(result_t);
  localparam int VQ_CW       = $clog2(VQ_DEPTH + 1);
  localparam int OB_CW       = $clog2(OB_DEPTH + 1);

  initial begin
    assert (OB_DEPTH < 256) else $error("O Buffer count does not fit in ob_count");
  end

  // ------------------------------------------------------------------ query queue
  logic [DATA_W-1:0] qq [QQ_WORDS];
  always_ff @(posedge clk) begin
    if (cmd_valid && !cmd.is_task)
      qq[QQ_AW'((32'(cmd.qw.qslot) << cmd.qw.fv_dim) + 32'(cmd.qw.widx))] <= cmd.qw.data;
  end

  // ------------------------------------------------------------------ Vaddr queues
  task_t             vq_head [NP], vq_next [NP];
  logic              vq_full [NP], vq_empty [NP];
  logic [VQ_CW-1:0]  vq_cnt  [NP];
  logic              vq_pop1 [NP], vq_pop2 [NP];
  logic              vq_push [NP];

  // second pop of a pair happens one cycle after the first
  for (genvar p = 0; p < NP; p++) begin : g_vq
    assign vq_push[p] = cmd_valid && cmd.is_task && (cmd.tsk.ins.row.plane == 1'(p)) && !vq_full[p];
    sync_fifo #(.T(task_t), .DEPTH(VQ_DEPTH)) u_vq (
      .clk, .rst_n,
      .push (vq_push[p]), .wdata(cmd.tsk),
      .pop  (vq_pop1[p] || vq_pop2[p]),
      .rdata(vq_head[p]), .rdata2(vq_next[p]),
      .full (vq_full[p]), .empty(vq_empty[p]), .count(vq_cnt[p]));
  end

  always_comb begin
    cmd_ready = 1'b1;
    if (cmd.is_task) cmd_ready = !vq_full[cmd.tsk.ins.row.plane];
  end

  // ------------------------------------------------------------------ O Buffers
  result_t          ob_wdata [NP], ob_rdata [NP], ob_unused [NP];
  logic             ob_push [NP], ob_full [NP], ob_empty [NP];
  logic [OB_CW-1:0] ob_cnt  [NP];
  for (genvar p = 0; p < NP; p++) begin : g_ob
    sync_fifo #(.T(result_t), .DEPTH(OB_DEPTH)) u_ob (
      .clk, .rst_n,
      .push (ob_push[p]), .wdata(ob_wdata[p]),
      .pop  (ob_pop && (ob_sel == 1'(p))),
      .rdata(ob_rdata[p]), .rdata2(ob_unused[p]),
      .full (ob_full[p]), .empty(ob_empty[p]), .count(ob_cnt[p]));
    assign ob_count[p] = 8'(ob_cnt[p]);
  end
  assign ob_data = ob_rdata[ob_sel];

  // ------------------------------------------------------------------ Acc CTR
  typedef enum logic [2:0] {P_IDLE, P_SENSE, P_RUN, P_PUSH0, P_PUSH1} pstate_e;
  pstate_e          st [NP];
  task_t            tk [NP][2];
  logic             act [NP][2];           // lane in use
  logic [WIDX_W:0]  nwords [NP];
  logic [WIDX_W:0]  iss_k [NP][2], rx_k [NP][2];
  logic             done_l [NP][2], efail [NP][2];
  logic signed [DIST_W-1:0] dres [NP][2];
  logic             pb_valid [NP];
  row_addr_t        pb_row [NP];
  logic             array_busy;
  logic             sensing [NP];

  // start decisions
  logic can_start [NP], pair [NP], hit [NP];
  logic go_hit [NP], go_sense [NP];
  logic multi_plane;
  logic mp_hold [NP];
  always_comb begin
    for (int p = 0; p < NP; p++) begin
      can_start[p] = (st[p] == P_IDLE) && !vq_empty[p] &&
                     (!vq_head[p].ins.page_loc || vq_cnt[p] >= 2) &&
                     (int'(ob_cnt[p]) <= OB_DEPTH - 2);
      pair[p]      = vq_head[p].ins.page_loc && (vq_cnt[p] >= 2) &&
                     (vq_next[p].ins.row == vq_head[p].ins.row);
      hit[p]       = pb_valid[p] && (pb_row[p] == vq_head[p].ins.row);
      go_hit[p]    = can_start[p] && hit[p];
      go_sense[p]  = 1'b0;
    end
    // Coalescing window: a lone sense waits one cycle when a task for the same page number of
    // the other (idle, empty) plane is being accepted right now, so both go as one multi-plane
    // read.
    // It also waits while the other plane is still streaming and the task behind that stream
    // misses its page buffer on the same page number: both then sense together when it ends.
    for (int p = 0; p < NP; p++)
      mp_hold[p] = (vq_push[1-p] && vq_empty[1-p] && (st[1-p] == P_IDLE) &&
                    !cmd.tsk.ins.page_loc && (cmd.tsk.ins.row.page == vq_head[p].ins.row.page)) ||
                   ((st[1-p] == P_RUN || st[1-p] == P_PUSH0 || st[1-p] == P_PUSH1) &&
                    !vq_empty[1-p] && (vq_head[1-p].ins.row.page == vq_head[p].ins.row.page) &&
                    !(pb_valid[1-p] && pb_row[1-p] == vq_head[1-p].ins.row));
    multi_plane = 1'b0;
    if (!array_busy) begin
      if (can_start[0] && !hit[0] && can_start[1] && !hit[1] &&
          vq_head[0].ins.row.page == vq_head[1].ins.row.page) begin
        go_sense[0] = 1'b1;
        go_sense[1] = 1'b1;
        multi_plane = 1'b1;
      end else if (can_start[0] && !hit[0] && !mp_hold[0]) go_sense[0] = 1'b1;
      else if (can_start[1] && !hit[1] && !mp_hold[1])     go_sense[1] = 1'b1;
    end
  end

  // MAC groups and decoders
  logic [1:0]               mac_start [NP], mac_in_valid [NP], mac_in_last [NP], mac_ovalid [NP];
  dist_e                    mac_dist [NP][2];
  logic [DATA_W-1:0]        mac_v [NP][2], mac_q [NP][2];
  logic signed [DIST_W-1:0] mac_d [NP][2];
  logic                     dec_v [NP][2], dec_corr [NP][2], dec_fail [NP][2];
  logic [DATA_W-1:0]        dec_d [NP][2];
  logic [0:0]               dec_tag [NP][2];

  for (genvar p = 0; p < NP; p++) begin : g_pl
    for (genvar l = 0; l < 2; l++) begin : g_ln
      ldpc_bf_decoder #(.TAG_W(1)) u_dec (
        .clk, .rst_n,
        .in_valid(rd_vld[2*p+l]), .in_cw(rd_cw[2*p+l]), .in_tag(1'(l)),
        .out_valid(dec_v[p][l]), .out_data(dec_d[p][l]), .out_corrected(dec_corr[p][l]),
        .out_fail(dec_fail[p][l]), .out_tag(dec_tag[p][l]));
      // switch: query word of this lane's task
      assign mac_q[p][l] = qq[QQ_AW'((32'(tk[p][l].qslot) << tk[p][l].ins.fv_dim) + 32'(rx_k[p][l]))];
      assign mac_v[p][l]        = dec_d[p][l];
      assign mac_in_valid[p][l] = dec_v[p][l] && act[p][l];
      assign mac_in_last[p][l]  = (rx_k[p][l] == nwords[p] - 1'b1);
      assign mac_dist[p][l]     = (l == 0) ? vq_head[p].ins.dtype : vq_next[p].ins.dtype;
      assign rd_req[2*p+l]      = (st[p] == P_RUN) && act[p][l] && (iss_k[p][l] < nwords[p]);
      assign rd_col[2*p+l]      = tk[p][l].col + COL_W'(iss_k[p][l]);
    end
    assign mac_start[p] = {go_hit[p] || go_sense[p], go_hit[p] || go_sense[p]};
    mac_group #(.N_MAC(2)) u_mac (
      .clk, .rst_n,
      .start(mac_start[p]), .dtype(mac_dist[p]),
      .in_valid(mac_in_valid[p]), .in_last(mac_in_last[p]),
      .v_word(mac_v[p]), .q_word(mac_q[p]),
      .out_valid(mac_ovalid[p]), .out_dist(mac_d[p]));
    assign sense_req[p] = go_sense[p];
    assign sense_row[p] = vq_head[p].ins.row;

    always_comb begin
      ob_push[p]  = 1'b0;
      ob_wdata[p] = '0;
      if (st[p] == P_PUSH0 || st[p] == P_PUSH1) begin
        automatic int l = (st[p] == P_PUSH0) ? 0 : 1;
        ob_push[p]           = 1'b1;
        ob_wdata[p].qid      = tk[p][l].qid;
        ob_wdata[p].vid      = tk[p][l].vid;
        ob_wdata[p].distance = dres[p][l];
        ob_wdata[p].spec     = tk[p][l].spec;
        ob_wdata[p].ecc_fail = efail[p][l];
      end
    end
    assign vq_pop1[p] = go_hit[p] || go_sense[p];
  end

  // second pop of a pair: one cycle after the first (the FIFO pops one entry per cycle)
  logic pop2_pend [NP];
  for (genvar p = 0; p < NP; p++) begin : g_pop2
    assign vq_pop2[p] = pop2_pend[p];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      array_busy <= 1'b0;
      for (int p = 0; p < NP; p++) begin
        st[p]        <= P_IDLE;
        pb_valid[p]  <= 1'b0;
        pb_row[p]    <= '0;
        nwords[p]    <= '0;
        sensing[p]   <= 1'b0;
        pop2_pend[p] <= 1'b0;
        for (int l = 0; l < 2; l++) begin
          tk[p][l]     <= '0;
          act[p][l]    <= 1'b0;
          iss_k[p][l]  <= '0;
          rx_k[p][l]   <= '0;
          done_l[p][l] <= 1'b0;
          efail[p][l]  <= 1'b0;
          dres[p][l]   <= '0;
        end
      end
    end else begin
      if (go_sense[0] || go_sense[1]) array_busy <= 1'b1;
      for (int p = 0; p < NP; p++) begin
        pop2_pend[p] <= 1'b0;
        if (sense_done[p]) sensing[p] <= 1'b0;
        unique case (st[p])
          P_IDLE: if (go_hit[p] || go_sense[p]) begin
            tk[p][0]     <= vq_head[p];
            tk[p][1]     <= vq_next[p];
            act[p][0]    <= 1'b1;
            act[p][1]    <= pair[p];
            pop2_pend[p] <= pair[p];
            nwords[p]    <= (WIDX_W+1)'(1) << vq_head[p].ins.fv_dim;
            for (int l = 0; l < 2; l++) begin
              iss_k[p][l]  <= '0;
              rx_k[p][l]   <= '0;
              done_l[p][l] <= 1'b0;
              efail[p][l]  <= 1'b0;
            end
            if (go_sense[p]) begin
              st[p]       <= P_SENSE;
              sensing[p]  <= 1'b1;
              pb_valid[p] <= 1'b1;
              pb_row[p]   <= vq_head[p].ins.row;
            end else begin
              st[p] <= P_RUN;
            end
          end
          P_SENSE: if (sense_done[p]) st[p] <= P_RUN;
          P_RUN: begin
            for (int l = 0; l < 2; l++) begin
              if (rd_req[2*p+l]) iss_k[p][l] <= iss_k[p][l] + 1'b1;
              if (mac_in_valid[p][l]) begin
                rx_k[p][l] <= rx_k[p][l] + 1'b1;
                if (dec_fail[p][l]) efail[p][l] <= 1'b1;
              end
              if (mac_ovalid[p][l]) begin
                done_l[p][l] <= 1'b1;
                dres[p][l]   <= mac_d[p][l];
              end
            end
            if ((done_l[p][0] || !act[p][0]) && (done_l[p][1] || !act[p][1]))
              st[p] <= P_PUSH0;
          end
          P_PUSH0: st[p] <= act[p][1] ? P_PUSH1 : P_IDLE;
          P_PUSH1: st[p] <= P_IDLE;
          default: st[p] <= P_IDLE;
        endcase
      end
      // the array is free again when every plane it was sensing has finished
      if ((!sensing[0] || sense_done[0]) && (!sensing[1] || sense_done[1]) &&
          !(go_sense[0] || go_sense[1]))
        array_busy <= 1'b0;
    end
  end

  always_comb begin
    busy = 1'b0;
    for (int p = 0; p < NP; p++)
      if (!vq_empty[p] || st[p] != P_IDLE) busy = 1'b1;
  end

  // a pair is popped in two consecutive cycles; nothing else may pop in between
  for (genvar p = 0; p < NP; p++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n) pop2_pend[p] |-> !vq_pop1[p]);
  end
endmodule
