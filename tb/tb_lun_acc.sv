// tb_lun_acc: self-checking testbench of one LUN-level accelerator with two NAND plane models.
//
// Loads query vectors into the query queue, sends <Search Page> tasks that exercise a paired
// page (pageLocBit), a page-buffer hit, a multi-plane sense and then a random mix, reads the
// output buffers back and compares every distance with the reference computed from the
// synthetic flash contents. Plane 0's model injects single-bit errors (must be corrected) and
// plane 1's also double-bit errors (must come back flagged ecc_fail).
// The paper gives the buffers, the two MACs and multi-plane reads; the pairing, hit and hold
// rules checked here are this design's reading of it.
module tb_lun_acc;
  import ndsearch_pkg::*;
  import ndsearch_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, busy, ob_sel, ob_pop;
  lun_msg_t cmd;
  result_t ob_data;
  logic [7:0] ob_count [2];
  logic sense_req [2], sense_done [2];
  row_addr_t sense_row [2];
  logic rd_req [4], rd_vld [4];
  logic [COL_W-1:0] rd_col [4];
  logic [CW_W-1:0] rd_cw [4];

  lun_acc dut (.*);

  nand_plane_model #(.T_R(20), .ERR_EVERY(7), .ERR2_EVERY(0)) u_p0 (
    .clk, .sense_req(sense_req[0]), .sense_row(sense_row[0]), .sense_done(sense_done[0]),
    .rd_req(rd_req[0:1]), .rd_col(rd_col[0:1]), .rd_vld(rd_vld[0:1]), .rd_cw(rd_cw[0:1]));
  nand_plane_model #(.T_R(25), .ERR_EVERY(11), .ERR2_EVERY(61)) u_p1 (
    .clk, .sense_req(sense_req[1]), .sense_row(sense_row[1]), .sense_done(sense_done[1]),
    .rd_req(rd_req[2:3]), .rd_col(rd_col[2:3]), .rd_vld(rd_vld[2:3]), .rd_cw(rd_cw[2:3]));

  int checks = 0, failures = 0;
  localparam int FVD = 2;

  // expected results, keyed by vid (unique per task)
  int signed exp_d [int];
  int        exp_q [int];
  int        n_sent = 0, n_got = 0, n_eccfail = 0;
  int        n_pair = 0, n_hit = 0, n_mp = 0;

  task automatic send(input lun_msg_t m);
    cmd = m; cmd_valid = 1;
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 0;
  endtask

  task automatic send_query(input int slot, input int qid);
    lun_msg_t m;
    for (int w = 0; w < (1 << FVD); w++) begin
      m = '0;
      m.qw.qslot = QSLOT_W'(slot); m.qw.fv_dim = 3'(FVD); m.qw.widx = WIDX_W'(w);
      m.qw.data = query_word(qid, w);
      send(m);
    end
  endtask

  task automatic send_task(input int slot, input int qid, input int vid, input row_addr_t row,
                           input int col, input int dt, input bit ploc);
    lun_msg_t m;
    m = '0;
    m.is_task = 1;
    m.tsk.ins.dtype = dist_e'(dt); m.tsk.ins.row = row; m.tsk.ins.fv_dim = 3'(FVD);
    m.tsk.ins.fv_prec = 4'd7; m.tsk.ins.page_loc = ploc;
    m.tsk.col = COL_W'(col); m.tsk.qslot = QSLOT_W'(slot); m.tsk.qid = QID_W'(qid);
    m.tsk.vid = VID_W'(vid);
    exp_d[vid] = ref_dist_at(dt, qid, row, col, FVD);
    exp_q[vid] = qid;
    n_sent++;
    send(m);
  endtask

  function automatic row_addr_t mkrow(int plane, int blk, int page);
    row_addr_t r;
    r.lun = 9'd3; r.plane = 1'(plane); r.block = 9'(blk); r.page = 7'(page);
    return r;
  endfunction

  // drain output buffers continuously
  initial begin
    ob_pop = 0; ob_sel = 0;
    wait (rst_n);
    forever begin
      @(posedge clk); #1;
      ob_pop = 0;
      ob_sel = ~ob_sel;
      #1;
      if (ob_count[ob_sel] != 0) begin
        result_t r;
        r = ob_data;
        ob_pop = 1;
        n_got++;
        checks++;
        if (!exp_d.exists(int'(r.vid))) begin
          failures++; $display("unexpected result vid=%0d", r.vid);
        end else if (r.ecc_fail) begin
          n_eccfail++;
        end else if (r.distance != exp_d[int'(r.vid)] || int'(r.qid) != exp_q[int'(r.vid)]) begin
          failures++;
          $display("mismatch vid=%0d q=%0d got %0d exp %0d", r.vid, r.qid, r.distance,
                   exp_d[int'(r.vid)]);
        end
      end
    end
  end

  // mechanism monitors
  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < 2; p++) begin
      if (dut.go_hit[p]) n_hit++;
      if ((dut.go_hit[p] || dut.go_sense[p]) && dut.pair[p]) n_pair++;
    end
    if (dut.multi_plane) n_mp++;
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int vid;
    cmd_valid = 0; cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int s = 0; s < 6; s++) send_query(s, 100 + s);
    // directed: pair on page A, hit on page A, plane 1 sense on same page number (multi-plane)
    send_task(0, 100, 1, mkrow(0, 5, 3), 0,  0, 1);
    send_task(1, 101, 2, mkrow(0, 5, 3), 8,  2, 0);
    send_task(2, 102, 3, mkrow(1, 7, 3), 4,  0, 0);
    send_task(3, 103, 4, mkrow(0, 5, 3), 16, 3, 0);
    send_task(4, 104, 5, mkrow(0, 9, 3), 12, 1, 0);
    // random mix
    vid = 10;
    for (int i = 0; i < 60; i++) begin
      int pl, blk, s;
      bit same;
      pl  = $urandom_range(0, 1);
      blk = $urandom_range(0, 2);
      s   = $urandom_range(0, 5);
      same = ($urandom_range(0, 2) == 0);
      if (same) begin
        // two tasks on one page: the first carries pageLocBit
        send_task(s, 100 + s, vid, mkrow(pl, blk, 1), 4 * $urandom_range(0, 200), $urandom_range(0, 3), 1);
        vid++;
        s = $urandom_range(0, 5);
        send_task(s, 100 + s, vid, mkrow(pl, blk, 1), 4 * $urandom_range(0, 200), $urandom_range(0, 3), 0);
      end else begin
        send_task(s, 100 + s, vid, mkrow(pl, blk, $urandom_range(0, 1)), 4 * $urandom_range(0, 200),
                  $urandom_range(0, 3), 0);
      end
      vid++;
    end
    wait (n_got == n_sent && !busy);
    repeat (5) @(posedge clk);
    checks++;
    if (n_got != n_sent) failures++;
    checks++;
    if (n_pair == 0 || n_hit == 0 || n_mp == 0) begin
      failures++; $display("mechanism missing pair=%0d hit=%0d mp=%0d", n_pair, n_hit, n_mp);
    end
    checks++;
    if (n_eccfail == 0 || n_eccfail != u_p1.n_double) begin
      failures++; $display("ecc fail count %0d vs injected %0d", n_eccfail, u_p1.n_double);
    end
    $display("results=%0d pairs=%0d hits=%0d multi_plane=%0d ecc_fail=%0d single_err=%0d",
             n_got, n_pair, n_hit, n_mp, n_eccfail, u_p0.n_single + u_p1.n_single);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
