// tb_flash_ctr: self-checking testbench of one channel: a Flash CTR, its four SiN chips and
// 16 behavioural NAND planes.
//
// The testbench plays the Allocator: it loads query vectors into the query queues of all eight
// LUNs of the channel and then issues random <Search Page> tasks (some with pageLocBit pairs)
// through the Flash CTR. Results come back through the read-back path (Read Status Enhanced,
// Change Read Column, transfer) under random backpressure and are compared with the
// reference distance; every task must return exactly once. It also checks that lun_busy rises
// for every LUN and is low at the end, and that issue and read-back share the bus: the number of bus
// cycles is at least (query words + tasks + results).
// The paper gives the multi-LUN search order; the bus timing and backpressure checked here are
// this design's choices.
module tb_flash_ctr;
  import ndsearch_pkg::*;
  import ndsearch_tb_pkg::*;

  localparam int FVD = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, res_valid, res_ready;
  ch_msg_t in_msg;
  result_t res;
  logic lun_busy [LUN_PER_CH];
  logic s_cmd_valid [SIN_PER_CH], s_cmd_ready [SIN_PER_CH], s_ob_pop [SIN_PER_CH];
  logic s_cmd_llun, s_ob_lun, s_ob_sel;
  lun_msg_t s_cmd;
  result_t s_ob_data [SIN_PER_CH];
  logic s_busy [LUN_PER_CH];
  logic [7:0] s_ob_count [LUN_PER_CH*PLANES_PER_LUN];
  logic sense_req [16], sense_done [16];
  row_addr_t sense_row [16];
  logic rd_req [32], rd_vld [32];
  logic [COL_W-1:0] rd_col [32];
  logic [CW_W-1:0] rd_cw [32];

  flash_ctr dut (
    .clk, .rst_n, .in_valid, .in_msg, .in_ready, .res_valid, .res, .res_ready, .lun_busy,
    .sin_cmd_valid(s_cmd_valid), .sin_cmd_llun(s_cmd_llun), .sin_cmd(s_cmd),
    .sin_cmd_ready(s_cmd_ready), .sin_busy(s_busy), .sin_ob_lun(s_ob_lun), .sin_ob_sel(s_ob_sel),
    .sin_ob_pop(s_ob_pop), .sin_ob_data(s_ob_data), .sin_ob_count(s_ob_count));

  for (genvar s = 0; s < SIN_PER_CH; s++) begin : g_sin
    logic       busy2 [LUN_PER_SIN];
    logic [7:0] cnt4  [LUN_PER_SIN*PLANES_PER_LUN];
    sin u_sin (
      .clk, .rst_n,
      .cmd_valid(s_cmd_valid[s]), .cmd_llun(s_cmd_llun), .cmd(s_cmd), .cmd_ready(s_cmd_ready[s]),
      .busy(busy2), .ob_lun(s_ob_lun), .ob_sel(s_ob_sel), .ob_pop(s_ob_pop[s]),
      .ob_data(s_ob_data[s]), .ob_count(cnt4),
      .sense_req(sense_req[4*s +: 4]), .sense_row(sense_row[4*s +: 4]),
      .sense_done(sense_done[4*s +: 4]),
      .rd_req(rd_req[8*s +: 8]), .rd_col(rd_col[8*s +: 8]), .rd_vld(rd_vld[8*s +: 8]),
      .rd_cw(rd_cw[8*s +: 8]));
    for (genvar u = 0; u < LUN_PER_SIN; u++) begin : g_u
      assign s_busy[2*s+u] = busy2[u];
    end
    for (genvar b = 0; b < 4; b++) begin : g_b
      assign s_ob_count[4*s+b] = cnt4[b];
    end
  end
  for (genvar p = 0; p < 16; p++) begin : g_pl
    nand_plane_model #(.T_R(20), .ERR_EVERY(17)) u_pl (
      .clk, .sense_req(sense_req[p]), .sense_row(sense_row[p]), .sense_done(sense_done[p]),
      .rd_req(rd_req[2*p +: 2]), .rd_col(rd_col[2*p +: 2]), .rd_vld(rd_vld[2*p +: 2]),
      .rd_cw(rd_cw[2*p +: 2]));
  end

  int checks = 0, failures = 0;
  int signed exp_d [int];
  int exp_q [int];
  int n_sent = 0, n_got = 0, n_words = 0, n_bp = 0, n_busy_err = 0;
  int pend_lun [LUN_PER_CH];
  bit seen_busy [LUN_PER_CH];
  initial for (int l = 0; l < LUN_PER_CH; l++) begin pend_lun[l] = 0; seen_busy[l] = 0; end

  always @(posedge clk) res_ready <= ($urandom_range(0, 3) != 0);

  always @(posedge clk) if (rst_n) begin
    if (res_valid && !res_ready) n_bp++;
    if (res_valid && res_ready) begin
      n_got++;
      checks++;
      if (!exp_d.exists(int'(res.vid))) begin
        failures++; $display("unexpected or repeated result vid=%0d", res.vid);
      end else begin
        if (res.ecc_fail || res.distance != exp_d[int'(res.vid)] || int'(res.qid) != exp_q[int'(res.vid)]) begin
          failures++;
          $display("vid %0d: got q=%0d d=%0d fail=%b, exp q=%0d d=%0d", res.vid, res.qid, res.distance,
                   res.ecc_fail, exp_q[int'(res.vid)], exp_d[int'(res.vid)]);
        end
        pend_lun[int'(res.vid) % LUN_PER_CH]--;
        exp_d.delete(int'(res.vid));
      end
    end
    for (int l = 0; l < LUN_PER_CH; l++) if (lun_busy[l]) seen_busy[l] = 1;
  end

  task automatic send(input ch_msg_t m);
    in_msg = m; in_valid = 1;
    do @(posedge clk); while (!in_ready);
    #1 in_valid = 0;
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ch_msg_t m;
    int t0, cycles;
    in_valid = 0; in_msg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    t0 = $time;
    // queries 0..3 into slots 0..3 of every LUN
    for (int l = 0; l < LUN_PER_CH; l++)
      for (int s = 0; s < 4; s++)
        for (int w = 0; w < (1 << FVD); w++) begin
          m = '0;
          m.llun = LLUN_W'(l);
          m.msg.qw.qslot = QSLOT_W'(s); m.msg.qw.fv_dim = 3'(FVD); m.msg.qw.widx = WIDX_W'(w);
          m.msg.qw.data = query_word(s, w);
          send(m);
          n_words++;
        end
    // 300 tasks; vid = 8*k + LUN
    for (int k = 0; k < 300; k++) begin
      int l, s, pl, col, dt;
      bit pairk;
      row_addr_t row;
      l  = $urandom_range(0, LUN_PER_CH - 1);
      pl = $urandom_range(0, 1);
      pairk = ($urandom_range(0, 3) == 0) && k < 299;
      row.lun = 9'(l); row.plane = 1'(pl); row.block = 9'($urandom_range(0, 1)); row.page = 7'd2;
      for (int j = 0; j < (pairk ? 2 : 1); j++) begin
        s   = $urandom_range(0, 3);
        col = 8 * $urandom_range(0, 255);
        dt  = $urandom_range(0, 3);
        m = '0;
        m.llun = LLUN_W'(l);
        m.msg.is_task = 1;
        m.msg.tsk.ins.dtype = dist_e'(dt); m.msg.tsk.ins.row = row;
        m.msg.tsk.ins.fv_dim = 3'(FVD); m.msg.tsk.ins.fv_prec = 4'd7;
        m.msg.tsk.ins.page_loc = pairk && j == 0;
        m.msg.tsk.col = COL_W'(col); m.msg.tsk.qslot = QSLOT_W'(s); m.msg.tsk.qid = QID_W'(s);
        m.msg.tsk.vid = VID_W'(8 * (k * 2 + j) + l);
        exp_d[8 * (k * 2 + j) + l] = ref_dist_at(dt, s, row, col, FVD);
        exp_q[8 * (k * 2 + j) + l] = s;
        pend_lun[l]++;
        n_sent++;
        send(m);
      end
      if (pairk) k++;
    end
    wait (n_got == n_sent);
    cycles = ($time - t0) / 10;
    repeat (20) @(posedge clk);
    checks++;
    if (exp_d.size() != 0) begin failures++; $display("%0d results missing", exp_d.size()); end
    checks++;
    if (cycles < n_words + n_sent + n_got) begin
      failures++; $display("bus used %0d cycles for %0d transfers", cycles, n_words + n_sent + n_got);
    end
    checks++;
    for (int l = 0; l < LUN_PER_CH; l++) if (!seen_busy[l] || lun_busy[l]) n_busy_err++;
    if (n_busy_err != 0) begin failures++; $display("lun_busy wrong for %0d LUNs", n_busy_err); end
    checks++;
    if (n_bp == 0) failures++;
    $display("tasks=%0d results=%0d cycles=%0d backpressure=%0d", n_sent, n_got, cycles, n_bp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
