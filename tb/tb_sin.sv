// tb_sin: self-checking testbench of one SiN chip (two LUN-level accelerators) with its four
// NAND planes.
//
// Checks the chip-level steering: commands go to the LUN named by cmd_llun (both LUNs are
// loaded with different query vectors in the same slots, so a mis-steered task gives a wrong
// distance), cmd_ready follows the addressed LUN, busy is reported per LUN, and the output-buffer
// read back follows ob_lun/ob_sel. Each task's result must come back once, from the right
// buffer, with the reference distance.
// Two LUN accelerators per SiN follow the paper; the steering it checks is this design's choice.
module tb_sin;
  import ndsearch_pkg::*;
  import ndsearch_tb_pkg::*;

  localparam int FVD = 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_llun, cmd_ready, ob_lun, ob_sel, ob_pop;
  lun_msg_t cmd;
  logic busy [2];
  result_t ob_data;
  logic [7:0] ob_count [4];
  logic sense_req [4], sense_done [4];
  row_addr_t sense_row [4];
  logic rd_req [8], rd_vld [8];
  logic [COL_W-1:0] rd_col [8];
  logic [CW_W-1:0] rd_cw [8];

  sin dut (.*);

  for (genvar p = 0; p < 4; p++) begin : g_pl
    nand_plane_model #(.T_R(15)) u_pl (
      .clk, .sense_req(sense_req[p]), .sense_row(sense_row[p]), .sense_done(sense_done[p]),
      .rd_req(rd_req[2*p +: 2]), .rd_col(rd_col[2*p +: 2]), .rd_vld(rd_vld[2*p +: 2]),
      .rd_cw(rd_cw[2*p +: 2]));
  end

  int checks = 0, failures = 0;
  int signed exp_d [int];
  int exp_b [int];
  int n_sent = 0, n_got = 0;
  bit seen_busy [2];

  // query of slot s in LUN u
  function automatic int qof(int u, int s);
    return 10 * u + s;
  endfunction

  task automatic send(input int u, input lun_msg_t m);
    cmd = m; cmd_llun = 1'(u); cmd_valid = 1;
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 0;
  endtask

  initial begin
    ob_pop = 0; ob_sel = 0; ob_lun = 0; seen_busy[0] = 0; seen_busy[1] = 0;
    wait (rst_n);
    forever begin
      @(posedge clk); #1;
      ob_pop = 0;
      {ob_lun, ob_sel} = 2'($urandom_range(0, 3));
      #1;
      if (busy[0]) seen_busy[0] = 1;
      if (busy[1]) seen_busy[1] = 1;
      if (ob_count[{ob_lun, ob_sel}] != 0) begin
        result_t r;
        r = ob_data;
        ob_pop = 1;
        n_got++;
        checks++;
        if (!exp_d.exists(int'(r.vid))) begin
          failures++; $display("unexpected result vid=%0d", r.vid);
        end else begin
          if (r.distance != exp_d[int'(r.vid)] || r.ecc_fail || exp_b[int'(r.vid)] != int'({ob_lun, ob_sel})) begin
            failures++;
            $display("vid %0d: d=%0d exp %0d buffer %0d exp %0d", r.vid, r.distance, exp_d[int'(r.vid)],
                     {ob_lun, ob_sel}, exp_b[int'(r.vid)]);
          end
          exp_d.delete(int'(r.vid));
        end
      end
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    lun_msg_t m;
    cmd_valid = 0; cmd = '0; cmd_llun = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int u = 0; u < 2; u++)
      for (int s = 0; s < 4; s++)
        for (int w = 0; w < (1 << FVD); w++) begin
          m = '0;
          m.qw.qslot = QSLOT_W'(s); m.qw.fv_dim = 3'(FVD); m.qw.widx = WIDX_W'(w);
          m.qw.data = query_word(qof(u, s), w);
          send(u, m);
        end
    for (int k = 0; k < 200; k++) begin
      int u, s, col, dt;
      row_addr_t row;
      u = $urandom_range(0, 1);
      s = $urandom_range(0, 3);
      row.lun = 9'(u); row.plane = 1'($urandom_range(0, 1)); row.block = 9'($urandom_range(0, 3));
      row.page = 7'($urandom_range(0, 1));
      col = 2 * $urandom_range(0, 1000);
      dt  = $urandom_range(0, 3);
      m = '0;
      m.is_task = 1;
      m.tsk.ins.dtype = dist_e'(dt); m.tsk.ins.row = row; m.tsk.ins.fv_dim = 3'(FVD);
      m.tsk.ins.fv_prec = 4'd7;
      m.tsk.col = COL_W'(col); m.tsk.qslot = QSLOT_W'(s); m.tsk.qid = QID_W'(qof(u, s));
      m.tsk.vid = VID_W'(k);
      exp_d[k] = ref_dist_at(dt, qof(u, s), row, col, FVD);
      exp_b[k] = 2 * u + int'(row.plane);
      n_sent++;
      send(u, m);
    end
    wait (n_got == n_sent);
    repeat (10) @(posedge clk);
    checks++;
    if (exp_d.size() != 0) failures++;
    checks++;
    if (!seen_busy[0] || !seen_busy[1] || busy[0] || busy[1]) begin
      failures++; $display("busy flags wrong");
    end
    $display("tasks=%0d results=%0d", n_sent, n_got);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
