// tb_allocator: self-checking testbench of the Allocator (Dispatcher + Alloc CTR).
//
// Feeds (query, neighbour, LUN) entries, answers the BLK-array reads from a DRAM model and the
// query-buffer reads from the reference query words, and acts as the 32 Flash CTRs: it keeps a
// model of every LUN's query queue, filled from the query-word messages, and a per-LUN busy
// flag that stays high for a while after each task. For every task it checks the channel and
// LUN routing, the physical row and column against the static mapping, the instruction fields,
// and that the query slot named by the task holds the task's query vector. pageLocBit must only
// be set when the LUN's next task names the same page. Phase 2 sends 40 different queries to
// one LUN with 128-word vectors (24 slots), so the query queue must overflow and be reused
// only after the LUN has gone idle. Every entry must come out as exactly one task.
// What is checked from the paper: grouping by LUN, addresses from the LUN/BLK arrays, pageLocBit.
// The overflow rule and ordering checked are this design's choices.
module tb_allocator;
  import ndsearch_pkg::*;
  import ndsearch_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [31:0] blk_base = 32'h100;
  dist_e dtype = DIST_IP;
  logic [2:0] fv_dim;
  logic [3:0] fv_prec = 4'd7;
  logic in_valid, in_ready;
  nbr_entry_t in_entry;
  logic [QID_W-1:0] qr_qid;
  logic [WIDX_W-1:0] qr_widx;
  logic [DATA_W-1:0] qr_data;
  logic dr_req_valid, dr_req_ready, dr_resp_valid;
  logic [31:0] dr_req_addr, dr_resp_data;
  logic out_valid, out_ready, idle;
  logic [$clog2(N_CH)-1:0] out_ch;
  ch_msg_t out_msg;
  logic lun_busy [N_LUN];

  allocator dut (.*);

  assign qr_data = query_word(int'(qr_qid), int'(qr_widx));

  int checks = 0, failures = 0;

  function automatic int blk_of(int v);
    return (v * 7 + 3) % BLOCKS_PER_PLANE;
  endfunction

  // DRAM (BLK array), random ready, 2..5 cycle latency, in order
  int unsigned dq [$];
  int dlat [$];
  int cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    dr_resp_valid <= 1'b0;
    if (dr_req_valid && dr_req_ready) begin
      dq.push_back(dr_req_addr);
      dlat.push_back(cyc + $urandom_range(2, 5));
    end
    if (dq.size() > 0 && dlat[0] <= cyc) begin
      int unsigned a;
      a = dq.pop_front();
      void'(dlat.pop_front());
      dr_resp_valid <= 1'b1;
      dr_resp_data  <= 32'(blk_of(int'(a - blk_base)));
    end
    dr_req_ready <= ($urandom_range(0, 2) != 0);
    out_ready    <= ($urandom_range(0, 3) != 0);
  end

  // Flash CTR / LUN model
  logic [63:0] qqm [N_LUN][3072];
  int busy_cnt [N_LUN];
  task_t last_t [N_LUN];
  bit    last_v [N_LUN];
  int n_tasks = 0, n_ploc = 0, n_ovf = 0, n_qw = 0;
  int sent [int];          // key qid*4096+vid -> count
  int got  [int];
  initial for (int l = 0; l < N_LUN; l++) begin busy_cnt[l] = 0; last_v[l] = 0; lun_busy[l] = 0; end

  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < N_LUN; l++) begin
      if (busy_cnt[l] > 0) busy_cnt[l]--;
      lun_busy[l] <= (busy_cnt[l] > 0);
    end
    if (dut.st == 4'(3)) n_ovf++;
    if (out_valid && out_ready) begin
      int l;
      l = int'(out_ch) * LUN_PER_CH + int'(out_msg.llun);
      if (!out_msg.msg.is_task) begin
        qword_t w;
        w = out_msg.msg.qw;
        n_qw++;
        checks++;
        if (busy_cnt[l] > 0 && w.widx == 0 && int'(w.qslot) == 0 && last_v[l]) begin
          // slot 0 reused while tasks may still be queued
          failures++; $display("LUN %0d: query queue restarted while busy", l);
        end
        qqm[l][(int'(w.qslot) << w.fv_dim) + int'(w.widx)] = w.data;
      end else begin
        task_t t;
        row_addr_t er;
        int ec, key;
        t = out_msg.msg.tsk;
        n_tasks++;
        busy_cnt[l] = 40;
        vertex_addr(t.vid, int'(fv_dim), l, blk_of(int'(t.vid)), er, ec);
        checks++;
        if (t.ins.row != er || int'(t.col) != ec || t.ins.dtype != dtype ||
            t.ins.fv_dim != fv_dim || t.ins.fv_prec != fv_prec) begin
          failures++;
          $display("task q=%0d v=%0d LUN %0d: row %h col %0d, expected %h %0d", t.qid, t.vid, l,
                   t.ins.row, t.col, er, ec);
        end
        for (int w = 0; w < (1 << fv_dim); w++) begin
          checks++;
          if (qqm[l][(int'(t.qslot) << fv_dim) + w] != query_word(int'(t.qid), w)) begin
            failures++;
            $display("task q=%0d LUN %0d slot %0d word %0d: wrong query data", t.qid, l, t.qslot, w);
            break;
          end
        end
        if (last_v[l] && last_t[l].ins.page_loc) begin
          checks++;
          n_ploc++;
          if (last_t[l].ins.row != t.ins.row) begin
            failures++; $display("pageLocBit set but next task on another page (LUN %0d)", l);
          end
        end
        last_t[l] = t; last_v[l] = 1;
        key = int'(t.qid) * 4096 + int'(t.vid);
        got[key] = got.exists(key) ? got[key] + 1 : 1;
      end
    end
  end

  task automatic push_entry(int q, int v, int lid, bit spec);
    int key;
    in_entry.qid = QID_W'(q); in_entry.nid = VID_W'(v); in_entry.lid = LUNID_W'(lid);
    in_entry.spec = spec;
    in_valid = 1;
    do @(posedge clk); while (!in_ready);
    #1 in_valid = 0;
    key = q * 4096 + v;
    sent[key] = sent.exists(key) ? sent[key] + 1 : 1;
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_entry = '0; fv_dim = 3'd2;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // phase 1: random entries over many LUNs, small vectors, neighbours clustered on pages
    for (int i = 0; i < 600; i++) begin
      int v, lid;
      v   = $urandom_range(0, 4095);
      lid = (v / 64) % 64 * 4 + $urandom_range(0, 1);
      push_entry($urandom_range(0, 200), v, lid, $urandom_range(0, 3) == 0);
    end
    wait (idle);
    repeat (50) @(posedge clk);
    #1;
    // phase 2: large vectors, 40 queries on one LUN: the 24-slot queue overflows
    fv_dim = 3'd7;
    for (int i = 0; i < 120; i++) begin
      push_entry(300 + i % 40, 16 * (i % 3) + i / 40, 77, 0);
    end
    wait (idle);
    repeat (100) @(posedge clk);
    checks++;
    if (sent.size() != got.size()) begin
      failures++; $display("distinct pairs sent %0d got %0d", sent.size(), got.size());
    end
    foreach (sent[k]) begin
      checks++;
      if (!got.exists(k) || got[k] != sent[k]) begin
        failures++; $display("pair q=%0d v=%0d sent %0d times, tasks %0d", k / 4096, k % 4096, sent[k],
                             got.exists(k) ? got[k] : 0);
      end
    end
    checks++;
    if (n_ovf == 0 || n_ploc == 0) begin
      failures++; $display("mechanism missing: overflow cycles %0d pageLocBit %0d", n_ovf, n_ploc);
    end
    $display("tasks=%0d query words=%0d pageLocBit=%0d overflow cycles=%0d", n_tasks, n_qw, n_ploc, n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
