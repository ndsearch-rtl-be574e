// tb_searssd_top: end-to-end testbench of the full-size SearSSD (no parameter overrides).
//
// The testbench plays the parts the chip leaves outside: the embedded cores (firmware), the
// SSD DRAM and the 512 NAND planes.
//   * Graph: NV vertices, degree 6, feature vectors of 1024 signed 8-bit elements
//     (fv_dim = 7, 2 vectors per page). The LUN array puts each group of 32 vertices on one
//     LUN of a different channel; the BLK array gives every 4 vertices a new block, so each
//     plane keeps re-sensing pages and the two planes often want the same page number.
//   * Firmware: NQ queries, three iterations with speculation on. Each iteration it writes the
//     query property table, pulses start, checks every result distance against a reference
//     model of the flash contents, pulses spec_stop (early in iteration 2, to force a stop of
//     the Pref Unit; once all non-speculative results are back otherwise), waits for the
//     search to drain, and moves each query to its nearest result.
//   * DRAM: two in-order read ports with random ready and 3-cycle latency.
//   * NAND: a behavioural model of the 512 planes (shortened tR), with injected single-bit
//     errors on every plane and double-bit errors on some.
// Mechanisms counted (each must occur at least once): page-buffer hit, pageLocBit pair,
// multi-plane sense, ECC corrected, ECC fail, speculative dispatch, speculative hit, forced
// speculative stop, query-queue overflow, result backpressure, DRAM backpressure.
// It also checks that ns_count + spec_hits equals the number of (query, neighbour) pairs of
// the iteration, and that one task's distance takes at most the expected number of cycles.
// The organisation exercised (32 channels, 4 SiN, 2 LUNs) is the paper's; the graph, the DRAM and
// NAND models and their timing are this testbench's own.
module tb_searssd_top;
  import ndsearch_pkg::*;
  import ndsearch_tb_pkg::*;

  localparam int NV     = 256;
  localparam int DEG    = 6;
  localparam int NQ     = 64;
  localparam int FVD    = 7;
  localparam int NITER  = 3;
  localparam int QPT    = 32'h0000_0000;
  localparam int OFS    = 32'h0001_0000;
  localparam int NBR    = 32'h0002_0000;
  localparam int LUNA   = 32'h0003_0000;
  localparam int BLKA   = 32'h0004_0000;
  localparam int OFFS [DEG] = '{1, 3, 8, 21, 55, 144};

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic [31:0] qpt_base = QPT, ofs_base = OFS, nbr_base = NBR, lun_base = LUNA, blk_base = BLKA;
  logic [QID_W:0] n_query = NQ;
  logic [2:0] fv_dim = 3'(FVD);
  logic [3:0] fv_prec = 4'd7;
  dist_e dtype = DIST_L2;
  logic spec_en = 1'b1;
  logic start, spec_stop, alloc_done, vgen_done, search_idle;
  logic [31:0] ns_count, spec_count, spec_hits;
  logic qw_en;
  logic [QID_W-1:0] qw_qid;
  logic [WIDX_W-1:0] qw_widx;
  logic [DATA_W-1:0] qw_data;
  logic dr_req_valid [2], dr_req_ready [2], dr_resp_valid [2];
  logic [31:0] dr_req_addr [2], dr_resp_data [2];
  logic res_valid, res_ready;
  result_t res;
  logic sense_req [N_PLANE], sense_done [N_PLANE];
  row_addr_t sense_row [N_PLANE];
  logic rd_req [2*N_PLANE], rd_vld [2*N_PLANE];
  logic [COL_W-1:0] rd_col [2*N_PLANE];
  logic [CW_W-1:0] rd_cw [2*N_PLANE];

  searssd_top dut (.*);

  // ------------------------------------------------------------------ NAND planes
  nand_array_model #(.NP(N_PLANE), .T_R(20), .ERR_EVERY(29), .ERR2_EVERY(71)) u_nand (.*);

  // ------------------------------------------------------------------ DRAM
  int unsigned mem [int unsigned];
  int n_dram_bp = 0;
  for (genvar i = 0; i < 2; i++) begin : g_dr
    int unsigned q [$];
    int unsigned lat [$];
    int cyc = 0;
    initial begin dr_req_ready[i] = 0; dr_resp_valid[i] = 0; dr_resp_data[i] = 0; end
    always @(posedge clk) begin
      cyc <= cyc + 1;
      dr_resp_valid[i] <= 1'b0;
      if (dr_req_valid[i] && dr_req_ready[i]) begin
        q.push_back(dr_req_addr[i]);
        lat.push_back(cyc + 3);
      end
      if (dr_req_valid[i] && !dr_req_ready[i]) n_dram_bp++;
      if (q.size() > 0 && lat[0] <= cyc) begin
        int unsigned a;
        a = q.pop_front();
        void'(lat.pop_front());
        dr_resp_valid[i] <= 1'b1;
        dr_resp_data[i]  <= mem.exists(a) ? mem[a] : 32'hDEAD_BEEF;
      end
      dr_req_ready[i] <= ($urandom_range(0, 3) != 0);
    end
  end

  // ------------------------------------------------------------------ graph
  int nbrs [NV][DEG];
  int lun_of [NV], blk_of [NV];
  function automatic void build_graph();
    for (int v = 0; v < NV; v++) begin
      for (int k = 0; k < DEG; k++) nbrs[v][k] = (v + OFFS[k]) % NV;
      lun_of[v] = ((v / 32) * 36) % N_LUN;   // LUN 0, 36, 72, ... : eight channels
      blk_of[v] = 5 + v / 4;                   // a new block every two pages: planes re-sense
      mem[OFS + v] = v * DEG;
      for (int k = 0; k < DEG; k++) mem[NBR + v * DEG + k] = nbrs[v][k];
      mem[LUNA + v] = lun_of[v];
      mem[BLKA + v] = blk_of[v];
    end
    mem[OFS + NV] = NV * DEG;
  endfunction

  function automatic int signed expect_dist(int qid, int vid);
    row_addr_t row;
    int col;
    vertex_addr(vid, FVD, lun_of[vid], blk_of[vid], row, col);
    return ref_dist_at(int'(dtype), qid, row, col, FVD);
  endfunction

  // ------------------------------------------------------------------ results
  int checks = 0, failures = 0;
  int n_res = 0, n_res_ns = 0, n_res_spec = 0, n_eccfail = 0, n_res_bp = 0;
  int best_d [NQ], best_v [NQ];
  int signed dcache [int];

  always @(posedge clk) if (rst_n) begin
    if (res_valid && !res_ready) n_res_bp++;
    if (res_valid && res_ready) begin
      int q, v, key;
      q = int'(res.qid);
      v = int'(res.vid);
      n_res++;
      if (res.spec) n_res_spec++; else n_res_ns++;
      checks++;
      if (q >= NQ || v >= NV) begin
        failures++; $display("bad result q=%0d v=%0d", q, v);
      end else if (res.ecc_fail) begin
        n_eccfail++;
      end else begin
        key = q * NV + v;
        if (!dcache.exists(key)) dcache[key] = expect_dist(q, v);
        if (res.distance != dcache[key]) begin
          failures++;
          $display("distance q=%0d v=%0d got %0d exp %0d", q, v, res.distance, dcache[key]);
        end
        if (!res.spec && int'(res.distance) < best_d[q]) begin
          best_d[q] = res.distance; best_v[q] = v;
        end
      end
    end
  end
  always @(posedge clk) res_ready <= ($urandom_range(0, 4) != 0);

  // ------------------------------------------------------------------ mechanism monitors
  int n_hit = 0, n_pair = 0, n_mp = 0, n_ovf = 0, n_forced = 0, n_sense = 0;
  logic sensed [N_PLANE];
  logic rd_prev [2*N_PLANE];
  initial for (int p = 0; p < N_PLANE; p++) sensed[p] = 0;
  initial for (int p = 0; p < 2 * N_PLANE; p++) rd_prev[p] = 0;
  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < N_PLANE; p++) begin
      bit st0, st1;
      if (sense_req[p]) begin sensed[p] = 1; n_sense++; end
      if ((p % 2 == 0) && sense_req[p] && sense_req[p+1]) n_mp++;
      st0 = rd_req[2*p] && !rd_prev[2*p];
      st1 = rd_req[2*p+1] && !rd_prev[2*p+1];
      if (st0 && st1) n_pair++;
      if ((st0 || st1) && !sense_req[p]) begin
        if (!sensed[p]) n_hit++;
        sensed[p] = 0;
      end
    end
    for (int p = 0; p < 2 * N_PLANE; p++) rd_prev[p] = rd_req[p];
    if (dut.u_alloc.st == 4'(3)) n_ovf++;
  end

  initial begin
    #1200000;   // a full run ends near 700000
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------ firmware
  int entry [NQ];
  int n_corr = 0;
  int tot_spec = 0, tot_hits = 0;
  initial begin
    start = 0; spec_stop = 0; qw_en = 0; qw_qid = 0; qw_widx = 0; qw_data = 0;
    build_graph();
    repeat (4) @(posedge clk);
    rst_n = 1;
    for (int q = 0; q < NQ; q++) entry[q] = (q * 37) % NV;
    // query vectors into the Vgen Buffer
    for (int q = 0; q < NQ; q++)
      for (int w = 0; w < (1 << FVD); w++) begin
        @(negedge clk);
        qw_en = 1; qw_qid = QID_W'(q); qw_widx = WIDX_W'(w); qw_data = query_word(q, w);
      end
    @(negedge clk);
    qw_en = 0;
    for (int it = 0; it < NITER; it++) begin
      int t0, nres0;
      for (int q = 0; q < NQ; q++) begin
        mem[QPT + q] = entry[q];
        best_d[q] = 32'h7fff_ffff;
        best_v[q] = entry[q];
      end
      nres0 = n_res_ns;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      wait (alloc_done);
      checks++;
      if (ns_count + spec_hits != NQ * DEG) begin
        failures++; $display("iteration %0d: ns %0d + hits %0d != %0d", it, ns_count, spec_hits, NQ * DEG);
      end
      if (it == 1) begin
        // force the speculative stage to stop early
        repeat (200) @(negedge clk);
        if (dut.u_vgen.pu_busy) n_forced++;
        spec_stop = 1; @(negedge clk); spec_stop = 0;
      end else begin
        wait (n_res_ns - nres0 == int'(ns_count) || vgen_done);
        @(negedge clk);
        if (!vgen_done) begin
          if (dut.u_vgen.pu_busy) n_forced++;
          spec_stop = 1; @(negedge clk); spec_stop = 0;
        end
      end
      wait (vgen_done);
      repeat (4) @(negedge clk);
      wait (search_idle && !res_valid);
      repeat (20) @(negedge clk);
      checks++;
      if (n_res_ns - nres0 != int'(ns_count)) begin
        failures++; $display("iteration %0d: %0d non-spec results for %0d tasks", it, n_res_ns - nres0, ns_count);
      end
      tot_spec += spec_count;
      tot_hits += spec_hits;
      $display("iteration %0d done at %0t: ns=%0d spec=%0d hits=%0d results=%0d", it, $time,
               ns_count, spec_count, spec_hits, n_res);
      for (int q = 0; q < NQ; q++) entry[q] = best_v[q];
    end
    n_corr = u_nand.n_single;
    begin
      $display("hits=%0d pairs=%0d multi_plane=%0d senses=%0d overflow_cycles=%0d forced_stop=%0d",
               n_hit, n_pair, n_mp, n_sense, n_ovf, n_forced);
      $display("ecc corrected=%0d", n_corr);
      $display("spec dispatched=%0d spec hits=%0d ecc_fail=%0d res_bp=%0d dram_bp=%0d",
               tot_spec, tot_hits, n_eccfail, n_res_bp, n_dram_bp);
    end
    checks++;
    if (n_hit == 0)      begin failures++; $display("no page-buffer hit"); end
    checks++;
    if (n_pair == 0)     begin failures++; $display("no pageLocBit pair"); end
    checks++;
    if (n_mp == 0)       begin failures++; $display("no multi-plane sense"); end
    checks++;
    if (n_corr == 0)     begin failures++; $display("no ECC correction"); end
    checks++;
    if (n_eccfail == 0)  begin failures++; $display("no ECC fail"); end
    checks++;
    if (tot_spec == 0)   begin failures++; $display("no speculative dispatch"); end
    checks++;
    if (tot_hits == 0)   begin failures++; $display("no speculative hit"); end
    checks++;
    if (n_forced == 0)   begin failures++; $display("no forced speculative stop"); end
    checks++;
    if (n_ovf == 0)      begin failures++; $display("no query-queue overflow"); end
    checks++;
    if (n_res_bp == 0)   begin failures++; $display("no result backpressure"); end
    checks++;
    if (n_dram_bp == 0)  begin failures++; $display("no DRAM backpressure"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
