// tb_vgenerator: self-checking testbench of the Vgenerator (QP Reader, OFS/NBR/LUN Fetchers,
// Vgen CTR and the Pref Unit inside it).
//
// A DRAM model holds the query property table and the LUNCSR arrays of a degree-6 graph.
// Iteration 1 (speculation on): every non-speculative entry must be exactly one (query,
// neighbour of the entry vertex, LUN of the neighbour), a query marked finished (all-ones QPT
// word) must produce nothing, and the speculative entries must be second-order neighbours that
// are not first-order ones, at most PREF_K per query, none twice. Iteration 2 moves every query
// to a neighbour; each (query, vertex) pair searched speculatively in iteration 1 must now be
// dropped (spec_hits) and all the others dispatched. Iteration 3 pulses spec_stop early and
// checks that the Pref Unit stops within a bounded number of cycles. The query buffer write and
// read ports are checked on the side. The Allocator side applies random backpressure.
// The fetch pipeline and speculative hits follow the paper; the table layouts and the 20-cycle
// stop bound checked here are this design's choices.
module tb_vgenerator;
  import ndsearch_pkg::*;
  import ndsearch_tb_pkg::*;

  localparam int NV = 200, DEG = 6, NQ = 12;
  localparam int QPT = 32'h0, OFS = 32'h1000, NBR = 32'h2000, LUNA = 32'h4000;
  localparam int OFFS [DEG] = '{1, 3, 8, 21, 55, 144};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [31:0] qpt_base = QPT, ofs_base = OFS, nbr_base = NBR, lun_base = LUNA;
  logic [QID_W:0] n_query = NQ;
  logic [2:0] fv_dim = 3'd2;
  logic start, spec_en, spec_stop, alloc_done, done;
  logic [31:0] ns_count, spec_count, spec_hits;
  logic qw_en;
  logic [QID_W-1:0] qw_qid, qr_qid;
  logic [WIDX_W-1:0] qw_widx, qr_widx;
  logic [DATA_W-1:0] qw_data, qr_data;
  logic dr_req_valid, dr_req_ready, dr_resp_valid;
  logic [31:0] dr_req_addr, dr_resp_data;
  logic out_valid, out_ready;
  nbr_entry_t out_entry;

  vgenerator dut (.*);

  int checks = 0, failures = 0;

  // DRAM
  int unsigned mem [int unsigned];
  int unsigned dq [$];
  int dl [$];
  int cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    dr_resp_valid <= 1'b0;
    if (dr_req_valid && dr_req_ready) begin dq.push_back(dr_req_addr); dl.push_back(cyc + 2); end
    if (dq.size() > 0 && dl[0] <= cyc) begin
      int unsigned a;
      a = dq.pop_front();
      void'(dl.pop_front());
      dr_resp_valid <= 1'b1;
      dr_resp_data  <= mem.exists(a) ? mem[a] : 32'hBAD0_BAD0;
    end
    dr_req_ready <= ($urandom_range(0, 3) != 0);
    out_ready    <= ($urandom_range(0, 2) != 0);
  end

  function automatic int nb(int v, int k);
    return (v + OFFS[k]) % NV;
  endfunction
  function automatic int lun_of(int v);
    return (v * 11) % N_LUN;
  endfunction
  function automatic bit is_nb(int v, int u);
    for (int k = 0; k < DEG; k++) if (nb(v, k) == u) return 1;
    return 0;
  endfunction
  function automatic bit is_nb2(int v, int u);
    for (int k = 0; k < DEG; k++) if (is_nb(nb(v, k), u)) return 1;
    return 0;
  endfunction

  // entries seen in the current iteration
  int ns_seen [int];     // key q*NV+v
  int sp_seen [int];
  int sp_prev [int];
  int sp_per_q [NQ];
  int entry [NQ];

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int q, v, key;
    q = int'(out_entry.qid); v = int'(out_entry.nid); key = q * NV + v;
    checks++;
    if (q >= NQ || v >= NV || int'(out_entry.lid) != lun_of(v)) begin
      failures++; $display("bad entry q=%0d v=%0d lid=%0d", q, v, out_entry.lid);
    end else if (!out_entry.spec) begin
      if (!is_nb(entry[q], v) || ns_seen.exists(key) || sp_prev.exists(key) || alloc_done) begin
        failures++; $display("bad non-speculative entry q=%0d v=%0d", q, v);
      end
      ns_seen[key] = 1;
    end else begin
      sp_per_q[q]++;
      if (!alloc_done || !is_nb2(entry[q], v) || is_nb(entry[q], v) || v == entry[q] ||
          sp_seen.exists(key) || sp_per_q[q] > 8) begin
        failures++; $display("bad speculative entry q=%0d v=%0d", q, v);
      end
      sp_seen[key] = 1;
    end
  end

  initial begin
    #10000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_iter(input int it, input bit early_stop);
    int exp_hits, t0;
    ns_seen.delete();
    sp_prev = sp_seen;
    sp_seen.delete();
    for (int q = 0; q < NQ; q++) begin
      sp_per_q[q] = 0;
      mem[QPT + q] = (q == 5) ? 32'hFFFF_FFFF : 32'(entry[q]);
    end
    exp_hits = 0;
    for (int q = 0; q < NQ; q++)
      if (q != 5) for (int k = 0; k < DEG; k++) if (sp_prev.exists(q * NV + nb(entry[q], k))) exp_hits++;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    wait (alloc_done);
    checks++;
    if (int'(ns_count) != ns_seen.size() || int'(ns_count + spec_hits) != (NQ - 1) * DEG ||
        int'(spec_hits) != exp_hits) begin
      failures++;
      $display("iteration %0d: ns=%0d seen=%0d hits=%0d expected hits=%0d", it, ns_count,
               ns_seen.size(), spec_hits, exp_hits);
    end
    if (early_stop) begin
      repeat (30) @(negedge clk);
      spec_stop = 1; t0 = cyc;
      @(negedge clk); spec_stop = 0;
      wait (done);
      checks++;
      if (cyc - t0 > 20) begin failures++; $display("spec_stop took %0d cycles", cyc - t0); end
    end
    wait (done);
    @(negedge clk);
    checks++;
    if (int'(spec_count) != sp_seen.size() || (spec_en && !early_stop && spec_count == 0)) begin
      failures++; $display("iteration %0d: spec_count %0d seen %0d", it, spec_count, sp_seen.size());
    end
    $display("iteration %0d: ns=%0d spec=%0d hits=%0d", it, ns_count, spec_count, spec_hits);
  endtask

  initial begin
    start = 0; spec_stop = 0; spec_en = 1; qw_en = 0; qw_qid = 0; qw_widx = 0; qw_data = 0;
    qr_qid = 0; qr_widx = 0;
    for (int v = 0; v < NV; v++) begin
      mem[OFS + v] = v * DEG;
      for (int k = 0; k < DEG; k++) mem[NBR + v * DEG + k] = nb(v, k);
      mem[LUNA + v] = lun_of(v);
    end
    mem[OFS + NV] = NV * DEG;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // query buffer
    for (int q = 0; q < NQ; q++)
      for (int w = 0; w < 4; w++) begin
        @(negedge clk); qw_en = 1; qw_qid = QID_W'(q); qw_widx = WIDX_W'(w); qw_data = query_word(q, w);
      end
    @(negedge clk); qw_en = 0;
    for (int q = 0; q < NQ; q++)
      for (int w = 0; w < 4; w++) begin
        qr_qid = QID_W'(q); qr_widx = WIDX_W'(w);
        #1;
        checks++;
        if (qr_data != query_word(q, w)) failures++;
      end
    for (int q = 0; q < NQ; q++) entry[q] = (q * 17) % NV;
    run_iter(1, 0);
    for (int q = 0; q < NQ; q++) entry[q] = nb(entry[q], q % 3);
    run_iter(2, 0);
    for (int q = 0; q < NQ; q++) entry[q] = nb(entry[q], 1);
    run_iter(3, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
