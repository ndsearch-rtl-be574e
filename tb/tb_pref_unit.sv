// tb_pref_unit: self-checking testbench of the Pref Unit (speculative candidate selection).
//
// The NBR buffer (first-order neighbours of each query's entry vertex) is a testbench array and
// the offset, neighbour and LUN arrays sit in a DRAM model with random ready. For every query the
// expected picks are computed independently: count how often each second-order neighbour
// appears over the first-order lists, skip first-order neighbours, order by count (ties to the
// first seen) and keep the top PREF_K. The emitted speculative entries, their LUN IDs and the
// Pref row written afterwards (vertices, accepted mask, iteration number) must match. A second
// run is stopped part-way and must go idle within a few cycles.
// The paper gives the selection rule (most connections to first-order neighbours) and the forced
// stop; table sizes and ties are this design's choices.
module tb_pref_unit;
  import ndsearch_pkg::*;
  import ndsearch_tb_pkg::*;

  localparam int NV = 300, DEG = 5, NQ = 6, K = 8;
  localparam int OFS = 32'h1000, NBR = 32'h2000, LUNA = 32'h4000;
  localparam int OFFS [DEG] = '{1, 4, 9, 30, 77};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, stop, dr_req_valid, dr_req_ready, dr_resp_valid, out_valid, out_ready, row_wr, busy;
  logic [7:0] iter, row_gen;
  logic [17:0] nb_cnt;
  logic [31:0] ofs_base = OFS, nbr_base = NBR, lun_base = LUNA, dr_req_addr, dr_resp_data;
  logic [16:0] nb_addr;
  nbr_entry_t nb_data, out_entry;
  logic [QID_W-1:0] row_qid;
  logic [VID_W-1:0] row_nid [K];
  logic [K-1:0] row_valid;

  pref_unit #(.R_MAX(32), .CAND(32), .PREF_K(K), .NB_AW(17)) dut (.*);

  int checks = 0, failures = 0;

  function automatic int nb(int v, int k);
    return (v + OFFS[k] * (1 + v % 2)) % NV;
  endfunction
  function automatic int lun_of(int v);
    return (v * 13 + 7) % N_LUN;
  endfunction

  // NBR buffer
  nbr_entry_t nbuf [NQ * DEG];
  int entry [NQ];
  assign nb_data = nbuf[nb_addr];

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

  // reference picks
  int exp_pick [NQ][$];
  function automatic void reference(int q);
    int cand [$], cnt [$];
    bit first;
    exp_pick[q].delete();
    for (int i = 0; i < DEG; i++)
      for (int j = 0; j < DEG; j++) begin
        int u, f;
        u = nb(nb(entry[q], i), j);
        first = 0;
        for (int k = 0; k < DEG; k++) if (nb(entry[q], k) == u) first = 1;
        if (first) continue;
        f = -1;
        foreach (cand[c]) if (cand[c] == u) f = c;
        if (f >= 0) cnt[f]++;
        else begin cand.push_back(u); cnt.push_back(1); end
      end
    for (int p = 0; p < K && p < cand.size(); p++) begin
      int b;
      b = -1;
      foreach (cand[c]) if (cnt[c] > 0 && (b < 0 || cnt[c] > cnt[b])) b = c;
      exp_pick[q].push_back(cand[b]);
      cnt[b] = 0;
    end
  endfunction

  int got [NQ][$];
  int rows = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      int q;
      q = int'(out_entry.qid);
      checks++;
      if (!out_entry.spec || int'(out_entry.lid) != lun_of(int'(out_entry.nid))) begin
        failures++; $display("entry q=%0d v=%0d: spec %b lid %0d", q, out_entry.nid, out_entry.spec, out_entry.lid);
      end
      got[q].push_back(int'(out_entry.nid));
    end
    if (row_wr) begin
      int q;
      q = int'(row_qid);
      rows++;
      checks++;
      if (row_gen != iter || row_valid != K'((1 << got[q].size()) - 1)) begin
        failures++; $display("row q=%0d gen %0d valid %b", q, row_gen, row_valid);
      end
      for (int i = 0; i < got[q].size(); i++) begin
        checks++;
        if (int'(row_nid[i]) != got[q][i]) begin failures++; $display("row q=%0d slot %0d", q, i); end
      end
    end
  end

  initial begin
    #5000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    start = 0; stop = 0; iter = 8'd3; nb_cnt = '0;
    for (int v = 0; v < NV; v++) begin
      mem[OFS + v] = v * DEG;
      for (int k = 0; k < DEG; k++) mem[NBR + v * DEG + k] = nb(v, k);
      mem[LUNA + v] = lun_of(v);
    end
    mem[OFS + NV] = NV * DEG;
    for (int q = 0; q < NQ; q++) begin
      entry[q] = (q * 41 + 5) % NV;
      for (int k = 0; k < DEG; k++)
        nbuf[q * DEG + k] = '{qid: QID_W'(q), nid: VID_W'(nb(entry[q], k)), lid: '0, spec: 1'b0};
      reference(q);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    nb_cnt = 18'(NQ * DEG);
    start = 1;
    @(negedge clk);
    start = 0;
    wait (!busy);
    @(negedge clk);
    for (int q = 0; q < NQ; q++) begin
      checks++;
      if (got[q] != exp_pick[q]) begin
        failures++;
        $display("query %0d: got %p expected %p", q, got[q], exp_pick[q]);
      end
    end
    checks++;
    if (rows != NQ) begin failures++; $display("rows written %0d", rows); end
    // stopped run
    for (int q = 0; q < NQ; q++) got[q].delete();
    iter = 8'd4;
    start = 1;
    @(negedge clk);
    start = 0;
    repeat (60) @(negedge clk);
    stop = 1; t0 = cyc;
    @(negedge clk);
    stop = 0;
    wait (!busy);
    checks++;
    if (cyc - t0 > 12) begin failures++; $display("stop took %0d cycles", cyc - t0); end
    checks++;
    if (rows >= 2 * NQ) begin failures++; $display("stopped run finished all queries"); end
    $display("rows=%0d", rows);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
