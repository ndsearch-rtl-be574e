// ndsearch_tb_pkg: reference functions shared by the testbenches.
//
// Everything here is written independently of the RTL: the LDPC encoder of the cycle code
// (data bit d is the d-th pair (i,j), 1 <= i < j <= 12; parity bit 65+j is the XOR of the data
// bits touching node j), the synthetic flash contents (a hash of row address and word), the
// query contents, the physical-address mapping of a vertex and the reference distances.
// The reference functions restate this design's own encodings (address split, code, distances)
// independently of the RTL.
package ndsearch_tb_pkg;
  import ndsearch_pkg::*;

  function automatic logic [CW_W-1:0] ldpc_encode(input logic [DATA_W-1:0] d);
    logic [CW_W-1:0] cw;
    int k;
    cw = '0;
    cw[DATA_W-1:0] = d;
    k = 0;
    for (int i = 1; i <= 12; i++)
      for (int j = i + 1; j <= 12; j++) begin
        if (cw[k]) begin
          cw[65 + i] = ~cw[65 + i];
          cw[65 + j] = ~cw[65 + j];
        end
        k++;
      end
    return cw;
  endfunction

  function automatic logic [63:0] mix64(input logic [63:0] x);
    logic [63:0] z;
    z = x + 64'h9E37_79B9_7F4A_7C15;
    z = (z ^ (z >> 30)) * 64'hBF58_476D_1CE4_E5B9;
    z = (z ^ (z >> 27)) * 64'h94D0_49BB_1331_11EB;
    return z ^ (z >> 31);
  endfunction

  // Contents of word col of the page at row (as stored in flash, before encoding).
  function automatic logic [DATA_W-1:0] flash_word(input row_addr_t row, input int col);
    return mix64({6'd0, row, 32'(col)});
  endfunction

  function automatic logic [DATA_W-1:0] query_word(input int qid, input int w);
    return mix64(64'hABCD_0000_0000_0000 | (64'(qid) << 16) | 64'(w));
  endfunction

  // Static mapping: plane/page/column from the vertex index, LUN/block from the arrays.
  function automatic void vertex_addr(input longint vid, input int fv_dim, input int lun,
                                      input int blk, output row_addr_t row, output int col);
    longint vpp, p;
    vpp = longint'(PAGE_WORDS >> fv_dim);
    p   = vid / vpp;
    row.lun   = 9'(lun);
    row.plane = 1'(p % 2);
    row.block = 9'(blk);
    row.page  = 7'((p / 2 / N_LUN) % PAGES_PER_BLOCK);
    col       = int'((vid % vpp) << fv_dim);
  endfunction

  function automatic int signed elem(input logic [63:0] w, input int l);
    logic signed [7:0] e;
    e = w[8*l +: 8];
    return int'(e);
  endfunction

  function automatic int signed ref_dist(input int dtype, input logic [63:0] qv [],
                                         input logic [63:0] vv []);
    int signed s;
    s = 0;
    for (int w = 0; w < qv.size(); w++)
      for (int l = 0; l < 8; l++) begin
        int signed a, b;
        a = elem(qv[w], l);
        b = elem(vv[w], l);
        case (dtype)
          0: s += (a - b) * (a - b);
          1, 2: s += a * b;
          default: s += (a > b) ? a - b : b - a;
        endcase
      end
    if (dtype == 1 || dtype == 2) s = -s;
    return s;
  endfunction

  // Reference distance between query qid and the vertex at (row, col).
  function automatic int signed ref_dist_at(input int dtype, input int qid, input row_addr_t row,
                                            input int col, input int fv_dim);
    logic [63:0] qv [], vv [];
    int n;
    n  = 1 << fv_dim;
    qv = new[n];
    vv = new[n];
    for (int w = 0; w < n; w++) begin
      qv[w] = query_word(qid, w);
      vv[w] = flash_word(row, col + w);
    end
    return ref_dist(dtype, qv, vv);
  endfunction
endpackage
