// ndsearch_pkg: sizes, field layouts and message types shared by the SearSSD RTL.
//
// The flash organisation (32 channels, 4 chips per channel, 2 planes per LUN, 512 blocks per
// plane, 128 pages per block, 16 KB pages) and the <Search Page> instruction layout (2-bit
// distance type, 26-bit row address, 3-bit fv_dim, 4-bit fv_prec, 1-bit pageLocBit) follow the
// paper. The encodings inside those fields, the ID widths and the message structs are this
// design's own choices:
//   * row address = {LUN[8:0], plane, block[8:0], page[6:0]}  (7+9+1 = 17 bits below the LUN
//     field; the remaining 9 bits name one of 256 global LUNs, top bit spare),
//   * a feature vector has (8 << fv_dim) signed 8-bit elements, i.e. (1 << fv_dim) 64-bit words,
//   * fv_prec holds the element width minus one (7 for the 8-bit datapath built here),
//   * distance codes: 0 squared Euclidean, 1 angular (negated dot product of normalised
//     vectors), 2 inner product (negated), 3 Manhattan.
package ndsearch_pkg;

  // ---- flash organisation --------------------------------------------------------------
  localparam int N_CH           = 32;
  localparam int SIN_PER_CH     = 4;
  localparam int LUN_PER_SIN    = 2;
  localparam int LUN_PER_CH     = SIN_PER_CH * LUN_PER_SIN;   // 8
  localparam int N_LUN          = N_CH * LUN_PER_CH;          // 256
  localparam int PLANES_PER_LUN = 2;
  localparam int N_PLANE        = N_LUN * PLANES_PER_LUN;     // 512
  localparam int BLOCKS_PER_PLANE = 512;
  localparam int PAGES_PER_BLOCK  = 128;
  localparam int PAGE_BYTES       = 16384;

  // ---- datapath ------------------------------------------------------------------------
  localparam int DATA_W     = 64;                  // one decoded page-buffer word
  localparam int ELEM_W     = 8;                   // feature element width
  localparam int LANES      = DATA_W / ELEM_W;     // elements per word
  localparam int CW_W       = 78;                  // LDPC codeword carrying one data word
  localparam int PAGE_WORDS = PAGE_BYTES / (DATA_W / 8);  // 2048
  localparam int COL_W      = $clog2(PAGE_WORDS);  // 11
  localparam int MAX_FV_DIM = 7;                   // 1024 elements, 128 words
  localparam int WIDX_W     = MAX_FV_DIM;          // word index inside one vector
  localparam int DIST_W     = 32;

  // ---- identifiers ---------------------------------------------------------------------
  localparam int VID_W   = 32;                     // vertex (logical) index
  localparam int QID_W   = 11;                     // query index in a batch of 2048
  localparam int LUNID_W = $clog2(N_LUN);          // 8
  localparam int BLK_W   = $clog2(BLOCKS_PER_PLANE);
  localparam int PAGE_W  = $clog2(PAGES_PER_BLOCK);
  localparam int QSLOT_W = 12;                     // query-queue slot (24 KB / 8 B)
  localparam int LLUN_W  = $clog2(LUN_PER_CH);     // LUN inside a channel
  localparam int ROW_W   = 26;

  typedef enum logic [1:0] {
    DIST_L2  = 2'd0,
    DIST_ANG = 2'd1,
    DIST_IP  = 2'd2,
    DIST_L1  = 2'd3
  } dist_e;

  typedef struct packed {
    logic [ROW_W-2-BLK_W-PAGE_W:0]     lun;   // 9 bits
    logic                              plane;
    logic [BLK_W-1:0]                  block;
    logic [PAGE_W-1:0]                 page;
  } row_addr_t;

  // <Search Page> instruction, most significant field first as drawn in the paper.
  typedef struct packed {
    dist_e      dtype;
    row_addr_t  row;
    logic [2:0] fv_dim;
    logic [3:0] fv_prec;
    logic       page_loc;
  } search_page_t;

  // One candidate-distance task held in a Vaddr queue.
  typedef struct packed {
    search_page_t        ins;
    logic [COL_W-1:0]    col;     // first word of the vector in the page
    logic [QSLOT_W-1:0]  qslot;   // slot of the query vector in the query queue
    logic [QID_W-1:0]    qid;
    logic [VID_W-1:0]    vid;
    logic                spec;    // speculative (prefetched second-order neighbour)
  } task_t;

  // One word of a query feature vector written into a query queue.
  typedef struct packed {
    logic [QSLOT_W-1:0] qslot;
    logic [2:0]         fv_dim;
    logic [WIDX_W-1:0]  widx;
    logic [DATA_W-1:0]  data;
  } qword_t;

  // Message carried by a channel bus from the Flash CTR to one LUN accelerator.
  typedef struct packed {
    logic   is_task;
    task_t  tsk;
    qword_t qw;
  } lun_msg_t;

  // Message from the Allocator to a Flash CTR.
  typedef struct packed {
    logic [LLUN_W-1:0] llun;
    lun_msg_t          msg;
  } ch_msg_t;

  // Result entry read back from an output buffer.
  typedef struct packed {
    logic [QID_W-1:0]        qid;
    logic [VID_W-1:0]        vid;
    logic signed [DIST_W-1:0] distance;
    logic                    spec;
    logic                    ecc_fail;
  } result_t;

  // (query, neighbour, LUN) entry of the Vgen NBR / Pref buffers.
  typedef struct packed {
    logic [QID_W-1:0]   qid;
    logic [VID_W-1:0]   nid;
    logic [LUNID_W-1:0] lid;
    logic               spec;
  } nbr_entry_t;


  // LDPC cycle code (see ldpc_bf_decoder): 13 checks, each codeword bit on exactly two of them.
  localparam int LDPC_NCHK = 13;

  function automatic logic [LDPC_NCHK-1:0] ldpc_bit_checks(input int b);
    logic [LDPC_NCHK-1:0] m;
    int d;
    m = '0;
    if (b >= 66) begin
      m[0]      = 1'b1;
      m[b - 65] = 1'b1;
    end else begin
      d = 0;
      for (int i = 1; i <= 12; i++)
        for (int j = i + 1; j <= 12; j++) begin
          if (d == b) begin
            m[i] = 1'b1;
            m[j] = 1'b1;
          end
          d++;
        end
    end
    return m;
  endfunction

  typedef logic [CW_W-1:0][LDPC_NCHK-1:0] ldpc_bmask_t;
  typedef logic [LDPC_NCHK-1:0][CW_W-1:0] ldpc_cmask_t;

  function automatic ldpc_bmask_t ldpc_bit_table();
    ldpc_bmask_t t;
    for (int b = 0; b < CW_W; b++) t[b] = ldpc_bit_checks(b);
    return t;
  endfunction

  function automatic ldpc_cmask_t ldpc_check_table();
    ldpc_cmask_t t;
    logic [LDPC_NCHK-1:0] m;
    for (int b = 0; b < CW_W; b++) begin
      m = ldpc_bit_checks(b);
      for (int c = 0; c < LDPC_NCHK; c++) t[c][b] = m[c];
    end
    return t;
  endfunction

  // H matrix by bit (checks of each bit) and by check (bits of each check), computed once.
  localparam ldpc_bmask_t LDPC_BIT = ldpc_bit_table();
  localparam ldpc_cmask_t LDPC_CHK = ldpc_check_table();
endpackage
