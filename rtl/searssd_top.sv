// searssd_top: SearSSD, the in-storage part of NDSearch.
//
// A batch of queries is searched one iteration at a time. In each iteration the Vgenerator
// reads each query's entry vertex and its neighbours from the LUNCSR arrays in the SSD's DRAM,
// the Allocator sorts the (query, neighbour) pairs by the LUN that stores the neighbour and turns
// them into <Search Page> tasks with physical addresses, each channel's Flash CTR delivers tasks
// and query vectors to the LUN-level accelerators of its four SiN chips, and the accelerators
// read the vertices from their planes, correct them with the LDPC decoders and compute the
// distances. The distances come back through the Flash CTRs as result entries
// {query, vertex, distance, spec, ecc_fail}. With speculation on, second-order neighbours are
// searched ahead while the controller gathers the results.
// Sizes follow the paper: 32 channels x 4 SiN x 2 LUN accelerators (256 LUNs, 512 planes,
// 512 MAC groups, 1024 LDPC decoders).
// Not built here and reached through the ports: the embedded cores (they write the query
// vectors and the query property table, pick the next entry vertices, pulse start, and pulse
// spec_stop when the non-speculative results of an iteration are all back), the DRAM (two read
// ports, 32-bit words, in-order answers), and the NAND planes with their page buffers
// (sense_* per plane, rd_* per plane and lane; plane index = 2*LUN + plane, lane index =
// 2*plane index + lane, LUN = 8*channel + 2*chip + LUN in chip). Results leave on res_*
// (valid/ready), the channels served round robin. search_idle is high when no task is queued,
// running or waiting in an output buffer, and the Allocator is empty.
module searssd_top
  import ndsearch_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // configuration (from the embedded cores)
  input  logic [31:0]        qpt_base,
  input  logic [31:0]        ofs_base,
  input  logic [31:0]        nbr_base,
  input  logic [31:0]        lun_base,
  input  logic [31:0]        blk_base,
  input  logic [QID_W:0]     n_query,
  input  logic [2:0]         fv_dim,
  input  logic [3:0]         fv_prec,
  input  dist_e              dtype,
  input  logic               spec_en,
  // iteration control and status
  input  logic               start,
  input  logic               spec_stop,
  output logic               alloc_done,
  output logic               vgen_done,
  output logic [31:0]        ns_count,
  output logic [31:0]        spec_count,
  output logic [31:0]        spec_hits,
  output logic               search_idle,
  // query vectors into the Vgen Buffer
  input  logic               qw_en,
  input  logic [QID_W-1:0]   qw_qid,
  input  logic [WIDX_W-1:0]  qw_widx,
  input  logic [DATA_W-1:0]  qw_data,
  // DRAM read ports: 0 Vgenerator, 1 Allocator
  output logic               dr_req_valid [2],
  output logic [31:0]        dr_req_addr  [2],
  input  logic               dr_req_ready [2],
  input  logic               dr_resp_valid [2],
  input  logic [31:0]        dr_resp_data  [2],
  // results to the embedded cores
  output logic               res_valid,
  output result_t            res,
  input  logic               res_ready,
  // NAND planes
  output logic               sense_req  [N_PLANE],
  output row_addr_t          sense_row  [N_PLANE],
  input  logic               sense_done [N_PLANE],
  output logic               rd_req     [2*N_PLANE],
  output logic [COL_W-1:0]   rd_col     [2*N_PLANE],
  input  logic               rd_vld     [2*N_PLANE],
  input  logic [CW_W-1:0]    rd_cw      [2*N_PLANE]
);
  localparam int CHW = $clog2(N_CH);

  // ---------------------------------------------------------------- Vgenerator
  logic               v_out_valid, v_out_ready;
  nbr_entry_t         v_out;
  logic [QID_W-1:0]   qr_qid;
  logic [WIDX_W-1:0]  qr_widx;
  logic [DATA_W-1:0]  qr_data;

  vgenerator u_vgen (
    .clk, .rst_n,
    .qpt_base, .ofs_base, .nbr_base, .lun_base, .n_query, .fv_dim,
    .start, .spec_en, .spec_stop,
    .alloc_done, .done(vgen_done), .ns_count, .spec_count, .spec_hits,
    .qw_en, .qw_qid, .qw_widx, .qw_data, .qr_qid, .qr_widx, .qr_data,
    .dr_req_valid(dr_req_valid[0]), .dr_req_addr(dr_req_addr[0]), .dr_req_ready(dr_req_ready[0]),
    .dr_resp_valid(dr_resp_valid[0]), .dr_resp_data(dr_resp_data[0]),
    .out_valid(v_out_valid), .out_entry(v_out), .out_ready(v_out_ready));

  // ---------------------------------------------------------------- Allocator
  logic           a_out_valid, a_idle;
  logic [CHW-1:0] a_out_ch;
  ch_msg_t        a_out;
  logic           fc_in_ready [N_CH];
  logic           lun_busy [N_LUN];

  allocator u_alloc (
    .clk, .rst_n, .blk_base, .dtype, .fv_dim, .fv_prec,
    .in_valid(v_out_valid), .in_entry(v_out), .in_ready(v_out_ready),
    .qr_qid, .qr_widx, .qr_data,
    .dr_req_valid(dr_req_valid[1]), .dr_req_addr(dr_req_addr[1]), .dr_req_ready(dr_req_ready[1]),
    .dr_resp_valid(dr_resp_valid[1]), .dr_resp_data(dr_resp_data[1]),
    .out_valid(a_out_valid), .out_ch(a_out_ch), .out_msg(a_out), .out_ready(fc_in_ready[a_out_ch]),
    .lun_busy, .idle(a_idle));

  // ---------------------------------------------------------------- channels
  logic       fc_res_valid [N_CH], fc_res_ready [N_CH];
  result_t    fc_res [N_CH];
  logic [7:0] ob_count_all [N_LUN*PLANES_PER_LUN];

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    logic       s_cmd_valid [SIN_PER_CH], s_cmd_ready [SIN_PER_CH], s_ob_pop [SIN_PER_CH];
    logic       s_cmd_llun, s_ob_lun, s_ob_sel;
    lun_msg_t   s_cmd;
    result_t    s_ob_data [SIN_PER_CH];
    logic       s_busy [LUN_PER_CH], fc_busy [LUN_PER_CH];
    logic [7:0] s_ob_count [LUN_PER_CH*PLANES_PER_LUN];

    flash_ctr u_fc (
      .clk, .rst_n,
      .in_valid(a_out_valid && a_out_ch == CHW'(c)), .in_msg(a_out), .in_ready(fc_in_ready[c]),
      .res_valid(fc_res_valid[c]), .res(fc_res[c]), .res_ready(fc_res_ready[c]),
      .lun_busy(fc_busy),
      .sin_cmd_valid(s_cmd_valid), .sin_cmd_llun(s_cmd_llun), .sin_cmd(s_cmd),
      .sin_cmd_ready(s_cmd_ready), .sin_busy(s_busy),
      .sin_ob_lun(s_ob_lun), .sin_ob_sel(s_ob_sel), .sin_ob_pop(s_ob_pop),
      .sin_ob_data(s_ob_data), .sin_ob_count(s_ob_count));

    for (genvar s = 0; s < SIN_PER_CH; s++) begin : g_sin
      localparam int CHIP = c * SIN_PER_CH + s;
      logic       busy2 [LUN_PER_SIN];
      logic [7:0] cnt4  [LUN_PER_SIN*PLANES_PER_LUN];
      sin u_sin (
        .clk, .rst_n,
        .cmd_valid(s_cmd_valid[s]), .cmd_llun(s_cmd_llun), .cmd(s_cmd), .cmd_ready(s_cmd_ready[s]),
        .busy(busy2),
        .ob_lun(s_ob_lun), .ob_sel(s_ob_sel), .ob_pop(s_ob_pop[s]), .ob_data(s_ob_data[s]),
        .ob_count(cnt4),
        .sense_req (sense_req [4*CHIP +: 4]),
        .sense_row (sense_row [4*CHIP +: 4]),
        .sense_done(sense_done[4*CHIP +: 4]),
        .rd_req(rd_req[8*CHIP +: 8]), .rd_col(rd_col[8*CHIP +: 8]),
        .rd_vld(rd_vld[8*CHIP +: 8]), .rd_cw(rd_cw[8*CHIP +: 8]));
      for (genvar u = 0; u < LUN_PER_SIN; u++) begin : g_u
        assign s_busy[2*s+u] = busy2[u];
      end
      for (genvar b = 0; b < 4; b++) begin : g_b
        assign s_ob_count[4*s+b]    = cnt4[b];
        assign ob_count_all[4*CHIP+b] = cnt4[b];
      end
    end
    for (genvar l = 0; l < LUN_PER_CH; l++) begin : g_l
      assign lun_busy[LUN_PER_CH*c+l] = fc_busy[l];
    end
  end

  // ---------------------------------------------------------------- result stream
  logic [CHW-1:0] rr, rsel;
  logic           rany;
  logic [N_CH-1:0]  rvec, rrot;
  logic [CHW-1:0]   rfirst;
  always_comb begin
    for (int c = 0; c < N_CH; c++) rvec[c] = fc_res_valid[c];
    rrot   = (rvec >> rr) | (rvec << (N_CH - int'(rr)));
    rfirst = '0;
    for (int i = N_CH - 1; i >= 0; i--) if (rrot[i]) rfirst = CHW'(i);
    rany = |rvec;
    rsel = rr + rfirst;
  end
  assign res_valid = rany;
  assign res       = fc_res[rsel];
  always_comb begin
    for (int c = 0; c < N_CH; c++) fc_res_ready[c] = res_ready && rany && (rsel == CHW'(c));
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else if (res_valid && res_ready) rr <= rsel + 1'b1;
  end

  always_comb begin
    search_idle = a_idle;
    for (int l = 0; l < N_LUN; l++) if (lun_busy[l]) search_idle = 1'b0;
    for (int b = 0; b < N_LUN * PLANES_PER_LUN; b++) if (ob_count_all[b] != 0) search_idle = 1'b0;
  end
endmodule
