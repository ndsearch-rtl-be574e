// sin: Search-in-NAND engine, one flash chip holding two LUN-level accelerators.
//
// The chip-side decode of the channel bus: a command addressed to LUN cmd_llun goes to that
// LUN's accelerator (this is how the multi-LUN <Search Page> sequence reaches LUN0 and LUN1 one
// after the other), and the output-buffer read back is steered to the LUN named by ob_lun, as
// <Read Status Enhanced> selects one LUN of a chip. Both LUNs then work in parallel. Each LUN
// drives its own two planes through the NAND ports, indexed [2*lun + plane] for page senses and
// [4*lun + 2*plane + lane] for column reads. Combinational; all timing is in lun_acc.
module sin
  import ndsearch_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  input  logic              cmd_llun,
  input  lun_msg_t          cmd,
  output logic              cmd_ready,
  output logic              busy      [LUN_PER_SIN],
  input  logic              ob_lun,
  input  logic              ob_sel,
  input  logic              ob_pop,
  output result_t           ob_data,
  output logic [7:0]        ob_count  [LUN_PER_SIN*PLANES_PER_LUN],
  output logic              sense_req  [LUN_PER_SIN*PLANES_PER_LUN],
  output row_addr_t         sense_row  [LUN_PER_SIN*PLANES_PER_LUN],
  input  logic              sense_done [LUN_PER_SIN*PLANES_PER_LUN],
  output logic              rd_req     [LUN_PER_SIN*PLANES_PER_LUN*2],
  output logic [COL_W-1:0]  rd_col     [LUN_PER_SIN*PLANES_PER_LUN*2],
  input  logic              rd_vld     [LUN_PER_SIN*PLANES_PER_LUN*2],
  input  logic [CW_W-1:0]   rd_cw      [LUN_PER_SIN*PLANES_PER_LUN*2]
);
  logic    l_ready [LUN_PER_SIN];
  result_t l_data  [LUN_PER_SIN];

  for (genvar u = 0; u < LUN_PER_SIN; u++) begin : g_lun
    logic [7:0] cnt [PLANES_PER_LUN];
    lun_acc u_acc (
      .clk, .rst_n,
      .cmd_valid (cmd_valid && (cmd_llun == 1'(u))),
      .cmd       (cmd),
      .cmd_ready (l_ready[u]),
      .busy      (busy[u]),
      .ob_sel    (ob_sel),
      .ob_pop    (ob_pop && (ob_lun == 1'(u))),
      .ob_data   (l_data[u]),
      .ob_count  (cnt),
      .sense_req (sense_req [2*u +: 2]),
      .sense_row (sense_row [2*u +: 2]),
      .sense_done(sense_done[2*u +: 2]),
      .rd_req    (rd_req[4*u +: 4]),
      .rd_col    (rd_col[4*u +: 4]),
      .rd_vld    (rd_vld[4*u +: 4]),
      .rd_cw     (rd_cw [4*u +: 4]));
    assign ob_count[2*u]   = cnt[0];
    assign ob_count[2*u+1] = cnt[1];
  end

  assign cmd_ready = l_ready[cmd_llun];
  assign ob_data   = l_data[ob_lun];
endmodule
