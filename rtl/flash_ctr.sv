// flash_ctr: per-channel flash controller of the SearSSD.
//
// It owns the channel bus shared by the four SiN chips (eight LUN accelerators) of one channel.
// The bus moves one item per cycle, either towards a LUN or back from one:
//   * Issue path: query-vector words and <Search Page> tasks from the Allocator are driven onto
//     the bus to the LUN named in the message (valid/ready; a full Vaddr queue holds the bus
//     back). Consecutive tasks to different LUNs form the multi-LUN search sequence.
//   * Read-back path: the modified multi-LUN search ends with <Read Status Enhanced>, which here
//     selects one LUN's output buffer and reads how many results it holds (one bus cycle),
//     <Change Read Column> (one bus cycle) and then the data transfer, one result per cycle. The
//     controller visits the 16 output buffers of the channel in turn.
// When both paths want the bus they take turns cycle by cycle. The paper gives the command
// sequence; the arbitration and the cycle costs are this design's choices.
// Interface: in_* from the Allocator; res_* to the SSD controller (valid/ready); sin_* to the
// four chips; lun_busy reports, per LUN, that tasks are still queued or running.
module flash_ctr
  import ndsearch_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  ch_msg_t    in_msg,
  output logic       in_ready,
  output logic       res_valid,
  output result_t    res,
  input  logic       res_ready,
  output logic       lun_busy     [LUN_PER_CH],
  // channel bus
  output logic       sin_cmd_valid [SIN_PER_CH],
  output logic       sin_cmd_llun,
  output lun_msg_t   sin_cmd,
  input  logic       sin_cmd_ready [SIN_PER_CH],
  input  logic       sin_busy      [LUN_PER_CH],
  output logic       sin_ob_lun,
  output logic       sin_ob_sel,
  output logic       sin_ob_pop    [SIN_PER_CH],
  input  result_t    sin_ob_data   [SIN_PER_CH],
  input  logic [7:0] sin_ob_count  [LUN_PER_CH*PLANES_PER_LUN]
);
  localparam int NBUF = LUN_PER_CH * PLANES_PER_LUN;   // 16 output buffers per channel

  typedef enum logic [1:0] {R_STATUS, R_COLUMN, R_XFER} rstate_e;
  rstate_e                  rst;
  logic [$clog2(NBUF)-1:0]  rp;      // {lun[2:0], plane}
  logic                     turn;    // 1: read-back has priority this cycle
  logic                     rb_want, wr_want, rb_grant, wr_grant;

  logic [LLUN_W-1:0] rb_lun;
  logic [1:0]        rb_sin;
  assign rb_lun = rp[$clog2(NBUF)-1:1];
  assign rb_sin = rb_lun[LLUN_W-1:1];

  assign wr_want  = in_valid;
  assign rb_want  = (rst != R_XFER) || (sin_ob_count[rp] != 0);
  assign rb_grant = rb_want && (turn || !wr_want);
  assign wr_grant = wr_want && !rb_grant;

  // issue path
  logic [1:0] wr_sin;
  assign wr_sin       = in_msg.llun[LLUN_W-1:1];
  assign sin_cmd_llun = in_msg.llun[0];
  assign sin_cmd      = in_msg.msg;
  always_comb begin
    for (int s = 0; s < SIN_PER_CH; s++)
      sin_cmd_valid[s] = wr_grant && (wr_sin == 2'(s));
  end
  assign in_ready = wr_grant && sin_cmd_ready[wr_sin];

  // read-back path
  assign sin_ob_lun = rb_lun[0];
  assign sin_ob_sel = rp[0];
  assign res        = sin_ob_data[rb_sin];
  assign res_valid  = rb_grant && (rst == R_XFER) && (sin_ob_count[rp] != 0);
  always_comb begin
    for (int s = 0; s < SIN_PER_CH; s++)
      sin_ob_pop[s] = res_valid && res_ready && (rb_sin == 2'(s));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rst  <= R_STATUS;
      rp   <= '0;
      turn <= 1'b0;
    end else begin
      turn <= !turn;
      if (rb_grant) begin
        unique case (rst)
          R_STATUS: if (sin_ob_count[rp] != 0) rst <= R_COLUMN;
                    else rp <= rp + 1'b1;
          R_COLUMN: rst <= R_XFER;
          R_XFER:   ;
          default:  rst <= R_STATUS;
        endcase
      end
      // leave the buffer once it is drained
      if (rst == R_XFER && sin_ob_count[rp] == 0) begin
        rst <= R_STATUS;
        rp  <= rp + 1'b1;
      end
    end
  end

  always_comb begin
    for (int l = 0; l < LUN_PER_CH; l++) lun_busy[l] = sin_busy[l];
  end
endmodule
