// dram_rd_arbiter: shares one DRAM read port among N requesters on the controller's internal
// memory bus.
//
// Fixed priority, highest index first. Each requester keeps at most one read outstanding and
// waits for its answer; the DRAM answers in request order, so a FIFO of granted requester
// numbers routes each answer back. Interface: per requester req_valid/req_addr/req_ready and
// resp_valid (resp_data is shared); towards DRAM m_req_* (valid/ready) and m_resp_* (valid only,
// any latency). The bus arbitration is this design's choice; the paper names only the bus.
module dram_rd_arbiter #(
  parameter int N = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req_valid [N],
  input  logic [31:0] req_addr  [N],
  output logic        req_ready [N],
  output logic        resp_valid [N],
  output logic [31:0] resp_data,
  output logic        m_req_valid,
  output logic [31:0] m_req_addr,
  input  logic        m_req_ready,
  input  logic        m_resp_valid,
  input  logic [31:0] m_resp_data
);
  localparam int IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] gsel, tag_head, tag_unused;
  logic          gany, tag_full, tag_empty;
  logic [$clog2(N+2)-1:0] tag_cnt;

  always_comb begin
    gsel = '0;
    gany = 1'b0;
    for (int i = 0; i < N; i++)
      if (req_valid[i]) begin
        gsel = IW'(i);
        gany = 1'b1;
      end
  end

  assign m_req_valid = gany && !tag_full;
  assign m_req_addr  = req_addr[gsel];
  always_comb begin
    for (int i = 0; i < N; i++) begin
      req_ready[i]  = m_req_valid && m_req_ready && (gsel == IW'(i));
      resp_valid[i] = m_resp_valid && (tag_head == IW'(i));
    end
  end
  assign resp_data = m_resp_data;

  sync_fifo #(.T(logic [IW-1:0]), .DEPTH(N + 1)) u_tags (
    .clk, .rst_n,
    .push (m_req_valid && m_req_ready), .wdata(gsel),
    .pop  (m_resp_valid),
    .rdata(tag_head), .rdata2(tag_unused),
    .full (tag_full), .empty(tag_empty), .count(tag_cnt));

  assert property (@(posedge clk) disable iff (!rst_n) m_resp_valid |-> !tag_empty)
    else $error("DRAM answer with no request outstanding");
endmodule
