// mac_group: the two MACs that sit behind one plane of a LUN-level accelerator.
//
// Each MAC takes one 64-bit word of a candidate vertex and the matching word of a query per
// cycle (eight signed 8-bit elements each). It forms eight per-element terms, adds them in a
// three-level adder tree and accumulates the sum over the words of the vector. The term depends
// on the distance type latched at start: (q-v)^2 for squared Euclidean, q*v for inner product and
// angular (the final sum is negated so that a smaller value is always nearer) and |q-v| for
// Manhattan. The paper gives two MACs per group, built on an adder tree; lane count, element
// width and the distance encodings are this design's choices.
// Timing: start[m] clears MAC m and latches dtype[m]. in_valid[m] words are accepted every cycle;
// the word with in_last[m] set closes the vector and out_valid[m] pulses one cycle later with
// out_dist[m].
module mac_group
  import ndsearch_pkg::*;
#(
  parameter int N_MAC = 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [N_MAC-1:0]         start,
  input  dist_e                    dtype    [N_MAC],
  input  logic [N_MAC-1:0]         in_valid,
  input  logic [N_MAC-1:0]         in_last,
  input  logic [DATA_W-1:0]        v_word   [N_MAC],
  input  logic [DATA_W-1:0]        q_word   [N_MAC],
  output logic [N_MAC-1:0]         out_valid,
  output logic signed [DIST_W-1:0] out_dist [N_MAC]
);
  for (genvar m = 0; m < N_MAC; m++) begin : g_mac
    dist_e                    mode;
    logic signed [DIST_W-1:0] acc;
    logic signed [DIST_W-1:0] term [LANES];
    logic signed [DIST_W-1:0] tree_sum;

    always_comb begin
      for (int l = 0; l < LANES; l++) begin
        logic signed [ELEM_W-1:0] qe, ve;
        logic signed [ELEM_W:0]   df;
        qe = q_word[m][l*ELEM_W +: ELEM_W];
        ve = v_word[m][l*ELEM_W +: ELEM_W];
        df = {qe[ELEM_W-1], qe} - {ve[ELEM_W-1], ve};
        unique case (mode)
          DIST_L2:           term[l] = DIST_W'(df * df);
          DIST_ANG, DIST_IP: term[l] = DIST_W'(qe * ve);
          default:           term[l] = (df < 0) ? DIST_W'(-df) : DIST_W'(df);
        endcase
      end
    end

    // Adder tree over the lanes.
    always_comb begin
      logic signed [DIST_W-1:0] lvl [LANES];
      for (int l = 0; l < LANES; l++) lvl[l] = term[l];
      for (int w = LANES / 2; w >= 1; w = w / 2)
        for (int l = 0; l < w; l++) lvl[l] = lvl[2*l] + lvl[2*l+1];
      tree_sum = lvl[0];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        mode         <= DIST_L2;
        acc          <= '0;
        out_valid[m] <= 1'b0;
        out_dist[m]  <= '0;
      end else begin
        out_valid[m] <= 1'b0;
        if (start[m]) begin
          mode <= dtype[m];
          acc  <= '0;
        end else if (in_valid[m]) begin
          if (in_last[m]) begin
            acc          <= '0;
            out_valid[m] <= 1'b1;
            out_dist[m]  <= (mode == DIST_ANG || mode == DIST_IP) ? -(acc + tree_sum)
                                                                  : (acc + tree_sum);
          end else begin
            acc <= acc + tree_sum;
          end
        end
      end
    end
  end
endmodule
