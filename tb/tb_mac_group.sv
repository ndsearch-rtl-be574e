// tb_mac_group: self-checking testbench of the two-MAC group.
//
// Streams random query/vertex vectors of 1..128 words through both MACs at once, each with its
// own random distance type, and compares out_dist with a behavioural reference. It also checks
// the timing contract: out_valid exactly one cycle after the word flagged in_last, one word
// accepted per cycle.
// The paper gives two adder-tree MACs per group; the distance encodings and the result timing
// checked here are this design's choices.
module tb_mac_group;
  import ndsearch_pkg::*;
  import ndsearch_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [1:0] start, in_valid, in_last, out_valid;
  dist_e dtype [2];
  logic [DATA_W-1:0] v_word [2], q_word [2];
  logic signed [DIST_W-1:0] out_dist [2];

  mac_group #(.N_MAC(2)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] qv [2][$], vv [2][$];
    int dt [2];
    int n, cyc;
    int signed expd [2];
    start = 0; in_valid = 0; in_last = 0;
    dtype[0] = DIST_L2; dtype[1] = DIST_L2; v_word[0] = 0; v_word[1] = 0; q_word[0] = 0; q_word[1] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      n = 1 << $urandom_range(0, 7);
      for (int m = 0; m < 2; m++) begin
        dt[m] = $urandom_range(0, 3);
        qv[m].delete(); vv[m].delete();
        for (int w = 0; w < n; w++) begin
          // occasional extreme values to exercise the sign handling
          qv[m].push_back(($urandom_range(0, 7) == 0) ? 64'h8080808080808080 : {$urandom, $urandom});
          vv[m].push_back(($urandom_range(0, 7) == 0) ? 64'h7f7f7f7f7f7f7f7f : {$urandom, $urandom});
        end
        expd[m] = ref_dist(dt[m], qv[m], vv[m]);
      end
      @(negedge clk);
      start = 2'b11; dtype[0] = dist_e'(dt[0]); dtype[1] = dist_e'(dt[1]);
      @(negedge clk);
      start = 0;
      for (int w = 0; w < n; w++) begin
        in_valid = 2'b11;
        in_last  = (w == n - 1) ? 2'b11 : 2'b00;
        for (int m = 0; m < 2; m++) begin
          q_word[m] = qv[m][w];
          v_word[m] = vv[m][w];
        end
        @(negedge clk);
        checks++;
        if (out_valid != ((w == n - 1) ? 2'b11 : 2'b00)) begin
          failures++; $display("out_valid timing error at word %0d of %0d", w, n);
        end
      end
      in_valid = 0; in_last = 0;
      for (int m = 0; m < 2; m++) begin
        checks++;
        if (out_dist[m] !== expd[m]) begin
          failures++;
          $display("mac %0d type %0d n=%0d got %0d exp %0d", m, dt[m], n, out_dist[m], expd[m]);
        end
      end
      @(negedge clk);
      checks++;
      if (out_valid != 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
