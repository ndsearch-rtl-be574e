// tb_ldpc_bf_decoder: self-checking testbench of the plane-level hard-decision LDPC decoder.
//
// Encodes random 64-bit words, then sends them clean, with one flipped bit (every position of
// the 78-bit codeword is covered), and with two flipped bits that share no parity check. Clean
// and single-error words must come out equal to the data (corrected flag set for the latter);
// the double errors must raise out_fail. Words are sent back to back and every output is
// checked exactly one cycle after its input, with the tag carried along.
// The paper places a hard-decision decoder per plane but gives no code; the code and the 1-cycle
// latency checked here are this design's choices.
module tb_ldpc_bf_decoder;
  import ndsearch_pkg::*;
  import ndsearch_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid, out_corrected, out_fail;
  logic [CW_W-1:0] in_cw;
  logic [7:0] in_tag, out_tag;
  logic [DATA_W-1:0] out_data;

  ldpc_bf_decoder #(.TAG_W(8)) dut (.*);

  int checks = 0, failures = 0;
  int n_corr = 0, n_fail = 0;

  // checks touched by codeword bit b (same numbering as the decoder)
  function automatic void bit_chk(input int b, output int c0, output int c1);
    int d = 0;
    if (b >= 66) begin c0 = 0; c1 = b - 65; return; end
    for (int i = 1; i <= 12; i++)
      for (int j = i + 1; j <= 12; j++) begin
        if (d == b) begin c0 = i; c1 = j; end
        d++;
      end
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [DATA_W-1:0] d, pd;
    int kind, pkind;
    bit pv;
    in_valid = 0; in_cw = '0; in_tag = '0;
    pv = 0; pd = '0; pkind = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      // output of the previous cycle's input
      if (pv) begin
        checks++;
        if (!out_valid || out_tag != 8'(t - 1)) begin
          failures++; $display("latency/tag error at %0d", t);
        end
        if (pkind == 2) begin
          checks++;
          if (!out_fail) begin failures++; $display("double error not flagged"); end
          else n_fail++;
        end else begin
          checks++;
          if (out_fail || out_data != pd || out_corrected != (pkind == 1)) begin
            failures++;
            $display("kind %0d: data %h exp %h corr %b fail %b", pkind, out_data, pd, out_corrected, out_fail);
          end
          if (out_corrected) n_corr++;
        end
      end
      d = {$urandom, $urandom};
      kind = (t < 156) ? ((t < 78) ? 1 : 2) : $urandom_range(0, 2);
      in_cw = ldpc_encode(d);
      if (kind == 1) begin
        in_cw[(t < 78) ? t : $urandom_range(0, CW_W - 1)] ^= 1'b1;
      end else if (kind == 2) begin
        int b0, b1, a0, a1, c0, c1;
        b0 = $urandom_range(0, CW_W - 1);
        bit_chk(b0, a0, a1);
        do begin
          b1 = $urandom_range(0, CW_W - 1);
          bit_chk(b1, c0, c1);
        end while (c0 == a0 || c0 == a1 || c1 == a0 || c1 == a1);
        in_cw[b0] ^= 1'b1;
        in_cw[b1] ^= 1'b1;
      end
      in_valid = 1;
      in_tag = 8'(t);
      pv = 1; pd = d; pkind = kind;
    end
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (n_corr == 0 || n_fail == 0) failures++;
    $display("corrected=%0d flagged=%0d", n_corr, n_fail);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
