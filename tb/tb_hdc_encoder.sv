// tb_hdc_encoder: checks ID-level encoding and majority bundling.
// Spectra of 1..9 peaks, each peak a random ID and level hypervector of 64
// bits streamed 16 bits per beat with random gaps; the result must equal the
// per-dimension strict majority of ID XOR level, and finalize must take one
// cycle per 16-bit chunk.
module tb_hdc_encoder;
  localparam int unsigned D = 64, W = 16, CNT_W = 4, NW = 4;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, finalize = 0;
  logic [W-1:0] in_id, in_lvl;
  logic busy, hv_valid;
  logic [D-1:0] hv;
  logic [CNT_W-1:0] peaks;
  int checks = 0, failures = 0;

  hdc_encoder #(.D(D), .W(W), .CNT_W(CNT_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n <= 1;
    for (int t = 0; t < 40; t++) begin
      int n, cnt [D], lat;
      logic [D-1:0] exp;
      n = $urandom_range(1, 9);
      for (int d = 0; d < D; d++) cnt[d] = 0;
      clear <= 1;
      @(negedge clk);
      clear <= 0;
      for (int p = 0; p < n; p++) begin
        logic [D-1:0] id, lv;
        id = {$urandom, $urandom};
        lv = {$urandom, $urandom};
        for (int d = 0; d < D; d++) cnt[d] += id[d] ^ lv[d];
        for (int w = 0; w < NW; w++) begin
          while ($urandom_range(0, 3) == 0) begin in_valid <= 0; @(negedge clk); end
          in_valid <= 1; in_id <= id[w*W +: W]; in_lvl <= lv[w*W +: W];
          @(negedge clk);
        end
      end
      in_valid <= 0;
      finalize <= 1;
      @(negedge clk);
      finalize <= 0;
      lat = 1;
      while (!hv_valid && lat < 100) begin @(negedge clk); lat++; end
      for (int d = 0; d < D; d++) exp[d] = (2 * cnt[d] > n);
      checks += 3;
      if (hv !== exp) begin failures++; $display("FAIL hv=%h exp=%h n=%0d", hv, exp, n); end
      if (int'(peaks) != n) begin failures++; $display("FAIL peaks=%0d", peaks); end
      if (lat != NW + 1) begin failures++; $display("FAIL finalize latency %0d", lat); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
