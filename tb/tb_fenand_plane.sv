// tb_fenand_plane: checks the FeNAND plane model's string sensing.
// Random pages are programmed into a small plane (8 wordlines, 2 string
// rows, 2 blocks, 10 bitlines), then reads with random biases on a random
// set of wordlines (pass bias elsewhere) are compared with a shadow copy:
// a string conducts only if every biased cell has 2*level <= bias. Unwritten
// pages must read as level 0, and every result must arrive exactly T_READ
// cycles after the read.
module tb_fenand_plane;
  import fenoms_pkg::*;
  localparam int unsigned WL = 8, SSL = 2, BLOCKS = 2, BL = 10, PF = 3, T_READ = 3, LW = 2;
  logic clk = 0, rst_n = 0;
  logic prog_en = 0, read_en = 0;
  logic [0:0] prog_block, read_block, prog_ssl, read_ssl;
  logic [2:0] prog_wl;
  logic [BL*LW-1:0] prog_data;
  vcode_t wl_v [WL];
  logic busy, sense_valid;
  logic [BL-1:0] sense_bits;
  int checks = 0, failures = 0;
  int shadow [BLOCKS][SSL][WL][BL];

  fenand_plane #(.WL(WL), .SSL(SSL), .BLOCKS(BLOCKS), .BL(BL), .PF(PF), .T_READ(T_READ)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < BLOCKS; b++) for (int s = 0; s < SSL; s++)
      for (int w = 0; w < WL; w++) for (int l = 0; l < BL; l++) shadow[b][s][w][l] = 0;
    for (int w = 0; w < WL; w++) wl_v[w] = VPASS;
    repeat (2) @(negedge clk);
    rst_n <= 1;
    @(negedge clk);
    // program about three quarters of the pages, leave the rest erased
    for (int b = 0; b < BLOCKS; b++) for (int s = 0; s < SSL; s++)
      for (int w = 0; w < WL; w++) if ($urandom_range(0, 3) != 0) begin
        logic [BL*LW-1:0] page;
        prog_en <= 1; prog_block <= 1'(b); prog_ssl <= 1'(s); prog_wl <= 3'(w);
        for (int l = 0; l < BL; l++) begin
          shadow[b][s][w][l] = $urandom_range(0, PF);
          page[l*LW +: LW] = LW'(shadow[b][s][w][l]);
        end
        prog_data <= page;
        @(negedge clk);
      end
    prog_en <= 0;
    for (int t = 0; t < 200; t++) begin
      int b, s, lat;
      vcode_t v [WL];
      b = $urandom_range(0, BLOCKS - 1);
      s = $urandom_range(0, SSL - 1);
      for (int w = 0; w < WL; w++)
        v[w] = ($urandom_range(0, 2) == 0) ? vcode_t'($urandom_range(0, 8)) - 8'sd1 : VPASS;
      read_en <= 1; read_block <= 1'(b); read_ssl <= 1'(s);
      for (int w = 0; w < WL; w++) wl_v[w] <= v[w];
      @(negedge clk);                                  // read taken at this cycle's edge
      read_en <= 0;
      for (int w = 0; w < WL; w++) wl_v[w] <= 8'sd0;   // bias only sampled at the read
      lat = 1;                                         // cycles since the read cycle
      while (!sense_valid && lat < 20) begin @(negedge clk); lat++; end
      checks++;
      if (lat != T_READ) begin
        failures++;
        $display("FAIL latency %0d", lat);
      end
      for (int l = 0; l < BL; l++) begin
        bit on;
        on = 1;
        for (int w = 0; w < WL; w++)
          if (v[w] != VPASS && int'(v[w]) < 2 * shadow[b][s][w][l]) on = 0;
        checks++;
        if (sense_bits[l] !== on) begin
          failures++;
          if (failures < 400) $display("FAIL read b=%0d s=%0d bl=%0d got=%b exp=%b", b, s, l, sense_bits[l], on);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
