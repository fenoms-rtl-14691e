// tb_wl_decoder: checks that exactly the m aligned consecutive wordlines
// starting at the subset base are opened, for m = 1..16 on a 32-wordline
// string, and that nothing is opened when the decoder is disabled.
module tb_wl_decoder;
  localparam int unsigned WL = 32, MAXM = 16;
  logic          en;
  logic [4:0]    wl_addr;
  logic [4:0]    log2m;
  logic [WL-1:0] wl_sel;
  int checks = 0, failures = 0;

  wl_decoder #(.WL(WL), .MAXM(MAXM)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int lm = 0; lm <= 4; lm++)
      for (int a = 0; a < WL; a++)
        for (int e = 0; e < 2; e++) begin
          int m, base;
          m = 1 << lm;
          base = (a / m) * m;
          en = e[0]; wl_addr = 5'(a); log2m = 5'(lm);
          #1;
          for (int w = 0; w < WL; w++) begin
            checks++;
            if (wl_sel[w] !== (e == 1 && w >= base && w < base + m)) begin
              failures++;
              if (failures < 10) $display("FAIL m=%0d addr=%0d w=%0d sel=%b", m, a, w, wl_sel[w]);
            end
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
