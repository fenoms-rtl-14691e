// tb_dim_packer: checks dimension packing against a bit-count model.
// A 20-bit hypervector packed by 3 gives 7 cells (the last covers 2 bits);
// every cell base and m = 1, 2, 4 are tried on random vectors, and the lane
// values and valid flags are compared with counts taken bit by bit.
module tb_dim_packer;
  localparam int unsigned D = 20, PF = 3, MAXM = 4;
  localparam int unsigned NCELLS = (D + PF - 1) / PF;
  localparam int unsigned CW = $clog2(NCELLS + 1), LW = $clog2(PF + 1), MW = $clog2(MAXM + 1);

  logic [D-1:0]  hv;
  logic [CW-1:0] cell_base;
  logic [MW-1:0] log2m;
  logic [LW-1:0] q [MAXM];
  logic          q_valid [MAXM];
  int checks = 0, failures = 0;

  dim_packer #(.D(D), .PF(PF), .MAXM(MAXM)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 50; t++) begin
      hv = D'({$urandom, $urandom});
      for (int lm = 0; lm <= 2; lm++)
        for (int b = 0; b <= NCELLS; b++) begin
          cell_base = CW'(b);
          log2m = MW'(lm);
          #1;
          for (int k = 0; k < MAXM; k++) begin
            int exp_q;
            bit exp_v;
            exp_q = 0;
            for (int i = (b + k) * PF; i < (b + k + 1) * PF && i < D; i++) exp_q += hv[i];
            exp_v = (b + k < NCELLS) && (k < (1 << lm));
            checks++;
            if (q_valid[k] !== exp_v || (exp_v && int'(q[k]) != exp_q)) begin
              failures++;
              if (failures < 10) $display("FAIL base=%0d k=%0d m=%0d q=%0d exp=%0d v=%b", b, k, 1 << lm, q[k], exp_q, q_valid[k]);
            end
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
