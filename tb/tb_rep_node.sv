// tb_rep_node: random LLRs for repetition nodes of length 1..32 with and
// without a flip; checks that every estimate equals the (flipped) sign of
// the LLR sum, that unused lanes stay zero and that lambda_0 = |sum|,
// saturated to 8 bits.
module tb_rep_node;
  localparam int P = 64, QA = 8, QL = 8;
  logic signed [QA-1:0] alpha [P];
  logic [6:0] nv_log;
  logic flip_en;
  logic beta [P], lam_valid [P];
  logic [QL-1:0] lam [P];
  int checks = 0, failures = 0;

  rep_node #(.P(P), .REP_MAX(32), .QA(QA), .QL(QL)) dut (.*);

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      int nv, s, el;
      bit hd, ok;
      nv_log = 7'($urandom % 6);
      nv = 1 << nv_log;
      flip_en = 1'($urandom);
      for (int i = 0; i < P; i++) alpha[i] = QA'(int'($urandom % ((t % 2) ? 255 : 31)) - ((t % 2) ? 127 : 15));
      #1;
      s = 0;
      for (int i = 0; i < nv; i++) s += int'(alpha[i]);
      hd = (s < 0) ^ flip_en;
      el = s < 0 ? -s : s;
      if (el > 255) el = 255;
      ok = int'(lam[0]) == el && lam_valid[0];
      for (int i = 0; i < P; i++) begin
        if (beta[i] != (i < nv ? hd : 1'b0)) ok = 0;
        if (i > 0 && lam_valid[i]) ok = 0;
      end
      checks++;
      if (!ok) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d nv=%0d sum=%0d lam=%0d", t, nv, s, lam[0]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
