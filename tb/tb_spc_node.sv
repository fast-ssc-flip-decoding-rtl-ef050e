// tb_spc_node: random LLRs for SPC nodes of length 4..64 with s = 0.5.
// The expected result is found by sorting the magnitudes here: the Wagner
// correction on the least reliable bit, the decision LLRs
// |alpha_{d+1}| -/+ floor(min/2) by the parity, and the two-bit flip that
// pairs the flipped bit with the least (or, if it is the least, the second
// least) reliable one. Every output must keep even parity.
module tb_spc_node;
  localparam int P = 64, QA = 8, QL = 8;
  logic signed [QA-1:0] alpha [P];
  logic [6:0] nv_log;
  logic flip_en;
  logic [5:0] flip_d;
  logic beta [P], lam_valid [P];
  logic [QL-1:0] lam [P];
  int checks = 0, failures = 0;

  spc_node #(.P(P), .QA(QA), .QL(QL), .S_SHIFT(1)) dut (.*);

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 600; t++) begin
      int nv, mag[P], ord[P], i1, i2, par, mn, ifl;
      bit eb[P], ok, pchk;
      nv_log = 7'(2 + $urandom % 5);
      nv = 1 << nv_log;
      flip_en = 1'($urandom);
      flip_d = 6'($urandom % (nv - 1));
      for (int i = 0; i < P; i++) alpha[i] = QA'(int'($urandom % 41) - 20);
      #1;
      // insertion sort of positions by magnitude (stable)
      for (int i = 0; i < nv; i++) begin
        int v;
        v = int'(alpha[i]);
        mag[i] = v < 0 ? -v : v;
        ord[i] = i;
      end
      for (int i = 1; i < nv; i++)
        for (int j = i; j > 0 && mag[ord[j]] < mag[ord[j-1]]; j--) begin
          int tmp;
          tmp = ord[j]; ord[j] = ord[j-1]; ord[j-1] = tmp;
        end
      i1 = ord[0]; i2 = ord[1];
      par = 0;
      for (int i = 0; i < nv; i++) begin
        eb[i] = alpha[i] < 0;
        par ^= int'(eb[i]);
      end
      if (par != 0) eb[i1] = !eb[i1];
      if (flip_en) begin
        ifl = int'(flip_d) + 1;
        eb[ifl] = !eb[ifl];
        if (ifl == i1) eb[i2] = !eb[i2]; else eb[i1] = !eb[i1];
      end
      mn = mag[i1] / 2;
      ok = 1;
      pchk = 0;
      for (int i = 0; i < P; i++) begin
        if (beta[i] != (i < nv ? eb[i] : 1'b0)) ok = 0;
        if (i < nv) pchk ^= beta[i];
      end
      for (int d = 0; d < P; d++) begin
        if (lam_valid[d] != (d < nv - 1)) ok = 0;
        if (d < nv - 1 && int'(lam[d]) != (par != 0 ? mag[d+1] - mn : mag[d+1] + mn)) ok = 0;
      end
      if (pchk) ok = 0;
      checks++;
      if (!ok) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d nv=%0d par=%0d i1=%0d i2=%0d flip=%0d/%0d", t, nv, par, i1, i2, flip_en, flip_d);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
