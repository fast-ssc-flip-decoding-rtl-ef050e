// tb_birep_node: random LLRs for birepetition nodes of length 4..64 and
// flips of the even or the odd bit; checks the estimates against the signs
// of the even and odd LLR sums and the two decision LLRs against |sums|.
module tb_birep_node;
  localparam int P = 64, QA = 8, QL = 8;
  logic signed [QA-1:0] alpha [P];
  logic [6:0] nv_log;
  logic flip_en, flip_d;
  logic beta [P], lam_valid [P];
  logic [QL-1:0] lam [P];
  int checks = 0, failures = 0;

  birep_node #(.P(P), .QA(QA), .QL(QL)) dut (.*);

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat8(int v);
    v = v < 0 ? -v : v;
    return v > 255 ? 255 : v;
  endfunction

  initial begin
    for (int t = 0; t < 400; t++) begin
      int nv, se, so;
      bit he, ho, ok;
      nv_log = 7'(2 + $urandom % 5);
      nv = 1 << nv_log;
      flip_en = 1'($urandom);
      flip_d = 1'($urandom);
      for (int i = 0; i < P; i++) alpha[i] = QA'(int'($urandom % 63) - 31);
      #1;
      se = 0; so = 0;
      for (int i = 0; i < nv / 2; i++) begin
        se += int'(alpha[2 * i]);
        so += int'(alpha[2 * i + 1]);
      end
      he = (se < 0) ^ (flip_en && !flip_d);
      ho = (so < 0) ^ (flip_en && flip_d);
      ok = int'(lam[0]) == sat8(se) && int'(lam[1]) == sat8(so) && lam_valid[0] && lam_valid[1];
      for (int i = 0; i < P; i++) begin
        if (beta[i] != (i < nv ? ((i % 2) ? ho : he) : 1'b0)) ok = 0;
        if (i > 1 && lam_valid[i]) ok = 0;
      end
      checks++;
      if (!ok) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d nv=%0d se=%0d so=%0d", t, nv, se, so);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
