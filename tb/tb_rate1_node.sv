// tb_rate1_node: random LLR vectors for every node length 1..64, with and
// without a flip; checks hard decisions, the flipped bit, decision LLRs
// |alpha_d| and the valid mask against values computed here.
module tb_rate1_node;
  localparam int P = 64, QA = 8, QL = 8;
  logic signed [QA-1:0] alpha [P];
  logic [6:0] nv_log;
  logic flip_en;
  logic [5:0] flip_d;
  logic beta [P], lam_valid [P];
  logic [QL-1:0] lam [P];
  int checks = 0, failures = 0;

  rate1_node #(.P(P), .QA(QA), .QL(QL)) dut (.*);

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      int nv;
      nv_log = 7'($urandom % 7);
      nv = 1 << nv_log;
      flip_en = 1'($urandom);
      flip_d = 6'($urandom % nv);
      for (int i = 0; i < P; i++) alpha[i] = QA'(int'($urandom % 255) - 127);
      #1;
      for (int i = 0; i < P; i++) begin
        bit eb, ev;
        int el, v;
        v  = int'(alpha[i]);
        ev = i < nv;
        eb = ev ? ((v < 0) ^ (flip_en && i == int'(flip_d))) : 0;
        el = ev ? (v < 0 ? -v : v) : 0;
        checks++;
        if (beta[i] != eb || lam_valid[i] != ev || int'(lam[i]) != el) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d lane %0d", t, i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
