// tb_lambda_select: random (LLR, index, valid) sets with many ties; the
// expected K outputs come from repeatedly taking the smallest remaining
// valid input, the lowest position first among equals.
module tb_lambda_select;
  localparam int M = 64, K = 7, QL = 8, IW = 7;
  logic [QL-1:0] in_lam [M], out_lam [K];
  logic [IW-1:0] in_idx [M], out_idx [K];
  logic in_valid [M], out_valid [K];
  int checks = 0, failures = 0;

  lambda_select #(.M(M), .K(K), .QL(QL), .IW(IW)) dut (.*);

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      bit taken[M];
      int nvalid;
      nvalid = 0;
      for (int i = 0; i < M; i++) begin
        in_lam[i]   = QL'($urandom % ((t % 3 == 0) ? 8 : 256));
        in_idx[i]   = IW'($urandom);
        in_valid[i] = (t % 5 == 0) ? ($urandom % 16 == 0) : ($urandom % 4 != 0);
        taken[i]    = 0;
        nvalid += int'(in_valid[i]);
      end
      #1;
      for (int r = 0; r < K; r++) begin
        int b;
        b = -1;
        for (int i = 0; i < M; i++)
          if (in_valid[i] && !taken[i] && (b < 0 || in_lam[i] < in_lam[b])) b = i;
        checks++;
        if (b < 0) begin
          if (out_valid[r]) begin failures++; $display("FAIL t=%0d slot %0d should be empty", t, r); end
        end else begin
          taken[b] = 1;
          if (!out_valid[r] || out_lam[r] != in_lam[b] || out_idx[r] != in_idx[b]) begin
            failures++;
            if (failures < 10) $display("FAIL t=%0d slot %0d: %0d/%0d expected %0d/%0d", t, r, out_lam[r], out_idx[r], in_lam[b], in_idx[b]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
