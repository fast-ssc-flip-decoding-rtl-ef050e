// tb_insert_sort: feeds batches of up to K candidates per cycle, as a node
// unit would, and after each merge compares the list with the K smallest of
// everything inserted since the last clear (ties: earlier insertion first),
// kept here as a plain history. Also checks that the list keeps its
// contents while 'ins' is low and is empty after 'clr'.
module tb_insert_sort;
  localparam int K = 7, QL = 8, IW = 7;
  logic clk = 0, rst_n = 0, clr = 0, ins = 0;
  logic [QL-1:0] in_lam [K], list_lam [K];
  logic [IW-1:0] in_idx [K], list_idx [K];
  logic in_valid [K], list_valid [K];
  int checks = 0, failures = 0;
  int h_lam[$], h_idx[$];

  always #5 clk = ~clk;

  insert_sort #(.K(K), .QL(QL), .IW(IW)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(int t);
    bit taken[$];
    bit ok;
    ok = 1;
    taken = {};
    foreach (h_lam[i]) taken.push_back(0);
    for (int r = 0; r < K; r++) begin
      int b;
      b = -1;
      foreach (h_lam[i])
        if (!taken[i] && (b < 0 || h_lam[i] < h_lam[b])) b = i;
      if (b < 0) begin
        if (list_valid[r]) ok = 0;
      end else begin
        taken[b] = 1;
        if (!list_valid[r] || int'(list_lam[r]) != h_lam[b] || int'(list_idx[r]) != h_idx[b]) ok = 0;
      end
    end
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL at step %0d", t);
    end
  endtask

  initial begin
    for (int i = 0; i < K; i++) begin in_lam[i] = '0; in_idx[i] = '0; in_valid[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int t = 0; t < 400; t++) begin
      if (t % 50 == 0) begin
        clr <= 1;
        @(posedge clk);
        clr <= 0;
        h_lam = {}; h_idx = {};
        @(negedge clk);
        compare(t);
      end
      // a batch, sorted as lambda_select delivers it
      begin
        int n, v[K];
        n = int'($urandom % (K + 1));
        for (int i = 0; i < n; i++) v[i] = int'($urandom % ((t % 2) ? 16 : 256));
        for (int i = 1; i < n; i++)
          for (int j = i; j > 0 && v[j] < v[j-1]; j--) begin int tmp; tmp = v[j]; v[j] = v[j-1]; v[j-1] = tmp; end
        @(negedge clk);
        ins <= ($urandom % 4 != 0);
        for (int i = 0; i < K; i++) begin
          in_valid[i] <= i < n;
          in_lam[i]   <= QL'(i < n ? v[i] : 0);
          in_idx[i]   <= IW'(t + i);
        end
        @(posedge clk);
        #1;
        if (ins)
          for (int i = 0; i < n; i++) begin h_lam.push_back(v[i]); h_idx.push_back((t + i) % 128); end
        ins <= 0;
        @(negedge clk);
        compare(t);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
