// tb_crc_check: random messages whose 16-bit CRC (x^16+x^12+x^5+1, worked
// out bit-serially here) is appended are spread over random information
// masks, fed P bits per cycle; 'ok' must be high one cycle after the last
// chunk. The same frame with one information bit inverted must fail, and a
// flipped frozen (masked-off) bit must not matter.
module tb_crc_check;
  localparam int P = 64, NCH = 8, N = P * NCH;
  logic clk = 0, rst_n = 0, start = 0, en = 0, ok;
  logic [P-1:0] bits = '0, mask = '0;
  logic [15:0] crc;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  crc_check #(.P(P), .W(16), .POLY(16'h1021)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [15:0] step(logic [15:0] r, bit b);
    bit fb;
    fb = r[15] ^ b;
    return {r[14:0], 1'b0} ^ (fb ? 16'h1021 : 16'h0);
  endfunction

  bit fr[N], mk[N];

  task automatic run(bit expect_ok, string what);
    @(negedge clk);
    start <= 1;
    @(negedge clk);
    start <= 0;
    for (int c = 0; c < NCH; c++) begin
      en <= 1;
      for (int j = 0; j < P; j++) begin bits[j] <= fr[c * P + j]; mask[j] <= mk[c * P + j]; end
      @(negedge clk);
    end
    en <= 0;
    checks++;
    if (ok != expect_ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < 60; t++) begin
      logic [15:0] r;
      int k, pos[$];
      k = 0;
      pos = {};
      for (int i = 0; i < N; i++) begin
        mk[i] = ($urandom % 4 == 0);
        fr[i] = 1'($urandom);
        if (mk[i]) pos.push_back(i);
      end
      k = pos.size();
      r = '0;
      for (int i = 0; i < k - 16; i++) r = step(r, fr[pos[i]]);
      for (int i = 0; i < 16; i++) fr[pos[k - 16 + i]] = r[15 - i];
      run(1, "CRC of a correct frame");
      begin
        int fz;
        fz = 0;
        while (mk[fz]) fz++;
        fr[fz] = !fr[fz];
        run(1, "a frozen bit is ignored");
      end
      begin
        int b;
        b = pos[$urandom % k];
        fr[b] = !fr[b];
        run(0, "a single-bit error is caught");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
