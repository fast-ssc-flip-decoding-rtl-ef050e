// fssc_harness: drives one fast-SSC-flip decoder instance through random
// frames of the (512,128) CRC-aided polar code at a list of Eb/N0 points and
// compares every result with the behavioural decoder of fssc_tb_pkg
// (codeword, CRC verdict, trials, cycles = trials x cycles per trial).
// Parameters select Tmax, the SPC scaling s = 2^-S_SHIFT and whether the
// code is compiled with SPC nodes. Reports frame-error counts and average
// execution time per point, and raises 'finished' with its check counts.
module fssc_harness #(
  parameter int  T_MAX   = 8,
  parameter int  S_SHIFT = 1,
  parameter bit  USE_SPC = 1,
  parameter int  FRAMES  = 50,
  parameter string NAME  = "config"
) (
  output logic finished,
  output int   checks,
  output int   failures
);
  import fssc_pkg::*;
  import fssc_tb_pkg::*;

  localparam int N = 512, K = 128, P = 64, QC = 6, QA = 8, QL = 8;
  localparam int TW = $clog2(T_MAX + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 llr_we = 0, mask_we = 0, prog_we = 0, start = 0;
  logic [2:0]           llr_addr = 0, mask_addr = 0;
  logic signed [QC-1:0] llr_data [P];
  logic [P-1:0]         mask_data = '0;
  logic [9:0]           prog_addr = '0;
  instr_t               prog_data;
  logic                 busy, done, crc_ok;
  logic [TW-1:0]        trials;
  logic [31:0]          cycles;
  logic [N-1:0]         x_hat;

  fssc_flip_decoder #(.T_MAX(T_MAX), .S_SHIFT(S_SHIFT)) dut (
    .clk, .rst_n, .llr_we, .llr_addr, .llr_data, .mask_we, .mask_addr, .mask_data,
    .prog_we, .prog_addr, .prog_data, .start, .busy, .done, .crc_ok, .trials,
    .cycles, .x_hat);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL [%s]: %s", NAME, what);
    end
  endtask

  code_t c;
  prog_t pr;
  bit    x[NMAX], m[NMAX], xr[NMAX];
  int    llr[NMAX];
  real   snrs[3] = '{1.5, 2.0, 2.5};

  initial begin
    int tc;
    finished = 0;
    checks = 0;
    failures = 0;
    for (int j = 0; j < P; j++) llr_data[j] = '0;
    prog_data = '0;
    build_code(c, N, K, 2.0);
    compile(c, pr, P, 32, USE_SPC);
    tc = trial_cycles(pr, N, P);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < pr.len; i++) begin
      prog_we <= 1; prog_addr <= 10'(i); prog_data <= pr.ins[i];
      @(posedge clk);
    end
    prog_we <= 0;
    for (int ch = 0; ch < N / P; ch++) begin
      mask_we <= 1; mask_addr <= 3'(ch);
      for (int j = 0; j < P; j++) mask_data[j] <= c.info[ch * P + j];
      @(posedge clk);
    end
    mask_we <= 0;
    foreach (snrs[s]) begin
      int errs, trsum, worst;
      errs = 0; trsum = 0; worst = 0;
      for (int f = 0; f < FRAMES; f++) begin
        int rt;
        bit rok, same;
        encode(c, x, m);
        channel(c, x, snrs[s], QC, llr);
        rt = ref_decode(c, pr, llr, QA, QL, S_SHIFT, T_MAX, xr, rok);
        for (int ch = 0; ch < N / P; ch++) begin
          llr_we <= 1; llr_addr <= 3'(ch);
          for (int j = 0; j < P; j++) llr_data[j] <= QC'(llr[ch * P + j]);
          @(posedge clk);
        end
        llr_we <= 0;
        start <= 1;
        @(posedge clk);
        start <= 0;
        while (!done) @(posedge clk);
        same = 1;
        for (int i = 0; i < N; i++) if (x_hat[i] != xr[i]) same = 0;
        check(same, "codeword estimate equals the reference");
        check(crc_ok == rok, "CRC verdict equals the reference");
        check(int'(trials) == rt, "trials equal the reference");
        check(int'(cycles) == int'(trials) * tc, "cycles = trials x cycles per trial");
        if (!crc_ok) errs++;
        trsum += int'(trials);
        if (int'(cycles) > worst) worst = int'(cycles);
      end
      $display("[%s] Eb/N0 %0.1f dB: FER %0d/%0d, %0.2f trials, %0.1f cycles on average (%0d per trial, worst seen %0d, bound %0d)",
               NAME, snrs[s], errs, FRAMES, real'(trsum) / FRAMES, real'(trsum) * tc / FRAMES, tc, worst, T_MAX * tc);
    end
    check(T_MAX * tc > 0, "cycle bound computed");
    finished = 1;
  end
endmodule
