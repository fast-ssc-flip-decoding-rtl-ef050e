// tb_fssc_flip_decoder: end-to-end test of the decoder at its default size,
// the (512,128) polar code with a 16-bit CRC, P = 64, Tmax = 8, s = 0.5.
//
// The code is built from Bhattacharyya parameters, compiled into an
// instruction list and loaded with its information mask. Random CRC-
// protected messages are encoded, sent over a BPSK/AWGN channel at several
// Eb/N0 points and decoded. For every frame the test compares, against the
// behavioural decoder of fssc_tb_pkg, the codeword estimate, the CRC
// verdict and the number of trials, and checks that the cycle count equals
// trials x the cycle cost of one trial. When the CRC matches, the decoded
// message must also equal the one sent (a CRC false positive would count
// as a failure). It also counts how often each mechanism happened: a flip
// in each of the four leaf types, a frame rescued by a flip, a frame given
// up after Tmax trials, and counts a failure for any that never did.
module tb_fssc_flip_decoder;
  import fssc_pkg::*;
  import fssc_tb_pkg::*;

  localparam int N = 512, K = 128, P = 64, TMAX = 8, QC = 6, QA = 8, QL = 8, SSH = 1;
  localparam int FRAMES_PER_POINT = 100;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 llr_we = 0, mask_we = 0, prog_we = 0, start = 0;
  logic [2:0]           llr_addr = 0, mask_addr = 0;
  logic signed [QC-1:0] llr_data [P];
  logic [P-1:0]         mask_data = '0;
  logic [9:0]           prog_addr = '0;
  instr_t               prog_data;
  logic                 busy, done, crc_ok;
  logic [3:0]           trials;
  logic [31:0]          cycles;
  logic [N-1:0]         x_hat;

  fssc_flip_decoder dut (
    .clk, .rst_n, .llr_we, .llr_addr, .llr_data, .mask_we, .mask_addr, .mask_data,
    .prog_we, .prog_addr, .prog_data, .start, .busy, .done, .crc_ok, .trials,
    .cycles, .x_hat);

  int checks = 0, failures = 0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // mechanism counters, sampled inside the decoder
  int flips_rate1 = 0, flips_rep = 0, flips_birep = 0, flips_spc = 0;
  always @(posedge clk)
    if (rst_n && dut.state == 3'd1 && dut.in_node)
      case (dut.ins.op)
        OP_RATE1: flips_rate1++;
        OP_REP:   flips_rep++;
        OP_BIREP: flips_birep++;
        OP_SPC:   flips_spc++;
        default: ;
      endcase

  // watchdog
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  code_t c;
  prog_t pr;
  bit    x[NMAX], m[NMAX], xr[NMAX], md[NMAX];
  int    llr[NMAX];
  real   snrs[6] = '{0.5, 1.0, 1.5, 2.0, 2.5, 3.0};

  initial begin
    int tc, rescued, given_up, max_cyc, nop[16];
    real avg_tr;
    for (int j = 0; j < P; j++) llr_data[j] = '0;
    prog_data = '0;
    build_code(c, N, K, 2.0);
    compile(c, pr, P, 32, 1);
    tc = trial_cycles(pr, N, P);
    for (int i = 0; i < 16; i++) nop[i] = 0;
    for (int i = 0; i < pr.len; i++) nop[int'(pr.ins[i].op)]++;
    $display("program: %0d instructions, F %0d G %0d COMB %0d RATE0 %0d RATE1 %0d REP %0d BIREP %0d SPC %0d; %0d cycles per trial",
             pr.len, nop[0], nop[1], nop[2], nop[3], nop[4], nop[5], nop[6], nop[7], tc);
    check(pr.len <= 2 * N, "program fits the instruction memory");

    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // load program and information mask
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

    rescued = 0; given_up = 0; max_cyc = 0;
    foreach (snrs[s]) begin
      int errs, trsum;
      errs = 0; trsum = 0;
      for (int f = 0; f < FRAMES_PER_POINT; f++) begin
        int  rt;
        bit  rok, same;
        encode(c, x, m);
        channel(c, x, snrs[s], QC, llr);
        rt = ref_decode(c, pr, llr, QA, QL, SSH, TMAX, xr, rok);
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
        check(same, $sformatf("codeword estimate equals the reference (Eb/N0 %0.1f frame %0d)", snrs[s], f));
        check(crc_ok == rok, "CRC verdict equals the reference");
        check(int'(trials) == rt, $sformatf("trials %0d equal the reference %0d", trials, rt));
        check(int'(cycles) == int'(trials) * tc, $sformatf("cycles %0d = trials x %0d", cycles, tc));
        if (crc_ok) begin
          for (int i = 0; i < N; i++) x[i] = x_hat[i];
          extract(c, x, md);
          same = 1;
          for (int i = 0; i < K; i++) if (md[i] != m[i]) same = 0;
          check(same, "a CRC match delivers the message sent");
        end else errs++;
        if (crc_ok && trials > 1) rescued++;
        if (!crc_ok) given_up++;
        if (int'(cycles) > max_cyc) max_cyc = int'(cycles);
        trsum += int'(trials);
      end
      avg_tr = real'(trsum) / FRAMES_PER_POINT;
      $display("Eb/N0 %0.1f dB: %0d/%0d frames failed, %0.2f trials and %0.1f cycles on average",
               snrs[s], errs, FRAMES_PER_POINT, avg_tr, avg_tr * tc);
    end
    $display("flips: rate-1 %0d, repetition %0d, birepetition %0d, SPC %0d; rescued by a flip %0d, given up %0d, longest %0d cycles",
             flips_rate1, flips_rep, flips_birep, flips_spc, rescued, given_up, max_cyc);
    check(flips_rate1 > 0, "a flip in a rate-1 node happened");
    check(flips_rep > 0, "a flip in a repetition node happened");
    check(flips_birep > 0, "a flip in a birepetition node happened");
    check(flips_spc > 0, "a flip in an SPC node happened");
    check(rescued > 0, "a frame was rescued by a flip");
    check(given_up > 0, "a frame was given up after Tmax trials");
    check(max_cyc <= TMAX * tc, "worst case stays within Tmax trials");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
