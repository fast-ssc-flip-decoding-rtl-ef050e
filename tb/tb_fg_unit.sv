// tb_fg_unit: checks the P-lane f / g / combine array on random LLR pairs,
// including the saturation corners, against the min-sum equations written
// out independently here. Combinational block: a check per lane per vector.
module tb_fg_unit;
  localparam int P = 64, QA = 8;
  logic signed [QA-1:0] a [P], b [P], f_out [P], g_out [P];
  logic beta_l [P], beta_r [P], comb_lo [P], comb_hi [P];
  int checks = 0, failures = 0;

  fg_unit #(.P(P), .QA(QA)) dut (.*);

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int clip(int v);
    return v > 127 ? 127 : (v < -127 ? -127 : v);
  endfunction

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < P; i++) begin
        int ra, rb;
        ra = int'($urandom % 255) - 127;
        rb = int'($urandom % 255) - 127;
        if (t < 4) begin ra = (t % 2) ? 127 : -127; rb = (t / 2) ? 127 : -127; end
        a[i] = QA'(ra); b[i] = QA'(rb);
        beta_l[i] = 1'($urandom); beta_r[i] = 1'($urandom);
      end
      #1;
      for (int i = 0; i < P; i++) begin
        int ea, eb, ef, eg, m;
        ea = int'(a[i]); eb = int'(b[i]);
        m  = (ea < 0 ? -ea : ea) < (eb < 0 ? -eb : eb) ? (ea < 0 ? -ea : ea) : (eb < 0 ? -eb : eb);
        ef = ((ea < 0) ^ (eb < 0)) ? -m : m;
        eg = clip(beta_l[i] ? eb - ea : eb + ea);
        checks++;
        if (int'(f_out[i]) != ef || int'(g_out[i]) != eg ||
            comb_lo[i] != (beta_l[i] ^ beta_r[i]) || comb_hi[i] != beta_r[i]) begin
          failures++;
          if (failures < 10)
            $display("FAIL lane %0d: a=%0d b=%0d f=%0d (%0d) g=%0d (%0d)", i, ea, eb, f_out[i], ef, g_out[i], eg);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
