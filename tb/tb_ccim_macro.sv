// tb_ccim_macro: end-to-end test of the whole macro at its default size
// (8 channels x 8 complex elements x 64 rows = 64 kb of weights).
//
// It writes every weight through the write port, then runs four workloads,
// each operation checked against the reference arithmetic on all 16 outputs
// and against the exact complex dot product (error at most 1 LSB = 2^11):
//   1. random rows, random complex inputs, with idle gaps and back-to-back
//      issue mixed; weights of a row are rewritten between operations;
//   2. the complex end-to-end sweep: w = -127 - j127 in every element, the
//      real input a triangle over the full range, the imaginary input equal
//      to it (in phase) or its negative (out of phase); in phase the real
//      output must be exactly 0, out of phase the imaginary output;
//   3. the transfer function: inputs swept from -127 to +127 (Ii = -Ir) at
//      the same weights; the real output must be monotonic (non-increasing);
//   4. uniformly random inputs and weights, reporting the RMS error relative
//      to full scale.
// Every operation's results must change 8 clocks after the accepting edge and
// a back-to-back burst must issue one operation per 8 clocks. Counted
// mechanisms (each must occur): issue from idle, back-to-back issue, D_NEG
// and D_POS both non-zero in one lane, negative and positive ADC results,
// subtracted cross term, weight rewrite followed by use.
module tb_ccim_macro;
  import tb_ccim_ref_pkg::*;
  localparam int NCH = 8, NE = 8, NR = 64, MAXOPS = 4096;

  logic clk = 0, rst_n = 0, start = 0;
  logic [5:0] row = '0;
  logic [NE-1:0][7:0] in_re = '0, in_im = '0;
  logic accept, busy, done;
  logic wr_en = 0;
  logic [2:0] wr_ch = '0, wr_elem = '0;
  logic [5:0] wr_row = '0;
  logic [15:0] wr_data = '0;
  logic [NCH-1:0][7:0] cimo_re, cimo_im;

  ccim_macro dut (.*);

  always #5 clk = ~clk;

  logic [15:0] wsh [NCH][NE][NR];
  int exp_re [MAXOPS][NCH], exp_im [MAXOPS][NCH];
  int x_re [MAXOPS][NCH], x_im [MAXOPS][NCH];
  int acc_cycle [MAXOPS];
  int n_issued = 0, n_checked = 0, cycle = 0;
  int checks = 0, failures = 0;
  int m_idle = 0, m_b2b = 0, m_posneg = 0, m_acim_neg = 0, m_acim_pos = 0;
  int m_cross = 0, m_rewrite = 0;
  real err_sq = 0.0;
  int err_n = 0;
  int last_re [NCH];

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  always @(negedge clk) cycle++;

  // reference for the operation accepted now
  task automatic predict(int id);
    for (int c = 0; c < NCH; c++) begin
      ops16_t a_re, b_re, a_im, b_im;
      logic [15:0] n_re;
      int dp = 0, dn = 0, q = 0;
      x_re[id][c] = 0; x_im[id][c] = 0;
      for (int k = 0; k < NE; k++) begin
        logic [7:0] wr, wi;
        wr = wsh[c][k][row][7:0]; wi = wsh[c][k][row][15:8];
        a_re[2*k] = in_re[k];   b_re[2*k] = wr;   n_re[2*k] = 1'b0;
        a_re[2*k+1] = in_im[k]; b_re[2*k+1] = wi; n_re[2*k+1] = 1'b1;
        a_im[2*k] = in_re[k];   b_im[2*k] = wi;
        a_im[2*k+1] = in_im[k]; b_im[2*k+1] = wr;
        x_re[id][c] += smf_val(in_re[k]) * smf_val(wr) - smf_val(in_im[k]) * smf_val(wi);
        x_im[id][c] += smf_val(in_re[k]) * smf_val(wi) + smf_val(in_im[k]) * smf_val(wr);
        if (in_im[k][6:0] != 0 && wi[6:0] != 0) m_cross++;
      end
      exp_re[id][c] = lane_cimo(a_re, b_re, n_re);
      exp_im[id][c] = lane_cimo(a_im, b_im, 16'h0);
      for (int u = 0; u < 16; u++)
        if (is_neg(a_re[u], b_re[u], n_re[u])) begin
          dn += top(a_re[u], b_re[u]); q -= acim(a_re[u], b_re[u]);
        end else begin
          dp += top(a_re[u], b_re[u]); q += acim(a_re[u], b_re[u]);
        end
      if (dp > 0 && dn > 0) m_posneg++;
      if (adc_code(q) < 0) m_acim_neg++;
      if (adc_code(q) > 0) m_acim_pos++;
    end
  endtask

  // issue one operation: hold start until accepted; `hold` keeps start high
  // afterwards so the next call can issue back-to-back
  task automatic issue(int r, bit hold);
    row = 6'(r);
    start = 1;
    #1;
    while (!accept) begin
      @(negedge clk);
      #1;
    end
    if (busy) m_b2b++; else m_idle++;
    predict(n_issued);
    acc_cycle[n_issued] = cycle;
    n_issued++;
    @(negedge clk);
    if (!hold) start = 0;
  endtask

  // result monitor
  always @(negedge clk) if (rst_n && done) begin
    if (n_checked >= n_issued) begin
      failures++;
      $display("FAIL done without an operation");
    end else begin
      chk("latency", cycle - acc_cycle[n_checked], 9);   // accepting cycle + 8
      for (int c = 0; c < NCH; c++) begin
        int e_re, e_im;
        chk("cimo_re", int'($signed(cimo_re[c])), exp_re[n_checked][c]);
        chk("cimo_im", int'($signed(cimo_im[c])), exp_im[n_checked][c]);
        e_re = int'($signed(cimo_re[c])) * 2048 - x_re[n_checked][c];
        e_im = int'($signed(cimo_im[c])) * 2048 - x_im[n_checked][c];
        checks++;
        if (e_re > 2048 || e_re < -2048 || e_im > 2048 || e_im < -2048) begin
          failures++;
          $display("FAIL accuracy op %0d ch %0d", n_checked, c);
        end
        err_sq += (real'(e_re) / 2048.0 / 128.0) ** 2 + (real'(e_im) / 2048.0 / 128.0) ** 2;
        err_n += 2;
      end
      n_checked++;
    end
  end

  task automatic write_w(int c, int k, int r, logic [15:0] d);
    @(negedge clk);
    wr_en = 1; wr_ch = 3'(c); wr_elem = 3'(k); wr_row = 6'(r); wr_data = d;
    wsh[c][k][r] = d;
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic wait_idle();
    while (busy || n_checked < n_issued) @(negedge clk);
  endtask

  function automatic int tri_wave(int n);   // -127..127..-127 over 512 steps
    int p = n % 512;
    return (p < 256) ? (-127 + (p * 254) / 255) : (127 - ((p - 256) * 254) / 255);
  endfunction

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // load all 64 kb: rows 62 and 63 hold -127 - j127, the rest random
    for (int c = 0; c < NCH; c++)
      for (int k = 0; k < NE; k++)
        for (int r = 0; r < NR; r++) begin
          wr_en = 1; wr_ch = 3'(c); wr_elem = 3'(k); wr_row = 6'(r);
          wr_data = (r >= 62) ? 16'hffff : 16'($urandom);
          wsh[c][k][r] = wr_data;
          @(negedge clk);
        end
    wr_en = 0;

    // 1. random operations, mixed idle and back-to-back issue
    for (int t = 0; t < 300; t++) begin
      for (int k = 0; k < NE; k++) begin in_re[k] = 8'($urandom); in_im[k] = 8'($urandom); end
      issue($urandom_range(0, 61), bit'($urandom_range(0, 1)));
      if (t % 50 == 25) begin                    // rewrite a row, then use it
        int r = $urandom_range(0, 61);
        start = 0;
        wait_idle();
        for (int k = 0; k < NE; k++) write_w(t % NCH, k, r, 16'($urandom));
        issue(r, 1'b0);
        m_rewrite++;
      end
    end
    start = 0;
    wait_idle();

    // back-to-back burst: 16 operations accepted 8 cycles apart
    begin
      automatic int first = n_issued;
      for (int t = 0; t < 16; t++) begin
        for (int k = 0; k < NE; k++) begin in_re[k] = 8'($urandom); in_im[k] = 8'($urandom); end
        issue($urandom_range(0, 61), 1'b1);
      end
      start = 0;
      wait_idle();
      chk("burst cycles", acc_cycle[first + 15] - acc_cycle[first], 15 * 8);
    end

    // 2. complex end-to-end sweep, 1024 steps
    for (int n = 0; n < 1024; n++) begin
      int vr = tri_wave(n);
      int vi = (n >= 256 && n < 768) ? -vr : vr;
      for (int k = 0; k < NE; k++) begin in_re[k] = to_smf(vr); in_im[k] = to_smf(vi); end
      issue(63, 1'b1);
      if (n > 0 && n_checked > 0) begin
        int id = n_checked - 1;
        // in phase: Re = 0 exactly; out of phase: Im = 0 exactly
        if (id >= 316 && id < 316 + 1024) begin
          int s = id - 316;
          if (s < 256 || s >= 768) chk("in-phase re", exp_re[id][0], 0);
          else                     chk("out-of-phase im", exp_im[id][0], 0);
        end
      end
    end
    start = 0;
    wait_idle();

    // 3. transfer function: Ir = v, Ii = -v, v = -127..127
    for (int v = -127; v <= 127; v++) begin
      for (int k = 0; k < NE; k++) begin in_re[k] = to_smf(v); in_im[k] = to_smf(-v); end
      issue(62, 1'b0);
      wait_idle();
      if (v > -127) begin
        checks++;
        if ($signed(cimo_re[0]) > last_re[0]) begin
          failures++;
          $display("FAIL transfer not monotonic at %0d", v);
        end
      end
      last_re[0] = int'($signed(cimo_re[0]));
      if (v == -127) chk("transfer -FS", last_re[0], 126);
      if (v == 127)  chk("transfer +FS", last_re[0], -126);
    end

    // 4. uniform random operands, RMS error
    err_sq = 0.0; err_n = 0;
    for (int c = 0; c < NCH; c++)
      for (int k = 0; k < NE; k++) write_w(c, k, 0, 16'($urandom));
    for (int t = 0; t < 200; t++) begin
      for (int k = 0; k < NE; k++) begin in_re[k] = 8'($urandom); in_im[k] = 8'($urandom); end
      issue(0, 1'b1);
    end
    start = 0;
    wait_idle();
    $display("uniform random: RMS error %0.3f %% of full scale over %0d outputs",
             100.0 * $sqrt(err_sq / real'(err_n)), err_n);

    $display("mechanisms: idle-issue=%0d back-to-back=%0d pos+neg-DCIM=%0d ACIM<0=%0d ACIM>0=%0d cross-term=%0d rewrite=%0d",
             m_idle, m_b2b, m_posneg, m_acim_neg, m_acim_pos, m_cross, m_rewrite);
    if (m_idle == 0 || m_b2b == 0 || m_posneg == 0 || m_acim_neg == 0 ||
        m_acim_pos == 0 || m_cross == 0 || m_rewrite == 0) begin
      failures++;
      $display("FAIL a mechanism never occurred");
    end
    chk("all checked", n_checked, n_issued);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
