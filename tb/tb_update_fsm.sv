// tb_update_fsm: runs INIT, ROW, COL and PER jobs on buffers held in the
// testbench and checks every written word against a double-precision
// reference of the same equations: the i-entry update, all 100 cells of a
// row (with the epsc accumulation), all 100 cells of a column fragment,
// and the periodic update with its winner-take-all. Also checks the job
// lengths in cycles.
module tb_update_fsm;
  import ebrain_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;

  logic start = 0;
  job_e job = JOB_INIT;
  logic [6:0] col = 0;
  ms_t t_now = 0;
  cell_const_t cc, icc;
  jvec_const_t jc;
  logic busy, done, fired;
  logic [6:0] fire_mcu;
  logic b_re, b_we, p_re, p_we;
  logic [7:0] b_raddr, b_waddr;
  logic [191:0] b_rdata, b_wdata;
  logic [6:0] p_raddr, p_waddr;
  jentry_t p_rdata, p_wdata;
  logic [191:0] bufm [200];
  jentry_t pvec [100];
  int checks = 0, failures = 0;
  int fire_seen = 0, last_mcu = -1;
  always @(posedge clk) if (fired) begin fire_seen++; last_mcu = int'(fire_mcu); end

  update_fsm dut (.*);

  always @(posedge clk) begin
    if (b_re) b_rdata <= bufm[b_raddr];
    if (p_re) p_rdata <= pvec[p_raddr];
    if (b_we) bufm[b_waddr] <= b_wdata;
    if (p_we) pvec[p_waddr] <= p_wdata;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real R(fp_t f); return fp_to_real(f); endfunction
  function automatic fp_t F(real r); return real_to_fp(r); endfunction
  function automatic real rnd(real lo, real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 1000000)) / 1000000.0;
  endfunction

  task automatic close(string what, fp_t got, real want);
    real g, tol;
    g = R(got);
    tol = 2e-4 * ((want < 0 ? -want : want) + 1.0);
    checks++;
    if ((g - want > tol) || (want - g > tol)) begin
      failures++;
      $display("FAIL %s got %g want %g", what, g, want);
    end
  endtask

  // reference lazy update; constants as reals
  typedef struct { real nkzi, nkzj, nke, nkf, nkp, nke2, nk4, kn, k1, k2, k3, wg, eps; } rc_t;
  rc_t rcc, ric;

  task automatic ref_cell(input cell_t c, input real pi, input real pj, input real inci,
                          input real incj, input int t, input rc_t k,
                          output real zi, output real zj, output real e, output real p, output real w);
    real zz, pdt, zi0, zj0, e0, p0;
    zi0 = R(c.zi2); zj0 = R(c.zj2); e0 = R(c.eij); p0 = R(c.pij);
    pdt = real'(t - int'(c.tij));
    zz = zi0 * zj0;
    zi = zi0 * $exp(k.nkzi*pdt) + inci; zj = zj0 * $exp(k.nkzj*pdt) + incj;
    e = (e0 + zz*k.kn) * $exp(k.nke*pdt) - zz * $exp(k.nkf*pdt) * k.kn;
    p = (p0 + e0*k.k1 + k.k2*zz - k.k3*zz) * $exp(k.nkp*pdt)
        - ((e0*k.k1 + zz*k.k2) * $exp(k.nke2*pdt) - zz*k.k3*$exp(k.nk4*pdt));
    w = k.wg * $ln((p + k.eps*k.eps) / ((pi + k.eps)*(pj + k.eps)));
  endtask

  function automatic cell_const_t to_cc(rc_t k);
    return '{nkzi: F(k.nkzi), nkzj: F(k.nkzj), nke: F(k.nke), nkf: F(k.nkf), nkp: F(k.nkp),
             nke2: F(k.nke2), nk4: F(k.nk4), kn: F(k.kn), k1: F(k.k1), k2: F(k.k2), k3: F(k.k3),
             wgain: F(k.wg), eps: F(k.eps), eps2: F(k.eps*k.eps)};
  endfunction

  function automatic cell_t rnd_cell(int t);
    return '{zi2: F(rnd(0, 2)), zj2: F(rnd(0, 2)), eij: F(rnd(0, 1)), pij: F(rnd(0.01, 0.5)),
             tij: 32'(t - $urandom_range(1, 40)), wij: '0};
  endfunction

  task automatic run_job(job_e j, logic [6:0] c, output int cycles);
    @(negedge clk); job = j; col = c; start = 1;
    @(negedge clk); start = 0; cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    int cyc;
    real zi, zj, e, p, w, pi_new, ep;
    cell_t  c0 [200];
    jentry_t j0 [100];
    ientry_t ie, ie_new;

    rcc = '{nkzi: -0.2, nkzj: -0.25, nke: -0.05, nkf: -0.45, nkp: -0.001, nke2: -0.04, nk4: -0.3,
            kn: 1.3, k1: 0.02, k2: 0.7, k3: 0.9, wg: 1.0, eps: 0.01};
    ric = rcc; ric.nkzj = 0.0; ric.nkf = -0.2;
    cc = to_cc(rcc); icc = to_cc(ric);
    jc = '{dz: F(0.8), ae: F(0.1), ap: F(0.01), eps: F(0.01), thr: F(-3.0), pinit: F(0.05)};
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- INIT ----
    run_job(JOB_INIT, 0, cyc);
    for (int k = 0; k < 100; k++) begin
      checks++;
      if (pvec[k] != '{zj: 0, ej: 0, pj: F(0.05), bj: 0, epsc: 0}) begin failures++; $display("FAIL init %0d", k); end
    end
    for (int k = 0; k < 100; k++) begin
      pvec[k] = '{zj: F(rnd(0, 1)), ej: F(rnd(0, 1)), pj: F(rnd(0.01, 0.3)), bj: 0, epsc: F(rnd(-1, 1))};
      j0[k] = pvec[k];
    end

    // ---- ROW ----
    t_now = 500;
    for (int k = 0; k < 100; k++) begin c0[k] = rnd_cell(500); bufm[k] = c0[k]; end
    ie = '{zi: F(rnd(0, 2)), ei: F(rnd(0, 1)), pi: F(rnd(0.01, 0.3)), ti: 32'(480), pad: '0};
    bufm[100] = ie;
    run_job(JOB_ROW, 0, cyc);
    checks++; if (cyc != 19 + 50 * 22 + 2) begin failures++; $display("FAIL row cycles %0d", cyc); end
    begin
      cell_t ic;
      ic = '{zi2: ie.zi, zj2: FP_ONE, eij: ie.ei, pij: ie.pi, tij: ie.ti, wij: '0};
      ref_cell(ic, 1.0, 1.0, 1.0, 0.0, 500, ric, zi, zj, e, p, w);
      ie_new = bufm[100];
      close("i.zi", ie_new.zi, zi); close("i.ei", ie_new.ei, e); close("i.pi", ie_new.pi, p);
      checks++; if (ie_new.ti != 500) begin failures++; $display("FAIL i.ti"); end
      pi_new = R(ie_new.pi);
    end
    for (int k = 0; k < 100; k++) begin
      cell_t nc;
      ref_cell(c0[k], pi_new, R(j0[k].pj), 1.0, 0.0, 500, rcc, zi, zj, e, p, w);
      nc = bufm[k];
      close("row.zi", nc.zi2, zi); close("row.zj", nc.zj2, zj); close("row.e", nc.eij, e);
      close("row.p", nc.pij, p); close("row.w", nc.wij, w);
      close("row.epsc", pvec[k].epsc, R(j0[k].epsc) + w);
      checks++; if (nc.tij != 500) begin failures++; $display("FAIL row tij"); end
      j0[k] = pvec[k];
    end

    // ---- COL ----
    t_now = 520;
    for (int k = 0; k < 100; k++) begin
      c0[k] = rnd_cell(520); bufm[k] = c0[k];
      ie = '{zi: F(rnd(0, 1)), ei: F(rnd(0, 1)), pi: F(rnd(0.01, 0.3)), ti: 32'(400), pad: '0};
      bufm[100 + k] = ie;
    end
    run_job(JOB_COL, 7'd37, cyc);
    checks++; if (cyc != 2 + 50 * 24 + 2) begin failures++; $display("FAIL col cycles %0d", cyc); end
    for (int k = 0; k < 100; k++) begin
      cell_t nc;
      ientry_t ik;
      ik = bufm[100 + k];
      ref_cell(c0[k], R(ik.pi), R(j0[37].pj), 0.0, 1.0, 520, rcc, zi, zj, e, p, w);
      nc = bufm[k];
      close("col.zi", nc.zi2, zi); close("col.zj", nc.zj2, zj); close("col.e", nc.eij, e);
      close("col.p", nc.pij, p); close("col.w", nc.wij, w);
    end

    // ---- PER, twice: once with a clear winner, once with nobody above threshold ----
    for (int rep = 0; rep < 2; rep++) begin
      int exp_best;
      real best, sup, bj;
      bit got_fire;
      int got_mcu;
      jc.thr = F(rep == 0 ? -3.0 : 50.0);
      for (int k = 0; k < 100; k++) j0[k] = pvec[k];
      fire_seen = 0;
      @(negedge clk); job = JOB_PER; start = 1;
      @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      repeat (2) @(negedge clk);
      got_fire = (fire_seen == 1);
      got_mcu = last_mcu;
      checks++; if (cyc != 50 * 14 + 2) begin failures++; $display("FAIL per cycles %0d", cyc); end
      exp_best = -1; best = 0.0;
      for (int k = 0; k < 100; k++) begin
        real z, ej, pj, zn, en, pn;
        z = R(j0[k].zj); ej = R(j0[k].ej); pj = R(j0[k].pj);
        zn = z * 0.8; en = ej + (z - ej) * 0.1; pn = pj + (ej - pj) * 0.01;
        bj = $ln(pn + 0.01); sup = bj + R(j0[k].epsc);
        if (sup > R(jc.thr) && (exp_best < 0 || sup > best)) begin exp_best = k; best = sup; end
      end
      // the winner's Zj carries the +1
      checks++;
      if (rep == 0) begin
        if (!got_fire || got_mcu != exp_best) begin failures++; $display("FAIL winner %0d vs %0d", got_mcu, exp_best); end
      end else if (got_fire) begin failures++; $display("FAIL fired below threshold"); end
      for (int k = 0; k < 100; k++) begin
        real z, ej, pj, pn;
        z = R(j0[k].zj); ej = R(j0[k].ej); pj = R(j0[k].pj);
        pn = pj + (ej - pj) * 0.01;
        close("per.zj", pvec[k].zj, z * 0.8 + ((k == exp_best) ? 1.0 : 0.0));
        close("per.pj", pvec[k].pj, pn);
        close("per.bj", pvec[k].bj, $ln(pn + 0.01));
        checks++; if (pvec[k].epsc != 0) begin failures++; $display("FAIL epsc not cleared"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
