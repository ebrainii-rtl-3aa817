// tb_cell_update: drives random cells and j-vector entries through one FPU
// set and compares every output with the lazy-evaluation equations worked
// out here in double precision. Also checks the 15/7-cycle latencies.
module tb_cell_update;
  import ebrain_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;

  logic start = 0, mode_jvec = 0;
  ms_t  t_now;
  cell_t cell_in, cell_out;
  fp_t  pi, pj, inc_i, inc_j, epsc_in, epsc_out, zj_plus, support;
  cell_const_t cc;
  jentry_t jin, jout;
  jvec_const_t jc;
  logic busy, done, fire;
  int checks = 0, failures = 0;

  cell_update dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real R(fp_t f); return fp_to_real(f); endfunction
  function automatic fp_t F(real r); return real_to_fp(r); endfunction

  task automatic close(string what, fp_t got, real want);
    real g, tol;
    g = R(got);
    tol = 1e-4 * ((want < 0 ? -want : want) + 1.0);
    checks++;
    if ((g - want > tol) || (want - g > tol)) begin
      failures++;
      $display("FAIL %s got %g want %g", what, g, want);
    end
  endtask

  function automatic real rnd(real lo, real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 1000000)) / 1000000.0;
  endfunction

  real kzi, kzj, ke_, kp, ke2, k4, kn, k1, k2, k3, wg, eps;
  real zi0, zj0, e0, p0, rpi, rpj, pdt, ep;
  real zi, zj, zz, E, P, W;
  int  cyc;

  initial begin
    kzi = 0.2; kzj = 0.25; ke_ = 0.05; kp = 0.001; ke2 = 0.04; k4 = 0.3;
    kn = 1.3; k1 = 0.02; k2 = 0.7; k3 = 0.9; wg = 1.0; eps = 0.01;
    cc = '{nkzi: F(-kzi), nkzj: F(-kzj), nke: F(-ke_), nkf: F(-(kzi+kzj)), nkp: F(-kp),
           nke2: F(-ke2), nk4: F(-k4), kn: F(kn), k1: F(k1), k2: F(k2), k3: F(k3),
           wgain: F(wg), eps: F(eps), eps2: F(eps*eps)};
    jc = '{dz: F(0.8), ae: F(0.1), ap: F(0.01), eps: F(eps), thr: F(-2.0), pinit: F(0.01)};
    cell_in = '0; jin = '0; pi = 0; pj = 0; inc_i = 0; inc_j = 0; epsc_in = 0; t_now = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      zi0 = rnd(0.0, 2.0); zj0 = rnd(0.0, 2.0); e0 = rnd(0.0, 1.0); p0 = rnd(0.01, 0.5);
      rpi = rnd(0.01, 0.5); rpj = rnd(0.01, 0.5); ep = rnd(-1.0, 1.0);
      t_now = 32'(1000 + $urandom_range(0, 500));
      cell_in.zi2 = F(zi0); cell_in.zj2 = F(zj0); cell_in.eij = F(e0); cell_in.pij = F(p0);
      cell_in.tij = t_now - 32'($urandom_range(1, 60)); cell_in.wij = '0;
      zi0 = R(cell_in.zi2); zj0 = R(cell_in.zj2); e0 = R(cell_in.eij); p0 = R(cell_in.pij);
      pi = F(rpi); pj = F(rpj); rpi = R(pi); rpj = R(pj);
      inc_i = (n % 2 != 0) ? FP_ONE : FP_ZERO; inc_j = (n % 2 != 0) ? FP_ZERO : FP_ONE;
      epsc_in = F(ep); ep = R(epsc_in);
      pdt = real'(t_now - cell_in.tij);
      mode_jvec = 0;
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      zz = zi0 * zj0;
      zi = zi0 * $exp(-kzi*pdt); zj = zj0 * $exp(-kzj*pdt);
      E = (e0 + zz*kn) * $exp(-ke_*pdt) - zz * $exp(-(kzi+kzj)*pdt) * kn;
      P = (p0 + e0*k1 + k2*zz - k3*zz) * $exp(-kp*pdt)
          - ((e0*k1 + zz*k2) * $exp(-ke2*pdt) - zz*k3*$exp(-k4*pdt));
      W = wg * ($ln(P + eps*eps) - $ln((rpi+eps)*(rpj+eps)));
      close("zi", cell_out.zi2, zi + ((n % 2 != 0) ? 1.0 : 0.0));
      close("zj", cell_out.zj2, zj + ((n % 2 != 0) ? 0.0 : 1.0));
      close("eij", cell_out.eij, E);
      close("pij", cell_out.pij, P);
      close("wij", cell_out.wij, W);
      close("epsc", epsc_out, ep + W);
      checks++; if (cell_out.tij != t_now) begin failures++; $display("FAIL tij"); end
      checks++; if (cyc != 16) begin failures++; $display("FAIL cell latency %0d", cyc); end
    end
    for (int n = 0; n < 20; n++) begin
      real z, e, p, ez, pz, bj, sup;
      z = rnd(0.0, 2.0); e = rnd(0.0, 1.0); p = rnd(0.001, 0.5); ep = rnd(-3.0, 3.0);
      jin = '{zj: F(z), ej: F(e), pj: F(p), bj: FP_ZERO, epsc: F(ep)};
      z = R(jin.zj); e = R(jin.ej); p = R(jin.pj); ep = R(jin.epsc);
      mode_jvec = 1;
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      ez = e + (z - e) * 0.1; pz = p + (e - p) * 0.01;
      bj = $ln(pz + eps); sup = bj + ep;
      close("zj'", jout.zj, z * 0.8);
      close("ej'", jout.ej, ez);
      close("pj'", jout.pj, pz);
      close("bj", jout.bj, bj);
      close("support", support, sup);
      close("zj+1", zj_plus, z * 0.8 + 1.0);
      checks++; if (fire != (sup > -2.0)) begin failures++; $display("FAIL fire"); end
      checks++; if (cyc != 8) begin failures++; $display("FAIL jvec latency %0d", cyc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
