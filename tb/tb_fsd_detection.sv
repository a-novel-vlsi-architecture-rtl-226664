// tb_fsd_detection: the decoder on simulated 4x4 16-QAM Rayleigh channels.
//
// For each vector the testbench draws a complex Gaussian channel H (unit
// variance per entry), a random 16-QAM vector s and white Gaussian noise at a
// given SNR, forms y = H s + n, builds the real-valued model, and runs a
// sorted QR decomposition (modified Gram-Schmidt, weakest column first, so
// the strongest streams sit at the top of the tree). R and y^ZF = Q^T y are
// halved, rounded to the 12-bit format with 6 fractional bits, and fed to the
// decoder at its default parameters.
//
// Checks, independent of the RTL and of the bit-exact reference model:
//  * every candidate's PED agrees with the squared distance ||y^ZF - R s||^2
//    computed in floating point on the same quantized R and y^ZF: the
//    hardware truncates each of the 8 squared terms to whole LSBs, so it must
//    lie between the exact value minus 8 LSB and the exact value (unless
//    saturated at 4095);
//  * an exhaustive maximum-likelihood search over all 4^8 real symbol vectors
//    on the same quantized data: at 20 dB the ML solution must be in the
//    16-entry list for at least 80 % of the vectors (the bound is this
//    testbench's own sanity limit).
// It prints the vector error rates of the minimum-PED candidate and of ML
// for 12 dB and 20 dB SNR (SNR = total transmit energy / noise per receive
// antenna).
module tb_fsd_detection;
  import fsd_pkg::*;

  localparam int NVEC = 200;
  localparam int N = 8;          // real dimensions
  localparam real SCALE = 32.0;  // 2^6 fractional bits, times 1/2 pre-scaling

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, ready, busy, done, b_sat, d_sat;
  logic signed [11:0] r_mat [8][8];
  logic signed [11:0] y_zf [8];
  sym_t        cand_sym [16][8];
  logic [11:0] cand_ped [16];

  int checks = 0, failures = 0;

  fsd_top dut (.clk, .rst_n, .start, .ready, .busy, .r_mat, .y_zf, .done,
               .cand_sym, .cand_ped, .b_sat, .d_sat);

  always #5ns clk = ~clk;

  initial begin : watchdog
    repeat (2 * NVEC * 40 + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(1, 1000000))) / 1000001.0;
    u2 = (real'($urandom_range(0, 1000000))) / 1000001.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  function automatic int qround(real x);
    int v = int'(x * SCALE);   // int'() rounds to nearest
    return v > 2047 ? 2047 : (v < -2048 ? -2048 : v);
  endfunction

  // Squared distance in LSB units (of the PED) for symbol vector s.
  function automatic real sqdist(int rq [N][N], int yq [N], int s [N]);
    real acc = 0.0;
    for (int i = 0; i < N; i++) begin
      real e = real'(yq[i]);
      for (int j = i; j < N; j++) e -= real'(rq[i][j]) * real'(s[j]);
      acc += e * e;
    end
    return acc / 64.0;
  endfunction

  task automatic run_snr(real snr_db, output int fsd_err, output int ml_err,
                         output int ml_in_list);
    real sigma2;
    fsd_err = 0;
    ml_err = 0;
    ml_in_list = 0;
    // Es per complex 16-QAM symbol is 10; 4 transmit antennas.
    sigma2 = 40.0 / (10.0 ** (snr_db / 10.0));
    for (int v = 0; v < NVEC; v++) begin
      real hr [4][4], hi [4][4], sr [4], si [4], yr [4], yi [4];
      real a [N][N], q [N][N], r [N][N], yv [N], yzf [N], nrm [N];
      int perm [N], tx [N], rq [N][N], yq [N], best_k, ml_s [N], s [N];
      real best_d, ml_d;
      // Channel, symbols, noise.
      for (int m = 0; m < 4; m++) begin
        for (int n = 0; n < 4; n++) begin
          hr[m][n] = gauss() * $sqrt(0.5);
          hi[m][n] = gauss() * $sqrt(0.5);
        end
        sr[m] = real'(2 * int'($urandom_range(0, 3)) - 3);
        si[m] = real'(2 * int'($urandom_range(0, 3)) - 3);
      end
      for (int m = 0; m < 4; m++) begin
        yr[m] = gauss() * $sqrt(sigma2 / 2.0);
        yi[m] = gauss() * $sqrt(sigma2 / 2.0);
        for (int n = 0; n < 4; n++) begin
          yr[m] += hr[m][n] * sr[n] - hi[m][n] * si[n];
          yi[m] += hi[m][n] * sr[n] + hr[m][n] * si[n];
        end
      end
      // Real-valued model.
      for (int m = 0; m < 4; m++) begin
        yv[m] = yr[m];
        yv[m+4] = yi[m];
        tx[m] = int'(sr[m]);
        tx[m+4] = int'(si[m]);
        for (int n = 0; n < 4; n++) begin
          a[m][n] = hr[m][n];    a[m][n+4] = -hi[m][n];
          a[m+4][n] = hi[m][n];  a[m+4][n+4] = hr[m][n];
        end
      end
      // Sorted QR (modified Gram-Schmidt, smallest remaining norm first).
      q = a;
      foreach (r[i, j]) r[i][j] = 0.0;
      for (int j = 0; j < N; j++) begin
        perm[j] = j;
        nrm[j] = 0.0;
        for (int m = 0; m < N; m++) nrm[j] += q[m][j] * q[m][j];
      end
      for (int i = 0; i < N; i++) begin
        int k = i;
        for (int j = i + 1; j < N; j++) if (nrm[j] < nrm[k]) k = j;
        if (k != i) begin
          real t;
          int ti;
          for (int m = 0; m < N; m++) begin
            t = q[m][i]; q[m][i] = q[m][k]; q[m][k] = t;
            t = r[m][i]; r[m][i] = r[m][k]; r[m][k] = t;
          end
          t = nrm[i]; nrm[i] = nrm[k]; nrm[k] = t;
          ti = perm[i]; perm[i] = perm[k]; perm[k] = ti;
        end
        r[i][i] = $sqrt(nrm[i]);
        for (int m = 0; m < N; m++) q[m][i] = q[m][i] / r[i][i];
        for (int l = i + 1; l < N; l++) begin
          r[i][l] = 0.0;
          for (int m = 0; m < N; m++) r[i][l] += q[m][i] * q[m][l];
          for (int m = 0; m < N; m++) q[m][l] -= r[i][l] * q[m][i];
          nrm[l] -= r[i][l] * r[i][l];
        end
      end
      for (int i = 0; i < N; i++) begin
        yzf[i] = 0.0;
        for (int m = 0; m < N; m++) yzf[i] += q[m][i] * yv[m];
      end
      // Quantize and apply.
      for (int i = 0; i < N; i++) begin
        yq[i] = qround(yzf[i]);
        for (int j = 0; j < N; j++) rq[i][j] = (j >= i) ? qround(r[i][j]) : 0;
      end
      @(negedge clk);
      while (!ready) @(negedge clk);
      start = 1'b1;
      @(posedge clk);
      #1ns;
      start = 1'b0;
      for (int i = 0; i < N; i++) begin
        y_zf[i] = 12'(yq[i]);
        for (int j = 0; j < N; j++) r_mat[i][j] = 12'(rq[i][j]);
      end
      @(posedge done);
      #1ns;
      // PED of every candidate against the floating-point distance.
      best_k = 0;
      for (int k = 0; k < 16; k++) begin
        real dk;
        for (int i = 0; i < N; i++) s[i] = 2 * int'(cand_sym[k][i]) - 3;
        dk = sqdist(rq, yq, s);
        checks++;
        if (cand_ped[k] != 12'hfff && !(real'(cand_ped[k]) <= dk && real'(cand_ped[k]) > dk - 8.0)) begin
          failures++;
          if (failures < 10) $display("FAIL PED %0d vs distance %f", cand_ped[k], dk);
        end
        if (cand_ped[k] < cand_ped[best_k]) best_k = k;
      end
      // Hard decision of the list against the (permuted) transmitted vector.
      for (int i = 0; i < N; i++)
        if (2 * int'(cand_sym[best_k][i]) - 3 != tx[perm[i]]) begin
          fsd_err++;
          break;
        end
      // Exhaustive ML on the same quantized data.
      ml_d = 1.0e30;
      for (int c = 0; c < (1 << (2 * N)); c++) begin
        real d;
        for (int i = 0; i < N; i++) s[i] = 2 * ((c >> (2 * i)) & 3) - 3;
        d = sqdist(rq, yq, s);
        if (d < ml_d) begin
          ml_d = d;
          ml_s = s;
        end
      end
      for (int i = 0; i < N; i++)
        if (ml_s[i] != tx[perm[i]]) begin
          ml_err++;
          break;
        end
      for (int k = 0; k < 16; k++) begin
        bit same = 1'b1;
        for (int i = 0; i < N; i++) if (2 * int'(cand_sym[k][i]) - 3 != ml_s[i]) same = 1'b0;
        if (same) begin
          ml_in_list++;
          break;
        end
      end
    end
  endtask

  initial begin
    int fe, me, inl;
    foreach (r_mat[i, j]) r_mat[i][j] = '0;
    foreach (y_zf[i]) y_zf[i] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    run_snr(12.0, fe, me, inl);
    $display("12 dB: vector errors FSD %0d/%0d, ML %0d/%0d, ML in list %0d/%0d", fe, NVEC, me, NVEC, inl, NVEC);
    run_snr(20.0, fe, me, inl);
    $display("20 dB: vector errors FSD %0d/%0d, ML %0d/%0d, ML in list %0d/%0d", fe, NVEC, me, NVEC, inl, NVEC);
    checks++;
    if (inl * 10 < NVEC * 8) begin
      failures++;
      $display("FAIL ML solution in the list for only %0d of %0d vectors at 20 dB", inl, NVEC);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
