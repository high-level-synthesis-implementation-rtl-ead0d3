// mmm_tb_body.svh: end-to-end test body shared by the top-level testbenches.
//
// The including module defines localparams D0I, D0J, D0K, DP, BGA, BGB,
// N_BI, N_BJ, N_K, MAXCYC and the signals of mmm3d_top, and instantiates it as
// `dut`. This body models global memory (A column-major, B and C row-major),
// offers the A and B streams with randomly withheld valid (read stalls) and
// the C stream with randomly withheld ready (write stalls), computes the
// reference product in the order the hardware adds (per k step, per layer, a
// balanced tree of DP products), checks every C beat's address and values,
// checks the iteration counts of each phase against r_A*r_B and the Write beat
// count against d1i*d1j/d0j, and counts how often each mechanism happened.

  localparam int R_A = D0I * D0K / BGA;
  localparam int R_B = D0J * D0K / BGB;
  localparam int NT  = R_A * R_B;
  localparam int D1I = R_B * D0I;
  localparam int D1J = R_A * D0J;
  localparam int D2I = N_BI * D1I;
  localparam int D2J = N_BJ * D1J;
  localparam int D2K = N_K * D0K;
  localparam int NL  = D0K / DP;

  fp32_t gA [D2I*D2K];     // column-major: A(r,c) at c*D2I + r
  fp32_t gB [D2K*D2J];     // row-major:    B(r,c) at r*D2J + c
  fp32_t refC [D2I*D2J];   // row-major
  bit    seen [D2I*D2J];

  int checks = 0, failures = 0;
  int n_rd_stall = 0, n_wr_stall = 0, n_beats = 0, n_done = 0;
  int n_ph [8];
  int cyc = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (MAXCYC) @(posedge clk);
    failures++;
    $display("watchdog expired after %0d cycles", MAXCYC);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // global memory read data follows the addresses the design issues
  always_comb begin
    for (int q = 0; q < BGA; q++) a_data[q] = gA[(int'(a_addr) + q) % (D2I*D2K)];
    for (int q = 0; q < BGB; q++) b_data[q] = gB[(int'(b_addr) + q) % (D2K*D2J)];
  end

  // stream sources and sink with random gaps; valid is held until accepted
  always @(posedge clk) begin
    if (!rst_n) begin
      a_valid <= 1'b0; b_valid <= 1'b0; c_ready <= 1'b0;
    end else begin
      if (!a_valid || a_ready) a_valid <= ($urandom_range(9, 0) < 8);
      if (!b_valid || b_ready) b_valid <= ($urandom_range(9, 0) < 8);
      c_ready <= ($urandom_range(9, 0) < 6);
    end
  end

  // monitor
  always @(posedge clk) begin
    if (rst_n) begin
      cyc++;
      if (stall) n_rd_stall++;
      if (phase == PH_READ || phase == PH_RD_COMP) begin
        if (!stall) n_ph[int'(phase)]++;
      end else n_ph[int'(phase)]++;
      if (c_valid && !c_ready) n_wr_stall++;
      if (done) n_done++;
      if (c_valid && c_ready) begin
        int base;
        base = int'(c_addr);
        n_beats++;
        for (int q = 0; q < D0J; q++) begin
          checks++;
          if (base + q >= D2I*D2J) begin
            failures++;
            $display("FAIL C address %0d out of range", base + q);
          end else begin
            if (seen[base + q]) begin
              failures++;
              $display("FAIL C element %0d written twice", base + q);
            end
            seen[base + q] = 1'b1;
            if (c_data[q] !== refC[base + q]) begin
              failures++;
              if (failures < 10)
                $display("FAIL C[%0d][%0d] = %h expected %h", (base + q) / D2J, (base + q) % D2J,
                         c_data[q], refC[base + q]);
            end
          end
        end
      end
    end
  end

  initial begin
    // operands: random normal singles
    for (int n = 0; n < D2I*D2K; n++) gA[n] = rand_f32(6);
    for (int n = 0; n < D2K*D2J; n++) gB[n] = rand_f32(6);
    // reference in the hardware's order of additions
    for (int r = 0; r < D2I; r++)
      for (int c = 0; c < D2J; c++) begin
        fp32_t s;
        s = FP32_ZERO;
        for (int ks = 0; ks < N_K; ks++)
          for (int l = 0; l < NL; l++) begin
            fp32_t lv [];
            int    n;
            n  = 1 << $clog2(DP);
            lv = new[n];
            for (int d = 0; d < n; d++) begin
              int kk;
              kk = ks * D0K + l * DP + d;
              lv[d] = (d < DP) ? f32_mul(gA[kk*D2I + r], gB[kk*D2J + c]) : FP32_ZERO;
            end
            while (n > 1) begin
              for (int d = 0; d < n / 2; d++) lv[d] = f32_add(lv[2*d], lv[2*d+1]);
              n = n / 2;
            end
            s = f32_add(s, lv[0]);
          end
        refC[r*D2J + c] = s;
      end

    rst_n = 0; start = 0;
    n_bi = 16'(N_BI); n_bj = 16'(N_BJ); n_k = 16'(N_K);
    repeat (4) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    wait (done);
    repeat (3) @(posedge clk);

    // every element of C written exactly once
    for (int n = 0; n < D2I*D2J; n++) begin
      checks++;
      if (!seen[n]) begin
        failures++;
        if (failures < 10) $display("FAIL C element %0d never written", n);
      end
    end
    // iteration counts per phase, summed over all blocks
    checks++;
    if (n_ph[int'(PH_READ)] != NT * N_BI * N_BJ) begin
      failures++; $display("FAIL phase 1 took %0d iterations, expected %0d", n_ph[int'(PH_READ)], NT*N_BI*N_BJ);
    end
    checks++;
    if (n_ph[int'(PH_RD_COMP)] != NT * (N_K - 1) * N_BI * N_BJ) begin
      failures++; $display("FAIL phase 2 took %0d iterations", n_ph[int'(PH_RD_COMP)]);
    end
    checks++;
    if (n_ph[int'(PH_COMP)] != NT * N_BI * N_BJ) begin
      failures++; $display("FAIL phase 3 took %0d iterations", n_ph[int'(PH_COMP)]);
    end
    checks++;
    if (n_beats != NT * D0I * N_BI * N_BJ) begin
      failures++; $display("FAIL %0d Write beats, expected %0d", n_beats, NT*D0I*N_BI*N_BJ);
    end
    // every mechanism must have happened
    checks++; if (n_rd_stall == 0) begin failures++; $display("FAIL no read stall happened"); end
    checks++; if (n_wr_stall == 0) begin failures++; $display("FAIL no write stall happened"); end
    checks++; if (N_K > 1 && n_ph[int'(PH_RD_COMP)] == 0) begin failures++; $display("FAIL no overlapped Read/Compute"); end
    checks++; if (n_ph[int'(PH_DRAIN)] == 0) begin failures++; $display("FAIL no drain"); end
    checks++; if (n_done != 1) begin failures++; $display("FAIL done pulsed %0d times", n_done); end
    $display("blocks=%0d  phase1=%0d phase2=%0d phase3=%0d drain=%0d write=%0d  read_stalls=%0d write_stalls=%0d beats=%0d cycles=%0d",
             N_BI*N_BJ, n_ph[int'(PH_READ)], n_ph[int'(PH_RD_COMP)], n_ph[int'(PH_COMP)],
             n_ph[int'(PH_DRAIN)], n_ph[int'(PH_WRITE)], n_rd_stall, n_wr_stall, n_beats, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
