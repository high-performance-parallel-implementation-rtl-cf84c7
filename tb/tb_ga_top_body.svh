// tb_ga_top_body.svh - end-to-end checker shared by the reduced-size and the
// full-size testbenches of ga_top. The including module declares N, M, FUNC
// (ga_pkg::fitness_e), P, K (generations), KMAX (of those, the last ones run
// with maximisation; 0 for none), HAS_TARGET and TARGET (when HAS_TARGET is
// set, the best fitness of the minimising phase must reach TARGET) and
// instantiates ga_top as 'dut' on clk, rst_n, maxmin,
// x, y, gen_en, and provides the watchdog.
//
// The checker runs a complete model of the algorithm next to the design: it
// holds its own copy of the population and of every random generator (seeded
// with the same per-instance seeds), and each generation it
//   - checks that the design's population equals the model's,
//   - checks every fitness value against the reference formula,
//   - performs tournament selection, crossover and mutation in the model,
//   - checks that 'gen_en' comes exactly every three clocks.
// It counts the mechanisms of the design and fails if one never happened:
// both comparator outcomes, minimising and maximising tournaments, real cuts
// and no-cut crossovers, mutations that changed a chromosome, and an actual
// improvement of the best fitness in minimisation.

  localparam int H = M / 2;
  localparam int LOGN = $clog2(N);
  localparam int FN = (FUNC == FIT_F1) ? 0 : (FUNC == FIT_F2) ? 1 : 2;

  int checks = 0, failures = 0;
  int first_hit = -1;
  int n_gen = 0, n_gt = 0, n_le = 0, n_min = 0, n_max = 0, n_cut = 0, n_nocut = 0, n_mut = 0;
  longint best_first, best_min_phase, best_max_phase;
  logic [M-1:0] gx [N];
  logic [31:0] s1 [N], s2 [N], sp [N/2], sq [N/2], smm [N];

  always #5 clk = ~clk;

  task automatic fail(input string msg);
    failures++;
    if (failures < 20) $display("FAIL gen %0d: %s", n_gen, msg);
  endtask

  initial begin
    int cyc, last_en;
    longint yy [N];
    logic [M-1:0] w [N], z [N];
    longint best;
    maxmin = SEL_MIN;
    for (int j = 0; j < N; j++) begin
      gx[j]  = M'(lfsr_seed(SEED_RX, j, 0));
      s1[j]  = lfsr_seed(SEED_SM1, j, 0);
      s2[j]  = lfsr_seed(SEED_SM2, j, 0);
      smm[j] = lfsr_seed(SEED_MM, j, 0);
    end
    for (int i = 0; i < N / 2; i++) begin
      sp[i] = lfsr_seed(SEED_CMPQ1, i, 0);
      sq[i] = lfsr_seed(SEED_CMPQ2, i, 0);
    end
    best_min_phase = 64'h7FFF_FFFF_FFFF_FFFF;
    best_max_phase = -64'h7FFF_FFFF_FFFF_FFFF;
    repeat (2) @(negedge clk);
    rst_n = 1;
    cyc = 0;
    last_en = -1;
    while (n_gen < K) begin
      if (gen_en) begin
        // rate: one generation every three clocks, the first at clock 2
        checks++;
        if ((last_en < 0 && cyc != 2) || (last_en >= 0 && cyc - last_en != 3))
          fail($sformatf("gen_en at clock %0d, previous %0d", cyc, last_en));
        last_en = cyc;
        maxmin = (n_gen >= K - KMAX) ? SEL_MAX : SEL_MIN;
        #1;
        // population and fitness
        best = (maxmin == SEL_MIN) ? 64'h7FFF_FFFF_FFFF_FFFF : -64'h7FFF_FFFF_FFFF_FFFF;
        for (int j = 0; j < N; j++) begin
          yy[j] = fitness(FN, longint'(gx[j]), H);
          checks++;
          if (x[j] != gx[j]) fail($sformatf("x[%0d] = %h, model %h", j, x[j], gx[j]));
          checks++;
          if (longint'(y[j]) != yy[j]) fail($sformatf("y[%0d] = %0d, model %0d", j, y[j], yy[j]));
          if (maxmin == SEL_MIN && yy[j] < best) best = yy[j];
          if (maxmin == SEL_MAX && yy[j] > best) best = yy[j];
        end
        if (n_gen == 0) best_first = best;
        if (maxmin == SEL_MIN && best < best_min_phase) best_min_phase = best;
        if (HAS_TARGET && first_hit < 0 && maxmin == SEL_MIN && best <= TARGET) first_hit = n_gen;
        if (maxmin == SEL_MAX && best > best_max_phase) best_max_phase = best;
        if (maxmin == SEL_MIN) n_min++; else n_max++;
        // selection
        for (int j = 0; j < N; j++) begin
          int i1, i2, win;
          i1 = int'(s1[j] >> (32 - LOGN));
          i2 = int'(s2[j] >> (32 - LOGN));
          if (yy[i1] > yy[i2]) n_gt++; else n_le++;
          if (maxmin == SEL_MAX) win = (yy[i1] > yy[i2]) ? i1 : i2;
          else                   win = (yy[i1] > yy[i2]) ? i2 : i1;
          w[j] = gx[win];
        end
        // crossover
        for (int i = 0; i < N / 2; i++) begin
          logic [M-1:0] mk;
          mk = {H'(cut_mask(sp[i], H)), H'(cut_mask(sq[i], H))};
          if (mk[H-1:0] == '0) n_nocut++; else n_cut++;
          if (mk[M-1:H] == '0) n_nocut++; else n_cut++;
          z[2*i]   = (w[2*i] & ~mk)   | (w[2*i+1] & mk);
          z[2*i+1] = (w[2*i+1] & ~mk) | (w[2*i] & mk);
        end
        // mutation of the first P children
        for (int j = 0; j < N; j++) begin
          if (j < P) begin
            logic [M-1:0] mr;
            mr = M'(smm[j] >> (32 - M));
            if (mr != '0) n_mut++;
            gx[j] = z[j] ^ mr;
            smm[j] = lfsr_step(smm[j]);
          end else begin
            gx[j] = z[j];
          end
        end
        for (int j = 0; j < N; j++) begin s1[j] = lfsr_step(s1[j]); s2[j] = lfsr_step(s2[j]); end
        for (int i = 0; i < N / 2; i++) begin sp[i] = lfsr_step(sp[i]); sq[i] = lfsr_step(sq[i]); end
        n_gen++;
      end
      @(negedge clk);
      cyc++;
    end
    // mechanisms
    checks++; if (n_gt == 0 || n_le == 0) fail("a comparator outcome never occurred");
    checks++; if (n_min == 0 || (KMAX > 0 && n_max == 0)) fail("a selection mode was never used");
    if (HAS_TARGET) begin
      checks++;
      if (best_min_phase > TARGET) fail($sformatf("best fitness %0d never reached %0d", best_min_phase, TARGET));
      else $display("target %0d first reached in generation %0d", TARGET, first_hit);
    end
    checks++; if (n_cut == 0 || n_nocut == 0) fail("cut or no-cut crossover never occurred");
    checks++; if (P > 0 && n_mut == 0) fail("mutation never changed a chromosome");
    checks++; if (best_min_phase >= best_first) fail("minimisation never improved the best fitness");
    $display("generations=%0d clocks=%0d  tournaments A>B=%0d A<=B=%0d  min-gens=%0d max-gens=%0d",
             n_gen, cyc, n_gt, n_le, n_min, n_max);
    $display("crossovers cut=%0d no-cut=%0d  mutations=%0d", n_cut, n_nocut, n_mut);
    $display("best fitness: first generation %0d, minimising phase %0d", best_first, best_min_phase);
    if (KMAX > 0) $display("best fitness of the maximising phase %0d", best_max_phase);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
