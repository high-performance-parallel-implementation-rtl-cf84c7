// ga_top - fully parallel genetic algorithm, one generation every three clocks.
//
// N chromosomes of M bits live in the registers RX1..RXN. Every chromosome has
// its own fitness module (FFMj) and its own selection module (SMj), every pair
// of selected chromosomes its own crossover module (CMi, N/2 of them), and the
// first P children pass through a mutation module (MMj). All of this is
// combinational or pipelined in parallel; the synchronisation module (SyncM)
// lets the RX registers load the next population once the two ROM stages of
// the fitness modules have settled:
//   clock 0  RX loads generation k (count = 0)
//   clock 1  FFM alpha/beta ROMs hold alpha(px), beta(qx)
//   clock 2  FFM gamma ROM holds y = fitness of generation k; count = 2, so
//            'gen_en' = 1: selection, crossover and mutation settle and the
//            LFSRs step with the load on the next edge.
// Parameters: N (even power of two), M (even, at most 32), FUNC (F1/F2/F3
// tables), P = ceil(N * MR) mutation modules. 'maxmin' selects maximisation
// (0) or minimisation (1) for all SMs. Outputs: the population 'x', its
// fitness 'y' (valid while 'gen_en' is high) and 'gen_en', one pulse per
// generation. Reset is synchronous, active low, and sets the population to
// fixed pseudo-random values.
module ga_top
  import ga_pkg::*;
#(
  parameter int       N    = 32,
  parameter int       M    = 20,
  parameter fitness_e FUNC = FIT_F3,
  parameter int       P    = 1,
  parameter int       A    = a_width(FUNC, M / 2),
  parameter int       LOGN = $clog2(N)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  maxmin_e             maxmin,
  output logic        [M-1:0] x [N],
  output logic signed [A-1:0] y [N],
  output logic                gen_en,
  output logic [SYNC_W-1:0]   sync_count
);

  logic [M-1:0]    w [N];
  logic [M-1:0]    z [N];
  logic [M-1:0]    x_next [N];

  ga_syncm u_syncm (.clk(clk), .rst_n(rst_n), .enable(gen_en), .count(sync_count));

  for (genvar j = 0; j < N; j++) begin : g_ind
    ga_rx #(.M(M), .INIT(M'(lfsr_seed(SEED_RX, j, 0)))) u_rx (
      .clk(clk), .rst_n(rst_n), .load(gen_en), .x_next(x_next[j]), .x(x[j]));

    ga_ffm #(.M(M), .FUNC(FUNC)) u_ffm (.clk(clk), .x(x[j]), .y(y[j]));

    ga_sm #(.N(N), .M(M), .A(A),
            .SEED1(lfsr_seed(SEED_SM1, j, 0)), .SEED2(lfsr_seed(SEED_SM2, j, 0))) u_sm (
      .clk(clk), .rst_n(rst_n), .step(gen_en), .maxmin(maxmin),
      .y(y), .x(x), .w(w[j]), .sel_idx());
  end

  for (genvar i = 0; i < N / 2; i++) begin : g_cm
    ga_cm #(.M(M), .SEEDP(lfsr_seed(SEED_CMPQ1, i, 0)),
            .SEEDQ(lfsr_seed(SEED_CMPQ2, i, 0))) u_cm (
      .clk(clk), .rst_n(rst_n), .step(gen_en),
      .w_a(w[2*i]), .w_b(w[2*i+1]), .z_a(z[2*i]), .z_b(z[2*i+1]));
  end

  for (genvar j = 0; j < N; j++) begin : g_next
    if (j < P) begin : g_mut
      ga_mm #(.M(M), .SEED(lfsr_seed(SEED_MM, j, 0))) u_mm (
        .clk(clk), .rst_n(rst_n), .step(gen_en), .z(z[j]), .x(x_next[j]));
    end else begin : g_pass
      assign x_next[j] = z[j];
    end
  end

  initial begin
    assert (N % 2 == 0 && N == 2**LOGN) else $error("ga_top: N must be an even power of two");
    assert (M % 2 == 0 && M <= LFSR_W) else $error("ga_top: M must be even and at most 32");
    assert (P >= 0 && P <= N) else $error("ga_top: P out of range");
  end

  // The population registers only change on a SyncM enable.
  property p_hold;
    @(posedge clk) disable iff (!rst_n) !gen_en |=> $stable(x[0]);
  endproperty
  a_hold: assert property (p_hold);

endmodule
