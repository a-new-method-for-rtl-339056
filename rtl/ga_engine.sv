// ga_engine: genetic-algorithm search for compensation settings.
//
// A chromosome is the list of settings (phase, field, solenoid) of the
// periods in the compensation zone, one 18-bit gene each. The engine runs the
// loop: draw a random population within the gene bounds; send every
// individual to the evaluator (lattice model + objective) and collect the
// objective values; keep the best individual seen so far; stop when it meets
// the fitness target or max_gen generations are done; otherwise build the
// next generation and repeat. The next generation holds the best individual
// (elitism) in slot 0 and, in the other slots, children made by two
// roulette-wheel selections, single-point crossover and per-gene mutation.
// Individuals that broke an envelope limit come back with the worst value and
// get no share of the wheel, so they are dropped.
//
// Interface: iss_* issues one individual per clock (registered, tagged with
// its slot); res_* returns objective values in any order and at any latency,
// indexed by slot. A generation is evaluated when all POP results are in.
// start begins a search (from idle or done); done stays high until the next
// start. Per generation the engine spends POP issue cycles, waits for the
// evaluator latency, then one cycle ranking. The loop and the operators
// follow the paper; population size, elitism in slot 0, the wheel scoring and
// the bounds are this design's choices.
module ga_engine
  import cr_pkg::*;
#(
  parameter int          POP_P   = POP,
  parameter int          NGENE_P = NGENE,
  parameter int          GW      = DW,
  parameter int          FW      = FIT_W,
  parameter logic [31:0] SEED    = 32'hC0DE_5EED
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             start,
  input  logic [NGENE_P-1:0][GW-1:0]       gene_lo,
  input  logic [NGENE_P-1:0][GW-1:0]       gene_hi,
  input  logic [7:0]                       mut_thresh,
  input  logic [FW-1:0]                    fit_target,
  input  logic [15:0]                      max_gen,
  output logic                             iss_valid,
  output logic [$clog2(POP_P)-1:0]         iss_idx,
  output logic [NGENE_P-1:0][GW-1:0]       iss_chrom,
  input  logic                             res_valid,
  input  logic [$clog2(POP_P)-1:0]         res_idx,
  input  logic [FW-1:0]                    res_fit,
  output logic                             busy,
  output logic                             done,
  output logic                             hit_target,
  output logic [NGENE_P-1:0][GW-1:0]       best_chrom,
  output logic [FW-1:0]                    best_fit,
  output logic [15:0]                      gen_count,
  output logic                             ev_mutate,
  output logic                             ev_improve
);

  localparam int IW    = $clog2(POP_P);
  localparam int PW    = $clog2(NGENE_P + 1);
  localparam int CUM_W = FW + IW;
  localparam int NRND  = 2 * NGENE_P + 3;
  localparam int R_SA  = 2 * NGENE_P;
  localparam int R_SB  = 2 * NGENE_P + 1;
  localparam int R_PT  = 2 * NGENE_P + 2;

  typedef logic [NGENE_P-1:0][GW-1:0] chrom_t;
  typedef enum logic [2:0] {S_IDLE, S_INIT, S_WAIT, S_EVAL, S_BREED, S_DONE} st_e;

  st_e                 st;
  chrom_t              pop [POP_P];
  chrom_t              nxt [POP_P];
  logic [FW-1:0]       fit [POP_P];
  logic [POP_P-1:0][CUM_W-1:0] cum;
  logic [IW:0]         slot;     // next slot to fill
  logic [IW:0]         rcv;      // results received this generation
  logic                half;     // second child pending
  chrom_t              child_b;

  // Random words
  logic [NRND-1:0][31:0] rnd;
  lfsr_rng #(.NOUT(NRND), .SEED(SEED)) u_rng (
    .clk(clk), .rst_n(rst_n), .en(1'b1), .rnd(rnd)
  );

  // Selection
  logic [IW-1:0] sel_a, sel_b;
  roulette_select #(.POP(POP_P), .CUM_W(CUM_W)) u_rw_a (.cum(cum), .rnd(rnd[R_SA]), .idx(sel_a));
  roulette_select #(.POP(POP_P), .CUM_W(CUM_W)) u_rw_b (.cum(cum), .rnd(rnd[R_SB]), .idx(sel_b));

  // Crossover point in [1, NGENE_P-1]
  logic [PW-1:0] point;
  always_comb begin
    logic [31:0] t;
    t     = 32'(rnd[R_PT][31:16]) * 32'(NGENE_P - 1);
    point = PW'(1 + (t >> 16));
  end

  chrom_t cx_a, cx_b;
  crossover #(.NGENE(NGENE_P), .GW(GW)) u_cx (
    .pa(pop[sel_a]), .pb(pop[sel_b]), .point(point), .ca(cx_a), .cb(cx_b)
  );

  // Mutation; the first unit also draws whole random individuals at start-up
  chrom_t mu_a, mu_b;
  logic [NGENE_P-1:0] mflag_a, mflag_b;
  logic init_phase;
  assign init_phase = (st == S_INIT);

  mutation #(.NGENE(NGENE_P), .GW(GW)) u_mut_a (
    .in_chrom(cx_a), .rnd(rnd[NGENE_P-1:0]), .lo(gene_lo), .hi(gene_hi),
    .thresh(mut_thresh), .force_all(init_phase), .out_chrom(mu_a), .mutated(mflag_a)
  );
  mutation #(.NGENE(NGENE_P), .GW(GW)) u_mut_b (
    .in_chrom(cx_b), .rnd(rnd[2*NGENE_P-1:NGENE_P]), .lo(gene_lo), .hi(gene_hi),
    .thresh(mut_thresh), .force_all(1'b0), .out_chrom(mu_b), .mutated(mflag_b)
  );

  // Ranking of the current generation
  logic [IW-1:0] arg_min;
  logic [FW-1:0] gen_min;
  always_comb begin
    arg_min = '0;
    gen_min = fit[0];
    for (int i = 1; i < POP_P; i++)
      if (fit[i] < gen_min) begin
        gen_min = fit[i];
        arg_min = IW'(i);
      end
  end

  logic [FW-1:0] new_best;
  assign new_best = (gen_min < best_fit) ? gen_min : best_fit;

  // Results
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < POP_P; i++) fit[i] <= '1;
    end else if (res_valid) begin
      fit[res_idx] <= res_fit;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= S_IDLE;
      slot       <= '0;
      rcv        <= '0;
      half       <= 1'b0;
      child_b    <= '0;
      cum        <= '0;
      iss_valid  <= 1'b0;
      iss_idx    <= '0;
      iss_chrom  <= '0;
      best_chrom <= '0;
      best_fit   <= '1;
      gen_count  <= '0;
      hit_target <= 1'b0;
      ev_mutate  <= 1'b0;
      ev_improve <= 1'b0;
      for (int i = 0; i < POP_P; i++) begin
        pop[i] <= '0;
        nxt[i] <= '0;
      end
    end else begin
      iss_valid  <= 1'b0;
      ev_mutate  <= 1'b0;
      ev_improve <= 1'b0;
      if (res_valid) rcv <= rcv + 1'b1;

      unique case (st)
        S_IDLE, S_DONE: begin
          if (start) begin
            st         <= S_INIT;
            slot       <= '0;
            gen_count  <= '0;
            best_fit   <= '1;
            hit_target <= 1'b0;
          end
        end

        S_INIT: begin
          pop[slot[IW-1:0]] <= mu_a;
          iss_valid <= 1'b1;
          iss_idx   <= slot[IW-1:0];
          iss_chrom <= mu_a;
          if (slot == '0) rcv <= '0;
          slot <= slot + 1'b1;
          if (int'(slot) == POP_P - 1) st <= S_WAIT;
        end

        S_WAIT: begin
          if (int'(rcv) == POP_P) st <= S_EVAL;
        end

        S_EVAL: begin
          if (gen_min < best_fit) begin
            best_fit   <= gen_min;
            best_chrom <= pop[arg_min];
            ev_improve <= 1'b1;
          end
          begin
            logic [CUM_W-1:0] acc;
            acc = '0;
            for (int i = 0; i < POP_P; i++) begin
              acc    = acc + CUM_W'(~fit[i]);   // score = FIT_MAX - fit
              cum[i] <= acc;
            end
          end
          gen_count <= gen_count + 1'b1;
          slot      <= '0;
          half      <= 1'b0;
          if (new_best <= fit_target) begin
            hit_target <= 1'b1;
            st         <= S_DONE;
          end else if (gen_count + 1'b1 >= max_gen) begin
            st <= S_DONE;
          end else begin
            st <= S_BREED;
          end
        end

        S_BREED: begin
          iss_valid <= 1'b1;
          iss_idx   <= slot[IW-1:0];
          if (slot == '0) begin
            rcv          <= '0;
            nxt[0]       <= best_chrom;
            iss_chrom    <= best_chrom;
          end else if (!half) begin
            nxt[slot[IW-1:0]] <= mu_a;
            iss_chrom         <= mu_a;
            child_b           <= mu_b;
            ev_mutate         <= |{mflag_a, mflag_b};
            half              <= (int'(slot) < POP_P - 1);
          end else begin
            nxt[slot[IW-1:0]] <= child_b;
            iss_chrom         <= child_b;
            half              <= 1'b0;
          end
          slot <= slot + 1'b1;
          // The new generation replaces the old one once it is fully built
          if (int'(slot) == POP_P - 1) begin
            st <= S_WAIT;
            for (int i = 0; i < POP_P - 1; i++) pop[i] <= nxt[i];
            pop[POP_P-1] <= half ? child_b : mu_a;
          end
        end

        default: st <= S_IDLE;
      endcase

    end
  end

  assign busy = (st != S_IDLE) && (st != S_DONE);
  assign done = (st == S_DONE);

endmodule
