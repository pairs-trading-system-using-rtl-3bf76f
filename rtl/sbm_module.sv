// sbm_module: the SBM (simulated bifurcation machine) module, an inline
// accelerator between the price buffer and the judgment module.
//
// It holds the market graph memory M, the tabu list T, the preprocessing unit,
// the SB core with its RNG-based initial-state generator, and the verifier,
// and sequences them as the paper's timing chart describes:
//   - Idle, it polls its two input channels: new price lists (from the price
//     buffer) and open-list updates (from the judgment module).
//   - At the beginning of every execution, a waiting open-list update is
//     copied into T and a waiting price list is turned into a new graph M by
//     the preprocessing unit. With neither, M and T stay as they are.
//   - The core runs, the verifier checks and evaluates its solution. An
//     effective solution registers its pair in T at once (without waiting for
//     the judgment module's decision) and is sent as an open candidate; the
//     module then starts the next execution immediately (consecutive
//     execution), with fresh random initial states.
//   - An ineffective solution changes nothing. After MISS_LIMIT consecutive
//     ineffective executions with no new event the module goes idle.
// Everything above except the stopping rule follows the paper; the paper only
// says the module idles "when no event happens for a certain time", so the
// miss counter (runtime input miss_limit) is this design's choice.
//
// Timing: pre 213 cycles, core 1651 cycles, verify <= 18 cycles per execution
// with the defaults. Counters: runs, effective runs, pre runs, tabu refreshes,
// and the RNG stall count of the initial-state generator.
module sbm_module
  import pt_pkg::*;
#(
  parameter int  NSTEP = 50,
  parameter fx_t DT    = fx_from_real(0.65)
) (
  input  logic        clk,
  input  logic        rst_n,
  // configuration (host)
  input  logic        sim_we,
  input  idx_t        sim_i,
  input  idx_t        sim_j,
  input  fx_t         sim_data,
  input  fx_t         mc,
  input  fx_t         mp,
  input  fx_t         threshold,
  input  logic [7:0]  miss_limit,
  input  logic        seed_load,
  input  logic [31:0] seed,
  // price list channel from the price buffer
  input  logic        price_valid,
  output logic        price_ready,
  input  price_list_t prices,
  // open-list update channel from the judgment module
  input  logic        olist_valid,
  output logic        olist_ready,
  input  pair_map_t   olist,
  // open candidates to the judgment module
  output logic        open_valid,
  input  logic        open_ready,
  output open_info_t  open_info,
  // status
  output pair_map_t   tabu,
  output logic [31:0] n_runs,
  output logic [31:0] n_effective,
  output logic [31:0] n_pre,
  output logic [31:0] n_refresh,
  output logic [31:0] n_rng_stall,
  output logic        idle
);
  typedef enum logic [2:0] {M_IDLE, M_BEGIN, M_PRE, M_CORE, M_VER, M_OUT} mstate_t;
  mstate_t st;

  logic       have_graph;
  logic [7:0] misses;

  // graph memory
  logic m_we;  idx_t m_i, m_j;  fx_t m_data;
  idx_t row_sel;  fx_t row_w [NODES];
  idx_t pt_i, pt_j;  fx_t pt_w;
  graph_mem u_m (
    .clk, .rst_n, .we(m_we), .wi(m_i), .wj(m_j), .wdata(m_data),
    .row_sel, .row_data(row_w), .pt_i, .pt_j, .pt_data(pt_w)
  );

  // preprocessing
  logic pre_start, pre_busy, pre_done;
  sbm_pre u_pre (
    .clk, .rst_n, .sim_we, .sim_i, .sim_j, .sim_data,
    .start(pre_start), .prices, .busy(pre_busy), .done(pre_done),
    .m_we, .m_i, .m_j, .m_data
  );

  // tabu list
  logic  t_reg, t_refresh;
  pair_t t_pair;
  tabu_mem u_t (
    .clk, .rst_n, .reg_en(t_reg), .reg_pair(t_pair),
    .refresh_en(t_refresh), .refresh_map(olist), .tab(tabu)
  );

  // initial states and core
  logic init_take, init_ready;
  fx_t  y0 [NODES*NODES];
  sb_init_gen u_init (
    .clk, .rst_n, .seed_load, .seed, .take(init_take), .ready(init_ready),
    .y0, .stalls(n_rng_stall)
  );

  logic core_start, core_busy, core_done;
  pair_map_t spins;
  logic [15:0] step_cnt;
  sbm_core #(.NSTEP(NSTEP), .DT(DT)) u_core (
    .clk, .rst_n, .start(core_start), .busy(core_busy), .done(core_done),
    .mc, .mp, .init_take, .init_ready, .y0, .row_sel, .row_w,
    .tab(tabu), .spins, .step_cnt
  );

  // verifier
  logic ver_start, ver_done, ver_valid, ver_eff;
  open_info_t ver_res;
  sbm_verify u_ver (
    .clk, .rst_n, .start(ver_start), .spins, .tab(tabu), .threshold,
    .pt_i, .pt_j, .pt_w, .done(ver_done), .valid(ver_valid),
    .effective(ver_eff), .result(ver_res)
  );

  assign idle        = (st == M_IDLE);
  assign price_ready = (st == M_BEGIN);
  assign olist_ready = (st == M_BEGIN);
  assign t_refresh   = (st == M_BEGIN) && olist_valid;
  assign pre_start   = (st == M_BEGIN) && price_valid;
  assign core_start  = ((st == M_BEGIN) && !price_valid && (have_graph))
                     || ((st == M_PRE) && pre_done);
  assign ver_start   = (st == M_CORE) && core_done;
  assign t_reg       = (st == M_VER) && ver_done && ver_eff;
  assign t_pair      = ver_res.pair;
  assign open_valid  = (st == M_OUT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= M_IDLE; have_graph <= 1'b0; misses <= '0; open_info <= '0;
      n_runs <= '0; n_effective <= '0; n_pre <= '0; n_refresh <= '0;
    end else begin
      unique case (st)
        M_IDLE: if (price_valid || olist_valid) st <= M_BEGIN;
        M_BEGIN: begin
          if (price_valid || olist_valid) misses <= '0;
          if (olist_valid) n_refresh <= n_refresh + 1;
          if (price_valid) begin
            have_graph <= 1'b1;
            n_pre      <= n_pre + 1;
            st         <= M_PRE;
          end else if (have_graph) begin
            n_runs <= n_runs + 1;
            st     <= M_CORE;
          end else begin
            st <= M_IDLE;
          end
        end
        M_PRE: if (pre_done) begin
          n_runs <= n_runs + 1;
          st     <= M_CORE;
        end
        M_CORE: if (core_done) st <= M_VER;
        M_VER: if (ver_done) begin
          if (ver_eff) begin
            open_info   <= ver_res;
            n_effective <= n_effective + 1;
            misses      <= '0;
            st          <= M_OUT;
          end else if (misses + 1'b1 >= miss_limit) begin
            misses <= '0;
            st     <= M_IDLE;
          end else begin
            misses <= misses + 1'b1;
            st     <= M_BEGIN;
          end
        end
        M_OUT: if (open_ready) st <= M_BEGIN;
        default: st <= M_IDLE;
      endcase
    end
  end
endmodule
