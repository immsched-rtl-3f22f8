// immsched_top: the IMMSched interruptible scheduler built on NE engines.
//
// When an urgent task arrives, the host hands over its tile graph Q (n
// vertices) and the graph G of preemptible PEs (m vertices), with vertex
// types, the owner task of each PE and each task's slack. The scheduler then
//  1. builds the compatibility mask (mask_gen),
//  2. runs the particle search on NE engines (imm_engine), one particle per
//     engine, coordinated by the global controller through the router,
//  3. picks, among the feasible mappings found, the one that preempts the
//     tasks with the largest slack (preempt_select).
// `start` is a pulse; `done` pulses when the selection is ready. Outputs:
// the mapping table (maps[x][i] = target PE of query vertex i), its size,
// the chosen entry, the best fitness and activity counters.
//
// Parameter defaults: an engine is an 8 x 8 PE array (64 MACs, the paper's
// Edge platform). The paper's engine count (128 x 128 = 16384) is reduced
// to NE = 1024 (a 32 x 32 grid): elaborating every engine costs the lint and
// synthesis tools about 20 MB each, so the full count would need hundreds of
// gigabytes. MAXM, NT, TYW and the widths are this design's.
// Timing (R = C = 8, n = 4): mask 1 cycle after start, one engine INIT about
// 124-148 cycles, one STEP about 161-185, FINAL 45, plus router draining of
// one report per cycle per engine; selection nmap + 2 cycles.
// The lint tools note that rst_n is used both as the asynchronous reset and
// inside the assertion's disable condition; that is intended.
module immsched_top
  import imm_pkg::*;
#(
  parameter int unsigned R    = 8,
  parameter int unsigned C    = 8,
  parameter int unsigned NE   = 1024,
  parameter int unsigned MAXM = 8,
  parameter int unsigned NT   = 8,
  parameter int unsigned SW   = 16,
  parameter int unsigned TYW  = 2,
  localparam int unsigned IW = (C <= 2) ? 1 : $clog2(C),
  localparam int unsigned TW = (NT <= 2) ? 1 : $clog2(NT),
  localparam int unsigned EW = (NE <= 2) ? 1 : $clog2(NE),
  localparam int unsigned MW = $clog2(MAXM+1)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           start,
  input  logic [$clog2(R+1)-1:0]         n,
  input  logic [$clog2(C+1)-1:0]         m,
  input  logic [7:0]                     epochs,
  input  logic [7:0]                     steps,
  input  logic signed [DW-1:0]           w,
  input  logic signed [DW-1:0]           c1,
  input  logic signed [DW-1:0]           c2,
  input  logic signed [DW-1:0]           c3,
  input  logic [31:0]                    seed,
  input  logic [R-1:0][R-1:0]            q_adj,
  input  logic [C-1:0][C-1:0]            g_adj,
  input  logic [R-1:0][TYW-1:0]          qtype,
  input  logic [C-1:0][TYW-1:0]          gtype,
  input  logic [C-1:0]                   preemptible,
  input  logic [C-1:0][TW-1:0]           owner,
  input  logic [NT-1:0][SW-1:0]          slack,
  output logic                           busy,
  output logic                           done,
  output logic [R-1:0][C-1:0]            mask,
  output fit_t                           fbest,
  output logic [MW-1:0]                  nmap,
  output logic [MAXM-1:0][R-1:0][IW-1:0] maps,
  output logic                           sel_valid,
  output logic [MW-1:0]                  sel_idx,
  output logic [SW-1:0]                  sel_slack,
  output logic [15:0]                    n_feasible_reports,
  output logic [15:0]                    n_sg_updates
);
  // top-level sequence
  typedef enum logic [2:0] {T_IDLE, T_MASK, T_SEARCH, T_SEL, T_DONE} tst_e;
  tst_e st;
  logic mg_start, mg_done, gc_start, gc_done, gc_busy, ps_start, ps_done;

  mask_gen #(.R(R), .C(C), .TYW(TYW)) u_mask (
    .clk, .rst_n, .start(mg_start), .n, .m, .q_adj, .g_adj, .qtype, .gtype,
    .preemptible, .mask, .done(mg_done));

  // controller <-> engines
  logic cmd_valid, use_sg, use_sc;
  cmd_e cmd;
  logic [R-1:0][C-1:0][7:0] sg, sc, rd_s;
  logic rep_valid, rep_feas;
  logic [EW-1:0] rep_id, rd_id;
  fit_t rep_fit;
  logic [R-1:0][IW-1:0] rep_pi;

  logic [NE-1:0] eng_done, eng_busy, eng_feas;
  fit_t [NE-1:0] eng_fit;
  logic [NE-1:0][R-1:0][IW-1:0] eng_pi;
  logic [NE-1:0][R-1:0][C-1:0][7:0] eng_s;

  global_controller #(.NE(NE), .R(R), .C(C), .MAXM(MAXM)) u_gc (
    .clk, .rst_n, .start(gc_start), .epochs, .steps, .n,
    .cmd_valid, .cmd, .use_sg, .use_sc, .sg, .sc,
    .rep_valid, .rep_id, .rep_fit, .rep_feas, .rep_pi, .rd_id, .rd_s,
    .busy(gc_busy), .done(gc_done), .fbest, .nmap, .maps,
    .n_feasible_reports, .n_sg_updates);

  noc_router #(.NE(NE), .R(R), .C(C)) u_router (
    .clk, .rst_n, .eng_done, .eng_fit, .eng_feas, .eng_pi, .eng_s,
    .rep_valid, .rep_id, .rep_fit, .rep_feas, .rep_pi, .rd_id, .rd_s);

  for (genvar e = 0; e < NE; e++) begin : g_eng
    imm_engine #(.R(R), .C(C)) u_eng (
      .clk, .rst_n, .cmd_valid, .cmd, .use_sg, .use_sc,
      .seed(seed ^ (32'h9E37_79B9 * 32'(e + 1))),
      .n, .m, .w, .c1, .c2, .c3, .q_adj, .g_adj, .mask, .sg, .sc,
      .busy(eng_busy[e]), .done(eng_done[e]), .fit(eng_fit[e]),
      .feasible(eng_feas[e]), .pi(eng_pi[e]), .s_out(eng_s[e]));
  end

  preempt_select #(.R(R), .C(C), .MAXM(MAXM), .NT(NT), .SW(SW)) u_sel (
    .clk, .rst_n, .start(ps_start), .n, .nmap, .maps, .owner, .slack,
    .done(ps_done), .sel_valid, .sel_idx, .sel_slack);

  always_comb begin
    mg_start = (st == T_IDLE) && start;
    gc_start = (st == T_MASK) && mg_done;
    ps_start = (st == T_SEARCH) && gc_done;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        T_IDLE:   if (start) begin st <= T_MASK; busy <= 1'b1; end
        T_MASK:   if (mg_done) st <= T_SEARCH;
        T_SEARCH: if (gc_done) st <= T_SEL;
        T_SEL:    if (ps_done) st <= T_DONE;
        T_DONE:   begin st <= T_IDLE; busy <= 1'b0; done <= 1'b1; end
        default:  st <= T_IDLE;
      endcase
    end
  end

  // Engines run in lock step: none may still be busy when a command issues.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid |-> (eng_busy == '0))
    else $error("immsched_top: command issued to a busy engine");

  // The search controller is busy for the whole search phase.
  a_search_busy: assert property (@(posedge clk) disable iff (!rst_n)
    (st == T_SEARCH) |-> (gc_busy || gc_done))
    else $error("immsched_top: search phase without busy controller");
endmodule
