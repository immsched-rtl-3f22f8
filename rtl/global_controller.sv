// global_controller: runs the particle search across all engines.
//
// The paper's global controller keeps the set of feasible mappings, the
// global best S* with its fitness f*, and a consensus matrix S-bar, and
// these steer every particle's velocity. This controller runs the outer
// loop of the search with all engines in lock step: for each of `epochs`
// epochs it re-initialises all particles (CMD_INIT), issues `steps` inner
// steps (CMD_STEP), and ends the epoch with CMD_FINAL (projection and
// Ullmann check). After every step it takes the reports from the router;
// if a report beats f*, the reporting engine's S is read through the router
// and becomes the S* broadcast with the next step. After CMD_FINAL every
// feasible mapping that is not yet stored is added to the mapping table (up
// to MAXM entries) and its S is folded into S-bar as a running average,
// S-bar = (S-bar + S_i + 1) >> 1 (the first one is copied).
//
// Departures: the paper's listing updates S* after every particle and
// clears S-bar at the start of each epoch; with particles running in
// parallel S-bar could then never be used, so here S-bar is kept from epoch
// to epoch and S* is updated once per lock-step step. Both flags use_sg /
// use_sc stay low until S* / S-bar exist. `done` pulses when all epochs end.
module global_controller
  import imm_pkg::*;
#(
  parameter int unsigned NE   = 1024,
  parameter int unsigned R    = 8,
  parameter int unsigned C    = 8,
  parameter int unsigned MAXM = 8,
  localparam int unsigned IW = (C <= 2) ? 1 : $clog2(C),
  localparam int unsigned EW = (NE <= 2) ? 1 : $clog2(NE)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic [7:0]                   epochs,
  input  logic [7:0]                   steps,
  input  logic [$clog2(R+1)-1:0]       n,
  // broadcast to the engines
  output logic                         cmd_valid,
  output cmd_e                         cmd,
  output logic                         use_sg,
  output logic                         use_sc,
  output logic [R-1:0][C-1:0][7:0]     sg,
  output logic [R-1:0][C-1:0][7:0]     sc,
  // from the router
  input  logic                         rep_valid,
  input  logic [EW-1:0]                rep_id,
  input  fit_t                         rep_fit,
  input  logic                         rep_feas,
  input  logic [R-1:0][IW-1:0]         rep_pi,
  output logic [EW-1:0]                rd_id,
  input  logic [R-1:0][C-1:0][7:0]     rd_s,
  // results
  output logic                         busy,
  output logic                         done,
  output fit_t                         fbest,
  output logic [$clog2(MAXM+1)-1:0]    nmap,
  output logic [MAXM-1:0][R-1:0][IW-1:0] maps,
  output logic [15:0]                  n_feasible_reports,
  output logic [15:0]                  n_sg_updates
);
  gst_e st;
  logic [7:0] ep, kk;
  logic [EW:0] rcnt;
  logic [EW-1:0] best_id;
  logic improved;
  logic last_rep;
  logic dup;

  assign last_rep = rep_valid && (rcnt == (EW+1)'(NE - 1));
  assign rd_id    = (st == G_FIN_W) ? rep_id : best_id;

  // is rep_pi already in the mapping table? (rows >= n are ignored)
  logic [MAXM-1:0] same;
  for (genvar x = 0; x < MAXM; x++) begin : g_dup
    logic [R-1:0] diff;
    for (genvar i = 0; i < R; i++) begin : g_row
      assign diff[i] = (i < int'(n)) && (maps[x][i] != rep_pi[i]);
    end
    assign same[x] = (x < int'(nmap)) && (diff == '0);
  end
  assign dup = |same;

  always_comb begin
    cmd_valid = 1'b0;
    cmd       = CMD_NONE;
    unique case (st)
      G_INIT: begin cmd_valid = 1'b1; cmd = CMD_INIT;  end
      G_STEP: begin cmd_valid = 1'b1; cmd = CMD_STEP;  end
      G_FIN:  begin cmd_valid = 1'b1; cmd = CMD_FINAL; end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= G_IDLE; ep <= '0; kk <= '0; rcnt <= '0; best_id <= '0; improved <= 1'b0;
      use_sg <= 1'b0; use_sc <= 1'b0; sg <= '0; sc <= '0; busy <= 1'b0; done <= 1'b0;
      fbest <= FIT_MIN; nmap <= '0; maps <= '0;
      n_feasible_reports <= '0; n_sg_updates <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        G_IDLE: if (start) begin
          busy <= 1'b1; ep <= '0; fbest <= FIT_MIN; nmap <= '0; maps <= '0;
          use_sg <= 1'b0; use_sc <= 1'b0; sg <= '0; sc <= '0;
          n_feasible_reports <= '0; n_sg_updates <= '0;
          st <= (epochs == '0) ? G_DONE : G_INIT;
        end
        G_INIT: begin rcnt <= '0; st <= G_INIT_W; end
        G_INIT_W: if (rep_valid) begin
          rcnt <= rcnt + 1'b1;
          if (last_rep) begin kk <= '0; st <= (steps == '0) ? G_FIN : G_STEP; end
        end
        G_STEP: begin rcnt <= '0; improved <= 1'b0; st <= G_STEP_W; end
        G_STEP_W: if (rep_valid) begin
          rcnt <= rcnt + 1'b1;
          if (rep_fit > fbest) begin
            fbest <= rep_fit; best_id <= rep_id; improved <= 1'b1;
          end
          if (last_rep) st <= G_SREAD;
        end
        G_SREAD: begin
          if (improved) begin
            sg <= rd_s; use_sg <= 1'b1; n_sg_updates <= n_sg_updates + 1'b1;
          end
          kk <= kk + 1'b1;
          st <= (kk + 1'b1 == steps) ? G_FIN : G_STEP;
        end
        G_FIN: begin rcnt <= '0; st <= G_FIN_W; end
        G_FIN_W: if (rep_valid) begin
          rcnt <= rcnt + 1'b1;
          if (rep_feas) begin
            n_feasible_reports <= n_feasible_reports + 1'b1;
            for (int i = 0; i < int'(R); i++)
              for (int j = 0; j < int'(C); j++)
                sc[i][j] <= use_sc ? 8'((9'(sc[i][j]) + 9'(rd_s[i][j]) + 9'd1) >> 1) : rd_s[i][j];
            use_sc <= 1'b1;
            if (!dup && nmap < ($clog2(MAXM+1))'(MAXM)) begin
              maps[nmap] <= rep_pi;
              nmap <= nmap + 1'b1;
            end
          end
          if (last_rep) begin
            ep <= ep + 1'b1;
            st <= (ep + 1'b1 == epochs) ? G_DONE : G_INIT;
          end
        end
        G_DONE: begin busy <= 1'b0; done <= 1'b1; st <= G_IDLE; end
        default: st <= G_IDLE;
      endcase
    end
  end
endmodule
