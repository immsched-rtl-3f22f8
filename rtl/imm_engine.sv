// imm_engine: one accelerator engine running one particle of the IMMSched search.
//
// The paper maps each particle of its Ullmann-refined particle-swarm search
// onto a separate engine of a multi-engine DNN accelerator. This module is
// such an engine: the PE array (pe_array), the left and top buffers with
// their Rand sources (lfsr_rand), the right-hand buffer feeding the add/
// compare tree (add_cmp_tree), the reciprocal unit (recip_unit), and a
// sequencer that issues PE instructions. PE (i,j) holds element (i,j) of the
// particle's matrices: S (relaxed mapping, 0..255 = 0..1), V, S_local, the
// broadcast S* and consensus S-bar, Mask and Q.
//
// Commands (cmd_valid with cmd, accepted only while !busy):
//  CMD_INIT  load Q and Mask, draw a random S (row Rand x column Rand),
//            V = 0, S_local = S, f_local = -inf, then mask and normalise.
//  CMD_STEP  load S* (use_sg) and S-bar (use_sc); velocity
//            V = (w*V + k1*(S_local-S) + k2*(S*-S) + c3*(S-bar-S)) >> 8 with
//            k1 = c1*r1_row >> 8, k2 = c2*r2_col >> 8; S = clamp(S+V);
//            S = S .* Mask; row-normalise by reciprocal multiply;
//            fitness f = -||254*Q - (S G S^T >> 8)||^2; update S_local.
//  CMD_FINAL project S on a one-to-one mapping (row by row, the tree's
//            arg-max over still-free target columns) and check it as Ullmann
//            does: M G M^T must contain Q. Reports `feasible` and `pi`.
// `done` pulses for one cycle at the end of every command. fit is the
// fitness of the current S; s_out is S. Matrix products use an outer-product
// dataflow: m cycles each, operands on the row bus from the left buffer and
// on the column bus from the top buffer (G, or X^T).
//
// From the paper: the algorithm steps, 8-bit S with 32-bit accumulation, the
// mask, reciprocal multiply in place of division, the tree's arg-max, the
// Ullmann containment check and the edge-preserving fitness. This design's
// own choices: the instruction sequence, per-row and per-column random
// factors, Q8.8 coefficients, the 254 scale of Q (S G S^T is 255^2-scaled,
// shifted right by 8), greedy row-order projection, and that a row whose sum
// is zero stays zero. Limits: n <= R and m <= C (no tiling) and R <= C.
module imm_engine
  import imm_pkg::*;
#(
  parameter int unsigned R = 8,
  parameter int unsigned C = 8,
  localparam int unsigned IW = (C <= 2) ? 1 : $clog2(C)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         cmd_valid,
  input  cmd_e                         cmd,
  input  logic                         use_sg,
  input  logic                         use_sc,
  input  logic [31:0]                  seed,
  input  logic [$clog2(R+1)-1:0]       n,
  input  logic [$clog2(C+1)-1:0]       m,
  input  logic signed [DW-1:0]         w,
  input  logic signed [DW-1:0]         c1,
  input  logic signed [DW-1:0]         c2,
  input  logic signed [DW-1:0]         c3,
  input  logic [R-1:0][R-1:0]          q_adj,
  input  logic [C-1:0][C-1:0]          g_adj,
  input  logic [R-1:0][C-1:0]          mask,
  input  logic [R-1:0][C-1:0][7:0]     sg,
  input  logic [R-1:0][C-1:0][7:0]     sc,
  output logic                         busy,
  output logic                         done,
  output fit_t                         fit,
  output logic                         feasible,
  output logic [R-1:0][IW-1:0]         pi,
  output logic [R-1:0][C-1:0][7:0]     s_out
);

  typedef enum logic [4:0] {
    S_IDLE, I_LDQ, I_LDM, I_RND, I_SETUP,
    T_LDSG, T_LDSC, T_VEL, T_POS,
    N_MASK, N_SUM, N_DIV, N_APPLY,
    F_SNAP1, F_MM1, F_SNAP2, F_MM2, F_ERR, F_ESUM, F_ESUM2, F_VIOL, F_VIOL2,
    L_BEST, P_PROJ, P_PWAIT, P_LDM, S_DONE
  } st_e;

  st_e  st;
  cmd_e mode;
  logic [7:0] cnt;
  logic use_sg_q, use_sc_q;
  fit_t f_local;
  logic [C-1:0] used;
  logic [R-1:0] pvalid;
  logic pfail;

  // buffers
  logic signed [R-1:0][C-1:0][DW-1:0] left_buf;  // row-bus operands
  logic signed [C-1:0][C-1:0][DW-1:0] top_buf;   // X^T column-bus operands
  logic [R-1:0][RW-1:0]               recip_buf; // per-row reciprocal

  // PE array
  pe_instr_t instr;
  logic [R-1:0] row_en;
  logic [C-1:0] col_en;
  logic signed [R-1:0][DW-1:0] row_bus;
  logic signed [C-1:0][DW-1:0] col_bus;
  logic signed [R-1:0][C-1:0][AW-1:0] acc;
  logic signed [R-1:0][C-1:0][DW-1:0] rdat, sval;

  pe_array #(.R(R), .C(C)) u_arr (
    .clk, .rst_n, .instr, .row_en, .col_en, .row_bus, .col_bus,
    .recip(recip_buf), .acc, .rdat, .sval);

  // Rand in the left buffer (one factor per row) and top buffer (per column)
  logic rnd_step;
  logic [R-1:0][7:0] rl;
  logic [C-1:0][7:0] rt;
  lfsr_rand #(.LANES(R)) u_rand_l (.clk, .rst_n, .load(cmd_valid && !busy && cmd == CMD_INIT),
    .seed(seed), .step(rnd_step), .r(rl));
  lfsr_rand #(.LANES(C)) u_rand_t (.clk, .rst_n, .load(cmd_valid && !busy && cmd == CMD_INIT),
    .seed(~seed), .step(rnd_step), .r(rt));

  // add/compare tree behind the right-hand buffer
  logic tr_valid, tr_first;
  logic [C-1:0][FW-1:0] tr_lanes;
  logic [FW-1:0] tr_sum, tr_max;
  logic [IW-1:0] tr_idx;
  add_cmp_tree #(.L(C), .W(FW), .IW(IW)) u_tree (
    .clk, .rst_n, .in_valid(tr_valid), .first(tr_first), .base('0),
    .lanes(tr_lanes), .sum(tr_sum), .max(tr_max), .max_idx(tr_idx));

  // reciprocal unit
  logic rc_start, rc_busy, rc_done;
  logic [RW-1:0] rc_q;
  recip_unit u_recip (.clk, .rst_n, .start(rc_start), .den(tr_sum[RW-1:0]),
    .busy(rc_busy), .done(rc_done), .q(rc_q));

  localparam int unsigned RIW = (R <= 2) ? 1 : $clog2(R);
  logic [RIW-1:0] ri;
  assign ri = cnt[RIW-1:0];
  localparam int unsigned CW = 8;
  wire [CW-1:0] R8 = CW'(R);
  wire [CW-1:0] n8 = CW'(n);
  wire [CW-1:0] m8 = CW'(m);
  reg_e xr;  // matrix X of the current X G X^T evaluation
  assign xr = (mode == CMD_FINAL) ? R_T : R_S;

  function automatic pe_instr_t mk(pe_op_e op, pe_src_e sa, reg_e ra,
                                   pe_src_e sb, reg_e rb, reg_e rd,
                                   logic sat8, logic [5:0] sh);
    pe_instr_t i;
    i.op = op; i.sa = sa; i.ra = ra; i.sb = sb; i.rb = rb; i.rd = rd;
    i.swap = 1'b0; i.sat8 = sat8; i.shift = sh;
    return i;
  endfunction

  // PSO random coefficients: k1 per row (left Rand), k2 per column (top
  // Rand), both (c * r) >>> 8 truncated to the bus width.
  logic signed [R-1:0][DW-1:0] k1;
  logic signed [C-1:0][DW-1:0] k2;
  for (genvar i = 0; i < R; i++) begin : g_k1
    logic signed [DW+7:0] p1;
    assign p1    = c1 * $signed({1'b0, rl[i]});
    assign k1[i] = DW'(p1 >>> 8);
  end
  for (genvar j = 0; j < C; j++) begin : g_k2
    logic signed [DW+7:0] p2;
    assign p2    = c2 * $signed({1'b0, rt[j]});
    assign k2[j] = DW'(p2 >>> 8);
  end

  // ------------------------------------------------------------------
  // instruction and operand generation
  // ------------------------------------------------------------------
  always_comb begin
    instr    = PE_IDLE;
    row_en   = '1;
    col_en   = '1;
    row_bus  = '0;
    col_bus  = '0;
    rnd_step = 1'b0;
    tr_valid = 1'b0;
    tr_first = 1'b0;
    tr_lanes = '0;
    rc_start = 1'b0;
    unique case (st)
      I_LDQ: begin
        instr  = mk(PE_LDR, SRC_COL, R_S, SRC_REG, R_S, R_Q, 1'b0, 6'd0);
        row_en = R'(1) << cnt;
        for (int j = 0; j < int'(C); j++)
          col_bus[j] = (j < int'(R) && q_adj[ri][j % R]) ? DW'(254) : '0;
      end
      I_LDM: begin
        instr  = mk(PE_LDR, SRC_COL, R_S, SRC_REG, R_S, R_MASK, 1'b0, 6'd0);
        row_en = R'(1) << cnt;
        for (int j = 0; j < int'(C); j++) col_bus[j] = DW'(mask[ri][j]);
      end
      I_RND: begin
        unique case (cnt)
          8'd0: begin
            instr = mk(PE_MUL, SRC_ROW, R_S, SRC_COL, R_S, R_S, 1'b0, 6'd0);
            for (int i = 0; i < int'(R); i++) row_bus[i] = DW'(rl[i]);
            for (int j = 0; j < int'(C); j++) col_bus[j] = DW'(rt[j]);
            rnd_step = 1'b1;
          end
          default: instr = mk(PE_WB, SRC_REG, R_S, SRC_REG, R_S, R_S, 1'b1, 6'd8);
        endcase
      end
      I_SETUP: begin
        unique case (cnt)
          8'd0: instr = mk(PE_LDA, SRC_COL, R_S, SRC_REG, R_S, R_S, 1'b0, 6'd0);
          8'd1: instr = mk(PE_WB, SRC_REG, R_S, SRC_REG, R_S, R_V, 1'b0, 6'd0);
          default: instr = mk(PE_COPY, SRC_REG, R_S, SRC_REG, R_S, R_SL, 1'b0, 6'd0);
        endcase
      end
      T_LDSG, T_LDSC: begin
        instr  = mk(PE_LDR, SRC_COL, R_S, SRC_REG, R_S, (st == T_LDSG) ? R_SG : R_SC, 1'b0, 6'd0);
        row_en = R'(1) << cnt;
        for (int j = 0; j < int'(C); j++)
          col_bus[j] = DW'((st == T_LDSG) ? sg[ri][j] : sc[ri][j]);
      end
      T_VEL: begin
        unique case (cnt)
          8'd0: begin
            instr = mk(PE_MUL, SRC_REG, R_V, SRC_COL, R_S, R_S, 1'b0, 6'd0);
            for (int j = 0; j < int'(C); j++) col_bus[j] = w;
          end
          8'd1, 8'd2: begin
            instr = mk(PE_MAC, SRC_REG, (cnt == 8'd1) ? R_SL : R_S, SRC_ROW, R_S, R_S, 1'b0, 6'd0);
            for (int i = 0; i < int'(R); i++)
              row_bus[i] = (cnt == 8'd1) ? k1[i] : -k1[i];
          end
          8'd3, 8'd4: begin
            instr = mk(PE_MAC, SRC_REG, (cnt == 8'd3) ? R_SG : R_S, SRC_COL, R_S, R_S, 1'b0, 6'd0);
            for (int j = 0; j < int'(C); j++)
              col_bus[j] = !use_sg_q ? '0 : (cnt == 8'd3) ? k2[j] : -k2[j];
          end
          8'd5, 8'd6: begin
            instr = mk(PE_MAC, SRC_REG, (cnt == 8'd5) ? R_SC : R_S, SRC_COL, R_S, R_S, 1'b0, 6'd0);
            for (int j = 0; j < int'(C); j++)
              col_bus[j] = !use_sc_q ? '0 : (cnt == 8'd5) ? c3 : -c3;
          end
          default: begin
            instr = mk(PE_WB, SRC_REG, R_S, SRC_REG, R_S, R_V, 1'b0, 6'd8);
            rnd_step = 1'b1;
          end
        endcase
      end
      T_POS: instr = (cnt == 8'd0) ? mk(PE_ADD, SRC_REG, R_S, SRC_REG, R_V, R_S, 1'b0, 6'd0)
                                   : mk(PE_WB, SRC_REG, R_S, SRC_REG, R_S, R_S, 1'b1, 6'd0);
      N_MASK: instr = (cnt == 8'd0) ? mk(PE_MUL, SRC_REG, R_S, SRC_REG, R_MASK, R_S, 1'b0, 6'd0)
                                    : mk(PE_WB, SRC_REG, R_S, SRC_REG, R_S, R_S, 1'b1, 6'd0);
      N_SUM: begin
        tr_valid = 1'b1;
        tr_first = 1'b1;
        for (int j = 0; j < int'(C); j++)
          tr_lanes[j] = FW'(unsigned'(sval[ri][j][7:0]));
      end
      N_DIV: rc_start = !rc_busy && !rc_done && (cnt[7] == 1'b0);
      N_APPLY: begin
        unique case (cnt)
          8'd0:    instr = mk(PE_LDA, SRC_REG, R_S, SRC_REG, R_S, R_S, 1'b0, 6'd0);
          8'd1:    instr = mk(PE_RECIP, SRC_REG, R_S, SRC_REG, R_S, R_S, 1'b0, 6'd16);
          default: instr = mk(PE_WB, SRC_REG, R_S, SRC_REG, R_S, R_S, 1'b1, 6'd0);
        endcase
      end
      F_SNAP1, F_SNAP2: instr = mk(PE_LDA, SRC_COL, xr, SRC_REG, R_S, R_S, 1'b0, 6'd0);
      F_MM1: begin
        instr = mk(PE_MAC, SRC_ROW, R_S, SRC_COL, R_S, R_S, 1'b0, 6'd0);
        for (int i = 0; i < int'(R); i++) row_bus[i] = left_buf[i][cnt[IW-1:0]];
        for (int j = 0; j < int'(C); j++) col_bus[j] = DW'(g_adj[cnt[IW-1:0]][j]);
      end
      F_MM2: begin
        instr = mk(PE_MAC, SRC_ROW, R_S, SRC_COL, R_S, R_S, 1'b0, 6'd0);
        for (int i = 0; i < int'(R); i++) row_bus[i] = left_buf[i][cnt[IW-1:0]];
        for (int j = 0; j < int'(C); j++) col_bus[j] = top_buf[cnt[IW-1:0]][j];
      end
      F_ERR: begin
        unique case (cnt)
          8'd0:    instr = mk(PE_WB, SRC_REG, R_S, SRC_REG, R_S, R_T, 1'b0, 6'd8);
          8'd1:    instr = mk(PE_SUB, SRC_REG, R_Q, SRC_REG, R_T, R_S, 1'b0, 6'd0);
          8'd2:    instr = mk(PE_WB, SRC_REG, R_S, SRC_REG, R_S, R_T, 1'b0, 6'd0);
          default: instr = mk(PE_MUL, SRC_REG, R_T, SRC_REG, R_T, R_S, 1'b0, 6'd0);
        endcase
      end
      F_ESUM: begin
        tr_valid = 1'b1;
        tr_first = (cnt == 8'd0);
        for (int j = 0; j < int'(C); j++)
          tr_lanes[j] = FW'(unsigned'(acc[ri][j]));
      end
      F_VIOL: begin
        instr = mk(PE_NOP, SRC_REG, R_Q, SRC_REG, R_S, R_S, 1'b0, 6'd0);
        tr_valid = 1'b1;
        tr_first = (cnt == 8'd0);
        for (int j = 0; j < int'(C); j++)
          tr_lanes[j] = FW'(rdat[ri][j] != '0 && acc[ri][j] == '0);
      end
      L_BEST: if (fit > f_local) instr = mk(PE_COPY, SRC_REG, R_S, SRC_REG, R_S, R_SL, 1'b0, 6'd0);
      P_PROJ: begin
        tr_valid = 1'b1;
        tr_first = 1'b1;
        for (int j = 0; j < int'(C); j++)
          tr_lanes[j] = (used[j] || CW'(j) >= m8) ? '0
                      : FW'(unsigned'(sval[ri][j][7:0]));
      end
      P_LDM: begin
        instr  = mk(PE_LDR, SRC_COL, R_S, SRC_REG, R_S, R_T, 1'b0, 6'd0);
        row_en = R'(1) << cnt;
        for (int j = 0; j < int'(C); j++)
          col_bus[j] = DW'(pvalid[ri] && pi[ri] == IW'(j));
      end
      default: ;
    endcase
  end

  // ------------------------------------------------------------------
  // sequencer
  // ------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; mode <= CMD_NONE; cnt <= '0; busy <= 1'b0; done <= 1'b0;
      use_sg_q <= 1'b0; use_sc_q <= 1'b0; f_local <= FIT_MIN; fit <= FIT_MIN;
      feasible <= 1'b0; pi <= '0; used <= '0; pvalid <= '0; pfail <= 1'b0;
      left_buf <= '0; top_buf <= '0; recip_buf <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (cmd_valid && cmd != CMD_NONE) begin
          mode <= cmd; busy <= 1'b1; cnt <= '0;
          use_sg_q <= use_sg; use_sc_q <= use_sc;
          unique case (cmd)
            CMD_INIT:  begin st <= I_LDQ; f_local <= FIT_MIN; end
            CMD_STEP:  st <= use_sg ? T_LDSG : use_sc ? T_LDSC : T_VEL;
            default:   begin st <= P_PROJ; used <= '0; pvalid <= '0; pfail <= 1'b0; end
          endcase
        end
        I_LDQ: begin cnt <= cnt + 1'b1; if (cnt == R8 - 1) begin cnt <= '0; st <= I_LDM; end end
        I_LDM: begin cnt <= cnt + 1'b1; if (cnt == R8 - 1) begin cnt <= '0; st <= I_RND; end end
        I_RND: begin cnt <= cnt + 1'b1; if (cnt == 8'd1) begin cnt <= '0; st <= N_MASK; end end
        I_SETUP: begin cnt <= cnt + 1'b1; if (cnt == 8'd2) begin cnt <= '0; st <= S_DONE; end end
        T_LDSG: begin cnt <= cnt + 1'b1;
          if (cnt == R8 - 1) begin cnt <= '0; st <= use_sc_q ? T_LDSC : T_VEL; end end
        T_LDSC: begin cnt <= cnt + 1'b1; if (cnt == R8 - 1) begin cnt <= '0; st <= T_VEL; end end
        T_VEL: begin cnt <= cnt + 1'b1; if (cnt == 8'd7) begin cnt <= '0; st <= T_POS; end end
        T_POS: begin cnt <= cnt + 1'b1; if (cnt == 8'd1) begin cnt <= '0; st <= N_MASK; end end
        N_MASK: begin cnt <= cnt + 1'b1; if (cnt == 8'd1) begin cnt <= '0; st <= N_SUM; end end
        N_SUM: st <= N_DIV;  // tree result registered for the reciprocal unit
        N_DIV: if (rc_done) begin
          recip_buf[ri] <= rc_q;
          if (cnt == R8 - 1) begin cnt <= '0; st <= N_APPLY; end
          else begin cnt <= cnt + 1'b1; st <= N_SUM; end
        end
        N_APPLY: begin cnt <= cnt + 1'b1;
          if (cnt == 8'd2) begin
            cnt <= '0;
            st  <= (mode == CMD_INIT) ? I_SETUP : F_SNAP1;
          end
        end
        F_SNAP1: begin
          for (int i = 0; i < int'(R); i++)
            for (int k = 0; k < int'(C); k++) left_buf[i][k] <= rdat[i][k];
          for (int k = 0; k < int'(C); k++)
            for (int j = 0; j < int'(C); j++)
              top_buf[k][j] <= (j < int'(R)) ? rdat[j % R][k] : '0;
          st <= F_MM1; cnt <= '0;
        end
        F_MM1: begin cnt <= cnt + 1'b1; if (cnt == m8 - 1) begin cnt <= '0; st <= F_SNAP2; end end
        F_SNAP2: begin
          for (int i = 0; i < int'(R); i++)
            for (int k = 0; k < int'(C); k++)
              left_buf[i][k] <= (acc[i][k] > 32767) ? DW'(32767) : acc[i][k][DW-1:0];
          st <= F_MM2; cnt <= '0;
        end
        F_MM2: begin cnt <= cnt + 1'b1;
          if (cnt == m8 - 1) begin cnt <= '0; st <= (mode == CMD_FINAL) ? F_VIOL : F_ERR; end end
        F_ERR: begin cnt <= cnt + 1'b1; if (cnt == 8'd3) begin cnt <= '0; st <= F_ESUM; end end
        F_ESUM: begin cnt <= cnt + 1'b1; if (cnt == R8 - 1) begin cnt <= '0; st <= F_ESUM2; end end
        F_ESUM2: begin fit <= -$signed(tr_sum); st <= L_BEST; end
        L_BEST: begin
          if (fit > f_local) f_local <= fit;
          st <= S_DONE;
        end
        F_VIOL: begin cnt <= cnt + 1'b1; if (cnt == R8 - 1) begin cnt <= '0; st <= F_VIOL2; end end
        F_VIOL2: begin feasible <= !pfail && (tr_sum == '0); st <= S_DONE; end
        P_PROJ: st <= P_PWAIT;
        P_PWAIT: begin
          if (tr_max == '0) pfail <= 1'b1;
          else begin
            pi[ri] <= tr_idx;
            pvalid[ri] <= 1'b1;
            used[tr_idx] <= 1'b1;
          end
          if (cnt == n8 - 1) begin cnt <= '0; st <= P_LDM; end
          else begin cnt <= cnt + 1'b1; st <= P_PROJ; end
        end
        P_LDM: begin cnt <= cnt + 1'b1; if (cnt == R8 - 1) begin cnt <= '0; st <= F_SNAP1; end end
        S_DONE: begin busy <= 1'b0; done <= 1'b1; st <= S_IDLE; end
        default: st <= S_IDLE;
      endcase
    end
  end

  // N_DIV: cnt[7] is never set; rc_start is issued once per row because the
  // unit is busy (or reports done) in the following cycles.

  always_comb
    for (int i = 0; i < int'(R); i++)
      for (int j = 0; j < int'(C); j++) s_out[i][j] = sval[i][j][7:0];

  // A command may only be issued to an idle engine.
  a_cmd_idle: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && cmd != CMD_NONE) |-> !busy)
    else $error("imm_engine: command while busy");

endmodule
