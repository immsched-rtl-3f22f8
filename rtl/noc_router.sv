// noc_router: the on-chip network port between the engines and the global controller.
//
// The paper only states that the global controller reaches the accelerator
// array through the on-chip network (the "Router" in its figure). This router
// carries the two flows the scheduler needs. Upward, every engine that
// finishes a command raises a report (fitness, feasibility, projected
// mapping); the router latches one pending flag per engine and forwards one
// report per cycle to the controller, chosen round-robin, tagged with the
// engine number. A report is sampled from the engine, which holds its
// outputs until its next command. Read path: the controller names an engine
// in rd_id and receives that engine's S matrix in the same cycle (used to
// copy the global best S* and to form the consensus matrix). The downward
// broadcast of commands and of S*/S-bar is plain fan-out and is wired in the
// top level. Packet format, arbitration and single-cycle latency are this
// design's choices.
module noc_router
  import imm_pkg::*;
#(
  parameter int unsigned NE = 1024,
  parameter int unsigned R  = 8,
  parameter int unsigned C  = 8,
  localparam int unsigned IW = (C <= 2) ? 1 : $clog2(C),
  localparam int unsigned EW = (NE <= 2) ? 1 : $clog2(NE)
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // from the engines
  input  logic [NE-1:0]                     eng_done,
  input  fit_t [NE-1:0]                     eng_fit,
  input  logic [NE-1:0]                     eng_feas,
  input  logic [NE-1:0][R-1:0][IW-1:0]      eng_pi,
  input  logic [NE-1:0][R-1:0][C-1:0][7:0]  eng_s,
  // to the controller
  output logic                              rep_valid,
  output logic [EW-1:0]                     rep_id,
  output fit_t                              rep_fit,
  output logic                              rep_feas,
  output logic [R-1:0][IW-1:0]              rep_pi,
  input  logic [EW-1:0]                     rd_id,
  output logic [R-1:0][C-1:0][7:0]          rd_s
);
  logic [NE-1:0] pend;
  logic [EW-1:0] last;   // last granted engine
  logic          gnt_v;
  logic [EW-1:0] gnt;

  // round-robin: first pending engine after `last`
  always_comb begin
    gnt_v = 1'b0;
    gnt   = '0;
    // scanned from the far end so that the nearest pending engine wins
    for (int k = int'(NE); k >= 1; k--)
      if (pend[(int'(last) + k) % int'(NE)]) begin
        gnt_v = 1'b1;
        gnt   = EW'((int'(last) + k) % int'(NE));
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend <= '0;
      last <= EW'(NE - 1);
    end else begin
      pend <= (pend & ~(gnt_v ? (NE'(1) << gnt) : '0)) | eng_done;
      if (gnt_v) last <= gnt;
    end
  end

  assign rep_valid = gnt_v;
  assign rep_id    = gnt;
  assign rep_fit   = eng_fit[gnt];
  assign rep_feas  = eng_feas[gnt];
  assign rep_pi    = eng_pi[gnt];
  assign rd_s      = eng_s[rd_id];

  // An engine must not report again before its previous report was forwarded.
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    (eng_done & pend & ~(gnt_v ? (NE'(1) << gnt) : '0)) == '0)
    else $error("noc_router: report overrun");
endmodule
