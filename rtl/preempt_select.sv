// preempt_select: chooses which feasible mapping to apply.
//
// When several feasible mappings exist, the paper preempts the task with the
// largest execution-time slack, so that the original tasks keep their
// deadlines. Each target PE j belongs to a running task owner[j] with slack
// slack[owner[j]]. A mapping preempts every task that owns one of its PEs;
// its score is the smallest slack among those tasks (the task most at risk).
// The unit scans the table one mapping per cycle and keeps the mapping with
// the largest score (the earlier one on a tie). Scoring by the minimum is
// this design's reading of "the task with the largest slack" for mappings
// that touch several tasks. `start` begins a scan; `done` pulses after
// nmap + 2 cycles with sel_valid (nmap > 0), sel_idx and sel_slack.
module preempt_select #(
  parameter int unsigned R    = 8,
  parameter int unsigned C    = 8,
  parameter int unsigned MAXM = 8,
  parameter int unsigned NT   = 8,
  parameter int unsigned SW   = 16,
  localparam int unsigned IW = (C <= 2) ? 1 : $clog2(C),
  localparam int unsigned TW = (NT <= 2) ? 1 : $clog2(NT),
  localparam int unsigned MW = $clog2(MAXM+1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [$clog2(R+1)-1:0]        n,
  input  logic [MW-1:0]                 nmap,
  input  logic [MAXM-1:0][R-1:0][IW-1:0] maps,
  input  logic [C-1:0][TW-1:0]          owner,
  input  logic [NT-1:0][SW-1:0]         slack,
  output logic                          done,
  output logic                          sel_valid,
  output logic [MW-1:0]                 sel_idx,
  output logic [SW-1:0]                 sel_slack
);
  logic          run;
  logic [MW-1:0] x;
  logic [SW-1:0] score;
  localparam int unsigned XW = (MAXM <= 2) ? 1 : $clog2(MAXM);
  logic [XW-1:0] xi;
  assign xi = (32'(x) < MAXM) ? XW'(x) : '0;

  always_comb begin
    score = '1;
    for (int i = 0; i < int'(R); i++)
      if (i < int'(n) && slack[owner[maps[xi][i]]] < score)
        score = slack[owner[maps[xi][i]]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; x <= '0; done <= 1'b0; sel_valid <= 1'b0; sel_idx <= '0; sel_slack <= '0;
    end else begin
      done <= 1'b0;
      if (start && !run) begin
        run <= 1'b1; x <= '0; sel_valid <= 1'b0; sel_idx <= '0; sel_slack <= '0;
      end else if (run) begin
        if (x == nmap) begin
          run <= 1'b0; done <= 1'b1;
        end else begin
          if (!sel_valid || score > sel_slack) begin
            sel_valid <= 1'b1; sel_idx <= x; sel_slack <= score;
          end
          x <= x + 1'b1;
        end
      end
    end
  end
endmodule
