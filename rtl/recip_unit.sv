// recip_unit: computes the reconfigurable reciprocal used for row normalisation.
//
// The paper replaces the PE divider with a multiplication by a reciprocal
// value, so each row sum of S needs its reciprocal once. This unit produces
// q = floor(NUM / den) with NUM = 255 * 2^16 (row target 1.0 = 255, 16
// fractional bits), by restoring shift-subtract division, one quotient bit
// per cycle (RW cycles). A PE then computes s * q >>> 16, which makes the
// row sum 255 up to truncation. den = 0 gives q = 0 (the row stays zero).
// Handshake: pulse `start` with `den`; `done` pulses with `q` valid.
// How the reciprocal is obtained is not given in the paper; this is the
// simplest unit that provides it.
module recip_unit
  import imm_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [RW-1:0] den,
  output logic          busy,
  output logic          done,
  output logic [RW-1:0] q
);
  localparam logic [RW-1:0] NUM = RW'(255 * 65536);
  logic [RW-1:0]   n_sh;
  logic [RW-1:0]   rem;
  logic [RW-1:0]   d_q;
  logic [$clog2(RW+1)-1:0] cnt;
  logic [RW:0]     trial;

  assign trial = {rem, n_sh[RW-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; q <= '0; n_sh <= '0; rem <= '0; d_q <= '0; cnt <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        if (den == '0) begin
          q <= '0; done <= 1'b1;
        end else begin
          busy <= 1'b1; n_sh <= NUM; rem <= '0; d_q <= den; cnt <= '0; q <= '0;
        end
      end else if (busy) begin
        n_sh <= n_sh << 1;
        if (trial >= {1'b0, d_q}) begin
          rem <= RW'(trial - {1'b0, d_q});
          q   <= {q[RW-2:0], 1'b1};
        end else begin
          rem <= trial[RW-1:0];
          q   <= {q[RW-2:0], 1'b0};
        end
        cnt <= cnt + 1'b1;
        if (cnt == ($clog2(RW+1))'(RW-1)) begin
          busy <= 1'b0; done <= 1'b1;
        end
      end
    end
  end
endmodule
