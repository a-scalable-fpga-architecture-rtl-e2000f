// recip_unit -- sequential reciprocal (the 1/X block of the measurement
// path).
//
// Computes q = floor(2^(2*FRAC) / d_i), i.e. 1/x for an unsigned operand x
// and a result that both have FRAC fraction bits, with restoring division,
// one quotient bit per clock (2*FRAC+1 clocks). The result is wider than
// the operand because 1/x > 1 here (the paper notes the inverse needs an
// extended type); a quotient that does not fit in Q_W bits, or d_i = 0,
// saturates to all ones. Handshake as in sqrt_unit: `start_i` latches
// `d_i`, `done_o` pulses when `q_o` is valid, `q_o` holds until the next
// start. The method is this design's choice; the paper gives the function.
//
// Lint note: the top bit of `rem` and of `q` are never read. The remainder
// stays below the divisor, and the last quotient bit is appended to
// q[NUM_W-2:0] when the result is formed, so both keep a spare bit.
module recip_unit #(
  parameter int unsigned D_W  = 22,
  parameter int unsigned Q_W  = 27,
  parameter int unsigned FRAC = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start_i,
  input  logic [D_W-1:0]  d_i,
  output logic            busy_o,
  output logic            done_o,
  output logic [Q_W-1:0]  q_o
);
  localparam int unsigned NUM_W = 2 * FRAC + 1;   // numerator 2^(2*FRAC)

  logic [D_W-1:0]              d;
  logic [D_W:0]                rem;
  logic [NUM_W-1:0]            num, q;
  logic [$clog2(NUM_W+1)-1:0]  cnt;
  logic [D_W:0]                rem_sh;

  assign rem_sh = {rem[D_W-1:0], num[NUM_W-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_o <= 1'b0;
      done_o <= 1'b0;
      d      <= '0;
      rem    <= '0;
      num    <= '0;
      q      <= '0;
      cnt    <= '0;
      q_o    <= '0;
    end else begin
      done_o <= 1'b0;
      if (start_i) begin
        busy_o <= 1'b1;
        d      <= d_i;
        rem    <= '0;
        num    <= NUM_W'(1) << (NUM_W - 1);
        q      <= '0;
        cnt    <= '0;
      end else if (busy_o) begin
        num <= num << 1;
        if (rem_sh >= {1'b0, d}) begin
          rem <= rem_sh - {1'b0, d};
          q   <= {q[NUM_W-2:0], 1'b1};
        end else begin
          rem <= rem_sh;
          q   <= {q[NUM_W-2:0], 1'b0};
        end
        cnt <= cnt + 1'b1;
        if (cnt == ($bits(cnt))'(NUM_W - 1)) begin
          busy_o <= 1'b0;
          done_o <= 1'b1;
          // final quotient = {q, last bit}; saturate when it does not fit
          if (d == '0)
            q_o <= '1;
          else if (({q[NUM_W-2:0], (rem_sh >= {1'b0, d})} >> Q_W) != '0)
            q_o <= '1;
          else
            q_o <= Q_W'({q[NUM_W-2:0], (rem_sh >= {1'b0, d})});
        end
      end
    end
  end
endmodule
