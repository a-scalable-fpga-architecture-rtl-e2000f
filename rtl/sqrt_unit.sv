// sqrt_unit -- sequential square root (the SQRT block of the measurement
// path).
//
// Computes root = floor(sqrt(rad_i)) for an IN_W-bit unsigned radicand
// (IN_W even) with the restoring digit-by-digit method, one result bit per
// clock. With the radicand a probability with 32 fraction bits, the root is
// sqrt(P) with 16 fraction bits. Handshake: `start_i` for one clock latches
// `rad_i`; `done_o` pulses with `root_o` valid IN_W/2 clocks later, and
// `root_o` holds until the next start. `busy_o` is high in between. The
// paper gives only the function; the serial method is this design's choice.
//
// Lint note: the top two bits of `rem` are never read. Before each step the
// remainder is below 2^OUT_W, so only its low OUT_W bits are shifted on; the
// spare bits only hold the final remainder, which is not an output.
module sqrt_unit #(
  parameter int unsigned IN_W = 44
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start_i,
  input  logic [IN_W-1:0]    rad_i,
  output logic               busy_o,
  output logic               done_o,
  output logic [IN_W/2-1:0]  root_o
);
  localparam int unsigned OUT_W = IN_W / 2;

  logic [IN_W-1:0]           rad;
  logic [OUT_W+1:0]          rem;
  logic [OUT_W-1:0]          root;
  logic [$clog2(OUT_W+1)-1:0] cnt;

  logic [OUT_W+1:0] rem_sh, trial;
  always_comb begin
    rem_sh = {rem[OUT_W-1:0], rad[IN_W-1 -: 2]};
    trial  = {root, 2'b01};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_o <= 1'b0;
      done_o <= 1'b0;
      cnt    <= '0;
      rad    <= '0;
      rem    <= '0;
      root   <= '0;
    end else begin
      done_o <= 1'b0;
      if (start_i) begin
        busy_o <= 1'b1;
        rad    <= rad_i;
        rem    <= '0;
        root   <= '0;
        cnt    <= '0;
      end else if (busy_o) begin
        rad <= rad << 2;
        if (rem_sh >= trial) begin
          rem  <= rem_sh - trial;
          root <= {root[OUT_W-2:0], 1'b1};
        end else begin
          rem  <= rem_sh;
          root <= {root[OUT_W-2:0], 1'b0};
        end
        cnt <= cnt + 1'b1;
        if (cnt == ($bits(cnt))'(OUT_W - 1)) begin
          busy_o <= 1'b0;
          done_o <= 1'b1;
        end
      end
    end
  end

  assign root_o = root;
endmodule
