// init_manager -- initialization manager (IM).
//
// Loads an arbitrary (possibly entangled, possibly unnormalized) initial
// state into the QSR from the processor's data register. After `start_i`,
// each `wr_i` delivers one 32-bit word whose low 18 bits are a Q1.16 value:
// the real part of amplitude 0, its imaginary part, the real part of
// amplitude 1, and so on for all 2^NQ amplitudes. Each completed amplitude
// is written to the QSR (`qsr_we_o`, one clock). After the last one the IM
// raises `norm_req_o` and holds it until `norm_ack_i`: the gate issue module
// then runs the normalization operation of the one-qubit gate pool, which
// leaves an already normalized state as it is. `busy_o` is high from start
// until the request is acknowledged. The word order is this design's choice;
// the hand-off to the gate pool for normalization follows the paper.
//
// Lint note: only the low 18 bits (one Q1.16 part) of each data word are
// used; the upper bits are ignored.
module init_manager
  import qsu_pkg::*;
#(
  parameter int unsigned NQ = 7
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start_i,
  input  logic           wr_i,
  input  logic [31:0]    wdata_i,
  output logic           qsr_we_o,
  output logic [NQ-1:0]  qsr_idx_o,
  output cplx_t          qsr_data_o,
  output logic           norm_req_o,
  input  logic           norm_ack_i,
  output logic           busy_o
);
  typedef enum logic [1:0] {I_IDLE, I_LOAD, I_NORM} istate_e;
  istate_e        st;
  logic [NQ-1:0]  idx;
  logic           half;     // 0: expecting real part, 1: imaginary part
  amp_t           re_hold;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= I_IDLE;
      idx        <= '0;
      half       <= 1'b0;
      re_hold    <= '0;
      qsr_we_o   <= 1'b0;
      qsr_idx_o  <= '0;
      qsr_data_o <= '0;
    end else begin
      qsr_we_o <= 1'b0;
      case (st)
        I_IDLE: if (start_i) begin
          st   <= I_LOAD;
          idx  <= '0;
          half <= 1'b0;
        end
        I_LOAD: if (wr_i) begin
          if (!half) begin
            re_hold <= amp_t'(wdata_i[AMP_W-1:0]);
            half    <= 1'b1;
          end else begin
            half          <= 1'b0;
            qsr_we_o      <= 1'b1;
            qsr_idx_o     <= idx;
            qsr_data_o.re <= re_hold;
            qsr_data_o.im <= amp_t'(wdata_i[AMP_W-1:0]);
            idx           <= idx + 1'b1;
            if (idx == NQ'(2**NQ - 1)) st <= I_NORM;
          end
        end
        I_NORM: if (norm_ack_i) st <= I_IDLE;
        default: st <= I_IDLE;
      endcase
    end
  end

  assign norm_req_o = (st == I_NORM) && !qsr_we_o;
  assign busy_o     = (st != I_IDLE);
endmodule
