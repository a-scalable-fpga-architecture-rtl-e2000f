// gate_fifo -- circuit buffer of the gate issue module.
//
// Synchronous first-in first-out buffer of DEPTH gate words (DEPTH a power
// of two). `push_i` writes `data_i` unless full; `pop_i` removes the head,
// which is always visible on `head_o` while `empty_o` is low (show-ahead).
// Push and pop may happen in the same clock. Gates can be appended while the
// circuit runs, as the paper allows. The depth is this design's choice.
//
// Lint note: the reset is asynchronous for the registers and also appears in
// the assertions' `disable iff` clauses, which lint reports as a mixed use.
module gate_fifo #(
  parameter int unsigned DEPTH = 64,
  parameter int unsigned W     = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear_i,
  input  logic                     push_i,
  input  logic [W-1:0]             data_i,
  input  logic                     pop_i,
  output logic [W-1:0]             head_o,
  output logic                     empty_o,
  output logic                     full_o,
  output logic [$clog2(DEPTH):0]   count_o
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   cnt;
  logic          do_push, do_pop;

  assign do_push = push_i && (cnt != (AW+1)'(DEPTH));
  assign do_pop  = pop_i && (cnt != '0);

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= data_i;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else if (clear_i) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (do_push) wp <= wp + 1'b1;
      if (do_pop)  rp <= rp + 1'b1;
      cnt <= cnt + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  assign head_o  = mem[rp];
  assign empty_o = (cnt == '0);
  assign full_o  = (cnt == (AW+1)'(DEPTH));
  assign count_o = cnt;

  a_no_pop_empty: assert property (@(posedge clk) disable iff (!rst_n) pop_i |-> !empty_o);
endmodule
