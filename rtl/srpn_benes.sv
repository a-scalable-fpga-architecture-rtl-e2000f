// srpn_benes -- self-routing Benes network, 2^N inputs to 2^N outputs.
//
// Each input carries a W-bit payload and an N-bit destination tag. The
// network has the usual recursive Benes structure: a column of 2^(N-1) 2x2
// switches, an upper and a lower Benes network of half the size, and a
// closing column of 2^(N-1) switches, giving 2N-1 switch columns in all
// (seven for N = 4, as in the paper's 16-input example). The recursion is
// unrolled here into 2N-1 generated columns. Input column l splits each
// sub-network of 2^(N-l) elements into halves, the middle column holds the
// 2-element leaves, and output column l merges the halves again.
//
// The switches set themselves from the tags, so no routing table is
// computed. Every element keeps its whole tag:
//   - input column l: a switch crosses when destination bit l of its upper
//     input is 1, sending that element to the lower half;
//   - middle column: a switch crosses when destination bit N-1 of its upper
//     input is 1;
//   - output column l: a switch crosses when the element arriving from the
//     upper half has destination bit l equal to 1.
// This rule routes every permutation that permutes the bits of the index
// without collision; those are the only permutations the simulator asks for.
// A middle or output switch whose two elements want the same output raises
// `conflict_o`. The network is purely combinational; the wrapper `srpn`
// registers it.
module srpn_benes #(
  parameter int unsigned N = 4,
  parameter int unsigned W = 8
) (
  input  logic [2**N-1:0][N-1:0] tag_i,
  input  logic [2**N-1:0][W-1:0] data_i,
  output logic [2**N-1:0][W-1:0] data_o,
  output logic                   conflict_o
);
  localparam int unsigned NA = 2 ** N;
  localparam int unsigned EW = N + W;   // element: {tag, payload}

  typedef logic [NA-1:0][EW-1:0] col_t;

  // g_col[0] is the input; g_col[s] is the output of switch column s
  for (genvar s = 0; s < 2 * N; s++) begin : g_col
    col_t v;
    logic conf;   // a conflict in this column or any before it

    if (s == 0) begin : g_src
      always_comb begin
        for (int i = 0; i < NA; i++) v[i] = {tag_i[i], data_i[i]};
        conf = 1'b0;
      end

    end else if (s < N) begin : g_split
      localparam int unsigned L = s - 1;          // tag bit used
      localparam int unsigned S = NA >> L;        // sub-network size
      always_comb begin
        for (int b = 0; b < (1 << L); b++) begin
          for (int k = 0; k < S / 2; k++) begin
            logic [EW-1:0] a, c;
            a = g_col[s-1].v[b*S + 2*k];
            c = g_col[s-1].v[b*S + 2*k + 1];
            if (a[W + L]) begin
              v[b*S + k]         = c;
              v[b*S + S/2 + k]   = a;
            end else begin
              v[b*S + k]         = a;
              v[b*S + S/2 + k]   = c;
            end
          end
        end
        conf = g_col[s-1].conf;
      end

    end else if (s == N) begin : g_leaf
      always_comb begin
        conf = g_col[s-1].conf;
        for (int m = 0; m < NA / 2; m++) begin
          logic [EW-1:0] a, c;
          a = g_col[s-1].v[2*m];
          c = g_col[s-1].v[2*m + 1];
          if (a[W + N - 1]) begin
            v[2*m] = c; v[2*m + 1] = a;
          end else begin
            v[2*m] = a; v[2*m + 1] = c;
          end
          if (a[W + N - 1] == c[W + N - 1]) conf = 1'b1;
        end
      end

    end else begin : g_merge
      localparam int unsigned L = 2 * N - 1 - s;  // tag bit used
      localparam int unsigned S = NA >> L;        // sub-network size
      always_comb begin
        conf = g_col[s-1].conf;
        for (int b = 0; b < (1 << L); b++) begin
          for (int k = 0; k < S / 2; k++) begin
            logic [EW-1:0] up, lo;
            up = g_col[s-1].v[b*S + k];
            lo = g_col[s-1].v[b*S + S/2 + k];
            if (up[W + L]) begin
              v[b*S + 2*k] = lo; v[b*S + 2*k + 1] = up;
            end else begin
              v[b*S + 2*k] = up; v[b*S + 2*k + 1] = lo;
            end
            if (up[W + L] == lo[W + L]) conf = 1'b1;
          end
        end
      end
    end
  end

  always_comb begin
    for (int i = 0; i < NA; i++) data_o[i] = g_col[2*N-1].v[i][W-1:0];
    conflict_o = g_col[2*N-1].conf;
  end
endmodule
