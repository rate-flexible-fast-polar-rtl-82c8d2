// node_identifier: on-line special-node identification.
//
// For a node of T = 2^t bits it compares a few entries of the relative
// reliability vector v with the information length K (s = v < K, one
// comparator per entry) and decides the node class by the paper's
// Theorem 1:
//   Rate-0 : s[T-1] = 0            Rate-1 : s[0] = 1
//   Rep    : s[T-1] = 1, s[T-2] = 0
//   SPC    : s[0]   = 0, s[1]   = 1
// which needs only v[0], v[1], v[T-2], v[T-1]: four comparators, three NOT
// and two AND gates. With EXT = 1 the five further classes of Theorem 2
// (Type-I .. Type-V) are also flagged, using six more entries
// v[2], v[4], v[T-9], v[T-5], v[T-4], v[T-3]:
//   Type-I  : s[T-1] s[T-2] !s[T-3]
//   Type-II : s[T-1] s[T-2] s[T-3] !s[T-5]
//   Type-III: !s[0] !s[1] s[2]
//   Type-IV : !s[0] !s[1] !s[2] s[4]
//   Type-V  : s[T-1] s[T-2] s[T-3] !s[T-4] s[T-5] !s[T-9]
// An entry whose index falls outside the node (small T) counts as frozen,
// and a class is only flagged for node sizes where its pattern exists
// (T >= 2 for Rep/SPC, T >= 4 for Type-I and Type-III, T >= 8 for Type-II, IV and V): these
// size rules are this design's choice. The main decoder uses EXT = 0, as in
// the paper's implementation. Combinational.
//
// Ports: v[] in the order {v0, v1, vT-2, vT-1, v2, v4, vT-9, vT-5, vT-4, vT-3}
// (the last six only when EXT = 1); t is the node stage.
module node_identifier
  import rf_pkg::*;
#(
  parameter int unsigned VW  = 10,   // bits per reliability entry (log2 N)
  parameter bit          EXT = 1'b0  // also identify Type-I..V nodes
) (
  input  logic [VW-1:0]  k_info,          // information length K
  input  logic [STW-1:0] t,               // node stage, T = 2^t
  input  logic [VW-1:0]  v [EXT ? 10 : 4],
  output logic           rate0,
  output logic           rate1,
  output logic           rep,
  output logic           spc,
  output logic [4:0]     type_n           // {V, IV, III, II, I}
);

  localparam int unsigned NV = EXT ? 10 : 4;

  logic [NV-1:0] s;      // comparator outputs C = (A < B)
  logic [NV-1:0] in_node; // entry index lies in_node the node

  always_comb begin
    // Index validity by node size: entries 0..3 are v0, v1, vT-2, vT-1.
    in_node = '0;
    in_node[0] = 1'b1;                // v0
    in_node[1] = (t >= 1);            // v1
    in_node[2] = (t >= 1);            // vT-2
    in_node[3] = 1'b1;                // vT-1
    if (EXT) begin
      in_node[NV > 4 ? 4 : 0] = (t >= 2);  // v2
      in_node[NV > 5 ? 5 : 0] = (t >= 3);  // v4
      in_node[NV > 6 ? 6 : 0] = (t >= 4);  // vT-9
      in_node[NV > 7 ? 7 : 0] = (t >= 3);  // vT-5
      in_node[NV > 8 ? 8 : 0] = (t >= 2);  // vT-4
      in_node[NV > 9 ? 9 : 0] = (t >= 2);  // vT-3
    end
    for (int j = 0; j < NV; j++)
      s[j] = in_node[j] && (v[j] < k_info);
  end

  // Theorem 1 (Fig. 2 of the paper)
  assign rate1 = s[0];
  assign rate0 = ~s[3];
  assign rep   = (t >= 1) && s[3] && ~s[2];
  assign spc   = (t >= 1) && ~s[0] && s[1];

  // Theorem 2 (Fig. 3 of the paper)
  if (EXT) begin : g_ext
    logic s2, s4, sT9, sT5, sT4, sT3;
    assign s2  = s[NV > 4 ? 4 : 0];
    assign s4  = s[NV > 5 ? 5 : 0];
    assign sT9 = s[NV > 6 ? 6 : 0];
    assign sT5 = s[NV > 7 ? 7 : 0];
    assign sT4 = s[NV > 8 ? 8 : 0];
    assign sT3 = s[NV > 9 ? 9 : 0];
    assign type_n[0] = (t >= 2) && s[3] && s[2] && ~sT3;
    assign type_n[1] = (t >= 3) && s[3] && s[2] && sT3 && ~sT5;
    assign type_n[2] = (t >= 2) && ~s[0] && ~s[1] && s2;
    assign type_n[3] = (t >= 3) && ~s[0] && ~s[1] && ~s2 && s4;
    assign type_n[4] = (t >= 3) && s[3] && s[2] && sT3 && ~sT4 && sT5 && ~sT9;
  end else begin : g_noext
    assign type_n = '0;
  end

endmodule
