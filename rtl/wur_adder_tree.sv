// Fully balanced adder tree: counts the ones in an N-bit vector.
//
// The matched filters sum their tap outputs (one XNOR bit per tap) with a
// balanced binary tree, so the depth, and with it the critical path, grows
// only with log2(N). Level 0 holds the N input bits, padded with zeros to the
// next power of two; every node of level l+1 adds two nodes of level l, and
// a level-l node is l+1 bits wide. The first level is therefore made of half
// adders, as in the paper's mapping; the wider levels are plain adders of
// growing width. Purely combinational.
module wur_adder_tree #(
  parameter int unsigned N  = 256,
  localparam int unsigned LV = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned NP = 1 << LV
) (
  input  logic [N-1:0] bits_i,
  output logic [LV:0]  sum_o
);

  for (genvar l = 0; l <= LV; l++) begin : g_lvl
    logic [l:0] s [NP >> l];
    for (genvar i = 0; i < (NP >> l); i++) begin : g_node
      if (l == 0) begin : g_leaf
        if (i < N) begin : g_bit
          assign s[i] = bits_i[i];
        end else begin : g_pad
          assign s[i] = 1'b0;
        end
      end else begin : g_add
        assign s[i] = {1'b0, g_lvl[l-1].s[2*i]} + {1'b0, g_lvl[l-1].s[2*i+1]};
      end
    end
  end

  assign sum_o = g_lvl[LV].s[0];

endmodule
