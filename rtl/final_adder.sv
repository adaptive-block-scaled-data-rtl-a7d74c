// final_adder: sums the lanes' FP32 accumulators into the MAC's final result.
//
// A balanced binary tree of fp32_add units, ceil(log2 N) levels deep. At each
// level, node i adds nodes 2i and 2i+1 of the level below; an odd node left
// over passes through. Every addition rounds to nearest even, so the result
// depends on this order. The single final adder is the IF4 MAC's; its tree
// shape and order are this design's choice. Combinational.
//
// Interface: x[0..N-1] (FP32) in, sum (FP32) out.
module final_adder
  import if4_pkg::*;
#(
  parameter int N = 16
) (
  input  fp32_t x [N],
  output fp32_t sum
);
  localparam int LV = (N > 1) ? $clog2(N) : 0;

  for (genvar l = 0; l <= LV; l++) begin : g_lvl
    localparam int NL = (N + (1 << l) - 1) >> l;
    fp32_t v [NL];
    if (l == 0) begin : g_leaf
      for (genvar i = 0; i < N; i++) begin : g_in
        assign v[i] = x[i];
      end
    end else begin : g_node
      localparam int NP = (N + (1 << (l - 1)) - 1) >> (l - 1);
      for (genvar i = 0; i < NL; i++) begin : g_n
        if (2 * i + 1 < NP) begin : g_add
          fp32_add u_add (.a(g_lvl[l-1].v[2*i]), .b(g_lvl[l-1].v[2*i+1]), .y(v[i]));
        end else begin : g_pass
          assign v[i] = g_lvl[l-1].v[2*i];
        end
      end
    end
  end

  assign sum = g_lvl[LV].v[0];
endmodule
