// adder_tree -- combinational binary reduction tree of signed operands.
//
// Layer 0 holds the N input operands of W bits. Layer l holds ceil(N/2^l)
// values of W+l bits: each is the sum of two neighbouring values of layer l-1,
// and an odd value left over at the end of a layer passes through without an
// adder (sign-extended by one bit). After $clog2(N) layers one value remains,
// the root, W + $clog2(N) bits wide.
//
// Interface: in[N] signed W bits, sum signed W+$clog2(N) bits. No clock.
module adder_tree #(
  parameter int N = 4,
  parameter int W = 10
) (
  input  logic signed [W-1:0]           in  [N],
  output logic signed [W+$clog2(N)-1:0] sum
);
  localparam int DEPTH = $clog2(N);

  // number of values in layer l
  function automatic int cnt_of(input int l);
    return (N + (1 << l) - 1) >> l;
  endfunction

  for (genvar l = 0; l <= DEPTH; l++) begin : g_lvl
    logic signed [W+l-1:0] v [cnt_of(l)];
    if (l == 0) begin : g_in
      for (genvar k = 0; k < N; k++) begin : g_k
        assign v[k] = in[k];
      end
    end else begin : g_add
      for (genvar k = 0; k < cnt_of(l); k++) begin : g_k
        if (2 * k + 1 < cnt_of(l - 1)) begin : g_sum
          assign v[k] = (W+l)'(g_lvl[l-1].v[2*k]) + (W+l)'(g_lvl[l-1].v[2*k+1]);
        end else begin : g_pass
          assign v[k] = (W+l)'(g_lvl[l-1].v[2*k]);
        end
      end
    end
  end

  assign sum = g_lvl[DEPTH].v[0];
endmodule
