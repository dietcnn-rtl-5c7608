// dietcnn_tb_pkg: table contents and a reference model for the testbenches.
//
// The look-up tables are filled from simple integer formulas, independent of
// the design.  The add table is deliberately not commutative or associative,
// so a wrong accumulation order changes the result, as it would with a real
// codebook.  ref_neuron() is a behavioural model of one output neuron: it
// sorts the product symbols in ascending order, ripples them through the add
// formula and applies the bias formula.
package dietcnn_tb_pkg;

  function automatic int unsigned conv_f(int unsigned a, int unsigned f, int unsigned n);
    return (a * 131 + f * 71 + ((a * f) % 97) + 7) % n;
  endfunction

  function automatic int unsigned fc_f(int unsigned a, int unsigned f, int unsigned n);
    return (a * 29 + f * 113 + ((a ^ f) % 13) + 3) % n;
  endfunction

  function automatic int unsigned add_f(int unsigned a, int unsigned b, int unsigned n);
    return (a * 3 + b * 5 + ((a ^ b) & 15)) % n;
  endfunction

  function automatic int unsigned act_f(int unsigned s, int unsigned n);
    return (s < n / 2) ? 0 : (s * 7 + 1) % n;
  endfunction

  function automatic int unsigned bias_f(int unsigned ch, int unsigned s, int unsigned n);
    return (s + ch * 13 + 1) % n;
  endfunction

  // Ripple addition of a bag in ascending symbol order.
  function automatic int unsigned ref_sum(int unsigned bag[$], int unsigned n);
    int unsigned acc;
    bag.sort();
    acc = bag[0];
    for (int i = 1; i < bag.size(); i++) acc = add_f(acc, bag[i], n);
    return acc;
  endfunction

  // Reference for one layer.  op: 0 conv, 1 fc, 2 act.  Layouts as in the
  // design: fm (m*H + y)*W + x, filters ((n*C + m)*K + ky)*K + kx.
  function automatic void ref_layer(input int unsigned fm[], input int unsigned flt[],
                                    input int op, input bit bias_en,
                                    input int c, input int h, input int w, input int n_out,
                                    input int k, input int s, input int unsigned n_sym,
                                    input int unsigned n_fflt, output int unsigned res[$]);
    res = {};
    if (op == 2) begin
      for (int i = 0; i < c * h * w; i++) res.push_back(act_f(fm[i], n_sym));
      return;
    end
    for (int n = 0; n < n_out; n++)
      for (int oy = 0; oy + k <= h; oy += s)
        for (int ox = 0; ox + k <= w; ox += s) begin
          int unsigned bag[$];
          int unsigned sum;
          for (int m = 0; m < c; m++)
            for (int ky = 0; ky < k; ky++)
              for (int kx = 0; kx < k; kx++) begin
                int unsigned a, f;
                a = fm[(m * h + oy + ky) * w + ox + kx];
                f = flt[((n * c + m) * k + ky) * k + kx];
                bag.push_back(op == 1 ? fc_f(a, f % n_fflt, n_sym) : conv_f(a, f, n_sym));
              end
          sum = ref_sum(bag, n_sym);
          res.push_back(bias_en ? bias_f(n, sum, n_sym) : sum);
        end
  endfunction

endpackage
