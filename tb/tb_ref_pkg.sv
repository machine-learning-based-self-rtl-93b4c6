// tb_ref_pkg: reference models shared by the testbenches.
//
// ref_apx   - bit-level model of the approximate carry-save array multiplier,
//             written as nested loops over rows and columns (not the RTL's
//             generate structure): AMA5 cells (sum = partial-product bit,
//             carry = incoming sum) in columns below 9, except the half-adder
//             positions; exact full adders elsewhere.
// ref_leaf  - walks the decision tree held as a flat node table
//             (variable, threshold, left child, right child; children >= 64
//             are leaves 0..32), independent of the RTL's nested if chain.
// ref_leaf_value - the expected signed error of each leaf, recomputed from
//             ref_apx over all 65,536 operand pairs, rounded half up.
// ref_clamp - adds a signed compensation to a product and clamps to 0..65535.
package tb_ref_pkg;

  typedef struct packed {
    logic       var2;   // 0: Input1 cluster, 1: Input2 cluster
    logic [4:0] thr;
    logic [6:0] left;
    logic [6:0] right;
  } node_t;

  localparam node_t TREE [32] = '{
    '{1'b0, 5'd9, 7'd1, 7'd12},   '{1'b0, 5'd1, 7'd2, 7'd4},
    '{1'b1, 5'd14, 7'd3, 7'd66},  '{1'b1, 5'd2, 7'd64, 7'd65},
    '{1'b1, 5'd12, 7'd5, 7'd11},  '{1'b1, 5'd4, 7'd6, 7'd10},
    '{1'b1, 5'd2, 7'd7, 7'd71},   '{1'b0, 5'd3, 7'd67, 7'd8},
    '{1'b1, 5'd1, 7'd9, 7'd70},   '{1'b0, 5'd7, 7'd68, 7'd69},
    '{1'b0, 5'd5, 7'd72, 7'd73},  '{1'b0, 5'd5, 7'd74, 7'd75},
    '{1'b1, 5'd3, 7'd13, 7'd18},  '{1'b1, 5'd1, 7'd14, 7'd15},
    '{1'b0, 5'd14, 7'd76, 7'd77}, '{1'b0, 5'd10, 7'd78, 7'd16},
    '{1'b1, 5'd2, 7'd17, 7'd81},  '{1'b0, 5'd13, 7'd79, 7'd80},
    '{1'b1, 5'd13, 7'd19, 7'd30}, '{1'b1, 5'd9, 7'd20, 7'd28},
    '{1'b1, 5'd8, 7'd21, 7'd27},  '{1'b1, 5'd5, 7'd22, 7'd24},
    '{1'b0, 5'd12, 7'd23, 7'd84}, '{1'b1, 5'd4, 7'd82, 7'd83},
    '{1'b0, 5'd13, 7'd25, 7'd88}, '{1'b1, 5'd7, 7'd26, 7'd87},
    '{1'b1, 5'd6, 7'd85, 7'd86},  '{1'b0, 5'd14, 7'd89, 7'd90},
    '{1'b1, 5'd12, 7'd91, 7'd29}, '{1'b0, 5'd13, 7'd92, 7'd93},
    '{1'b0, 5'd12, 7'd31, 7'd96}, '{1'b0, 5'd10, 7'd94, 7'd95}
  };

  function automatic int ref_apx(int a, int b);
    int s[8], c[8], ns[8], nc[8];
    int res, x, y, ci, col, cr;
    res = 0;
    for (int j = 0; j < 8; j++) begin
      s[j] = ((a >> j) & 1) & (b & 1);
      c[j] = 0;
    end
    res = s[0];
    for (int i = 1; i < 8; i++) begin
      for (int j = 0; j < 8; j++) begin
        x   = (j < 7) ? s[j+1] : 0;
        y   = ((a >> j) & 1) & ((b >> i) & 1);
        ci  = c[j];
        col = i + j;
        if (col < 9 && i != 1) begin
          ns[j] = y;
          nc[j] = x;
        end else begin
          ns[j] = x ^ y ^ ci;
          nc[j] = (x & y) | (ci & (x ^ y));
        end
      end
      s = ns;
      c = nc;
      res |= s[0] << i;
    end
    cr = 0;
    for (int j = 0; j < 8; j++) begin
      x = (j < 7) ? s[j+1] : 0;
      y = c[j];
      res |= (x ^ y ^ cr) << (8 + j);
      cr = (x & y) | (cr & (x ^ y));
    end
    return res;
  endfunction

  function automatic int ref_cluster(int x);
    return x / 16 + 1;
  endfunction

  function automatic int ref_leaf(int a, int b);
    int n, q;
    n = 0;
    while (n < 64) begin
      q = TREE[n].var2 ? ref_cluster(b) : ref_cluster(a);
      n = (q <= int'(TREE[n].thr)) ? int'(TREE[n].left) : int'(TREE[n].right);
    end
    return n - 64;
  endfunction

  // floor(x / y) for y > 0
  function automatic int floor_div(int x, int y);
    int q;
    q = x / y;
    if ((x % y) != 0 && x < 0) q -= 1;
    return q;
  endfunction

  function automatic void ref_leaf_values(output int v[33]);
    int sum[33], cnt[33], k;
    for (int i = 0; i < 33; i++) begin
      sum[i] = 0;
      cnt[i] = 0;
    end
    for (int a = 0; a < 256; a++)
      for (int b = 0; b < 256; b++) begin
        k = ref_leaf(a, b);
        sum[k] += a * b - ref_apx(a, b);
        cnt[k] += 1;
      end
    for (int i = 0; i < 33; i++) v[i] = floor_div(2 * sum[i] + cnt[i], 2 * cnt[i]);
  endfunction

  function automatic int ref_clamp(int p, int c);
    int t;
    t = p + c;
    if (t < 0) return 0;
    if (t > 65535) return 65535;
    return t;
  endfunction

endpackage
