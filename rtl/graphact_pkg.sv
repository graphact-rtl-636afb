// graphact_pkg - shared constants, types and FP32 arithmetic of the GCN
// training accelerator.
//
// Every datapath in the design works on IEEE-754 single precision values,
// as the accelerator it follows does.  The two operators below, fp_add and
// fp_mul, are the "accumulator" and "multiplier" of the design: the lanes of
// the aggregation array and the processing elements of the systolic array
// call them.  They are pure combinational functions; a caller that registers
// the result gets a one-cycle operator.
//
// Choices of this design (the source describes only "Float32"):
//   * round to nearest, ties to even;
//   * denormal inputs count as zero, results below the normal range are
//     flushed to a signed zero;
//   * an infinite input or an overflow gives infinity, a NaN input a quiet
//     NaN.  Inputs of the accelerator are expected to be finite.
//
// The constants give the size of the design point: 128 aggregation lanes,
// a 24 x 24 systolic array, subgraphs of up to 4000 nodes plus 8000 matched
// pairs (node index space of 14 bits).
//
// Lint notes: P_SYS, CNT_W and NCH_MAX are shared constants that not every
// module uses, and fp_is_zero reads only the exponent field of its
// argument, so a linter reports them as unused in some compilation units.
package graphact_pkg;

  localparam int P_AGG     = 128;   // lanes of the accumulator array = features per buffer word
  localparam int P_SYS     = 24;    // systolic array dimension
  localparam int NODE_W    = 14;    // width of a node index (original nodes and pair nodes)
  localparam int CNT_W     = 17;    // width of edge pointers and generic counters
  localparam int NCH_MAX   = 5;     // chunks of P_AGG features in the longest vector (602)

  typedef logic [31:0] fp32_t;
  typedef fp32_t [P_AGG-1:0] fvec_t;     // one buffer word: P_AGG features
  typedef logic [P_AGG-1:0]  lmask_t;    // per-lane enable / status bits
  typedef logic [NODE_W-1:0] node_t;

  localparam fp32_t FP_ZERO = 32'h0000_0000;
  localparam fp32_t FP_QNAN = 32'h7FC0_0000;

  // Buffers the two computation modules and the host can address.
  typedef enum logic [2:0] {
    BUF_X0   = 3'd0,   // layer-0 input features X_s^(0)
    BUF_X1   = 3'd1,   // layer-1 output features X_s^(1)
    BUF_X2   = 3'd2,   // layer-2 output features X_s^(2)
    BUF_AGG  = 3'd3,   // aggregated features (FA -> WT temporary buffer)
    BUF_XOUT = 3'd4    // MLP output X_MLP^out
  } buf_sel_e;

  // Host write targets.
  typedef enum logic [2:0] {
    HW_X0     = 3'd0,  // feature word of X_s^(0)
    HW_ENDPTR = 3'd1,  // end pointer of a neighbour list (A_s^#)
    HW_COLIDX = 3'd2,  // neighbour index (A_s^#)
    HW_DINV   = 3'd3,  // 1/deg of a node (D_s)
    HW_PAIR   = 3'd4,  // matched pair (M_a)
    HW_WSELF  = 3'd5,  // row of W_self / W_MLP, P_SYS columns
    HW_WNEIGH = 3'd6   // row of W_neigh, P_SYS columns
  } host_tgt_e;

  // Run-time description of one minibatch.
  typedef struct packed {
    logic [NODE_W-1:0] n_nodes;   // |V_s|
    logic [NODE_W-1:0] n_pairs;   // sum of |M| over all rounds
    logic [9:0]        f_in;      // f^(0), input feature length
    logic [9:0]        f_hid;     // f^(1) = f^(2), hidden length (even)
    logic [9:0]        n_cls;     // MLP output length
  } batch_cfg_t;

  function automatic logic fp_is_zero(fp32_t a);
    return a[30:23] == 8'd0;
  endfunction

  // Round a normalised 24-bit mantissa with guard/sticky bits and pack.
  function automatic fp32_t fp_pack(logic s, int e, logic [23:0] m, logic g, logic st);
    logic [24:0] mr;
    int          er;
    mr = {1'b0, m};
    er = e;
    if (g && (st || m[0])) mr = mr + 25'd1;
    if (mr[24]) begin
      mr = mr >> 1;
      er = er + 1;
    end
    if (er >= 255) return {s, 8'hFF, 23'd0};
    if (er <= 0)   return {s, 31'd0};
    return {s, er[7:0], mr[22:0]};
  endfunction

  function automatic fp32_t fp_add(fp32_t a, fp32_t b);
    fp32_t       x, y, t;
    logic [50:0] mx, my, r;
    logic        sticky, sub;
    int          d, lz, e;
    if (a[30:23] == 8'hFF || b[30:23] == 8'hFF) begin
      if ((a[30:23] == 8'hFF && a[22:0] != 0) || (b[30:23] == 8'hFF && b[22:0] != 0)) return FP_QNAN;
      if (a[30:23] == 8'hFF && b[30:23] == 8'hFF && a[31] != b[31]) return FP_QNAN;
      return (a[30:23] == 8'hFF) ? a : b;
    end
    if (fp_is_zero(a) && fp_is_zero(b)) return {a[31] & b[31], 31'd0};
    if (fp_is_zero(a)) return b;
    if (fp_is_zero(b)) return a;
    x = a;
    y = b;
    if (b[30:0] > a[30:0]) begin
      t = x; x = y; y = t;
    end
    d  = int'(x[30:23]) - int'(y[30:23]);
    mx = {1'b0, 1'b1, x[22:0], 26'd0};
    my = {1'b0, 1'b1, y[22:0], 26'd0};
    sticky = 1'b0;
    if (d > 50) begin
      sticky = 1'b1;
      my     = '0;
    end else begin
      sticky = |(my & ((51'd1 << d) - 51'd1));
      my     = my >> d;
    end
    my[0] = my[0] | sticky;
    sub = x[31] ^ y[31];
    r   = sub ? (mx - my) : (mx + my);
    if (r == 0) return FP_ZERO;
    // normalise: shift the leading one to bit 50 in six binary steps
    lz = 0;
    if (r[50:19] == '0) begin r = r << 32; lz = lz + 32; end
    if (r[50:35] == '0) begin r = r << 16; lz = lz + 16; end
    if (r[50:43] == '0) begin r = r << 8;  lz = lz + 8;  end
    if (r[50:47] == '0) begin r = r << 4;  lz = lz + 4;  end
    if (r[50:49] == '0) begin r = r << 2;  lz = lz + 2;  end
    if (!r[50])         begin r = r << 1;  lz = lz + 1;  end
    // msb of mx sits at bit 49 for exponent x[30:23]
    e = int'(x[30:23]) + 1 - lz;
    return fp_pack(x[31], e, r[50:27], r[26], |r[25:0]);
  endfunction

  function automatic fp32_t fp_mul(fp32_t a, fp32_t b);
    logic        s;
    logic [47:0] pr;
    int          e;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'hFF || b[30:23] == 8'hFF) begin
      if ((a[30:23] == 8'hFF && a[22:0] != 0) || (b[30:23] == 8'hFF && b[22:0] != 0)) return FP_QNAN;
      if (fp_is_zero(a) || fp_is_zero(b)) return FP_QNAN;
      return {s, 8'hFF, 23'd0};
    end
    if (fp_is_zero(a) || fp_is_zero(b)) return {s, 31'd0};
    pr = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e  = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (pr[47]) return fp_pack(s, e + 1, pr[47:24], pr[23], |pr[22:0]);
    return fp_pack(s, e, pr[46:23], pr[22], |pr[21:0]);
  endfunction

  // ReLU with the status bit the processing elements append.
  function automatic logic fp_is_neg(fp32_t a);
    return a[31] && !fp_is_zero(a);
  endfunction

  // ceil(n / d) for small run-time counts
  function automatic int unsigned ceil_div(int unsigned n, int unsigned d);
    return (n + d - 1) / d;
  endfunction

endpackage
