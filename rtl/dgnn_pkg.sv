// dgnn_pkg: types, sizes and FP32 arithmetic shared by the DGNN accelerator.
//
// All node embeddings, edge data and weights are IEEE-754 single precision
// (the paper computes in 32-bit floating point). The arithmetic here is the
// design's own: round-to-nearest-even add and multiply, subnormals flushed to
// zero, overflow saturated to infinity, NaN not propagated specially. The
// activations are piecewise-linear (PLAN) approximations of sigmoid and tanh,
// whose slopes are powers of two; the paper does not say how its HLS
// activations are built.
//
// The DRAM layout records (snapshot descriptor, COO edge, DRAM word) are this
// design's choice: the paper only lists what is transferred per snapshot
// (edge list, node embeddings, renumbering table, node and edge counts).
package dgnn_pkg;

  typedef logic [31:0] fp32_t;

  // Default sizes. FEAT is not given in the paper; MAX_NODES / MAX_EDGES cover
  // the largest snapshots of its datasets (578 nodes, 1686 edges).
  localparam int unsigned FEAT      = 16;
  localparam int unsigned MAX_NODES = 1024;
  localparam int unsigned MAX_EDGES = 2048;
  localparam int unsigned DRAM_W    = 512;   // one DRAM word per request
  localparam int unsigned ADDR_W    = 32;    // DRAM word address

  localparam fp32_t FP_ZERO = 32'h0000_0000;
  localparam fp32_t FP_ONE  = 32'h3F80_0000;

  // Snapshot descriptor, low 224 bits of one DRAM word, written by the host.
  typedef struct packed {
    logic [31:0] c_base;      // V2: LSTM cell-state table (indexed by raw id)
    logic [31:0] out_base;    // V1: output table; V2: hidden-state table
    logic [31:0] ne_base;     // node-embedding table (indexed by raw id)
    logic [31:0] renum_base;  // renumbering table: local id -> raw id
    logic [31:0] edge_base;   // COO edge list, one edge per DRAM word
    logic [31:0] n_edges;
    logic [31:0] n_nodes;
  } snap_desc_t;

  // One COO edge, low 64 bits of a DRAM word; src/dst are local (renumbered).
  typedef struct packed {
    fp32_t       val;
    logic [15:0] dst;
    logic [15:0] src;
  } coo_edge_t;

  // ---------------------------------------------------------------- FP32
  function automatic fp32_t fp_pack(logic s, int e, logic [22:0] m);
    if (e <= 0)        return {s, 31'd0};
    else if (e >= 255) return {s, 8'hFF, 23'd0};
    else               return {s, e[7:0], m};
  endfunction

  function automatic fp32_t fp_mul(fp32_t a, fp32_t b);
    logic        s;
    logic [47:0] p;
    logic [23:0] m;
    logic        g, st;
    int          e;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {s, 31'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (p[47]) begin
      m = {1'b0, p[46:24]}; g = p[23]; st = |p[22:0]; e = e + 1;
    end else begin
      m = {1'b0, p[45:23]}; g = p[22]; st = |p[21:0];
    end
    if (g && (st || m[0])) m = m + 24'd1;
    if (m[23]) e = e + 1;           // mantissa rounded up to 2.0
    return fp_pack(s, e, m[22:0]);
  endfunction

  function automatic fp32_t fp_add(fp32_t a, fp32_t b);
    fp32_t       x, y;
    logic [26:0] mx, my;          // 1.f plus guard, round, sticky bits
    logic [27:0] sum;
    int          d, e, lz;
    logic [23:0] m;
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? (a & b) : b;
    if (b[30:23] == 8'd0) return a;
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    e  = int'(x[30:23]);
    d  = e - int'(y[30:23]);
    mx = {1'b1, x[22:0], 3'b000};
    my = {1'b1, y[22:0], 3'b000};
    if (d >= 27) my = 27'd1;
    else if (d > 0) my = (my >> d) | 27'((my & ((27'd1 << d) - 27'd1)) != 27'd0);
    if (x[31] == y[31]) begin
      sum = {1'b0, mx} + {1'b0, my};
      if (sum[27]) begin
        sum = {1'b0, sum[27:2], sum[1] | sum[0]};
        e = e + 1;
      end
    end else begin
      sum = {1'b0, mx} - {1'b0, my};
      if (sum == 28'd0) return FP_ZERO;
      lz = 0;
      for (int i = 0; i <= 26; i++)
        if (sum[i]) lz = 26 - i;      // the highest set bit wins
      sum = sum << lz;
      e = e - lz;
    end
    // sum[26] is the hidden bit, sum[25:3] the fraction, sum[2:0] g/r/s
    m = {1'b0, sum[25:3]};
    if (sum[2] && ((sum[1] | sum[0]) || m[0])) m = m + 24'd1;
    if (m[23]) e = e + 1;
    return fp_pack(x[31], e, m[22:0]);
  endfunction

  function automatic fp32_t fp_neg(fp32_t a);
    return {~a[31], a[30:0]};
  endfunction

  function automatic fp32_t fp_mac(fp32_t a, fp32_t b, fp32_t c);
    return fp_add(fp_mul(a, b), c);
  endfunction

  function automatic fp32_t fp_relu(fp32_t a);
    return a[31] ? FP_ZERO : a;
  endfunction

  // PLAN sigmoid: 1 for |x|>=5, 0.03125|x|+0.84375 for |x|>=2.375,
  // 0.125|x|+0.625 for |x|>=1, 0.25|x|+0.5 below; sig(-x) = 1 - sig(x).
  function automatic fp32_t fp_sigmoid(fp32_t a);
    fp32_t ax, y;
    ax = {1'b0, a[30:0]};
    if (ax >= 32'h40A0_0000)      y = FP_ONE;
    else if (ax >= 32'h4018_0000) y = fp_mac(ax, 32'h3D00_0000, 32'h3F58_0000);
    else if (ax >= 32'h3F80_0000) y = fp_mac(ax, 32'h3E00_0000, 32'h3F20_0000);
    else                          y = fp_mac(ax, 32'h3E80_0000, 32'h3F00_0000);
    return a[31] ? fp_add(FP_ONE, fp_neg(y)) : y;
  endfunction

  // tanh(x) = 2*sigmoid(2x) - 1
  function automatic fp32_t fp_tanh(fp32_t a);
    fp32_t s;
    s = fp_sigmoid(fp_mul(a, 32'h4000_0000));
    return fp_add(fp_mul(s, 32'h4000_0000), fp_neg(FP_ONE));
  endfunction

endpackage
