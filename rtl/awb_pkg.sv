// awb_pkg: types, constants and arithmetic functions shared by the blocks of the
// rebalancing SpMM engine.
//
// A task is one non-zero pair of the column-wise product S x B: the non-zero s(i,j)
// of the sparse matrix, the element b(j,k) of the dense column that was broadcast to
// it, and the address of the partial result c(i,k) it must be accumulated into. The
// address is split into the owner PE (the ACC bank) and the slot (local row) in that
// bank, which is how rows are statically mapped to PEs: row = pe * ROWS_PER_PE + slot.
//
// The paper computes in 32-bit floating point but gives no details of the units. The
// functions fp32_mul and fp32_add below are this design's own simple IEEE-754 single
// precision operators: subnormal inputs and results are flushed to zero, results are
// truncated (round toward zero), and infinities/NaNs are not treated specially.
package awb_pkg;

  typedef logic [31:0] fp32_t;

  // Operand pair plus destination, as carried through the Omega network and task queues.
  // Fields are sized for the largest configuration (PE ids up to 16 bits, slots up to
  // 16 bits); modules use only the low bits they need.
  typedef struct packed {
    logic [15:0] pe;     // owner PE: the ACC bank the result belongs to
    logic [15:0] slot;   // local row inside that bank
    fp32_t       a;      // non-zero of the sparse matrix
    fp32_t       b;      // broadcast element of the dense column
  } task_t;

  // Address of a partial result of C, as tracked by the RaW check units.
  typedef struct packed {
    logic        v;
    logic [15:0] bank;
    logic [15:0] slot;
  } tag_t;

  // One entry of the sparse-matrix memory (a CSC non-zero with its column index).
  typedef struct packed {
    logic [31:0] row;
    logic [31:0] col;
    fp32_t       val;
  } nz_t;

  // Floating-point multiply, flush-to-zero, truncating.
  function automatic fp32_t fp32_mul(input fp32_t x, input fp32_t y);
    logic        s;
    logic [9:0]  e;    // signed-ish biased exponent with headroom
    logic [47:0] m;
    logic [22:0] f;
    s = x[31] ^ y[31];
    if (x[30:23] == 8'd0 || y[30:23] == 8'd0) return {s, 31'd0};
    m = {1'b1, x[22:0]} * {1'b1, y[22:0]};
    e = {2'b00, x[30:23]} + {2'b00, y[30:23]} - 10'd127;
    if (m[47]) begin
      f = m[46:24];
      e = e + 10'd1;
    end else begin
      f = m[45:23];
    end
    if (e[9] || e == 10'd0) return {s, 31'd0};          // underflow
    if (e >= 10'd255) return {s, 8'hFE, 23'h7FFFFF};     // saturate at max finite
    return {s, e[7:0], f};
  endfunction

  // Floating-point add, flush-to-zero, truncating.
  function automatic fp32_t fp32_add(input fp32_t x, input fp32_t y);
    fp32_t       hi, lo;
    logic [7:0]  d;
    logic [26:0] mb, ms;   // 1 hidden + 23 fraction + 3 guard bits
    logic [27:0] sum;
    logic [8:0]  e;
    int          lz;
    if (x[30:23] == 8'd0) return (y[30:23] == 8'd0) ? 32'd0 : y;
    if (y[30:23] == 8'd0) return x;
    if (x[30:0] >= y[30:0]) begin hi = x; lo = y; end
    else begin hi = y; lo = x; end
    d  = hi[30:23] - lo[30:23];
    mb = {1'b1, hi[22:0], 3'b000};
    ms = (d > 8'd26) ? 27'd0 : ({1'b1, lo[22:0], 3'b000} >> d);
    e  = {1'b0, hi[30:23]};
    if (hi[31] == lo[31]) begin
      sum = {1'b0, mb} + {1'b0, ms};
      if (sum[27]) begin
        sum = sum >> 1;
        e   = e + 9'd1;
      end
    end else begin
      sum = {1'b0, mb} - {1'b0, ms};
      if (sum == 28'd0) return 32'd0;
      lz = 27;
      for (int i = 0; i <= 26; i++) if (sum[i]) lz = 26 - i;
      sum = sum << lz;
      if ({23'd0, e} <= lz) return 32'd0;               // underflow
      e = e - 9'(lz);
    end
    if (e >= 9'd255) return {hi[31], 8'hFE, 23'h7FFFFF};
    return {hi[31], e[7:0], sum[25:3]};
  endfunction

endpackage
