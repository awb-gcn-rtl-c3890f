// tb_awb_spmm_engine: end-to-end test of the SpMM engine at a reduced size
// (16 PEs, 4 rows per PE, one Super-PE group of 16 PEs with four Labor-PEs).
//
// Builds a 64 x 64 sparse matrix with a power-law flavour: one "evil" row with many
// non-zeros, a cluster of heavy rows in one region and a light background. It is loaded
// once and multiplied with NCOL dense columns, one per round. Every column of the
// result is compared with a double-precision reference computed here from the same
// single-precision inputs (tolerance for the engine's truncating arithmetic and its
// different summation order). The last column is run with ReLU on.
//
// It also counts the mechanisms the design is made of and fails if one never happened:
// neighbour forwarding (distribution smoothing), RaW stalls, Omega backpressure,
// remote-switch tuples, switch-fraction updates, Super-PE profiling, evil-row remapping,
// and requires utilization to improve from the first round to the last.
`timescale 1ns/1ps
module tb_awb_spmm_engine;
  import awb_pkg::*;

  localparam int LOG   = 4;
  localparam int NPE   = 2**LOG;
  localparam int ROWS  = 4;
  localparam int NR    = NPE * ROWS;     // rows of S and C
  localparam int NC    = NR;             // columns of S = rows of B
  localparam int NCOL  = 8;
  localparam int MAXNZ = 1024;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        nz_wr_en = 0, dcm_wr_en = 0, col_start = 0, relu_en = 0;
  logic [31:0] nz_wr_addr = 0, dcm_wr_addr = 0, nnz = 0;
  nz_t         nz_wr_data = '0;
  fp32_t       dcm_wr_data = '0;
  logic        busy, col_done, out_valid;
  logic [15:0] out_slot;
  fp32_t       out_data [NPE];
  logic [31:0] c_cyc, c_busy, c_fwd, c_raw, c_bp, c_sw, c_upd, c_prof, c_remap, c_evil;

  awb_spmm_engine #(.LOG(LOG), .ROWS(ROWS), .NNZ_MAX(MAXNZ), .GROUP(16), .LABOR(4),
                    .TW(20), .G(3), .BETA(1)) dut (
    .clk, .rst_n, .nz_wr_en, .nz_wr_addr, .nz_wr_data, .nnz,
    .dcm_wr_en, .dcm_wr_addr, .dcm_wr_data, .col_start, .relu_en,
    .busy, .col_done, .out_valid, .out_slot, .out_data,
    .cnt_round_cycles(c_cyc), .cnt_busy_pe_cycles(c_busy), .cnt_forward(c_fwd),
    .cnt_raw_stall(c_raw), .cnt_net_backpressure(c_bp), .cnt_switch(c_sw),
    .cnt_update(c_upd), .cnt_profile(c_prof), .cnt_remap(c_remap), .cnt_evil_nz(c_evil)
  );

  int checks = 0, failures = 0;

  // real <-> single precision, written independently of the design's arithmetic
  function automatic fp32_t to_fp32(input real r);
    logic [63:0] d;
    int e;
    d = $realtobits(r);
    if (r == 0.0) return '0;
    e = int'(d[62:52]) - 1023 + 127;
    return {d[63], e[7:0], d[51:29]};
  endfunction
  function automatic real to_real(input fp32_t f);
    logic [63:0] d;
    if (f[30:23] == 0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  int    nz_row [MAXNZ];
  int    nz_col [MAXNZ];
  real   nz_val [MAXNZ];
  int    n_nz;
  real   bcol [NC];
  real   ref_c [NR];
  real   util [NCOL];

  // CSC order: column by column, rows ascending inside a column.
  task automatic build_matrix();
    bit dense [NR][NC];
    for (int r = 0; r < NR; r++) for (int c = 0; c < NC; c++) dense[r][c] = 0;
    // evil row 57: 48 non-zeros
    for (int c = 0; c < 48; c++) dense[57][c] = 1;
    // heavy cluster, rows 8..19 (PEs 2..4): 10 non-zeros each
    for (int r = 8; r < 20; r++) for (int k = 0; k < 10; k++) dense[r][(r * 7 + k * 5) % NC] = 1;
    // background: every row has one or two non-zeros (self loop + one neighbour)
    for (int r = 0; r < NR; r++) begin
      dense[r][r] = 1;
      if (r % 3 == 0) dense[r][(r + 11) % NC] = 1;
    end
    n_nz = 0;
    for (int c = 0; c < NC; c++)
      for (int r = 0; r < NR; r++)
        if (dense[r][c]) begin
          nz_row[n_nz] = r;
          nz_col[n_nz] = c;
          nz_val[n_nz] = to_real(to_fp32(0.5 + ($urandom % 1000) / 1000.0));
          n_nz++;
        end
  endtask

  task automatic load_matrix();
    for (int i = 0; i < n_nz; i++) begin
      @(negedge clk);
      nz_wr_en   = 1;
      nz_wr_addr = i;
      nz_wr_data = '{row: nz_row[i], col: nz_col[i], val: to_fp32(nz_val[i])};
    end
    @(negedge clk);
    nz_wr_en = 0;
    nnz      = n_nz;
  endtask

  task automatic run_column(input int k, input bit relu);
    real got, exp, tol;
    for (int j = 0; j < NC; j++) bcol[j] = to_real(to_fp32((real'($urandom % 2000) - 1000.0) / 1000.0));
    for (int r = 0; r < NR; r++) ref_c[r] = 0.0;
    for (int i = 0; i < n_nz; i++) ref_c[nz_row[i]] += nz_val[i] * bcol[nz_col[i]];
    for (int j = 0; j < NC; j++) begin
      @(negedge clk);
      dcm_wr_en = 1; dcm_wr_addr = j; dcm_wr_data = to_fp32(bcol[j]);
    end
    @(negedge clk);
    dcm_wr_en = 0; relu_en = relu; col_start = 1;
    @(negedge clk);
    col_start = 0;
    while (!col_done) begin
      @(posedge clk);
      #1;
      if (out_valid) begin
        for (int p = 0; p < NPE; p++) begin
          int r;
          r   = p * ROWS + out_slot;
          got = to_real(out_data[p]);
          exp = (relu && ref_c[r] < 0.0) ? 0.0 : ref_c[r];
          tol = 1e-4 * (exp < 0 ? -exp : exp) + 1e-4;
          checks++;
          if ((got - exp > tol) || (exp - got > tol)) begin
            failures++;
            if (failures < 10) $display("col %0d row %0d: got %f expected %f", k, r, got, exp);
          end
        end
      end
    end
    util[k] = real'(c_busy) / (real'(c_cyc) * NPE);
    $display("col %0d: %0d cycles, utilization %0.2f, fwd %0d raw %0d bp %0d sw %0d upd %0d prof %0d remap %0d evil_nz %0d",
             k, c_cyc, util[k], c_fwd, c_raw, c_bp, c_sw, c_upd, c_prof, c_remap, c_evil);
  endtask

  initial begin
    build_matrix();
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_matrix();
    for (int k = 0; k < NCOL; k++) run_column(k, k == NCOL - 1);
    // mechanisms
    checks += 8;
    if (c_fwd   == 0) begin failures++; $display("no distribution smoothing forward"); end
    if (c_raw   == 0) begin failures++; $display("no RaW stall"); end
    if (c_bp    == 0) begin failures++; $display("no Omega backpressure"); end
    if (c_sw    == 0) begin failures++; $display("no remote switching tuple"); end
    if (c_upd   == 0) begin failures++; $display("no switch fraction update"); end
    if (c_prof  == 0) begin failures++; $display("no Super-PE profiling"); end
    if (c_remap == 0 || c_evil == 0) begin failures++; $display("no evil row remapping"); end
    if (!(util[NCOL-1] > util[0])) begin failures++; $display("utilization did not improve"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
