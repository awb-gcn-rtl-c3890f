// spmmem: the sparse-matrix memory (SpMMeM) and its streaming port towards TDQ-2.
//
// Holds the non-zeros of the sparse matrix S in compressed-sparse-column order (the
// paper buffers S "from off-chip" and "feeds non-zeros and their indices to TDQ").
// Each entry keeps its row index, its column index and its value; storing the column
// index with every entry instead of a column-pointer array is this design's choice
// (it lets each lane look up its dense element without a search). The memory is
// filled through a write port, which stands for the off-chip interface.
//
// On start the memory streams all NNZ entries, LANES per cycle, in storage order:
// the chunk at base feeds lanes 0..LANES-1 with entries base..base+LANES-1. A lane
// stays valid until its entry is taken (lane_ready); the next chunk is presented once
// every valid lane of the current one has been taken, so no entry is lost or repeated.
// The paper reuses S for every output column; the controller restarts the stream
// once per column. done pulses when the last chunk has been fully taken.
module spmmem
  import awb_pkg::*;
#(
  parameter int NNZ_MAX = 16384,
  parameter int LANES   = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  // load port
  input  logic              wr_en,
  input  logic [31:0]       wr_addr,
  input  nz_t               wr_data,
  input  logic [31:0]       nnz,
  // stream port
  input  logic              start,
  output logic [LANES-1:0]  lane_valid,
  output nz_t               lane_nz [LANES],
  input  logic [LANES-1:0]  lane_ready,
  output logic              busy,
  output logic              done
);
  localparam int AW = $clog2(NNZ_MAX);

  nz_t             mem [NNZ_MAX];
  logic [31:0]     base;
  logic [LANES-1:0] sent;

  always_ff @(posedge clk) begin
    if (wr_en) mem[AW'(wr_addr)] <= wr_data;
  end

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      lane_valid[l] = busy && (base + 32'(l) < nnz) && !sent[l];
      lane_nz[l]    = mem[AW'(base + 32'(l))];
    end
  end

  logic [LANES-1:0] now_sent;
  logic             chunk_done;
  always_comb begin
    now_sent   = sent | (lane_valid & lane_ready);
    chunk_done = 1'b1;
    for (int l = 0; l < LANES; l++)
      if (base + 32'(l) < nnz && !now_sent[l]) chunk_done = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base <= '0;
      sent <= '0;
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        base <= '0;
        sent <= '0;
        busy <= 1'b1;
      end else if (busy) begin
        if (chunk_done) begin
          sent <= '0;
          if (base + 32'(LANES) >= nnz) begin
            busy <= 1'b0;
            done <= 1'b1;
          end else begin
            base <= base + 32'(LANES);
          end
        end else begin
          sent <= now_sent;
        end
      end
    end
  end
endmodule
