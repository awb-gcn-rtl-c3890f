// pe_array: the PE array and the ACC buffer array of one SpMM engine.
//
// NPE pe instances and NPE acc_bank instances. Rows of the result column are mapped
// statically, ROWS per PE (bank b holds rows b*ROWS .. b*ROWS+ROWS-1, before remote
// switching permutes slots between paired banks). A PE may execute tasks owned by the
// PEs up to HOPS away (distribution smoothing) and then reads and writes their bank,
// so bank b is wired to PEs b-HOPS..b+HOPS, and every PE sees the in-flight tags of
// the PEs up to 2*HOPS away for its RaW check. At the array edges the missing
// neighbours are tied off. A read-out port reads one slot of every bank per cycle
// (and clears it) when a column is finished.
//
// Interface: per-PE TQ push ports and status (count, full, empty, idle, stall);
// out_en/out_slot/out_data for the read-out.
module pe_array
  import awb_pkg::*;
#(
  parameter int NPE      = 1024,
  parameter int ROWS     = 16,
  parameter int T        = 4,
  parameter int HOPS     = 2,
  parameter int TQ_DEPTH = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [NPE-1:0] push,
  input  task_t       push_data [NPE],
  output logic [NPE-1:0] tq_full,
  output logic [NPE-1:0] tq_empty,
  output logic [$clog2(TQ_DEPTH+1)-1:0] tq_count [NPE],
  output logic [NPE-1:0] idle,
  output logic [NPE-1:0] stall,
  input  logic        out_en,
  input  logic [15:0] out_slot,
  output fp32_t       out_data [NPE]
);
  localparam int NP = 2*HOPS + 1;

  tag_t        inflight [NPE][T];
  tag_t        pending  [NPE][T+1];
  logic        rd_en    [NPE];
  logic [15:0] rd_bank  [NPE];
  logic [15:0] rd_slot  [NPE];
  fp32_t       rd_data  [NPE];
  logic        wb_valid [NPE];
  logic [15:0] wb_bank  [NPE];
  logic [15:0] wb_slot  [NPE];
  fp32_t       wb_data  [NPE];
  fp32_t       bank_rd  [NPE][NP];

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    tag_t pin [4*HOPS][T];
    tag_t ppd [2*HOPS][T+1];
    for (genvar n = 0; n < 4*HOPS; n++) begin : g_pin
      localparam int OFS = (n < 2*HOPS) ? n - 2*HOPS : n - 2*HOPS + 1;
      localparam int Q   = p + OFS;
      if (Q >= 0 && Q < NPE) begin : g_on
        assign pin[n] = inflight[Q];
      end else begin : g_off
        for (genvar i = 0; i < T; i++) begin : g_z
          assign pin[n][i] = '0;
        end
      end
    end
    for (genvar n = 0; n < 2*HOPS; n++) begin : g_ppd
      localparam int Q = p - 2*HOPS + n;
      if (Q >= 0) begin : g_on
        assign ppd[n] = pending[Q];
      end else begin : g_off
        for (genvar i = 0; i <= T; i++) begin : g_z
          assign ppd[n][i] = '0;
        end
      end
    end

    pe #(.T(T), .HOPS(HOPS), .TQ_DEPTH(TQ_DEPTH)) u_pe (
      .clk, .rst_n,
      .push(push[p]), .push_data(push_data[p]),
      .tq_full(tq_full[p]), .tq_empty(tq_empty[p]), .tq_count(tq_count[p]),
      .peer_inflight(pin), .peer_pending(ppd),
      .my_inflight(inflight[p]), .my_pending(pending[p]),
      .rd_en(rd_en[p]), .rd_bank(rd_bank[p]), .rd_slot(rd_slot[p]), .rd_data(rd_data[p]),
      .wb_valid(wb_valid[p]), .wb_bank(wb_bank[p]), .wb_slot(wb_slot[p]), .wb_data(wb_data[p]),
      .idle(idle[p]), .stall(stall[p])
    );

    // AGU read mux: the bank at offset rd_bank - p, seen on its port HOPS - offset.
    always_comb begin
      rd_data[p] = '0;
      for (int o = -HOPS; o <= HOPS; o++)
        if (p + o >= 0 && p + o < NPE && 32'(rd_bank[p]) == 32'(p + o))
          rd_data[p] = bank_rd[p + o][HOPS - o];
    end
  end

  for (genvar b = 0; b < NPE; b++) begin : g_bank
    logic [15:0] bs   [NP];
    fp32_t       bd   [NP];
    logic        we   [NP];
    logic [15:0] ws   [NP];
    fp32_t       wd   [NP];
    for (genvar j = 0; j < NP; j++) begin : g_port
      localparam int Q = b + j - HOPS;
      if (Q >= 0 && Q < NPE) begin : g_on
        assign bs[j] = rd_slot[Q];
        assign we[j] = wb_valid[Q] && (32'(wb_bank[Q]) == b);
        assign ws[j] = wb_slot[Q];
        assign wd[j] = wb_data[Q];
      end else begin : g_off
        assign bs[j] = '0;
        assign we[j] = 1'b0;
        assign ws[j] = '0;
        assign wd[j] = '0;
      end
      assign bank_rd[b][j] = bd[j];
    end
    acc_bank #(.ROWS(ROWS), .HOPS(HOPS)) u_bank (
      .clk, .rst_n,
      .rd_slot(bs), .rd_data(bd),
      .wr_en(we), .wr_slot(ws), .wr_data(wd),
      .out_en, .out_slot, .out_data(out_data[b])
    );
  end
endmodule
