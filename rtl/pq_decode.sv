// pq_decode: PQ decoding unit.
//
// Turns a stream of m-byte PQ codes into approximate distances, one per clock.
// The distance lookup table of the current IVF list is held in M separate
// 256-entry memories, one per table column (one per code byte), so that all M
// lookups happen in the same cycle; an adder tree of log2(M) registered levels
// sums the M looked-up values. This follows the paper's PQ decoding unit: input
// FIFO, per-column BRAMs addressed by the code bytes, adder tree, result.
//
// Table loading: entries arrive on tin_* (sub-space, code, value), are written
// into the matching column, and are passed on registered on tout_* to the next
// unit, so a single table constructor feeds the whole chain of units (as drawn
// in the accelerator block diagram, where the table constructor feeds the first
// unit and each unit feeds the next). The controller must not load a table
// while codes of the previous list are still in flight; the unit has a single
// table buffer (this design's choice, the paper does not say whether tables are
// double-buffered).
//
// Code input: code_valid/code_ready with the M code bytes (byte i in bits
// [8i+7:8i]) and the candidate's ID index as a tag. They enter an input FIFO
// of FIFO_DEPTH entries. Output: out_valid/out_cand, 2 + log2(M) cycles after
// a code is written into the FIFO, with no back-pressure: the level-1 queue
// pair behind the unit accepts one candidate every cycle. busy is high while
// any code is buffered or in the pipeline.
//
// Lint note: the input FIFO's fill count is unused; code_ready is its full flag.
module pq_decode
  import chamvs_pkg::*;
#(
  parameter int unsigned M          = M_BYTES,
  parameter int unsigned DW         = DIST_W,
  parameter int unsigned UNIT       = 0,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // table load and forward
  input  logic                  tin_valid,
  input  logic [$clog2(M)-1:0]  tin_sub,
  input  logic [7:0]            tin_code,
  input  logic [DW-1:0]         tin_val,
  output logic                  tout_valid,
  output logic [$clog2(M)-1:0]  tout_sub,
  output logic [7:0]            tout_code,
  output logic [DW-1:0]         tout_val,
  // PQ codes
  input  logic                  code_valid,
  output logic                  code_ready,
  input  logic [M*8-1:0]        code_data,
  input  logic [IDX_W-1:0]      code_idx,
  // distances
  output logic                  out_valid,
  output cand_t                 out_cand,
  output logic                  busy
);
  localparam int unsigned LV = $clog2(M);   // adder tree levels

  // ---------------- table columns ----------------
  logic [DW-1:0] col [M][NCODE];

  always_ff @(posedge clk) begin
    if (tin_valid) col[tin_sub][tin_code] <= tin_val;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tout_valid <= 1'b0;
    else        tout_valid <= tin_valid;
  end
  always_ff @(posedge clk) begin
    tout_sub  <= tin_sub;
    tout_code <= tin_code;
    tout_val  <= tin_val;
  end

  // ---------------- input FIFO ----------------
  logic                        f_empty, f_full, f_pop;
  logic [M*8+IDX_W-1:0]        f_head;
  logic [$clog2(FIFO_DEPTH):0] f_count;

  sync_fifo #(.W(M*8+IDX_W), .DEPTH(FIFO_DEPTH)) u_in_fifo (
    .clk, .rst_n,
    .wr_en   (code_valid && code_ready),
    .wr_data ({code_idx, code_data}),
    .rd_en   (f_pop),
    .rd_data (f_head),
    .empty   (f_empty),
    .full    (f_full),
    .count   (f_count)
  );

  assign code_ready = !f_full;
  assign f_pop      = !f_empty;            // the pipeline never stalls

  // ---------------- lookups (stage 0) ----------------
  logic [DW-1:0]    lv [LV+1][M];
  logic [LV:0]      vpipe;
  logic [IDX_W-1:0] tag [LV+1];

  always_ff @(posedge clk) begin
    for (int i = 0; i < M; i++)
      lv[0][i] <= col[i][f_head[i*8 +: 8]];
    tag[0] <= f_head[M*8 +: IDX_W];
  end

  // ---------------- adder tree ----------------
  for (genvar l = 0; l < LV; l++) begin : g_lvl
    always_ff @(posedge clk) begin
      for (int j = 0; j < (M >> (l+1)); j++)
        lv[l+1][j] <= lv[l][2*j] + lv[l][2*j+1];
      tag[l+1] <= tag[l];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LV-1:0], f_pop};
  end

  assign out_valid       = vpipe[LV];
  assign out_cand.distance   = lv[LV][0];
  assign out_cand.unit   = UNIT_W'(UNIT);
  assign out_cand.id_idx = tag[LV];
  assign busy            = !f_empty || (|vpipe);

  initial begin
    assert (M >= 2 && (M & (M-1)) == 0) else $error("pq_decode: M must be a power of two");
  end
endmodule
