// lut_construct: distance lookup table construction unit.
//
// For one probed IVF list it produces the m x 256 table of partial squared L2
// distances between the query and every PQ centroid: entry (i, c) is
//   sum_{d<D*} ( (q - cc[list])[i*D* + d] - cb[i][c][d] )^2
// where cc[list] is the list's coarse (IVF) centroid and cb the PQ codebook.
// Subtracting the coarse centroid first (residual encoding) is what makes the
// table depend on the list, as the paper's "a distance lookup table for each
// IVF list" implies; it is otherwise not spelled out there.
//
// Both tables are on-chip memories loaded through write ports before queries
// arrive: the codebook (m*256 centroids of D* elements) and the coarse
// centroids (NLIST vectors of D elements). All elements are signed ELEM_W-bit
// fixed-point numbers; the paper's implementation uses floating point.
//
// Timing: a start pulse latches the query and list ID; one cycle later the
// coarse centroid is read and the residual formed, then the unit emits one
// table entry per cycle (sub-space major, code minor) on lut_valid/sub/code/val,
// M*256 entries in all, through a three-stage pipeline (codebook read,
// squares, sum). done pulses with the last entry; busy is high from start to
// done. The entries stream into the first PQ decoding unit, which forwards
// them down the chain. The one-entry-per-cycle rate with D* parallel lanes is
// this design's own choice.
//
// Value bound: with ELEM_W = 8 a residual element fits 9 bits, a difference
// 10 bits, a square 19 bits, and a table entry with D* = 8 fits 22 bits, so a
// 16-entry sum stays far below DIST_EMPTY.
module lut_construct
  import chamvs_pkg::*;
#(
  parameter int unsigned M     = M_BYTES,
  parameter int unsigned DS    = DSUB,
  parameter int unsigned NL    = NLIST,
  parameter int unsigned EW    = ELEM_W,
  parameter int unsigned DW    = DIST_W
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // codebook load: one centroid (D* elements) of sub-space cb_sub
  input  logic                         cb_we,
  input  logic [$clog2(M)-1:0]         cb_sub,
  input  logic [7:0]                   cb_code,
  input  logic [DS*EW-1:0]             cb_vec,
  // coarse centroid load
  input  logic                         cc_we,
  input  logic [$clog2(NL)-1:0]        cc_list,
  input  logic [M*DS*EW-1:0]           cc_vec,
  // table construction request
  input  logic                         start,
  input  logic [M*DS*EW-1:0]           query,
  input  logic [$clog2(NL)-1:0]        list_id,
  output logic                         busy,
  output logic                         done,
  // table entry stream
  output logic                         lut_valid,
  output logic [$clog2(M)-1:0]         lut_sub,
  output logic [7:0]                   lut_code,
  output logic [DW-1:0]                lut_val
);
  localparam int unsigned D   = M * DS;
  localparam int unsigned SW  = $clog2(M);
  localparam int unsigned RW  = EW + 1;       // residual width
  localparam int unsigned QW  = 2 * (EW + 2); // square of a difference

  logic [DS*EW-1:0]   cb_mem [M*NCODE];
  logic [D*EW-1:0]    cc_mem [NL];

  always_ff @(posedge clk) begin
    if (cb_we) cb_mem[{cb_sub, cb_code}] <= cb_vec;
    if (cc_we) cc_mem[cc_list]           <= cc_vec;
  end

  // ---------------- control ----------------
  typedef enum logic [1:0] {S_IDLE, S_RES, S_RUN} state_e;
  state_e state;

  logic [D*EW-1:0]      q_r;
  logic [D*EW-1:0]      cc_r;
  logic signed [RW-1:0] res [D];
  logic [SW+7:0]        idx;          // {sub, code}
  logic                 last_issue;

  assign last_issue = (state == S_RUN) && (idx == (SW+8)'(M*NCODE-1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      idx   <= '0;
      q_r   <= '0;
      cc_r  <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          q_r   <= query;
          cc_r  <= cc_mem[list_id];
          state <= S_RES;
        end
        S_RES: begin
          idx   <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          idx <= idx + 1'b1;
          if (last_issue) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // residual, held while the table is produced
  always_ff @(posedge clk) begin
    if (state == S_RES) begin
      for (int d = 0; d < D; d++)
        res[d] <= RW'(signed'(q_r[d*EW +: EW])) - RW'(signed'(cc_r[d*EW +: EW]));
    end
  end

  // ---------------- datapath pipeline ----------------
  // stage 1: codebook read
  logic                 v1, v2, v3;
  logic                 l1, l2, l3;
  logic [SW+7:0]        i1, i2, i3;
  logic [DS*EW-1:0]     cb1;
  logic [QW-1:0]        sq2 [DS];
  logic [DW-1:0]        sum3;

  always_ff @(posedge clk) begin
    cb1 <= cb_mem[idx];
    i1  <= idx;
  end

  // stage 2: D* squared differences against the residual of sub-space i1
  always_ff @(posedge clk) begin
    for (int d = 0; d < DS; d++) begin
      logic signed [QW-1:0] diff;
      diff   = QW'(res[i1[SW+7:8]*DS + d]) - QW'(signed'(cb1[d*EW +: EW]));
      sq2[d] <= diff * diff;
    end
    i2 <= i1;
  end

  // stage 3: sum of the D* squares
  always_ff @(posedge clk) begin
    logic [DW-1:0] acc;
    acc = '0;
    for (int d = 0; d < DS; d++) acc += DW'(sq2[d]);
    sum3 <= acc;
    i3   <= i2;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {v1, v2, v3} <= '0;
      {l1, l2, l3} <= '0;
    end else begin
      v1 <= (state == S_RUN);
      l1 <= last_issue;
      v2 <= v1;  l2 <= l1;
      v3 <= v2;  l3 <= l2;
    end
  end

  assign busy      = (state != S_IDLE) || v1 || v2 || v3;
  assign done      = v3 && l3;
  assign lut_valid = v3;
  assign lut_sub   = i3[SW+7:8];
  assign lut_code  = i3[7:0];
  assign lut_val   = sum3;
endmodule
