// ivf_list_dir: IVF list directory of one memory node.
//
// The vectors of every IVF list are split evenly over the memory nodes, and a
// node's share is split further over its DRAM channels and, in this design,
// over the PQ decoding units attached to each channel. For every (list, unit)
// pair the directory holds a seg_t: the first 512-bit word of that sub-list's
// PQ codes, the ID index of its first vector and its vector count. The even
// partitioning follows the paper's memory management; the table layout is this
// design's own.
//
// It is NPU on-chip memories of NL entries each, written one entry at a time
// (wr_en, wr_list, wr_unit, wr_seg) by the host while the node is loaded, and
// read for all units at once: rd_en/rd_list give rd_seg one cycle later.
module ivf_list_dir
  import chamvs_pkg::*;
#(
  parameter int unsigned NL  = NLIST,
  parameter int unsigned NPU = N_PQ
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(NL)-1:0]    wr_list,
  input  logic [UNIT_W-1:0]        wr_unit,
  input  seg_t                     wr_seg,
  input  logic                     rd_en,
  input  logic [$clog2(NL)-1:0]    rd_list,
  output seg_t                     rd_seg [NPU]
);
  for (genvar u = 0; u < NPU; u++) begin : g_bank
    seg_t mem [NL];
    always_ff @(posedge clk) begin
      if (wr_en && wr_unit == UNIT_W'(u)) mem[wr_list] <= wr_seg;
      if (rd_en) rd_seg[u] <= mem[rd_list];
    end
  end
endmodule
