// code_reader: streams one sub-list of PQ codes from DRAM into a PQ decoding
// unit.
//
// On start it takes a seg_t (first code word, first ID index, vector count) and
// reads ceil(count / VPW) consecutive MEM_W-bit words, where VPW = MEM_W/(8*M)
// codes share one word (four 16-byte codes in a 512-bit word by default; code
// j of a word sits in bits [j*8M +: 8M]). Returned words go into a small
// response FIFO, from which the codes are handed to the decoding unit one per
// cycle with the ID index id_base + n of the n-th vector. The unused tail of
// the last word is skipped.
//
// Read requests: rq_valid/rq_ready/rq_addr. Responses come back in order on
// rs_valid/rs_data and are always accepted: a request is issued only while the
// response FIFO has room for it and every older outstanding response. done is
// high whenever the reader is idle. All of this is this design's own; the
// paper only says that codes are loaded from DRAM through an m-byte-wide FIFO.
module code_reader
  import chamvs_pkg::*;
#(
  parameter int unsigned M     = M_BYTES,
  parameter int unsigned MW    = MEM_W,
  parameter int unsigned DEPTH = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  seg_t              seg,
  output logic              done,
  // DRAM read port
  output logic              rq_valid,
  input  logic              rq_ready,
  output logic [ADDR_W-1:0] rq_addr,
  input  logic              rs_valid,
  input  logic [MW-1:0]     rs_data,
  // to the PQ decoding unit
  output logic              code_valid,
  input  logic              code_ready,
  output logic [M*8-1:0]    code_data,
  output logic [IDX_W-1:0]  code_idx
);
  localparam int unsigned VPW = MW / (8 * M);
  localparam int unsigned LW  = (VPW > 1) ? $clog2(VPW) : 1;
  localparam int unsigned AW  = $clog2(DEPTH);

  seg_t              s;
  logic              active;
  logic [CNT_W-1:0]  words, issued, vec;
  logic [LW-1:0]     lane;
  logic [AW:0]       outstanding;

  logic              f_empty, f_full, f_pop;
  logic [MW-1:0]     f_head;
  logic [AW:0]       f_count;

  sync_fifo #(.W(MW), .DEPTH(DEPTH)) u_rsp (
    .clk, .rst_n,
    .wr_en (rs_valid), .wr_data (rs_data),
    .rd_en (f_pop),    .rd_data (f_head),
    .empty (f_empty),  .full (f_full), .count (f_count)
  );

  assign rq_valid   = active && (issued < words) && ((f_count + outstanding) < (AW+1)'(DEPTH));
  assign rq_addr    = s.code_base + ADDR_W'(issued);
  assign code_valid = active && !f_empty && (vec < s.count);
  assign code_data  = f_head[lane*(8*M) +: 8*M];
  assign code_idx   = s.id_base + IDX_W'(vec);
  assign f_pop      = code_valid && code_ready &&
                      ((lane == LW'(VPW-1)) || (vec == s.count - 1'b1));
  assign done       = !active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active      <= 1'b0;
      s           <= '0;
      words       <= '0;
      issued      <= '0;
      vec         <= '0;
      lane        <= '0;
      outstanding <= '0;
    end else begin
      outstanding <= outstanding + (AW+1)'(rq_valid && rq_ready) - (AW+1)'(rs_valid);
      if (start && !active) begin
        s      <= seg;
        words  <= CNT_W'((seg.count + CNT_W'(VPW-1)) / CNT_W'(VPW));
        issued <= '0;
        vec    <= '0;
        lane   <= '0;
        active <= (seg.count != 0);
      end else if (active) begin
        if (rq_valid && rq_ready) issued <= issued + 1'b1;
        if (code_valid && code_ready) begin
          vec  <= vec + 1'b1;
          lane <= (lane == LW'(VPW-1)) ? '0 : lane + 1'b1;
          if (vec == s.count - 1'b1) active <= 1'b0;
        end
      end
    end
  end

  a_rsp_room: assert property (@(posedge clk) disable iff (!rst_n) rs_valid |-> !f_full);
endmodule
