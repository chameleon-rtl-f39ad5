// mem_ctrl: memory controller front end of the accelerator.
//
// Connects the PQ decoding units and the result-ID fetch stage to the DRAM
// channels. Units are assigned to channels in blocks: unit u uses channel
// u / (NPQ/NCH), so with the defaults two units share each of the four
// channels. Each unit has a code_reader that streams its sub-list of the
// current IVF list. Per channel a round-robin arbiter picks one read request a
// cycle among the channel's code readers and the ID port; a tag FIFO remembers
// who asked, and the in-order responses are returned to that requester.
//
// Interfaces:
//   start/seg[u]/done     - start all code readers on their sub-lists; done is
//                           high when every reader is idle;
//   code_*[u]             - code streams to the PQ decoding units;
//   id_req_*/id_resp_*    - single read port of the ID fetch stage; the channel
//                           is chosen by id_req_ch, the response always taken;
//   ch_req_*/ch_resp_*    - one simple read port per channel: a request is
//                           taken when valid and ready are both high; responses
//                           return in request order, one word per cycle at
//                           most, and cannot be refused.
// The DDR4 controllers and PHYs behind the channel ports are vendor parts and
// not part of this design. The paper only names the memory controller and says
// that sub-lists are spread over the channels to balance the load; the
// arbitration and port protocol are this design's own.
//
// Lint notes: the tag FIFO's fill count is not needed (its full flag already
// stops requests), and the round-robin search index is a 32-bit loop variable
// of which only the low bits are used.
module mem_ctrl
  import chamvs_pkg::*;
#(
  parameter int unsigned NPQ = N_PQ,
  parameter int unsigned NCH = N_CH,
  parameter int unsigned M   = M_BYTES,
  parameter int unsigned MW  = MEM_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // code readers
  input  logic                 start,
  input  seg_t                 seg [NPQ],
  output logic                 done,
  output logic [NPQ-1:0]       code_valid,
  input  logic [NPQ-1:0]       code_ready,
  output logic [M*8-1:0]       code_data [NPQ],
  output logic [IDX_W-1:0]     code_idx  [NPQ],
  // ID fetch port
  input  logic                 id_req_valid,
  output logic                 id_req_ready,
  input  logic [$clog2(NCH)-1:0] id_req_ch,
  input  logic [ADDR_W-1:0]    id_req_addr,
  output logic                 id_resp_valid,
  output logic [MW-1:0]        id_resp_data,
  // DRAM channels
  output logic [NCH-1:0]       ch_req_valid,
  input  logic [NCH-1:0]       ch_req_ready,
  output logic [ADDR_W-1:0]    ch_req_addr  [NCH],
  input  logic [NCH-1:0]       ch_resp_valid,
  input  logic [MW-1:0]        ch_resp_data [NCH]
);
  localparam int unsigned UPC = NPQ / NCH;     // units per channel
  localparam int unsigned NR  = UPC + 1;       // requesters per channel
  localparam int unsigned RW  = $clog2(NR);
  localparam int unsigned TD  = 32;            // tag FIFO depth

  logic [NPQ-1:0]    rq_valid, rq_ready, rs_valid, rd_done;
  logic [ADDR_W-1:0] rq_addr [NPQ];

  for (genvar u = 0; u < NPQ; u++) begin : g_rd
    code_reader #(.M(M), .MW(MW)) u_rd (
      .clk, .rst_n,
      .start      (start),
      .seg        (seg[u]),
      .done       (rd_done[u]),
      .rq_valid   (rq_valid[u]),
      .rq_ready   (rq_ready[u]),
      .rq_addr    (rq_addr[u]),
      .rs_valid   (rs_valid[u]),
      .rs_data    (ch_resp_data[u / UPC]),
      .code_valid (code_valid[u]),
      .code_ready (code_ready[u]),
      .code_data  (code_data[u]),
      .code_idx   (code_idx[u])
    );
  end
  assign done = &rd_done;

  logic [NCH-1:0] id_grant, id_rs;

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    logic [NR-1:0]     req, gnt;
    logic [ADDR_W-1:0] addr [NR];
    logic [RW-1:0]     ptr, sel;
    logic              any;
    logic              t_empty, t_full;
    logic [RW-1:0]     t_head;
    logic [$clog2(TD):0] t_count;

    // requester r < UPC is unit c*UPC + r, requester UPC is the ID port
    for (genvar r = 0; r < UPC; r++) begin : g_req
      assign req[r]  = rq_valid[c*UPC + r];
      assign addr[r] = rq_addr[c*UPC + r];
      assign rq_ready[c*UPC + r] = gnt[r];
      assign rs_valid[c*UPC + r] = ch_resp_valid[c] && !t_empty && (t_head == RW'(r));
    end
    assign req[UPC]  = id_req_valid && (id_req_ch == ($bits(id_req_ch))'(c));
    assign addr[UPC] = id_req_addr;
    assign id_grant[c] = gnt[UPC];
    assign id_rs[c]    = ch_resp_valid[c] && !t_empty && (t_head == RW'(UPC));

    // round robin: first requester at or after ptr
    always_comb begin
      any = 1'b0;
      sel = '0;
      for (int i = 0; i < NR; i++) begin
        int unsigned j;
        j = (int'(ptr) + i) % NR;
        if (!any && req[j]) begin
          any = 1'b1;
          sel = RW'(j);
        end
      end
      gnt = '0;
      if (any && ch_req_ready[c] && !t_full) gnt[sel] = 1'b1;
    end

    assign ch_req_valid[c] = any && !t_full;
    assign ch_req_addr[c]  = addr[sel];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                                     ptr <= '0;
      else if (|gnt) ptr <= (sel == RW'(NR-1)) ? '0 : sel + 1'b1;
    end

    sync_fifo #(.W(RW), .DEPTH(TD)) u_tag (
      .clk, .rst_n,
      .wr_en   (|gnt),
      .wr_data (sel),
      .rd_en   (ch_resp_valid[c]),
      .rd_data (t_head),
      .empty   (t_empty),
      .full    (t_full),
      .count   (t_count)
    );

    a_resp_expected: assert property (@(posedge clk) disable iff (!rst_n)
        ch_resp_valid[c] |-> !t_empty);
  end

  assign id_req_ready  = |id_grant;
  assign id_resp_valid = |id_rs;

  always_comb begin
    id_resp_data = '0;
    for (int c = 0; c < NCH; c++)
      if (id_rs[c]) id_resp_data = ch_resp_data[c];
  end
endmodule
