// result_fetch: fetches the vector IDs of the selected results.
//
// The priority queues carry only a distance and the position of each
// candidate's 64-bit ID in DRAM (unit, ID index). For every result leaving the
// level-2 queue this stage reads the 512-bit word holding the ID from the
// channel of the unit that produced it (word = id_idx / 8, lane = id_idx % 8),
// and sends {qid, rank, distance, id, last} towards the network. An empty record
// (distance all ones, sent when a query found nothing) is passed on without a read
// and with id all ones.
//
// Handshakes: in_valid/in_ready/in_cand/in_last from the K-selection module
// (the input is held until this stage takes it, which happens when the result
// is accepted downstream); id_req_*/id_resp_* to the memory controller, one
// read outstanding at a time; res_valid/res_ready/res towards the network.
// About latency+3 cycles per result. Reading the IDs after selection follows
// the accelerator block diagram; the one-at-a-time sequencing is this design's
// own choice.
module result_fetch
  import chamvs_pkg::*;
#(
  parameter int unsigned NPQ = N_PQ,
  parameter int unsigned NCH = N_CH,
  parameter int unsigned MW  = MEM_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [QID_W-1:0]       qid,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  cand_t                  in_cand,
  input  logic                   in_last,
  output logic                   id_req_valid,
  input  logic                   id_req_ready,
  output logic [$clog2(NCH)-1:0] id_req_ch,
  output logic [ADDR_W-1:0]      id_req_addr,
  input  logic                   id_resp_valid,
  input  logic [MW-1:0]          id_resp_data,
  output logic                   res_valid,
  input  logic                   res_ready,
  output result_t                res
);
  localparam int unsigned UPC = NPQ / NCH;
  localparam int unsigned LPW = MW / ID_W;     // IDs per word
  localparam int unsigned LB  = $clog2(LPW);

  logic [$clog2(MW)-1:0] lsb;                  // first bit of the ID in the word
  assign lsb = {in_cand.id_idx[LB-1:0], ($clog2(ID_W))'(0)};

  typedef enum logic [1:0] {R_IDLE, R_REQ, R_WAIT, R_OUT} rstate_e;
  rstate_e        st;
  logic [ID_W-1:0] id_r;
  logic [K_W-1:0]  rank;

  assign id_req_valid = (st == R_REQ);
  assign id_req_ch    = ($bits(id_req_ch))'(in_cand.unit / UNIT_W'(UPC));
  assign id_req_addr  = ADDR_W'(in_cand.id_idx / IDX_W'(LPW));
  assign res_valid    = (st == R_OUT);
  assign in_ready     = res_valid && res_ready;

  assign res.qid  = qid;
  assign res.rank = rank;
  assign res.distance = in_cand.distance;
  assign res.id   = id_r;
  assign res.last = in_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= R_IDLE;
      id_r <= '0;
      rank <= '0;
    end else begin
      case (st)
        R_IDLE: if (in_valid) begin
          if (in_cand.distance == DIST_EMPTY) begin
            id_r <= '1;
            st   <= R_OUT;
          end else begin
            st   <= R_REQ;
          end
        end
        R_REQ:  if (id_req_ready) st <= R_WAIT;
        R_WAIT: if (id_resp_valid) begin
          id_r <= id_resp_data[lsb +: ID_W];
          st   <= R_OUT;
        end
        R_OUT:  if (res_ready) begin
          st   <= R_IDLE;
          rank <= in_last ? '0 : rank + 1'b1;
        end
        default: st <= R_IDLE;
      endcase
    end
  end

  a_hold_input: assert property (@(posedge clk) disable iff (!rst_n)
      (st != R_IDLE) |-> in_valid);
endmodule
