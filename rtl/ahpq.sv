// ahpq: approximate hierarchical priority queue (K-selection).
//
// Each of the NPQ PQ decoding units produces one candidate per cycle, but a
// systolic priority queue takes one input every two cycles, so every unit
// feeds a pair of level-1 (L1) queues that accept on alternate cycles (their
// PHASE parameters differ); a candidate goes to whichever of the two is ready.
// L1 queues are truncated to L1LEN entries instead of K: an L1 queue only has
// to hold the final results that happen to come from it, and with 16 queues
// and K = 100 more than 20 in one queue is very unlikely (the paper's AHPQ
// argument). One level-2 (L2) queue of length KQ selects the final results.
//
// Sequence for one query (driven by the accelerator controller):
//   clear  - empties all queues (one cycle);
//   scan   - candidates stream in on in_valid/in_cand;
//   flush  - one-cycle pulse after the last candidate: the L1 queues are
//            emptied one after another into the L2 queue, one element on every
//            cycle the L2 queue accepts (2*NPQ*L1LEN elements, about
//            4*NPQ*L1LEN cycles), then the L2 queue is left KQ+2 cycles to
//            sort itself;
//   output - the k smallest candidates leave in ascending order of distance on
//            out_valid/out_ready/out_cand, out_last on the last one. If fewer
//            than k candidates exist the list ends early; if there are none a
//            single empty record (distance all ones) with out_last is sent.
// busy is high from flush until the last result is taken. drops counts, since
// the last clear, the candidates L1 queues lost because they were full.
// The move-one-by-one flush from L1 to L2 is this design's own choice; the
// paper only says that the L2 queue selects the final K from the L1 queues.
//
// Lint notes: the L1 queues' out_next outputs are left open (only the L2
// queue's look-ahead is needed); only the even queue's in_ready of each pair
// is read, because the odd queue is offered exactly what the even one cannot
// take; the L2 queue's drop output is unused because candidates it pushes out
// during the transfer are by construction not among the K best; and of the L2
// look-ahead entry only the distance field is looked at (emptiness test).
module ahpq
  import chamvs_pkg::*;
#(
  parameter int unsigned NPQ   = N_PQ,
  parameter int unsigned L1LEN = L1_LEN,
  parameter int unsigned KQ    = K_MAX
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear,
  input  logic [NPQ-1:0]  in_valid,
  input  cand_t           in_cand [NPQ],
  input  logic            flush,
  input  logic [K_W-1:0]  k,
  output logic            busy,
  output logic            out_valid,
  input  logic            out_ready,
  output cand_t           out_cand,
  output logic            out_last,
  output logic [31:0]     drops
);
  localparam int unsigned NL1 = 2 * NPQ;
  localparam int unsigned QW  = $clog2(NL1);
  localparam int unsigned CW  = $clog2(KQ + 3) + 1;

  typedef enum logic [1:0] {F_IDLE, F_L1, F_SETTLE, F_OUT} fstate_e;
  fstate_e fstate;

  // ---------------- L1 queues ----------------
  logic  [NL1-1:0] l1_ready, l1_valid, l1_drain, l1_drop;
  cand_t           l1_in  [NL1];
  cand_t           l1_out [NL1];

  for (genvar u = 0; u < NPQ; u++) begin : g_pair
    // dispatch: the even queue takes it on its phase, else the odd one
    assign l1_valid[2*u]   = in_valid[u] &&  l1_ready[2*u];
    assign l1_valid[2*u+1] = in_valid[u] && !l1_ready[2*u];
    assign l1_in[2*u]      = in_cand[u];
    assign l1_in[2*u+1]    = in_cand[u];

    for (genvar h = 0; h < 2; h++) begin : g_q
      systolic_pq #(.LEN(L1LEN), .PHASE(h[0])) u_l1 (
        .clk, .rst_n,
        .clear    (clear),
        .in_valid (l1_valid[2*u+h]),
        .in_ready (l1_ready[2*u+h]),
        .in_cand  (l1_in[2*u+h]),
        .drain    (l1_drain[2*u+h]),
        .out_cand (l1_out[2*u+h]),
        .out_next (),
        .drop     (l1_drop[2*u+h])
      );
    end
  end

  // ---------------- L2 queue ----------------
  logic  l2_ready, l2_valid, l2_drain, l2_drop;
  cand_t l2_in, l2_out;
  cand_t l2_next;       // element behind the tail

  systolic_pq #(.LEN(KQ), .PHASE(1'b0)) u_l2 (
    .clk, .rst_n,
    .clear    (clear),
    .in_valid (l2_valid),
    .in_ready (l2_ready),
    .in_cand  (l2_in),
    .drain    (l2_drain),
    .out_cand (l2_out),
    .out_next (l2_next),
    .drop     (l2_drop)
  );

  // ---------------- flush / output sequencing ----------------
  logic [QW-1:0]              qsel;
  logic [$clog2(L1LEN+1)-1:0] ecnt;
  logic [CW-1:0]              scnt;
  logic [K_W-1:0]             rank;

  logic move;  // one L1 element moves to L2 this cycle
  assign move     = (fstate == F_L1) && l2_ready;
  assign l2_valid = move;
  assign l2_in    = l1_out[qsel];

  always_comb begin
    l1_drain = '0;
    if (move) l1_drain[qsel] = 1'b1;
  end

  assign out_valid = (fstate == F_OUT);
  assign out_cand  = l2_out;
  assign out_last  = (rank == k - 1'b1) || (l2_next.distance == DIST_EMPTY);
  assign l2_drain  = out_valid && out_ready;
  assign busy      = (fstate != F_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fstate <= F_IDLE;
      qsel   <= '0;
      ecnt   <= '0;
      scnt   <= '0;
      rank   <= '0;
    end else begin
      case (fstate)
        F_IDLE: if (flush) begin
          fstate <= F_L1;
          qsel   <= '0;
          ecnt   <= '0;
        end
        F_L1: if (move) begin
          if (ecnt == ($bits(ecnt))'(L1LEN - 1)) begin
            ecnt <= '0;
            if (qsel == QW'(NL1 - 1)) begin
              fstate <= F_SETTLE;
              scnt   <= '0;
            end
            qsel <= qsel + 1'b1;
          end else begin
            ecnt <= ecnt + 1'b1;
          end
        end
        F_SETTLE: begin
          scnt <= scnt + 1'b1;
          if (scnt == CW'(KQ + 1)) begin
            fstate <= F_OUT;
            rank   <= '0;
          end
        end
        F_OUT: if (out_ready) begin
          rank <= rank + 1'b1;
          if (out_last) fstate <= F_IDLE;
        end
        default: fstate <= F_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     drops <= '0;
    else if (clear) drops <= '0;
    else            drops <= drops + 32'($countones(l1_drop));
  end

  a_dispatch_ready: assert property (@(posedge clk) disable iff (!rst_n)
      (fstate == F_IDLE && !clear) |-> (l1_ready[0] ^ l1_ready[1]));
  a_no_input_in_flush: assert property (@(posedge clk) disable iff (!rst_n)
      (fstate != F_IDLE) |-> (in_valid == '0));
endmodule
