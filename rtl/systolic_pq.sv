// systolic_pq: systolic priority queue keeping the LEN smallest candidates.
//
// A register array r[0..LEN-1] with a compare-swap unit between each pair of
// neighbours, so its cost grows linearly with LEN, as in the paper's primitive.
// The array is kept in descending order of distance: r[0] holds the largest
// kept distance, r[LEN-1] the smallest. Empty slots hold DIST_EMPTY and so sit
// at the head end.
//
// Operation alternates between two phases (odd-even transposition):
//   phase 0: pairs (0,1), (2,3), ... compare and swap so the larger goes left;
//   phase 1: pairs (1,2), (3,4), ... do the same, and a new input may be taken:
//            if it is smaller than r[0] it replaces r[0] (the old r[0], the
//            largest kept value, is discarded) and then sinks one place per
//            cycle to its position.
// Hence the queue takes one input every two cycles (in_ready is high on phase
// 1 only), which is the paper's rate. Because an inserted value only moves
// away from the head, r[0] is the true maximum whenever a new input arrives.
// PHASE sets the phase after reset, so two queues with PHASE 0 and 1 accept on
// alternate cycles and together take one candidate per cycle.
//
// After LEN cycles without input the array is fully sorted. drain shifts the
// array one place towards the tail per cycle: out_cand (= r[LEN-1]) is the
// element leaving (out_next is the one behind it), the head refills with empty
// slots; compare-swaps pause while draining. clear empties the queue in one cycle. drop pulses when a valid
// candidate is lost because the queue is full, which for a truncated level-1
// queue is the approximation of the paper's AHPQ.
module systolic_pq
  import chamvs_pkg::*;
#(
  parameter int unsigned LEN   = L1_LEN,
  parameter bit          PHASE = 1'b0
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clear,
  input  logic   in_valid,
  output logic   in_ready,
  input  cand_t  in_cand,
  input  logic   drain,
  output cand_t  out_cand,
  output cand_t  out_next,
  output logic   drop
);
  cand_t r [LEN];
  logic  ph;
  logic  take;

  assign in_ready = ph && !drain && !clear;
  assign take     = in_valid && in_ready && (in_cand.distance < r[0].distance);
  assign drop     = in_valid && in_ready && (in_cand.distance != DIST_EMPTY)
                    && (r[0].distance != DIST_EMPTY);
  assign out_cand = r[LEN-1];
  assign out_next = (LEN > 1) ? r[(LEN > 1) ? LEN-2 : 0] : CAND_EMPTY;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph <= PHASE;
      for (int i = 0; i < LEN; i++) r[i] <= CAND_EMPTY;
    end else begin
      ph <= !ph;
      if (clear) begin
        for (int i = 0; i < LEN; i++) r[i] <= CAND_EMPTY;
      end else if (drain) begin
        r[0] <= CAND_EMPTY;
        for (int i = 1; i < LEN; i++) r[i] <= r[i-1];
      end else begin
        for (int i = 0; i + 1 < LEN; i++) begin
          if (((i % 2) == 1) == ph && r[i].distance < r[i+1].distance) begin
            r[i]   <= r[i+1];
            r[i+1] <= r[i];
          end
        end
        if (take) r[0] <= in_cand;
      end
    end
  end

  // an input offered on the wrong phase would be ignored: the feeder must wait
  a_input_on_phase: assert property (@(posedge clk) disable iff (!rst_n)
                                     (in_valid && !drain && !clear) |-> ph);
endmodule
