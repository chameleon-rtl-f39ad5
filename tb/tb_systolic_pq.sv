// tb_systolic_pq: self-checking test of the systolic priority queue.
//
// Offers random candidates at the queue's full rate (one every two cycles, on
// the cycles in_ready is high) and keeps, independently, the LEN smallest
// distances in a sorted reference list. After the stream it waits LEN cycles,
// drains the queue and checks that the elements leave in ascending order and
// equal the reference, with their tags. It also checks the rate (in_ready
// alternates every cycle), the number of drop pulses (inputs beyond LEN), a
// clear, and a second, shorter stream that leaves empty slots.
module tb_systolic_pq;
  import chamvs_pkg::*;

  localparam int unsigned LEN = 20;

  logic  clk = 1'b0, rst_n = 1'b0;
  logic  clear = 1'b0, in_valid = 1'b0, drain = 1'b0;
  logic  in_ready, drop;
  cand_t in_cand, out_cand, out_next;

  int checks = 0, failures = 0;
  int drops_seen = 0;

  always #5 clk = !clk;

  systolic_pq #(.LEN(LEN), .PHASE(1'b0)) dut (.*);

  always @(posedge clk) if (drop) drops_seen++;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  // reference: sorted ascending list of (distance, tag)
  logic [DIST_W-1:0] ref_d [$];
  logic [IDX_W-1:0]  ref_t [$];

  task automatic ref_insert(input logic [DIST_W-1:0] d, input logic [IDX_W-1:0] t);
    int pos = ref_d.size();
    for (int i = 0; i < ref_d.size(); i++) if (d < ref_d[i]) begin pos = i; break; end
    ref_d.insert(pos, d);
    ref_t.insert(pos, t);
    if (ref_d.size() > LEN) begin
      void'(ref_d.pop_back());
      void'(ref_t.pop_back());
    end
  endtask

  task automatic run_stream(input int n, input int seed_mod);
    int sent = 0;
    int ready_toggles = 0, cycles = 0;
    logic last_ready;
    ref_d.delete(); ref_t.delete();
    last_ready = in_ready;
    while (sent < n) begin
      @(negedge clk);
      cycles++;
      if (in_ready != last_ready) ready_toggles++;
      last_ready = in_ready;
      if (in_ready) begin
        logic [DIST_W-1:0] d;
        d = DIST_W'($urandom_range(0, 100000 * seed_mod));
        in_valid = 1'b1;
        in_cand.distance = d;
        in_cand.unit     = '0;
        in_cand.id_idx   = IDX_W'(sent);
        ref_insert(d, IDX_W'(sent));
        sent++;
      end else begin
        in_valid = 1'b0;
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    check(ready_toggles >= cycles - 2, $sformatf("in_ready must alternate (%0d toggles in %0d cycles)", ready_toggles, cycles));
    check(cycles <= 2 * n + 1, $sformatf("rate: %0d inputs took %0d cycles", n, cycles));
    repeat (LEN + 2) @(negedge clk);
    // drain and compare
    for (int i = 0; i < LEN; i++) begin
      if (i < ref_d.size()) begin
        // with all-equal distances only the distances are compared
        check(out_cand.distance == ref_d[i] && (seed_mod == 0 || out_cand.id_idx == ref_t[i]),
              $sformatf("drain %0d: got %0d/%0d want %0d/%0d", i, out_cand.distance,
                        out_cand.id_idx, ref_d[i], ref_t[i]));
      end else begin
        check(out_cand.distance == DIST_EMPTY, $sformatf("drain %0d: slot should be empty", i));
      end
      drain = 1'b1;
      @(negedge clk);
      drain = 1'b0;
    end
  endtask

  initial begin
    in_cand = CAND_EMPTY;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    drops_seen = 0;
    run_stream(300, 1);
    check(drops_seen == 300 - LEN, $sformatf("drops %0d, want %0d", drops_seen, 300 - LEN));

    // clear, then a stream shorter than the queue
    clear = 1'b1; @(negedge clk); clear = 1'b0;
    check(out_cand.distance == DIST_EMPTY, "clear empties the queue");
    drops_seen = 0;
    run_stream(LEN / 2, 1);
    check(drops_seen == 0, "no drops when the queue never fills");

    // many equal-ish values (ties)
    clear = 1'b1; @(negedge clk); clear = 1'b0;
    run_stream(100, 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
