// tb_ahpq: self-checking test of the approximate hierarchical priority queue.
//
// Eight producers each offer a random candidate every cycle (the PQ decoding
// units' full rate) for a few hundred cycles; after a flush the K results are
// read with random back-pressure. The reference is the exact K smallest of all
// candidates, computed here; with random distances no L1 queue holds more than
// 20 of the final 100, so the truncated queues must give the exact answer.
// Also checked: ascending order, out_last, the number of candidates dropped by
// full L1 queues (every offered candidate beyond 20 per queue), the flush time
// (about 4*NPQ*L1LEN + K cycles), a smaller k, a query with fewer candidates
// than k and a query with none (one empty record).
module tb_ahpq;
  import chamvs_pkg::*;

  localparam int unsigned NPQ = 8;
  localparam int unsigned L1  = 20;
  localparam int unsigned KQ  = 100;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic           clear = 1'b0, flush = 1'b0, out_ready = 1'b0;
  logic [NPQ-1:0] in_valid = '0;
  cand_t          in_cand [NPQ];
  logic [K_W-1:0] k = '0;
  logic           busy, out_valid, out_last;
  cand_t          out_cand;
  logic [31:0]    drops;

  ahpq #(.NPQ(NPQ), .L1LEN(L1), .KQ(KQ)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [DIST_W-1:0] all_d [$];
  longint cyc = 0;
  always @(posedge clk) cyc++;

  task automatic query(input int cycles_per_unit, input int kk);
    logic [DIST_W-1:0] sorted [$];
    logic [DIST_W-1:0] got [$];
    int n_last = 0;
    longint t_flush, t_first = -1;
    all_d.delete();
    @(negedge clk);
    clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
    for (int c = 0; c < cycles_per_unit; c++) begin
      for (int u = 0; u < NPQ; u++) begin
        in_cand[u].distance = DIST_W'($urandom_range(0, 1 << 24));
        in_cand[u].unit     = UNIT_W'(u);
        in_cand[u].id_idx   = IDX_W'(c);
        all_d.push_back(in_cand[u].distance);
      end
      in_valid = '1;
      @(negedge clk);
    end
    in_valid = '0;
    @(negedge clk);
    if (cycles_per_unit > 0)
      check(drops == 32'(cycles_per_unit * NPQ > 2 * NPQ * L1 ? cycles_per_unit * NPQ - 2 * NPQ * L1 : 0),
            $sformatf("drops %0d", drops));
    k = K_W'(kk);
    flush = 1'b1;
    t_flush = cyc;
    @(negedge clk);
    flush = 1'b0;
    while (1) begin
      out_ready = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (out_valid && t_first < 0) t_first = cyc;
      if (out_valid && out_ready) begin
        got.push_back(out_cand.distance);
        if (out_last) break;
      end
      @(negedge clk);
    end
    @(negedge clk);
    out_ready = 1'b0;
    all_d.sort();
    for (int i = 0; i < kk && i < all_d.size(); i++) sorted.push_back(all_d[i]);
    if (all_d.size() == 0) begin
      check(got.size() == 1 && got[0] == DIST_EMPTY, "empty query gives one empty record");
    end else begin
      check(got.size() == sorted.size(), $sformatf("got %0d results, want %0d", got.size(), sorted.size()));
      for (int i = 0; i < got.size() && i < sorted.size(); i++)
        check(got[i] == sorted[i], $sformatf("rank %0d: got %0d want %0d", i, got[i], sorted[i]));
    end
    check(t_first - t_flush <= 4 * NPQ * L1 + KQ + 10,
          $sformatf("flush took %0d cycles", t_first - t_flush));
    @(negedge clk);
    check(!busy, "idle after the last result");
  endtask

  initial begin
    for (int u = 0; u < NPQ; u++) in_cand[u] = CAND_EMPTY;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    query(400, 100);
    query(300, 10);
    query(1, 20);       // 8 candidates, k = 20: ends early
    query(0, 5);        // nothing scanned
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
