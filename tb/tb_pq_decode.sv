// tb_pq_decode: self-checking test of one PQ decoding unit.
//
// Loads a random m x 256 lookup table through the table input, checking that
// every entry is forwarded unchanged one cycle later on the table output. Then
// pushes random PQ codes at the full rate and checks each distance against the
// sum of table entries computed here, the tag and unit fields, the order, the
// rate (one distance per cycle once the pipeline is full) and the latency
// (2 + log2(m) cycles from code input to distance). A second pass with gaps
// and a second table checks that a reloaded table is used.
module tb_pq_decode;
  import chamvs_pkg::*;

  localparam int unsigned M    = 16;
  localparam int unsigned LV   = $clog2(M);
  localparam int unsigned UNIT = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic                 tin_valid = 1'b0, tout_valid;
  logic [LV-1:0]        tin_sub = '0, tout_sub;
  logic [7:0]           tin_code = '0, tout_code;
  logic [DIST_W-1:0]    tin_val = '0, tout_val;
  logic                 code_valid = 1'b0, code_ready;
  logic [M*8-1:0]       code_data = '0;
  logic [IDX_W-1:0]     code_idx = '0;
  logic                 out_valid, busy;
  cand_t                out_cand;

  pq_decode #(.M(M), .UNIT(UNIT)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [DIST_W-1:0] tbl [M][256];
  logic [DIST_W-1:0] exp_d [$];
  logic [IDX_W-1:0]  exp_t [$];
  longint            exp_c [$];
  longint            cyc = 0;
  int                got = 0;
  longint            first_out = -1, last_out = -1;

  always @(posedge clk) cyc++;

  // forwarded table entries
  logic fwd_ok = 1'b1;
  logic              p_v = 1'b0; logic [LV-1:0] p_s; logic [7:0] p_c; logic [DIST_W-1:0] p_d;
  always @(posedge clk) begin
    if (p_v && !(tout_valid && tout_sub == p_s && tout_code == p_c && tout_val == p_d)) fwd_ok = 1'b0;
    p_v <= tin_valid; p_s <= tin_sub; p_c <= tin_code; p_d <= tin_val;
  end

  // output checker
  always @(posedge clk) if (rst_n && out_valid) begin
    if (exp_d.size() == 0) begin
      check(1'b0, "unexpected output");
    end else begin
      logic [DIST_W-1:0] d;
      logic [IDX_W-1:0]  t;
      longint            c;
      d = exp_d.pop_front();
      t = exp_t.pop_front();
      c = exp_c.pop_front();
      check(out_cand.distance == d && out_cand.id_idx == t && out_cand.unit == UNIT_W'(UNIT),
            $sformatf("out %0d: got %0d/%0d want %0d/%0d", got, out_cand.distance, out_cand.id_idx, d, t));
      check(cyc - c == 2 + LV, $sformatf("latency %0d, want %0d", cyc - c, 2 + LV));
    end
    if (first_out < 0) first_out = cyc;
    last_out = cyc;
    got++;
  end

  task automatic load_table();
    for (int i = 0; i < M; i++)
      for (int c = 0; c < 256; c++) begin
        tbl[i][c] = DIST_W'($urandom_range(0, 1 << 20));
        @(negedge clk);
        tin_valid = 1'b1; tin_sub = LV'(i); tin_code = 8'(c); tin_val = tbl[i][c];
      end
    @(negedge clk);
    tin_valid = 1'b0;
    @(negedge clk);
  endtask

  task automatic push_codes(input int n, input bit gaps, input int base);
    for (int k = 0; k < n; k++) begin
      logic [DIST_W-1:0] s = '0;
      @(negedge clk);
      while (gaps && $urandom_range(0, 2) == 0) begin
        code_valid = 1'b0;
        @(negedge clk);
      end
      for (int i = 0; i < M; i++) begin
        code_data[i*8 +: 8] = 8'($urandom);
        s += tbl[i][code_data[i*8 +: 8]];
      end
      code_valid = 1'b1;
      code_idx   = IDX_W'(base + k);
      check(code_ready, "input FIFO never fills at full rate");
      exp_d.push_back(s);
      exp_t.push_back(IDX_W'(base + k));
      exp_c.push_back(cyc + 1);   // accepted at the coming edge
    end
    @(negedge clk);
    code_valid = 1'b0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load_table();
    check(fwd_ok, "table entries are forwarded one cycle later");

    got = 0; first_out = -1;
    push_codes(500, 1'b0, 0);
    repeat (LV + 6) @(negedge clk);
    check(got == 500, $sformatf("got %0d of 500 distances", got));
    check(last_out - first_out == 499, $sformatf("500 distances took %0d cycles", last_out - first_out + 1));
    check(!busy, "idle after the stream");

    load_table();
    got = 0;
    push_codes(200, 1'b1, 1000);
    repeat (LV + 6) @(negedge clk);
    check(got == 200, $sformatf("got %0d of 200 distances", got));
    check(exp_d.size() == 0, "all expected distances seen");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
