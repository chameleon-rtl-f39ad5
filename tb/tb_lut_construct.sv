// tb_lut_construct: self-checking test of the lookup table construction unit.
//
// Loads a random PQ codebook and random coarse centroids for a small number of
// IVF lists, then asks for the tables of two lists with random queries. Every
// streamed entry (sub-space, code, value) is compared with the squared L2
// distance between the query residual and the centroid computed here, and the
// stream must hold all m*256 entries once, one per cycle, finishing within
// m*256 + 6 cycles of the start pulse, with done on the last entry.
module tb_lut_construct;
  import chamvs_pkg::*;

  localparam int unsigned M  = 16;
  localparam int unsigned DS = 8;
  localparam int unsigned NL = 64;
  localparam int unsigned D  = M * DS;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic                   cb_we = 1'b0, cc_we = 1'b0, start = 1'b0;
  logic [$clog2(M)-1:0]   cb_sub = '0;
  logic [7:0]             cb_code = '0;
  logic [DS*8-1:0]        cb_vec = '0;
  logic [$clog2(NL)-1:0]  cc_list = '0, list_id = '0;
  logic [D*8-1:0]         cc_vec = '0, query = '0;
  logic                   busy, done, lut_valid;
  logic [$clog2(M)-1:0]   lut_sub;
  logic [7:0]             lut_code;
  logic [DIST_W-1:0]      lut_val;

  lut_construct #(.M(M), .DS(DS), .NL(NL)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic signed [7:0] cb [M][256][DS];
  logic signed [7:0] cc [NL][D];
  logic signed [7:0] q  [D];
  logic [DIST_W-1:0] expv [M][256];
  bit                seen [M][256];
  int                n_seen, n_bad, n_done;
  longint            cyc = 0, t_start, t_last;

  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n && lut_valid) begin
    if (seen[lut_sub][lut_code]) n_bad++;
    seen[lut_sub][lut_code] = 1'b1;
    if (lut_val != expv[lut_sub][lut_code]) begin
      n_bad++;
      if (n_bad < 5) $display("entry %0d/%0d: got %0d want %0d", lut_sub, lut_code, lut_val, expv[lut_sub][lut_code]);
    end
    n_seen++;
    t_last = cyc;
    if (done) n_done++;
  end

  task automatic run(input int l);
    for (int d = 0; d < D; d++) begin
      q[d] = 8'($urandom);
      query[d*8 +: 8] = q[d];
    end
    for (int i = 0; i < M; i++)
      for (int c = 0; c < 256; c++) begin
        int s = 0;
        for (int k = 0; k < DS; k++) begin
          int r = int'(q[i*DS+k]) - int'(cc[l][i*DS+k]) - int'(cb[i][c][k]);
          s += r * r;
        end
        expv[i][c] = DIST_W'(s);
        seen[i][c] = 1'b0;
      end
    n_seen = 0; n_bad = 0; n_done = 0;
    @(negedge clk);
    start = 1'b1; list_id = ($clog2(NL))'(l);
    t_start = cyc + 1;
    @(negedge clk);
    start = 1'b0;
    check(busy, "busy after start");
    wait (!busy);
    @(negedge clk);
    check(n_seen == M * 256, $sformatf("list %0d: %0d entries, want %0d", l, n_seen, M * 256));
    check(n_bad == 0, $sformatf("list %0d: %0d wrong or repeated entries", l, n_bad));
    check(n_done == 1, "done exactly once, with the last entry");
    check(t_last - t_start <= M * 256 + 6, $sformatf("table took %0d cycles", t_last - t_start));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // codebook
    for (int i = 0; i < M; i++)
      for (int c = 0; c < 256; c++) begin
        @(negedge clk);
        cb_we = 1'b1; cb_sub = ($clog2(M))'(i); cb_code = 8'(c);
        for (int k = 0; k < DS; k++) begin
          cb[i][c][k] = 8'($urandom);
          cb_vec[k*8 +: 8] = cb[i][c][k];
        end
      end
    @(negedge clk);
    cb_we = 1'b0;
    // coarse centroids
    for (int l = 0; l < NL; l++) begin
      @(negedge clk);
      cc_we = 1'b1; cc_list = ($clog2(NL))'(l);
      for (int d = 0; d < D; d++) begin
        cc[l][d] = 8'($urandom);
        cc_vec[d*8 +: 8] = cc[l][d];
      end
    end
    @(negedge clk);
    cc_we = 1'b0;

    run(5);
    run(NL - 1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
