// tb_chamvs_accel: end-to-end self-checking test of the accelerator at its
// default (full) size: m = 16, D = 128, 32768 IVF lists, nprobe up to 32,
// K up to 100, 8 PQ decoding units, 4 DRAM channels.
//
// The host side loads a random PQ codebook, coarse centroids for the lists
// that are used, and a directory whose per-unit sub-lists have random sizes
// (including empty ones and ones that end in a partly used 512-bit word). Four
// behavioural DRAM channels hold the PQ codes and the 64-bit vector IDs, and
// refuse requests and answer late at random. The checker computes every
// distance exactly (residual, table, sum of m table entries) and compares the
// returned records with the exact K nearest: same distances in ascending
// order, every returned ID belongs to a scanned vector at exactly that
// distance and appears once, ranks, qid and the last flag. The result port is
// back-pressured at random.
//
// Queries: several lists with K = 100, several with K = 10, one list holding
// fewer than K vectors (early end), a list with no vectors at all (one empty
// record), the full nprobe = 32 with K = 100, and the highest list number.
// Mechanism counters, each of which must be non-zero at the end: L1 queue
// overflow (drops), DRAM request stalls, result back-pressure, multi-list
// queries, partial final words, early end, empty result, the last list index.
module tb_chamvs_accel;
  import chamvs_pkg::*;

  localparam int unsigned M    = M_BYTES;
  localparam int unsigned DS   = DSUB;
  localparam int unsigned D    = M * DS;
  localparam int unsigned NL   = NLIST;
  localparam int unsigned NPB  = NPROBE_MAX;
  localparam int unsigned NPQ  = N_PQ;
  localparam int unsigned NCH  = N_CH;
  localparam int unsigned UPC  = NPQ / NCH;
  localparam int unsigned VPW  = MEM_W / (8 * M);
  localparam int unsigned LPW  = MEM_W / ID_W;
  localparam int unsigned DEP  = 4096;
  localparam int unsigned NUSE = 40;          // lists given contents
  localparam int unsigned MAXC = 48;          // largest sub-list size
  localparam int unsigned LW   = $clog2(NL);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  // ---------------- DUT ----------------
  logic                   q_valid = 1'b0, q_ready;
  logic [QID_W-1:0]       q_qid = '0;
  logic [K_W-1:0]         q_k = '0;
  logic [NPROBE_W-1:0]    q_nprobe = '0;
  logic [D*ELEM_W-1:0]    q_vec = '0;
  logic [LW-1:0]          q_lists [NPB];
  logic                   res_valid, res_ready;
  result_t                res;
  logic                   cb_we = 1'b0;
  logic [$clog2(M)-1:0]   cb_sub = '0;
  logic [7:0]             cb_code = '0;
  logic [DS*ELEM_W-1:0]   cb_vec = '0;
  logic                   cc_we = 1'b0;
  logic [LW-1:0]          cc_list = '0;
  logic [D*ELEM_W-1:0]    cc_vec = '0;
  logic                   dir_we = 1'b0;
  logic [LW-1:0]          dir_list = '0;
  logic [UNIT_W-1:0]      dir_unit = '0;
  seg_t                   dir_seg = '0;
  logic [NCH-1:0]         ch_req_valid, ch_req_ready, ch_resp_valid;
  logic [ADDR_W-1:0]      ch_req_addr  [NCH];
  logic [MEM_W-1:0]       ch_resp_data [NCH];
  logic [31:0]            drops;

  chamvs_accel dut (.*);

  logic                   wr_en [NCH];
  logic [ADDR_W-1:0]      wr_addr = '0;
  logic [MEM_W-1:0]       wr_data = '0;

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    dram_channel_model #(.DEPTH(DEP)) u_ch (
      .clk, .rst_n,
      .req_valid (ch_req_valid[c]), .req_ready (ch_req_ready[c]), .req_addr (ch_req_addr[c]),
      .resp_valid (ch_resp_valid[c]), .resp_data (ch_resp_data[c]),
      .wr_en (wr_en[c]), .wr_addr, .wr_data
    );
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------- reference data ----------------
  byte               cb   [M][256][DS];
  byte               cc   [NUSE][D];
  int                lid  [NUSE];            // list number of used list i
  int                cnt  [NUSE][NPQ];
  int                cbase[NUSE][NPQ];
  longint            ibase[NUSE][NPQ];
  logic [MEM_W-1:0]  img  [NCH][DEP];

  function automatic logic [M*8-1:0] code_of(int i, int u, int n);
    int c = u / UPC;
    int w = cbase[i][u] + n / VPW;
    return img[c][w][(n % VPW) * 8 * M +: 8 * M];
  endfunction

  function automatic logic [ID_W-1:0] id_of(int i, int u, int n);
    int     c = u / UPC;
    longint x = ibase[i][u] + n;
    return img[c][x / LPW][(x % LPW) * ID_W +: ID_W];
  endfunction

  // ---------------- mechanism counters ----------------
  int n_stall = 0, n_bp = 0, n_drop_q = 0, n_multi = 0, n_partial = 0;
  int n_early = 0, n_empty = 0, n_lastlist = 0;

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NCH; c++) if (ch_req_valid[c] && !ch_req_ready[c]) n_stall++;
    if (res_valid && !res_ready) n_bp++;
  end

  always @(negedge clk) res_ready = ($urandom_range(0, 3) != 0);

  // ---------------- one query ----------------
  task automatic run_query(input int qid, input int k, input int sel [$]);
    byte   qv [D];
    int    lut [M][256];
    longint dist_of_id [logic [ID_W-1:0]];
    int    seen [logic [ID_W-1:0]];
    int    alld [$];
    int    got_d [$];
    logic [ID_W-1:0] got_id [$];
    int    total = 0, want_n;
    bit    partial = 1'b0;

    for (int d = 0; d < D; d++) qv[d] = byte'($urandom);
    // exact reference
    foreach (sel[j]) begin
      int i = sel[j];
      for (int s = 0; s < M; s++)
        for (int c = 0; c < 256; c++) begin
          int acc = 0;
          for (int e = 0; e < DS; e++) begin
            int df = int'(qv[s*DS+e]) - int'(cc[i][s*DS+e]) - int'(cb[s][c][e]);
            acc += df * df;
          end
          lut[s][c] = acc;
        end
      for (int u = 0; u < NPQ; u++) begin
        if (cnt[i][u] % VPW != 0) partial = 1'b1;
        for (int n = 0; n < cnt[i][u]; n++) begin
          logic [M*8-1:0] code = code_of(i, u, n);
          int dd = 0;
          for (int s = 0; s < M; s++) dd += lut[s][code[s*8 +: 8]];
          dist_of_id[id_of(i, u, n)] = dd;
          alld.push_back(dd);
          total++;
        end
      end
      if (lid[i] == NL - 1) n_lastlist++;
    end
    alld.sort();

    // issue
    @(negedge clk);
    while (!q_ready) @(negedge clk);
    q_valid = 1'b1; q_qid = QID_W'(qid); q_k = K_W'(k); q_nprobe = NPROBE_W'(sel.size());
    for (int d = 0; d < D; d++) q_vec[d*ELEM_W +: ELEM_W] = qv[d];
    for (int j = 0; j < NPB; j++) q_lists[j] = LW'(lid[sel[j % sel.size()]]);
    @(negedge clk);
    q_valid = 1'b0;

    // collect
    while (1) begin
      @(posedge clk);
      if (res_valid && res_ready) begin
        check(res.qid == QID_W'(qid) && res.rank == K_W'(got_d.size()),
              $sformatf("q%0d: qid/rank %0d/%0d at %0d", qid, res.qid, res.rank, got_d.size()));
        got_d.push_back(int'(res.distance));
        got_id.push_back(res.id);
        if (res.last) break;
      end
    end

    want_n = (total < k) ? total : k;
    if (total == 0) begin
      check(got_d.size() == 1 && res.distance == DIST_EMPTY && res.id == '1,
            $sformatf("q%0d: empty query gives one empty record", qid));
      n_empty++;
    end else begin
      check(got_d.size() == want_n, $sformatf("q%0d: %0d results, want %0d", qid, got_d.size(), want_n));
      for (int r = 0; r < got_d.size() && r < want_n; r++) begin
        check(got_d[r] == alld[r], $sformatf("q%0d rank %0d: dist %0d want %0d", qid, r, got_d[r], alld[r]));
        check(dist_of_id.exists(got_id[r]) && dist_of_id[got_id[r]] == longint'(got_d[r]) &&
              !seen.exists(got_id[r]), $sformatf("q%0d rank %0d: id %h", qid, r, got_id[r]));
        seen[got_id[r]] = 1;
      end
      if (total < k) n_early++;
    end
    if (sel.size() > 1) n_multi++;
    if (partial) n_partial++;
    if (drops != 0) n_drop_q++;
    $display("query %0d: %0d lists, k %0d, %0d scanned, %0d results, %0d dropped in L1",
             qid, sel.size(), k, total, got_d.size(), drops);
  endtask

  // ---------------- stimulus ----------------
  initial begin
    int cptr [NCH];
    longint iptr [NCH];
    int sel [$];
    for (int c = 0; c < NCH; c++) wr_en[c] = 1'b0;
    for (int j = 0; j < NPB; j++) q_lists[j] = '0;

    // random model contents
    for (int s = 0; s < M; s++) for (int c = 0; c < 256; c++) for (int e = 0; e < DS; e++)
      cb[s][c][e] = byte'($urandom);
    for (int c = 0; c < NCH; c++) begin
      for (int a = 0; a < DEP; a++)
        for (int j = 0; j < MEM_W / 32; j++) img[c][a][j*32 +: 32] = $urandom;
      cptr[c] = 0;
      iptr[c] = longint'(DEP / 2) * LPW + $urandom_range(0, 7);
    end
    for (int i = 0; i < NUSE; i++) begin
      bit dup;
      do begin
        lid[i] = (i == 0) ? NL - 1 : $urandom_range(0, NL - 1);
        dup = 1'b0;
        for (int j = 0; j < i; j++) if (lid[j] == lid[i]) dup = 1'b1;
      end while (dup);
      for (int d = 0; d < D; d++) cc[i][d] = byte'($urandom);
      for (int u = 0; u < NPQ; u++) begin
        int c;
        c = u / UPC;
        cnt[i][u]   = (i == 1) ? 0 : (i == 2) ? $urandom_range(0, 9) : $urandom_range(0, MAXC);
        cbase[i][u] = cptr[c];
        ibase[i][u] = iptr[c];
        cptr[c]    += (cnt[i][u] + VPW - 1) / VPW;
        iptr[c]    += cnt[i][u];
      end
    end
    // unique IDs: overwrite the ID region with distinct values
    for (int i = 0; i < NUSE; i++) for (int u = 0; u < NPQ; u++) for (int n = 0; n < cnt[i][u]; n++) begin
      int     c;
      longint x;
      c = u / UPC;
      x = ibase[i][u] + n;
      img[c][x / LPW][(x % LPW) * ID_W +: ID_W] = {16'hC0DE, 16'(lid[i]), 8'(u), 8'(n), 16'($urandom)};
    end

    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // host loads: DRAM, codebook, coarse centroids, directory
    for (int a = 0; a < DEP; a++)
      for (int c = 0; c < NCH; c++) begin
        @(negedge clk);
        for (int cc2 = 0; cc2 < NCH; cc2++) wr_en[cc2] = (cc2 == c);
        wr_addr = ADDR_W'(a); wr_data = img[c][a];
      end
    @(negedge clk);
    for (int c = 0; c < NCH; c++) wr_en[c] = 1'b0;
    for (int s = 0; s < M; s++) for (int c = 0; c < 256; c++) begin
      cb_we = 1'b1; cb_sub = ($clog2(M))'(s); cb_code = 8'(c);
      for (int e = 0; e < DS; e++) cb_vec[e*ELEM_W +: ELEM_W] = cb[s][c][e];
      @(negedge clk);
    end
    cb_we = 1'b0;
    for (int i = 0; i < NUSE; i++) begin
      cc_we = 1'b1; cc_list = LW'(lid[i]);
      for (int d = 0; d < D; d++) cc_vec[d*ELEM_W +: ELEM_W] = cc[i][d];
      @(negedge clk);
      cc_we = 1'b0;
      for (int u = 0; u < NPQ; u++) begin
        dir_we = 1'b1; dir_list = LW'(lid[i]); dir_unit = UNIT_W'(u);
        dir_seg.code_base = ADDR_W'(cbase[i][u]);
        dir_seg.id_base   = IDX_W'(ibase[i][u]);
        dir_seg.count     = CNT_W'(cnt[i][u]);
        @(negedge clk);
      end
      dir_we = 1'b0;
    end

    // queries
    sel = '{0, 3, 4, 5};                        run_query(1, 100, sel);
    sel = '{6, 7, 8, 9, 10, 11, 12, 13};        run_query(2, 10, sel);
    sel = '{2};                                 run_query(3, 100, sel);
    sel = '{1};                                 run_query(4, 5, sel);
    sel.delete();
    for (int i = 3; i < 3 + NPB; i++) sel.push_back(i);
    run_query(5, 100, sel);
    sel = '{14, 15};                            run_query(6, 1, sel);

    check(n_drop_q   > 0, "L1 queue overflow (drops) happened");
    check(n_stall    > 0, "DRAM request stalls happened");
    check(n_bp       > 0, "result back-pressure happened");
    check(n_multi    > 0, "multi-list queries ran");
    check(n_partial  > 0, "partial final words were scanned");
    check(n_early    > 0, "a query ended with fewer than K results");
    check(n_empty    > 0, "a query with no candidates ran");
    check(n_lastlist > 0, "the highest list number was probed");
    $display("mechanisms: drop-queries %0d stalls %0d backpressure %0d multi %0d partial %0d early %0d empty %0d lastlist %0d",
             n_drop_q, n_stall, n_bp, n_multi, n_partial, n_early, n_empty, n_lastlist);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
