// tb_mem_ctrl: self-checking test of the memory controller front end.
//
// Four behavioural DRAM channels with random latency and random refusals are
// filled with random words. Eight sub-lists (two per channel, sizes including
// zero and sizes that end in a partly used word) are streamed at once while
// the decoding-unit side refuses codes at random; every unit must receive
// exactly its codes, in order, with ID index id_base + n, and done must rise
// only when all are delivered. Meanwhile ID-port reads to random channels and
// addresses are issued and must return the stored word. A second scan with
// every unit at full rate checks that a channel shared by two units keeps
// both supplied: the scan must take no more than 1.5x the cycles the shared
// channel needs for its words.
module tb_mem_ctrl;
  import chamvs_pkg::*;

  localparam int unsigned NPQ = 8;
  localparam int unsigned NCH = 4;
  localparam int unsigned M   = 16;
  localparam int unsigned VPW = MEM_W / (8 * M);
  localparam int unsigned DEP = 4096;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic                  start = 1'b0, done;
  seg_t                  seg [NPQ];
  logic [NPQ-1:0]        code_valid, code_ready;
  logic [M*8-1:0]        code_data [NPQ];
  logic [IDX_W-1:0]      code_idx  [NPQ];
  logic                  id_req_valid = 1'b0, id_req_ready, id_resp_valid;
  logic [$clog2(NCH)-1:0] id_req_ch = '0;
  logic [ADDR_W-1:0]     id_req_addr = '0;
  logic [MEM_W-1:0]      id_resp_data;
  logic [NCH-1:0]        ch_req_valid, ch_req_ready, ch_resp_valid;
  logic [ADDR_W-1:0]     ch_req_addr  [NCH];
  logic [MEM_W-1:0]      ch_resp_data [NCH];
  logic                  wr_en [NCH];
  logic [ADDR_W-1:0]     wr_addr;
  logic [MEM_W-1:0]      wr_data;

  mem_ctrl #(.NPQ(NPQ), .NCH(NCH), .M(M), .MW(MEM_W)) dut (.*);

  logic [MEM_W-1:0] img [NCH][DEP];

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

  int  recv [NPQ];
  int  bad  [NPQ];
  bit  random_ready = 1'b1;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  always @(negedge clk) code_ready = random_ready ? NPQ'($urandom) : '1;

  always @(posedge clk) if (rst_n) begin
    for (int u = 0; u < NPQ; u++) if (code_valid[u] && code_ready[u]) begin
      int c, n;
      logic [ADDR_W-1:0] w;
      logic [M*8-1:0] want;
      c = u / (NPQ / NCH);
      n = recv[u];
      w = seg[u].code_base + ADDR_W'(n / VPW);
      want = img[c][w % DEP][(n % VPW) * 8 * M +: 8 * M];
      if (code_data[u] != want || code_idx[u] != seg[u].id_base + IDX_W'(n)) bad[u]++;
      recv[u]++;
    end
  end

  task automatic scan(input int counts [NPQ]);
    for (int u = 0; u < NPQ; u++) begin
      seg[u].code_base = ADDR_W'(100 + 300 * (u % 2) + $urandom_range(0, 50));
      seg[u].id_base   = IDX_W'($urandom_range(0, 1 << 20));
      seg[u].count     = CNT_W'(counts[u]);
      recv[u] = 0; bad[u] = 0;
    end
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) begin
      @(posedge clk);
      if (done) begin
        for (int u = 0; u < NPQ; u++)
          check(recv[u] == counts[u], $sformatf("done with unit %0d at %0d of %0d", u, recv[u], counts[u]));
      end
      @(negedge clk);
    end
    for (int u = 0; u < NPQ; u++) begin
      check(recv[u] == counts[u], $sformatf("unit %0d received %0d of %0d", u, recv[u], counts[u]));
      check(bad[u] == 0, $sformatf("unit %0d: %0d wrong codes", u, bad[u]));
    end
  endtask

  int n_id = 0;
  bit filled = 1'b0;
  initial begin : id_port
    wait (filled);
    repeat (20) @(negedge clk);
    for (int i = 0; i < 40; i++) begin
      int c, a;
      c = $urandom_range(0, NCH - 1);
      a = $urandom_range(0, DEP - 1);
      @(negedge clk);
      id_req_valid = 1'b1; id_req_ch = ($clog2(NCH))'(c); id_req_addr = ADDR_W'(a);
      do @(posedge clk); while (!id_req_ready);
      @(negedge clk);
      id_req_valid = 1'b0;
      do @(posedge clk); while (!id_resp_valid);
      check(id_resp_data == img[c][a], $sformatf("ID read ch %0d addr %0d", c, a));
      n_id++;
    end
  end

  initial begin
    int cnt1 [NPQ] = '{37, 0, 64, 1, 129, 250, 3, 96};
    int cnt2 [NPQ] = '{400, 400, 400, 400, 400, 400, 400, 400};
    longint t0;
    for (int c = 0; c < NCH; c++) wr_en[c] = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // fill the channels
    for (int c = 0; c < NCH; c++)
      for (int a = 0; a < DEP; a++) begin
        @(negedge clk);
        for (int j = 0; j < MEM_W / 32; j++) img[c][a][j*32 +: 32] = $urandom;
        for (int cc = 0; cc < NCH; cc++) wr_en[cc] = (cc == c);
        wr_addr = ADDR_W'(a); wr_data = img[c][a];
      end
    @(negedge clk);
    for (int c = 0; c < NCH; c++) wr_en[c] = 1'b0;
    filled = 1'b1;

    scan(cnt1);
    random_ready = 1'b0;
    t0 = cyc;
    scan(cnt2);
    // 800 codes of a shared channel = 200 words; channel accepts ~75% of cycles
    check(cyc - t0 <= 3 * 200 / 2 * 4 / 3 + 60, $sformatf("full-rate scan took %0d cycles", cyc - t0));
    wait (n_id == 40);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
