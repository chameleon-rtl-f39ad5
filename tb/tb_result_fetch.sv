// tb_result_fetch: self-checking test of the result-ID fetch stage.
//
// Feeds a list of candidates (random unit, random ID index) and answers the
// stage's ID reads from a model of the channels whose word w of channel c
// holds, in 64-bit lane j, the ID computed here as f(c, 8w + j). Checks that
// each read goes to the channel of the candidate's unit and the right word,
// that the output carries the right ID, distance, qid, rank and last flag, in
// order, under random back-pressure, and that an empty candidate passes
// through without a read.
module tb_result_fetch;
  import chamvs_pkg::*;

  localparam int unsigned NPQ = 8;
  localparam int unsigned NCH = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic [QID_W-1:0]       qid = 16'h00A5;
  logic                   in_valid = 1'b0, in_ready, in_last = 1'b0;
  cand_t                  in_cand;
  logic                   id_req_valid, id_req_ready = 1'b0;
  logic [$clog2(NCH)-1:0] id_req_ch;
  logic [ADDR_W-1:0]      id_req_addr;
  logic                   id_resp_valid = 1'b0;
  logic [MEM_W-1:0]       id_resp_data = '0;
  logic                   res_valid, res_ready = 1'b0;
  result_t                res;

  result_fetch #(.NPQ(NPQ), .NCH(NCH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [ID_W-1:0] id_of(input int c, input longint idx);
    return {32'(c * 1000 + 7), 32'(idx * 3 + 1)};
  endfunction

  int n_reads = 0;
  // channel model: answer a read 3..10 cycles later
  initial begin
    forever begin
      @(negedge clk);
      id_req_ready = ($urandom_range(0, 2) != 0);
      id_resp_valid = 1'b0;
      if (id_req_valid && id_req_ready) begin
        int c; longint w;
        c = int'(id_req_ch);
        w = longint'(id_req_addr);
        @(negedge clk);
        id_req_ready = 1'b0;
        repeat ($urandom_range(2, 9)) @(negedge clk);
        for (int j = 0; j < 8; j++) id_resp_data[j*64 +: 64] = id_of(c, 8 * w + j);
        id_resp_valid = 1'b1;
        n_reads++;
      end
    end
  end

  initial begin
    cand_t cl [$];
    cand_t e;
    int    got = 0;
    int    reads_before;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 30; i++) begin
      e.distance = DIST_W'(100 + 10 * i);
      e.unit     = UNIT_W'($urandom_range(0, NPQ - 1));
      e.id_idx   = IDX_W'($urandom_range(0, 1 << 24));
      cl.push_back(e);
    end
    cl.push_back(CAND_EMPTY);   // an empty record as the last one
    foreach (cl[i]) begin
      @(negedge clk);
      in_valid = 1'b1; in_cand = cl[i]; in_last = (i == cl.size() - 1);
      reads_before = n_reads;
      while (1) begin
        res_ready = ($urandom_range(0, 3) != 0);
        @(posedge clk);
        if (res_valid && res_ready) break;
        @(negedge clk);
      end
      if (cl[i].distance == DIST_EMPTY) begin
        check(res.id == '1 && n_reads == reads_before, "empty record passes without a read");
      end else begin
        check(res.id == id_of(int'(cl[i].unit) / (NPQ / NCH), longint'(cl[i].id_idx)),
              $sformatf("result %0d: id %h", i, res.id));
      end
      check(res.distance == cl[i].distance && res.qid == qid && res.rank == K_W'(i) &&
            res.last == (i == cl.size() - 1), $sformatf("result %0d fields", i));
      check(in_ready, "input taken with the result");
      got++;
      @(negedge clk);
      in_valid = 1'b0; res_ready = 1'b0;
    end
    check(got == cl.size(), "all results delivered");
    check(n_reads == cl.size() - 1, $sformatf("%0d ID reads", n_reads));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
