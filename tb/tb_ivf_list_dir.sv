// tb_ivf_list_dir: self-checking test of the IVF list directory.
//
// Writes random sub-list descriptors for every (list, unit) pair of a small
// directory, in random order, then reads every list back and checks all units'
// descriptors one cycle after the read, including after overwriting some
// entries.
module tb_ivf_list_dir;
  import chamvs_pkg::*;

  localparam int unsigned NL  = 64;
  localparam int unsigned NPU = 8;

  logic clk = 1'b0;
  always #5 clk = !clk;

  logic                  wr_en = 1'b0, rd_en = 1'b0;
  logic [$clog2(NL)-1:0] wr_list = '0, rd_list = '0;
  logic [UNIT_W-1:0]     wr_unit = '0;
  seg_t                  wr_seg = '0;
  seg_t                  rd_seg [NPU];

  ivf_list_dir #(.NL(NL), .NPU(NPU)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  seg_t img [NL][NPU];

  task automatic write(input int l, input int u);
    img[l][u].code_base = ADDR_W'($urandom);
    img[l][u].id_base   = {3'($urandom), 32'($urandom)};
    img[l][u].count     = CNT_W'($urandom);
    @(negedge clk);
    wr_en = 1'b1; wr_list = ($clog2(NL))'(l); wr_unit = UNIT_W'(u); wr_seg = img[l][u];
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  task automatic read_all();
    for (int l = 0; l < NL; l++) begin
      @(negedge clk);
      rd_en = 1'b1; rd_list = ($clog2(NL))'(l);
      @(negedge clk);
      rd_en = 1'b0;
      for (int u = 0; u < NPU; u++)
        check(rd_seg[u] == img[l][u], $sformatf("list %0d unit %0d", l, u));
    end
  endtask

  initial begin
    for (int i = 0; i < NL * NPU; i++) write(i % NL, (i * 5) % NPU);
    for (int l = 0; l < NL; l++) for (int u = 0; u < NPU; u++) write(l, u);
    read_all();
    for (int i = 0; i < 50; i++) write($urandom_range(0, NL - 1), $urandom_range(0, NPU - 1));
    read_all();
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
