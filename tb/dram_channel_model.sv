// dram_channel_model: behavioural model of one DRAM channel as seen through
// its controller, for testbenches only (not synthesizable logic of the design).
//
// Read requests (req_valid/req_ready/req_addr, one 512-bit word each) are
// accepted on random cycles (about STALL_PCT percent of cycles refuse), and
// each is answered in order, after a random latency of MIN_LAT..MAX_LAT
// cycles, with one cycle of resp_valid and the word. The storage is DEPTH
// words and is filled by the testbench through the wr_* port; addresses wrap
// modulo DEPTH. The seed parameter decorrelates the channels.
module dram_channel_model #(
  parameter int unsigned MW        = 512,
  parameter int unsigned AW        = 32,
  parameter int unsigned DEPTH     = 4096,
  parameter int unsigned MIN_LAT   = 4,
  parameter int unsigned MAX_LAT   = 20,
  parameter int unsigned STALL_PCT = 25
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req_valid,
  output logic          req_ready,
  input  logic [AW-1:0] req_addr,
  output logic          resp_valid,
  output logic [MW-1:0] resp_data,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [MW-1:0] wr_data
);
  logic [MW-1:0] mem [DEPTH];
  longint        cyc = 0;
  longint        due_q  [$];
  logic [AW-1:0] addr_q [$];
  longint        last_due = 0;
  int unsigned   accepted = 0;

  always @(posedge clk) begin
    if (wr_en) mem[wr_addr % DEPTH] <= wr_data;
  end

  initial begin
    req_ready  = 1'b0;
    resp_valid = 1'b0;
    resp_data  = '0;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst_n) begin
      due_q.delete();
      addr_q.delete();
      resp_valid <= 1'b0;
      req_ready  <= 1'b0;
    end else begin
      if (req_valid && req_ready) begin
        longint due;
        due = cyc + longint'($urandom_range(MIN_LAT, MAX_LAT));
        if (due <= last_due) due = last_due + 1;
        last_due = due;
        due_q.push_back(due);
        addr_q.push_back(req_addr);
        accepted++;
      end
      if (due_q.size() != 0 && due_q[0] <= cyc) begin
        resp_valid <= 1'b1;
        resp_data  <= mem[addr_q[0] % DEPTH];
        void'(due_q.pop_front());
        void'(addr_q.pop_front());
      end else begin
        resp_valid <= 1'b0;
      end
      req_ready <= ($urandom_range(0, 99) >= STALL_PCT);
    end
  end
endmodule
