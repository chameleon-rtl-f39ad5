// chamvs_accel: ChamVS near-memory vector-search accelerator of one
// disaggregated memory node.
//
// A query (query vector, the nprobe IVF list IDs chosen by the index scan, and
// K) arrives from the network. For each probed list in turn the accelerator
//   1. reads the list's directory entry (where each PQ decoding unit's share of
//      the list lies in DRAM),
//   2. builds the list's m x 256 distance lookup table and streams it down the
//      chain of PQ decoding units,
//   3. streams every unit's share of PQ codes from its DRAM channel through the
//      unit, which produces one approximate distance per cycle into its pair of
//      level-1 queues.
// After the last list the level-1 queues are emptied into the level-2 queue,
// the K best candidates leave it in ascending distance order, their 64-bit
// vector IDs are read from DRAM, and {qid, rank, distance, ID} records go back
// to the network. The structure (table construction, chained PQ decoding
// units, two truncated L1 queues per unit, one L2 queue, ID fetch, memory
// controller over several channels) follows the paper's accelerator diagram;
// the sequencing, the one-table-at-a-time schedule and all port protocols are
// this design's own.
//
// Ports (all valid/ready handshakes take data when both are high):
//   q_*      query in: qid, k (1..KQ), nprobe (1..NPROBE), vector (D signed
//            bytes, element d in bits [8d+7:8d]) and list IDs; q_ready is high
//            only while the accelerator is idle.
//   res_*    result records out (result_t), res.last on the query's last one.
//   cb_*, cc_*, dir_*  load ports for the PQ codebook, the coarse centroids
//            and the list directory, used by the host before queries run.
//   ch_*     one read port per DRAM channel (see mem_ctrl).
//   drops    candidates lost by full L1 queues during the current query.
// The TCP/IP stack that would sit on the query and result ports and the DDR4
// controllers behind the channel ports are outside this design.
//
// Lint notes: the K-selection busy flag is not needed by the controller, which
// waits for the last result instead. rst_n is both the asynchronous reset of
// the registers and the disable condition of the concurrent assertions, which
// simulation tools report as a net used both ways; it does not reach logic.
module chamvs_accel
  import chamvs_pkg::*;
#(
  parameter int unsigned M      = M_BYTES,
  parameter int unsigned DS     = DSUB,
  parameter int unsigned NL     = NLIST,
  parameter int unsigned NPROBE = NPROBE_MAX,
  parameter int unsigned KQ     = K_MAX,
  parameter int unsigned NPQ    = N_PQ,
  parameter int unsigned NCH    = N_CH,
  parameter int unsigned L1LEN  = L1_LEN
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // query input
  input  logic                    q_valid,
  output logic                    q_ready,
  input  logic [QID_W-1:0]        q_qid,
  input  logic [K_W-1:0]          q_k,
  input  logic [NPROBE_W-1:0]     q_nprobe,
  input  logic [M*DS*ELEM_W-1:0]  q_vec,
  input  logic [$clog2(NL)-1:0]   q_lists [NPROBE],
  // results
  output logic                    res_valid,
  input  logic                    res_ready,
  output result_t                 res,
  // host load ports
  input  logic                    cb_we,
  input  logic [$clog2(M)-1:0]    cb_sub,
  input  logic [7:0]              cb_code,
  input  logic [DS*ELEM_W-1:0]    cb_vec,
  input  logic                    cc_we,
  input  logic [$clog2(NL)-1:0]   cc_list,
  input  logic [M*DS*ELEM_W-1:0]  cc_vec,
  input  logic                    dir_we,
  input  logic [$clog2(NL)-1:0]   dir_list,
  input  logic [UNIT_W-1:0]       dir_unit,
  input  seg_t                    dir_seg,
  // DRAM channels
  output logic [NCH-1:0]          ch_req_valid,
  input  logic [NCH-1:0]          ch_req_ready,
  output logic [ADDR_W-1:0]       ch_req_addr  [NCH],
  input  logic [NCH-1:0]          ch_resp_valid,
  input  logic [MEM_W-1:0]        ch_resp_data [NCH],
  // status
  output logic [31:0]             drops
);
  localparam int unsigned SW = $clog2(M);
  localparam int unsigned LW = $clog2(NL);
  localparam int unsigned PW = $clog2(NPROBE) + 1;

  // ---------------- controller ----------------
  typedef enum logic [2:0] {
    C_IDLE, C_DIR, C_LUT, C_LUTW, C_CHAIN, C_SCAN, C_SCANW, C_SEL
  } cstate_e;
  cstate_e cst;

  logic [QID_W-1:0]       qid_r;
  logic [K_W-1:0]         k_r;
  logic [NPROBE_W-1:0]    nprobe_r;
  logic [M*DS*ELEM_W-1:0] vec_r;
  logic [LW-1:0]          lists_r [NPROBE];
  logic [PW-1:0]          p;
  logic [$clog2(NPQ+4)-1:0] wcnt;

  logic lut_start, lut_busy, lut_done;
  logic scan_start, scan_done;
  logic sel_clear, sel_flush, sel_busy;
  logic dir_rd;
  logic [NPQ-1:0] pq_busy;

  assign q_ready    = (cst == C_IDLE);
  assign dir_rd     = (cst == C_DIR);
  assign lut_start  = (cst == C_LUT);
  assign scan_start = (cst == C_SCAN);
  assign sel_clear  = q_valid && q_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cst       <= C_IDLE;
      qid_r     <= '0;
      k_r       <= '0;
      nprobe_r  <= '0;
      vec_r     <= '0;
      p         <= '0;
      wcnt      <= '0;
      sel_flush <= 1'b0;
      for (int i = 0; i < NPROBE; i++) lists_r[i] <= '0;
    end else begin
      sel_flush <= 1'b0;
      case (cst)
        C_IDLE: if (q_valid) begin
          qid_r    <= q_qid;
          k_r      <= q_k;
          nprobe_r <= q_nprobe;
          vec_r    <= q_vec;
          lists_r  <= q_lists;
          p        <= '0;
          cst      <= C_DIR;
        end
        C_DIR:  cst <= C_LUT;                // directory read in flight
        C_LUT:  cst <= C_LUTW;               // table construction started
        C_LUTW: if (lut_done) begin
          wcnt <= '0;
          cst  <= C_CHAIN;
        end
        C_CHAIN: begin                       // table reaches the last unit
          wcnt <= wcnt + 1'b1;
          if (wcnt == ($bits(wcnt))'(NPQ + 1)) cst <= C_SCAN;
        end
        C_SCAN: cst <= C_SCANW;
        C_SCANW: if (scan_done && pq_busy == '0) begin
          if (p + 1'b1 < PW'(nprobe_r)) begin
            p   <= p + 1'b1;
            cst <= C_DIR;
          end else begin
            sel_flush <= 1'b1;
            cst       <= C_SEL;
          end
        end
        C_SEL: if (res_valid && res_ready && res.last) cst <= C_IDLE;
        default: cst <= C_IDLE;
      endcase
    end
  end

  // ---------------- list directory ----------------
  seg_t segs [NPQ];

  ivf_list_dir #(.NL(NL), .NPU(NPQ)) u_dir (
    .clk,
    .wr_en   (dir_we),
    .wr_list (dir_list),
    .wr_unit (dir_unit),
    .wr_seg  (dir_seg),
    .rd_en   (dir_rd),
    .rd_list (lists_r[p[PW-2:0]]),
    .rd_seg  (segs)
  );

  // ---------------- lookup table construction ----------------
  logic           t_valid [NPQ+1];
  logic [SW-1:0]  t_sub   [NPQ+1];
  logic [7:0]     t_code  [NPQ+1];
  logic [DIST_W-1:0] t_val [NPQ+1];

  lut_construct #(.M(M), .DS(DS), .NL(NL)) u_lut (
    .clk, .rst_n,
    .cb_we, .cb_sub, .cb_code, .cb_vec,
    .cc_we, .cc_list, .cc_vec,
    .start     (lut_start),
    .query     (vec_r),
    .list_id   (lists_r[p[PW-2:0]]),
    .busy      (lut_busy),
    .done      (lut_done),
    .lut_valid (t_valid[0]),
    .lut_sub   (t_sub[0]),
    .lut_code  (t_code[0]),
    .lut_val   (t_val[0])
  );

  // ---------------- memory controller ----------------
  logic [NPQ-1:0]   c_valid, c_ready;
  logic [M*8-1:0]   c_data [NPQ];
  logic [IDX_W-1:0] c_idx  [NPQ];

  logic                   id_req_valid, id_req_ready, id_resp_valid;
  logic [$clog2(NCH)-1:0] id_req_ch;
  logic [ADDR_W-1:0]      id_req_addr;
  logic [MEM_W-1:0]       id_resp_data;

  mem_ctrl #(.NPQ(NPQ), .NCH(NCH), .M(M), .MW(MEM_W)) u_mem (
    .clk, .rst_n,
    .start        (scan_start),
    .seg          (segs),
    .done         (scan_done),
    .code_valid   (c_valid),
    .code_ready   (c_ready),
    .code_data    (c_data),
    .code_idx     (c_idx),
    .id_req_valid, .id_req_ready, .id_req_ch, .id_req_addr,
    .id_resp_valid, .id_resp_data,
    .ch_req_valid, .ch_req_ready, .ch_req_addr,
    .ch_resp_valid, .ch_resp_data
  );

  // ---------------- PQ decoding units ----------------
  logic [NPQ-1:0] d_valid;
  cand_t          d_cand [NPQ];

  for (genvar u = 0; u < NPQ; u++) begin : g_pq
    pq_decode #(.M(M), .UNIT(u)) u_pq (
      .clk, .rst_n,
      .tin_valid  (t_valid[u]),
      .tin_sub    (t_sub[u]),
      .tin_code   (t_code[u]),
      .tin_val    (t_val[u]),
      .tout_valid (t_valid[u+1]),
      .tout_sub   (t_sub[u+1]),
      .tout_code  (t_code[u+1]),
      .tout_val   (t_val[u+1]),
      .code_valid (c_valid[u]),
      .code_ready (c_ready[u]),
      .code_data  (c_data[u]),
      .code_idx   (c_idx[u]),
      .out_valid  (d_valid[u]),
      .out_cand   (d_cand[u]),
      .busy       (pq_busy[u])
    );
  end

  // ---------------- K-selection ----------------
  logic  s_valid, s_ready, s_last;
  cand_t s_cand;

  ahpq #(.NPQ(NPQ), .L1LEN(L1LEN), .KQ(KQ)) u_sel (
    .clk, .rst_n,
    .clear     (sel_clear),
    .in_valid  (d_valid),
    .in_cand   (d_cand),
    .flush     (sel_flush),
    .k         (k_r),
    .busy      (sel_busy),
    .out_valid (s_valid),
    .out_ready (s_ready),
    .out_cand  (s_cand),
    .out_last  (s_last),
    .drops     (drops)
  );

  // ---------------- result ID fetch ----------------
  result_fetch #(.NPQ(NPQ), .NCH(NCH), .MW(MEM_W)) u_fetch (
    .clk, .rst_n,
    .qid      (qid_r),
    .in_valid (s_valid),
    .in_ready (s_ready),
    .in_cand  (s_cand),
    .in_last  (s_last),
    .id_req_valid, .id_req_ready, .id_req_ch, .id_req_addr,
    .id_resp_valid, .id_resp_data,
    .res_valid, .res_ready, .res
  );

  a_lut_idle_when_started: assert property (@(posedge clk) disable iff (!rst_n)
      lut_start |-> !lut_busy);
  a_query_args: assert property (@(posedge clk) disable iff (!rst_n)
      (q_valid && q_ready) |-> (q_k != 0 && q_k <= K_W'(KQ) &&
                                q_nprobe != 0 && q_nprobe <= NPROBE_W'(NPROBE)));
endmodule
