// a3_top: attention accelerator with approximate candidate selection.
//
// Computes, for each query vector q (d elements) against a key matrix K and a
// value matrix V (n x d each, loaded beforehand):
//     out = sum_r softmax(K q)[r] * V[r]
// The work is split into four stages that each hold a different query:
//   CS   candidate_selection   greedy search over the sorted key columns,
//                              picks C candidate rows (approximate mode only)
//   DP   dot_product           K[r] . q for the candidates (all n rows in base
//                              mode), records the maximum
//   EX   exponent_unit         post-scoring selection (keeps K rows within t of
//                              the maximum) and exp(dp - max), sum of exponents
//   OC   output_computation    weight = score / sum, out += weight * V[r]
// Between stages sit two-bank register files (candidate list, dot products,
// scores), so a stage can fill the next query's entries while its successor
// reads the previous ones.
//
// Sequencing: all stages advance together. When every occupied stage has
// finished, each query moves one stage on, a new query (if any) enters from the
// query queue, and the finished output goes to the output queue. If the
// output queue is full the advance waits (stall). Base mode (cfg_approx = 0)
// skips CS, giving the three-stage base pipeline; the advance period is then
// the output stage's n + 9 cycles and the latency 3(n + 9). A change of
// cfg_approx takes effect once the stages in flight have drained; no new query
// is admitted until then. cfg_n, cfg_m and cfg_t must stay fixed while queries
// are in flight.
//
// Host side: key_*, val_* and skey_* write one row of the key matrix, value
// matrix and sorted key matrix (sorted per column, with original row IDs);
// q_* is a valid/ready query input, o_* a valid/ready output. The ev_* pulses
// report sequencer events for monitoring.
module a3_top
  import a3_pkg::*;
#(
  parameter int N       = N_ROWS,
  parameter int D       = D_DIM,
  parameter int Q_DEPTH = 4,
  localparam int RW  = $clog2(N),
  localparam int CW  = $clog2(N + 1),
  localparam int DPW = PROD_W + $clog2(D),
  localparam int ESW = SCORE_W + $clog2(N),
  localparam int OW  = 1 + I_BITS + $clog2(N) + 3 * F_BITS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // configuration
  input  logic                 cfg_approx,
  input  logic [CW-1:0]        cfg_n,
  input  logic [15:0]          cfg_m,
  input  logic [DPW:0]         cfg_t,
  // matrix loading
  input  logic                 key_wr_en,
  input  logic [RW-1:0]        key_wr_addr,
  input  elem_t                key_wr_row [D],
  input  logic                 val_wr_en,
  input  logic [RW-1:0]        val_wr_addr,
  input  elem_t                val_wr_row [D],
  input  logic                 skey_wr_en,
  input  logic [RW-1:0]        skey_wr_addr,
  input  elem_t                skey_wr_val [D],
  input  logic [RW-1:0]        skey_wr_rid [D],
  // queries in
  input  logic                 q_valid,
  output logic                 q_ready,
  input  elem_t                q_data [D],
  // outputs
  output logic                 o_valid,
  input  logic                 o_ready,
  output logic signed [OW-1:0] o_data [D],
  // events
  output logic                 ev_advance,
  output logic                 ev_stall,
  output logic                 ev_mode_switch,
  output logic                 ev_min_skip
);

  // ---- query queue ----------------------------------------------------------
  logic [D*DATA_W-1:0] qf_wdata, qf_rdata;
  logic                qf_empty, qf_full, qf_pop;
  logic [$clog2(Q_DEPTH+1)-1:0] qf_count;
  elem_t               qf_head [D];

  always_comb
    for (int j = 0; j < D; j++) begin
      qf_wdata[j*DATA_W +: DATA_W] = q_data[j];
      qf_head[j] = elem_t'(qf_rdata[j*DATA_W +: DATA_W]);
    end

  assign q_ready = !qf_full;

  sync_fifo #(.W(D*DATA_W), .DEPTH(Q_DEPTH)) u_qq (
    .clk, .rst_n, .wr_en(q_valid && !qf_full), .wr_data(qf_wdata),
    .rd_en(qf_pop), .rd_data(qf_rdata), .empty(qf_empty), .full(qf_full), .count(qf_count)
  );

  // ---- output queue -----------------------------------------------------------
  logic [D*OW-1:0]     of_wdata, of_rdata;
  logic                of_empty, of_full, of_push;
  logic [$clog2(Q_DEPTH+1)-1:0] of_count;
  logic signed [OW-1:0] oc_out [D];

  always_comb
    for (int j = 0; j < D; j++) begin
      of_wdata[j*OW +: OW] = oc_out[j];
      o_data[j] = of_rdata[j*OW +: OW];
    end

  assign o_valid = !of_empty;

  sync_fifo #(.W(D*OW), .DEPTH(Q_DEPTH)) u_oq (
    .clk, .rst_n, .wr_en(of_push), .wr_data(of_wdata),
    .rd_en(o_valid && o_ready), .rd_data(of_rdata), .empty(of_empty), .full(of_full), .count(of_count)
  );

  // ---- stage sequencer ------------------------------------------------------
  logic v_cs, v_dp, v_ex, v_oc;       // stage holds a query
  logic f_cs, f_dp, f_ex, f_oc;       // ... and has finished it
  logic d_cs, d_dp, d_ex, d_oc;       // done pulses
  logic mode;                          // 1: approximate
  logic phase;                         // register file bank written this period
  logic ok_cs, ok_dp, ok_ex, ok_oc, all_ok, empty_pipe, admit, go;
  logic n_cs, n_dp;                    // next occupancy of CS and DP

  assign ok_cs = !v_cs || f_cs || d_cs;
  assign ok_dp = !v_dp || f_dp || d_dp;
  assign ok_ex = !v_ex || f_ex || d_ex;
  assign ok_oc = !v_oc || f_oc || d_oc;
  assign all_ok     = ok_cs && ok_dp && ok_ex && ok_oc;
  assign empty_pipe = !v_cs && !v_dp && !v_ex && !v_oc;
  // a new query enters only in the current mode
  assign admit = !qf_empty && (mode == cfg_approx);
  assign go    = all_ok && (v_cs || v_dp || v_ex || v_oc || admit) && !(v_oc && of_full);

  assign n_cs   = mode && admit;
  assign n_dp   = mode ? v_cs : admit;
  assign qf_pop = go && admit;
  assign of_push = go && v_oc;

  assign ev_advance     = go;
  assign ev_stall       = all_ok && v_oc && of_full;
  assign ev_mode_switch = empty_pipe && (mode != cfg_approx);

  elem_t q_cs [D];
  always_ff @(posedge clk) begin
    if (go) q_cs <= qf_head;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_cs <= 1'b0; v_dp <= 1'b0; v_ex <= 1'b0; v_oc <= 1'b0;
      f_cs <= 1'b0; f_dp <= 1'b0; f_ex <= 1'b0; f_oc <= 1'b0;
      mode <= 1'b0; phase <= 1'b0;
    end else if (go) begin
      v_oc <= v_ex; v_ex <= v_dp; v_dp <= n_dp; v_cs <= n_cs;
      f_cs <= 1'b0; f_dp <= 1'b0; f_ex <= 1'b0; f_oc <= 1'b0;
      phase <= !phase;
    end else begin
      if (d_cs) f_cs <= 1'b1;
      if (d_dp) f_dp <= 1'b1;
      if (d_ex) f_ex <= 1'b1;
      if (d_oc) f_oc <= 1'b1;
      if (ev_mode_switch) mode <= cfg_approx;
    end
  end

  logic st_cs, st_dp, st_ex, st_oc;
  assign st_cs = go && n_cs;
  assign st_dp = go && n_dp;
  assign st_ex = go && v_dp;
  assign st_oc = go && v_ex;

  // ---- memories -------------------------------------------------------------
  logic          key_rd_en, val_rd_en;
  logic [RW-1:0] key_rd_addr, val_rd_addr;
  elem_t         key_row [D], val_row [D];

  matrix_sram #(.N(N), .D(D)) u_key (
    .clk, .wr_en(key_wr_en), .wr_addr(key_wr_addr), .wr_row(key_wr_row),
    .rd_en(key_rd_en), .rd_addr(key_rd_addr), .rd_row(key_row)
  );

  matrix_sram #(.N(N), .D(D)) u_val (
    .clk, .wr_en(val_wr_en), .wr_addr(val_wr_addr), .wr_row(val_wr_row),
    .rd_en(val_rd_en), .rd_addr(val_rd_addr), .rd_row(val_row)
  );

  logic [D-1:0]  sk_en_a, sk_en_b;
  logic [RW-1:0] sk_addr_a [D], sk_addr_b [D];
  elem_t         sk_val_a [D], sk_val_b [D];
  logic [RW-1:0] sk_rid_a [D], sk_rid_b [D];

  sorted_key_sram #(.N(N), .D(D)) u_skey (
    .clk, .wr_en(skey_wr_en), .wr_addr(skey_wr_addr), .wr_val(skey_wr_val), .wr_rid(skey_wr_rid),
    .rd_en_a(sk_en_a), .rd_addr_a(sk_addr_a), .rd_val_a(sk_val_a), .rd_rid_a(sk_rid_a),
    .rd_en_b(sk_en_b), .rd_addr_b(sk_addr_b), .rd_val_b(sk_val_b), .rd_rid_b(sk_rid_b)
  );

  // ---- CS: candidate selection ---------------------------------------------
  logic          cl_wr_en;
  logic [RW-1:0] cl_wr_addr, cl_wr_rid;
  logic [CW-1:0] cand_count;

  candidate_selection #(.N(N), .D(D)) u_cs (
    .clk, .rst_n, .start(st_cs), .query(qf_head), .n_rows(cfg_n), .m_iter(cfg_m),
    .rd_en_a(sk_en_a), .rd_addr_a(sk_addr_a), .rd_val_a(sk_val_a), .rd_rid_a(sk_rid_a),
    .rd_en_b(sk_en_b), .rd_addr_b(sk_addr_b), .rd_val_b(sk_val_b), .rd_rid_b(sk_rid_b),
    .cand_wr_en(cl_wr_en), .cand_wr_addr(cl_wr_addr), .cand_wr_rid(cl_wr_rid),
    .cand_count(cand_count), .done(d_cs), .min_skip(ev_min_skip)
  );

  logic [RW-1:0] cl_rd_addr [1], cl_rd_data [1];

  pingpong_regfile #(.W(RW), .DEPTH(N), .RP(1)) u_cand_list (
    .clk, .wr_bank(phase), .wr_en(cl_wr_en), .wr_addr(cl_wr_addr), .wr_data(cl_wr_rid),
    .rd_bank(!phase), .rd_addr(cl_rd_addr), .rd_data(cl_rd_data)
  );

  // ---- DP: dot product ------------------------------------------------------
  elem_t                 dp_query [D];
  logic                  dpf_wr_en;
  logic [RW-1:0]         dpf_wr_addr;
  logic [RW+DPW-1:0]     dpf_wr_data;
  logic signed [DPW-1:0] max_dp;
  logic [CW-1:0]         dp_count;

  always_comb
    for (int j = 0; j < D; j++) dp_query[j] = mode ? q_cs[j] : qf_head[j];

  dot_product #(.N(N), .D(D)) u_dp (
    .clk, .rst_n, .start(st_dp), .count(mode ? cand_count : cfg_n), .use_list(mode),
    .query(dp_query), .list_addr(cl_rd_addr[0]), .list_rid(cl_rd_data[0]),
    .key_rd_en, .key_rd_addr, .key_row,
    .dp_wr_en(dpf_wr_en), .dp_wr_addr(dpf_wr_addr), .dp_wr_data(dpf_wr_data),
    .max_dp, .out_count(dp_count), .done(d_dp)
  );

  logic [RW-1:0]     dpf_rd_addr [SCAN_W];
  logic [RW+DPW-1:0] dpf_rd_data [SCAN_W];

  pingpong_regfile #(.W(RW+DPW), .DEPTH(N), .RP(SCAN_W)) u_dp_file (
    .clk, .wr_bank(phase), .wr_en(dpf_wr_en), .wr_addr(dpf_wr_addr), .wr_data(dpf_wr_data),
    .rd_bank(!phase), .rd_addr(dpf_rd_addr), .rd_data(dpf_rd_data)
  );

  // ---- EX: post-scoring selection + exponent --------------------------------
  logic                  scf_wr_en;
  logic [RW-1:0]         scf_wr_addr;
  logic [RW+SCORE_W-1:0] scf_wr_data;
  logic [CW-1:0]         ex_count;
  logic [ESW-1:0]        expsum;

  exponent_unit #(.N(N), .D(D)) u_ex (
    .clk, .rst_n, .start(st_ex), .count(dp_count), .max_dp, .approx(mode), .threshold(cfg_t),
    .dp_rd_addr(dpf_rd_addr), .dp_rd_data(dpf_rd_data),
    .sc_wr_en(scf_wr_en), .sc_wr_addr(scf_wr_addr), .sc_wr_data(scf_wr_data),
    .out_count(ex_count), .expsum, .done(d_ex)
  );

  logic [RW-1:0]         scf_rd_addr [1];
  logic [RW+SCORE_W-1:0] scf_rd_data [1];

  pingpong_regfile #(.W(RW+SCORE_W), .DEPTH(N), .RP(1)) u_score_file (
    .clk, .wr_bank(phase), .wr_en(scf_wr_en), .wr_addr(scf_wr_addr), .wr_data(scf_wr_data),
    .rd_bank(!phase), .rd_addr(scf_rd_addr), .rd_data(scf_rd_data)
  );

  // ---- OC: output computation -----------------------------------------------
  output_computation #(.N(N), .D(D)) u_oc (
    .clk, .rst_n, .start(st_oc), .count(ex_count), .expsum,
    .sc_rd_addr(scf_rd_addr[0]), .sc_rd_data(scf_rd_data[0]),
    .val_rd_en, .val_rd_addr, .val_row,
    .outputs(oc_out), .done(d_oc)
  );

endmodule
