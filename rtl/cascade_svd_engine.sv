// cascade_svd_engine: two spatial MatMul arrays in cascade for an
// SVD-decomposed linear layer Y = (X W1) W2.
//
// Array A (MT x RT PEs) computes X*W1 and array B (MT x NT PEs) computes
// (X*W1)*W2; both share the M tiling factor MT, and each has its own column
// factor (RT for the R dimension of W1, NT for the N dimension of W2), as in
// the paper's Cascade engine. The MT x R tile of X*W1 lives in the
// intermediate buffer between the arrays.
//
// Front end (array A), per M tile: load the MT x K tile of X from the x stream
// into the LHS buffer (rows of ceil(K/KF) beats), wait until the intermediate
// bank it will fill is free, then for each of ceil(R/RT) W1 tiles stream
// ceil(K/KF) beats of RT x KF weights from the w1 stream; finished tiles are
// requantised to A_W bits (>>> rq_shift, round, saturate) and written into the
// bank. The bank is then handed to the back end and the front end moves on to
// the next M tile.
// Back end (array B), per M tile: wait for a full bank, then for each of
// ceil(N/NT) W2 tiles stream ceil(R/KF) beats of NT x KF weights from the w2
// stream while the bank is read at the same beat index; finished tiles leave
// on the y stream (one row of NT 32-bit results per beat, as in the Single
// engine). Then the bank is freed.
// The two banks (ping-pong) let array A work on M tile i+1 while array B works
// on tile i, so the two products run in parallel; the paper states that the
// multiplications run in parallel but not how the intermediate tile is shared,
// so the double bank is this design's choice. Each array is frozen only while
// its finished tile cannot enter its output buffer. cfg.svd_en is ignored: the
// engine always computes the two-factor product. start is taken only when both
// ends are idle (busy=0); done pulses one cycle after the last y row leaves.
module cascade_svd_engine
  import itera_pkg::*;
#(
  parameter int unsigned MT    = MT_DEF,
  parameter int unsigned RT    = 14,
  parameter int unsigned NT    = 14,
  parameter int unsigned KF    = KF_DEF,
  parameter int unsigned A_W   = A_W_DEF,
  parameter int unsigned W_W   = W_W_DEF,
  parameter int unsigned ACC_W = ACC_W_DEF,
  parameter int unsigned KMAX  = KMAX_DEF,
  parameter int unsigned RMAX  = RMAX_DEF
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  layer_cfg_t              cfg,
  output logic                    busy,
  output logic                    done,
  input  logic                    x_valid,
  output logic                    x_ready,
  input  logic [KF*A_W-1:0]       x_data,
  input  logic                    w1_valid,
  output logic                    w1_ready,
  input  logic [RT*KF*W_W-1:0]    w1_data,
  input  logic                    w2_valid,
  output logic                    w2_ready,
  input  logic [NT*KF*W_W-1:0]    w2_data,
  output logic                    y_valid,
  input  logic                    y_ready,
  output logic signed [ACC_W-1:0] y_data [NT],
  output logic                    stall_a,   // array A frozen this cycle
  output logic                    stall_b    // array B frozen this cycle
);
  localparam int unsigned KDEPTH = (KMAX + KF - 1) / KF;
  localparam int unsigned RDEPTH = (RMAX + KF - 1) / KF;
  localparam int unsigned RW     = $clog2(MT + 1);

  typedef enum logic [1:0] {A_IDLE, A_LOAD, A_WAIT, A_PASS} a_state_e;
  typedef enum logic [1:0] {B_IDLE, B_WAIT, B_PASS} b_state_e;

  a_state_e         a_state_q;
  b_state_e         b_state_q;
  layer_cfg_t       cfg_q;
  logic [DIM_W-1:0] kb_n, rb_n, rtiles_n, ntiles_n, mtiles_n;

  // front end
  logic [DIM_W-1:0] a_base_q;
  logic [RW-1:0]    a_rows_q, ld_row_q;
  logic [DIM_W-1:0] ld_beat_q, a_beat_q, a_tile_q, a_cap_q;
  logic             wb_q;
  // back end
  logic [DIM_W-1:0] b_beat_q, b_tile_q, b_cap_q, b_mdone_q;
  logic             rb_q;
  // bank hand-over
  logic             bank_full_q [2];
  logic [RW-1:0]    bank_rows_q [2];

  // ---------------- front-end datapath ---------------------------------------
  logic                    en_a, issue_a, rhs_a_valid, arr_a_valid;
  logic [KF*A_W-1:0]       lhs_rd [MT];
  logic [KF*A_W-1:0]       unused_col [MT];
  logic [KF*W_W-1:0]       rhs_a [RT];
  logic signed [ACC_W-1:0] arr_a [MT][RT];
  logic                    ob_a_ready, ob_a_row_valid;
  logic signed [ACC_W-1:0] ob_a_row [RT];
  logic [$clog2(MT)-1:0]   ob_a_idx;
  logic [DIM_W-1:0]        ob_a_tag;
  logic [A_W-1:0]          rq_row [RT];

  always_comb for (int i = 0; i < MT; i++) unused_col[i] = '0;

  lhs_buffer #(.MT(MT), .KF(KF), .A_W(A_W), .DEPTH(KDEPTH), .NBANK(1)) u_lhs (
    .clk,
    .wr_en(a_state_q == A_LOAD && x_valid),
    .wr_bank(1'b0),
    .wr_row(ld_row_q[$clog2(MT)-1:0]),
    .wr_addr($clog2(KDEPTH)'(ld_beat_q)),
    .wr_data(x_data),
    .col_wr_en(1'b0), .col_wr_bank(1'b0), .col_wr_addr('0), .col_wr_data(unused_col),
    .rd_bank(1'b0),
    .rd_addr($clog2(KDEPTH)'(a_beat_q)),
    .rd_data(lhs_rd)
  );

  rhs_buffer #(.NT(RT), .KF(KF), .W_W(W_W), .DEPTH(KDEPTH)) u_rhs_a (
    .clk, .rst_n,
    .in_valid(w1_valid), .in_ready(w1_ready), .in_data(w1_data),
    .out_valid(rhs_a_valid), .out_pop(issue_a), .out_data(rhs_a)
  );

  pe_array #(.MT(MT), .NT(RT), .KF(KF), .A_W(A_W), .W_W(W_W), .ACC_W(ACC_W)) u_array_a (
    .clk, .rst_n, .en(en_a),
    .in_valid(issue_a),
    .in_first(a_beat_q == '0),
    .in_last(a_beat_q == kb_n - 1'b1),
    .lhs(lhs_rd), .rhs(rhs_a),
    .out_valid(arr_a_valid), .out_data(arr_a)
  );

  output_buffer #(.MT(MT), .NT(RT), .ACC_W(ACC_W), .TAG_W(DIM_W)) u_obuf_a (
    .clk, .rst_n,
    .cap_valid(arr_a_valid), .cap_ready(ob_a_ready), .cap_data(arr_a),
    .cap_rows(a_rows_q), .cap_tag(a_cap_q),
    .row_valid(ob_a_row_valid), .row_ready(1'b1), .row_data(ob_a_row),
    .row_idx(ob_a_idx), .row_tag(ob_a_tag)
  );

  always_comb begin
    for (int j = 0; j < RT; j++) rq_row[j] = A_W'(requant(32'(ob_a_row[j]), cfg_q.rq_shift, A_W));
  end

  // ---------------- intermediate buffer (two banks) ------------------------
  logic [KF*A_W-1:0] inter_rd [MT];

  intermediate_buffer #(.NBANK(2), .MT(MT), .WNT(RT), .KF(KF), .A_W(A_W), .RMAX(RMAX)) u_inter (
    .clk,
    .wr_en(ob_a_row_valid),
    .wr_bank(wb_q),
    .wr_row(ob_a_idx),
    .wr_col0(DIM_W'(ob_a_tag * RT)),
    .wr_data(rq_row),
    .rd_bank(rb_q),
    .rd_addr($clog2(RDEPTH)'(b_beat_q)),
    .rd_data(inter_rd)
  );

  // ---------------- back-end datapath ----------------------------------------
  logic                    en_b, issue_b, rhs_b_valid, arr_b_valid;
  logic [KF*W_W-1:0]       rhs_b [NT];
  logic signed [ACC_W-1:0] arr_b [MT][NT];
  logic                    ob_b_ready;
  logic [$clog2(MT)-1:0]   ob_b_idx;
  logic [DIM_W-1:0]        ob_b_tag;

  rhs_buffer #(.NT(NT), .KF(KF), .W_W(W_W), .DEPTH(RDEPTH)) u_rhs_b (
    .clk, .rst_n,
    .in_valid(w2_valid), .in_ready(w2_ready), .in_data(w2_data),
    .out_valid(rhs_b_valid), .out_pop(issue_b), .out_data(rhs_b)
  );

  pe_array #(.MT(MT), .NT(NT), .KF(KF), .A_W(A_W), .W_W(W_W), .ACC_W(ACC_W)) u_array_b (
    .clk, .rst_n, .en(en_b),
    .in_valid(issue_b),
    .in_first(b_beat_q == '0),
    .in_last(b_beat_q == rb_n - 1'b1),
    .lhs(inter_rd), .rhs(rhs_b),
    .out_valid(arr_b_valid), .out_data(arr_b)
  );

  output_buffer #(.MT(MT), .NT(NT), .ACC_W(ACC_W), .TAG_W(DIM_W)) u_obuf_b (
    .clk, .rst_n,
    .cap_valid(arr_b_valid), .cap_ready(ob_b_ready), .cap_data(arr_b),
    .cap_rows(bank_rows_q[rb_q]), .cap_tag(b_cap_q),
    .row_valid(y_valid), .row_ready(y_ready), .row_data(y_data),
    .row_idx(ob_b_idx), .row_tag(ob_b_tag)
  );

  // ---------------- control --------------------------------------------------
  assign kb_n     = DIM_W'(cdiv(32'(cfg_q.k), KF));
  assign rb_n     = DIM_W'(cdiv(32'(cfg_q.r), KF));
  assign rtiles_n = DIM_W'(cdiv(32'(cfg_q.r), RT));
  assign ntiles_n = DIM_W'(cdiv(32'(cfg_q.n), NT));
  assign mtiles_n = DIM_W'(cdiv(32'(cfg_q.m), MT));

  assign en_a    = !(arr_a_valid && !ob_a_ready);
  assign en_b    = !(arr_b_valid && !ob_b_ready);
  assign stall_a = !en_a;
  assign stall_b = !en_b;
  assign issue_a = (a_state_q == A_PASS) && en_a && rhs_a_valid && a_tile_q < rtiles_n;
  assign issue_b = (b_state_q == B_PASS) && en_b && rhs_b_valid && b_tile_q < ntiles_n;
  assign x_ready = (a_state_q == A_LOAD);
  logic idle;
  assign idle    = (a_state_q == A_IDLE) && (b_state_q == B_IDLE);
  assign busy    = !idle;

  logic a_pass_done, b_pass_done;
  assign a_pass_done = (a_tile_q == rtiles_n) && (a_cap_q == rtiles_n) &&
                       !arr_a_valid && !ob_a_row_valid;
  assign b_pass_done = (b_tile_q == ntiles_n) && (b_cap_q == ntiles_n) &&
                       !arr_b_valid && !y_valid;

  function automatic logic [RW-1:0] rows_left(input logic [DIM_W-1:0] m,
                                              input logic [DIM_W-1:0] base);
    return ((m - base) > DIM_W'(MT)) ? RW'(MT) : RW'(m - base);
  endfunction

  // front end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_state_q <= A_IDLE;
      cfg_q     <= '0;
      a_base_q  <= '0;
      a_rows_q  <= '0;
      ld_row_q  <= '0;
      ld_beat_q <= '0;
      a_beat_q  <= '0;
      a_tile_q  <= '0;
      a_cap_q   <= '0;
      wb_q      <= 1'b0;
    end else begin
      if (arr_a_valid && ob_a_ready) a_cap_q <= a_cap_q + 1'b1;
      if (issue_a) begin
        if (a_beat_q == kb_n - 1'b1) begin
          a_beat_q <= '0;
          a_tile_q <= a_tile_q + 1'b1;
        end else begin
          a_beat_q <= a_beat_q + 1'b1;
        end
      end
      unique case (a_state_q)
        A_IDLE: if (start && idle && cfg.m != '0) begin
          cfg_q     <= cfg;
          a_base_q  <= '0;
          a_rows_q  <= rows_left(cfg.m, '0);
          ld_row_q  <= '0;
          ld_beat_q <= '0;
          wb_q      <= 1'b0;
          a_state_q <= A_LOAD;
        end
        A_LOAD: if (x_valid) begin
          if (ld_beat_q == kb_n - 1'b1) begin
            ld_beat_q <= '0;
            ld_row_q  <= ld_row_q + 1'b1;
            if (ld_row_q == a_rows_q - 1'b1) a_state_q <= A_WAIT;
          end else begin
            ld_beat_q <= ld_beat_q + 1'b1;
          end
        end
        A_WAIT: if (!bank_full_q[wb_q]) begin
          a_state_q <= A_PASS;
          a_beat_q  <= '0;
          a_tile_q  <= '0;
          a_cap_q   <= '0;
        end
        A_PASS: if (a_pass_done) begin
          wb_q      <= !wb_q;
          ld_row_q  <= '0;
          ld_beat_q <= '0;
          if (a_base_q + DIM_W'(MT) >= cfg_q.m) begin
            a_state_q <= A_IDLE;
          end else begin
            a_base_q  <= a_base_q + DIM_W'(MT);
            a_rows_q  <= rows_left(cfg_q.m, a_base_q + DIM_W'(MT));
            a_state_q <= A_LOAD;
          end
        end
        default: a_state_q <= A_IDLE;
      endcase
    end
  end

  // bank hand-over: set by the front end, cleared by the back end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < 2; b++) begin
        bank_full_q[b] <= 1'b0;
        bank_rows_q[b] <= '0;
      end
    end else begin
      for (int b = 0; b < 2; b++) begin
        if (a_state_q == A_PASS && a_pass_done && wb_q == 1'(b)) begin
          bank_full_q[b] <= 1'b1;
          bank_rows_q[b] <= a_rows_q;
        end else if (b_state_q == B_PASS && b_pass_done && rb_q == 1'(b)) begin
          bank_full_q[b] <= 1'b0;
        end
      end
    end
  end

  // back end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_state_q <= B_IDLE;
      b_beat_q  <= '0;
      b_tile_q  <= '0;
      b_cap_q   <= '0;
      b_mdone_q <= '0;
      rb_q      <= 1'b0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (arr_b_valid && ob_b_ready) b_cap_q <= b_cap_q + 1'b1;
      if (issue_b) begin
        if (b_beat_q == rb_n - 1'b1) begin
          b_beat_q <= '0;
          b_tile_q <= b_tile_q + 1'b1;
        end else begin
          b_beat_q <= b_beat_q + 1'b1;
        end
      end
      unique case (b_state_q)
        B_IDLE: if (start && idle) begin
          b_mdone_q <= '0;
          rb_q      <= 1'b0;
          if (cfg.m == '0) done <= 1'b1;
          else             b_state_q <= B_WAIT;
        end
        B_WAIT: if (bank_full_q[rb_q]) begin
          b_state_q <= B_PASS;
          b_beat_q  <= '0;
          b_tile_q  <= '0;
          b_cap_q   <= '0;
        end
        B_PASS: if (b_pass_done) begin
          rb_q      <= !rb_q;
          b_mdone_q <= b_mdone_q + 1'b1;
          if (b_mdone_q + 1'b1 == mtiles_n) begin
            b_state_q <= B_IDLE;
            done      <= 1'b1;
          end else begin
            b_state_q <= B_WAIT;
          end
        end
        default: b_state_q <= B_IDLE;
      endcase
    end
  end

  a_k_fits: assert property (@(posedge clk) disable iff (!rst_n)
                             (a_state_q == A_IDLE && start) |-> (32'(cfg.k) <= KMAX && 32'(cfg.k) > 0));
  a_r_fits: assert property (@(posedge clk) disable iff (!rst_n)
                             (a_state_q == A_IDLE && start) |-> (32'(cfg.r) <= RMAX && 32'(cfg.r) > 0));
  a_y_stable: assert property (@(posedge clk) disable iff (!rst_n)
                               (y_valid && !y_ready) |=> y_valid);

endmodule
