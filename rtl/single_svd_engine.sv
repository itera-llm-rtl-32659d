// single_svd_engine: one spatial MatMul array reused in time for both factors
// of an SVD-decomposed linear layer, Y = (X W1) W2, or for a dense Y = X W.
//
// Loop order (per M tile of MT rows, as in the paper's tiling listing):
//   1. LOAD   the MT x K tile of X arrives on the x stream, row by row, each
//             row as ceil(K/KF) beats of KF activations, into one bank of the
//             two-bank LHS buffer. A separate loader does this while the
//             array computes the previous M tile from the other bank; a bank
//             is refilled once its tile has finished pass 2.
//   2. PASS 1 (svd_en=1) for each of ceil(R/NT) tiles of W1, ceil(K/KF)
//             weight beats (NT x KF weights each) stream through the RHS FIFOs
//             while the LHS bank is read at the same beat index; each
//             finished MT x NT tile goes through the output buffer into the
//             intermediate buffer, requantised to A_W bits (>>> rq_shift,
//             round, saturate).
//   3. COPY   the MT x R intermediate tile is written back into the LHS bank
//             just computed from, ceil(R/KF) cycles, all rows at once (the
//             feedback path of the Single engine figure).
//   4. PASS 2 for each of ceil(N/NT) tiles of W2, ceil(R/KF) beats; finished
//             tiles leave through the output buffer on the y stream.
//   With svd_en=0 step 2 and 3 are skipped and pass 2 uses W and ceil(K/KF)
//   beats: the dense MatMul engine the SVD engines are built from.
//
// Streams (valid/ready): x carries KF activations per beat; w carries NT x KF
// weights per beat (W1 tiles then W2 tiles, once per M tile, zero-padded by
// the sender past K, R or N); y carries one row of NT 32-bit results per beat,
// rows 0..rows-1 of each tile, tiles in N order, M tiles in order; columns
// past N are padding. The array runs one beat per cycle while weights are
// available; it is frozen (stall) only while a finished tile is waiting for
// the output buffer. start is taken in IDLE; done pulses for one cycle at the
// end. Timing, with free streams: a tile's computation (passes, copy and a
// pipeline tail of rows+4 cycles per pass) starts one cycle after both its
// load (rows*ceil(K/KF) cycles) and the previous computation have ended; in a
// pass the first array tile takes its beats and each later one max(beats,
// rows+1), the drain of the previous tile through the one-row output.
// The dataflow, tiling and buffers follow the paper, and overlapping the load
// with computing follows its latency model (the maximum of the port terms);
// stream formats, the two LHS banks, requantisation, the freeze-style stall
// and the x port width of KF activations per cycle are this design's choices.
module single_svd_engine
  import itera_pkg::*;
#(
  parameter int unsigned MT    = MT_DEF,
  parameter int unsigned NT    = NT_DEF,
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
  input  logic                    w_valid,
  output logic                    w_ready,
  input  logic [NT*KF*W_W-1:0]    w_data,
  output logic                    y_valid,
  input  logic                    y_ready,
  output logic signed [ACC_W-1:0] y_data [NT],
  output logic                    stall      // array frozen this cycle
);
  localparam int unsigned LDEPTH = (((KMAX > RMAX) ? KMAX : RMAX) + KF - 1) / KF;
  localparam int unsigned RDEPTH = (RMAX + KF - 1) / KF;
  localparam int unsigned FDEPTH = (KMAX + KF - 1) / KF;
  localparam int unsigned LAW    = $clog2(LDEPTH);
  localparam int unsigned RW     = $clog2(MT + 1);
  localparam int unsigned TAG_W  = DIM_W;

  typedef enum logic [2:0] {S_IDLE, S_WAIT, S_PASS1, S_COPY, S_PASS2, S_DONE} state_e;

  state_e            state_q;
  layer_cfg_t        cfg_q;
  logic [DIM_W-1:0]  kb_n, rb_n, rtiles_n, ntiles_n;  // beats and tile counts
  logic [DIM_W-1:0]  row_base_q;                     // first row of the M tile computed
  logic [RW-1:0]     rows_q;                         // valid rows of the M tile computed
  logic              cb_q;                           // LHS bank computed from
  // loader: fills bank ld_bank_q with the M tile starting at row ld_base_q
  logic              ld_active_q, ld_bank_q;
  logic [DIM_W-1:0]  ld_base_q;
  logic [RW-1:0]     ld_row_q, ld_rows_c;
  logic [DIM_W-1:0]  ld_beat_q;
  logic              bank_full_q [2];
  logic [RW-1:0]     bank_rows_q [2];
  logic [DIM_W-1:0]  beat_q, tile_q, cap_cnt_q;
  logic [DIM_W-1:0]  copy_q;
  logic [DIM_W-1:0]  beats_c, tiles_c;
  logic              to_inter_c;

  // ---------------- datapath -------------------------------------------------
  logic                    en;
  logic                    issue;
  logic [KF*A_W-1:0]       lhs_rd [MT];
  logic [KF*A_W-1:0]       inter_rd [MT];
  logic [KF*W_W-1:0]       rhs_head [NT];
  logic                    rhs_valid;
  logic                    arr_valid;
  logic signed [ACC_W-1:0] arr_data [MT][NT];
  logic                    ob_ready, ob_row_valid, ob_row_ready;
  logic signed [ACC_W-1:0] ob_row [NT];
  logic [$clog2(MT)-1:0]   ob_row_idx;
  logic [TAG_W-1:0]        ob_tag;
  logic [A_W-1:0]          rq_row [NT];
  logic                    ld_we;

  assign ld_we = x_valid && x_ready;

  lhs_buffer #(.MT(MT), .KF(KF), .A_W(A_W), .DEPTH(LDEPTH), .NBANK(2)) u_lhs (
    .clk,
    .wr_en(ld_we),
    .wr_bank(ld_bank_q),
    .wr_row(ld_row_q[$clog2(MT)-1:0]),
    .wr_addr(LAW'(ld_beat_q)),
    .wr_data(x_data),
    .col_wr_en(state_q == S_COPY),
    .col_wr_bank(cb_q),
    .col_wr_addr(LAW'(copy_q)),
    .col_wr_data(inter_rd),
    .rd_bank(cb_q),
    .rd_addr(LAW'(beat_q)),
    .rd_data(lhs_rd)
  );

  rhs_buffer #(.NT(NT), .KF(KF), .W_W(W_W), .DEPTH(FDEPTH)) u_rhs (
    .clk, .rst_n,
    .in_valid(w_valid), .in_ready(w_ready), .in_data(w_data),
    .out_valid(rhs_valid), .out_pop(issue), .out_data(rhs_head)
  );

  pe_array #(.MT(MT), .NT(NT), .KF(KF), .A_W(A_W), .W_W(W_W), .ACC_W(ACC_W)) u_array (
    .clk, .rst_n, .en,
    .in_valid(issue),
    .in_first(beat_q == '0),
    .in_last(beat_q == beats_c - 1'b1),
    .lhs(lhs_rd), .rhs(rhs_head),
    .out_valid(arr_valid), .out_data(arr_data)
  );

  output_buffer #(.MT(MT), .NT(NT), .ACC_W(ACC_W), .TAG_W(TAG_W)) u_obuf (
    .clk, .rst_n,
    .cap_valid(arr_valid), .cap_ready(ob_ready), .cap_data(arr_data),
    .cap_rows(rows_q), .cap_tag(cap_cnt_q),
    .row_valid(ob_row_valid), .row_ready(ob_row_ready), .row_data(ob_row),
    .row_idx(ob_row_idx), .row_tag(ob_tag)
  );

  always_comb begin
    for (int j = 0; j < NT; j++) rq_row[j] = A_W'(requant(32'(ob_row[j]), cfg_q.rq_shift, A_W));
  end

  intermediate_buffer #(.NBANK(1), .MT(MT), .WNT(NT), .KF(KF), .A_W(A_W), .RMAX(RMAX)) u_inter (
    .clk,
    .wr_en(ob_row_valid && to_inter_c),
    .wr_bank(1'b0),
    .wr_row(ob_row_idx),
    .wr_col0(DIM_W'(ob_tag * NT)),
    .wr_data(rq_row),
    .rd_bank(1'b0),
    .rd_addr($clog2(RDEPTH)'(copy_q)),
    .rd_data(inter_rd)
  );

  // the array freezes while a finished tile cannot enter the output buffer
  assign en    = !(arr_valid && !ob_ready);
  assign stall = !en;
  assign issue = en && rhs_valid && tile_q < tiles_c &&
                 (state_q == S_PASS1 || state_q == S_PASS2);

  assign to_inter_c   = (state_q == S_PASS1);
  assign ob_row_ready = to_inter_c || y_ready;
  assign y_valid      = ob_row_valid && !to_inter_c;
  assign y_data       = ob_row;

  // ---------------- control --------------------------------------------------
  assign kb_n     = DIM_W'(cdiv(32'(cfg_q.k), KF));
  assign rb_n     = DIM_W'(cdiv(32'(cfg_q.r), KF));
  assign rtiles_n = DIM_W'(cdiv(32'(cfg_q.r), NT));
  assign ntiles_n = DIM_W'(cdiv(32'(cfg_q.n), NT));

  always_comb begin
    if (state_q == S_PASS1) begin
      beats_c = kb_n;  tiles_c = rtiles_n;
    end else begin
      beats_c = cfg_q.svd_en ? rb_n : kb_n;  tiles_c = ntiles_n;
    end
  end

  assign x_ready = ld_active_q && !bank_full_q[ld_bank_q];
  assign busy    = (state_q != S_IDLE);

  // a pass is over when every tile was issued, captured and drained
  logic pass_done;
  assign pass_done = (tile_q == tiles_c) && (cap_cnt_q == tiles_c) &&
                     !arr_valid && !ob_row_valid;

  function automatic logic [RW-1:0] rows_left(input logic [DIM_W-1:0] m,
                                              input logic [DIM_W-1:0] base);
    return ((m - base) > DIM_W'(MT)) ? RW'(MT) : RW'(m - base);
  endfunction

  assign ld_rows_c = rows_left(cfg_q.m, ld_base_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S_IDLE;
      cfg_q       <= '0;
      row_base_q  <= '0;
      rows_q      <= '0;
      cb_q        <= 1'b0;
      ld_active_q <= 1'b0;
      ld_bank_q   <= 1'b0;
      ld_base_q   <= '0;
      ld_row_q    <= '0;
      ld_beat_q   <= '0;
      bank_full_q <= '{default: 1'b0};
      bank_rows_q <= '{default: '0};
      beat_q      <= '0;
      tile_q      <= '0;
      cap_cnt_q   <= '0;
      copy_q      <= '0;
      done        <= 1'b0;
    end else begin
      done <= 1'b0;

      // loader: one X beat per accepted stream beat into the free bank
      if (ld_we) begin
        if (ld_beat_q == kb_n - 1'b1) begin
          ld_beat_q <= '0;
          ld_row_q  <= ld_row_q + 1'b1;
          if (ld_row_q == ld_rows_c - 1'b1) begin
            ld_row_q               <= '0;
            bank_full_q[ld_bank_q] <= 1'b1;
            bank_rows_q[ld_bank_q] <= ld_rows_c;
            ld_bank_q              <= !ld_bank_q;
            ld_base_q              <= ld_base_q + DIM_W'(MT);
            if (ld_base_q + DIM_W'(MT) >= cfg_q.m) ld_active_q <= 1'b0;
          end
        end else begin
          ld_beat_q <= ld_beat_q + 1'b1;
        end
      end

      // compute
      if (arr_valid && ob_ready) cap_cnt_q <= cap_cnt_q + 1'b1;
      if (issue) begin
        if (beat_q == beats_c - 1'b1) begin
          beat_q <= '0;
          tile_q <= tile_q + 1'b1;
        end else begin
          beat_q <= beat_q + 1'b1;
        end
      end
      unique case (state_q)
        S_IDLE: if (start) begin
          cfg_q       <= cfg;
          row_base_q  <= '0;
          cb_q        <= 1'b0;
          ld_active_q <= (cfg.m != '0);
          ld_bank_q   <= 1'b0;
          ld_base_q   <= '0;
          ld_row_q    <= '0;
          ld_beat_q   <= '0;
          bank_full_q <= '{default: 1'b0};
          state_q     <= (cfg.m == '0) ? S_DONE : S_WAIT;
        end
        S_WAIT: if (bank_full_q[cb_q]) begin
          rows_q    <= bank_rows_q[cb_q];
          state_q   <= cfg_q.svd_en ? S_PASS1 : S_PASS2;
          beat_q    <= '0;
          tile_q    <= '0;
          cap_cnt_q <= '0;
        end
        S_PASS1: if (pass_done) begin
          state_q <= S_COPY;
          copy_q  <= '0;
        end
        S_COPY: begin
          copy_q <= copy_q + 1'b1;
          if (copy_q == rb_n - 1'b1) begin
            state_q   <= S_PASS2;
            beat_q    <= '0;
            tile_q    <= '0;
            cap_cnt_q <= '0;
          end
        end
        S_PASS2: if (pass_done) begin
          bank_full_q[cb_q] <= 1'b0;
          cb_q              <= !cb_q;
          if (row_base_q + DIM_W'(MT) >= cfg_q.m) begin
            state_q <= S_DONE;
          end else begin
            row_base_q <= row_base_q + DIM_W'(MT);
            state_q    <= S_WAIT;
          end
        end
        S_DONE: begin
          done    <= 1'b1;
          state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  a_k_fits: assert property (@(posedge clk) disable iff (!rst_n)
                             (state_q == S_IDLE && start) |-> (32'(cfg.k) <= KMAX && 32'(cfg.k) > 0));
  a_r_fits: assert property (@(posedge clk) disable iff (!rst_n)
                             (state_q == S_IDLE && start && cfg.svd_en) |-> (32'(cfg.r) <= RMAX && 32'(cfg.r) > 0));
  a_y_stable: assert property (@(posedge clk) disable iff (!rst_n)
                               (y_valid && !y_ready) |=> y_valid);

endmodule
