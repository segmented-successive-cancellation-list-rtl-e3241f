// tca_scl_decoder: full-module, single-frame segmented SCL polar decoder with
// a tailored CRC per segment (TCA-SCL).
//
// The N code positions are cut into P equal segments. Inside a segment the
// decoder runs successive-cancellation list decoding with L paths. The
// segment's information set carries its own CRC, whose length was chosen per
// segment (3/10/11/8 bits for the (1024,512) code). At the segment's last
// position every path is extended with both bit values and the 2L
// candidates are checked against that CRC. The best passing candidate becomes
// the single path the next segment starts from. If none passes, decoding of
// the frame stops at once (early termination) and a failure is reported.
//
// Blocks: mn_array (stages of mixed nodes with their LLR registers),
// list_core (L best of 2L), usum (partial sums), path_memory (decided bits),
// crc_bank (CRC_1..CRC_P, comparator). The update port of the per-path state
// is fed by a two-way multiplexer: input 0 carries the list core's decision,
// input 1 the comparator's survivor at a segment end. The controller below
// is this design's own.
//
// Schedule: one tree stage per clock. Leaf 0 needs stages 1..n, leaf i > 0
// needs stages n-tz(i)..n (tz = trailing zeros), and the leaf decision is
// taken in the same cycle as stage n, so the LLR work of a frame takes 2N-2
// cycles. Each of the first P-1 segment ends adds 2*K_j + 3 cycles of CRC
// checking (K_j = information and CRC bits of segment j). The last segment
// is checked while the next frame may already decode; its result appears
// 2*K_P + 3 cycles after its last leaf. If the CRC bank is still busy with
// the previous frame when a segment ends, the controller stalls.
//
// Interface: pulse `start` while `ready`; ch_llr and info_mask (1 = position
// carries an information or CRC bit) must stay stable until the frame's last
// leaf. One cycle of out_valid reports out_ok (all segments passed), out_seg
// (segments that passed) and out_bits, the K+M information and CRC bits in
// decoding order. The path metric is an accumulated penalty (|LLR| whenever
// a bit disagrees with its LLR's sign); smaller is better.
module tca_scl_decoder #(
  parameter int unsigned N = tca_pkg::TCA_N,
  parameter int unsigned K = tca_pkg::TCA_K,
  parameter int unsigned M = tca_pkg::TCA_M,
  parameter int unsigned L = tca_pkg::TCA_L,
  parameter int unsigned P = tca_pkg::TCA_P,
  parameter int unsigned Q = tca_pkg::TCA_Q,
  parameter int unsigned CRC_LEN  [P] = tca_pkg::TCA_CRC_LEN,
  parameter int unsigned CRC_POLY [P] = tca_pkg::TCA_CRC_POLY,
  localparam int unsigned KM   = K + M,
  localparam int unsigned LOGN = $clog2(N),
  localparam int unsigned SW   = (P > 1) ? $clog2(P) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic signed [Q-1:0] ch_llr [N],
  input  logic [N-1:0]        info_mask,
  output logic                ready,
  output logic                out_valid,
  output logic                out_ok,
  output logic [SW:0]         out_seg,
  output logic [KM-1:0]       out_bits
);

  localparam int unsigned S   = $clog2(P);
  localparam int unsigned NP  = N / P;
  localparam int unsigned LW  = (L > 1) ? $clog2(L) : 1;
  localparam int unsigned CW  = $clog2(2 * L);
  localparam int unsigned IW  = $clog2(KM + 1);
  localparam int unsigned PMW = tca_pkg::pm_width(N, Q);

  typedef enum logic [1:0] {S_IDLE, S_CALC, S_CRC} state_t;
  state_t state;

  logic [LOGN-1:0] leaf;
  logic [LOGN:0]   depth;
  logic [IW-1:0]   ii;          // information bits decided so far
  logic [SW-1:0]   sj;          // current segment
  logic [PMW-1:0]  pm     [L];
  logic            active [L];

  // first stage to compute for leaf i (> 0): n - tz(i)
  function automatic logic [LOGN:0] first_depth(logic [LOGN-1:0] i);
    logic [LOGN:0] d;
    d = (LOGN + 1)'(LOGN);
    for (int t = int'(LOGN) - 1; t >= 0; t--)
      if (i[t]) d = (LOGN + 1)'(int'(LOGN) - t);
    return d;
  endfunction

  // information bits per segment and where each segment starts
  logic [IW-1:0] seg_cnt [P];
  logic [IW-1:0] seg_beg [P];
  always_comb begin
    logic [IW-1:0] acc;
    acc = '0;
    for (int unsigned j = 0; j < P; j++) begin
      seg_cnt[j] = '0;
      for (int unsigned t = 0; t < NP; t++)
        seg_cnt[j] = seg_cnt[j] + IW'(info_mask[j*NP + t]);
      seg_beg[j] = acc;
      acc        = acc + seg_cnt[j];
    end
  end

  // ---------------------------------------------------------------- datapath
  logic signed [Q-1:0] leaf_llr [L];
  logic [N-1:0]        beta     [L];
  logic [KM-1:0]       rows     [L];

  logic                upd_valid, upd_info;
  logic [LW-1:0]       upd_parent [L];
  logic                upd_bit    [L];

  logic                at_leaf, is_info, seg_end, dec_fire, ref_fire;
  logic                crc_fire, crc_stall;

  assign is_info = info_mask[leaf];
  assign seg_end = &leaf[LOGN-S-1:0];
  assign at_leaf = (state == S_CALC) && (depth == (LOGN + 1)'(LOGN));

  mn_array #(.N(N), .L(L), .P(P), .Q(Q)) u_mn_array (
    .clk       (clk),
    .ch_llr    (ch_llr),
    .calc_en   (state == S_CALC),
    .depth     (depth),
    .leaf      (leaf),
    .beta      (beta),
    .upd_valid (upd_valid),
    .upd_parent(upd_parent),
    .leaf_llr  (leaf_llr)
  );

  // candidate metrics: candidate 2l+b extends path l with bit b
  logic [PMW-1:0] cand_pm    [2*L];
  logic           cand_valid [2*L];
  always_comb begin
    for (int unsigned l = 0; l < L; l++) begin
      logic signed [Q:0] e;
      logic [PMW-1:0]    mag;
      e   = (Q + 1)'(leaf_llr[l]);
      mag = PMW'(unsigned'((e < 0) ? -e : e));
      for (int unsigned b = 0; b < 2; b++) begin
        cand_pm[2*l + b]    = pm[l] + ((b[0] != leaf_llr[l][Q-1]) ? mag : '0);
        cand_valid[2*l + b] = active[l] && ((b == 0) || is_info);
      end
    end
  end

  logic [CW-1:0] sel_idx   [L];
  logic          sel_valid [L];

  list_core #(.L(L), .PMW(PMW)) u_lc (
    .cand_pm   (cand_pm),
    .cand_valid(cand_valid),
    .sel_idx   (sel_idx),
    .sel_valid (sel_valid)
  );

  // CRC stage
  logic           bk_busy, bk_done, bk_final, bk_found, bk_bit;
  logic [LW-1:0]  bk_lane;
  logic [PMW-1:0] bk_pm;
  logic [KM-1:0]  bk_row;

  crc_bank #(.L(L), .P(P), .KM(KM), .PMW(PMW),
             .CRC_LEN(CRC_LEN), .CRC_POLY(CRC_POLY)) u_bank (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (crc_fire),
    .final_seg(sj == SW'(P - 1)),
    .seg      (sj),
    .seg_start(seg_beg[sj]),
    .seg_len  (seg_cnt[sj]),
    .last_info(is_info),
    .rows     (rows),
    .row_valid(active),
    .cand_pm  (cand_pm),
    .busy     (bk_busy),
    .done     (bk_done),
    .res_final(bk_final),
    .found    (bk_found),
    .best_lane(bk_lane),
    .best_bit (bk_bit),
    .best_pm  (bk_pm),
    .best_row (bk_row)
  );

  assign dec_fire  = at_leaf && !seg_end;
  assign crc_fire  = at_leaf && seg_end && !bk_busy;
  assign crc_stall = at_leaf && seg_end && bk_busy;
  assign ref_fire  = (state == S_CRC) && bk_done && bk_found;

  // update multiplexer: 0 = list core, 1 = comparator (segment survivor)
  always_comb begin
    upd_valid = dec_fire || ref_fire;
    upd_info  = is_info;
    for (int unsigned k = 0; k < L; k++) begin
      if (ref_fire) begin
        upd_parent[k] = bk_lane;
        upd_bit[k]    = bk_bit;
      end else begin
        upd_parent[k] = LW'(sel_idx[k] >> 1);
        upd_bit[k]    = sel_idx[k][0];
      end
    end
  end

  usum #(.N(N), .L(L)) u_usum (
    .clk       (clk),
    .upd_valid (upd_valid),
    .upd_parent(upd_parent),
    .upd_bit   (upd_bit),
    .leaf      (leaf),
    .beta      (beta)
  );

  path_memory #(.KM(KM), .L(L)) u_mem (
    .clk       (clk),
    .upd_valid (upd_valid),
    .upd_parent(upd_parent),
    .upd_bit   (upd_bit),
    .upd_info  (upd_info),
    .info_idx  (ii),
    .rows      (rows)
  );

  // -------------------------------------------------------------- controller
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      leaf  <= '0;
      depth <= '0;
      ii    <= '0;
      sj    <= '0;
      for (int unsigned l = 0; l < L; l++) begin
        pm[l]     <= '0;
        active[l] <= 1'b0;
      end
    end else begin
      case (state)
        S_IDLE: if (start) begin
          state <= S_CALC;
          leaf  <= '0;
          depth <= (LOGN + 1)'(1);
          ii    <= '0;
          sj    <= '0;
          for (int unsigned l = 0; l < L; l++) begin
            pm[l]     <= '0;
            active[l] <= (l == 0);
          end
        end
        S_CALC: begin
          if (!at_leaf) depth <= depth + 1'b1;
          else if (dec_fire) begin
            for (int unsigned k = 0; k < L; k++) begin
              active[k] <= sel_valid[k];
              pm[k]     <= cand_pm[sel_idx[k]];
            end
            ii    <= ii + IW'(is_info);
            leaf  <= leaf + 1'b1;
            depth <= first_depth(leaf + 1'b1);
          end else if (crc_fire) begin
            state <= (sj == SW'(P - 1)) ? S_IDLE : S_CRC;
          end
        end
        S_CRC: if (bk_done) begin
          if (bk_found) begin
            for (int unsigned k = 0; k < L; k++) begin
              active[k] <= (k == 0);
              pm[k]     <= bk_pm;
            end
            ii    <= ii + IW'(is_info);
            leaf  <= leaf + 1'b1;
            depth <= first_depth(leaf + 1'b1);
            sj    <= sj + 1'b1;
            state <= S_CALC;
          end else begin
            state <= S_IDLE;         // early termination
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // frame result: early termination from the segment loop, or the final
  // segment's check, which may finish while the next frame decodes
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_ok    <= 1'b0;
      out_seg   <= '0;
      out_bits  <= '0;
    end else begin
      out_valid <= 1'b0;
      if (bk_done && bk_final) begin
        out_valid <= 1'b1;
        out_ok    <= bk_found;
        out_seg   <= bk_found ? (SW + 1)'(P) : (SW + 1)'(P - 1);
        out_bits  <= bk_row;
      end else if (state == S_CRC && bk_done && !bk_found) begin
        out_valid <= 1'b1;
        out_ok    <= 1'b0;
        out_seg   <= (SW + 1)'(sj);
        out_bits  <= rows[0];
      end
    end
  end

  assign ready = (state == S_IDLE);

endmodule
