// crc_bank: the segment CRC stage - demultiplexer, CRC_1..CRC_P detectors
// with L lanes each, multiplexer and comparator C.
//
// At the end of segment j the decoder hands over its L paths. Each path l
// yields two candidates, c = 2l (last bit 0) and c = 2l+1 (last bit 1; only
// when the segment's last position is an information bit). The bank copies
// the L rows of decided information bits, then lane l of CRC_j checks its two
// candidates one after the other, one bit per clock over the segment's
// seg_len information/CRC bits (positions seg_start .. seg_start+seg_len-1
// of the row, the last one replaced by the candidate's last bit). The
// comparator then picks the passing candidate with the best metric.
//
// Timing after the `start` edge: seg_len shift cycles, one sample cycle,
// seg_len shift cycles, one sample cycle, then one cycle with done = 1 and
// the result (found, best lane/bit, its metric and its full row). So a
// segment costs 2*seg_len + 3 cycles. Because the bank keeps its own copy of
// the rows, the decoder may start the next frame while the last segment is
// being checked; `final_seg` is carried through to mark that result.
// seg_len must be at least 1.
//
// Following the decoder this bank belongs to: one CRC per segment, L lanes
// drawn in parallel, each lane serial over its two candidates. The private
// row copy (L(K+m) bits) and the sample cycles are this design's choices.
module crc_bank #(
  parameter int unsigned L   = 2,
  parameter int unsigned P   = 4,
  parameter int unsigned KM  = 544,
  parameter int unsigned PMW = 18,
  parameter int unsigned CRC_LEN  [P] = tca_pkg::TCA_CRC_LEN,
  parameter int unsigned CRC_POLY [P] = tca_pkg::TCA_CRC_POLY,
  localparam int unsigned LW = (L > 1) ? $clog2(L) : 1,
  localparam int unsigned CW = $clog2(2 * L),
  localparam int unsigned SW = (P > 1) ? $clog2(P) : 1,
  localparam int unsigned IW = $clog2(KM + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  // capture
  input  logic           start,
  input  logic           final_seg,
  input  logic [SW-1:0]  seg,
  input  logic [IW-1:0]  seg_start,
  input  logic [IW-1:0]  seg_len,
  input  logic           last_info,
  input  logic [KM-1:0]  rows      [L],
  input  logic           row_valid [L],
  input  logic [PMW-1:0] cand_pm   [2*L],
  // result
  output logic           busy,
  output logic           done,
  output logic           res_final,
  output logic           found,
  output logic [LW-1:0]  best_lane,
  output logic           best_bit,
  output logic [PMW-1:0] best_pm,
  output logic [KM-1:0]  best_row
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_SAMPLE, S_DONE} state_t;
  state_t state;

  logic [KM-1:0]  snap  [L];
  logic           cval  [2*L];
  logic [PMW-1:0] cpm   [2*L];
  logic           cpass [2*L];
  logic [SW-1:0]  sseg;
  logic [IW-1:0]  sstart, slen, cnt;
  logic           slast, sfinal, phase;

  // serial bit streams, one per lane, demultiplexed to the segment's CRC
  logic           lane_bit  [L];
  logic           det_pass  [P][L];
  logic           shift_en, clr;

  assign shift_en = (state == S_RUN);
  assign clr      = start || (state == S_SAMPLE);

  for (genvar l = 0; l < L; l++) begin : g_lane
    always_comb begin
      if (slast && cnt == slen - 1'b1) lane_bit[l] = phase;
      else                             lane_bit[l] = snap[l][sstart + cnt];
    end
  end

  for (genvar j = 0; j < P; j++) begin : g_crc
    for (genvar l = 0; l < L; l++) begin : g_lane
      crc_detector #(.W(CRC_LEN[j]), .POLY(CRC_POLY[j])) u_det (
        .clk (clk),
        .clr (clr),
        .en  (shift_en && sseg == SW'(j)),
        .din (lane_bit[l]),
        .pass(det_pass[j][l])
      );
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      phase  <= 1'b0;
      cnt    <= '0;
      sseg   <= '0;
      sstart <= '0;
      slen   <= '0;
      slast  <= 1'b0;
      sfinal <= 1'b0;
      for (int unsigned c = 0; c < 2 * L; c++) begin
        cval[c]  <= 1'b0;
        cpass[c] <= 1'b0;
        cpm[c]   <= '0;
      end
    end else begin
      case (state)
        S_IDLE: if (start) begin
          state  <= S_RUN;
          phase  <= 1'b0;
          cnt    <= '0;
          sseg   <= seg;
          sstart <= seg_start;
          slen   <= seg_len;
          slast  <= last_info;
          sfinal <= final_seg;
          for (int unsigned c = 0; c < 2 * L; c++) begin
            cval[c]  <= row_valid[c / 2] && ((c % 2 == 0) || last_info);
            cpm[c]   <= cand_pm[c];
            cpass[c] <= 1'b0;
          end
        end
        S_RUN: begin
          if (cnt == slen - 1'b1) state <= S_SAMPLE;
          else                    cnt   <= cnt + 1'b1;
        end
        S_SAMPLE: begin
          for (int unsigned l = 0; l < L; l++)
            cpass[2*l + phase] <= cval[2*l + phase] && det_pass[sseg][l];
          cnt <= '0;
          if (phase) state <= S_DONE;
          else begin
            phase <= 1'b1;
            state <= S_RUN;
          end
        end
        default: state <= S_IDLE;   // S_DONE: result shown for one cycle
      endcase
    end
  end

  // rows are copied without reset: they are only read after a capture
  always_ff @(posedge clk)
    if (state == S_IDLE && start)
      for (int unsigned l = 0; l < L; l++) snap[l] <= rows[l];

  logic [CW-1:0] best;

  cand_comparator #(.L(L), .PMW(PMW)) u_cmp (
    .pass (cpass),
    .pm   (cpm),
    .found(found),
    .best (best)
  );

  assign busy      = (state != S_IDLE);
  assign done      = (state == S_DONE);
  assign res_final = sfinal;
  assign best_lane = LW'(best >> 1);
  assign best_bit  = best[0];
  assign best_pm   = cpm[best];

  always_comb begin
    best_row = snap[best_lane];
    if (slast) best_row[sstart + slen - 1'b1] = best_bit;
  end

endmodule
