// tb_crc_bank: two segments (CRC-5 0x12 over 10 bits at offset 0, CRC-3 0x5
// over 8 bits at offset 10), L = 2, rows of 18 bits. For each trial the
// testbench builds two paths; a random subset of the four candidates is made
// CRC-valid (the last bit decides which extension of a path is valid), random
// metrics are attached, and the expected survivor is the valid candidate with
// the smallest metric. The done pulse must come 2*len+3 cycles after start.
`timescale 1ns/1ps
module tb_crc_bank;
  localparam int L = 2, P = 2, KM = 18, PMW = 14;
  localparam int unsigned CLEN  [P] = '{5, 3};
  localparam int unsigned CPOLY [P] = '{32'h12, 32'h5};
  logic clk = 0, rst_n = 0, start = 0, fin = 0, last_info, busy, done, res_final, found, best_bit;
  logic [0:0] seg, best_lane;
  logic [4:0] sbeg, slen;
  logic [KM-1:0] rows [L], best_row;
  logic rv [L];
  logic [PMW-1:0] cpm [2*L], best_pm;
  int checks = 0, failures = 0, cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  crc_bank #(.L(L), .P(P), .KM(KM), .PMW(PMW), .CRC_LEN(CLEN), .CRC_POLY(CPOLY)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .final_seg(fin), .seg(seg), .seg_start(sbeg), .seg_len(slen),
    .last_info(last_info), .rows(rows), .row_valid(rv), .cand_pm(cpm), .busy(busy), .done(done),
    .res_final(res_final), .found(found), .best_lane(best_lane), .best_bit(best_bit), .best_pm(best_pm),
    .best_row(best_row));

  initial begin : wd
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void crc_rem(bit msg [$], int W, int poly, output bit rem [$]);
    automatic bit g [$];
    automatic bit w [$];
    for (int i = W - 1; i >= 0; i--) g.push_back(poly[i]);
    g.push_back(1'b1);
    w = msg;
    for (int i = 0; i < W; i++) w.push_back(1'b0);
    for (int i = 0; i < msg.size(); i++)
      if (w[i]) for (int k = 0; k <= W; k++) w[i+k] ^= g[k];
    rem = {};
    for (int i = msg.size(); i < w.size(); i++) rem.push_back(w[i]);
  endfunction

  initial begin
    @(negedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      automatic int sj = t % 2;
      automatic int beg = sj ? 10 : 0;
      automatic int len = sj ? 8 : 10;
      automatic int w = CLEN[sj];
      automatic bit cpass [2*L];
      automatic int eb = -1, t0;
      for (int l = 0; l < L; l++) begin
        automatic bit data [$];
        automatic bit rem [$];
        automatic bit word [$];
        for (int a = 0; a < len - w; a++) data.push_back(1'($urandom));
        crc_rem(data, w, CPOLY[sj], rem);
        word = {data, rem};
        if ($urandom_range(3) == 0) word[$urandom_range(len - 2)] ^= 1'b1;   // corrupt path
        rows[l] = KM'($urandom);
        for (int a = 0; a < len; a++) rows[l][beg + a] = word[a];
        rv[l] = (l == 0) || ($urandom_range(3) != 0);
        // candidate 2l+b passes iff the path is intact and b equals the true last bit
        for (int b = 0; b < 2; b++) begin
          automatic bit ww [$];
          automatic bit r2 [$];
          automatic bit ok = 1;
          ww = word; ww[len - 1] = b[0];
          crc_rem(ww[0:len - w - 1], w, CPOLY[sj], r2);
          for (int a = 0; a < w; a++) if (r2[a] != ww[len - w + a]) ok = 0;
          cpass[2*l + b] = ok && rv[l];
        end
      end
      last_info = 1;
      for (int c = 0; c < 2*L; c++) cpm[c] = PMW'($urandom_range(50));
      for (int c = 0; c < 2*L; c++) if (cpass[c] && (eb < 0 || cpm[c] < cpm[eb])) eb = c;
      seg = 1'(sj); sbeg = 5'(beg); slen = 5'(len); fin = t[2];
      start = 1; t0 = cyc;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      checks++;
      if (cyc - t0 != 2*len + 3) begin failures++; $display("latency %0d", cyc - t0); end
      checks++;
      if ((eb < 0) ? found : (!found || int'({best_lane, best_bit}) != eb)) begin
        failures++; if (failures < 10) $display("trial %0d: got %0d/%0d expected %0d", t, {best_lane, best_bit}, found, eb);
      end
      if (eb >= 0) begin
        checks++;
        if (best_pm != cpm[eb] || best_row[beg + len - 1] != 1'(eb % 2) || res_final != fin) begin failures++; $display("result fields wrong"); end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
