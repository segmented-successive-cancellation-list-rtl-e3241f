// tb_tca_full: the decoder at its default size, the (1024,512) code with 32
// CRC bits in four segments (CRC-3 0x5, CRC-10 0x327, CRC-11 0x583,
// CRC-8 0xA6), list size 2, 8-bit LLRs. Clean frames must decode exactly and
// with the expected cycle count; back-to-back frames and a frame whose last
// segment is all information bits exercise the overlap and the stall;
// random-LLR frames must terminate early.
`timescale 1ns/1ps
module tb_tca_full;
  localparam int N = tca_pkg::TCA_N, K = tca_pkg::TCA_K, M = tca_pkg::TCA_M;
  localparam int L = tca_pkg::TCA_L, P = tca_pkg::TCA_P, Q = tca_pkg::TCA_Q;
  localparam int unsigned CLEN  [P] = tca_pkg::TCA_CRC_LEN;
  localparam int unsigned CPOLY [P] = tca_pkg::TCA_CRC_POLY;

  logic clk = 0, rst_n = 0, start = 0, ready, out_valid, out_ok;
  logic signed [Q-1:0] ch [N];
  logic [N-1:0] mask;
  logic [$clog2(P):0] out_seg;
  logic [K+M-1:0] out_bits;
  int cyc = 0, checks = 0, failures = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  tca_scl_decoder u_dut (
    .clk(clk), .rst_n(rst_n), .start(start), .ch_llr(ch), .info_mask(mask), .ready(ready),
    .out_valid(out_valid), .out_ok(out_ok), .out_seg(out_seg), .out_bits(out_bits));

  `include "tca_tb_common.svh"

  initial begin : wd
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) ch[i] = '0;
    mask = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    send(0, 8.0, 1, 1);          // clean, isolated: exact bits and latency
    send(0, 8.0, 1, 0);          // back to back
    send(1, 8.0, 1, 0);          // heavy last segment: CRC stage busy at next frame's segment end
    send(0, 8.0, 1, 0);
    send(0, 8.0, 1, 0);
    for (int f = 0; f < 3; f++) send(0, -99.0, 0, 0);   // random LLRs
    while (exp_q.size() != 0) @(negedge clk);
    report_mechanisms();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
