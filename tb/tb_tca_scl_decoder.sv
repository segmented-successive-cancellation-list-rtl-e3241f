// tb_tca_scl_decoder: end-to-end test of the decoder at the (64,36) code
// with 8 CRC bits in two segments (CRC-5 0x12 and CRC-3 0x5), list size 2.
// Clean frames must decode exactly and with the expected cycle count; back to
// back frames exercise the overlap of the last segment's check with the next
// frame and the stall when the CRC stage is still busy; random-LLR frames
// must terminate early; noisy frames at 1.5 dB are counted.
`timescale 1ns/1ps
module tb_tca_scl_decoder;
  localparam int N = 64, K = 36, M = 8, L = 2, P = 2, Q = 8;
  localparam int unsigned CLEN  [P] = '{5, 3};
  localparam int unsigned CPOLY [P] = '{32'h12, 32'h5};

  logic clk = 0, rst_n = 0, start = 0, ready, out_valid, out_ok;
  logic signed [Q-1:0] ch [N];
  logic [N-1:0] mask;
  logic [$clog2(P):0] out_seg;
  logic [K+M-1:0] out_bits;
  int cyc = 0, checks = 0, failures = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  tca_scl_decoder #(.N(N), .K(K), .M(M), .L(L), .P(P), .Q(Q), .CRC_LEN(CLEN), .CRC_POLY(CPOLY)) u_dut (
    .clk(clk), .rst_n(rst_n), .start(start), .ch_llr(ch), .info_mask(mask), .ready(ready),
    .out_valid(out_valid), .out_ok(out_ok), .out_seg(out_seg), .out_bits(out_bits));

  `include "tca_tb_common.svh"

  initial begin : wd
    repeat (400000) @(posedge clk);
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
    for (int f = 0; f < 4; f++)  send(0, 8.0, 1, 1);     // clean, isolated
    for (int f = 0; f < 4; f++)  send(0, 8.0, 1, 0);     // clean, back to back
    for (int f = 0; f < 4; f++)  send(1, 8.0, 1, 0);     // heavy last segment
    for (int f = 0; f < 6; f++)  send(0, -99.0, 0, 0);   // random LLRs
    for (int f = 0; f < 30; f++) send(0, 1.5, 0, 0);     // noisy
    while (exp_q.size() != 0) @(negedge clk);
    report_mechanisms();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
