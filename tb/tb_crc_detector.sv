// tb_crc_detector: feeds random data words followed by their CRC, computed
// here by polynomial long division on a bit array, and expects a pass; then
// the same word with one bit flipped and expects a fail. Default CRC-8 (0xA6).
module tb_crc_detector;
  localparam int W = 8;
  localparam int POLY = 'hA6;
  logic clk = 0, clr, en, din, pass;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  crc_detector #(.W(W), .POLY(POLY)) dut (.clk(clk), .clr(clr), .en(en), .din(din), .pass(pass));

  initial begin : wd
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // remainder of msg(x) * x^W divided by g(x) = {POLY,1}
  function automatic void crc_of(input bit msg[$], output bit rem[$]);
    bit g[$];
    bit w[$];
    for (int i = W - 1; i >= 0; i--) g.push_back(POLY[i]);
    g.push_back(1'b1);                       // g[0] is x^W ... g[W] is x^0
    w = msg;
    for (int i = 0; i < W; i++) w.push_back(1'b0);
    for (int i = 0; i < msg.size(); i++)
      if (w[i]) for (int k = 0; k <= W; k++) w[i+k] ^= g[k];
    rem = {};
    for (int i = msg.size(); i < w.size(); i++) rem.push_back(w[i]);
  endfunction

  task automatic run(input bit s[$], output bit ok);
    @(negedge clk); clr = 1; en = 0;
    @(negedge clk); clr = 0;
    foreach (s[i]) begin en = 1; din = s[i]; @(negedge clk); end
    en = 0;
    ok = pass;
  endtask

  initial begin
    bit msg[$], rem[$], s[$], ok;
    clr = 0; en = 0; din = 0;
    for (int t = 0; t < 60; t++) begin
      int len;
      len = 1 + int'($urandom_range(40));
      msg = {};
      for (int i = 0; i < len; i++) msg.push_back(1'($urandom));
      crc_of(msg, rem);
      s = {msg, rem};
      run(s, ok);
      checks++; if (!ok) begin failures++; $display("valid word failed, len %0d", len); end
      s[$urandom_range(s.size() - 1)] ^= 1'b1;
      run(s, ok);
      checks++; if (ok) begin failures++; $display("corrupted word passed, len %0d", len); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
