// noise_gen_tb: checks the noise source against an independent model of
// the rule: odd 17-bit signed draws from a 32-bit xorshift sequence,
// scaled by 2^nu (left shift for nu > 0, arithmetic right shift for
// nu < 0, zero for nu <= -17). Also checks that the state only advances
// with `en`, and that the draws are balanced and odd.
module noise_gen_tb;
  import hs_pkg::*;
  logic clk = 0, rst = 1, en = 0;
  logic signed [NU_W-1:0] nu;
  vmem_t noise;
  always #5 clk = ~clk;

  noise_gen #(.SEED(32'hACE1_2345)) dut (.clk, .rst, .en, .nu, .noise);

  int checks = 0, failures = 0;
  logic [31:0] st;
  function automatic logic [31:0] xs(logic [31:0] x);
    x = x ^ (x << 13); x = x ^ (x >> 17); x = x ^ (x << 5); return x;
  endfunction
  function automatic longint expect_noise(logic [31:0] s, int n);
    longint raw = longint'(signed'(17'(s[16:0] | 17'd1)));
    if (n >= 0) return longint'(vmem_t'(raw * (longint'(1) << n)));
    if (n <= -17) return 0;
    return raw >>> (-n);
  endfunction

  initial begin
    int pos = 0, neg = 0;
    nu = 0;
    repeat (2) @(posedge clk);
    rst = 0;
    st = 32'hACE1_2345;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      nu = NU_W'(int'($urandom % 64) - 32);
      en = (i % 3) != 0;
      #1;
      checks++;
      if (longint'(noise) != expect_noise(st, int'(nu))) begin
        failures++;
        $display("FAIL i=%0d nu=%0d got %0d exp %0d", i, nu, noise, expect_noise(st, int'(nu)));
      end
      if (nu == 0) begin
        checks++;
        if (noise[0] != 1'b1) failures++;
        if (noise > 0) pos++; else neg++;
      end
      @(posedge clk);
      if (en) st = xs(st);
    end
    checks++;
    if (pos == 0 || neg == 0) begin failures++; $display("FAIL: noise not two-sided"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
