// membrane_bank_tb: random reads and writes against an associative-array
// model, including reads of the row written in the same cycle, which
// must return the new data. Every read is checked one clock later.
module membrane_bank_tb;
  localparam int DEPTH = 64, WIDTH = 72;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rd_en, wr_en;
  logic [5:0] rd_addr, wr_addr;
  logic [WIDTH-1:0] rd_data, wr_data;
  membrane_bank #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  logic [WIDTH-1:0] model [DEPTH];
  int checks = 0, failures = 0, bypass = 0;

  initial begin
    logic [WIDTH-1:0] exp_q;
    bit chk_q;
    rd_en = 0; wr_en = 1;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      wr_addr = 6'(a); wr_data = {$urandom, $urandom, 8'(a)};
      model[a] = wr_data;
    end
    chk_q = 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      if (chk_q) begin
        checks++;
        if (rd_data !== exp_q) begin failures++; $display("FAIL read %0d", i); end
      end
      rd_en = $urandom % 2; wr_en = $urandom % 2;
      rd_addr = 6'($urandom % 8); wr_addr = 6'($urandom % 8);
      wr_data = {$urandom, $urandom, $urandom};
      exp_q = (wr_en && wr_addr == rd_addr) ? wr_data : model[rd_addr];
      if (rd_en && wr_en && wr_addr == rd_addr) bypass++;
      chk_q = rd_en;
      if (wr_en) model[wr_addr] = wr_data;
    end
    checks++;
    if (bypass == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
