// axon_event_mem_tb: after the reset clear, sets random axons (including
// back-to-back sets in one row), then reads every row with clear and
// compares with a model; a second read must return zeros.
module axon_event_mem_tb;
  localparam int ROWS = 64, WIDTH = 16;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic busy, set_en, rd_en, rd_clr;
  logic [9:0] set_axon;
  logic [5:0] rd_addr;
  logic [WIDTH-1:0] rd_data;
  axon_event_mem #(.ROWS(ROWS), .WIDTH(WIDTH)) dut (.*);

  logic [WIDTH-1:0] model [ROWS];
  int checks = 0, failures = 0;

  initial begin
    set_en = 0; rd_en = 0; rd_clr = 0;
    foreach (model[i]) model[i] = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    @(posedge clk);
    while (busy) @(posedge clk);
    for (int pass = 0; pass < 3; pass++) begin
      for (int i = 0; i < 150; i++) begin
        @(negedge clk);
        set_en   = ($urandom % 4) != 0;
        set_axon = (i % 5 < 3) ? {6'(i % 7), 4'($urandom)} : 10'($urandom);
        if (set_en) model[set_axon[9:4]][set_axon[3:0]] = 1'b1;
      end
      @(negedge clk); set_en = 0;
      @(negedge clk);
      for (int r = 0; r <= ROWS; r++) begin
        @(negedge clk);
        if (r > 0) begin
          checks++;
          if (rd_data !== model[r-1]) begin
            failures++; $display("FAIL row %0d got %h exp %h", r-1, rd_data, model[r-1]);
          end
          model[r-1] = '0;
        end
        rd_en = (r < ROWS); rd_clr = 1; rd_addr = 6'(r);
      end
      @(negedge clk); rd_en = 0;
    end
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
