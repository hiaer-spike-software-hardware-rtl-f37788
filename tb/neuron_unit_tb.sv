// neuron_unit_tb: checks the neuron update against the published order of
// operations (noise, V > theta, reset to 0, then LIF leak V - floor(V/2^lambda)
// or binary clear), computed here with 64-bit integers and floor division.
// Includes the boundary V == theta (no spike), negative V with the maximum
// leak shift, and random cases.
module neuron_unit_tb;
  import hs_pkg::*;
  vmem_t v_in, noise, v_out;
  model_t model;
  logic spike;
  int checks = 0, failures = 0;

  neuron_unit dut (.v_in, .noise, .model, .v_out, .spike);

  function automatic longint fdiv(longint a, int sh);
    longint d;
    if (sh >= 62) return (a < 0) ? -1 : 0;
    d = longint'(1) << sh;
    return (a >= 0) ? a / d : -(((-a) + d - 1) / d);
  endfunction

  task automatic try(longint v, longint n, bit lif, longint th, int lam);
    longint x, e;
    bit es;
    v_in = V_W'(v); noise = V_W'(n);
    model = '0; model.is_lif = lif; model.theta = V_W'(th); model.lambda = LAMBDA_W'(lam);
    #1;
    x  = v + n;
    es = x > th;
    if (es) x = 0;
    e  = lif ? x - fdiv(x, lam) : 0;
    checks++;
    if (spike !== es || longint'(v_out) != e) begin
      failures++;
      $display("FAIL v=%0d n=%0d lif=%0d th=%0d lam=%0d: got %0d/%0d exp %0d/%0d",
               v, n, lif, th, lam, v_out, spike, e, es);
    end
  endtask

  initial begin
    try(3, 0, 1, 3, 63);        // equal to threshold: no spike
    try(4, 0, 1, 3, 63);        // above: spike, reset
    try(-5, 0, 1, 3, 63);       // negative, lambda 63: moves up by one
    try(100, 0, 1, 1000, 2);    // leak by a quarter
    try(-100, 0, 1, 1000, 2);
    try(7, 0, 0, 5, 0);         // binary: spike
    try(5, 0, 0, 5, 0);         // binary: no spike, cleared
    try(2, 4, 0, 5, 0);         // noise pushes over threshold
    try(-3, 0, 1, -10, 1);      // negative threshold
    for (int i = 0; i < 2000; i++)
      try(longint'(int'($urandom)) >>> ($urandom % 16), int'($urandom % 2001) - 1000,
          $urandom % 2, int'($urandom % 4001) - 2000, $urandom % 64);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
