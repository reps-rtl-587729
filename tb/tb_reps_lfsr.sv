// tb_reps_lfsr: checks reset to the seed, holding while step_i is low, the
// sequence against an arithmetic model of the feedback polynomial
// x^32 + x^22 + x^2 + x + 1, that the register never reaches zero, and that
// the low 16 bits spread evenly over 8 hist.
module tb_reps_lfsr;
  logic clk = 0, rst_n = 0, step = 0;
  logic [31:0] r;
  int checks = 0, failures = 0;
  int unsigned model;
  int hist[8];

  reps_lfsr #(.SEED(32'h1234_5678)) dut (.clk(clk), .rst_n(rst_n), .step_i(step), .rand_o(r));

  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s r=%h model=%h", what, r, model); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 8; i++) hist[i] = 0;
    repeat (2) @(posedge clk);
    #1 chk(r == 32'h1234_5678, "reset seed");
    rst_n = 1;
    model = 32'h1234_5678;
    repeat (3) @(posedge clk);
    #1 chk(r == model, "hold without step");
    for (int i = 0; i < 8000; i++) begin
      step = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (step) begin
        // divide by x in GF(2)[x] modulo the polynomial
        if (model % 2 == 1) model = (model / 2) ^ 32'h8020_0003;
        else                model = model / 2;
      end
      #1;
      chk(r == model, "sequence");
      chk(r != 0, "non-zero");
      if (step) hist[(r % 65536) / 8192]++;
    end
    for (int i = 0; i < 8; i++) chk(hist[i] > 500, "spread");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
