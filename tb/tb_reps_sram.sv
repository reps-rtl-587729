// tb_reps_sram: random reads and writes against a model array; checks the
// one-cycle read latency, that read data holds without a read, and that a
// read and a write to the same address in one cycle return the old word.
module tb_reps_sram;
  localparam int DEPTH = 256, WIDTH = 128;
  logic clk = 0;
  logic re, we;
  logic [7:0] ra, wa;
  logic [WIDTH-1:0] rd, wd;
  logic [WIDTH-1:0] model [DEPTH];
  logic [WIDTH-1:0] exp_q;
  logic exp_v;
  int checks = 0, failures = 0, same_addr = 0;

  reps_sram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (
    .clk(clk), .rd_en_i(re), .rd_addr_i(ra), .rd_data_o(rd),
    .wr_en_i(we), .wr_addr_i(wa), .wr_data_i(wd));

  always #5 clk = ~clk;

  function automatic logic [WIDTH-1:0] rnd128();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    re = 0; we = 0; ra = 0; wa = 0; wd = 0; exp_v = 0;
    // fill
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); we = 1; wa = 8'(i); wd = rnd128(); model[i] = wd;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      if (exp_v) begin
        checks++;
        if (rd !== exp_q) begin failures++; if (failures < 10) $display("FAIL read"); end
      end
      re = $urandom_range(0, 1); we = $urandom_range(0, 1);
      ra = 8'($urandom_range(0, 15)); wa = (re && $urandom_range(0, 3) == 0) ? ra : 8'($urandom_range(0, 15));
      wd = rnd128();
      if (re) begin exp_q = model[ra]; exp_v = 1; end  // old value: read before write
      if (re && we && ra == wa) same_addr++;
      if (we) model[wa] = wd;
    end
    checks++;
    if (same_addr == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
