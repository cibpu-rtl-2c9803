// tb_cibpu_prng: checks the xorshift sequence against a model, that the
// generator holds when en is low, restarts from SEED on reset, and never
// reaches zero.  One step per clock cycle with en high.
module tb_cibpu_prng;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [31:0] rnd, model;
  int checks = 0, failures = 0;
  localparam logic [31:0] SEED = 32'h1234_5678;

  cibpu_prng #(.SEED(SEED)) dut (.clk, .rst_n, .en, .rnd);

  always #5 clk = ~clk;

  function automatic logic [31:0] step(input logic [31:0] x);
    logic [31:0] y;
    y = x;
    y ^= y << 13;
    y ^= y >> 17;
    y ^= y << 5;
    return y;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    check(rnd == SEED, "reset value is not SEED");
    model = SEED;
    for (int i = 0; i < 2000; i++) begin
      en = ($urandom % 4) != 0;
      @(posedge clk);
      if (en) model = step(model);
      @(negedge clk);
      check(rnd == model, $sformatf("step %0d: got %h expected %h", i, rnd, model));
      check(rnd != 0, "generator reached zero");
    end
    rst_n = 1'b0;
    @(negedge clk);
    check(rnd == SEED, "reset does not restart the sequence");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
