// tb_rng_xorshift: compares the generator with the published xorshift32
// sequence: from seed 1 the first outputs are 270369, 67634689, 2647435461
// (values of the reference algorithm, not of this module), then a long run
// against a model here, the effect of `en` low (state held) and reseeding,
// including the zero-seed substitution.
module tb_rng_xorshift;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a real falling edge for the asynchronous reset
  logic en, reseed;
  logic [31:0] seed_in, rnd;
  int checks = 0, failures = 0;

  rng_xorshift #(.SEED(32'd1)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] nxt(logic [31:0] x);
    x ^= x << 13; x ^= x >> 17; x ^= x << 5;
    return x;
  endfunction

  task automatic chk(logic [31:0] e);
    checks++;
    if (rnd !== e) begin failures++; $display("got %0d exp %0d", rnd, e); end
  endtask

  initial begin
    logic [31:0] m;
    en = 0; reseed = 0; seed_in = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    chk(32'd1);
    en = 1;
    @(posedge clk); #1 chk(32'd270369);
    @(posedge clk); #1 chk(32'd67634689);
    @(posedge clk); #1 chk(32'd2647435461);
    m = rnd;
    for (int n = 0; n < 1000; n++) begin
      en = ($urandom % 3) != 0;
      if (en) m = nxt(m);
      @(posedge clk); #1 chk(m);
    end
    reseed = 1; seed_in = 32'hdead_beef; @(posedge clk); #1 chk(32'hdead_beef);
    reseed = 1; seed_in = 32'h0;         @(posedge clk); #1 chk(32'd1);
    reseed = 0; en = 1;                  @(posedge clk); #1 chk(32'd270369);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
