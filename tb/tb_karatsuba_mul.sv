// tb_karatsuba_mul: checks the pipelined Karatsuba multiplier against the
// plain product. A new random operand pair (plus corner values) is applied
// every clock; each product is compared with a*b exactly 3 clocks later, so
// both the value and the latency are checked.
module tb_karatsuba_mul;
  localparam int unsigned K = 32;
  logic clk = 1'b0;
  logic [K-1:0] a, b;
  logic [2*K-1:0] p;
  logic [2*K-1:0] exp_q [$];
  int checks = 0, failures = 0;

  karatsuba_mul #(.K(K)) dut (.clk(clk), .a(a), .b(b), .p(p));

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = '0; b = '0;
    for (int n = 0; n < 2000; n++) begin
      case (n)
        0: begin a = '1; b = '1; end
        1: begin a = '1; b = 32'd1; end
        2: begin a = 32'h0000_ffff; b = 32'hffff_0000; end
        3: begin a = 32'h8000_0000; b = 32'h8000_0000; end
        default: begin a = $urandom; b = $urandom; end
      endcase
      exp_q.push_back(64'(a) * 64'(b));
      @(posedge clk);
      #1;
      if (n >= 2) begin
        // product of the pair applied 3 clocks before the current one
        checks++;
        if (p !== exp_q[0]) begin
          failures++;
          if (failures < 5) $display("mismatch: got %h exp %h", p, exp_q[0]);
        end
        void'(exp_q.pop_front());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
