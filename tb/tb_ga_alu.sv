// tb_ga_alu: self-checking test of one ALU.
// Random Q16.16 operands for every operation (multiply, add, min, max, pass)
// and every post-operation (none, ReLU, PReLU), compared with a reference;
// then a multiply-accumulate sequence of random length, read through RDACC,
// and a clear. The ALU is combinational except for the accumulator, which
// updates on the clock edge.
module tb_ga_alu;
  import ga_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = !clk;
  int checks = 0, failures = 0;
  alu_op_e op; post_e post; word_t a, b, y, acc; logic acc_clr, acc_en;
  localparam word_t ALPHA = 32'sh4000;
  ga_alu dut (.clk, .rst_n, .op, .post, .a, .b, .alpha(ALPHA), .acc_clr, .acc_en, .y, .acc);

  function automatic word_t ref_post(word_t v, post_e p);
    if (p == POST_RELU) return (v < 0) ? 0 : v;
    if (p == POST_PRELU) return (v < 0) ? fxmul(v, ALPHA) : v;
    return v;
  endfunction

  task automatic chk(word_t got, word_t exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, got, exp); end
  endtask

  initial begin
    word_t r, sum;
    int n;
    op = ALU_PASS; post = POST_NONE; a = 0; b = 0; acc_clr = 0; acc_en = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 400; i++) begin
      a = word_t'($urandom) >>> 8; b = word_t'($urandom) >>> 8;
      post = post_e'($urandom_range(2));
      begin
        alu_op_e ops [5] = '{ALU_PASS, ALU_MUL, ALU_ADD, ALU_MIN, ALU_MAX};
        op = ops[$urandom_range(4)];
      end
      #0.5;
      unique case (op)
        ALU_MUL: r = fxmul(a, b);
        ALU_ADD: r = a + b;
        ALU_MIN: r = (a < b) ? a : b;
        ALU_MAX: r = (a > b) ? a : b;
        default: r = a;
      endcase
      chk(y, ref_post(r, post), $sformatf("op %0d post %0d", op, post));
    end
    @(negedge clk);
    acc_clr = 1; @(negedge clk); acc_clr = 0;
    op = ALU_MAC; post = POST_NONE; acc_en = 1; sum = 0;
    n = $urandom_range(5, 40);
    for (int i = 0; i < n; i++) begin
      a = word_t'($urandom) >>> 12; b = word_t'($urandom) >>> 12;
      sum += fxmul(a, b);
      @(negedge clk);
    end
    acc_en = 0;
    chk(acc, sum, "accumulator");
    op = ALU_RDACC; post = POST_RELU; #0.5;
    chk(y, ref_post(sum, POST_RELU), "RDACC with ReLU");
    acc_clr = 1; @(negedge clk); acc_clr = 0;
    chk(acc, 0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
