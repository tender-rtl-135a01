// tb_pe: self-checking test of one processing element.
// Drives random 4-bit operands (signed and unsigned), rescale steps, clear and
// drain, and compares the accumulator and the forwarded outputs with a
// reference model kept in the testbench.
module tb_pe;
  import tender_pkg::*;
  logic clk = 0, rst_n = 0;
  logic clear, drain, in_uns, w_uns, rescale_i;
  logic [3:0] in_i, w_i, in_o, w_o;
  logic rescale_o;
  logic [31:0] acc_i, acc_o;
  int checks = 0, failures = 0;

  pe dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sx(logic [3:0] v, logic uns);
    return uns ? int'(v) : int'(signed'(v));
  endfunction

  logic [31:0] model;
  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got %0d exp %0d", what, $signed(got), $signed(exp));
    end
  endtask

  initial begin
    {clear, drain, in_uns, w_uns, rescale_i, in_i, w_i, acc_i} = '0;
    model = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk("reset", acc_o, 0);
    for (int n = 0; n < 600; n++) begin
      int r;
      r = $urandom_range(0, 99);
      clear = (r < 3);
      drain = (r >= 3 && r < 6);
      rescale_i = (r >= 6 && r < 16);
      in_uns = 1'($urandom_range(0, 1));
      w_uns  = 1'($urandom_range(0, 1));
      in_i = 4'($urandom); w_i = 4'($urandom); acc_i = $urandom;
      @(posedge clk);
      if (clear) model = 0;
      else if (drain) model = acc_i;
      else if (rescale_i) model = model << 1;
      else model = model + 32'(sx(in_i, in_uns) * sx(w_i, w_uns));
      @(negedge clk);
      chk("acc", acc_o, model);
      chk("fwd_in", {28'd0, in_o}, {28'd0, in_i});
      chk("fwd_w", {28'd0, w_o}, {28'd0, w_i});
      chk("fwd_rs", {31'd0, rescale_o}, {31'd0, rescale_i});
    end
    // explicit case: -8 * -8 signed = 64, 15 * 15 unsigned = 225, then shift
    clear = 1; drain = 0; rescale_i = 0;
    @(negedge clk); clear = 0; in_i = 4'h8; w_i = 4'h8; in_uns = 0; w_uns = 0;
    @(negedge clk); in_i = 4'hf; w_i = 4'hf; in_uns = 1; w_uns = 1;
    @(negedge clk); rescale_i = 1;
    @(negedge clk); rescale_i = 0; in_i = 0; w_i = 0;
    chk("explicit", acc_o, (64 + 225) * 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
