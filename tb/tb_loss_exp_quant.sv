// tb_loss_exp_quant: checks the power-of-two loss quantizer. For random
// losses of every magnitude it compares the shift amount with
// floor(log2(loss)) found by a loop of halvings, and checks the zero flag.
module tb_loss_exp_quant;
  import es_pkg::*;

  logic [ACC_W-1:0]   loss;
  logic [SHAMT_W-1:0] shamt;
  logic               zero;
  int checks = 0, failures = 0;

  loss_exp_quant dut (.loss, .shamt, .zero);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [ACC_W-1:0] v);
    int e;
    logic [ACC_W-1:0] t;
    loss = v; #1;
    e = 0; t = v;
    while (t > 1) begin t = t / 2; e++; end
    checks++;
    if (zero !== (v == 0)) begin failures++; $display("zero flag wrong for %0d", v); end
    if (v != 0) begin
      checks++;
      if (int'(shamt) != e) begin failures++; $display("loss %0d: shamt %0d expected %0d", v, shamt, e); end
    end
  endtask

  initial begin
    check('0);
    check(32'd1);
    check(32'hFFFF_FFFF);
    for (int b = 0; b < ACC_W; b++) begin
      check(ACC_W'(1) << b);
      check((ACC_W'(1) << b) | ACC_W'($urandom()) & ((ACC_W'(1) << b) - 1));
    end
    repeat (500) check(ACC_W'($urandom()) >> $urandom_range(0, 31));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
