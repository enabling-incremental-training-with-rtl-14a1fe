// tb_es_controller: checks the ES training scheduler with N_POP = 3,
// K_ITER = 2, M_IMAGES = 4 and 3 weight groups. The test plays the rest of
// the datapath: it counts accepted training images and raises 'loss_done'
// two cycles after the M-th one, as the layer plus loss accumulator do.
// Run 1 has no stalls and checks the exact cycle count
// 1 + K*G*(N*(M+4) + 1). Run 2 adds random inference requests, missing
// training data and pauses of the Training signal, and checks that a pause
// freezes the controller, that no image is issued together with an
// inference pass, and that the loop counts (images, draws, gradient steps,
// updates and the group order of the updates) are exactly those of the
// algorithm.
module tb_es_controller;
  import es_pkg::*;

  localparam int NP = 3, KI = 2, MI = 4, NG = 3;

  logic clk = 1'b0;
  logic rst_n, train_en, infer_valid, train_valid, loss_done;
  logic train_ready, draw, loss_clear, grad_acc, update, training, busy, done;
  logic [31:0] img_idx, pop, iter;
  logic [1:0] group;
  es_state_e state;
  int checks = 0, failures = 0;

  es_controller #(.N_POP(NP), .K_ITER(KI), .M_IMAGES(MI), .N_GROUPS(NG)) dut (
    .clk, .rst_n, .train_en, .infer_valid, .train_valid, .loss_done,
    .train_ready, .img_idx, .draw, .loss_clear, .grad_acc, .update, .group,
    .pop, .iter, .training, .busy, .done, .state
  );

  always #5 clk = ~clk;

  // datapath stand-in: two-cycle loss latency
  logic fire_d;
  int   loss_cnt;
  always_ff @(posedge clk) begin
    if (!rst_n) begin fire_d <= 0; loss_cnt <= 0; end
    else begin
      fire_d <= train_ready && train_valid;
      if (loss_clear) loss_cnt <= 0;
      else if (fire_d) loss_cnt <= loss_cnt + 1;
    end
  end
  assign loss_done = (loss_cnt == MI);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_issue, n_draw, n_grad, n_upd, n_pause, n_collide_req, upd_seq;
  bit random_mode;

  always @(posedge clk) if (rst_n) begin
    if (train_ready && train_valid) begin
      n_issue++;
      if (int'(img_idx) != (n_issue - 1) % MI) begin failures++; $display("img_idx %0d", img_idx); end
    end
    if (train_ready && infer_valid) begin failures++; $display("issued during inference"); end
    if (infer_valid && busy && state == ST_EVAL) n_collide_req++;
    if (draw) n_draw++;
    if (grad_acc) n_grad++;
    if (update) begin
      if (int'(group) != upd_seq % NG) begin failures++; $display("update of group %0d, expected %0d", group, upd_seq % NG); end
      upd_seq++;
      n_upd++;
    end
    if (!train_en && busy) begin
      n_pause++;
      if (draw || grad_acc || update || train_ready) begin failures++; $display("activity while paused"); end
    end
  end

  task automatic run(input bit rnd, output int cycles);
    es_state_e s_before;
    random_mode = rnd;
    cycles = 0;
    n_issue = 0; n_draw = 0; n_grad = 0; n_upd = 0; upd_seq = 0;
    train_en = 1;
    while (!done) begin
      if (rnd) begin
        infer_valid = ($urandom_range(0, 3) == 0);
        train_valid = ($urandom_range(0, 4) != 0);
        train_en    = ($urandom_range(0, 9) != 0);
      end else begin
        infer_valid = 0; train_valid = 1; train_en = 1;
      end
      s_before = state;
      @(posedge clk); #1;
      cycles++;
      if (!train_en && s_before != ST_IDLE && s_before != ST_DONE) begin
        checks++;
        if (state != s_before) begin failures++; $display("state moved during pause"); end
      end
    end
    train_en = 1;
    checks++; if (n_issue != KI * NG * NP * MI) begin failures++; $display("issues %0d", n_issue); end
    checks++; if (n_draw  != KI * NG * NP)      begin failures++; $display("draws %0d", n_draw); end
    checks++; if (n_grad  != KI * NG * NP)      begin failures++; $display("grads %0d", n_grad); end
    checks++; if (n_upd   != KI * NG)           begin failures++; $display("updates %0d", n_upd); end
    checks++; if (int'(iter) != KI)             begin failures++; $display("iter %0d", iter); end
    // done holds while train_en stays high, then returns to idle
    repeat (3) @(posedge clk);
    #1 checks++; if (!done) begin failures++; $display("done dropped"); end
    train_en = 0;
    @(posedge clk); #1;
    checks++; if (state != ST_IDLE) begin failures++; $display("not idle after done"); end
  endtask

  initial begin
    int cycles;
    rst_n = 0; train_en = 0; infer_valid = 0; train_valid = 0;
    n_pause = 0; n_collide_req = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    checks++; if (state != ST_IDLE || busy || done) begin failures++; $display("not idle after reset"); end
    run(0, cycles);
    checks++;
    if (cycles != 1 + KI * NG * (NP * (MI + 4) + 1)) begin
      failures++; $display("cycles %0d expected %0d", cycles, 1 + KI * NG * (NP * (MI + 4) + 1));
    end
    run(1, cycles);
    checks++; if (n_pause == 0)       begin failures++; $display("no pause exercised"); end
    checks++; if (n_collide_req == 0) begin failures++; $display("no inference during training"); end
    $display("no-stall cycles ok, pauses=%0d inference-preemptions=%0d", n_pause, n_collide_req);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
