// es_top_tb_body.svh: body shared by the end-to-end testbenches of
// es_train_top. The including module defines NI, NO, PB, NPOP, KIT, MIM (the
// top's sizes), SIGMA_SHIFT and GRAD_SHIFT (the two
// programmable shifts), LOAD_WEIGHTS (load pre-trained weights or start from 0), RUNS (number of training runs; run 0 has no stalls, later
// runs add random inference traffic, data gaps and pauses), ITERS_CHECKED
// (how many iterations of each run are simulated; KIT for a whole run) and
// instantiates the top as 'dut' on the signals declared here.
//
// A reference (es_ref_pkg) is kept in lockstep with the design: it draws its
// own noise, computes each population member's loss over the training set,
// the gradient sums and the weight updates, and predicts every inference
// result. The design's losses, weights and inference outputs are compared
// with it, the loop counts with the algorithm's, and the cycle count of an
// unstalled run with 1 + K*G*(N*(M+4)+1).

  import es_pkg::*;
  import es_ref_pkg::*;

  localparam int WW = NI * NO;
  localparam int NG = (WW + PB - 1) / PB;
  localparam int AWT = (WW > 1) ? $clog2(WW) : 1;
  localparam int GWT = (NG > 1) ? $clog2(NG) : 1;

  logic clk = 1'b0;
  logic rst_n;
  logic load_en;
  logic [AWT-1:0] load_addr;
  logic signed [WEIGHT_W-1:0] load_data;
  logic train_en;
  logic [SHAMT_W-1:0] sigma_shift, grad_shift;
  logic infer_valid;
  logic [ACT_W-1:0] infer_x [NI];
  logic infer_out_valid;
  logic [ACT_W-1:0] infer_y [NO];
  logic train_ready;
  logic [31:0] train_img_idx;
  logic train_valid;
  logic [ACT_W-1:0] train_x [NI];
  logic [ACT_W-1:0] train_y [NO];
  logic busy, done;
  logic [31:0] iter, pop;
  logic [GWT-1:0] group;
  logic [ACC_W-1:0] last_loss;
  logic signed [WEIGHT_W-1:0] weights [WW];

  int checks = 0, failures = 0;
  bit stalls = 0;

  always #5 clk = ~clk;

  // training-data source model: answers the requested index at once
  always_comb begin
    for (int i = 0; i < NI; i++) train_x[i] = ACT_W'(img_x(int'(train_img_idx), i));
    for (int o = 0; o < NO; o++) train_y[o] = ACT_W'(img_y(int'(train_img_idx), o, NI));
  end

  // ------------------------------------------------------------ reference
  longint ref_w [WW];
  longint ref_eps [PB];
  longint ref_acc [PB];
  logic [7:0] ref_gen [PB];
  int ref_group = 0;
  longint exp_loss;
  bit pend_loss = 0, pend_w = 0, pend_inf = 0;
  int exp_inf [NO];
  int n_passes = 0, n_infer_mid = 0, n_pause = 0, n_data_gap = 0;
  int n_update = 0, n_iter_done = 0, n_member = 0, n_moved = 0;

  function automatic int ref_layer(input int x [NI], input int o, input bit pert);
    int s;
    s = 0;
    for (int i = 0; i < NI; i++) begin
      int j;
      longint th;
      j = o * NI + i;
      th = ref_w[j];
      if (pert && (j / PB == ref_group)) th = sat(ref_w[j] + floor_shift(ref_eps[j % PB], SIGMA_SHIFT), 12);
      s += x[i] * int'(th);
    end
    return layer_out(s);
  endfunction

  function automatic longint ref_member_loss();
    longint l;
    int x [NI];
    l = 0;
    for (int m = 0; m < MIM; m++) begin
      for (int i = 0; i < NI; i++) x[i] = img_x(m, i);
      for (int o = 0; o < NO; o++) begin
        int d;
        d = ref_layer(x, o, 1'b1) - img_y(m, o, NI);
        l += (d < 0) ? -d : d;
      end
    end
    return l;
  endfunction

  always @(negedge clk) if (rst_n) begin
    // results of the previous cycle
    if (pend_loss) begin
      checks++;
      if (longint'(last_loss) != exp_loss) begin
        failures++; $display("member %0d: loss %0d expected %0d", n_member, last_loss, exp_loss);
      end
      pend_loss = 0;
    end
    if (pend_w) begin
      for (int j = 0; j < WW; j++) begin
        checks++;
        if (longint'(weights[j]) != ref_w[j]) begin
          failures++; $display("update %0d: w[%0d]=%0d expected %0d", n_update, j, weights[j], ref_w[j]);
        end
      end
      pend_w = 0;
    end
    if (pend_inf) begin
      checks++;
      if (!infer_out_valid) begin failures++; $display("inference result missing"); end
      for (int o = 0; o < NO; o++) begin
        checks++;
        if (int'(infer_y[o]) != exp_inf[o]) begin failures++; $display("inference y[%0d]=%0d expected %0d", o, infer_y[o], exp_inf[o]); end
      end
      pend_inf = 0;
    end else if (infer_out_valid) begin
      failures++; $display("unexpected inference result");
    end
    // this cycle
    if (infer_valid) begin
      int x [NI];
      for (int i = 0; i < NI; i++) x[i] = int'(infer_x[i]);
      for (int o = 0; o < NO; o++) exp_inf[o] = ref_layer(x, o, 1'b0);
      pend_inf = 1;
      if (busy) n_infer_mid++;
    end
    if (train_ready && train_valid) n_passes++;
    if (train_ready && !train_valid) n_data_gap++;
    if (!train_en && busy) n_pause++;
    if (dut.u_ctrl.draw) begin
      for (int b = 0; b < PB; b++) begin
        ref_eps[b] = longint'($signed(ref_gen[b]));
        ref_gen[b] = lfsr_next(ref_gen[b]);
      end
    end
    if (dut.u_ctrl.grad_acc) begin
      exp_loss = ref_member_loss();
      for (int b = 0; b < PB; b++) ref_acc[b] = sat(ref_acc[b] + ref_eps[b] * fitness(exp_loss), 32);
      pend_loss = 1;
      n_member++;
    end
    if (dut.u_ctrl.update) begin
      for (int j = 0; j < WW; j++)
        if (j / PB == ref_group) begin
          longint nw;
          nw = sat(ref_w[j] + floor_shift(ref_acc[j % PB], GRAD_SHIFT), 12);
          if (nw != ref_w[j]) n_moved++;
          ref_w[j] = nw;
        end
      for (int b = 0; b < PB; b++) ref_acc[b] = 0;
      ref_group = (ref_group + 1) % NG;
      if (ref_group == 0) n_iter_done++;
      n_update++;
      pend_w = 1;
    end
  end

  // stimulus: inference traffic, data gaps and pauses only when 'stalls'
  always @(posedge clk) begin
    #1;
    if (stalls) begin
      infer_valid <= ($urandom_range(0, 4) == 0);
      for (int i = 0; i < NI; i++) infer_x[i] <= ACT_W'($urandom());
      train_valid <= ($urandom_range(0, 5) != 0);
      if ($urandom_range(0, 200) == 0) train_en <= ~train_en;
      else if (!train_en && $urandom_range(0, 8) == 0) train_en <= 1'b1;
    end
  end

  initial begin
    int cycles, it0, pass0, member0;
    rst_n = 0; load_en = 0; load_addr = 0; load_data = 0; train_en = 0;
    sigma_shift = SHAMT_W'(SIGMA_SHIFT); grad_shift = SHAMT_W'(GRAD_SHIFT);
    infer_valid = 0; train_valid = 0;
    for (int i = 0; i < NI; i++) infer_x[i] = 0;
    for (int b = 0; b < PB; b++) begin
      ref_gen[b] = 8'(((165 + 37 * b) % 255) + 1);
      ref_acc[b] = 0; ref_eps[b] = 0;
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // pre-trained weights: the true layer, disturbed (LOAD_WEIGHTS = 0 keeps
    // the reset value 0 in every weight)
    for (int j = 0; j < WW; j++) ref_w[j] = 0;
    for (int j = 0; j < (LOAD_WEIGHTS ? WW : 0); j++) begin
      load_en = 1; load_addr = AWT'(j);
      load_data = WEIGHT_W'(true_w(j / NI, j % NI) + ((j % 2) ? 90 : -70));
      ref_w[j] = longint'(load_data);
      @(posedge clk); #1;
    end
    load_en = 0;
    // inference before training
    infer_valid = 1; infer_x[0] = 4'd9; infer_x[NI-1] = 4'd7;
    @(posedge clk); #1 infer_valid = 0;
    @(posedge clk); #1;
    for (int r = 0; r < RUNS; r++) begin
      stalls = (r > 0);
      it0 = n_iter_done; pass0 = n_passes; member0 = n_member;
      train_en = 1; train_valid = 1;
      cycles = 0;
      while (!done && (n_iter_done - it0) < ITERS_CHECKED) begin
        @(posedge clk); #2; cycles++;
        if (stalls && !train_en && $urandom_range(0, 30) == 0) train_en = 1;
      end
      stalls = 0; #1;
      infer_valid = 0; train_valid = 1;
      checks++;
      if (n_passes - pass0 != ITERS_CHECKED * NG * NPOP * MIM) begin
        failures++; $display("run %0d: %0d training passes, expected %0d", r, n_passes - pass0, ITERS_CHECKED * NG * NPOP * MIM);
      end
      checks++;
      if (n_member - member0 != ITERS_CHECKED * NG * NPOP) begin
        failures++; $display("run %0d: %0d members, expected %0d", r, n_member - member0, ITERS_CHECKED * NG * NPOP);
      end
      if (r == 0 && ITERS_CHECKED == KIT) begin
        checks++;
        if (cycles != 1 + KIT * NG * (NPOP * (MIM + 4) + 1)) begin
          failures++; $display("cycles %0d expected %0d", cycles, 1 + KIT * NG * (NPOP * (MIM + 4) + 1));
        end
        checks++; if (!done) begin failures++; $display("done not raised"); end
      end
      $display("run %0d: %0d cycles, %0d training passes, %0d members, loss of last member %0d",
               r, cycles, n_passes - pass0, n_member - member0, last_loss);
      repeat (2) @(posedge clk);
      train_en = 0;
      repeat (2) @(posedge clk); #1;
      checks++; if (busy && ITERS_CHECKED == KIT) begin failures++; $display("still busy"); end
    end
    // inference after training
    infer_valid = 1; infer_x[0] = 4'd15; infer_x[NI-1] = 4'd3;
    @(posedge clk); #1 infer_valid = 0;
    repeat (2) @(posedge clk);
    for (int j = 0; j < WW; j++) $display("w[%0d] = %0d", j, weights[j]);
    $display("mechanisms: weights-moved=%0d updates=%0d iterations=%0d inference-during-training=%0d pause-cycles=%0d data-gaps=%0d",
             n_moved, n_update, n_iter_done, n_infer_mid, n_pause, n_data_gap);
    checks++; if (n_moved == 0) begin failures++; $display("no weight ever changed"); end
    checks++; if (n_update == 0) begin failures++; $display("no weight update happened"); end
    checks++; if (n_iter_done == 0) begin failures++; $display("no iteration completed"); end
    if (RUNS > 1) begin
      checks++; if (n_infer_mid == 0) begin failures++; $display("no inference interleaved with training"); end
      checks++; if (n_pause == 0) begin failures++; $display("training was never paused"); end
      checks++; if (n_data_gap == 0) begin failures++; $display("no training-data gap"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
