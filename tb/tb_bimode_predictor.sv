// tb_bimode_predictor: self-checking test of the Bi-Mode predictor.
//
// A stream of random branches (a pool of PCs with per-PC biases) is predicted
// and trained one per clock, with random selective wipes mixed in, some on the
// same clock as a training update. Each cycle the prediction, the history
// handed out, the direction-change vector and the update-flip flag are
// compared with the untimed model in csaf_ref_pkg. Runs at the default
// 128-entry size.
module tb_bimode_predictor;
  import csaf_pkg::*;
  import csaf_ref_pkg::*;

  localparam int unsigned N  = 128;
  localparam int unsigned NE = 2 * N;
  localparam int unsigned HW = $clog2(N);

  logic          clk = 1'b0;
  logic          rst_n = 1'b0;
  pc_t           pred_pc, upd_pc;
  logic          pred_taken, upd_valid, upd_taken, wipe_en, upd_flip;
  logic [HW-1:0] pred_ghr, upd_ghr;
  logic [NE-1:0] wipe_mask, flip_vec;

  int checks = 0, failures = 0;

  bimode_predictor #(.DIR_ENTRIES(N), .CHOICE_ENTRIES(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  bimode_ref m;
  int unsigned pcs[64];
  int          bias[64];
  int          n_flips = 0, n_wipe_flips = 0, n_wipes = 0;

  initial begin
    m = new(N, N);
    foreach (pcs[i]) begin
      pcs[i]  = $urandom & 32'h0000_fffc;
      bias[i] = $urandom_range(0, 100);
    end
    upd_valid = 0; upd_taken = 0; upd_pc = '0; upd_ghr = '0;
    wipe_en = 0; wipe_mask = '0; pred_pc = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 40000; it++) begin
      int k, e;
      bit t, exp_flip;
      bit exp_vec[NE];
      bit prev_dir[NE];
      @(negedge clk);
      k = $urandom_range(0, 63);
      t = ($urandom_range(0, 99) < bias[k]);
      pred_pc = pcs[k];
      #1;
      check(pred_taken == m.predict(pcs[k]), "prediction");
      check(pred_ghr == HW'(m.ghr), "history");
      // drive an update with that prediction's history, maybe a wipe too
      upd_valid = ($urandom_range(0, 9) != 0);
      upd_pc    = pcs[k];
      upd_ghr   = pred_ghr;
      upd_taken = t;
      wipe_en   = ($urandom_range(0, 49) == 0);
      for (int i = 0; i < NE; i++) wipe_mask[i] = ($urandom_range(0, 3) == 0);
      for (int i = 0; i < NE; i++) prev_dir[i] = m.dir(i);
      exp_flip = 0;
      if (upd_valid) exp_flip = m.update(pcs[k], int'(upd_ghr), t, e);
      if (wipe_en) begin
        n_wipes++;
        for (int i = 0; i < NE; i++) if (wipe_mask[i]) m.wipe_one(i);
      end
      #1;
      check(upd_flip == exp_flip, "upd_flip");
      if (exp_flip) n_flips++;
      for (int i = 0; i < NE; i++) begin
        exp_vec[i] = prev_dir[i] ^ m.dir(i);
        if (wipe_en && exp_vec[i]) n_wipe_flips++;
        if (flip_vec[i] != exp_vec[i]) begin
          check(0, $sformatf("flip_vec[%0d]", i));
          break;
        end
      end
      checks++;
    end
    @(negedge clk);
    upd_valid = 0; wipe_en = 0;
    check(n_flips > 100 && n_wipes > 100 && n_wipe_flips > 10, "coverage of flips and wipes");
    $display("flips=%0d wipes=%0d wipe_flips=%0d", n_flips, n_wipes, n_wipe_flips);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
