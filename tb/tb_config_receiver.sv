// tb_config_receiver: checks downlink parsing and atomic configuration commit.
//
//   1. After reset every factor is 1 and every threshold the default.
//   2. A good configuration frame does not change the active configuration
//      until round_end; then commit pulses once and the new values (factor 0
//      read as 1, factors above 15 clipped to 15) are active.
//   3. A frame with a wrong checksum, a frame cut short by frame_end and an
//      unknown opcode are rejected and counted; the last good configuration
//      stays active.
//   4. A mode frame switches calibration mode at the next round_end.
//   5. Random sequences of good, corrupted and cut configuration frames,
//      good and corrupted mode frames, unknown opcodes, idle bytes, stray
//      frame ends and round boundaries (also in the middle of frames) are
//      checked against a model: at every boundary, commit must pulse exactly
//      when a complete good configuration is pending, and the active factors,
//      thresholds, mode and both counters must match the model.
module tb_config_receiver;
  import hs_pkg::*;

  logic clk = 0, rst_n = 0, rx_valid = 0, frame_end = 0, round_end = 0, commit, calib;
  logic [7:0] rx_byte;
  logic [NUM_CH-1:0][DS_W-1:0] ds;
  th_t [NUM_CH-1:0] th;
  logic [15:0] cfg_cnt, err_cnt;
  int checks = 0, failures = 0;
  logic [NUM_CH-1:0][DS_W-1:0] exp_ds;
  th_t [NUM_CH-1:0] exp_th;

  always #5 clk = ~clk;

  config_receiver #(.TH_DEFAULT(-1024)) dut (.clk, .rst_n, .rx_valid, .rx_byte, .frame_end, .round_end,
    .commit, .ds_factor(ds), .th, .calib_mode(calib), .cfg_cnt, .err_cnt);

  task automatic send(input logic [7:0] b);
    @(negedge clk);
    rx_valid = 1; rx_byte = b;
    @(negedge clk);
    rx_valid = 0;
    repeat (2) @(negedge clk);
  endtask

  task automatic end_frame();
    @(negedge clk); frame_end = 1;
    @(negedge clk); frame_end = 0;
  endtask

  task automatic boundary(output bit saw_commit);
    @(negedge clk); round_end = 1;
    #1 saw_commit = commit;
    @(negedge clk); round_end = 0;
  endtask

  task automatic check_active(input string what);
    checks++;
    if (ds != exp_ds || th != exp_th) begin
      failures++; $display("FAIL %s: active configuration differs", what);
    end
  endtask

  // Sends a configuration frame; returns the expected active values.
  task automatic send_config(input bit corrupt, input int cut_at);
    logic [7:0] chk, b;
    int n;
    send(DL_SYNC);
    send(OP_CONFIG);
    chk = OP_CONFIG;
    n = 0;
    for (int i = 0; i < NUM_CH; i++) begin
      logic [7:0] f;
      logic [15:0] t;
      f = 8'($urandom_range(0, 20));
      t = 16'($urandom);
      if (!corrupt && cut_at < 0) begin
        exp_ds[i] = (f == 0) ? 4'd1 : (f > 15) ? 4'd15 : 4'(f);
        exp_th[i] = t;
      end
      for (int k = 0; k < 3; k++) begin
        b = (k == 0) ? f : (k == 1) ? t[15:8] : t[7:0];
        if (n == cut_at) begin end_frame(); return; end
        send(b);
        chk ^= b;
        n++;
      end
    end
    send(corrupt ? ~chk : chk);
  endtask

  // ---------------------------------------------------------------------
  // Model for the random phase
  logic [NUM_CH-1:0][DS_W-1:0] sh_ds;
  th_t [NUM_CH-1:0] sh_th;
  bit  pend_cfg = 0, pend_mode = 0, mode_val = 0, exp_calib = 0;
  int  exp_cfg = 0, exp_err = 0;

  task automatic boundary_model();
    bit c;
    boundary(c);
    checks++;
    if (c != pend_cfg) begin
      failures++; $display("FAIL random: commit %0b, expected %0b", c, pend_cfg);
    end
    if (pend_cfg) begin
      exp_ds = sh_ds; exp_th = sh_th; exp_cfg++; pend_cfg = 0;
    end
    if (pend_mode) begin
      exp_calib = mode_val; pend_mode = 0;
    end
    @(negedge clk);
    check_active("random");
    checks++;
    if (calib != exp_calib || cfg_cnt != 16'(exp_cfg) || err_cnt != 16'(exp_err)) begin
      failures++;
      $display("FAIL random: calib %0b/%0b cfg_cnt %0d/%0d err_cnt %0d/%0d",
               calib, exp_calib, cfg_cnt, exp_cfg, err_cnt, exp_err);
    end
  endtask

  // kind 0: good, 1: wrong checksum, 2: cut short.  mid >= 0 puts a round
  // boundary before byte mid of the payload.
  task automatic rnd_config(input int kind, input int mid);
    logic [7:0] chk, b;
    int n, cut_at;
    cut_at = (kind == 2) ? int'($urandom_range(0, 3 * NUM_CH - 1)) : -1;
    send(DL_SYNC);
    send(OP_CONFIG);
    pend_cfg = 0;
    chk = OP_CONFIG;
    n = 0;
    for (int i = 0; i < NUM_CH; i++) begin
      logic [7:0] f;
      logic [15:0] t;
      f = 8'($urandom_range(0, 20));
      t = 16'($urandom);
      sh_ds[i] = (f == 0) ? 4'd1 : (f > 15) ? 4'd15 : 4'(f);
      sh_th[i] = t;
      for (int k = 0; k < 3; k++) begin
        b = (k == 0) ? f : (k == 1) ? t[15:8] : t[7:0];
        if (n == mid) boundary_model();
        if (n == cut_at) begin end_frame(); exp_err++; return; end
        send(b);
        chk ^= b;
        n++;
      end
    end
    send(kind == 1 ? ~chk : chk);
    if (kind == 1) exp_err++;
    else pend_cfg = 1;
  endtask

  task automatic rnd_mode(input bit bad);
    logic [7:0] m;
    m = 8'($urandom_range(0, 1));
    // a corrupted frame carries the opposite of any pending value, so that
    // applying it would show
    if (bad && pend_mode) m = 8'(!mode_val);
    send(DL_SYNC);
    send(OP_MODE);
    pend_mode = 0;
    send(m);
    send(bad ? ~(OP_MODE ^ m) : (OP_MODE ^ m));
    if (bad) exp_err++;
    else begin pend_mode = 1; mode_val = m[0]; end
  endtask

  task automatic random_phase(input int n_ops);
    exp_cfg = int'(cfg_cnt); exp_err = int'(err_cnt); exp_calib = calib;
    for (int it = 0; it < n_ops; it++) begin
      case ($urandom_range(0, 9))
        0, 1, 2: rnd_config(0, ($urandom_range(0, 3) == 0) ? int'($urandom_range(0, 3 * NUM_CH - 1)) : -1);
        3:       rnd_config(1, -1);
        4:       rnd_config(2, -1);
        5:       rnd_mode(0);
        6:       rnd_mode(1);
        7: begin                                       // unknown opcode
          send(DL_SYNC);
          send(8'($urandom_range(3, 255)));
          exp_err++;
        end
        8: begin                                       // idle bytes, stray frame end
          repeat ($urandom_range(1, 4)) begin
            logic [7:0] g;
            g = 8'($urandom);
            if (g == DL_SYNC) g = 8'h00;
            send(g);
          end
          end_frame();
        end
        default: ;
      endcase
      if ($urandom_range(0, 2) == 0) boundary_model();
    end
    boundary_model();
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit c;
    rx_byte = 0;
    for (int i = 0; i < NUM_CH; i++) begin exp_ds[i] = 1; exp_th[i] = -1024; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check_active("reset");
    // 2. good frame
    send(8'h00); send(8'h37);              // idle bytes are ignored
    send_config(0, -1);
    checks++;
    if (ds == exp_ds) begin failures++; $display("FAIL applied before round end"); end
    boundary(c);
    checks++;
    if (!c) begin failures++; $display("FAIL no commit at round end"); end
    @(negedge clk);
    check_active("after commit");
    boundary(c);
    checks++;
    if (c || cfg_cnt != 1) begin failures++; $display("FAIL second commit / cfg_cnt %0d", cfg_cnt); end
    // 3. rejected frames
    send_config(1, -1);
    boundary(c);
    @(negedge clk);
    check_active("bad checksum");
    send_config(0, 40);
    boundary(c);
    @(negedge clk);
    check_active("cut frame");
    send(DL_SYNC); send(8'h7E);
    checks++;
    if (err_cnt != 3 || cfg_cnt != 1) begin failures++; $display("FAIL err_cnt %0d cfg_cnt %0d", err_cnt, cfg_cnt); end
    // a second good frame still works after the errors
    send_config(0, -1);
    boundary(c);
    @(negedge clk);
    check_active("second good frame");
    // 4. mode
    send(DL_SYNC); send(OP_MODE); send(8'h01); send(OP_MODE ^ 8'h01);
    checks++;
    if (calib) begin failures++; $display("FAIL mode before round end"); end
    boundary(c);
    @(negedge clk);
    checks++;
    if (!calib || c) begin failures++; $display("FAIL calibration mode not set (commit %0b)", c); end
    send(DL_SYNC); send(OP_MODE); send(8'h00); send(OP_MODE);
    boundary(c);
    @(negedge clk);
    checks++;
    if (calib) begin failures++; $display("FAIL calibration mode not cleared"); end
    // 5. random sequences
    random_phase(400);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
