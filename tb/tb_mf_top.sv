// tb_mf_top: end-to-end testbench of mf_top at its default parameters.
//
// All five units (M = 3, 5, 7, 9, 11) run at once for CYCLES clock cycles.
// Every cycle each unit gets, at random, a new set of taps (w_load), a new
// window (x_valid) or nothing; a reference model keeps the taps each unit
// holds and predicts y_valid and y0/y1 = sum_i w_i x_(i+j) for the next cycle,
// and all outputs are checked every cycle (results hold while no window
// arrives). A reset in the middle of the run checks that the taps are
// cleared. Each mechanism -- tap load, tap reload during streaming, window
// accepted, idle cycle, load in the same cycle as a window (which must still
// use the old taps), mid-run reset -- is counted, and one that never happened
// counts as a failure. The one-cycle latency is checked by predicting the
// outputs of exactly the next clock edge.
module tb_mf_top;
  import mf_tb_pkg::*;

  localparam int unsigned DATA_W = mf_pkg::DATA_W_DEF;
  localparam int unsigned COEF_W = mf_pkg::COEF_W_DEF;
  localparam int unsigned Y_W    = DATA_W + COEF_W + mf_pkg::Y_GROWTH;
  localparam int          CYCLES = 3000;
  localparam int          RESET_AT = 1500;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;
  logic rst_n_next;

  logic                     w3_load, x3_valid, y3_valid;
  logic signed [COEF_W-1:0] w3 [3];
  logic signed [DATA_W-1:0] x3 [4];
  logic signed [Y_W-1:0]    y3 [2];
  vec_t   cw3;            // taps currently held by the unit
  longint ey3 [2];        // expected outputs
  logic   ev3;            // expected y_valid
  logic                     w5_load, x5_valid, y5_valid;
  logic signed [COEF_W-1:0] w5 [5];
  logic signed [DATA_W-1:0] x5 [6];
  logic signed [Y_W-1:0]    y5 [2];
  vec_t   cw5;            // taps currently held by the unit
  longint ey5 [2];        // expected outputs
  logic   ev5;            // expected y_valid
  logic                     w7_load, x7_valid, y7_valid;
  logic signed [COEF_W-1:0] w7 [7];
  logic signed [DATA_W-1:0] x7 [8];
  logic signed [Y_W-1:0]    y7 [2];
  vec_t   cw7;            // taps currently held by the unit
  longint ey7 [2];        // expected outputs
  logic   ev7;            // expected y_valid
  logic                     w9_load, x9_valid, y9_valid;
  logic signed [COEF_W-1:0] w9 [9];
  logic signed [DATA_W-1:0] x9 [10];
  logic signed [Y_W-1:0]    y9 [2];
  vec_t   cw9;            // taps currently held by the unit
  longint ey9 [2];        // expected outputs
  logic   ev9;            // expected y_valid
  logic                     w11_load, x11_valid, y11_valid;
  logic signed [COEF_W-1:0] w11 [11];
  logic signed [DATA_W-1:0] x11 [12];
  logic signed [Y_W-1:0]    y11 [2];
  vec_t   cw11;            // taps currently held by the unit
  longint ey11 [2];        // expected outputs
  logic   ev11;            // expected y_valid

  mf_top dut (
    .clk, .rst_n,
    .w3_load, .w3, .x3_valid, .x3, .y3_valid, .y3,
    .w5_load, .w5, .x5_valid, .x5, .y5_valid, .y5,
    .w7_load, .w7, .x7_valid, .x7, .y7_valid, .y7,
    .w9_load, .w9, .x9_valid, .x9, .y9_valid, .y9,
    .w11_load, .w11, .x11_valid, .x11, .y11_valid, .y11
  );

  int checks = 0;
  int failures = 0;
  int cyc = 0;
  int n_load = 0, n_reload = 0, n_window = 0, n_bubble = 0, n_load_with_window = 0, n_reset = 0;

  initial begin
    repeat (CYCLES + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic need(string what, int n);
    checks++;
    $display("%-28s %0d", what, n);
    if (n == 0) begin
      failures++;
      $display("mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    logic first;
    w3_load = 1'b0; x3_valid = 1'b0; ev3 = 1'b0; ey3[0] = 0; ey3[1] = 0;
    for (int i = 0; i < 16; i++) cw3[i] = 0;
    for (int i = 0; i < 3; i++) w3[i] = '0;
    for (int i = 0; i <= 3; i++) x3[i] = '0;
    w5_load = 1'b0; x5_valid = 1'b0; ev5 = 1'b0; ey5[0] = 0; ey5[1] = 0;
    for (int i = 0; i < 16; i++) cw5[i] = 0;
    for (int i = 0; i < 5; i++) w5[i] = '0;
    for (int i = 0; i <= 5; i++) x5[i] = '0;
    w7_load = 1'b0; x7_valid = 1'b0; ev7 = 1'b0; ey7[0] = 0; ey7[1] = 0;
    for (int i = 0; i < 16; i++) cw7[i] = 0;
    for (int i = 0; i < 7; i++) w7[i] = '0;
    for (int i = 0; i <= 7; i++) x7[i] = '0;
    w9_load = 1'b0; x9_valid = 1'b0; ev9 = 1'b0; ey9[0] = 0; ey9[1] = 0;
    for (int i = 0; i < 16; i++) cw9[i] = 0;
    for (int i = 0; i < 9; i++) w9[i] = '0;
    for (int i = 0; i <= 9; i++) x9[i] = '0;
    w11_load = 1'b0; x11_valid = 1'b0; ev11 = 1'b0; ey11[0] = 0; ey11[1] = 0;
    for (int i = 0; i < 16; i++) cw11[i] = 0;
    for (int i = 0; i < 11; i++) w11[i] = '0;
    for (int i = 0; i <= 11; i++) x11[i] = '0;
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    first = 1'b1;
    for (cyc = 0; cyc < CYCLES; cyc++) begin
      rst_n_next = !(cyc == RESET_AT);
      rst_n = rst_n_next;
      if (!rst_n_next) n_reset++;
      // ---- unit M=3 ----
      begin
        vec_t wn, xv;
        logic ld, xv_ok;
        ld    = first || ($urandom_range(0, 15) == 0);
        xv_ok = !first && ($urandom_range(0, 3) != 0);
        for (int i = 0; i < 16; i++) begin
          wn[i] = (i < 3) ? rand_sample(COEF_W) : 0;
          xv[i] = (i <= 3) ? rand_sample(DATA_W) : 0;
        end
        w3_load = ld;
        x3_valid = xv_ok;
        for (int i = 0; i < 3; i++) w3[i] = COEF_W'(wn[i]);
        for (int i = 0; i <= 3; i++) x3[i] = DATA_W'(xv[i]);
        // model of the edge to come
        if (!rst_n_next) begin
          ev3 = 1'b0; ey3[0] = 0; ey3[1] = 0;
          for (int i = 0; i < 16; i++) cw3[i] = 0;
        end else begin
          ev3 = xv_ok;
          if (xv_ok) begin
            ey3[0] = naive_y(3, cw3, xv, 0);
            ey3[1] = naive_y(3, cw3, xv, 1);
            n_window++;
            if (ld) n_load_with_window++;
          end else begin
            n_bubble++;
          end
          if (ld) begin
            cw3 = wn;
            n_load++;
            if (!first) n_reload++;
          end
        end
      end
      // ---- unit M=5 ----
      begin
        vec_t wn, xv;
        logic ld, xv_ok;
        ld    = first || ($urandom_range(0, 15) == 0);
        xv_ok = !first && ($urandom_range(0, 3) != 0);
        for (int i = 0; i < 16; i++) begin
          wn[i] = (i < 5) ? rand_sample(COEF_W) : 0;
          xv[i] = (i <= 5) ? rand_sample(DATA_W) : 0;
        end
        w5_load = ld;
        x5_valid = xv_ok;
        for (int i = 0; i < 5; i++) w5[i] = COEF_W'(wn[i]);
        for (int i = 0; i <= 5; i++) x5[i] = DATA_W'(xv[i]);
        // model of the edge to come
        if (!rst_n_next) begin
          ev5 = 1'b0; ey5[0] = 0; ey5[1] = 0;
          for (int i = 0; i < 16; i++) cw5[i] = 0;
        end else begin
          ev5 = xv_ok;
          if (xv_ok) begin
            ey5[0] = naive_y(5, cw5, xv, 0);
            ey5[1] = naive_y(5, cw5, xv, 1);
            n_window++;
            if (ld) n_load_with_window++;
          end else begin
            n_bubble++;
          end
          if (ld) begin
            cw5 = wn;
            n_load++;
            if (!first) n_reload++;
          end
        end
      end
      // ---- unit M=7 ----
      begin
        vec_t wn, xv;
        logic ld, xv_ok;
        ld    = first || ($urandom_range(0, 15) == 0);
        xv_ok = !first && ($urandom_range(0, 3) != 0);
        for (int i = 0; i < 16; i++) begin
          wn[i] = (i < 7) ? rand_sample(COEF_W) : 0;
          xv[i] = (i <= 7) ? rand_sample(DATA_W) : 0;
        end
        w7_load = ld;
        x7_valid = xv_ok;
        for (int i = 0; i < 7; i++) w7[i] = COEF_W'(wn[i]);
        for (int i = 0; i <= 7; i++) x7[i] = DATA_W'(xv[i]);
        // model of the edge to come
        if (!rst_n_next) begin
          ev7 = 1'b0; ey7[0] = 0; ey7[1] = 0;
          for (int i = 0; i < 16; i++) cw7[i] = 0;
        end else begin
          ev7 = xv_ok;
          if (xv_ok) begin
            ey7[0] = naive_y(7, cw7, xv, 0);
            ey7[1] = naive_y(7, cw7, xv, 1);
            n_window++;
            if (ld) n_load_with_window++;
          end else begin
            n_bubble++;
          end
          if (ld) begin
            cw7 = wn;
            n_load++;
            if (!first) n_reload++;
          end
        end
      end
      // ---- unit M=9 ----
      begin
        vec_t wn, xv;
        logic ld, xv_ok;
        ld    = first || ($urandom_range(0, 15) == 0);
        xv_ok = !first && ($urandom_range(0, 3) != 0);
        for (int i = 0; i < 16; i++) begin
          wn[i] = (i < 9) ? rand_sample(COEF_W) : 0;
          xv[i] = (i <= 9) ? rand_sample(DATA_W) : 0;
        end
        w9_load = ld;
        x9_valid = xv_ok;
        for (int i = 0; i < 9; i++) w9[i] = COEF_W'(wn[i]);
        for (int i = 0; i <= 9; i++) x9[i] = DATA_W'(xv[i]);
        // model of the edge to come
        if (!rst_n_next) begin
          ev9 = 1'b0; ey9[0] = 0; ey9[1] = 0;
          for (int i = 0; i < 16; i++) cw9[i] = 0;
        end else begin
          ev9 = xv_ok;
          if (xv_ok) begin
            ey9[0] = naive_y(9, cw9, xv, 0);
            ey9[1] = naive_y(9, cw9, xv, 1);
            n_window++;
            if (ld) n_load_with_window++;
          end else begin
            n_bubble++;
          end
          if (ld) begin
            cw9 = wn;
            n_load++;
            if (!first) n_reload++;
          end
        end
      end
      // ---- unit M=11 ----
      begin
        vec_t wn, xv;
        logic ld, xv_ok;
        ld    = first || ($urandom_range(0, 15) == 0);
        xv_ok = !first && ($urandom_range(0, 3) != 0);
        for (int i = 0; i < 16; i++) begin
          wn[i] = (i < 11) ? rand_sample(COEF_W) : 0;
          xv[i] = (i <= 11) ? rand_sample(DATA_W) : 0;
        end
        w11_load = ld;
        x11_valid = xv_ok;
        for (int i = 0; i < 11; i++) w11[i] = COEF_W'(wn[i]);
        for (int i = 0; i <= 11; i++) x11[i] = DATA_W'(xv[i]);
        // model of the edge to come
        if (!rst_n_next) begin
          ev11 = 1'b0; ey11[0] = 0; ey11[1] = 0;
          for (int i = 0; i < 16; i++) cw11[i] = 0;
        end else begin
          ev11 = xv_ok;
          if (xv_ok) begin
            ey11[0] = naive_y(11, cw11, xv, 0);
            ey11[1] = naive_y(11, cw11, xv, 1);
            n_window++;
            if (ld) n_load_with_window++;
          end else begin
            n_bubble++;
          end
          if (ld) begin
            cw11 = wn;
            n_load++;
            if (!first) n_reload++;
          end
        end
      end
      first = (cyc == RESET_AT);  // reload taps right after the reset
      @(negedge clk);
      checks++;
      if (y3_valid !== ev3 || longint'(y3[0]) != ey3[0] || longint'(y3[1]) != ey3[1]) begin
        failures++;
        if (failures < 10)
          $display("cycle %0d M=3: valid=%0b/%0b y0=%0d/%0d y1=%0d/%0d", cyc, y3_valid, ev3,
                   y3[0], ey3[0], y3[1], ey3[1]);
      end
      checks++;
      if (y5_valid !== ev5 || longint'(y5[0]) != ey5[0] || longint'(y5[1]) != ey5[1]) begin
        failures++;
        if (failures < 10)
          $display("cycle %0d M=5: valid=%0b/%0b y0=%0d/%0d y1=%0d/%0d", cyc, y5_valid, ev5,
                   y5[0], ey5[0], y5[1], ey5[1]);
      end
      checks++;
      if (y7_valid !== ev7 || longint'(y7[0]) != ey7[0] || longint'(y7[1]) != ey7[1]) begin
        failures++;
        if (failures < 10)
          $display("cycle %0d M=7: valid=%0b/%0b y0=%0d/%0d y1=%0d/%0d", cyc, y7_valid, ev7,
                   y7[0], ey7[0], y7[1], ey7[1]);
      end
      checks++;
      if (y9_valid !== ev9 || longint'(y9[0]) != ey9[0] || longint'(y9[1]) != ey9[1]) begin
        failures++;
        if (failures < 10)
          $display("cycle %0d M=9: valid=%0b/%0b y0=%0d/%0d y1=%0d/%0d", cyc, y9_valid, ev9,
                   y9[0], ey9[0], y9[1], ey9[1]);
      end
      checks++;
      if (y11_valid !== ev11 || longint'(y11[0]) != ey11[0] || longint'(y11[1]) != ey11[1]) begin
        failures++;
        if (failures < 10)
          $display("cycle %0d M=11: valid=%0b/%0b y0=%0d/%0d y1=%0d/%0d", cyc, y11_valid, ev11,
                   y11[0], ey11[0], y11[1], ey11[1]);
      end
    end
    need("tap loads", n_load);
    need("tap reloads while streaming", n_reload);
    need("windows", n_window);
    need("idle cycles", n_bubble);
    need("load with window", n_load_with_window);
    need("mid-run resets", n_reset);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
