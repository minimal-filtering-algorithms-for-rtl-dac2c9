// tb_mf_conv1d: each unit of mf_top computes a complete 1-D convolution.
//
// A random stream x_0..x_(N-1) and one random filter per unit are drawn.
// The taps are loaded once; then the windows x_j..x_(j+M), j = 0, 2, 4, ...,
// are presented back to back, one per clock, so that every pair (y_j,
// y_(j+1)) of y_j = sum_i w_i x_(i+j), j = 0..N-M, is produced once. All
// outputs are compared with the direct sum, and the run must take one cycle
// per window (full rate, one-cycle latency).
module tb_mf_conv1d;
  import mf_tb_pkg::*;

  localparam int unsigned DATA_W = mf_pkg::DATA_W_DEF;
  localparam int unsigned COEF_W = mf_pkg::COEF_W_DEF;
  localparam int unsigned Y_W    = DATA_W + COEF_W + mf_pkg::Y_GROWTH;
  localparam int          N      = 64;   // stream length, even so N-M+1 is even

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic                     w3_load = 1'b0, x3_valid = 1'b0, y3_valid;
  logic signed [COEF_W-1:0] w3 [3];
  logic signed [DATA_W-1:0] x3 [4];
  logic signed [Y_W-1:0]    y3 [2];
  logic                     w5_load = 1'b0, x5_valid = 1'b0, y5_valid;
  logic signed [COEF_W-1:0] w5 [5];
  logic signed [DATA_W-1:0] x5 [6];
  logic signed [Y_W-1:0]    y5 [2];
  logic                     w7_load = 1'b0, x7_valid = 1'b0, y7_valid;
  logic signed [COEF_W-1:0] w7 [7];
  logic signed [DATA_W-1:0] x7 [8];
  logic signed [Y_W-1:0]    y7 [2];
  logic                     w9_load = 1'b0, x9_valid = 1'b0, y9_valid;
  logic signed [COEF_W-1:0] w9 [9];
  logic signed [DATA_W-1:0] x9 [10];
  logic signed [Y_W-1:0]    y9 [2];
  logic                     w11_load = 1'b0, x11_valid = 1'b0, y11_valid;
  logic signed [COEF_W-1:0] w11 [11];
  logic signed [DATA_W-1:0] x11 [12];
  logic signed [Y_W-1:0]    y11 [2];

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
  longint stream [N];

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) stream[i] = rand_sample(DATA_W);
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    // ---------------- M = 3 ----------------
    begin
      vec_t   wv;
      longint got [N];
      int     n_out, nwin, t0, t_last;
      for (int i = 0; i < 16; i++) wv[i] = (i < 3) ? rand_sample(COEF_W) : 0;
      @(negedge clk);
      for (int i = 0; i < 3; i++) w3[i] = COEF_W'(wv[i]);
      w3_load = 1'b1;
      @(negedge clk);
      w3_load = 1'b0;
      nwin = (N - 3 + 1) / 2;
      n_out = 0;
      t0 = cyc;
      t_last = 0;
      fork
        // producer: window j = 0, 2, 4, ... back to back, one per cycle
        begin
          for (int k = 0; k < nwin; k++) begin
            x3_valid = 1'b1;
            for (int i = 0; i <= 3; i++) x3[i] = DATA_W'(stream[2*k+i]);
            @(negedge clk);
          end
          x3_valid = 1'b0;
        end
        // consumer: collects y_(2k), y_(2k+1) in arrival order
        begin
          while (n_out < 2*nwin) begin
            @(posedge clk);
            #1;
            if (y3_valid) begin
              got[n_out]   = longint'(y3[0]);
              got[n_out+1] = longint'(y3[1]);
              n_out += 2;
              t_last = cyc;
            end
          end
        end
      join
      for (int j = 0; j < 2*nwin; j++) begin
        longint e;
        e = 0;
        for (int i = 0; i < 3; i++) e += wv[i] * stream[i+j];
        checks++;
        if (got[j] != e) begin
          failures++;
          if (failures < 10) $display("M=3 y%0d: got %0d exp %0d", j, got[j], e);
        end
      end
      // rate: nwin windows at one per cycle, results one cycle after each
      checks++;
      if (t_last - t0 != nwin) begin
        failures++;
        $display("M=3: %0d windows took %0d cycles, expected %0d", nwin, t_last - t0, nwin);
      end
      $display("M=%0d: %0d outputs of a %0d-sample stream in %0d cycles", 3, 2*nwin, N, t_last - t0);
    end
    // ---------------- M = 5 ----------------
    begin
      vec_t   wv;
      longint got [N];
      int     n_out, nwin, t0, t_last;
      for (int i = 0; i < 16; i++) wv[i] = (i < 5) ? rand_sample(COEF_W) : 0;
      @(negedge clk);
      for (int i = 0; i < 5; i++) w5[i] = COEF_W'(wv[i]);
      w5_load = 1'b1;
      @(negedge clk);
      w5_load = 1'b0;
      nwin = (N - 5 + 1) / 2;
      n_out = 0;
      t0 = cyc;
      t_last = 0;
      fork
        // producer: window j = 0, 2, 4, ... back to back, one per cycle
        begin
          for (int k = 0; k < nwin; k++) begin
            x5_valid = 1'b1;
            for (int i = 0; i <= 5; i++) x5[i] = DATA_W'(stream[2*k+i]);
            @(negedge clk);
          end
          x5_valid = 1'b0;
        end
        // consumer: collects y_(2k), y_(2k+1) in arrival order
        begin
          while (n_out < 2*nwin) begin
            @(posedge clk);
            #1;
            if (y5_valid) begin
              got[n_out]   = longint'(y5[0]);
              got[n_out+1] = longint'(y5[1]);
              n_out += 2;
              t_last = cyc;
            end
          end
        end
      join
      for (int j = 0; j < 2*nwin; j++) begin
        longint e;
        e = 0;
        for (int i = 0; i < 5; i++) e += wv[i] * stream[i+j];
        checks++;
        if (got[j] != e) begin
          failures++;
          if (failures < 10) $display("M=5 y%0d: got %0d exp %0d", j, got[j], e);
        end
      end
      // rate: nwin windows at one per cycle, results one cycle after each
      checks++;
      if (t_last - t0 != nwin) begin
        failures++;
        $display("M=5: %0d windows took %0d cycles, expected %0d", nwin, t_last - t0, nwin);
      end
      $display("M=%0d: %0d outputs of a %0d-sample stream in %0d cycles", 5, 2*nwin, N, t_last - t0);
    end
    // ---------------- M = 7 ----------------
    begin
      vec_t   wv;
      longint got [N];
      int     n_out, nwin, t0, t_last;
      for (int i = 0; i < 16; i++) wv[i] = (i < 7) ? rand_sample(COEF_W) : 0;
      @(negedge clk);
      for (int i = 0; i < 7; i++) w7[i] = COEF_W'(wv[i]);
      w7_load = 1'b1;
      @(negedge clk);
      w7_load = 1'b0;
      nwin = (N - 7 + 1) / 2;
      n_out = 0;
      t0 = cyc;
      t_last = 0;
      fork
        // producer: window j = 0, 2, 4, ... back to back, one per cycle
        begin
          for (int k = 0; k < nwin; k++) begin
            x7_valid = 1'b1;
            for (int i = 0; i <= 7; i++) x7[i] = DATA_W'(stream[2*k+i]);
            @(negedge clk);
          end
          x7_valid = 1'b0;
        end
        // consumer: collects y_(2k), y_(2k+1) in arrival order
        begin
          while (n_out < 2*nwin) begin
            @(posedge clk);
            #1;
            if (y7_valid) begin
              got[n_out]   = longint'(y7[0]);
              got[n_out+1] = longint'(y7[1]);
              n_out += 2;
              t_last = cyc;
            end
          end
        end
      join
      for (int j = 0; j < 2*nwin; j++) begin
        longint e;
        e = 0;
        for (int i = 0; i < 7; i++) e += wv[i] * stream[i+j];
        checks++;
        if (got[j] != e) begin
          failures++;
          if (failures < 10) $display("M=7 y%0d: got %0d exp %0d", j, got[j], e);
        end
      end
      // rate: nwin windows at one per cycle, results one cycle after each
      checks++;
      if (t_last - t0 != nwin) begin
        failures++;
        $display("M=7: %0d windows took %0d cycles, expected %0d", nwin, t_last - t0, nwin);
      end
      $display("M=%0d: %0d outputs of a %0d-sample stream in %0d cycles", 7, 2*nwin, N, t_last - t0);
    end
    // ---------------- M = 9 ----------------
    begin
      vec_t   wv;
      longint got [N];
      int     n_out, nwin, t0, t_last;
      for (int i = 0; i < 16; i++) wv[i] = (i < 9) ? rand_sample(COEF_W) : 0;
      @(negedge clk);
      for (int i = 0; i < 9; i++) w9[i] = COEF_W'(wv[i]);
      w9_load = 1'b1;
      @(negedge clk);
      w9_load = 1'b0;
      nwin = (N - 9 + 1) / 2;
      n_out = 0;
      t0 = cyc;
      t_last = 0;
      fork
        // producer: window j = 0, 2, 4, ... back to back, one per cycle
        begin
          for (int k = 0; k < nwin; k++) begin
            x9_valid = 1'b1;
            for (int i = 0; i <= 9; i++) x9[i] = DATA_W'(stream[2*k+i]);
            @(negedge clk);
          end
          x9_valid = 1'b0;
        end
        // consumer: collects y_(2k), y_(2k+1) in arrival order
        begin
          while (n_out < 2*nwin) begin
            @(posedge clk);
            #1;
            if (y9_valid) begin
              got[n_out]   = longint'(y9[0]);
              got[n_out+1] = longint'(y9[1]);
              n_out += 2;
              t_last = cyc;
            end
          end
        end
      join
      for (int j = 0; j < 2*nwin; j++) begin
        longint e;
        e = 0;
        for (int i = 0; i < 9; i++) e += wv[i] * stream[i+j];
        checks++;
        if (got[j] != e) begin
          failures++;
          if (failures < 10) $display("M=9 y%0d: got %0d exp %0d", j, got[j], e);
        end
      end
      // rate: nwin windows at one per cycle, results one cycle after each
      checks++;
      if (t_last - t0 != nwin) begin
        failures++;
        $display("M=9: %0d windows took %0d cycles, expected %0d", nwin, t_last - t0, nwin);
      end
      $display("M=%0d: %0d outputs of a %0d-sample stream in %0d cycles", 9, 2*nwin, N, t_last - t0);
    end
    // ---------------- M = 11 ----------------
    begin
      vec_t   wv;
      longint got [N];
      int     n_out, nwin, t0, t_last;
      for (int i = 0; i < 16; i++) wv[i] = (i < 11) ? rand_sample(COEF_W) : 0;
      @(negedge clk);
      for (int i = 0; i < 11; i++) w11[i] = COEF_W'(wv[i]);
      w11_load = 1'b1;
      @(negedge clk);
      w11_load = 1'b0;
      nwin = (N - 11 + 1) / 2;
      n_out = 0;
      t0 = cyc;
      t_last = 0;
      fork
        // producer: window j = 0, 2, 4, ... back to back, one per cycle
        begin
          for (int k = 0; k < nwin; k++) begin
            x11_valid = 1'b1;
            for (int i = 0; i <= 11; i++) x11[i] = DATA_W'(stream[2*k+i]);
            @(negedge clk);
          end
          x11_valid = 1'b0;
        end
        // consumer: collects y_(2k), y_(2k+1) in arrival order
        begin
          while (n_out < 2*nwin) begin
            @(posedge clk);
            #1;
            if (y11_valid) begin
              got[n_out]   = longint'(y11[0]);
              got[n_out+1] = longint'(y11[1]);
              n_out += 2;
              t_last = cyc;
            end
          end
        end
      join
      for (int j = 0; j < 2*nwin; j++) begin
        longint e;
        e = 0;
        for (int i = 0; i < 11; i++) e += wv[i] * stream[i+j];
        checks++;
        if (got[j] != e) begin
          failures++;
          if (failures < 10) $display("M=11 y%0d: got %0d exp %0d", j, got[j], e);
        end
      end
      // rate: nwin windows at one per cycle, results one cycle after each
      checks++;
      if (t_last - t0 != nwin) begin
        failures++;
        $display("M=11: %0d windows took %0d cycles, expected %0d", nwin, t_last - t0, nwin);
      end
      $display("M=%0d: %0d outputs of a %0d-sample stream in %0d cycles", 11, 2*nwin, N, t_last - t0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
