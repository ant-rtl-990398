// tb_ant_systolic_array: matrix products on a small array (N = 6).
// For each trial the testbench picks random weight/input types (int, PoT,
// flint, signed or not) or the 8-bit int mode, random codes W[r][k] and
// X[k][c], optional preloaded accumulator values, and feeds the codes with
// the diagonal skew itself. After the compute window (K + 2(N-1) cycles in
// 4-bit mode, K + N - 2 in 8-bit mode) it drains the array and compares each
// result with sum_k value(W) * value(X) + preload, modulo 2^16, from
// value tables of its own.
//
// Interface and timing: no ports; it makes its own clock (10 time units) and
// reset, runs its checks, prints TB_RESULT checks=<n> failures=<n> and calls
// $finish. A watchdog ends the run with a failure if it hangs.
// Paper vs own: output-stationary flow with boundary decoders follows the
// paper; the 8-bit bypass wiring and the drain chain are this design's own.
module tb_ant_systolic_array;
  import ant_pkg::*;
  localparam int N = 6;
  localparam int KMAX = 12;

  logic clk = 0, rst_n = 0;
  ant_cfg_t w_cfg, x_cfg;
  logic mode8, acc_en, shift_en;
  logic [CODE_W-1:0] w_code [N], x_code [N];
  logic signed [ACC_W-1:0] chain_in [N], chain_out [N];
  int checks = 0, failures = 0, cycles = 0;
  int n_mode8 = 0, n_mode4 = 0, n_preload = 0;

  ant_systolic_array #(.N(N)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 200000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int uflint [16] = '{0, 1, 2, 3, 4, 5, 6, 7, 64, 32, 16, 24, 8, 10, 12, 14};
  int sflint [8]  = '{0, 1, 2, 3, 16, 8, 4, 6};

  function automatic longint val4(int c, ant_cfg_t cf);
    longint v;
    case (cf.dtype)
      T_INT:   return (cf.is_signed && c >= 8) ? c - 16 : c;
      T_POT:   if (!cf.is_signed) return (c == 0) ? 0 : (longint'(1) << c);
               else begin
                 v = ((c & 7) == 0) ? 0 : (longint'(1) << (c & 7));
                 return (c >= 8) ? -v : v;
               end
      default: if (!cf.is_signed) return uflint[c];
               else return (c >= 8) ? -sflint[c & 7] : sflint[c & 7];
    endcase
  endfunction

  function automatic longint val8(int c, ant_cfg_t cf);
    return (cf.is_signed && c >= 128) ? c - 256 : c;
  endfunction

  int W [N][KMAX];   // 4-bit codes, or int8 codes at [i][k] for i < N/2
  int X [KMAX][N];
  logic signed [15:0] pre [N][N];
  logic signed [15:0] got [N][N];

  task automatic run_trial(bit m8, int K, bit do_pre);
    int g, kk, nib;
    longint s;
    logic signed [15:0] want;
    int ng;
    mode8 = m8;
    ng = m8 ? N / 2 : N;
    if (m8) begin
      w_cfg.dtype = T_INT; x_cfg.dtype = T_INT;
      w_cfg.is_signed = 1'($urandom); x_cfg.is_signed = 1'($urandom);
    end else begin
      w_cfg.dtype = ant_type_e'($urandom % 3); w_cfg.is_signed = 1'($urandom);
      x_cfg.dtype = ant_type_e'($urandom % 3); x_cfg.is_signed = 1'($urandom);
    end
    for (int i = 0; i < N; i++)
      for (int k = 0; k < K; k++) begin
        W[i][k] = m8 ? int'($urandom % 256) : int'($urandom % 16);
        X[k][i] = m8 ? int'($urandom % 256) : int'($urandom % 16);
      end
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) pre[r][c] = do_pre ? 16'($urandom) : 16'd0;
    // preload: N shifts, bottom row first
    @(negedge clk);
    shift_en = 1; acc_en = 0;
    for (int t = 0; t < N; t++) begin
      for (int c = 0; c < N; c++) chain_in[c] = pre[N-1-t][c];
      @(negedge clk);
    end
    shift_en = 0;
    for (int c = 0; c < N; c++) chain_in[c] = '0;
    // compute with skewed feed
    acc_en = 1;
    for (int t = 0; t < K + (m8 ? N - 2 : 2 * (N - 1)); t++) begin
      for (int i = 0; i < N; i++) begin
        g  = m8 ? i / 2 : i;
        kk = t - g;
        if (kk >= 0 && kk < K) begin
          if (m8) begin
            nib = (i % 2 == 0) ? (W[g][kk] >> 4) : (W[g][kk] & 15);
            w_code[i] = 4'(nib);
            nib = (i % 2 == 0) ? (X[kk][g] >> 4) : (X[kk][g] & 15);
            x_code[i] = 4'(nib);
          end else begin
            w_code[i] = 4'(W[i][kk]);
            x_code[i] = 4'(X[kk][i]);
          end
        end else begin
          w_code[i] = '0; x_code[i] = '0;
        end
      end
      @(negedge clk);
    end
    acc_en = 0;
    for (int i = 0; i < N; i++) begin w_code[i] = '0; x_code[i] = '0; end
    // drain
    shift_en = 1;
    for (int t = 0; t < N; t++) begin
      for (int c = 0; c < N; c++) got[N-1-t][c] = chain_out[c];
      @(negedge clk);
    end
    shift_en = 0;
    for (int i = 0; i < ng; i++)
      for (int j = 0; j < ng; j++) begin
        s = 0;
        for (int k = 0; k < K; k++)
          s += m8 ? val8(W[i][k], w_cfg) * val8(X[k][j], x_cfg)
                  : val4(W[i][k], w_cfg) * val4(X[k][j], x_cfg);
        want = 16'(s + longint'(m8 ? pre[2*i][2*j] : pre[i][j]));
        checks++;
        if ((m8 ? got[2*i][2*j] : got[i][j]) !== want) begin
          failures++;
          if (failures < 10)
            $display("FAIL m8=%0d K=%0d (%0d,%0d): got %0d want %0d", m8, K, i, j,
                     m8 ? got[2*i][2*j] : got[i][j], want);
        end
      end
    if (m8) n_mode8++; else n_mode4++;
    if (do_pre) n_preload++;
  endtask

  initial begin
    mode8 = 0; acc_en = 0; shift_en = 0;
    w_cfg = '0; x_cfg = '0;
    for (int i = 0; i < N; i++) begin w_code[i] = '0; x_code[i] = '0; chain_in[i] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++)
      run_trial(n % 3 == 2, 1 + int'($urandom % KMAX), n % 4 == 1);
    checks++;
    if (n_mode8 == 0 || n_mode4 == 0 || n_preload == 0) failures++;
    $display("trials: 4-bit %0d, 8-bit %0d, preloaded %0d", n_mode4, n_mode8, n_preload);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
