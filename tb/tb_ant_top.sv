// tb_ant_top: end-to-end test of the ANT accelerator at N = 8.
// The testbench fills the weight and input buffers through the external
// ports with random codes, loads a random per-channel scale table, and runs
// a sequence of tile commands that together exercise every mechanism:
// 4-bit products for every pair of types (int, PoT, flint, signed and
// unsigned), the 8-bit int mode and switches between the modes, accumulator
// preload from the output buffer (partial sums), requantization into the
// input buffer for every output type, and chained layers that take a
// previous command's requantized output as their input. After each command
// it reads back the output rows and the requantized rows and compares them
// with a model of its own (value tables, exact integer sums, and a
// nearest-value search for the quantizer), and checks the command's cycle
// count against the schedule of the controller.
//
// Interface and timing: no ports; it makes its own clock (10 time units) and
// reset, runs its checks, prints TB_RESULT checks=<n> failures=<n> and calls
// $finish. A watchdog ends the run with a failure if it hangs.
// Paper vs own: the datapath checked follows the paper; the command format,
// buffer layouts and the reduced size (N = 8) used here are this design's own.
module tb_ant_top;
  import ant_pkg::*;
  localparam int N = 8;
  localparam int ID = 64, WD = 64, OD = 32;
  localparam int NOPS = 24;
  localparam int FILL_I = ID, FILL_W = WD;   // rows given random contents
  localparam int IAW = $clog2(ID), WAW = $clog2(WD), OAW = $clog2(OD), NW = $clog2(N);

  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  ant_cmd_t cmd;
  logic ext_ibuf_we, ext_ibuf_re, ext_wbuf_we, ext_obuf_re, scale_we;
  logic [$clog2(ID)-1:0] ext_ibuf_addr, ext_ibuf_raddr;
  logic [$clog2(WD)-1:0] ext_wbuf_addr;
  logic [$clog2(OD)-1:0] ext_obuf_addr;
  logic [N*4-1:0]  ext_ibuf_wdata, ext_ibuf_rdata, ext_wbuf_wdata;
  logic [N*16-1:0] ext_obuf_rdata;
  logic [$clog2(N)-1:0] scale_idx;
  ant_scale_t scale_wdata;
  int checks = 0, failures = 0, cycles = 0;

  ant_top #(.N(N), .IBUF_DEPTH(ID), .WBUF_DEPTH(WD), .OBUF_DEPTH(OD)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 400000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference value tables ----------------
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

  // nearest representable value of the scaled result, ties to larger magnitude
  function automatic longint qref(longint x, ant_scale_t s, ant_cfg_t cf, bit m8);
    longint ax, y, t, best, bd, v, d;
    ax = (x < 0) ? -x : x;
    y  = (ax * longint'(s.mult) + ((s.shift == 0) ? 0 : (longint'(1) << (s.shift - 1)))) >>> s.shift;
    t  = (x < 0) ? -y : y;
    best = 0; bd = -1;
    for (int cc = 0; cc < (m8 ? 256 : 16); cc++) begin
      v = m8 ? val8(cc, cf) : val4(cc, cf);
      d = (v > t) ? v - t : t - v;
      if (bd < 0 || d < bd || (d == bd && (v < 0 ? -v : v) > (best < 0 ? -best : best))) begin
        best = v; bd = d;
      end
    end
    return best;
  endfunction

  // ---------------- buffer models ----------------
  int         ibuf_m [ID][N];
  int         wbuf_m [WD][N];
  ant_scale_t scale_m [N];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  task automatic wr_ibuf(int a);
    @(negedge clk);
    ext_ibuf_we = 1; ext_ibuf_addr = IAW'(a);
    for (int l = 0; l < N; l++) ext_ibuf_wdata[l*4 +: 4] = 4'(ibuf_m[a][l]);
    @(negedge clk);
    ext_ibuf_we = 0;
  endtask

  task automatic wr_wbuf(int a);
    @(negedge clk);
    ext_wbuf_we = 1; ext_wbuf_addr = WAW'(a);
    for (int l = 0; l < N; l++) ext_wbuf_wdata[l*4 +: 4] = 4'(wbuf_m[a][l]);
    @(negedge clk);
    ext_wbuf_we = 0;
  endtask

  task automatic rd_obuf(int a, output logic signed [15:0] row [N]);
    @(negedge clk);
    ext_obuf_re = 1; ext_obuf_addr = OAW'(a);
    @(negedge clk);
    ext_obuf_re = 0;
    for (int l = 0; l < N; l++) row[l] = ext_obuf_rdata[l*16 +: 16];
  endtask

  task automatic rd_ibuf(int a, output int row [N]);
    @(negedge clk);
    ext_ibuf_re = 1; ext_ibuf_raddr = IAW'(a);
    @(negedge clk);
    ext_ibuf_re = 0;
    for (int l = 0; l < N; l++) row[l] = int'(ext_ibuf_rdata[l*4 +: 4]);
  endtask

  // ---------------- mechanism counters ----------------
  int n_mode4 = 0, n_mode8 = 0, n_switch = 0, n_preload = 0, n_quant = 0, n_chain = 0;
  int n_wtype [3], n_xtype [3], n_qtype [3];

  initial begin
    ant_cmd_t c, prev;
    logic signed [15:0] pre  [N][N];
    logic signed [15:0] orow [N];
    int qrow [N];
    longint acc [N][N];
    int k, ng, lat, exp_lat, wv, xv;
    bit last_m8;

    start = 0; cmd = '0;
    ext_ibuf_we = 0; ext_ibuf_re = 0; ext_wbuf_we = 0; ext_obuf_re = 0; scale_we = 0;
    ext_ibuf_addr = '0; ext_ibuf_raddr = '0; ext_wbuf_addr = '0; ext_obuf_addr = '0;
    ext_ibuf_wdata = '0; ext_wbuf_wdata = '0; scale_idx = '0; scale_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // random buffer contents and scale table
    for (int a = 0; a < FILL_I; a++) begin
      for (int l = 0; l < N; l++) ibuf_m[a][l] = int'($urandom % 16);
      wr_ibuf(a);
    end
    for (int a = 0; a < FILL_W; a++) begin
      for (int l = 0; l < N; l++) wbuf_m[a][l] = int'($urandom % 16);
      wr_wbuf(a);
    end
    for (int i = 0; i < N; i++) begin
      scale_m[i].mult  = 16'($urandom % 200 + 1);
      scale_m[i].shift = 5'($urandom % 8 + 3);
      @(negedge clk);
      scale_we = 1; scale_idx = NW'(i); scale_wdata = scale_m[i];
      @(negedge clk);
      scale_we = 0;
    end

    prev = '0; last_m8 = 0;
    for (int op = 0; op < NOPS; op++) begin
      c = '0;
      if (op > 0 && op % 4 == 2 && prev.quant_en) begin
        // chained layer: previous requantized output is this layer's input
        c.mode8     = prev.mode8;
        c.ibuf_base = prev.qbuf_base;
        c.k_len     = 16'(prev.mode8 ? N / 2 : N);
        c.x_cfg     = prev.q_cfg;
        n_chain++;
      end else begin
        c.mode8     = (op % 4 == 3) || (op % 7 == 5);
        c.ibuf_base = 16'($urandom % 16);
        c.k_len     = 16'($urandom % 20 + 1);
        c.x_cfg.dtype = c.mode8 ? T_INT : ant_type_e'(op % 3);
        c.x_cfg.is_signed = 1'($urandom);
      end
      c.wbuf_base = 16'($urandom % 40);
      c.w_cfg.dtype = c.mode8 ? T_INT : ant_type_e'((op / 3) % 3);
      c.w_cfg.is_signed = 1'($urandom);
      c.obuf_base = 16'(($urandom % 3) * N);
      c.qbuf_base = 16'(40 + (op % 2) * N);   // away from the operand rows
      c.preload   = (op % 3 == 1);
      c.quant_en  = (op % 5 != 4);
      c.q_cfg.dtype = c.mode8 ? T_INT : ant_type_e'((op + 1) % 3);
      c.q_cfg.is_signed = 1'($urandom);
      if (op > 0 && c.mode8 != last_m8) n_switch++;
      last_m8 = c.mode8;
      ng = c.mode8 ? N / 2 : N;

      // model of the results
      for (int r = 0; r < N; r++) begin
        if (c.preload) begin
          rd_obuf(int'(c.obuf_base) + r, orow);
          for (int l = 0; l < N; l++) pre[r][l] = orow[l];
        end else begin
          for (int l = 0; l < N; l++) pre[r][l] = '0;
        end
      end
      for (int i = 0; i < ng; i++)
        for (int j = 0; j < ng; j++) begin
          acc[i][j] = c.mode8 ? longint'(pre[2*i][2*j]) : longint'(pre[i][j]);
          for (k = 0; k < int'(c.k_len); k++) begin
            if (c.mode8) begin
              wv = wbuf_m[c.wbuf_base + k][2*i] * 16 + wbuf_m[c.wbuf_base + k][2*i+1];
              xv = ibuf_m[c.ibuf_base + k][2*j] * 16 + ibuf_m[c.ibuf_base + k][2*j+1];
              acc[i][j] += val8(wv, c.w_cfg) * val8(xv, c.x_cfg);
            end else begin
              acc[i][j] += val4(wbuf_m[c.wbuf_base + k][i], c.w_cfg) *
                           val4(ibuf_m[c.ibuf_base + k][j], c.x_cfg);
            end
          end
          acc[i][j] = longint'(16'(acc[i][j]));
          acc[i][j] = (acc[i][j] >= 32768) ? acc[i][j] - 65536 : acc[i][j];
        end

      // run it and time it
      @(negedge clk);
      cmd = c; start = 1;
      @(negedge clk);
      start = 0;
      lat = 1;
      while (!done) begin
        @(negedge clk);
        lat++;
      end
      exp_lat = 1 + (N + 1) + int'(c.k_len) + (c.mode8 ? N - 2 : 2 * (N - 1)) + 1 + N + 1;
      check(lat == exp_lat, $sformatf("op %0d latency %0d want %0d", op, lat, exp_lat));

      // results
      for (int i = 0; i < ng; i++) begin
        rd_obuf(int'(c.obuf_base) + (c.mode8 ? 2 * i : i), orow);
        for (int j = 0; j < ng; j++)
          check(longint'(orow[c.mode8 ? 2 * j : j]) == acc[i][j],
                $sformatf("op %0d m8=%0d result (%0d,%0d) got %0d want %0d",
                          op, c.mode8, i, j, orow[c.mode8 ? 2 * j : j], acc[i][j]));
      end
      if (c.quant_en) begin
        for (int i = 0; i < ng; i++) begin
          rd_ibuf(int'(c.qbuf_base) + i, qrow);
          for (int j = 0; j < ng; j++) begin
            if (c.mode8)
              check(val8(qrow[2*j] * 16 + qrow[2*j+1], c.q_cfg) ==
                    qref(acc[i][j], scale_m[i], c.q_cfg, 1),
                    $sformatf("op %0d int8 quant (%0d,%0d)", op, i, j));
            else
              check(val4(qrow[j], c.q_cfg) == qref(acc[i][j], scale_m[i], c.q_cfg, 0),
                    $sformatf("op %0d quant (%0d,%0d) acc %0d code %0d", op, i, j, acc[i][j], qrow[j]));
          end
          for (int l = 0; l < N; l++) ibuf_m[c.qbuf_base + i][l] = qrow[l];
        end
        n_quant++;
        n_qtype[c.q_cfg.dtype]++;
      end
      if (c.mode8) n_mode8++; else n_mode4++;
      if (c.preload) n_preload++;
      if (!c.mode8) begin n_wtype[c.w_cfg.dtype]++; n_xtype[c.x_cfg.dtype]++; end
      prev = c;
    end

    $display("mechanisms: 4-bit ops %0d, 8-bit ops %0d, mode switches %0d, preloads %0d, requantized %0d, chained %0d",
             n_mode4, n_mode8, n_switch, n_preload, n_quant, n_chain);
    $display("weight types int/pot/flint %0d/%0d/%0d, input types %0d/%0d/%0d, output types %0d/%0d/%0d",
             n_wtype[0], n_wtype[1], n_wtype[2], n_xtype[0], n_xtype[1], n_xtype[2],
             n_qtype[0], n_qtype[1], n_qtype[2]);
    check(n_mode4 > 0, "no 4-bit op");
    check(n_mode8 > 0, "no 8-bit op");
    check(n_switch > 0, "no mode switch");
    check(n_preload > 0, "no preload");
    check(n_quant > 0, "no requantization");
    check(n_chain > 0, "no chained layer");
    for (int t = 0; t < 3; t++) begin
      check(n_wtype[t] > 0, $sformatf("weight type %0d unused", t));
      check(n_xtype[t] > 0, $sformatf("input type %0d unused", t));
      check(n_qtype[t] > 0, $sformatf("output type %0d unused", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
