// ant_controller: sequencer for one output tile of the ANT accelerator.
//
// A command (ant_cmd_t) is accepted with start while idle and runs through
//   PRELOAD (N+1 cycles): reads output-buffer rows base+N-1 .. base (or feeds
//            zeros) and shifts them into the accumulator columns, so each PE
//            starts from a bias or a partial sum;
//   COMPUTE (k_len + S cycles, S = 2(N-1) in 4-bit mode, N-2 in 8-bit mode):
//            reads one input row and one weight row per cycle for k_len
//            cycles, then keeps accumulating while the skewed wavefront
//            drains through the array (the buffers feed zero codes then);
//   DRAIN   (N cycles): shifts the results out of the bottom of the array,
//            bottom row first, writing each to the output buffer and, with
//            quant_en, its requantized codes to the input buffer;
//   DONE    (1 cycle): done pulses, busy falls.
// In 8-bit mode only the even rows carry int8 results; they are requantized
// to qbuf_base + row/2.
// The paper gives the dataflow (output stationary, low-bit inputs and
// weights, 16-bit outputs, quantization of the outputs for the next layer);
// this controller, its phases and the command format are this design's own.
module ant_controller
  import ant_pkg::*;
#(
  parameter int unsigned N = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  ant_cmd_t    cmd_in,
  output ant_cmd_t    cmd,          // latched command
  output logic        busy,
  output logic        done,
  output ant_state_e  state,
  // operand reads
  output logic        op_re,
  output logic [15:0] ibuf_raddr,
  output logic [15:0] wbuf_raddr,
  // preload reads of the output buffer
  output logic        pre_re,
  output logic [15:0] obuf_raddr,
  // array control
  output logic        shift_en,
  output logic        use_rdata,    // chain_in takes output-buffer data
  output logic        acc_en,
  // drain writes
  output logic        obuf_we,
  output logic [15:0] obuf_waddr,
  output logic        qbuf_we,
  output logic [15:0] qbuf_waddr,
  output logic [15:0] drain_row
);
  logic [15:0] cnt;
  logic [15:0] compute_len;

  assign compute_len = cmd.k_len + (cmd.mode8 ? 16'(N - 2) : 16'(2 * (N - 1))) + 16'd1;
  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cnt   <= '0;
      cmd   <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          cmd   <= cmd_in;
          cnt   <= '0;
          state <= S_PRELOAD;
        end
        S_PRELOAD: begin
          cnt <= cnt + 16'd1;
          if (cnt == 16'(N)) begin
            cnt   <= '0;
            state <= S_COMPUTE;
          end
        end
        S_COMPUTE: begin
          cnt <= cnt + 16'd1;
          if (cnt == compute_len - 16'd1) begin
            cnt   <= '0;
            state <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          cnt <= cnt + 16'd1;
          if (cnt == 16'(N - 1)) begin
            cnt   <= '0;
            state <= S_DONE;
          end
        end
        default: begin  // S_DONE
          done  <= 1'b1;
          state <= S_IDLE;
        end
      endcase
    end
  end

  always_comb begin
    op_re      = (state == S_COMPUTE) && (cnt < cmd.k_len);
    ibuf_raddr = cmd.ibuf_base + cnt;
    wbuf_raddr = cmd.wbuf_base + cnt;
    pre_re     = (state == S_PRELOAD) && (cnt < 16'(N)) && cmd.preload;
    obuf_raddr = cmd.obuf_base + 16'(N - 1) - cnt;
    shift_en   = ((state == S_PRELOAD) && (cnt >= 16'd1)) || (state == S_DRAIN);
    use_rdata  = (state == S_PRELOAD) && cmd.preload;
    acc_en     = (state == S_COMPUTE);
    drain_row  = 16'(N - 1) - cnt;
    obuf_we    = (state == S_DRAIN);
    obuf_waddr = cmd.obuf_base + drain_row;
    qbuf_we    = (state == S_DRAIN) && cmd.quant_en && (!cmd.mode8 || !drain_row[0]);
    qbuf_waddr = cmd.qbuf_base + (cmd.mode8 ? {1'b0, drain_row[15:1]} : drain_row);
  end

  // A new command is only taken while idle (busy is low during reset, so no
  // reset qualifier is needed).
  a_start_idle: assert property (@(posedge clk) start |-> !busy)
    else $error("start while busy is ignored");
endmodule
