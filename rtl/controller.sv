// controller: configuration and pipeline sequencer of one sub-chip.
//
// Configuration: CMD_CFG commands write the layer registers (cycles to run,
// stride, results per cycle, pooling window, output shift, bias, ReLU on/off,
// forwarding target) and the per-row replay mask that tells which input rows
// re-use a transferred input instead of reading a new one (the only-once input
// read mapping). CMD_START starts the layer; done pulses when it has finished.
//
// Timing: a conversion window is CONV_TICKS ticks, a pipeline cycle is GAMMA
// windows. The sub-chip is a four-stage pipeline, one stage per cycle:
//   A  read the next cycle's fresh inputs from the input buffer  (cycles 0..N-1)
//   B  DTC conversion and phase-I dot product in the crossbars    (cycles 1..N)
//   C  phase-II charging, comparison and TDC conversion           (cycles 2..N+1)
//   D  shift-and-add, ReLU, pooling, write to the output buffer   (cycles 3..N+2)
// so an input read in cycle n is written back in cycle n+3, and in steady state
// four cycles' data are in flight. phi (reset of the time latches) is the first
// tick of each window. In every stage-B cycle but the first, `stride` xfer
// pulses on ticks 1..stride of window 0 shift the transfer column's inputs.
// A cycle does not start (stall: the tick counter waits at the start of the
// cycle with phi held) while the loader has not finished the inputs of the
// cycle or the output stream of the previous cycle is still being written.
// win_start is held low during a stall, so converters load once per window.
// reuse_a (registered at each cycle start) and reuse_b tell the sub-chip that
// the load / conversion under way is not the layer's first cycle, from which on
// the replay mask applies.
//
// Follows the paper: intra-sub-chip pipeline whose cycle is set by the gamma
// shared DTC/TDC conversions; commands that program weights and set up input
// paths. Own choices: the register map and command format, four stages instead
// of the paper's five (DTC and dot product share a stage here because the time
// signal exists only while the DTC generates it), and the stall rule.
module controller
  import timely_pkg::*;
#(
  parameter int NROWS      = 4096,
  parameter int GAMMA      = 8,
  parameter int CONV_TICKS = 500,
  localparam int TW        = $clog2(CONV_TICKS),
  localparam int GW        = (GAMMA > 1) ? $clog2(GAMMA) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  bus_req_t            cmd,          // commands addressed to this sub-chip
  input  logic                loader_done,  // stage-A inputs ready
  input  logic                post_idle,    // output stream written
  // timing
  output logic [TW-1:0]       wtick,
  output logic [GW-1:0]       win_idx,
  output logic                phi,
  output logic                win_start,
  output logic                win_end,
  output logic                cyc_start,
  output logic                cyc_last,
  output logic                layer_start,
  output logic                st_a, st_b, st_c, st_d,
  output logic                xfer,
  output logic                reuse_a,      // the load started at the last cycle start is not the first
  output logic                reuse_b,      // stage B converts a cycle after the first
  output logic                busy,
  output logic                done,
  // configuration
  output logic [15:0]         cfg_ncyc,
  output logic [3:0]          cfg_stride,
  output logic [15:0]         cfg_nout,
  output logic [3:0]          cfg_pool,
  output logic [3:0]          cfg_shift,
  output logic signed [15:0]  cfg_bias,
  output logic                cfg_relu,
  output logic [6:0]          cfg_dest,
  output logic                cfg_fwd,
  output logic [NROWS-1:0]    cfg_replay,
  // event counters
  output logic [31:0]         stall_cnt,
  output logic [31:0]         xfer_cnt
);
  logic        running;
  logic [15:0] k;
  logic        at0;
  logic        stall;
  logic        fin;

  // configuration registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_ncyc   <= '0;
      cfg_stride <= '0;
      cfg_nout   <= '0;
      cfg_pool   <= 4'd1;
      cfg_shift  <= '0;
      cfg_bias   <= '0;
      cfg_relu   <= 1'b0;
      cfg_dest   <= '0;
      cfg_fwd    <= 1'b0;
      cfg_replay <= '0;
    end else if (cmd.valid && cmd.cmd == CMD_CFG) begin
      unique case (cmd.addr)
        CFG_NCYC:   cfg_ncyc   <= cmd.data;
        CFG_STRIDE: cfg_stride <= cmd.data[3:0];
        CFG_NOUT:   cfg_nout   <= cmd.data;
        CFG_POOL:   cfg_pool   <= cmd.data[3:0];
        CFG_SHIFT:  cfg_shift  <= cmd.data[3:0];
        CFG_BIAS:   cfg_bias   <= cmd.data;
        CFG_RELU:   cfg_relu   <= cmd.data[0];
        CFG_DEST:   cfg_dest   <= cmd.data[6:0];
        CFG_FWD:    cfg_fwd    <= cmd.data[0];
        default:
          if (cmd.addr >= CFG_REPLAY && cmd.addr < CFG_REPLAY + 32'(NROWS))
            cfg_replay[cmd.addr - CFG_REPLAY] <= cmd.data[0];
      endcase
    end
  end

  assign at0   = running && wtick == '0 && win_idx == '0;
  assign stall = at0 && k != '0 &&
                 (((k - 16'd1) < cfg_ncyc && !loader_done) || !post_idle);
  assign fin       = at0 && !stall && k == cfg_ncyc + 16'd3;
  assign cyc_start = at0 && !stall && !fin;
  assign layer_start = !running && cmd.valid && cmd.cmd == CMD_START;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      wtick   <= '0;
      win_idx <= '0;
      k       <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (layer_start) begin
        running <= 1'b1;
        wtick   <= '0;
        win_idx <= '0;
        k       <= '0;
      end else if (fin) begin
        running <= 1'b0;
        done    <= 1'b1;
      end else if (running && !stall) begin
        if (wtick == TW'(CONV_TICKS - 1)) begin
          wtick <= '0;
          if (win_idx == GW'(GAMMA - 1)) begin
            win_idx <= '0;
            k       <= k + 16'd1;
          end else begin
            win_idx <= win_idx + 1'b1;
          end
        end else begin
          wtick <= wtick + 1'b1;
        end
      end
    end
  end

  assign busy      = running;
  assign phi       = !running || wtick == '0;
  assign win_start = running && wtick == '0 && !stall;
  assign win_end   = running && wtick == TW'(CONV_TICKS - 1);
  assign cyc_last  = win_end && win_idx == GW'(GAMMA - 1);
  assign st_a      = running && k < cfg_ncyc;
  assign st_b      = running && k >= 16'd1 && k <= cfg_ncyc;
  assign st_c      = running && k >= 16'd2 && k <= cfg_ncyc + 16'd1;
  assign st_d      = running && k >= 16'd3 && k <= cfg_ncyc + 16'd2;
  assign reuse_b   = k >= 16'd2;
  assign xfer      = st_b && k >= 16'd2 && win_idx == '0 && wtick != '0 &&
                     32'(wtick) <= 32'(cfg_stride);

  // registered so that a load still waiting for data after the cycle
  // counter moved on keeps the mask it started with
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           reuse_a <= 1'b0;
    else if (layer_start) reuse_a <= 1'b0;
    else if (cyc_start)   reuse_a <= k >= 16'd1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stall_cnt <= '0;
      xfer_cnt  <= '0;
    end else begin
      if (stall) stall_cnt <= stall_cnt + 1;
      if (xfer)  xfer_cnt  <= xfer_cnt + 1;
    end
  end

  // The stride must fit in the quiet part of window 0 (before any pulse).
  wire unused_ok = &{1'b0, cmd.sub};

  initial assert (CONV_TICKS > 256 + 16) else $error("window too short for transfers");
endmodule
