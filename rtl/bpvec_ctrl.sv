// bpvec_ctrl: tile sequencer of the accelerator.
//
// It accepts one cmd_t when cmd_valid and cmd_ready are both high (cmd_ready is
// high only when idle), then runs the tile:
//   1. Set the datapath mode for the tile and clear the column accumulators. With
//      acc_in, it instead reads obuf[obuf_addr] and preloads the accumulators.
//   2. STREAM: for s = 0..K-1, one step per clock. It reads input-buffer word
//      ibuf_base+s and raises step_vld with weight address wbuf_base+s.
//   3. DRAIN: it waits for K column results (col_vld) to reach the accumulators.
//   4. WRITE: it stores the accumulators in obuf[obuf_addr] and pulses done.
// For K >= 1, done is high in the clock that starts K + ROWS + 4 edges after the
// accepting edge (ROWS + 3 of them are the array latency), two more with acc_in.
// Steps stream one per clock, so the array is never idle inside a tile. mode holds the last tile's value between tiles,
// because the array needs it stable while steps are in flight.
//
// Runtime reconfiguration for each layer's bitwidths is the paper's. It describes
// no controller, command format or buffer addressing; all of those are this
// design's choices.
module bpvec_ctrl
  import bpvec_pkg::*;
#(
  parameter int unsigned IAW = 6,
  parameter int unsigned WAW = 4,
  parameter int unsigned OAW = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  // command
  input  logic            cmd_valid,
  output logic            cmd_ready,
  input  cmd_t            cmd,
  output logic            busy,
  output logic            done,
  // datapath configuration
  output mode_t           mode,
  // input buffer read
  output logic            ibuf_re,
  output logic [IAW-1:0]  ibuf_raddr,
  // array step issue
  output logic            step_vld,
  output logic [WAW-1:0]  w_raddr,
  input  logic            col_vld,
  // accumulators
  output logic            acc_clr,
  output logic            acc_load,
  // output buffer
  output logic            obuf_re,
  output logic [OAW-1:0]  obuf_raddr,
  output logic            obuf_we,
  output logic [OAW-1:0]  obuf_waddr
);
  typedef enum logic [2:0] {
    S_IDLE, S_PRE_RD, S_PRE_LD, S_STREAM, S_DRAIN, S_WRITE
  } state_e;

  state_e      state;
  cmd_t        c_q;
  logic [15:0] issued, received;

  assign cmd_ready = (state == S_IDLE);
  assign busy      = (state != S_IDLE);

  always_comb begin
    ibuf_re    = 1'b0;
    ibuf_raddr = IAW'(c_q.ibuf_base + issued);
    step_vld   = 1'b0;
    w_raddr    = WAW'(c_q.wbuf_base + issued);
    acc_clr    = 1'b0;
    acc_load   = 1'b0;
    obuf_re    = 1'b0;
    obuf_raddr = OAW'(c_q.obuf_addr);
    obuf_we    = 1'b0;
    obuf_waddr = OAW'(c_q.obuf_addr);
    case (state)
      S_IDLE:   acc_clr = cmd_valid && !cmd.acc_in;
      S_PRE_RD: obuf_re = 1'b1;
      S_PRE_LD: acc_load = 1'b1;
      S_STREAM: if (issued < c_q.k) begin
                  ibuf_re  = 1'b1;
                  step_vld = 1'b1;
                end
      S_WRITE:  obuf_we = 1'b1;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      c_q      <= '0;
      mode     <= '{xbw: BW8, wbw: BW8, x_sgn: 1'b0, w_sgn: 1'b0};
      issued   <= '0;
      received <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (col_vld) received <= received + 16'd1;
      case (state)
        S_IDLE: if (cmd_valid) begin
          c_q      <= cmd;
          mode     <= cmd.mode;
          issued   <= '0;
          received <= '0;
          state    <= cmd.acc_in ? S_PRE_RD : S_STREAM;
        end
        S_PRE_RD: state <= S_PRE_LD;
        S_PRE_LD: state <= S_STREAM;
        S_STREAM: begin
          if (issued < c_q.k) issued <= issued + 16'd1;
          if (issued + 16'd1 >= c_q.k) state <= S_DRAIN;
        end
        S_DRAIN: begin
          if (received >= c_q.k ||
              (col_vld && received + 16'd1 >= c_q.k)) state <= S_WRITE;
        end
        S_WRITE: begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A step may only be issued while streaming, and results never outrun steps.
  a_step_in_stream: assert property (@(posedge clk) disable iff (!rst_n)
    step_vld |-> state == S_STREAM);
  a_no_extra_result: assert property (@(posedge clk) disable iff (!rst_n)
    col_vld |-> busy && received < c_q.k);
endmodule
