// control_interface -- FPGA side of the USB and controlling interface.
//
// Holds the delay code (m, n) written by the host, starts an operation with a
// one-cycle `delay_trigger`, latches the code at that moment (m_act, n_act
// stay constant for the whole operation), and afterwards clears the
// generator: `clear` resets the extractor counters and the En controller and
// opens both oscillator loops.  Every operation takes exactly PERIOD_CYCLES
// system-clock cycles:
//
//   cycle 0                      delay_trigger = 1 (code latched the edge before)
//   cycles 0 .. WORK_CYCLES-1    working window (the coarse and fine steps)
//   next CLEAR_CYCLES cycles     clear = 1, WORK_CYCLES + CLEAR_CYCLES = PERIOD_CYCLES
//   then                         idle, or straight into the next trigger
//
// With `auto_mode` high the operation repeats back to back, one per
// PERIOD_CYCLES (1 us at 500 MHz), the self-resetting testing mode of the
// prototype; otherwise each `start` pulse requests one operation.  Reset
// puts the block into its clearing state with `clear` low; `clear` rises on
// the first clock edge after reset, so the asynchronous clears downstream
// always see a real rising edge, and stays high CLEAR_CYCLES-1 cycles;
// after an operation it is high for CLEAR_CYCLES cycles.  CLEAR_CYCLES must
// cover one loop lap (4 ns) so that no pulse is left circulating.
//
// Lint reports `rst_n` and `clear` as used both synchronously and
// asynchronously: the synchronous use is only the clocked assertions at the
// end of this file, which sample them; in the logic both are asynchronous.
//
// The host bus is a plain parallel write port (the USB chip that drives it is
// external).  Its form, the single clock domain, the fixed working window and
// the clear length are this design's choices; the duties of the block and the
// 1 us self-reset period follow the prototype.
module control_interface #(
  parameter int unsigned M_W           = vdg_pkg::M_W,
  parameter int unsigned N_W           = vdg_pkg::N_W,
  parameter int unsigned PERIOD_CYCLES = vdg_pkg::PERIOD_CYCLES,
  parameter int unsigned CLEAR_CYCLES  = vdg_pkg::CLEAR_CYCLES
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           cfg_valid,
  input  logic [M_W-1:0] cfg_m,
  input  logic [N_W-1:0] cfg_n,
  input  logic           start,
  input  logic           auto_mode,
  output logic           delay_trigger,
  output logic           clear,
  output logic [M_W-1:0] m_act,
  output logic [N_W-1:0] n_act,
  output logic           busy,
  output logic [15:0]    ops_done
);
  timeunit 1ps;
  timeprecision 10fs;

  localparam int unsigned WORK_CYCLES = PERIOD_CYCLES - CLEAR_CYCLES;
  localparam int unsigned CW          = $clog2(PERIOD_CYCLES + 1);

  typedef enum logic [1:0] {S_CLEAR, S_IDLE, S_WORK} state_t;

  state_t         state;
  logic [CW-1:0]  cnt;
  logic [M_W-1:0] m_cfg;
  logic [N_W-1:0] n_cfg;
  logic           go;

  assign go = start | auto_mode;

  // Host-written code.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_cfg <= '0;
      n_cfg <= '0;
    end else if (cfg_valid) begin
      m_cfg <= cfg_m;
      n_cfg <= cfg_n;
    end
  end

  // Operation sequencer.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_CLEAR;
      clear         <= 1'b0;
      cnt           <= '0;
      delay_trigger <= 1'b0;
      m_act         <= '0;
      n_act         <= '0;
      ops_done      <= '0;
    end else begin
      delay_trigger <= 1'b0;
      unique case (state)
        S_CLEAR: begin
          if (cnt == CW'(CLEAR_CYCLES - 1)) begin
            cnt <= '0;
            clear <= 1'b0;
            if (go) begin
              // Back to back: the trigger follows the clear directly.
              state         <= S_WORK;
              delay_trigger <= 1'b1;
              m_act         <= cfg_valid ? cfg_m : m_cfg;
              n_act         <= cfg_valid ? cfg_n : n_cfg;
            end else begin
              state <= S_IDLE;
            end
          end else begin
            cnt   <= cnt + 1'b1;
            clear <= 1'b1;
          end
        end
        S_IDLE: begin
          if (go) begin
            state         <= S_WORK;
            cnt           <= '0;
            delay_trigger <= 1'b1;
            m_act         <= cfg_valid ? cfg_m : m_cfg;
            n_act         <= cfg_valid ? cfg_n : n_cfg;
          end
        end
        S_WORK: begin
          if (cnt == CW'(WORK_CYCLES - 1)) begin
            state    <= S_CLEAR;
            clear    <= 1'b1;
            cnt      <= '0;
            ops_done <= ops_done + 1'b1;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        default: begin
          state <= S_CLEAR;
          clear <= 1'b1;
        end
      endcase
    end
  end

  assign busy  = (state != S_IDLE);

  // clear is a flip-flop output (it drives asynchronous clears downstream)
  // and is only ever high in the clearing state.
  a_clear_only_in_clear_state : assert property (@(posedge clk) disable iff (!rst_n)
    clear |-> (state == S_CLEAR));

  // The trigger only ever comes out of an idle or just-cleared generator.
  a_trigger_after_clear : assert property (@(posedge clk) disable iff (!rst_n)
    delay_trigger |-> (state == S_WORK && cnt == '0));
endmodule
