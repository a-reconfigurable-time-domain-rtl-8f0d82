// op_sequencer: clocked controller that runs the macro's write, calibration and compute
// procedures and drives the line decoders, the write pulse, the DEC_I pulse and the TDC clear.
//
// Commands (start strobe, accepted only when busy = 0):
//   CMD_WRITE_COL - store the weight bits w_col[row] into column col:
//       1. program the column's WL devices to LVT (column-wide program pulse),
//       2. program the column's WL-bar devices to LVT,
//       3. for every row, erase (row-selective, other rows' bulks at -2 V inhibit) each device
//          that must hold HVT. XOR encoding (mode = MODE_XOR_MAC): bit 1 = +1 -> main LVT,
//          complement HVT; bit 0 = -1 -> main HVT, complement LVT. AND encoding (any other
//          mode): bit 1 -> main LVT; bit 0 -> main HVT; complement always HVT.
//       4. if cal_en, calibrate every LVT device of the column (multilevel-state calibration):
//          run a calibration read (only that cell's column at V_H, so all other stages are slow)
//          and compare the TDC code with cal_target; while the code is below the target (t_dL
//          too short) apply one partial-erase pulse with the next BuL code (BuL stepped from
//          -2 V towards 0 V raises the device's VT a little) and read again. Code equal to the
//          target ends the device's calibration; a code above the target (overshoot) or an
//          exhausted BuL code sets cal_fail for that row.
//   CMD_COMPUTE - one compute in cfg mode on row `row` with activations x / column mask:
//       set up the lines, clear the TDC, raise DEC_I, wait, capture TDC_Th into th_q, lower DEC_I.
// The write order, encodings and the calibration loop follow the paper's procedures (on the test
// chip they were applied by bench instruments). Cycle timing is this design's:
//   write pulse  : 1 setup cycle + WR_CYC cycles with wr_pulse high
//   measurement  : 1 setup cycle (TDC clear), then DEC_I high for SETTLE_CYC-1 cycles; the TDC
//                  flip-flops are captured into th_q on the edge that drops DEC_I; then
//                  SETTLE_CYC cycles with DEC_I low so that every delay stage recovers
//   CMD_COMPUTE  : the edge that raises done comes 2 + 2*SETTLE_CYC edges after the edge that
//                  samples start (10 cycles at the defaults).
// (SETTLE_CYC-1) clock periods must exceed the delay of the last reference edge REF[M].
//
// Lint note: rst_n is both the asynchronous reset and the 'disable iff' of the clocked
// assertions, so a linter reports it as used synchronously and asynchronously; the logic only
// uses it as an asynchronous reset.
module op_sequencer
  import tdimc_pkg::*;
#(
  parameter int N_ROWS     = 3,
  parameter int N_COLS     = 3,
  parameter int BULW       = 6,
  parameter int WR_CYC     = 2,
  parameter int SETTLE_CYC = 4,
  localparam int M  = N_COLS,
  localparam int OW = $clog2(M + 1),
  localparam int RW = (N_ROWS > 1) ? $clog2(N_ROWS) : 1,
  localparam int CW = (N_COLS > 1) ? $clog2(N_COLS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  cmd_e              cmd,
  input  mode_e             cfg_mode,
  input  logic [RW-1:0]     cfg_row,
  input  logic [CW-1:0]     cfg_col,
  input  logic [M-1:0]      cfg_x,
  input  logic [M-1:0]      cfg_mask,
  input  logic [N_ROWS-1:0] cfg_w,
  input  logic              cfg_cal_en,
  input  logic [OW-1:0]     cfg_cal_target,
  input  logic [M:0]        tdc_th,     // live TDC flip-flops
  input  logic [OW-1:0]     code,       // TDC_O of th_q
  output line_op_e          l_op,
  output mode_e             l_mode,
  output logic [RW-1:0]     l_row,
  output logic [CW-1:0]     l_col,
  output fe_sel_e           l_fe,
  output logic [M-1:0]      l_x,
  output logic [M-1:0]      l_mask,
  output logic [BULW-1:0]   bul_code,
  output logic              wr_pulse,
  output logic              dec_i,
  output logic              tdc_rst_n,
  output logic [M:0]        th_q,
  output mode_e             res_mode,   // mode of the last compute, for result decoding
  output logic              busy,
  output logic              done,
  output logic [N_ROWS-1:0] cal_fail,
  output logic [15:0]       mls_pulses  // partial-erase pulses since reset
);

  typedef enum logic [3:0] {
    S_IDLE, S_PGM, S_ERS, S_CAL_START, S_CAL_MEAS, S_CAL_CHECK, S_CMP, S_DONE,
    S_WSETUP, S_WPULSE, S_MSETUP, S_MHIGH, S_MLOW
  } state_e;

  localparam int CNTW = $clog2((WR_CYC > SETTLE_CYC ? WR_CYC : SETTLE_CYC) + 1);

  state_e            state, ret;
  logic [CNTW-1:0]   cnt;
  logic [RW-1:0]     r_q;
  fe_sel_e           fe_q;
  logic [CW-1:0]     col_q;
  logic [N_ROWS-1:0] w_q;
  logic              xor_q, cal_en_q;
  logic [OW-1:0]     tgt_q;

  function automatic logic needs_hvt(logic xm, logic w, fe_sel_e fe);
    if (fe == FE_MAIN) return !w;
    return xm ? w : 1'b1;
  endfunction

  logic    last_row, has_lvt;
  fe_sel_e lvt_fe;
  always_comb begin
    last_row = (r_q == RW'(N_ROWS - 1));
    has_lvt  = xor_q | w_q[r_q];
    lvt_fe   = (xor_q && !w_q[r_q]) ? FE_COMP : FE_MAIN;
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      ret        <= S_IDLE;
      cnt        <= '0;
      r_q        <= '0;
      fe_q       <= FE_MAIN;
      col_q      <= '0;
      w_q        <= '0;
      xor_q      <= 1'b0;
      cal_en_q   <= 1'b0;
      tgt_q      <= '0;
      l_op       <= LOP_IDLE;
      l_mode     <= MODE_XOR_MAC;
      l_row      <= '0;
      l_col      <= '0;
      l_fe       <= FE_MAIN;
      l_x        <= '0;
      l_mask     <= '0;
      bul_code   <= '0;
      wr_pulse   <= 1'b0;
      dec_i      <= 1'b0;
      tdc_rst_n  <= 1'b0;
      th_q       <= '0;
      res_mode   <= MODE_XOR_MAC;
      done       <= 1'b0;
      cal_fail   <= '0;
      mls_pulses <= '0;
    end else begin
      done      <= 1'b0;
      tdc_rst_n <= 1'b1;
      unique case (state)
        S_IDLE: begin
          l_op <= LOP_IDLE;
          if (start && cmd == CMD_WRITE_COL) begin
            col_q    <= cfg_col;
            w_q      <= cfg_w;
            xor_q    <= (cfg_mode == MODE_XOR_MAC);
            cal_en_q <= cfg_cal_en;
            tgt_q    <= cfg_cal_target;
            cal_fail <= '0;
            fe_q     <= FE_MAIN;
            state    <= S_PGM;
          end else if (start && cmd == CMD_COMPUTE) begin
            l_op     <= LOP_COMPUTE;
            l_mode   <= cfg_mode;
            l_row    <= cfg_row;
            l_col    <= cfg_col;
            l_x      <= cfg_x;
            l_mask   <= cfg_mask;
            res_mode <= cfg_mode;
            ret      <= S_DONE;
            state    <= S_MSETUP;
          end
        end

        // Column program: WL devices, then WL-bar devices.
        S_PGM: begin
          l_op  <= LOP_PROGRAM;
          l_col <= col_q;
          l_fe  <= fe_q;
          state <= S_WSETUP;
          if (fe_q == FE_MAIN) begin
            fe_q <= FE_COMP;
            ret  <= S_PGM;
          end else begin
            fe_q <= FE_MAIN;
            r_q  <= '0;
            ret  <= S_ERS;
          end
        end

        // Row-selective erase of every device that must be HVT.
        S_ERS: begin : ers
          state_e nxt;
          if (last_row && fe_q == FE_COMP) nxt = cal_en_q ? S_CAL_START : S_DONE;
          else                             nxt = S_ERS;
          if (fe_q == FE_COMP) begin
            fe_q <= FE_MAIN;
            r_q  <= last_row ? '0 : r_q + 1'b1;
          end else begin
            fe_q <= FE_COMP;
          end
          if (needs_hvt(xor_q, w_q[r_q], fe_q)) begin
            l_op  <= LOP_ERASE;
            l_row <= r_q;
            l_col <= col_q;
            l_fe  <= fe_q;
            ret   <= nxt;
            state <= S_WSETUP;
          end else begin
            state <= nxt;
          end
        end

        // Multilevel-state calibration of the LVT device in each row of the column.
        S_CAL_START: begin
          bul_code <= '0;
          if (has_lvt) state <= S_CAL_MEAS;
          else if (last_row) state <= S_DONE;
          else r_q <= r_q + 1'b1;
        end
        S_CAL_MEAS: begin
          l_op   <= LOP_COMPUTE;
          l_mode <= MODE_CAL_READ;
          l_row  <= r_q;
          l_col  <= col_q;
          ret    <= S_CAL_CHECK;
          state  <= S_MSETUP;
        end
        S_CAL_CHECK: begin
          if (code < tgt_q && bul_code != '1) begin
            bul_code   <= bul_code + 1'b1;
            mls_pulses <= mls_pulses + 1'b1;
            l_op       <= LOP_MLS;
            l_row      <= r_q;
            l_col      <= col_q;
            l_fe       <= lvt_fe;
            ret        <= S_CAL_MEAS;
            state      <= S_WSETUP;
          end else begin
            if (code != tgt_q) cal_fail[r_q] <= 1'b1;
            if (last_row) state <= S_DONE;
            else begin
              r_q   <= r_q + 1'b1;
              state <= S_CAL_START;
            end
          end
        end

        S_DONE: begin
          l_op  <= LOP_IDLE;
          done  <= 1'b1;
          state <= S_IDLE;
        end

        // Write pulse: one setup cycle, then WR_CYC cycles high.
        S_WSETUP: begin
          cnt   <= '0;
          state <= S_WPULSE;
        end
        S_WPULSE: begin
          wr_pulse <= 1'b1;
          cnt      <= cnt + 1'b1;
          if (cnt == CNTW'(WR_CYC)) begin
            wr_pulse <= 1'b0;
            state    <= ret;
          end
        end

        // Measurement: clear TDC, DEC_I high for SETTLE_CYC cycles, capture, DEC_I low.
        S_MSETUP: begin
          tdc_rst_n <= 1'b0;
          cnt       <= '0;
          state     <= S_MHIGH;
        end
        S_MHIGH: begin
          dec_i <= 1'b1;
          cnt   <= cnt + 1'b1;
          if (cnt == CNTW'(SETTLE_CYC - 1)) begin
            th_q  <= tdc_th;
            dec_i <= 1'b0;
            cnt   <= '0;
            state <= S_MLOW;
          end
        end
        S_MLOW: begin
          cnt <= cnt + 1'b1;
          if (cnt == CNTW'(SETTLE_CYC - 1)) state <= ret;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // A write pulse and a compute pulse never overlap, and the line set-up is frozen while
  // either pulse is high.
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n) !(wr_pulse && dec_i));
  a_lines_stable_wr: assert property (@(posedge clk) disable iff (!rst_n)
                                      wr_pulse && $past(wr_pulse) |-> $stable(l_op) && $stable(l_row) && $stable(l_col));
  a_lines_stable_dec: assert property (@(posedge clk) disable iff (!rst_n)
                                       dec_i && $past(dec_i) |-> $stable(l_op) && $stable(l_mode) && $stable(l_x));

endmodule
