// config_regs: the sensor's programmable registers.
//
// A simple synchronous bus: on a clock with we=1, wdata is written to the
// register at addr; rdata returns the register at addr combinationally.
// Map (16-bit registers, reset value in brackets):
//   0x00 CTRL       [0] start (write 1: one-clock pulse, reads 0)
//                   [1] cnt_mode [0]  [2] img2d [0]  [3] hist_all [0]
//   0x01 NUM_STEPS  phase steps per measurement [1]
//   0x02 REPS       repetitions per step [1]
//   0x03 PHASE_K    phase increment k, 9 bits [16]
//   0x04 SEL0       starting phase code, 9 bits [0]
//   0x05 CNT_WIDTH  0: 8 bit, 1: 10 bit, 2: 12 bit [2]
//   0x06 HIST_TGT   cluster index counted by the histograms [0]
//   0x07 QUAD_EN    pixel enable (VSEL) per quadrant, 4 bits [0xF]
//   0x08 CAL        write {idx[13:8], trim[5:0]}: one entry of the phase
//                   calibration table (write-only, cal_we pulses)
//   0x09 STATUS     [0] busy (read-only)
//   0x0A STEP_IDX   current phase step (read-only)
//   0x0B REP_IDX    current repetition (read-only)
//   0x0C PHASE_NOM  current nominal phase code (read-only)
// The paper names the registers but gives no map or bus; all of this is
// this design's choice.
module config_regs
  import lidar_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        we,
  input  logic [7:0]  addr,
  input  logic [15:0] wdata,
  output logic [15:0] rdata,
  input  logic        busy,
  input  logic [15:0] step_idx,
  input  logic [15:0] rep_idx,
  input  logic [PHASE_W-1:0] phase_nom,
  output logic        start,
  output logic        cnt_mode,
  output logic        img2d,
  output logic        hist_all,
  output logic [15:0] num_steps,
  output logic [15:0] reps,
  output logic [PHASE_W-1:0] phase_k,
  output logic [PHASE_W-1:0] sel0,
  output cnt_width_e  cnt_width,
  output logic [15:0] hist_target,
  output logic [3:0]  quad_en,
  output logic        cal_we,
  output logic [5:0]  cal_addr,
  output logic signed [5:0] cal_data
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start <= 1'b0; cnt_mode <= 1'b0; img2d <= 1'b0; hist_all <= 1'b0;
      num_steps <= 16'd1; reps <= 16'd1; phase_k <= PHASE_W'(16); sel0 <= '0;
      cnt_width <= CW12; hist_target <= '0; quad_en <= 4'hF;
      cal_we <= 1'b0; cal_addr <= '0; cal_data <= '0;
    end else begin
      start  <= 1'b0;
      cal_we <= 1'b0;
      if (we) begin
        unique case (addr)
          8'h00: begin
            start <= wdata[0]; cnt_mode <= wdata[1]; img2d <= wdata[2]; hist_all <= wdata[3];
          end
          8'h01: num_steps   <= wdata;
          8'h02: reps        <= wdata;
          8'h03: phase_k     <= wdata[PHASE_W-1:0];
          8'h04: sel0        <= wdata[PHASE_W-1:0];
          8'h05: cnt_width   <= (wdata[1:0] == 2'd3) ? CW12 : cnt_width_e'(wdata[1:0]);
          8'h06: hist_target <= wdata;
          8'h07: quad_en     <= wdata[3:0];
          8'h08: begin
            cal_we <= 1'b1; cal_addr <= wdata[13:8]; cal_data <= wdata[5:0];
          end
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    unique case (addr)
      8'h00:   rdata = {12'b0, hist_all, img2d, cnt_mode, 1'b0};
      8'h01:   rdata = num_steps;
      8'h02:   rdata = reps;
      8'h03:   rdata = 16'(phase_k);
      8'h04:   rdata = 16'(sel0);
      8'h05:   rdata = 16'(cnt_width);
      8'h06:   rdata = hist_target;
      8'h07:   rdata = {12'b0, quad_en};
      8'h09:   rdata = {15'b0, busy};
      8'h0A:   rdata = step_idx;
      8'h0B:   rdata = rep_idx;
      8'h0C:   rdata = 16'(phase_nom);
      default: rdata = '0;
    endcase
  end

endmodule
