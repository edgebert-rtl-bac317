// dvfs_controller: per-sentence dynamic voltage and frequency scaling.
//
// States and the supply/clock they request:
//   STANDBY  idle between sentences: LDO code 0 (0.50 V), PLL at F_STANDBY
//   NOMINAL  wake: code VDD_NOM_CODE (0.80 V) and F_MAX; layer 1 runs here
//   SEARCH   a predicted exit layer L arrived: N_cycles = (L-1) *
//            cycles_per_layer must fit in the time left, T - T_elapsed.
//            The V/F LUT (entries ordered by rising frequency, entry i in
//            lane i%N of aux word lut_base + i/N, format {vdd_code[15:12],
//            freq_mhz[11:0]}) is scanned one entry per cycle and the first
//            entry with freq_mhz * (T - T_elapsed)[us] >= N_cycles is taken;
//            if none fits, the last (fastest) one is used
//   SCALED   the chosen codes hold until sentence_done (back to NOMINAL)
// T_elapsed counts us_tick pulses (1 us time base) since wake. After every
// change of the codes vf_ready drops until SETTLE_CYCLES clock cycles have
// passed and the PLL reports lock. Choosing the lowest V/F point that meets
// Freq_opt = N_cycles / (T - T_elapsed) from a LUT follows the paper; the
// divider-free compare, the LUT format, the microsecond time base and the
// settling rule are this design's choices. 0.5 V standby and 0.8 V nominal
// with 25 mV LDO steps are the paper's numbers.
module dvfs_controller
  import edgebert_pkg::*;
#(
  parameter int N             = N_DEF,
  parameter int SETTLE_CYCLES = 100,
  parameter int VDD_NOM_CODE  = 12,
  parameter int F_MAX_MHZ     = 1000,
  parameter int F_STANDBY_MHZ = 0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               wake,
  input  logic               sentence_done,
  input  logic               standby,
  input  logic               us_tick,
  input  logic [19:0]        t_target_us,
  input  logic [31:0]        cycles_per_layer,
  input  logic [AUX_AW-1:0]  lut_base,
  input  logic [7:0]         lut_len,
  input  logic               pred_valid,
  input  logic [3:0]         pred_layer,
  output logic               aux_re,
  output logic [AUX_AW-1:0]  aux_addr,
  input  logic               aux_rvalid,
  input  logic [N-1:0][15:0] aux_rdata,
  input  logic               pll_locked,
  output logic [3:0]         ldo_code,
  output logic [11:0]        pll_freq_mhz,
  output logic               vf_ready,
  output logic               searching,
  output logic [1:0]         dvfs_state,
  output logic [31:0]        scale_count
);
  timeunit 1ns;
  timeprecision 1ps;
  typedef enum logic [1:0] {D_STANDBY, D_NOMINAL, D_SEARCH, D_SCALED} dstate_e;
  dstate_e state;
  logic [19:0] elapsed;
  logic [31:0] ncyc;
  logic [7:0]  idx;
  logic        wait_rd;
  logic [15:0] settle;

  assign searching  = (state == D_SEARCH);
  assign dvfs_state = state;
  assign aux_re     = (state == D_SEARCH) && !wait_rd;
  assign aux_addr   = lut_base + AUX_AW'(idx / 8'(N));

  logic [15:0] entry;
  logic [19:0] remain;
  logic [43:0] budget;
  assign entry  = aux_rdata[idx % 8'(N)];
  assign remain = (t_target_us > elapsed) ? t_target_us - elapsed : 20'd0;
  assign budget = 44'(entry[11:0]) * 44'(remain);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= D_STANDBY; elapsed <= '0; ncyc <= '0; idx <= '0; wait_rd <= 1'b0;
      ldo_code <= '0; pll_freq_mhz <= 12'(F_STANDBY_MHZ); settle <= 16'(SETTLE_CYCLES);
      scale_count <= '0;
    end else begin
      if (us_tick && state != D_STANDBY) elapsed <= elapsed + 20'd1;
      if (settle != 0) settle <= settle - 16'd1;
      unique case (state)
        D_STANDBY: if (wake) begin
          state <= D_NOMINAL; elapsed <= '0;
          ldo_code <= 4'(VDD_NOM_CODE); pll_freq_mhz <= 12'(F_MAX_MHZ); settle <= 16'(SETTLE_CYCLES);
        end
        D_NOMINAL: begin
          if (standby) begin
            state <= D_STANDBY; ldo_code <= '0; pll_freq_mhz <= 12'(F_STANDBY_MHZ);
            settle <= 16'(SETTLE_CYCLES);
          end else if (wake) elapsed <= '0;
          else if (pred_valid) begin
            state <= D_SEARCH; idx <= '0; wait_rd <= 1'b0;
            ncyc  <= 32'(pred_layer - 4'd1) * cycles_per_layer;
          end
        end
        D_SEARCH: begin
          if (!wait_rd) wait_rd <= 1'b1;
          else if (aux_rvalid) begin
            wait_rd <= 1'b0;
            if (budget >= 44'(ncyc) || idx + 8'd1 == lut_len) begin
              state <= D_SCALED; ldo_code <= entry[15:12]; pll_freq_mhz <= entry[11:0];
              settle <= 16'(SETTLE_CYCLES); scale_count <= scale_count + 32'd1;
            end else idx <= idx + 8'd1;
          end
        end
        D_SCALED: if (sentence_done || standby) begin
          state <= D_NOMINAL; ldo_code <= 4'(VDD_NOM_CODE); pll_freq_mhz <= 12'(F_MAX_MHZ);
          settle <= 16'(SETTLE_CYCLES);
        end
        default: state <= D_STANDBY;
      endcase
    end
  end

  assign vf_ready = (settle == 0) && pll_locked && (state != D_SEARCH);
endmodule
