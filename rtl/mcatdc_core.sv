`timescale 1ps/1fs
// mcatdc_core -- synthesizable back end of one multi-chain averaging channel:
// everything after the tap flip-flops of the M tapped delay lines.
//
// For each chain: hit detection and fine encoding (plain_tdc), the
// code-density calibration (code_density_cal) and the INL correction
// (inl_cor). Then the M plain times of a hit are gathered (hit_aligner),
// the offsets T_D(m) are measured (offset_estimator) and the averager forms
// t_Final = (1/M) sum (t_Plain(i) - T_D(i)). A small sequencer runs the
// calibration: CH_UNCAL after reset (nominal bin, no offsets), a cal_start
// pulse starts CH_DENSITY (2**LOG2_NCAL hits build the tables), then
// CH_OFFSET (2**LOG2_NOFF hits give T_D), then CH_READY (tables and offsets
// in use). The averaging formula follows the paper; the paper performs these
// steps in PC software and notes they could be done in the FPGA, and the
// hardware form, the sequencer and all widths are this design's choices.
//
// Interface: taps[m] are the thermometer codes sampled on clk; coarse is the
// shared coarse count; t_final/t_valid give one time stamp per hit in units
// of T_clk / 2**FRAC_W, 4 clocks after the sampling edge (5 if the chains
// split across two edges). drop pulses when only some chains saw a hit.
module mcatdc_core
  import mcatdc_pkg::*;
#(
  parameter int unsigned M         = mcatdc_pkg::M_CHAINS,
  parameter int unsigned N_TAPS    = mcatdc_pkg::TAPS_PER_CHAIN,
  parameter int unsigned LOG2_NCAL = 16,
  parameter int unsigned LOG2_NOFF = 10
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic [N_TAPS-1:0] taps [M],   // sampled tap flip-flops of each chain
  input  coarse_t   coarse,
  input  logic      cal_start,
  output ch_state_e state,
  output tdc_time_t t_final,
  output logic      t_valid,
  output logic      drop
);

  raw_code_t         raw       [M];
  logic              raw_valid [M];
  tdc_time_t         t_plain   [M];
  logic              tp_valid  [M];
  logic              lut_we    [M];
  fine_t             lut_addr  [M];
  logic [FRAC_W:0]   lut_data  [M];
  logic [M-1:0]      cal_done;
  logic [M-1:0]      cal_busy;

  logic              al_valid;
  tdc_time_t         al_t      [M];
  diff_t             td_est    [M];
  diff_t             td_use    [M];
  logic              off_busy, off_done;

  logic              dens_start, off_start;
  logic [1:0]        settle;
  logic              use_lut;

  for (genvar i = 0; i < M; i++) begin : g_chain
    plain_tdc #(.N_TAPS(N_TAPS)) u_plain (
      .clk   (clk),
      .rst_n (rst_n),
      .taps  (taps[i]),
      .coarse(coarse),
      .raw   (raw[i]),
      .valid (raw_valid[i])
    );

    code_density_cal #(.LOG2_NCAL(LOG2_NCAL)) u_cal (
      .clk       (clk),
      .rst_n     (rst_n),
      .start     (dens_start),
      .code_valid(raw_valid[i]),
      .code      (raw[i].fine),
      .lut_we    (lut_we[i]),
      .lut_addr  (lut_addr[i]),
      .lut_data  (lut_data[i]),
      .busy      (cal_busy[i]),
      .done      (cal_done[i])
    );

    inl_cor u_inl (
      .clk      (clk),
      .rst_n    (rst_n),
      .use_lut  (use_lut),
      .lut_we   (lut_we[i]),
      .lut_addr (lut_addr[i]),
      .lut_data (lut_data[i]),
      .raw      (raw[i]),
      .raw_valid(raw_valid[i]),
      .t_plain  (t_plain[i]),
      .t_valid  (tp_valid[i])
    );

    assign td_use[i] = (state == CH_READY) ? td_est[i] : '0;
  end

  hit_aligner #(.M(M)) u_align (
    .clk      (clk),
    .rst_n    (rst_n),
    .valid_in (tp_valid),
    .t_in     (t_plain),
    .valid_out(al_valid),
    .t_out    (al_t),
    .drop     (drop)
  );

  offset_estimator #(.M(M), .LOG2_NOFF(LOG2_NOFF)) u_off (
    .clk    (clk),
    .rst_n  (rst_n),
    .start  (off_start),
    .valid  (al_valid),
    .t_plain(al_t),
    .td     (td_est),
    .busy   (off_busy),
    .done   (off_done)
  );

  averager #(.M(M)) u_avg (
    .clk      (clk),
    .rst_n    (rst_n),
    .valid_in (al_valid),
    .t_plain  (al_t),
    .td       (td_use),
    .valid_out(t_valid),
    .t_final  (t_final)
  );

  assign use_lut = (state == CH_OFFSET) || (state == CH_READY);

  // Calibration sequencer. settle masks the done flags of the previous run
  // for the cycles in which the start pulse travels.
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state      <= CH_UNCAL;
      dens_start <= 1'b0;
      off_start  <= 1'b0;
      settle     <= '0;
    end else begin
      dens_start <= 1'b0;
      off_start  <= 1'b0;
      if (settle != '0) settle <= settle - 1'b1;
      if (cal_start) begin
        state      <= CH_DENSITY;
        dens_start <= 1'b1;
        settle     <= 2'd2;
      end else begin
        unique case (state)
          CH_DENSITY:
            if (settle == '0 && &cal_done) begin
              state     <= CH_OFFSET;
              off_start <= 1'b1;
              settle    <= 2'd2;
            end
          CH_OFFSET:
            if (settle == '0 && !off_busy && off_done) state <= CH_READY;
          default: ;
        endcase
      end
    end

  // Every chain of a channel sees every hit, so the chains' calibrations
  // run in lockstep.
  assert property (@(posedge clk) disable iff (!rst_n) (cal_busy == '0) || (cal_busy == '1));

endmodule
