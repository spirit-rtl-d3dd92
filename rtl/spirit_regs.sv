// spirit_regs: configuration and status registers of the SoC.
//
// A simple synchronous register bus (we, addr, wdata; rdata combinational)
// loads the patient-specific values found by offline training and reads
// back results. Map (16-bit registers):
//   0x00 CTRL      [0] detector online learning, [1] predictor online
//                  learning, [4:2] CIC decimation log2
//   0x01 DET_BIAS  0x02 PRED_BIAS       (Q4.12)
//   0x03 DET_THR   0x04 PRED_THR        (probability, 255 = 1)
//   0x05 HC_HI     0x06 HC_LO           high-confidence levels
//   0x07 HC_CNT                         consecutive samples per update
//   0x08 LR        [3:0] detector, [7:4] predictor SGD shift
//   0x09 PRED_ACC_THR                   prediction accumulator threshold
//   0x0A PRED_TIME (ro) minutes of the last true prediction
//   0x0B TP_CNT, 0x0C FP_CNT, 0x0D FN_CNT (ro, saturating event counters)
//   0x0E PROB      (ro) [7:0] last detector, [15:8] last predictor probability
//   0x0F PRED_ACC  (ro) prediction accumulator
//   0x10 FLAGS     (ro) [0] prediction window open, [1] seizure (smoothed),
//                  [2] feature extractor busy, [3] classifier busy
//   0x40-0x67 detector weights (ch*5+f), 0x80-0xCF predictor weights
//   (ch*10+f): forwarded to the classifier's weight port.
// The paper only names this "interface" logic; the bus and the map are this
// design's own. Reset values are neutral defaults, online learning off.
module spirit_regs
  import spirit_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        we,
  input  logic [7:0]  addr,
  input  logic [15:0] wdata,
  output logic [15:0] rdata,
  output cfg_t        cfg,
  output logic [2:0]  cic_log2_r,
  // classifier weight port
  output logic        w_we,
  output logic        w_sel,
  output logic [6:0]  w_idx,
  output wgt_t        w_wdata,
  input  wgt_t        w_rdata,
  // status events
  input  logic        tp,
  input  logic        fp,
  input  logic        fn,
  input  logic [5:0]  pred_time_min,
  // live status
  input  prob_t       det_prob,
  input  prob_t       pred_prob,
  input  logic [15:0] pred_acc,
  input  logic [3:0]  flags
);
  logic [15:0] tp_cnt, fp_cnt, fn_cnt;
  logic        is_det_w, is_pred_w;

  assign is_det_w  = (addr >= 8'h40) && (addr < 8'h40 + 8'(N_CH * N_DET_F));
  assign is_pred_w = (addr >= 8'h80) && (addr < 8'h80 + 8'(N_CH * N_PRED_F));
  assign w_we      = we && (is_det_w || is_pred_w);
  assign w_sel     = is_pred_w;
  assign w_idx     = is_pred_w ? 7'(addr - 8'h80) : 7'(addr - 8'h40);
  assign w_wdata   = wgt_t'(wdata);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg.det_train_en  <= 1'b0;
      cfg.pred_train_en <= 1'b0;
      cfg.det_bias      <= '0;
      cfg.pred_bias     <= '0;
      cfg.det_thr       <= 8'd128;
      cfg.pred_thr      <= 8'd128;
      cfg.hc_hi         <= 8'd230;
      cfg.hc_lo         <= 8'd25;
      cfg.hc_cnt        <= 8'd5;
      cfg.det_lr_shift  <= 4'd8;
      cfg.pred_lr_shift <= 4'd8;
      cfg.pred_acc_thr  <= 16'd1000;
      cic_log2_r        <= 3'd2;
      tp_cnt <= '0;
      fp_cnt <= '0;
      fn_cnt <= '0;
    end else begin
      if (we) begin
        case (addr)
          8'h00: begin
            cfg.det_train_en  <= wdata[0];
            cfg.pred_train_en <= wdata[1];
            cic_log2_r        <= wdata[4:2];
          end
          8'h01: cfg.det_bias     <= wgt_t'(wdata);
          8'h02: cfg.pred_bias    <= wgt_t'(wdata);
          8'h03: cfg.det_thr      <= wdata[7:0];
          8'h04: cfg.pred_thr     <= wdata[7:0];
          8'h05: cfg.hc_hi        <= wdata[7:0];
          8'h06: cfg.hc_lo        <= wdata[7:0];
          8'h07: cfg.hc_cnt       <= wdata[7:0];
          8'h08: begin
            cfg.det_lr_shift  <= wdata[3:0];
            cfg.pred_lr_shift <= wdata[7:4];
          end
          8'h09: cfg.pred_acc_thr <= wdata;
          default: ;
        endcase
      end
      if (tp && tp_cnt != '1) tp_cnt <= tp_cnt + 1'b1;
      if (fp && fp_cnt != '1) fp_cnt <= fp_cnt + 1'b1;
      if (fn && fn_cnt != '1) fn_cnt <= fn_cnt + 1'b1;
    end
  end

  always_comb begin
    rdata = '0;
    case (addr)
      8'h00: rdata = {11'd0, cic_log2_r, cfg.pred_train_en, cfg.det_train_en};
      8'h01: rdata = cfg.det_bias;
      8'h02: rdata = cfg.pred_bias;
      8'h03: rdata = {8'd0, cfg.det_thr};
      8'h04: rdata = {8'd0, cfg.pred_thr};
      8'h05: rdata = {8'd0, cfg.hc_hi};
      8'h06: rdata = {8'd0, cfg.hc_lo};
      8'h07: rdata = {8'd0, cfg.hc_cnt};
      8'h08: rdata = {8'd0, cfg.pred_lr_shift, cfg.det_lr_shift};
      8'h09: rdata = cfg.pred_acc_thr;
      8'h0A: rdata = {10'd0, pred_time_min};
      8'h0B: rdata = tp_cnt;
      8'h0C: rdata = fp_cnt;
      8'h0D: rdata = fn_cnt;
      8'h0E: rdata = {pred_prob, det_prob};
      8'h0F: rdata = pred_acc;
      8'h10: rdata = {12'd0, flags};
      default: if (is_det_w || is_pred_w) rdata = w_rdata;
    endcase
  end
endmodule
