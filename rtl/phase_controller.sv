// phase_controller: sequences the training and inference phases of the
// spiking RBM on the array and gates the external input spike trains.
//
// A training sample is one data phase followed by one model phase:
//   DATA   image, label and bias neurons receive Poisson trains; the
//          presynaptic pulse generators use the weight-raising pattern.
//   MODEL  only the visible and hidden bias neurons receive Poisson trains;
//          the pulse generators use the weight-lowering pattern.
// An inference is one INFER phase: image and bias neurons receive Poisson
// trains, the programming lines are disabled, and the label spike counters
// are cleared at the start and read out at the end.
// Which neurons receive input in which phase, and the polarity of learning
// per phase, are the paper's. The phase lengths are run-time inputs in ticks
// (the paper does not give them; see the defaults in raven_top), and the
// one-tick clear/done strobes are this design's choices.
//
// Interface: `start_train` / `start_infer` are accepted only in IDLE.
// Each phase lasts exactly its programmed number of ticks (at least one).
// `train_done` / `infer_done` pulse in the first IDLE tick after a sequence,
// and `cnt_clear` in the first INFER tick. `slot` pulses once every SLOT
// ticks and times the Poisson generators.
module phase_controller
  import raven_pkg::*;
#(
  parameter int SLOT = SLOT_TICKS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start_train,
  input  logic        start_infer,
  input  logic [31:0] data_ticks,
  input  logic [31:0] model_ticks,
  input  logic [31:0] infer_ticks,
  output phase_e      phase,
  output logic        busy,
  output logic        slot,
  output logic        img_en,
  output logic        label_en,
  output logic        vbias_en,
  output logic        hbias_en,
  output logic        cnt_clear,
  output logic        cnt_en,
  output logic        train_done,
  output logic        infer_done
);

  logic [31:0] cnt;
  logic [$clog2(SLOT+1)-1:0] slot_cnt;
  logic last;

  assign busy = (phase != PHASE_IDLE);
  assign last = busy && (cnt <= 32'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase      <= PHASE_IDLE;
      cnt        <= '0;
      cnt_clear  <= 1'b0;
      train_done <= 1'b0;
      infer_done <= 1'b0;
    end else begin
      cnt_clear  <= 1'b0;
      train_done <= 1'b0;
      infer_done <= 1'b0;
      unique case (phase)
        PHASE_IDLE: begin
          if (start_train) begin
            phase <= PHASE_DATA;
            cnt   <= data_ticks;
          end else if (start_infer) begin
            phase     <= PHASE_INFER;
            cnt       <= infer_ticks;
            cnt_clear <= 1'b1;
          end
        end
        PHASE_DATA: begin
          if (last) begin
            phase <= PHASE_MODEL;
            cnt   <= model_ticks;
          end else cnt <= cnt - 1'b1;
        end
        PHASE_MODEL: begin
          if (last) begin
            phase      <= PHASE_IDLE;
            train_done <= 1'b1;
          end else cnt <= cnt - 1'b1;
        end
        PHASE_INFER: begin
          if (last) begin
            phase      <= PHASE_IDLE;
            infer_done <= 1'b1;
          end else cnt <= cnt - 1'b1;
        end
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot_cnt <= '0;
      slot     <= 1'b0;
    end else begin
      slot     <= (slot_cnt == '0);
      slot_cnt <= (slot_cnt == '0) ? ($bits(slot_cnt))'(SLOT - 1) : slot_cnt - 1'b1;
    end
  end

  always_comb begin
    img_en   = (phase == PHASE_DATA) || (phase == PHASE_INFER);
    label_en = (phase == PHASE_DATA);
    vbias_en = busy;
    hbias_en = busy;
    cnt_en   = (phase == PHASE_INFER);
  end

endmodule
