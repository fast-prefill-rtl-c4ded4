// global_fsm: Global Finite State Machine.
//
// Orders the stages of one layer's sparse-attention step and owns the shared
// hybrid MPU. On start it clears the attention unit's job state (PH_CLR),
// runs the index generator (PH_SIGU) with the MPU granted to it, and, once
// every head's indices have been delivered (the barrier: the attention unit
// needs the complete index set), runs the attention unit (PH_SAU) with the
// MPU granted to it. done pulses when the attention unit finishes; the
// accelerator's output buffer is then complete. cycles counts the cycles of
// the step. The stage order, the barrier and MPU arbitration follow the
// paper; the KV-generation and FFN phases it also names are not part of this
// RTL (no datapath for them is built).
module global_fsm (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  output logic        busy,
  output logic        done,
  output logic        sau_clr,
  output logic        sigu_start,
  input  logic        sigu_done,
  output logic        sau_start,
  input  logic        sau_done,
  output logic        mpu_grant_sau,
  output logic [1:0]  phase,
  output logic [31:0] cycles
);
  typedef enum logic [1:0] {PH_IDLE = 2'd0, PH_CLR = 2'd1, PH_SIGU = 2'd2, PH_SAU = 2'd3} phase_e;
  phase_e ph;

  assign phase         = ph;
  assign busy          = ph != PH_IDLE;
  assign mpu_grant_sau = ph == PH_SAU;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph <= PH_IDLE;
      done <= 1'b0; sau_clr <= 1'b0; sigu_start <= 1'b0; sau_start <= 1'b0;
      cycles <= '0;
    end else begin
      done <= 1'b0; sau_clr <= 1'b0; sigu_start <= 1'b0; sau_start <= 1'b0;
      if (ph != PH_IDLE) cycles <= cycles + 1'b1;
      unique case (ph)
        PH_IDLE: if (start) begin
          cycles <= '0;
          sau_clr <= 1'b1;
          ph <= PH_CLR;
        end
        PH_CLR: begin
          sigu_start <= 1'b1;
          ph <= PH_SIGU;
        end
        PH_SIGU: if (sigu_done) begin
          sau_start <= 1'b1;
          ph <= PH_SAU;
        end
        PH_SAU: if (sau_done) begin
          done <= 1'b1;
          ph <= PH_IDLE;
        end
        default: ph <= PH_IDLE;
      endcase
    end
  end

  // the two compute units never run together
  assert property (@(posedge clk) disable iff (!rst_n) sau_start |-> ph == PH_SAU);
endmodule
