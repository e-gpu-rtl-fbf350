// egpu_power_ctrl: power controller inside the e-GPU controller.
//
// It works with the SLEEP_REQ instruction of the compute units. When a kernel
// is launched (start_i) it powers up and ungates the clock of every compute unit
// and, one cycle later, starts them. It then watches the end-of-execution event
// of each unit (cu_sleep_i), from the cycle after the start pulse on. As soon as unit i reports, its clock is gated and
// its power switch is opened; once every unit has reported, done_o pulses for
// one cycle, which the controller turns into the interrupt to the host. This
// sequence is the paper's. That the power switch and the clock gate move in the
// same cycle, and that a unit is released one cycle after its power is enabled,
// are this design's own simplifications (a real power switch needs a settling
// time and isolation cells, which belong to the physical design).
//
// Interface: start_i is a one-cycle pulse; cu_clk_en_o and cu_pwr_en_o are
// levels (1 = clock running / power on); cu_start_o is a one-cycle pulse to all
// units; busy_o is high from start_i until done_o; cu_done_o shows which units
// have finished the current kernel. abort_i (soft reset) returns to idle.
module egpu_power_ctrl #(
  parameter int unsigned NUM_CU = egpu_pkg::DEF_NUM_CU
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              start_i,
  input  logic              abort_i,
  input  logic [NUM_CU-1:0] cu_sleep_i,
  output logic [NUM_CU-1:0] cu_clk_en_o,
  output logic [NUM_CU-1:0] cu_pwr_en_o,
  output logic              cu_start_o,
  output logic [NUM_CU-1:0] cu_done_o,
  output logic              busy_o,
  output logic              done_o
);

  typedef enum logic [1:0] {P_IDLE, P_WAKE, P_GO, P_RUN} pstate_e;
  pstate_e state_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q     <= P_IDLE;
      cu_clk_en_o <= '0;
      cu_pwr_en_o <= '0;
      cu_start_o  <= 1'b0;
      cu_done_o   <= '0;
      done_o      <= 1'b0;
    end else begin
      cu_start_o <= 1'b0;
      done_o     <= 1'b0;
      if (abort_i) begin
        state_q     <= P_IDLE;
        cu_clk_en_o <= '0;
        cu_pwr_en_o <= '0;
      end else begin
        unique case (state_q)
          P_IDLE: if (start_i) begin
            cu_pwr_en_o <= '1;
            cu_clk_en_o <= '1;
            cu_done_o   <= '0;
            state_q     <= P_WAKE;
          end
          P_WAKE: begin
            cu_start_o <= 1'b1;
            state_q    <= P_GO;
          end
          // the units take the start pulse in this cycle; an event still shown
          // from the previous kernel is ignored
          P_GO: state_q <= P_RUN;
          P_RUN: begin
            for (int i = 0; i < NUM_CU; i++) begin
              if (cu_sleep_i[i] && !cu_done_o[i]) begin
                cu_done_o[i]   <= 1'b1;
                cu_clk_en_o[i] <= 1'b0;
                cu_pwr_en_o[i] <= 1'b0;
              end
            end
            if ((cu_done_o | cu_sleep_i) == '1) begin
              done_o  <= 1'b1;
              state_q <= P_IDLE;
            end
          end
          default: state_q <= P_IDLE;
        endcase
      end
    end
  end

  assign busy_o = (state_q != P_IDLE);

endmodule
