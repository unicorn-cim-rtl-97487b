// cim_controller -- sequences weight loading and MAC operations.
//
// In IDLE the controller pops one weight-row write per cycle from the weight buffer and
// lets the top route it to the addressed macro. A start request is remembered and served
// only once the buffer is empty, so every MAC sees all weights written before it. It then
// pulses macro_start, waits in RUN for the macros' valid (LATENCY cycles later), pulses
// capture to load the output buffer and done to tell the memory side. The paper names
// the controller only; this sequencing is this design's choice.
//
// Interface and timing: synchronous, asynchronous active-low reset. busy is high while a
// request is pending, a write is queued or an operation runs. The macro's valid must come
// exactly LATENCY cycles after macro_start (asserted).
module cim_controller #(
  parameter int unsigned LATENCY = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic wb_empty,
  output logic wb_pop,
  output logic macro_start,
  input  logic macro_valid,
  output logic capture,
  output logic busy,
  output logic done
);

  typedef enum logic { S_IDLE, S_RUN } state_e;

  state_e state;
  logic   pending;
  logic [$clog2(LATENCY+1)-1:0] wait_cnt;

  always_comb begin
    wb_pop      = (state == S_IDLE) && !wb_empty;
    macro_start = (state == S_IDLE) && wb_empty && (pending || start);
    capture     = (state == S_RUN) && macro_valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      pending  <= 1'b0;
      done     <= 1'b0;
      wait_cnt <= '0;
    end else begin
      done <= capture;
      case (state)
        S_IDLE: begin
          if (macro_start) begin
            state    <= S_RUN;
            pending  <= 1'b0;
            wait_cnt <= '0;
          end else if (start) begin
            pending  <= 1'b1;
          end
        end
        S_RUN: begin
          if (start) pending <= 1'b1;
          wait_cnt <= wait_cnt + 1'b1;
          if (macro_valid) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state == S_RUN) || pending || !wb_empty;

  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == S_RUN && macro_valid) |-> (int'(wait_cnt) == LATENCY - 1))
    else $error("cim_controller: macro latency differs from LATENCY");

endmodule
