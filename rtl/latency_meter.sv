// latency_meter: start-to-stop latency of the test platform.
// The ART generator raises start_flag when it begins sending ART data; the
// receive side raises stop_flag when the first word carrying a hit comes
// back. After arm, the meter counts 160 MHz cycles from the first start_flag
// to the next stop_flag and holds the count with done set. The start and
// stop flags follow the paper, where they were measured on an oscilloscope;
// the cycle counter is this design's stand-in for that measurement.
// Timing: latency = number of rising edges from the start_flag cycle to the
// stop_flag cycle; done rises the cycle after stop_flag.
module latency_meter #(
  parameter int unsigned CNT_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             arm,
  input  logic             start_flag,
  input  logic             stop_flag,
  output logic [CNT_W-1:0] latency,
  output logic             done
);
  typedef enum logic [1:0] {L_IDLE, L_WAIT_START, L_COUNT, L_DONE} lstate_e;
  lstate_e st;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st      <= L_IDLE;
      latency <= '0;
      done    <= 1'b0;
    end else begin
      unique case (st)
        L_IDLE, L_DONE: if (arm) begin
          st      <= L_WAIT_START;
          latency <= '0;
          done    <= 1'b0;
        end
        L_WAIT_START: if (start_flag) begin
          st      <= L_COUNT;
          latency <= '0;
        end
        L_COUNT: begin
          if (stop_flag) begin
            st   <= L_DONE;
            done <= 1'b1;
          end
          if (latency != '1) latency <= latency + 1'b1;
        end
        default: st <= L_IDLE;
      endcase
    end
  end
endmodule
