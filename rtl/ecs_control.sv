// ecs_control: frame control of the decoder.
//
// IDLE waits for `start`; the start cycle drives `load` for one clock, which captures
// the channel values, restarts the random source and clears every tracker and stage
// register. RUN lets the graph iterate (one tracker update per clock is one iteration)
// and counts clocks. The frame ends when either early-termination block reports a
// passing CRC (`pass_l` from the u side, `pass_r` from the code-bit side; the u side
// wins a tie), or after MAX_CYCLES clocks without one (`success` = 0). `done` is a
// one-clock pulse; `sel_r`, `success` and `cycles` (clocks from `load` to `done`) hold
// until the next start. Stopping on the CRC is the paper's; the tie rule, the
// handshake and MAX_CYCLES = 800 (the paper's maximum decoding latency) are applied
// here as this design's reading of the paper.
module ecs_control #(
  parameter int unsigned MAX_CYCLES = 800,
  parameter int unsigned CNT_W      = $clog2(MAX_CYCLES + 2)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             pass_l,
  input  logic             pass_r,
  output logic             load,
  output logic             busy,
  output logic             done,
  output logic             sel_r,
  output logic             success,
  output logic [CNT_W-1:0] cycles
);
  typedef enum logic [0:0] {S_IDLE = 1'b0, S_RUN = 1'b1} state_e;
  state_e           state;
  logic [CNT_W-1:0] cnt;
  logic             hit, timeout;

  assign load    = (state == S_IDLE) && start;
  assign busy    = (state == S_RUN);
  assign hit     = busy && (pass_l || pass_r);
  assign timeout = busy && !hit && (cnt == CNT_W'(MAX_CYCLES));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      cnt     <= '0;
      done    <= 1'b0;
      sel_r   <= 1'b0;
      success <= 1'b0;
      cycles  <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_RUN;
          cnt   <= CNT_W'(1);
        end
        S_RUN: begin
          if (hit || timeout) begin
            state   <= S_IDLE;
            done    <= 1'b1;
            success <= hit;
            sel_r   <= hit && !pass_l;
            cycles  <= cnt;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_load_idle: assert property (@(posedge clk) disable iff (!rst_n) load |-> !busy);
  a_cnt_bound: assert property (@(posedge clk) disable iff (!rst_n) busy |-> cnt <= CNT_W'(MAX_CYCLES));
endmodule
