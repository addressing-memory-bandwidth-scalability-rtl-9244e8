// loop_buffer -- distributed control element of the Provet core.
//
// Instead of one central controller driving long, highly active control wires
// across a 4096-bit-wide datapath, every component has its own small loop
// buffer next to it. The buffer holds that component's control words ("control
// actions") for the inner loop of a kernel and replays them every cycle;
// its content is rewritten far less often than it is read.
//
// Operation: the host fills entries through the write port (wr_en, wr_addr,
// wr_data), which is allowed at any time, also while the buffer runs. A start
// pulse (while idle) latches a loop body [first, last] and a repeat count; from
// the next cycle on the buffer outputs entry first, first+1, ..., last, and
// repeats the body count times (count 0 runs it once). While idle, or in the
// start cycle, it outputs all zeros, which every control word of the core
// decodes as a no-operation. done pulses in the cycle after the last word.
// busy is high while words are being output.
//
// The architecture leaves the implementation of loop buffers open. This single-
// level loop with host-written contents is this design's choice; all buffers
// of one core receive the same start and loop bounds and therefore stay in
// lockstep.
//
// Lint note: rst_n is the asynchronous reset of the flops and also disables the
// assertions during reset (disable iff). Lint reports this as a signal used both
// asynchronously and synchronously. The second use only exists in simulation,
// so the warning stands.
module loop_buffer #(
  parameter int unsigned W       = 64,
  parameter int unsigned DEPTH   = 32,
  parameter int unsigned CNT_W   = 16,
  localparam int unsigned AW     = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [W-1:0]     wr_data,
  input  logic             start,
  input  logic [AW-1:0]    first,
  input  logic [AW-1:0]    last,
  input  logic [CNT_W-1:0] count,
  output logic [W-1:0]     ctrl,
  output logic             busy,
  output logic             done
);

  logic [W-1:0]     mem [DEPTH];
  logic [AW-1:0]    pc, first_q, last_q;
  logic [CNT_W-1:0] iter;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; pc <= '0; iter <= '0;
      first_q <= '0; last_q <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy    <= 1'b1;
          pc      <= first;
          first_q <= first;
          last_q  <= last;
          iter    <= (count == '0) ? '0 : count - 1'b1;
        end
      end else if (pc == last_q) begin
        if (iter == '0) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          iter <= iter - 1'b1;
          pc   <= first_q;
        end
      end else begin
        pc <= pc + 1'b1;
      end
    end
  end

  assign ctrl = busy ? mem[pc] : '0;

  a_body_order: assert property (@(posedge clk) disable iff (!rst_n) (start && !busy) |-> (first <= last))
    else $error("loop_buffer: loop body first %0d after last %0d", first, last);
  a_bounds: assert property (@(posedge clk) disable iff (!rst_n) (start && !busy) |-> (32'(last) < DEPTH))
    else $error("loop_buffer: loop end %0d beyond depth %0d", last, DEPTH);

endmodule
