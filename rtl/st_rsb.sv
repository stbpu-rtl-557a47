// st_rsb: return stack buffer of one hardware thread.
//
// Calls push the (encrypted) 32-bit return address, returns pop it. The stack
// has a fixed DEPTH (default 16) and is built as a circular buffer: a push on
// a full stack overwrites the oldest entry and pulses overflow; a pop on an
// empty stack changes nothing and pulses underflow, and "empty" tells the
// predictor to fall back to the indirect (BTB mode 2) prediction for a
// return. The wrap-around overflow behaviour is this implementation's reading
// of how a fixed-size hardware stack loses its oldest entries.
//
// Interface: push/push_data and pop act at the rising clock edge (at most one
// of them per cycle); top and empty are combinational views of the current
// state. overflow and underflow are registered one-cycle pulses.
module st_rsb #(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned W     = 32,
  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned CNT_W = $clog2(DEPTH + 1)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] push_data,
  input  logic         pop,
  output logic [W-1:0] top,
  output logic         empty,
  output logic         overflow,
  output logic         underflow
);
  logic [W-1:0]     stk [DEPTH];
  logic [PTR_W-1:0] tos;    // slot of the newest entry
  logic [CNT_W-1:0] count;  // valid entries, saturates at DEPTH

  function automatic logic [PTR_W-1:0] inc(logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction
  function automatic logic [PTR_W-1:0] dec(logic [PTR_W-1:0] p);
    return (p == '0) ? PTR_W'(DEPTH - 1) : p - 1'b1;
  endfunction

  assign top   = stk[tos];
  assign empty = (count == '0);

  always_ff @(posedge clk) begin
    if (push) stk[inc(tos)] <= push_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tos       <= '0;
      count     <= '0;
      overflow  <= 1'b0;
      underflow <= 1'b0;
    end else begin
      overflow  <= 1'b0;
      underflow <= 1'b0;
      if (push) begin
        tos <= inc(tos);
        if (count == CNT_W'(DEPTH)) overflow <= 1'b1;
        else                        count    <= count + 1'b1;
      end else if (pop) begin
        if (count == '0) underflow <= 1'b1;
        else begin
          tos   <= dec(tos);
          count <= count - 1'b1;
        end
      end
    end
  end

  a_push_pop_exclusive: assert property (@(posedge clk) disable iff (!rst_n) !(push && pop))
    else $error("st_rsb: push and pop in the same cycle");

endmodule
