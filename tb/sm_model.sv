// sm_model: behavioural model of one streaming multiprocessor, for
// testbenches only (not synthesizable intent, not part of the design).
//
// The SM itself (warps, warp scheduler, register file, shared memory) is not
// part of the scheduler; this model only reproduces what the scheduler sees:
// a block given to slot s runs for a fixed number of cycles, then the SM
// reports that slot as finished. At most one finished block is reported per
// cycle (lowest slot first); others wait their turn. start_* is accepted in
// any cycle; done_* is registered.
module sm_model #(
  parameter int unsigned NSLOT = 8,
  localparam int unsigned SW   = $clog2(NSLOT)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start_valid,
  input  logic [SW-1:0] start_slot,
  input  int unsigned   start_dur,
  output logic          done_valid,
  output logic [SW-1:0] done_slot
);

  logic        busy   [NSLOT];
  int unsigned remain [NSLOT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NSLOT; s++) begin
        busy[s]   <= 1'b0;
        remain[s] <= 0;
      end
      done_valid <= 1'b0;
      done_slot  <= '0;
    end else begin
      automatic logic found = 1'b0;
      done_valid <= 1'b0;
      for (int s = 0; s < NSLOT; s++) begin
        if (busy[s] && remain[s] > 0) remain[s] <= remain[s] - 1;
        if (busy[s] && remain[s] == 0 && !found) begin
          found = 1'b1;
          busy[s]    <= 1'b0;
          done_valid <= 1'b1;
          done_slot  <= SW'(s);
        end
      end
      if (start_valid) begin
        busy[start_slot]   <= 1'b1;
        remain[start_slot] <= (start_dur > 1) ? start_dur - 1 : 0;
      end
    end
  end

endmodule
