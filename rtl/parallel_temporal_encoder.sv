// parallel_temporal_encoder: turns a vector of COLS weights into COLS
// bitstreams, one per PE column.
//
// load latches the vector into the COLS temporal_encoder lanes and starts the
// shared counter at 0. On each following clock the encoder is active and each
// lane drives (magnitude > counter) onto its column. The stream ends after
// TC_LEN = 3 cycles, or earlier on the cycle where the control unit raises
// stop (that cycle is still a bitstream cycle; the stop register then ends the
// stream). last marks the final bitstream cycle whichever way it ends. Signs
// stay on signs[] until the next load.
//
// Timing: load at clock n gives bitstream cycles n+1 .. n+L, L = 1..3.
//
// The assertions sample rst_n through 'disable iff', so lint reports rst_n
// as both an asynchronous reset and a synchronous signal. Only the
// assertions use it synchronously; the logic itself resets asynchronously.
module parallel_temporal_encoder
  import fineq_pkg::*;
#(
  parameter int COLS = 64
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            load,
  input  wq_t             w [COLS],
  input  logic            stop,
  output logic [COLS-1:0] bits,
  output logic [COLS-1:0] signs,
  output logic            active,
  output logic            last
);

  logic [MAG_W-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      cnt    <= '0;
    end else if (load) begin
      active <= 1'b1;
      cnt    <= '0;
    end else if (active) begin
      if (last) active <= 1'b0;    // stop register
      cnt <= cnt + 1'b1;
    end
  end

  assign last = active && (stop || cnt == MAG_W'(TC_LEN - 1));

  for (genvar c = 0; c < COLS; c++) begin : g_lane
    temporal_encoder u_te (
      .clk, .rst_n, .load, .w_in(w[c]), .cnt, .active,
      .bit_out(bits[c]), .sign_out(signs[c])
    );
  end

  // A new vector is loaded only once the previous stream has ended
  assert property (@(posedge clk) disable iff (!rst_n) load |-> !active || last);

endmodule
