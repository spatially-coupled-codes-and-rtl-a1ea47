// cn_msg_memory - check-message memory of the windowed decoder.
//
// One word per block row of the window (W x m/Z words), each word holding the
// compressed min-sum state (cn_state_t) of the Z checks of that block row:
// two magnitudes, d_c + 1 sign bits and an index per check. Row t of the
// code lives in ring slot t mod W. Two ports, one per engine; read is
// asynchronous, write takes effect at the clock edge. During the shift-in
// phase port 0 clears the slot of the row entering the window.
module cn_msg_memory import sc_ldpc_pkg::*; #(
  parameter int Z     = 30,
  parameter int DEPTH = 650,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic                clk,
  input  logic       [AW-1:0] raddr [2],
  output cn_state_t  [Z-1:0]  rdata [2],
  input  logic       [1:0]    we,
  input  logic       [AW-1:0] waddr [2],
  input  cn_state_t  [Z-1:0]  wdata [2]
);

  cn_state_t [Z-1:0] mem [DEPTH];

  assign rdata[0] = mem[raddr[0]];
  assign rdata[1] = mem[raddr[1]];

  always_ff @(posedge clk) begin
    if (we[0]) mem[waddr[0]] <= wdata[0];
    if (we[1]) mem[waddr[1]] <= wdata[1];
  end

endmodule
