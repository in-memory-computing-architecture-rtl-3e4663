// shiftrows: the AES ShiftRows step across the two 64-bit halves.
//
// Row r of the 4x4 state is rotated left by r byte positions: output byte
// (row r, column c) is input byte (row r, column (c+r) mod 4). Because
// columns 0-1 live in half a and columns 2-3 in half b, rows 1-3 move
// bytes between the halves, which is why this block takes both halves.
// In the memristive version the same move is made by adding an offset to
// the column address when the S-box result is written back; here it is
// wiring into a register. Port names (a, b, c, d, startsh, rstsh,
// doneshift) follow the paper's first-round RTL.
//
// Timing: startsh captures the shifted state at the next clock edge;
// doneshift is high for the one cycle after, while c and d hold it. The
// one-cycle latency and the synchronous active-high reset are this
// design's choices.
module shiftrows
  import aes_pkg::*;
(
  input  logic  clk,
  input  logic  rstsh,
  input  logic  startsh,
  input  half_t a,
  input  half_t b,
  output half_t c,
  output half_t d,
  output logic  doneshift
);

  logic [BLOCK_W-1:0] st_in, st_sh;
  stage_state_e       state;

  assign st_in = {a, b};

  // Block byte k = row + 4*column sits at bits [127-8*k -: 8].
  always_comb begin
    for (int col = 0; col < 4; col++) begin
      for (int row = 0; row < 4; row++) begin
        st_sh[127-8*(row+4*col) -: 8] = st_in[127-8*(row+4*((col+row)%4)) -: 8];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rstsh) begin
      state <= ST_IDLE;
      c     <= '0;
      d     <= '0;
    end else begin
      state <= startsh ? ST_DONE : ST_IDLE;
      if (startsh) begin
        c <= st_sh[127:64];
        d <= st_sh[63:0];
      end
    end
  end

  assign doneshift = (state == ST_DONE);

endmodule
