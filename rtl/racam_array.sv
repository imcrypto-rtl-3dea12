// racam_array: 256x8 RA/CAM array with its peripherals.
//
// A dual-mode array of 9T cells. Around the cell matrix sit a row decoder,
// RAM sense amplifiers, search drivers, one CAM sense amplifier per row and
// the customized encoder (racam_encoder).
//   RAM mode: we writes wdata to row addr; re reads row addr onto ram_out.
//   CAM mode: search_en drives search_data onto the search lines of all eight
//             columns; every row whose stored byte equals it keeps its match
//             line high. The CAM sense amplifiers latch the 256 match lines
//             and the encoder turns them into cam_out = row ^ round_key and
//             the four products cam_mul (x9, x11, x13, x14).
// Timing: ram_out and the latched match lines update at the clock edge after
// re / search_en; the encoder is combinational on the latched match lines, so
// cam_out, cam_hit and cam_mul are valid in the cycle after search_en and stay
// until the next search. RAM mode and CAM mode may be used in the same cycle
// (the fabric never does).
//
// Follows the paper: the 256x8 organisation, both access modes and the
// equality match per row. This design's choice: the match is modelled at
// logic level (a byte compare per row), not at transistor level, and the
// pre-charge / discharge sequence of the search is folded into one cycle.
// The encoder's stage-1 output (the bare matching row) is left unconnected:
// the fabric uses only the stage-2 byte and the stage-3 products, and lint
// reports the open pin for that reason.
module racam_array
  import imc_pkg::*;
#(
  parameter int unsigned ROWS = 256
) (
  input  logic       clk,
  // RAM mode
  input  logic       we,
  input  logic       re,
  input  byte_t      addr,
  input  byte_t      wdata,
  output byte_t      ram_out,
  // CAM mode
  input  logic       search_en,
  input  byte_t      search_data,
  input  byte_t      round_key,
  output logic       cam_hit,
  output byte_t      cam_out,
  output byte_t      cam_mul [4]
);

  byte_t        cells [ROWS];
  logic [255:0] ml_comb;
  logic [255:0] ml_q;     // CAM sense amplifier outputs

  always_ff @(posedge clk) begin
    if (we) cells[addr] <= wdata;
    if (re) ram_out <= cells[addr];
    if (search_en) ml_q <= ml_comb;
  end

  // Match line of each row: high when all eight cells equal the search line.
  always_comb begin
    ml_comb = '0;
    for (int r = 0; r < ROWS; r++) ml_comb[r] = (cells[r] == search_data);
  end

  racam_encoder u_enc (
    .ml        (ml_q),
    .round_key (round_key),
    .hit       (cam_hit),
    .row       (),
    .cam_out   (cam_out),
    .mul       (cam_mul)
  );

endmodule
