// param_rom: a small read-only table of per-channel constants of one layer:
// the biases, the left-shift amounts of the input channels or the
// right-shift amounts of the output channels.
//
// It returns NRD consecutive entries, rd_data[i] = rom[rd_base + i], with a
// combinational read (a LUT ROM), so that a whole channel group is available
// in the same cycle; entries past DEPTH read as 0. The contents come from the
// hex file INIT_FILE (one entry per line) if it is given, otherwise every
// entry holds DEFAULT_VAL.
//
// The published engine keeps biases and shift bits in ROMs; width, port
// shape and the file format are this design's choices.
module param_rom #(
  parameter int unsigned DEPTH = 64,
  parameter int unsigned WIDTH = 32,
  parameter int unsigned NRD   = 1,
  parameter string       INIT_FILE = "",
  parameter logic [WIDTH-1:0] DEFAULT_VAL = '0,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic [AW-1:0]    rd_base,
  output logic [WIDTH-1:0] rd_data [NRD]
);
  logic [WIDTH-1:0] rom [DEPTH];

  initial begin
    for (int i = 0; i < DEPTH; i++) rom[i] = DEFAULT_VAL;
    if (INIT_FILE != "") $readmemh(INIT_FILE, rom);
  end

  always_comb
    for (int i = 0; i < NRD; i++)
      rd_data[i] = (int'(rd_base) + i < DEPTH) ? rom[int'(rd_base) + i] : '0;
endmodule
