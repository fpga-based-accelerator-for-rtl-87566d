// tb_param_rom: self-checking test of the bias/shift ROM. One instance is
// filled from a hex file (tb/ce_bias.hex, six 32-bit biases) and read with a
// window of four entries at every base, including windows that run past the
// end (those entries must read 0). A second instance without a file must
// hold its default value everywhere.
// The published design only names ROMs for bias and shift bits; the file
// format and the zero past the end are this design's.
module tb_param_rom;
  localparam int DEPTH = 6, NRD = 4;

  logic [2:0] base = '0, base2 = '0;
  logic [31:0] d [NRD];
  logic [4:0] d2 [2];

  param_rom #(.DEPTH(DEPTH), .WIDTH(32), .NRD(NRD), .INIT_FILE("tb/ce_bias.hex")) u_file (
    .rd_base(base), .rd_data(d));
  param_rom #(.DEPTH(5), .WIDTH(5), .NRD(2), .DEFAULT_VAL(5'd8)) u_def (
    .rd_base(base2), .rd_data(d2));

  int checks = 0, failures = 0;
  logic [31:0] ref_rom [DEPTH];

  initial begin
    $readmemh("tb/ce_bias.hex", ref_rom);
    #1;
    for (int b = 0; b < DEPTH; b++) begin
      base = b[2:0];
      #1;
      for (int i = 0; i < NRD; i++) begin
        checks++;
        if (d[i] !== ((b + i < DEPTH) ? ref_rom[b + i] : 32'd0)) begin
          failures++;
          $display("MISMATCH base %0d lane %0d: %h", b, i, d[i]);
        end
      end
    end
    for (int b = 0; b < 4; b++) begin
      base2 = b[2:0];
      #1;
      checks++;
      if (d2[0] !== 5'd8 || d2[1] !== 5'd8) begin failures++; $display("default wrong at %0d", b); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #1000;
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
