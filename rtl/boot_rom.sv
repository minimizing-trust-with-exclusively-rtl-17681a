// boot_rom: bootloader ROM of one microcontroller domain.
//
// Each domain boots from its own ROM, which is part of the hardware image and
// therefore part of the attested root of trust: the bootloader in it wipes the
// domain's state after every reset, loads the domain's program and measures it
// into the TPM. The ROM holds WORDS 32-bit words, loaded at build time from the
// hex file INIT_FILE (one word per line, as read by $readmemh). With no file
// the ROM reads as zero. There is no write port.
//
// Interface and timing: a word is read when 'en' is high at a rising edge and
// appears on 'rdata' after that edge (synchronous read, like block RAM);
// rdata holds its value while 'en' is low.
//
// The paper says there is a ROM per domain holding its bootloader; its size,
// its port and its contents are this design's choices.
module boot_rom #(
  parameter int unsigned WORDS     = 4096,
  parameter string       INIT_FILE = "",
  localparam int unsigned AW = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic          clk,
  input  logic          en,
  input  logic [AW-1:0] addr,
  output logic [31:0]   rdata
);

  logic [31:0] rom [WORDS];

  initial begin
    for (int i = 0; i < int'(WORDS); i++) rom[i] = '0;
    if (INIT_FILE != "") $readmemh(INIT_FILE, rom);
  end

  always_ff @(posedge clk) begin
    if (en) rdata <= rom[addr];
  end

endmodule
