// domain_ram: private on-chip RAM of one microcontroller domain.
//
// Domains share no memory: each microcontroller has a RAM that only its own
// processor is wired to. This is a single-port RAM of WORDS 32-bit words with
// byte enables. The array is not reset; after a domain reset its bootloader
// clears it, which is what lets a program trust that nothing of a previous
// user is left.
//
// Interface and timing: on a rising edge with req.en high, req.we selects a
// write (bytes with req.be set are written from req.wdata) or a read; a read
// word appears on rdata after that edge. rdata holds its value otherwise. An
// address at or above WORDS reads zero and is not written.
//
// The paper gives a memory per domain and the total on-chip memory; the size
// per domain and the port are this design's choices.
module domain_ram
  import st_pkg::*;
#(
  parameter int unsigned WORDS = 98304
) (
  input  logic        clk,
  input  ram_req_t    req,
  output logic [31:0] rdata
);

  logic [31:0] mem [WORDS];
  logic        in_range;

  assign in_range = (32'(req.addr) < WORDS);

  always_ff @(posedge clk) begin
    if (req.en) begin
      if (req.we) begin
        if (in_range)
          for (int b = 0; b < 4; b++)
            if (req.be[b]) mem[req.addr][8*b +: 8] <= req.wdata[8*b +: 8];
      end else begin
        rdata <= in_range ? mem[req.addr] : '0;
      end
    end
  end

endmodule
