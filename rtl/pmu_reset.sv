// pmu_reset: reset interface of the power management unit.
//
// The resource manager asks for a domain to be reset by giving its number on
// cmd_dom with cmd_valid high for one cycle. If the reset guard reports the
// domain as locked (it takes part in a mailbox session), the command is
// refused: resp_valid is raised with resp_ok low and nothing happens.
// Otherwise rst_req for that domain is held high for RESET_CYCLES cycles and
// the command is answered with resp_ok high. A new command for a domain that
// is already being reset restarts its pulse. Each domain has its own counter,
// so resets of different domains may overlap.
//
// Timing: resp_valid/resp_ok and the first cycle of rst_req appear one cycle
// after the command. rst_req goes through the reset guard, which also gates it
// combinationally, so a session that starts during a pulse cuts the pulse.
//
// The paper gives only the PMU's role (it takes reset commands from the
// resource manager, subject to the reset guard); the command/response format,
// refusing instead of queueing, and the pulse length are this design's. DVFS
// is not part of the design.
module pmu_reset
  import st_pkg::*;
#(
  parameter int unsigned RESET_CYCLES = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cmd_valid,
  input  dom_id_t          cmd_dom,
  input  logic [N_DOM-1:0] locked,
  output logic             resp_valid,
  output logic             resp_ok,
  output logic [N_DOM-1:0] rst_req
);

  localparam int unsigned CW = $clog2(RESET_CYCLES + 1);
  logic [CW-1:0] cnt [N_DOM];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      resp_valid <= 1'b0;
      resp_ok    <= 1'b0;
      for (int d = 0; d < int'(N_DOM); d++) cnt[d] <= '0;
    end else begin
      resp_valid <= cmd_valid;
      resp_ok    <= cmd_valid && !locked[cmd_dom];
      for (int d = 0; d < int'(N_DOM); d++) begin
        if (cmd_valid && cmd_dom == dom_id_t'(d) && !locked[d]) cnt[d] <= CW'(RESET_CYCLES);
        else if (cnt[d] != '0)                                  cnt[d] <= cnt[d] - 1'b1;
      end
    end
  end

  always_comb
    for (int d = 0; d < int'(N_DOM); d++) rst_req[d] = (cnt[d] != '0);

endmodule
