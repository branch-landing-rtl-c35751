// brstate_csr: the BRState register of Branch Landing.
//
// BRState holds a 31-bit source section identifier (sid) and a valid
// bit. Following the paper: bld writes the sid and sets valid in one
// cycle; every brl clears valid, whether it authorises or faults, so an
// authorisation can be used only once; privileged software may save,
// restore or clear the register (here: a full-width privileged write
// port and an always-visible read value). Application code has no other
// write path.
//
// Own choices: reset clears the register (valid = 0, sid = 0); if more
// than one write arrives in a cycle the privileged write wins, then bld,
// then the brl clear. The core presents bld/brl only at commit, so a
// squashed speculative bld never reaches this register.
//
// Timing: all updates take effect at the rising clock edge; `state`
// is the registered value.
module brstate_csr
  import brl_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  // bld: write sid, set valid
  input  logic             bld_we,
  input  logic [SID_W-1:0] bld_sid,
  // brl: consume (clear valid)
  input  logic             consume,
  // privileged save/restore/clear
  input  logic             priv_we,
  input  brstate_t         priv_wdata,
  output brstate_t         state
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= '0;
    end else if (priv_we) begin
      state <= priv_wdata;
    end else if (bld_we) begin
      state.sid   <= bld_sid;
      state.valid <= 1'b1;
    end else if (consume) begin
      state.valid <= 1'b0;
    end
  end

endmodule
