// kg_enclave_ctrl -- enclave-mode configuration registers.
//
// The Security Monitor (SM) switches the core between enclave and non-enclave
// execution by writing these registers. They hold CurrEID (the EID of the
// running enclave, 0 outside enclaves), the enclave-mode flag, the
// taint-tracking enable and the hashing enable that the branch monitor and
// hash engine obey.
//
// Commands (one per cycle, cmd_valid high for one clock):
//   EENTER  : CurrEID <- cmd_eid, enclave mode, tracking and hashing on.
//   EEXIT   : CurrEID <- 0, everything off, hash_clear pulses so the running
//             hash is reset to its initial value.
//   AEX     : CurrEID <- 0, everything off, but the running hash is kept; the
//             EID is parked in a hidden register.
//   ERESUME : restores the parked EID and re-enables tracking and hashing.
// Outputs change on the clock edge after the command. Reset puts the core in
// non-enclave mode.
//
// What the registers do on EENTER/EEXIT/AEX follows the paper; the command
// encoding and the parked-EID register used by ERESUME are this design's own
// (in the paper the SM restores the enclave context in software).
module kg_enclave_ctrl #(
  parameter int unsigned EID_W = kg_pkg::EID_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cmd_valid,
  input  kg_pkg::enc_cmd_e cmd,
  input  logic [EID_W-1:0] cmd_eid,
  output logic [EID_W-1:0] curr_eid,
  output logic             enclave_mode,
  output logic             ift_en,
  output logic             hash_en,
  output logic             hash_clear
);

  logic [EID_W-1:0] saved_eid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      curr_eid     <= '0;
      saved_eid    <= '0;
      enclave_mode <= 1'b0;
      ift_en       <= 1'b0;
      hash_en      <= 1'b0;
      hash_clear   <= 1'b0;
    end else begin
      hash_clear <= 1'b0;
      if (cmd_valid) begin
        unique case (cmd)
          kg_pkg::ENC_EENTER: begin
            curr_eid     <= cmd_eid;
            enclave_mode <= 1'b1;
            ift_en       <= 1'b1;
            hash_en      <= 1'b1;
          end
          kg_pkg::ENC_EEXIT: begin
            curr_eid     <= '0;
            saved_eid    <= '0;
            enclave_mode <= 1'b0;
            ift_en       <= 1'b0;
            hash_en      <= 1'b0;
            hash_clear   <= 1'b1;
          end
          kg_pkg::ENC_AEX: begin
            saved_eid    <= curr_eid;
            curr_eid     <= '0;
            enclave_mode <= 1'b0;
            ift_en       <= 1'b0;
            hash_en      <= 1'b0;
          end
          kg_pkg::ENC_ERESUME: begin
            curr_eid     <= saved_eid;
            enclave_mode <= 1'b1;
            ift_en       <= 1'b1;
            hash_en      <= 1'b1;
          end
          default: ;
        endcase
      end
    end
  end

  // EENTER with EID 0 would make enclave pages indistinguishable from free ones.
  a_eid_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && cmd == kg_pkg::ENC_EENTER) |-> cmd_eid != '0);

endmodule
