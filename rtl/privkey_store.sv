// privkey_store: the board's private-key slot (index i and key d_i).
//
// Stands for the tamper-proof non-volatile memory into which the FPGA vendor
// writes each board's private key d_i = gamma * g_i and the board's index i
// at provisioning. It can be written exactly once: the first write with
// `prog_en` stores the pair and locks the slot; any later write is refused,
// pulses `prog_err`, and leaves the stored key unchanged. The key leaves the
// block only on `key`, which is wired to the Decrypt engine and nowhere else.
//
// Non-volatility: the functional reset does not clear the slot. Only `por_n`
// (the blank state of new silicon) empties it; a real part would hold the
// key in eFUSE or a battery-backed macro, which is process specific.
//
// Timing: a write is taken at the clock edge where prog_en is high; `valid`,
// `index` and `key` show it from the next cycle on.
//
// The paper says only that d_i is embedded in a tamper-proof non-volatile
// memory segment; the write-once lock and the port set are this design's.
module privkey_store
  import agencid_pkg::*;
#(
  parameter int IDXW = 5                    // bits of a board index (1..n)
) (
  input  logic            clk,
  input  logic            por_n,            // power-on (blank device) reset
  input  logic            prog_en,
  input  logic [IDXW-1:0] prog_index,
  input  ec_point_t       prog_key,
  output logic            prog_err,         // write refused: slot locked
  output logic            valid,
  output logic [IDXW-1:0] index,
  output ec_point_t       key
);

  always_ff @(posedge clk or negedge por_n) begin
    if (!por_n) begin
      valid    <= 1'b0;
      index    <= '0;
      key      <= POINT_INF;
      prog_err <= 1'b0;
    end else begin
      prog_err <= 1'b0;
      if (prog_en) begin
        if (!valid) begin
          valid <= 1'b1;
          index <= prog_index;
          key   <= prog_key;
        end else begin
          prog_err <= 1'b1;
        end
      end
    end
  end

endmodule
