// key_store -- the secure key storage of SerIOS.
//
// Keeps the keys made by the key generator, one per communicating pair, in
// an isolated register file: only the key generator's port can write it, and
// the only way out is the read port an IP uses to fetch the key of its pair
// before it encrypts a transmission. A valid bit per key tells whether the
// key has been generated since reset; reading an invalid key returns zero.
//
// Timing: a write lands on the next clock edge. rd_en with rd_idx in cycle t
// gives rd_data and rd_valid in cycle t+1. Reset clears keys and valid bits.
// The paper names the storage and its isolation; its organisation here is
// this design's choice.
module key_store
  import serios_pkg::*;
#(
  parameter int unsigned N_KEYS = PATTERNS,
  parameter int unsigned KW     = KEY_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [7:0]    widx,
  input  logic [KW-1:0] wdata,
  input  logic          rd_en,
  input  logic [7:0]    rd_idx,
  output logic          rd_valid,
  output logic [KW-1:0] rd_data,
  output logic [N_KEYS-1:0] key_ok
);

  logic [KW-1:0] mem [N_KEYS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(N_KEYS); k++) mem[k] <= '0;
      key_ok   <= '0;
      rd_valid <= 1'b0;
      rd_data  <= '0;
    end else begin
      if (we && int'(widx) < int'(N_KEYS)) begin
        mem[widx]    <= wdata;
        key_ok[widx] <= 1'b1;
      end
      rd_valid <= rd_en && int'(rd_idx) < int'(N_KEYS) && key_ok[rd_idx];
      rd_data  <= (rd_en && int'(rd_idx) < int'(N_KEYS) && key_ok[rd_idx]) ? mem[rd_idx] : '0;
    end
  end

endmodule
