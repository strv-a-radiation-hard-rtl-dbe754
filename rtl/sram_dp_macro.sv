// sram_dp_macro: one dual-port synchronous SRAM macro, written as an array.
//
// Stands for one of the three 32 kB dual-port SRAM macros of the STRV-R1 (the paper uses
// dual-port SRAMs so that the core and the refresh logic have independent access). Each port
// has chip select, write enable, byte write mask, word address and data. Reads are
// synchronous: rdata is valid in the cycle after cs with we low and holds until the next read
// on that port. If both ports address the same word in one cycle, a read returns the old
// content; if both write it, port A wins. Byte masks, read-during-write behaviour and port A
// priority are this design's choices; the real macro is a foundry cell. Both ports run on the
// clock of the domain the instance belongs to (one clock per instance).
module sram_dp_macro #(
  parameter int unsigned WORDS = 8192,
  parameter int unsigned AW    = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          cs_a,
  input  logic          we_a,
  input  logic [3:0]    be_a,
  input  logic [AW-1:0] addr_a,
  input  logic [31:0]   wdata_a,
  output logic [31:0]   rdata_a,
  input  logic          cs_b,
  input  logic          we_b,
  input  logic [3:0]    be_b,
  input  logic [AW-1:0] addr_b,
  input  logic [31:0]   wdata_b,
  output logic [31:0]   rdata_b
);
  logic [31:0] mem [WORDS];

  // Port B write is suppressed when port A writes the same word in the same cycle.
  logic b_blocked;
  assign b_blocked = cs_a && we_a && (addr_a == addr_b);

  always_ff @(posedge clk) begin
    if (cs_a) begin
      if (we_a) begin
        for (int i = 0; i < 4; i++)
          if (be_a[i]) mem[addr_a][8*i +: 8] <= wdata_a[8*i +: 8];
      end else begin
        rdata_a <= mem[addr_a];
      end
    end
    if (cs_b) begin
      if (we_b) begin
        if (!b_blocked)
          for (int i = 0; i < 4; i++)
            if (be_b[i]) mem[addr_b][8*i +: 8] <= wdata_b[8*i +: 8];
      end else begin
        rdata_b <= mem[addr_b];
      end
    end
  end
endmodule
