// Fixed delay of DEPTH enabled cycles for a W-bit word.
//
// Written as a circular buffer so that long delays map to distributed RAM
// or shift-register LUTs rather than flip-flop chains: the entry at the
// pointer is read, then overwritten with the new word, and the pointer
// advances, all when ce is high. DEPTH = 0 is a plain connection.
// Contents are cleared by rst so that early reads are defined.
module delay_line #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         ce,
  input  logic [W-1:0] din,
  output logic [W-1:0] dout
);
  if (DEPTH == 0) begin : g_wire
    assign dout = din;
  end else if (DEPTH == 1) begin : g_reg
    always_ff @(posedge clk)
      if (rst) dout <= '0;
      else if (ce) dout <= din;
  end else begin : g_ram
    localparam int unsigned AW = $clog2(DEPTH);
    logic [W-1:0]  mem [DEPTH];
    logic [AW-1:0] ptr;
    always_ff @(posedge clk) begin
      if (rst) begin
        ptr <= '0;
        for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
      end else if (ce) begin
        mem[ptr] <= din;
        ptr      <= (ptr == AW'(DEPTH - 1)) ? '0 : ptr + 1'b1;
      end
    end
    assign dout = mem[ptr];
  end
endmodule
