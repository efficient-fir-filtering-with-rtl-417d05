// run_length_expander: turns run lengths into coefficient indices.
//
// A bit layer arrives as a list of (SIGN, ZRUN) codes, where ZRUN counts the
// zero digits since the previous pulse, and ends with an EOR code. The
// expander keeps the index of the next position not yet covered (base). For
// a pulse code the pulse index is base + ZRUN, output combinationally in the
// same cycle, and base moves to one past it. An EOR code, or clear, puts base
// back to 0 for the next layer.
//
// Interface: valid marks a code consumed this cycle; eor/zrun are its fields.
// idx is the pulse index (meaningful when valid && !eor). The paper gives the
// function only; this incrementing base register is the simplest form of it.
module run_length_expander #(
  parameter int unsigned ZRUN_W = blmac_pkg::ZRUN_W,
  parameter int unsigned IDX_W  = blmac_pkg::IDX_W,
  parameter int unsigned MAX_IDX = blmac_pkg::N_TAPS / 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              valid,
  input  logic              eor,
  input  logic [ZRUN_W-1:0] zrun,
  output logic [IDX_W-1:0]  idx
);

  logic [IDX_W-1:0] base;

  assign idx = base + IDX_W'(zrun);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)            base <= '0;
    else if (clear)        base <= '0;
    else if (valid) begin
      if (eor)             base <= '0;
      else                 base <= idx + 1'b1;
    end
  end

  // A well formed code stream never points past the centre coefficient.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (valid && !eor) |-> (idx <= IDX_W'(MAX_IDX)))
    else $error("run_length_expander: pulse index %0d beyond %0d", idx, MAX_IDX);

endmodule
