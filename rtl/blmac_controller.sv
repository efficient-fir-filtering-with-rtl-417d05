// blmac_controller: sequences one dot product of the BLMAC machine.
//
// Idle until start. The start cycle raises clear, which zeroes the code
// address, the run-length expander, the accumulator and the result shift
// register. From the next cycle on the machine is busy and consumes one code
// per clock (code_valid). Every EOR code ends a bit layer; the EOR of the
// last layer (NUM_LAYERS of them in all) ends the dot product: busy drops
// and done pulses for one cycle, with the result stable from then on.
// A dot product therefore takes exactly as many busy cycles as it has codes.
//
// The paper says only that the machine is started and stops when all codes
// are used; counting EOR codes to find the end is this design's choice.
module blmac_controller #(
  parameter int unsigned NUM_LAYERS = blmac_pkg::NUM_LAYERS
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic code_eor,
  output logic clear,
  output logic code_valid,
  output logic busy,
  output logic done
);

  typedef enum logic { IDLE, RUN } state_t;

  localparam int unsigned LAYER_W = $clog2(NUM_LAYERS + 1);

  state_t             state;
  logic [LAYER_W-1:0] layer;
  logic               last_layer;

  assign busy       = (state == RUN);
  assign clear      = (state == IDLE) && start;
  assign code_valid = busy;
  assign last_layer = (layer == LAYER_W'(NUM_LAYERS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      layer <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        IDLE: if (start) begin
          state <= RUN;
          layer <= '0;
        end
        RUN: if (code_eor) begin
          if (last_layer) begin
            state <= IDLE;
            done  <= 1'b1;
          end
          layer <= layer + 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
  end

endmodule
