// mtl_prog_loader: receives the monitor's program through an 8-bit port.
//
// While write_en is high, one program byte per clock cycle is shifted into a
// byte-wide shift register: the register moves up by eight bits and the new
// byte enters at the bottom. After PROG_BYTES writes the first byte sent sits
// in the top byte and the last in the bottom byte. The low CFG_BITS bits are
// the configuration read by the PEs, Ques and AP2PE crossbar; padding bits
// (the top of the first byte) are ignored. Reset clears the image, which
// leaves every PE and Que inactive.
//
// The 8-bit program port and the write_en strobe follow the published
// monitor; the shift-register form, the byte order and the image layout are
// this design's choices (the layout is given in mtl_types.svh).
//
// Timing: a byte presented with write_en in cycle t is part of cfg from
// cycle t+1. Loading takes PROG_BYTES = ceil(CFG_BITS / 8) cycles.
module mtl_prog_loader #(
  parameter int CFG_BITS = 1040
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                write_en,
  input  logic [7:0]          program_byte,
  output logic [CFG_BITS-1:0] cfg
);
  localparam int PROG_BYTES = (CFG_BITS + 7) / 8;

  logic [8*PROG_BYTES-1:0] image;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        image <= '0;
    else if (write_en) image <= (image << 8) | (8*PROG_BYTES)'(program_byte);
  end

  assign cfg = image[CFG_BITS-1:0];

endmodule
