// param_rom: parameter ROM modelled on an FPGA block-RAM ROM whose primitive
// output register is disabled.
//
// The address is registered on the clock edge and the word appears on `data`
// LATENCY cycles later (LATENCY = 1 for a block RAM without output register,
// as in the paper; a larger value adds output pipeline registers). Controllers
// that read it count this latency between issuing an address and latching the
// data.
//
// Contents: when INIT_FILE is not empty the ROM is loaded with $readmemh from
// that file (one WIDTH-bit hex word per line, in address order). Otherwise each word is produced by
// bnn_pkg::rom_word(KIND, LAYER, address, WIDTH, PE_NUM), a deterministic
// stand-in for the trained parameters, which are not published.
module param_rom
  import bnn_pkg::*;
#(
  parameter int unsigned WIDTH   = 16,
  parameter int unsigned DEPTH   = 16,
  parameter int unsigned LATENCY = 1,
  parameter rom_kind_e   KIND    = RK_MUL,
  parameter int unsigned LAYER   = 2,
  parameter int unsigned PE_NUM  = 1,
  parameter string       INIT_FILE = ""
) (
  input  logic                             clk,
  input  logic [$clog2(DEPTH > 1 ? DEPTH : 2)-1:0] addr,
  output logic [WIDTH-1:0]                 data
);

  logic [WIDTH-1:0] mem [DEPTH];

  initial begin
    if (INIT_FILE != "") begin
      $readmemh(INIT_FILE, mem);
    end else begin
      for (int unsigned a = 0; a < DEPTH; a++) begin
        logic [MAX_ROM_W-1:0] w;
        w = rom_word(KIND, LAYER, a, WIDTH, PE_NUM);
        mem[a] = w[WIDTH-1:0];
      end
    end
  end

  logic [WIDTH-1:0] pipe [LATENCY];

  always_ff @(posedge clk) begin
    pipe[0] <= mem[addr];
    for (int i = 1; i < LATENCY; i++) pipe[i] <= pipe[i-1];
  end

  assign data = pipe[LATENCY-1];

  initial assert (LATENCY >= 1) else $error("param_rom: LATENCY must be at least 1");
  initial assert (WIDTH <= MAX_ROM_W) else $error("param_rom: WIDTH above MAX_ROM_W");
endmodule
