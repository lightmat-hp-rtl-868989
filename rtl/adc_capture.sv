// adc_capture -- ADC Capture: buffers the digitised samples of one tile pair.
//
// While 'cap_en' is high, each cycle's {tag, ADC code} word is written to the
// next address of a DEPTH-word SRAM (32 KB taken as 16384 two-byte samples);
// 'clear' rewinds the write pointer before a new tile pair. The DPPU reads
// the buffer through a synchronous read port (data one cycle after address).
// 'count' is the number of captured samples. The buffer role follows the
// paper; the enable-driven capture (instead of a free-running trigger
// window) is this design's choice.
module adc_capture
  import lmhp_pkg::*;
#(
  parameter int unsigned DEPTH = SRAM_DEPTH,
  parameter int unsigned ADC_W = ADC_W_DEF,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             clear,
  input  logic             cap_en,
  input  logic [ADC_W:0]   cap_data,    // {tag, ADC code}
  input  logic [AW-1:0]    rd_addr,
  output logic [ADC_W:0]   rd_data,
  output logic [AW:0]      count
);

  logic [ADC_W:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (cap_en && count < (AW+1)'(DEPTH)) mem[count[AW-1:0]] <= cap_data;
    rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk) begin
    if (rst || clear)                           count <= '0;
    else if (cap_en && count < (AW+1)'(DEPTH))  count <= count + 1'b1;
  end

endmodule
