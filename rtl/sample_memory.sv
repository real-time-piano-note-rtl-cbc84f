// sample_memory: capture buffer between the ADC and the FFT core.
//
// A register array of DEPTH (512) signed ADC_W-bit words. A one-cycle
// `capture` request (the debounced sampling pushbutton, via the controller)
// clears the write pointer and the decimation counter; from then on every
// DOWNSAMPLE-th (16th) `in_valid` word is written, the first one being the
// first conversion after the request. After DEPTH writes the buffer stops
// and `full` stays high until the next `capture`. `filling` is high while
// the buffer is being written. The read port is asynchronous (a plain array
// lookup), so rd_data follows rd_addr in the same clock; the FFT feeding
// loop addresses it with its running input index.
//
// The register array, the 512-word depth, the pushbutton trigger and the
// 1-in-16 downsample counter are from the design description; the clearing
// on capture and the asynchronous read port are this design's choices.
module sample_memory
  import pnd_pkg::*;
#(
  parameter int unsigned DEPTH      = pnd_pkg::NFFT,
  parameter int unsigned DOWNSAMPLE = pnd_pkg::DECIMATION,
  parameter int unsigned W          = pnd_pkg::ADC_W
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       capture,   // start a new capture
  input  logic signed [W-1:0]        in_data,
  input  logic                       in_valid,
  output logic                       filling,
  output logic                       full,
  output logic                       stored,    // a word was written this cycle
  input  logic [$clog2(DEPTH)-1:0]   rd_addr,
  output logic signed [W-1:0]        rd_data
);

  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned DW = (DOWNSAMPLE > 1) ? $clog2(DOWNSAMPLE) : 1;

  logic signed [W-1:0] mem [DEPTH];
  logic [AW-1:0]       wr_ptr_q;
  logic [DW-1:0]       dec_q;
  logic                we;

  assign we = filling && in_valid && (dec_q == '0);

  always_ff @(posedge clk) begin
    if (rst) begin
      filling  <= 1'b0;
      full     <= 1'b0;
      wr_ptr_q <= '0;
      dec_q    <= '0;
      stored   <= 1'b0;
    end else begin
      stored <= we;
      if (capture) begin
        filling  <= 1'b1;
        full     <= 1'b0;
        wr_ptr_q <= '0;
        dec_q    <= '0;
      end else if (filling && in_valid) begin
        dec_q <= (dec_q == DW'(DOWNSAMPLE - 1)) ? '0 : dec_q + 1'b1;
        if (we) begin
          wr_ptr_q <= wr_ptr_q + 1'b1;
          if (wr_ptr_q == AW'(DEPTH - 1)) begin
            filling <= 1'b0;
            full    <= 1'b1;
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (we) mem[wr_ptr_q] <= in_data;
  end

  assign rd_data = mem[rd_addr];

endmodule
