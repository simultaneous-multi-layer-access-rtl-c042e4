// cio_data_mux: the TSV data multiplexers of one Cascaded-IO layer.
//
// One 2:1 multiplexer per TSV bit drives the TSV segment toward the layer
// below with either the layer's own data or the data arriving from the layer
// above. Only the layer's own data is synchronised: it is captured in own_q
// once per frame (on frame_tick, the last IO cycle of a frame) from the
// layer's global sense amplifiers and held for the whole next frame. Data
// from above passes combinationally (cut-through bypass), so data of an upper
// layer reaches the bottom in its slot without being re-registered in every
// layer. A frame without a fetch loads zeros, so the layer drives an idle
// pattern in its slot (a hole).
//
// Timing: gsa_data of frame f appears on down_data during frame f+1 in the
// IO cycles in which sel_own is high.
//
// Follows the paper: a multiplexer per TSV choosing own or upper data, own
// data synchronised, upper data bypassed. Own choices: capturing at the frame
// boundary and driving zeros in a hole.
module cio_data_mux #(
  parameter int unsigned W = smla_pkg::IO_WIDTH   // TSVs per channel
) (
  input  logic         clk,         // IO clock
  input  logic         rst_n,       // asynchronous active-low reset
  input  logic         frame_tick,  // last IO cycle of a frame
  input  logic         gsa_valid,   // a word was fetched this frame
  input  logic [W-1:0] gsa_data,    // word from the global sense amplifiers
  input  logic         sel_own,     // from cio_mux_ctrl
  input  logic [W-1:0] up_data,     // TSV segment from the layer above
  output logic [W-1:0] down_data,   // TSV segment toward the layer below
  output logic         own_valid    // own_q holds fetched data this frame
);

  logic [W-1:0] own_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      own_q     <= '0;
      own_valid <= 1'b0;
    end else if (frame_tick) begin
      own_q     <= gsa_valid ? gsa_data : '0;
      own_valid <= gsa_valid;
    end
  end

  assign down_data = sel_own ? own_q : up_data;

endmodule
