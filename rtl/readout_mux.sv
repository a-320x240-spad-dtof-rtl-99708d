// readout_mux: the readout multiplexer of one output channel.
//
// A channel owns N clusters. After start, the multiplexer presents them one
// at a time, index 0 to N-1, with a valid/ready handshake: a word is held
// until accepted, then the next index is selected. done pulses for one clock
// after the last word has been accepted. While idle, valid is low.
//
// From the paper: cluster data leaves the array through a multiplexer before
// the serializer. This design's choices: the scan order, the handshake and
// the done pulse.
module readout_mux
  import lidar_pkg::*;
#(
  parameter int unsigned N = 300
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  cluster_word_t             words [N],
  output logic                       valid,
  input  logic                       ready,
  output cluster_word_t              word,
  output logic [$clog2(N+1)-1:0]     index,
  output logic                       done
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= 1'b0;
      index <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !valid) begin
        valid <= 1'b1;
        index <= '0;
      end else if (valid && ready) begin
        if (int'(index) == N-1) begin
          valid <= 1'b0;
          done  <= 1'b1;
        end
        index <= index + 1'b1;
      end
    end
  end

  assign word = words[(int'(index) < N) ? int'(index) : 0];

  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) valid |-> !start)
    else $error("readout_mux: start while a scan is running");

endmodule
