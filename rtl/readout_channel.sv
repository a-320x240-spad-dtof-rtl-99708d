// readout_channel: everything behind the pixel array for one output channel.
//
// Chain: readout multiplexer -> gate decoder (preprocessing) -> serializer,
// with the channel's 63-bin histogram tapping the decoded stream.
//
// Readout (ro_start .. ro_done): every cluster word of the channel is sent as
// a cluster frame. Its 12-bit payload depends on the mode:
//   time-of-flight  {2'b00, gate[5:0], addr[3:0]}  (gate = decoded LFSR state)
//   2D imaging      {8'b0, addr[3:0]}              (address only)
//   counter mode    {2'b00, count[5:0], addr[3:0]} (cluster TSPCs as counter)
// In time-of-flight mode a word with a photon inside the window (addr != 0,
// gate != 0) also increments histogram bin "gate", if hist_all is set or the
// word's index within the channel equals hist_target. Raw words therefore go
// off-chip while the on-chip histogram accumulates at the same time.
//
// Histogram dump (hist_start .. hist_done): bins 1..63 are sent as histogram
// frames, payload = count, then the histogram is cleared.
//
// Timing: one word per serial frame (15 clocks), so a readout takes 15*N
// clocks and a dump 15*63 clocks. ro_start and hist_start must not overlap.
//
// The chain and the histogram follow the paper; the frame payloads, the
// histogram selection and the dump order are this design's choices.
module readout_channel
  import lidar_pkg::*;
#(
  parameter int unsigned N = 300,
  localparam int unsigned IW = $clog2(N+1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  cluster_word_t         words [N],
  input  logic                  ro_start,
  output logic                  ro_done,
  input  logic                  hist_start,
  output logic                  hist_done,
  input  logic                  cnt_mode,
  input  logic                  img2d,
  input  logic                  hist_all,
  input  logic [IW-1:0]         hist_target,
  input  cnt_width_e            cnt_width,
  output logic                  sout
);

  cluster_word_t       mword;
  logic                mvalid, mready;
  logic [IW-1:0]       mindex;
  logic [LFSR_W-1:0]   gate;
  logic [PAYLOAD_W-1:0] cl_payload;

  logic                dumping;
  logic [LFSR_W-1:0]   dbin;
  logic [HIST_W-1:0]   dcount;

  logic                s_valid, s_ready;
  frame_kind_e         s_kind;
  logic [PAYLOAD_W-1:0] s_payload;
  logic                hinc, hclr;

  readout_mux #(.N(N)) u_mux (
    .clk   (clk),
    .rst_n (rst_n),
    .start (ro_start),
    .words (words),
    .valid (mvalid),
    .ready (mready),
    .word  (mword),
    .index (mindex),
    .done  (ro_done)
  );

  gate_decoder u_dec (
    .lfsr_state (mword.data),
    .gate       (gate)
  );

  always_comb begin
    if (img2d)         cl_payload = PAYLOAD_W'(mword.addr);
    else if (cnt_mode) cl_payload = PAYLOAD_W'({mword.data, mword.addr});
    else               cl_payload = PAYLOAD_W'({gate, mword.addr});
  end

  // Serializer source: the dump has the line while it runs.
  assign s_valid   = dumping ? 1'b1 : mvalid;
  assign s_kind    = dumping ? FR_HIST : FR_CLUSTER;
  assign s_payload = dumping ? PAYLOAD_W'(dcount) : cl_payload;
  assign mready    = s_ready && !dumping;

  assign hinc = mvalid && mready && !img2d && !cnt_mode &&
                (mword.addr != '0) && (gate != '0) &&
                (hist_all || mindex == hist_target);

  histogram_unit u_hist (
    .clk      (clk),
    .rst_n    (rst_n),
    .clr      (hclr),
    .width    (cnt_width),
    .inc      (hinc),
    .inc_gate (gate),
    .rd_bin   (dbin),
    .rd_count (dcount)
  );

  assign hclr = dumping && s_ready && (dbin == LFSR_W'(NUM_GATES));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dumping   <= 1'b0;
      dbin      <= '0;
      hist_done <= 1'b0;
    end else begin
      hist_done <= 1'b0;
      if (hist_start && !dumping) begin
        dumping <= 1'b1;
        dbin    <= LFSR_W'(1);
      end else if (dumping && s_ready) begin
        if (dbin == LFSR_W'(NUM_GATES)) begin
          dumping   <= 1'b0;
          hist_done <= 1'b1;
        end
        dbin <= dbin + 1'b1;
      end
    end
  end

  serializer u_ser (
    .clk        (clk),
    .rst_n      (rst_n),
    .in_valid   (s_valid),
    .in_ready   (s_ready),
    .in_kind    (s_kind),
    .in_payload (s_payload),
    .sout       (sout),
    .busy       ()
  );

endmodule
