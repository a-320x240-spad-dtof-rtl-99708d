// tb_lidar_sensor_top: end-to-end test of the sensor at reduced size: one
// 12x20-pixel group per quadrant (24x40 pixels) and two channels per
// quadrant. The test itself is top_tb_core.
module tb_lidar_sensor_top;
  top_tb_core #(.QR(1), .QC(1), .CHQ(2), .FULL(1'b0), .MAX_CYCLES(400000)) u_core ();
endmodule
