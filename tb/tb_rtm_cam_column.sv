// tb_rtm_cam_column: random search / tagged write / slice write / shift
// traffic on an 8-row, 8-domain column, compared every cycle with a
// reference model of the tracks and the access port.
module tb_rtm_cam_column;
  localparam int R = 8, D = 8;
  logic clk = 0, rst_n = 0;
  logic key, mask, wen, wkey, slice_we, shift, shift_up;
  logic [R-1:0] wrows, slice_wdata, mismatch, port_bits;
  logic [2:0] pos;
  rtm_cam_column #(.ROWS(R), .DOMAINS(D)) dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [D-1:0] m [R];
  int mpos;
  initial begin : main
    {key, mask, wen, wkey, slice_we, shift, shift_up, wrows, slice_wdata} = '0;
    mpos = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // fill every domain through the slice port
    for (int d = 0; d < D; d++) begin
      @(negedge clk);
      slice_we = 1; slice_wdata = R'($urandom); shift = 1; shift_up = 1;
      for (int r = 0; r < R; r++) m[r][d] = slice_wdata[r];
    end
    @(negedge clk); slice_we = 0; shift = 0;
    mpos = D - 1;   // saturated at the top
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      key = 1'($urandom); mask = 1'($urandom); wkey = 1'($urandom);
      wen = 1'($urandom); wrows = R'($urandom);
      slice_we = ($urandom_range(0, 5) == 0); slice_wdata = R'($urandom);
      shift = 1'($urandom); shift_up = 1'($urandom);
      #1;
      checks++;
      if (pos != 3'(mpos)) begin failures++; $display("pos %0d != %0d", pos, mpos); end
      for (int r = 0; r < R; r++) begin
        checks++;
        if (port_bits[r] != m[r][mpos] || mismatch[r] != (mask && m[r][mpos] != key)) begin
          failures++; $display("t%0d row %0d bit %0d mism %0d", t, r, port_bits[r], mismatch[r]);
        end
      end
      @(posedge clk);
      for (int r = 0; r < R; r++)
        if (slice_we) m[r][mpos] = slice_wdata[r];
        else if (wen && wrows[r]) m[r][mpos] = wkey;
      if (shift && shift_up && mpos < D - 1) mpos++;
      else if (shift && !shift_up && mpos > 0) mpos--;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
