// tb_cam_array: 8 rows x 4 columns x 4 domains. Random key/mask searches,
// tagged writes, slice writes/reads and per-column shifts, checked each
// cycle against a reference model (match = all masked columns equal key).
module tb_cam_array;
  localparam int R = 8, C = 4, D = 4;
  logic clk = 0, rst_n = 0;
  logic [C-1:0] key, mask, shift, shift_up;
  logic [R-1:0] match, wrows, slice_wdata, rd_slice;
  logic wen, slice_we;
  logic [1:0] slice_col, rd_col;
  logic [C-1:0][1:0] pos;
  cam_array #(.ROWS(R), .COLS(C), .DOMAINS(D)) dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [D-1:0] m [R][C];
  int mp [C];
  initial begin : main
    {key, mask, shift, shift_up, wrows, slice_wdata, wen, slice_we, slice_col, rd_col} = '0;
    foreach (mp[c]) mp[c] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int c = 0; c < C; c++)
      for (int d = 0; d < D; d++) begin
        @(negedge clk);
        slice_we = 1; slice_col = 2'(c); slice_wdata = R'($urandom);
        shift = '0; shift[c] = (d < D - 1); shift_up = '1;
        for (int r = 0; r < R; r++) m[r][c][d] = slice_wdata[r];
        @(posedge clk); if (d < D - 1) mp[c]++;
      end
    @(negedge clk); slice_we = 0; shift = '0;
    for (int t = 0; t < 800; t++) begin
      @(negedge clk);
      key = C'($urandom); mask = C'($urandom); wrows = R'($urandom);
      wen = ($urandom_range(0, 2) == 0);
      slice_we = ($urandom_range(0, 6) == 0); slice_col = 2'($urandom); slice_wdata = R'($urandom);
      rd_col = 2'($urandom); shift = C'($urandom); shift_up = C'($urandom);
      #1;
      for (int c = 0; c < C; c++) begin
        checks++;
        if (int'(pos[c]) != mp[c]) begin failures++; $display("pos[%0d]", c); end
      end
      for (int r = 0; r < R; r++) begin
        bit exp_m;
        exp_m = 1;
        for (int c = 0; c < C; c++) if (mask[c] && m[r][c][mp[c]] != key[c]) exp_m = 0;
        checks++;
        if (match[r] != exp_m || rd_slice[r] != m[r][rd_col][mp[rd_col]]) begin
          failures++; $display("t%0d row %0d match %0d exp %0d", t, r, match[r], exp_m);
        end
      end
      @(posedge clk);
      for (int c = 0; c < C; c++) begin
        for (int r = 0; r < R; r++)
          if (slice_we && int'(slice_col) == c) m[r][c][mp[c]] = slice_wdata[r];
          else if (wen && mask[c] && wrows[r]) m[r][c][mp[c]] = key[c];
        if (shift[c] && shift_up[c] && mp[c] < D - 1) mp[c]++;
        else if (shift[c] && !shift_up[c] && mp[c] > 0) mp[c]--;
      end
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
