// tb_blocked_layout_map: checks the blocked layout map.
// At 5 x 4 the map must reproduce the example placement of 20 blocks
// (bank-by-bank listing, top to bottom) exactly. At the default 92 x 66 it must
// be a bijection onto 92 banks x 66 slots and every tile row and every tile
// column must touch each bank at most once (conflict-free access).
module tb_blocked_layout_map;
  int checks = 0, failures = 0;

  // small instance, P_SA1 = 5, P_SA2 = 4
  logic [2:0] si, sx;
  logic [1:0] sj, sy;
  blocked_layout_map #(.P_SA1(5), .P_SA2(4)) u_small (.i(si), .j(sj), .bank_x(sx), .block_y(sy));

  // default instance
  logic [6:0] bi, bx;
  logic [6:0] bj, by;
  blocked_layout_map u_big (.i(bi), .j(bj), .bank_x(bx), .block_y(by));

  // expected content of bank x, slot y for the 5 x 4 example (block number = j*5 + i)
  int fig [5][4] = '{'{0, 17, 13, 9}, '{5, 1, 18, 14}, '{10, 6, 2, 19},
                     '{15, 11, 7, 3}, '{4, 16, 12, 8}};

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit used [92][66];
    bit row_bank [92];
    for (int j = 0; j < 4; j++)
      for (int i = 0; i < 5; i++) begin
        si = 3'(i); sj = 2'(j); #1;
        checks++;
        if (fig[sx][sy] != j*5 + i) begin
          failures++;
          $display("block %0d placed at bank %0d slot %0d", j*5+i, sx, sy);
        end
      end
    for (int i = 0; i < 92; i++) for (int j = 0; j < 66; j++) used[i][j] = 0;
    for (int j = 0; j < 66; j++) begin
      for (int x = 0; x < 92; x++) row_bank[x] = 0;
      for (int i = 0; i < 92; i++) begin
        bi = 7'(i); bj = 7'(j); #1;
        checks++;
        if (bx >= 92 || by >= 66 || used[bx][by] || row_bank[bx]) begin
          failures++;
          $display("conflict at (%0d,%0d) -> (%0d,%0d)", i, j, bx, by);
        end else begin
          used[bx][by] = 1;
          row_bank[bx] = 1;
        end
      end
    end
    // column access: fixed i, all j must hit distinct banks
    for (int i = 0; i < 92; i++) begin
      for (int x = 0; x < 92; x++) row_bank[x] = 0;
      for (int j = 0; j < 66; j++) begin
        bi = 7'(i); bj = 7'(j); #1;
        checks++;
        if (row_bank[bx]) begin
          failures++;
          $display("column conflict i=%0d j=%0d", i, j);
        end
        row_bank[bx] = 1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
