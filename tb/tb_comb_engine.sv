// tb_comb_engine: the combination engine (H x W) with 2 tiles x 2 banks,
// 4 rows and 4 columns, in both NEM-C3 and NEM-C2 form.
// A random signed 16x4 weight matrix is written through the L1 write port
// (feature j -> bank j%4, row j/4) and read back through the normal L1 read
// port. Random unsigned H vectors (some sparse, some with fewer features than
// rows) are then combined; every output vector is compared with a plain
// integer matrix-vector product. For NEM-C3 the start-to-vec_valid time must
// be nslots + 5 cycles when slots are supplied every cycle; for NEM-C2 it must
// not be shorter. vec_ready is held low for random times to test the hold.
`include "tb_util.svh"
module tb_comb_engine;
  import nem_pkg::*;
  localparam int NT = 2, BPT = 2, NB = NT * BPT, ROWS = 4, COLS = 4, F = NB * ROWS;
  localparam int DW = COLS * WBITS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic wr_en = 0, l1_rd_en = 0;
  logic [1:0] wr_bank = 0, l1_rd_bank = 0, wr_row = 0, l1_rd_row = 0;
  logic [DW-1:0] wr_data = 0;
  logic [2:0] nslots = 0;
  logic start = 0, h_valid = 0, vec_ready = 0, sel3 = 0;
  logic [NB-1:0][HBITS-1:0] h_data = '0;
  logic [DW-1:0] rd3, rd2;
  logic idle3, idle2, hr3, hr2, vv3, vv2, ect3, ect2, sl3, sl2;
  logic signed [ACC_W-1:0] vec3 [COLS], vec2 [COLS];
  logic signed [WBITS-1:0] w [F][COLS];
  logic [HBITS-1:0] hv [F];
  int ect_count = 0;

  comb_engine #(.C3(1'b1), .N_TILES(NT), .BANKS_PER_TILE(BPT), .ROWS(ROWS), .COLS(COLS)) u3 (
    .clk, .rst_n, .wr_en, .wr_bank, .wr_row, .wr_data, .l1_rd_en, .l1_rd_bank, .l1_rd_row,
    .l1_rdata(rd3), .start(start && sel3), .nslots, .idle(idle3), .h_valid(h_valid && sel3), .h_ready(hr3), .h_data,
    .vec_valid(vv3), .vec_ready(vec_ready && sel3), .vec(vec3), .ect_event(ect3), .slot_event(sl3));
  comb_engine #(.C3(1'b0), .N_TILES(NT), .BANKS_PER_TILE(BPT), .ROWS(ROWS), .COLS(COLS)) u2 (
    .clk, .rst_n, .wr_en, .wr_bank, .wr_row, .wr_data, .l1_rd_en, .l1_rd_bank, .l1_rd_row,
    .l1_rdata(rd2), .start(start && !sel3), .nslots, .idle(idle2), .h_valid(h_valid && !sel3), .h_ready(hr2), .h_data,
    .vec_valid(vv2), .vec_ready(vec_ready && !sel3), .vec(vec2), .ect_event(ect2), .slot_event(sl2));
  `TB_WATCHDOG(clk, 200000)
  always @(posedge clk) if (ect2) ect_count++;

  // run one node on one engine (c3 selects which); returns latency
  task automatic run_node(input bit c3, input int ns, output int lat);
    int t0, s;
    logic signed [ACC_W-1:0] exp_v;
    sel3 = c3;
    @(negedge clk);
    while (!(c3 ? idle3 : idle2)) @(negedge clk);
    start = 1; nslots = 3'(ns); t0 = cyc;
    @(negedge clk); start = 0;
    s = 0;
    while (s < ns) begin
      for (int b = 0; b < NB; b++) h_data[b] = hv[s * NB + b];
      h_valid = 1;
      #1;
      if (c3 ? hr3 : hr2) s++;
      @(negedge clk);
    end
    h_valid = 0;
    while (!(c3 ? vv3 : vv2)) @(negedge clk);
    lat = cyc - t0;
    repeat ($urandom_range(0, 2)) begin
      `TB_CHECK(c3 ? vv3 : vv2, "vec held while not ready")
      @(negedge clk);
    end
    for (int c = 0; c < COLS; c++) begin
      exp_v = 0;
      for (int j = 0; j < ns * NB; j++) exp_v += ACC_W'(int'(w[j][c]) * int'(hv[j]));
      `TB_CHECK((c3 ? vec3[c] : vec2[c]) == exp_v,
                $sformatf("C%0d col %0d got %0d exp %0d", c3 ? 3 : 2, c, c3 ? vec3[c] : vec2[c], exp_v))
    end
    vec_ready = 1; @(negedge clk); vec_ready = 0;
  endtask

  initial begin
    int lat;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int j = 0; j < F; j++) for (int c = 0; c < COLS; c++) w[j][c] = WBITS'($urandom);
    for (int b = 0; b < NB; b++) for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c < COLS; c++) wr_data[c*WBITS +: WBITS] = w[r*NB + b][c];
      wr_en = 1; wr_bank = 2'(b); wr_row = 2'(r); @(negedge clk);
    end
    wr_en = 0;
    // normal cache read path
    for (int b = 0; b < NB; b++) for (int r = 0; r < ROWS; r++) begin
      l1_rd_en = 1; l1_rd_bank = 2'(b); l1_rd_row = 2'(r); @(negedge clk);
      l1_rd_en = 0;
      for (int c = 0; c < COLS; c++) begin
        `TB_CHECK($signed(rd3[c*WBITS +: WBITS]) == w[r*NB + b][c], "C3 L1 read")
        `TB_CHECK($signed(rd2[c*WBITS +: WBITS]) == w[r*NB + b][c], "C2 L1 read")
      end
    end
    for (int t = 0; t < 30; t++) begin
      int ns;
      ns = $urandom_range(1, ROWS);
      for (int j = 0; j < F; j++)
        hv[j] = (t % 3 == 0 && $urandom_range(0, 1)) ? '0 : HBITS'($urandom);
      run_node(1'b1, ns, lat);
      `TB_CHECK(lat == ns + 5, $sformatf("C3 latency %0d for %0d slots", lat, ns))
      run_node(1'b0, ns, lat);
      `TB_CHECK(lat >= ns + 5, $sformatf("C2 latency %0d for %0d slots", lat, ns))
    end
    `TB_CHECK(ect_count > 0, "C2 early termination happened")
    `TB_FINISH
  end
endmodule
