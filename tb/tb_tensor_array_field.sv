// tb_tensor_array_field: checks the NC x NMAP tensor array field at its
// default size (3 channels x 64 maps of 5x5x1 elements).
//
// Random weights are written to every element. For each test, one window per
// channel is presented and the testbench follows the results cycle by cycle:
// column m must be valid exactly m+2 cycles after the window cycle, its sum must equal the sum
// over channels of the 25 products (plus the cascade input when casc_en is
// set), and its tag must name the window's pixel and map m. One test drives
// only some channel rows.
// Column addition and cascading follow the concept; the m+2 timing is this
// design's own.
module tb_tensor_array_field;
  import fpdnn_pkg::*;

  localparam int K = 5, NC = 3, NMAP = 64;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                    cfg_we = 0;
  logic [$clog2(NC)-1:0]   cfg_row = 0;
  logic [$clog2(NMAP)-1:0] cfg_col = 0;
  logic [4:0]              cfg_idx = 0;
  fx_t                     cfg_w = 0;
  logic                    casc_en = 0;
  logic                    ch_valid [NC];
  fx_t                     ch_win   [NC][K*K];
  info_t                   ch_tag   [NC];
  fx_t                     casc     [NMAP];
  fx_t                     partial  [NMAP];
  logic                    cv [NMAP];
  fx_t                     cs [NMAP];
  info_t                   ct [NMAP];

  tensor_array_field #(.K(K), .NC(NC), .NMAP(NMAP)) dut (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_row(cfg_row), .cfg_col(cfg_col),
    .cfg_idx(cfg_idx), .cfg_w(cfg_w), .op(TOP_MAC), .casc_en(casc_en),
    .ch_valid_i(ch_valid), .ch_win_i(ch_win), .ch_tag_i(ch_tag),
    .casc_i(casc), .col_partial_o(partial),
    .col_valid_o(cv), .col_sum_o(cs), .col_tag_o(ct)
  );

  fx_t w [NC][NMAP][K*K];
  fx_t expv [NMAP];
  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic run_set(int pix, bit use_casc, bit [NC-1:0] rows);
    for (int c = 0; c < NC; c++)
      for (int i = 0; i < K*K; i++) ch_win[c][i] = fx_t'(int'($urandom_range(100000)) - 50000);
    for (int m = 0; m < NMAP; m++) casc[m] = fx_t'(int'($urandom_range(100000)) - 50000);
    for (int m = 0; m < NMAP; m++) begin
      expv[m] = use_casc ? casc[m] : '0;
      for (int c = 0; c < NC; c++)
        if (rows[c]) for (int i = 0; i < K*K; i++) expv[m] += fx_mul(ch_win[c][i], w[c][m][i]);
    end
    casc_en = use_casc;
    for (int c = 0; c < NC; c++) begin
      ch_valid[c] = rows[c];
      ch_tag[c]   = '{src: '0, dst: ID_W'(pix)};
    end
    @(posedge clk); #1;
    for (int c = 0; c < NC; c++) ch_valid[c] = 1'b0;
    for (int k = 1; k <= NMAP + 1; k++) begin
      int nv = 0;
      @(posedge clk); #1;
      for (int m = 0; m < NMAP; m++) if (cv[m]) begin
        nv++;
        check(m == k - 1, $sformatf("pix %0d: column %0d valid at cycle %0d", pix, m, k));
        check(cs[m] == expv[m], $sformatf("pix %0d map %0d: sum %0d expected %0d", pix, m, cs[m], expv[m]));
        check(ct[m].dst == ID_W'(pix) && ct[m].src == ID_W'(m), $sformatf("pix %0d map %0d: tag", pix, m));
      end
      check(nv == ((k <= NMAP) ? 1 : 0), $sformatf("pix %0d: %0d columns valid at cycle %0d", pix, nv, k));
    end
  endtask

  initial begin
    for (int c = 0; c < NC; c++) begin
      ch_valid[c] = 1'b0;
      ch_tag[c] = '0;
      for (int i = 0; i < K*K; i++) ch_win[c][i] = '0;
    end
    for (int m = 0; m < NMAP; m++) casc[m] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < NC; c++) for (int m = 0; m < NMAP; m++) for (int i = 0; i < K*K; i++) begin
      w[c][m][i] = fx_t'(int'($urandom_range(131072)) - 65536);
      cfg_we = 1; cfg_row = 2'(c); cfg_col = 6'(m); cfg_idx = 5'(i); cfg_w = w[c][m][i];
      @(posedge clk); #1;
    end
    cfg_we = 0;
    run_set(5, 1'b0, '1);
    run_set(77, 1'b1, '1);
    run_set(12, 1'b0, 3'b101);
    run_set(89, 1'b1, '1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
