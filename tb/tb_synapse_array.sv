// tb_synapse_array: random half-row writes with byte masks to the weight,
// address and calibration memories and to the row A/B bits, checked against
// a shadow model by full-row reads; random row addresses on the event inputs
// are checked against the stored synapse addresses (local pre signals).
module tb_synapse_array;
  import ppu_pkg::*;
  localparam int R = 32, C = 64;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic rd_en, wr_en, half; tgt_e field; logic [4:0] row;
  logic [C/2-1:0][7:0] wdata; logic [C/2-1:0] wmask; logic [C-1:0][7:0] rdata;
  logic [R-1:0][5:0] pre_addr; logic [R-1:0] pre_en;
  logic [R-1:0][C-1:0] pre; logic [R-1:0][C-1:0][5:0] weight; logic [R-1:0][C-1:0][3:0] calib;
  logic [R-1:0] row_sel_b;
  synapse_array #(.ROWS(R), .COLS(C)) dut (.clk, .rst_n, .rd_en, .wr_en, .field, .row, .half, .wdata,
    .wmask, .rdata, .pre_addr, .pre_en, .pre, .weight, .calib, .row_sel_b);

  logic [5:0] sw [R][C]; logic [5:0] sa [R][C]; logic [3:0] sc [R][C]; logic sb [R];

  function automatic logic [7:0] shadow(tgt_e f, int r, int c);
    case (f)
      TGT_WEIGHT: return {2'b00, sw[r][c]};
      TGT_ADDR:   return {2'b00, sa[r][c]};
      TGT_CALIB:  return {4'h0, sc[r][c]};
      default:    return {7'h0, sb[r]};
    endcase
  endfunction

  initial begin
    tgt_e fs [4];
    fs = '{TGT_WEIGHT, TGT_ADDR, TGT_CALIB, TGT_ROWCFG};
    rd_en = 0; wr_en = 0; half = 0; field = TGT_WEIGHT; row = 0; wdata = '0; wmask = '0;
    pre_addr = '0; pre_en = '0;
    for (int r = 0; r < R; r++) begin
      sb[r] = 0; for (int c = 0; c < C; c++) begin sw[r][c] = 0; sa[r][c] = 0; sc[r][c] = 0; end
    end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      wr_en = 0; rd_en = 0;
      field = fs[$urandom % 4]; row = 5'($urandom); half = 1'($urandom);
      if ($urandom % 3 != 0) begin
        wr_en = 1;
        for (int i = 0; i < C / 2; i++) begin wdata[i] = 8'($urandom); wmask[i] = 1'($urandom); end
        for (int i = 0; i < C / 2; i++) if (wmask[i]) begin
          int c; c = i + (half ? C / 2 : 0);
          case (field)
            TGT_WEIGHT: sw[row][c] = wdata[i][5:0];
            TGT_ADDR:   sa[row][c] = wdata[i][5:0];
            TGT_CALIB:  sc[row][c] = wdata[i][3:0];
            default: ;
          endcase
        end
        if (field == TGT_ROWCFG && wmask[0]) sb[row] = wdata[0][0];
        @(negedge clk); wr_en = 0;
      end else begin
        rd_en = 1;
        @(negedge clk); rd_en = 0;
        for (int c = 0; c < C; c++) begin
          checks++;
          if (rdata[c] != shadow(field, int'(row), c)) begin
            failures++; $display("FAIL read f=%0d r=%0d c=%0d got %h exp %h", field, row, c, rdata[c], shadow(field, int'(row), c));
          end
        end
      end
      // event inputs
      for (int r = 0; r < R; r++) begin pre_addr[r] = 6'($urandom); pre_en[r] = 1'($urandom); end
      if (t % 4 == 0) pre_addr[t % R] = sa[t % R][$urandom % C];
      #0.1;
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
        if (pre[r][c] != (pre_en[r] && pre_addr[r] == sa[r][c])) begin
          failures++; $display("FAIL pre r=%0d c=%0d", r, c);
        end
      end
      checks++;
      for (int r = 0; r < R; r++) begin
        checks++; if (row_sel_b[r] != sb[r]) begin failures++; $display("FAIL row_sel_b"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #40000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
