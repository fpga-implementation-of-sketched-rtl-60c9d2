// readout_fifos_tb: 8-deep FIFOs.  Pushes 8 pixels (sketch words and photon
// counts), checks full, then reads all of FIFO_PC, FIFO1 and FIFO2 through
// the host mux in an interleaved order and compares each word (upper half
// of the sketch word to FIFO1, lower half to FIFO2), the one-clock read
// latency, that an extra push while full is dropped, and empty at the end.
module readout_fifos_tb;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int D = 8;
  logic rst_n, push, rd_en, fifo_sel, fetch_pc, rd_valid;
  logic [0:3][15:0] z;
  logic [15:0] pc;
  logic [31:0] rd_data;
  logic [2:0] empty, full;
  logic [3:0] cnt;
  int checks = 0, failures = 0;

  readout_fifos #(.DEPTH(D)) u_dut (.clk(clk), .rst_n(rst_n), .push(push), .z(z),
    .pc(pc), .rd_en(rd_en), .fifo_sel(fifo_sel), .fetch_pc(fetch_pc),
    .rd_data(rd_data), .rd_valid(rd_valid), .empty(empty), .full(full), .pc_count(cnt));

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  logic [63:0] zs [D];
  logic [15:0] pcs [D];
  int ip[3];

  task automatic read_one(int src);
    logic [31:0] exp;
    rd_en = 1'b1; fetch_pc = (src == 2); fifo_sel = (src == 1);
    @(negedge clk);
    rd_en = 1'b0; fetch_pc = 1'($urandom); fifo_sel = 1'($urandom);   // selects may change after
    case (src)
      0: exp = zs[ip[0]][63:32];
      1: exp = zs[ip[1]][31:0];
      default: exp = {16'd0, pcs[ip[2]]};
    endcase
    check($sformatf("valid src%0d", src), rd_valid, 1);
    check($sformatf("data src%0d #%0d", src, ip[src]), rd_data, exp);
    ip[src]++;
    @(negedge clk);
    check("valid drops", rd_valid, 0);
  endtask

  initial begin
    rst_n = 1'b0; push = 1'b0; rd_en = 1'b0; fifo_sel = 1'b0; fetch_pc = 1'b0;
    z = '0; pc = '0; ip = '{0, 0, 0};
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    check("empty at start", empty, 3'b111);
    for (int k = 0; k < D; k++) begin
      zs[k] = {$urandom, $urandom}; pcs[k] = 16'($urandom);
      push = 1'b1; z = zs[k]; pc = pcs[k];
      @(negedge clk);
    end
    check("full", full, 3'b111);
    check("count", cnt, D);
    z = '1; pc = '1;            // dropped
    @(negedge clk);
    push = 1'b0;
    check("count after drop", cnt, D);
    for (int k = 0; k < D; k++) begin
      read_one(2);
      read_one(0);
      read_one(1);
    end
    check("empty at end", empty, 3'b111);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
