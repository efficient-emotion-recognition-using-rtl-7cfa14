// tb_vector_bank - self-checking test of the hypervector bank.
// Writes random words, reads them back on both ports in every address
// combination, and checks that a write lands only at its address and only at
// the clock edge.
module tb_vector_bank;
  localparam int unsigned D = 70, V = 7, AW = 3;
  logic clk = 0, we = 0;
  logic [AW-1:0] waddr = '0, ra = '0, rb = '0;
  logic [D-1:0]  wdata = '0, da, db;
  logic [D-1:0]  model [V];
  int checks = 0, failures = 0;

  vector_bank #(.D(D), .V(V)) dut (.clk, .we_i(we), .waddr_i(waddr), .wdata_i(wdata),
                                   .raddr_a_i(ra), .rdata_a_o(da), .raddr_b_i(rb), .rdata_b_o(db));
  always #5 clk = ~clk;

  function automatic logic [D-1:0] rnd();
    logic [D-1:0] v;
    for (int b = 0; b < D; b++) v[b] = $urandom_range(0, 1);
    return v;
  endfunction

  task automatic write(input int a, input logic [D-1:0] v);
    waddr = AW'(a); wdata = v; we = 1;
    @(posedge clk); #1; we = 0;
    model[a] = v;
  endtask

  task automatic readall();
    for (int a = 0; a < V; a++)
      for (int b = 0; b < V; b++) begin
        ra = AW'(a); rb = AW'(b); #1;
        checks++;
        if (da !== model[a] || db !== model[b]) begin
          failures++; $display("FAIL read %0d/%0d", a, b);
        end
      end
  endtask

  initial begin
    @(posedge clk); #1;
    for (int a = 0; a < V; a++) write(a, rnd());
    readall();
    for (int r = 0; r < 20; r++) begin
      int a; a = $urandom_range(0, V - 1);
      // before the edge the old word is still read
      @(negedge clk);
      waddr = AW'(a); wdata = rnd(); we = 1; ra = AW'(a); #1;
      checks++;
      if (da !== model[a]) begin failures++; $display("FAIL write before edge"); end
      @(posedge clk); #1; we = 0; model[a] = wdata;
      readall();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
