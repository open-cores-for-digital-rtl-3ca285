// Wishbone master tasks shared by the testbenches. The including module
// declares clk, stb, we, adr, wdat, rdat, ack, checks and failures.
// Each access raises stb with its address/data, holds it until ack and
// drops it on the clock edge after ack.

task automatic wb_write(input logic [31:0] a, input logic [31:0] d);
  stb <= 1'b1; we <= 1'b1; adr <= a; wdat <= d;
  do @(posedge clk); while (!ack);
  stb <= 1'b0; we <= 1'b0;
  @(posedge clk);
endtask

task automatic wb_read(input logic [31:0] a, output logic [31:0] d);
  stb <= 1'b1; we <= 1'b0; adr <= a;
  do @(posedge clk); while (!ack);
  d = rdat;
  stb <= 1'b0;
  @(posedge clk);
endtask

task automatic check32(input string what, input logic [31:0] got, input logic [31:0] exp);
  checks++;
  if (got !== exp) begin
    failures++;
    $display("FAIL %s: got %h expected %h", what, got, exp);
  end
endtask
