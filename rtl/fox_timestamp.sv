// fox_timestamp -- 64-bit time base for FOX monitor records.
//
// Every monitor record carries an 8-byte action timestamp. This block is a
// free-running counter that advances by one each clock; software (the kernel)
// may load it with an absolute time through load_en/load_val, after which it
// keeps counting from that value. The loaded value appears on ts the cycle
// after load_en. The description only names "the current TIMESTAMP"; using a
// loadable cycle counter as its source is this design's choice.
module fox_timestamp #(
  parameter int unsigned TS_W = 64
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            load_en,
  input  logic [TS_W-1:0] load_val,
  output logic [TS_W-1:0] ts
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       ts <= '0;
    else if (load_en) ts <= load_val;
    else              ts <= ts + 1'b1;
  end
endmodule
