// l1_mem_model: behavioural stand-in for the core's L1 data cache as seen
// from the accelerator's memory request/response port. Not synthesizable.
// Requests are accepted when req_ready is high (randomly low a quarter of the
// time); each accepted request is answered in order, 1 to 4 cycles later, with
// the 64-bit word stored at its address (zero if never written). Contents are
// set by the testbench through the write_word task.
module l1_mem_model (
  input  logic        clk,
  input  logic        req_valid,
  output logic        req_ready,
  input  logic [63:0] req_addr,
  output logic        resp_valid,
  output logic [63:0] resp_data
);
  logic [63:0] mem [logic [63:0]];
  logic [63:0] pend_data [$];
  int          pend_due  [$];
  int          now = 0;
  int          last_due = 0;

  task automatic write_word(logic [63:0] addr, logic [63:0] data);
    mem[addr] = data;
  endtask

  initial begin
    req_ready  = 1'b0;
    resp_valid = 1'b0;
    resp_data  = '0;
  end

  always @(posedge clk) begin
    now++;
    if (req_valid && req_ready) begin
      automatic int due = now + $urandom_range(1, 4);
      if (due <= last_due) due = last_due + 1;   // keep responses in order
      last_due = due;
      pend_data.push_back(mem.exists(req_addr) ? mem[req_addr] : 64'd0);
      pend_due.push_back(due);
    end
    if (pend_due.size() > 0 && pend_due[0] <= now) begin
      resp_valid <= 1'b1;
      resp_data  <= pend_data.pop_front();
      void'(pend_due.pop_front());
    end else begin
      resp_valid <= 1'b0;
    end
    req_ready <= ($urandom_range(0, 3) != 0);
  end
endmodule
