// Behavioural stand-in for one core (the RISC-V core is not part of the
// RTL), used by the tile and cluster testbenches. It drives the core side of
// a qlr_unit: LSU requests, the operand fields of one instruction at a time,
// and a single-cycle ALU write-back (rd = rs1 + (rs2 or imm)) in the issue
// cycle. It keeps its own copy of the register file, written from the unit's
// register-file port, so QLR write-backs are seen exactly as a core would.
//
// Roles (parameter Role), all working on values base(j) = 7*j + 1:
//  1 mover: q.push base(j), j < N, to OutQ with explicit Xqueue requests.
//  2 compute PE: QLR t0 incoming from InQ (reuse Reuse), QLR t1 outgoing to
//    OutQ; per element Reuse-1 times x10 += t0, then t1 = t0 + Add.
//  3 forwarding PE: QLR t0 in-out from InQ to OutQ; x10 += t0 per read.
//  4 sink: q.pop N values from InQ (Slow idle cycles between pops), check
//    them, store their sum to ResAddr, load it back, amoadd 1 to DoneAddr.
//  5 probe: store/load at LocalAddr and RemoteAddr, measure answer latency.
// Every value read is compared with base(j) + InOff.
module pe_model
  import mempool_pkg::*;
#(
  parameter int    Role      = 0,
  parameter int    N         = 8,
  parameter addr_t InQ       = '0,
  parameter addr_t OutQ      = '0,
  parameter int    Reuse     = 1,
  parameter int    Add       = 0,
  parameter int    InOff     = 0,
  parameter int    Slow      = 0,
  parameter addr_t ResAddr   = '0,
  parameter addr_t DoneAddr  = '0,
  parameter addr_t LocalAddr = '0,
  parameter addr_t RemoteAddr = '0
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  logic      go_i,
  input  core_in_t  cin,
  output core_out_t cout,
  output logic      done_o,
  output int        checks_o,
  output int        failures_o,
  output int        amo_old_o,
  output int        lat_local_o,
  output int        lat_remote_o,
  output int        reuse_reads_o
);
  function automatic data_t base(int j); return data_t'(7 * j + 1); endfunction

  int cyc = 0;
  always @(negedge clk_i) cyc++;

  // register file copy
  data_t rf [32];
  initial for (int i = 0; i < 32; i++) rf[i] = '0;
  always @(posedge clk_i) if (cin.rf_we && cin.rf_waddr != 0) rf[cin.rf_waddr] <= cin.rf_wdata;

  // instruction at issue
  logic     i_valid = 0, i_rs2_used = 0;
  reg_idx_t i_rs1 = 0, i_rs2 = 0, i_rd = 0;
  data_t    i_imm = 0;
  // LSU request
  logic     r_valid = 0;
  mem_op_e  r_op = OP_LOAD;
  addr_t    r_addr = 0;
  data_t    r_wdata = 0;
  tag_t     r_tag = 0;

  always_comb begin
    cout             = '0;
    cout.req_valid   = r_valid;
    cout.req_op      = r_op;
    cout.req_addr    = r_addr;
    cout.req_wdata   = r_wdata;
    cout.req_be      = 4'hF;
    cout.req_tag     = r_tag;
    cout.instr_valid = i_valid;
    cout.rs1         = i_rs1;
    cout.rs1_used    = i_valid;
    cout.rs2         = i_rs2;
    cout.rs2_used    = i_valid && i_rs2_used;
    cout.rd          = i_rd;
    cout.rd_used     = i_valid;
    cout.issue       = i_valid && !cin.qlr_stall;
    cout.wb_valid    = cout.issue;
    cout.wb_rd       = i_rd;
    cout.wb_data     = rf[i_rs1] + (i_rs2_used ? rf[i_rs2] : i_imm);
  end

  // answers
  logic  got [256];
  data_t got_data [256];
  int    got_cyc [256];
  initial for (int i = 0; i < 256; i++) got[i] = 0;
  always @(posedge clk_i) if (cin.rsp_valid) begin
    got[cin.rsp_tag] = 1; got_data[cin.rsp_tag] = cin.rsp_rdata; got_cyc[cin.rsp_tag] = cyc;
  end

  int checks = 0, failures = 0;
  assign checks_o = checks;
  assign failures_o = failures;
  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("%m FAIL: %s", what); end
  endtask

  // send one request; returns the cycle of acceptance
  task automatic send(input mem_op_e op, input addr_t a, input data_t d, input int tag, output int acc);
    @(negedge clk_i);
    got[tag] = 0;
    r_valid = 1; r_op = op; r_addr = a; r_wdata = d; r_tag = tag_t'(tag);
    @(posedge clk_i);
    while (!cin.req_ready) @(posedge clk_i);
    acc = cyc;
    #1 r_valid = 0;
  endtask
  task automatic wait_rsp(input int tag);
    while (!got[tag]) @(posedge clk_i);
  endtask
  task automatic lsu(input mem_op_e op, input addr_t a, input data_t d, input int tag, output data_t r);
    int acc;
    send(op, a, d, tag, acc);
    wait_rsp(tag);
    r = got_data[tag];
  endtask
  task automatic csr(input int q, input int field, input data_t v);
    data_t r;
    lsu(OP_STORE, QlrCsrBase + addr_t'(16 * q + 4 * field), v, 200, r);
  endtask

  // one instruction; returns the value of rs1 at issue
  task automatic exec(input reg_idx_t rs1, input logic use_rs2, input reg_idx_t rs2,
                      input data_t imm, input reg_idx_t rd, output data_t v);
    @(negedge clk_i);
    i_valid = 1; i_rs1 = rs1; i_rs2 = rs2; i_rs2_used = use_rs2; i_imm = imm; i_rd = rd;
    @(posedge clk_i);
    while (cin.qlr_stall) @(posedge clk_i);
    v = rf[rs1];
    #1 i_valid = 0;
  endtask

  initial begin
    data_t v, sum, acc10;
    int acc;
    done_o = 0; amo_old_o = -1; lat_local_o = -1; lat_remote_o = -1; reuse_reads_o = 0;
    @(posedge rst_ni);
    case (Role)
      1: begin  // mover
        wait (go_i);
        for (int j = 0; j < N; j++) send(OP_QPUSH, OutQ, base(j), j % 128, acc);
        for (int j = (N > 128 ? N - 128 : 0); j < N; j++) wait_rsp(j % 128);
      end
      2, 3: begin  // compute or forwarding PE
        csr(0, 0, InQ);
        csr(0, 3, Reuse);
        if (Role == 3) begin
          csr(0, 1, OutQ);
          csr(0, 2, QLR_INOUT);
        end else begin
          csr(1, 1, OutQ);
          csr(1, 2, QLR_OUT);
          csr(0, 2, QLR_IN);
        end
        wait (go_i);
        acc10 = 0;
        for (int j = 0; j < N; j++) begin
          for (int r = 0; r < Reuse; r++) begin
            if (r < Reuse - 1 || Role == 3) begin
              exec(5'd5, 1, 5'd10, 0, 5'd10, v);   // x10 += t0
              acc10 += v;
              if (r > 0) reuse_reads_o++;
            end else begin
              exec(5'd5, 0, 5'd0, data_t'(Add), 5'd6, v);  // t1 = t0 + Add
              if (r > 0) reuse_reads_o++;
            end
            chk(v == base(j) + data_t'(InOff), $sformatf("PE input %0d: %0d", j, v));
          end
        end
        repeat (2) @(posedge clk_i);
        chk(rf[10] == acc10, "accumulator");
      end
      4: begin  // sink
        wait (go_i);
        sum = 0;
        for (int j = 0; j < N; j++) begin
          lsu(OP_QPOP, InQ, 0, j % 128, v);
          chk(v == base(j) + data_t'(InOff), $sformatf("sink value %0d: %0d", j, v));
          sum += v;
          repeat (Slow) @(posedge clk_i);
        end
        lsu(OP_STORE, ResAddr, sum, 201, v);
        lsu(OP_LOAD, ResAddr, 0, 202, v);
        chk(v == sum, "result stored and read back");
        lsu(OP_AMO_ADD, DoneAddr, 1, 203, v);
        amo_old_o = int'(v);
      end
      5: begin  // latency probe, before any other traffic
        lsu(OP_STORE, LocalAddr, 32'h1111, 210, v);
        lsu(OP_STORE, RemoteAddr, 32'h2222, 211, v);
        repeat (10) @(posedge clk_i);
        send(OP_LOAD, LocalAddr, 0, 212, acc);
        wait_rsp(212);
        lat_local_o = got_cyc[212] - acc;
        chk(got_data[212] == 32'h1111, "probe local data");
        send(OP_LOAD, RemoteAddr, 0, 213, acc);
        wait_rsp(213);
        lat_remote_o = got_cyc[213] - acc;
        chk(got_data[213] == 32'h2222, "probe remote data");
        // clear the completion counter used by the sinks
        lsu(OP_STORE, DoneAddr, 0, 214, v);
      end
      default: ;
    endcase
    done_o = 1;
  end
endmodule
