// tb_counter_atom -- exhaustive test of the three atoms.  For every
// combination of the bits an atom uses (weight-1 bits a, weight-2 bits b)
// and the carry input, s[0] + 2*s[1] + 4*cout must equal
// sum(a) + 2*sum(b) + cin; the unused inputs are driven randomly and must
// not matter.
module tb_counter_atom;
  import msum_pkg::*;
  logic [5:0] a [3];
  logic [1:0] b [3];
  logic       cin;
  logic [1:0] s [3];
  logic       cout [3];
  int checks = 0, failures = 0;

  counter_atom #(.KIND(ATOM_22)) u22 (.a(a[0]), .b(b[0]), .cin(cin), .s(s[0]), .cout(cout[0]));
  counter_atom #(.KIND(ATOM_14)) u14 (.a(a[1]), .b(b[1]), .cin(cin), .s(s[1]), .cout(cout[1]));
  counter_atom #(.KIND(ATOM_06)) u06 (.a(a[2]), .b(b[2]), .cin(cin), .s(s[2]), .cout(cout[2]));

  initial begin
    #100000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  localparam int NA [3] = '{2, 4, 6};   // weight-1 bits used
  localparam int NBW[3] = '{2, 1, 0};   // weight-2 bits used

  initial begin
    int e, r;
    for (int k = 0; k < 3; k++) begin
      for (int v = 0; v < (1 << (NA[k] + NBW[k] + 1)); v++) begin
        a[k] = 6'($urandom);
        b[k] = 2'($urandom);
        for (int i = 0; i < NA[k]; i++) a[k][i] = v[i];
        for (int i = 0; i < NBW[k]; i++) b[k][i] = v[NA[k] + i];
        cin = v[NA[k] + NBW[k]];
        #1;
        e = int'(cin);
        for (int i = 0; i < NA[k]; i++) e += int'(a[k][i]);
        for (int i = 0; i < NBW[k]; i++) e += 2*int'(b[k][i]);
        r = int'(s[k][0]) + 2*int'(s[k][1]) + 4*int'(cout[k]);
        checks++;
        if (r != e) begin
          failures++;
          if (failures < 10) $display("FAIL atom %0d a=%b b=%b cin=%b result %0d expected %0d", k, a[k], b[k], cin, r, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
