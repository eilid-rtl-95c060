4031
5a5a
1234
ffff
0000
c0de
