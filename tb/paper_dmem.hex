// data memory bytes: encrypted array at 0..55, plain key words at 104..119
45
87
56
f4
93
35
03
ab
a4
34
b7
b6
d8
48
d5
72
db
17
4d
61
42
b8
95
17
bd
0e
2e
97
98
96
13
61
d4
21
00
83
c9
e4
c2
d3
e9
b4
66
8a
e7
d3
ec
39
ca
92
69
ce
ff
2f
35
da
@68
4c
41
50
54
00
00
00
00
41
52
49
4b
00
00
00
00
