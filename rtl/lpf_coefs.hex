fff6
ffe6
ffe3
fff2
0011
0032
003d
001f
ffdb
ff93
ff7e
ffc0
004c
00d9
00fe
007b
ff72
fe72
fe35
ff24
00fe
02c4
0336
018d
fe2c
fabd
f99b
fcb0
0457
0edf
1903
1f3a
1f3a
1903
0edf
0457
fcb0
f99b
fabd
fe2c
018d
0336
02c4
00fe
ff24
fe35
fe72
ff72
007b
00fe
00d9
004c
ffc0
ff7e
ff93
ffdb
001f
003d
0032
0011
fff2
ffe3
ffe6
fff6
