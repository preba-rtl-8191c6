7fff0000
7ffd0192
7ff50324
7fe904b6
7fd80648
7fc107d9
7fa6096a
7f860afb
7f610c8c
7f370e1c
7f090fab
7ed5113a
7e9c12c8
7e5f1455
7e1d15e2
7dd5176e
7d8918f9
7d391a82
7ce31c0b
7c881d93
7c291f1a
7bc5209f
7b5c2223
7aee23a6
7a7c2528
7a0526a8
79892826
790929a3
78842b1f
77fa2c99
776b2e11
76d82f87
764130fb
75a5326e
750433df
745f354d
73b536ba
73073824
7254398c
719d3af2
70e23c56
70223db8
6f5e3f17
6e964073
6dc941ce
6cf84325
6c23447a
6b4a45cd
6a6d471c
698b4869
68a649b4
67bc4afb
66cf4c3f
65dd4d81
64e84ebf
63ee4ffb
62f15133
61f05268
60eb539b
5fe354c9
5ed755f5
5dc7571d
5cb35842
5b9c5964
5a825a82
59645b9c
58425cb3
571d5dc7
55f55ed7
54c95fe3
539b60eb
526861f0
513362f1
4ffb63ee
4ebf64e8
4d8165dd
4c3f66cf
4afb67bc
49b468a6
4869698b
471c6a6d
45cd6b4a
447a6c23
43256cf8
41ce6dc9
40736e96
3f176f5e
3db87022
3c5670e2
3af2719d
398c7254
38247307
36ba73b5
354d745f
33df7504
326e75a5
30fb7641
2f8776d8
2e11776b
2c9977fa
2b1f7884
29a37909
28267989
26a87a05
25287a7c
23a67aee
22237b5c
209f7bc5
1f1a7c29
1d937c88
1c0b7ce3
1a827d39
18f97d89
176e7dd5
15e27e1d
14557e5f
12c87e9c
113a7ed5
0fab7f09
0e1c7f37
0c8c7f61
0afb7f86
096a7fa6
07d97fc1
06487fd8
04b67fe9
03247ff5
01927ffd
00007fff
fe6e7ffd
fcdc7ff5
fb4a7fe9
f9b87fd8
f8277fc1
f6967fa6
f5057f86
f3747f61
f1e47f37
f0557f09
eec67ed5
ed387e9c
ebab7e5f
ea1e7e1d
e8927dd5
e7077d89
e57e7d39
e3f57ce3
e26d7c88
e0e67c29
df617bc5
dddd7b5c
dc5a7aee
dad87a7c
d9587a05
d7da7989
d65d7909
d4e17884
d36777fa
d1ef776b
d07976d8
cf057641
cd9275a5
cc217504
cab3745f
c94673b5
c7dc7307
c6747254
c50e719d
c3aa70e2
c2487022
c0e96f5e
bf8d6e96
be326dc9
bcdb6cf8
bb866c23
ba336b4a
b8e46a6d
b797698b
b64c68a6
b50567bc
b3c166cf
b27f65dd
b14164e8
b00563ee
aecd62f1
ad9861f0
ac6560eb
ab375fe3
aa0b5ed7
a8e35dc7
a7be5cb3
a69c5b9c
a57e5a82
a4645964
a34d5842
a239571d
a12955f5
a01d54c9
9f15539b
9e105268
9d0f5133
9c124ffb
9b184ebf
9a234d81
99314c3f
98444afb
975a49b4
96754869
9593471c
94b645cd
93dd447a
93084325
923741ce
916a4073
90a23f17
8fde3db8
8f1e3c56
8e633af2
8dac398c
8cf93824
8c4b36ba
8ba1354d
8afc33df
8a5b326e
89bf30fb
89282f87
88952e11
88062c99
877c2b1f
86f729a3
86772826
85fb26a8
85842528
851223a6
84a42223
843b209f
83d71f1a
83781d93
831d1c0b
82c71a82
827718f9
822b176e
81e315e2
81a11455
816412c8
812b113a
80f70fab
80c90e1c
809f0c8c
807a0afb
805a096a
803f07d9
80280648
801704b6
800b0324
80030192
